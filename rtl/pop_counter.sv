// pop_counter: two-stage parallel pop counter over one BWT segment.
//
// Counts how often symbol sym occurs in positions 0..off (inclusive) of a
// K-character segment; with zero set the count is forced to 0.
// Stage 1 has GROUPS parallel adders, each summing the match flags of a
// K/GROUPS-character slice (32 adders of 64 characters by default);
// stage 2 adds the GROUPS partial sums. Each stage ends in a register, so
// count is valid two cycles after in_valid (out_valid marks it).
// The two-stage structure and the 32 first-stage adders are the paper's.
// The paper also says the second stage has 64 parallel adders, which does
// not fit a reduction of 32 partial sums; here 64 is the slice width of
// each first-stage adder, and stage 2 is a plain adder tree.
module pop_counter
  import saii_pkg::*;
#(
  parameter int unsigned K      = 2048,
  parameter int unsigned GROUPS = 32,
  localparam int unsigned OW    = $clog2(K),
  localparam int unsigned SEG   = K / GROUPS,
  localparam int unsigned PWID  = $clog2(SEG + 1),
  localparam int unsigned NW    = $clog2(K + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic [2*K-1:0]      block,
  input  base_t               sym,
  input  logic [OW-1:0]       off,
  input  logic                zero,
  output logic                out_valid,
  output logic [NW-1:0]       count
);

  // Stage 1: one adder per slice.
  logic [GROUPS-1:0][PWID-1:0] part_d, part_q;
  logic                        v1;

  always_comb begin
    for (int g = 0; g < GROUPS; g++) begin
      part_d[g] = '0;
      for (int j = 0; j < SEG; j++) begin
        if (!zero && (block[2*(g*SEG+j) +: 2] == sym) && ((g*SEG + j) <= int'(off)))
          part_d[g] = part_d[g] + 1'b1;
      end
    end
  end

  // Stage 2: sum of the partial counts.
  logic [NW-1:0] sum_d;
  always_comb begin
    sum_d = '0;
    for (int g = 0; g < GROUPS; g++) sum_d = sum_d + NW'(part_q[g]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1        <= 1'b0;
      out_valid <= 1'b0;
      part_q    <= '0;
      count     <= '0;
    end else begin
      v1        <= in_valid;
      out_valid <= v1;
      if (in_valid) part_q <= part_d;
      if (v1)       count  <= sum_d;
    end
  end

endmodule
