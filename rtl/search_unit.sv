// search_unit: lower-bound step of backward search, R(aW) = C(a) + O(a, R(W)-1) + 1.
//
// O(a, i) is split as in the paper: the O-table entry of segment
// floor(i/K) (count before the segment) plus a pop count of a over
// positions 0 .. i mod K of that segment. The caller supplies that segment
// and its O-table entry in the cycle start is high. R(W) = 0 means
// O(a, -1) = 0, so only C(a) + 1 is returned.
// During construction the BRAM never holds the $ (see prefetch_monitor),
// so the count needs no correction for the $-as-A coding.
// Timing: start (cycle 0, 1st-stage pop count), 2nd-stage pop count
// (cycle 1), finish search (cycle 2): done is high in cycle 2 and r_low is
// the output of one adder on registered operands, to be registered by the
// user at the end of that cycle, i.e. M = 3 cycles as in the paper. The
// split of O and M = 3 are the paper's; the exact pipelining is this
// design's.
module search_unit
  import saii_pkg::*;
#(
  parameter int unsigned K      = 2048,
  parameter int unsigned GROUPS = 32,
  parameter int unsigned PW     = 18,   // position / C width
  parameter int unsigned CW     = 17,   // O-table entry width
  localparam int unsigned OW    = $clog2(K),
  localparam int unsigned NW    = $clog2(K + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  base_t               sym,
  input  logic [PW-1:0]       r_prev,
  input  logic [2*K-1:0]      block,
  input  logic [3:0][CW-1:0]  occ,
  input  logic [3:0][PW-1:0]  c_arr,
  output logic                done,
  output logic [PW-1:0]       r_low
);

  logic [OW-1:0] idx;
  logic          zero;
  logic [PW-1:0] base_d;

  always_comb begin
    zero   = (r_prev == '0);
    idx    = OW'(r_prev - 1'b1);   // offset inside the segment
    base_d = zero ? c_arr[sym] : c_arr[sym] + PW'(occ[sym]);
  end

  logic              pc_valid;
  logic [NW-1:0]     pc_count;

  pop_counter #(.K(K), .GROUPS(GROUPS)) u_pop (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (start),
    .block    (block),
    .sym      (sym),
    .off      (idx[OW-1:0]),
    .zero     (zero),
    .out_valid(pc_valid),
    .count    (pc_count)
  );

  // Side values travel with the two pop-count stages.
  logic [1:0][PW-1:0] base_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      base_q <= '0;
    end else begin
      if (start) begin
        base_q[0] <= base_d;
      end
      base_q[1] <= base_q[0];
    end
  end

  // Finish search: one adder on registered operands; the result is
  // registered by its user (the prefetch monitor).
  assign done  = pc_valid;
  assign r_low = base_q[1] + PW'(pc_count) + 1'b1;

endmodule
