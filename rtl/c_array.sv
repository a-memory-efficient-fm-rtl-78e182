// c_array: the C array of the FM-index.
//
// C(a) is the number of bases in the indexed suffix that are lexically
// smaller than a (the $ is not counted). Each accepted base b adds one to
// C(a) for every a > b, so C(A) stays 0. The block also keeps the number of
// bases so far (total) and derives from it the per-base totals
// occ_all(a) = C(a+1) - C(a), occ_all(T) = total - C(T), which the
// controller needs to seed the O-table entry of a newly opened segment.
// Timing: counters change on the clock edge after add_en; outputs are
// registered values (plus the combinational differences).
// The definition of C is the paper's; keeping it in registers and the
// extra total counter are this design's choices.
module c_array
  import saii_pkg::*;
#(
  parameter int unsigned CW = 18
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clear,
  input  logic                add_en,
  input  base_t               add_base,
  output logic [3:0][CW-1:0]  c_arr,
  output logic [3:0][CW-1:0]  occ_all,
  output logic [CW-1:0]       total
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_arr <= '0;
      total <= '0;
    end else if (clear) begin
      c_arr <= '0;
      total <= '0;
    end else if (add_en) begin
      total <= total + 1'b1;
      for (int a = 0; a < 4; a++) begin
        if (a > int'(add_base)) c_arr[a] <= c_arr[a] + 1'b1;
      end
    end
  end

  always_comb begin
    for (int a = 0; a < 3; a++) occ_all[a] = c_arr[a+1] - c_arr[a];
    occ_all[3] = total - c_arr[3];
  end

endmodule
