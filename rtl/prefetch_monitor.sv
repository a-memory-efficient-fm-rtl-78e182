// prefetch_monitor: bookkeeping for the prefetch (early update) scheme.
//
// Without prefetch each new base b would cost two sweeps over the BWT
// segments: write b over the $, then insert a new $ at the position the
// search returns. With prefetch the $ is never written during the build:
// once the next base arrives it is inserted directly where the $ would
// have gone, which is the same as inserting the $ and then overwriting
// it. The BRAM therefore always holds the current BWT minus its $ row,
// and this block remembers where that row is:
//   pend_pos    position of the (unwritten) $, where the next insertion goes;
//   early_pos   position the last base was written to early; it is R(L)
//               for the next search, and early_base is that base;
//   len         characters held in the BRAM;
//   last_seen   the last base of the input has been accepted;
//   dollar_*    the special $ pointer, valid once the final $ is written.
// A search only counts positions below early_pos, which the early write
// did not move, and C(a) does not change when an a is added, so the counts
// need no correction; an assertion checks every search result against the
// bounds a correct index must give. Keeping the early position and base
// follows the paper's "additional monitor"; the exact register set is this
// design's.
module prefetch_monitor
  import saii_pkg::*;
#(
  parameter int unsigned PW    = 18,
  parameter int unsigned N_MAX = 131072
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  // one insertion finished
  input  logic          ins_done,
  input  logic [PW-1:0] ins_pos,
  input  base_t         ins_base,
  input  logic          ins_dollar,
  // a base was accepted from the input
  input  logic          accept,
  input  logic          accept_last,
  // search result
  input  logic          search_done,
  input  logic [PW-1:0] search_pos,
  output logic [PW-1:0] pend_pos,
  output logic [PW-1:0] early_pos,
  output base_t         early_base,
  output logic [PW-1:0] len,
  output logic          last_seen,
  output logic          full,
  output logic          dollar_valid,
  output logic [PW-1:0] dollar_pos
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend_pos     <= '0;
      early_pos    <= '0;
      early_base   <= BASE_A;
      len          <= '0;
      last_seen    <= 1'b0;
      dollar_valid <= 1'b0;
      dollar_pos   <= '0;
    end else if (clear) begin
      pend_pos     <= '0;
      early_pos    <= '0;
      early_base   <= BASE_A;
      len          <= '0;
      last_seen    <= 1'b0;
      dollar_valid <= 1'b0;
      dollar_pos   <= '0;
    end else begin
      if (accept) last_seen <= accept_last;
      if (ins_done) begin
        len        <= len + 1'b1;
        early_pos  <= ins_pos;
        early_base <= ins_base;
        if (ins_dollar) begin
          dollar_valid <= 1'b1;
          dollar_pos   <= ins_pos;
        end
      end
      if (search_done) pend_pos <= search_pos;
    end
  end

  // Room is left for the final $.
  assign full = (len >= PW'(N_MAX - 1));

  // The new $ row lies between row 1 and the last row of a BWT of len+1 rows.
  a_pos_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    search_done |-> (search_pos >= PW'(1) && search_pos <= len))
    else $error("prefetch_monitor: search result %0d outside [1, %0d]", search_pos, len);

endmodule
