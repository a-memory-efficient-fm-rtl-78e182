// saii_ctrl: finite-state machine of the SAII FM-index constructor.
//
// States (see saii_pkg::state_t):
//   INIT    clears the C array and the monitor and takes the first base,
//           which becomes the whole BWT (one write to segment 0).
//   POP1, POP2, FIN
//           Search: the segment holding position R(L)-1 and its O-table
//           entry were read in the previous cycle; the search unit runs its
//           two pop-count stages and its final adder, and the monitor takes
//           the new $ position at the end of FIN. If the next base is
//           already waiting (or the input has ended), FIN also starts the
//           Update & Insert: it takes the base (or chooses the $) and reads
//           the segment that holds the new $ row.
//   UPD     Update & Insert waiting for the next base: entered from FIN
//           when no base was offered; does what FIN would have done as
//           soon as one is.
//   SWEEP   Update & Insert, one segment per cycle: the insert unit's
//           output is written back and the next segment read, until the
//           last used segment; then the search segment is read and the
//           FSM goes to POP1, or to FINISH after the $.
//   FINISH  the index is complete; the memories' read ports belong to the
//           index read port of the top; restart returns to INIT.
// Input: in_valid/in_ready handshake, one base per transfer, bases sent from
// the last one of the sequence to the first (in_last, with the first base
// of the sequence, goes to the monitor). A base is taken only in INIT and UPD.
// Timing per base: 3 (search) + number of segments from the insertion
// segment to the last one (SWEEP), plus any cycles spent waiting in UPD. If the BRAM is full (no room left
// but for the $) the $ is inserted at once and truncated is raised.
// The states and their order are those of the paper's state diagram and
// prefetch timing diagram; overlapping FIN with the start of Update &
// Insert, the UPD wait state and the input handshake are this design's.
module saii_ctrl
  import saii_pkg::*;
#(
  parameter int unsigned K      = 2048,
  parameter int unsigned BLOCKS = 64,
  parameter int unsigned PW     = 18,
  localparam int unsigned OW    = $clog2(K),
  localparam int unsigned AW    = (BLOCKS > 1) ? $clog2(BLOCKS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          restart,
  // serial base input
  input  logic          in_valid,
  output logic          in_ready,
  input  base_t         in_base,
  // monitor
  input  logic [PW-1:0] pend_pos,
  input  logic [PW-1:0] early_pos,
  input  logic [PW-1:0] len,
  input  logic          last_seen,
  input  logic          full,
  output logic          mon_clear,
  output logic          mon_accept,
  output logic          mon_ins_done,
  output logic [PW-1:0] mon_ins_pos,
  output base_t         mon_ins_base,
  output logic          mon_ins_dollar,
  // C array
  output logic          c_clear,
  output logic          c_add,
  output base_t         c_add_base,
  // memories (shared read port, write port)
  output logic          mem_rd_en,
  output logic [AW-1:0] mem_rd_addr,
  output logic          mem_wr_en,
  output logic [AW-1:0] mem_wr_addr,
  output logic          wr_init,     // write the INIT segment, not the insert unit's
  // insert unit
  output logic          ins_first,
  output logic [OW-1:0] ins_off,
  output base_t         ins_base,
  output logic          ins_count,
  output base_t         ins_carry,
  output logic          ins_fresh,   // segment opened by this insertion: seed O from totals
  input  base_t         carry_out,
  // search unit
  output logic          srch_start,
  input  logic [PW-1:0] srch_pos,
  // status
  output state_t        state,
  output logic          busy,
  output logic          done,
  output logic          truncated
);

  state_t        state_d;
  logic [PW-1:0] pos_q,   pos_d;      // insertion position
  logic [AW-1:0] b0_q,    b0_d;       // insertion segment
  logic [AW-1:0] blast_q, blast_d;    // last segment after the insertion
  logic [AW-1:0] cur_q,   cur_d;      // segment being rewritten
  logic          fresh_q, fresh_d;    // blast_q is opened by this insertion
  base_t         base_q,  base_d;
  logic          cnt_q,   cnt_d;      // inserted char is a base (not the $)
  base_t         carry_q, carry_d;
  logic          trunc_q, trunc_d;

  logic [PW-1:0] srch_idx;
  assign srch_idx = early_pos - 1'b1;

  // Insertion row: the search result in FIN, the monitor's copy in UPD.
  logic [PW-1:0] ins_pos_now;
  assign ins_pos_now = (state == ST_FIN) ? srch_pos : pend_pos;

  always_comb begin
    state_d  = state;
    pos_d    = pos_q;
    b0_d     = b0_q;
    blast_d  = blast_q;
    cur_d    = cur_q;
    fresh_d  = fresh_q;
    base_d   = base_q;
    cnt_d    = cnt_q;
    carry_d  = carry_q;
    trunc_d  = trunc_q;

    in_ready       = 1'b0;
    mon_clear      = 1'b0;
    mon_accept     = 1'b0;
    mon_ins_done   = 1'b0;
    mon_ins_pos    = pos_q;
    mon_ins_base   = base_q;
    mon_ins_dollar = !cnt_q;
    c_clear        = 1'b0;
    c_add          = 1'b0;
    c_add_base     = base_q;
    mem_rd_en      = 1'b0;
    mem_rd_addr    = cur_q;
    mem_wr_en      = 1'b0;
    mem_wr_addr    = cur_q;
    wr_init        = 1'b0;
    srch_start     = 1'b0;

    unique case (state)
      ST_INIT: begin
        in_ready = 1'b1;
        trunc_d  = 1'b0;
        if (in_valid) begin
          // The first base alone is the BWT once its $ is taken out.
          mon_accept     = 1'b1;
          mon_ins_done   = 1'b1;
          mon_ins_pos    = '0;
          mon_ins_base   = in_base;
          mon_ins_dollar = 1'b0;
          c_add          = 1'b1;
          c_add_base     = in_base;
          mem_wr_en      = 1'b1;
          mem_wr_addr    = '0;
          wr_init        = 1'b1;
          // Search segment read: R(L) = 0, so its contents are not used.
          mem_rd_en      = 1'b1;
          mem_rd_addr    = '0;
          state_d        = ST_POP1;
        end
      end

      ST_POP1: begin
        srch_start = 1'b1;
        state_d    = ST_POP2;
      end

      ST_POP2: state_d = ST_FIN;

      // Finish search and Update & Insert share their first cycle when the
      // next base is already waiting (prefetch): the new $ row comes
      // straight from the search unit's final adder. Otherwise the FSM
      // waits in UPD with the row the monitor has registered.
      ST_FIN, ST_UPD: begin
        if (last_seen || full) begin
          base_d  = BASE_A;        // the $ is stored as A
          cnt_d   = 1'b0;
          trunc_d = !last_seen;
        end else begin
          in_ready   = 1'b1;
          base_d     = in_base;
          cnt_d      = 1'b1;
          mon_accept = in_valid;
        end
        if (last_seen || full || in_valid) begin
          pos_d       = ins_pos_now;
          b0_d        = AW'(ins_pos_now >> OW);
          blast_d     = AW'(len >> OW);
          fresh_d     = (len[OW-1:0] == '0);
          cur_d       = AW'(ins_pos_now >> OW);
          carry_d     = BASE_A;
          mem_rd_en   = 1'b1;
          mem_rd_addr = AW'(ins_pos_now >> OW);
          state_d     = ST_SWEEP;
        end else begin
          state_d     = ST_UPD;
        end
      end

      ST_SWEEP: begin
        mem_wr_en   = 1'b1;
        mem_wr_addr = cur_q;
        carry_d     = carry_out;
        if (cur_q == blast_q) begin
          mon_ins_done = 1'b1;
          c_add        = cnt_q;
          if (!cnt_q) begin
            state_d = ST_FINISH;
          end else begin
            // Read the segment the next search counts in (it lies at or
            // below the one written now and is unchanged below pos_q).
            mem_rd_en   = 1'b1;
            mem_rd_addr = AW'((pos_q - 1'b1) >> OW);
            state_d     = ST_POP1;
          end
        end else begin
          cur_d       = cur_q + 1'b1;
          mem_rd_en   = 1'b1;
          mem_rd_addr = cur_q + 1'b1;
        end
      end

      ST_FINISH: begin
        if (restart) begin
          mon_clear = 1'b1;
          c_clear   = 1'b1;
          state_d   = ST_INIT;
        end
      end

      default: state_d = ST_INIT;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= ST_INIT;
      pos_q   <= '0;
      b0_q    <= '0;
      blast_q <= '0;
      cur_q   <= '0;
      fresh_q <= 1'b0;
      base_q  <= BASE_A;
      cnt_q   <= 1'b0;
      carry_q <= BASE_A;
      trunc_q <= 1'b0;
    end else begin
      state   <= state_d;
      pos_q   <= pos_d;
      b0_q    <= b0_d;
      blast_q <= blast_d;
      cur_q   <= cur_d;
      fresh_q <= fresh_d;
      base_q  <= base_d;
      cnt_q   <= cnt_d;
      carry_q <= carry_d;
      trunc_q <= trunc_d;
    end
  end

  assign ins_first = (cur_q == b0_q);
  assign ins_off   = pos_q[OW-1:0];
  assign ins_base  = base_q;
  assign ins_count = cnt_q;
  assign ins_carry = carry_q;
  assign ins_fresh = fresh_q && (cur_q == blast_q);
  assign busy      = (state != ST_INIT) && (state != ST_FINISH);
  assign done      = (state == ST_FINISH);
  assign truncated = trunc_q;

  // A search must never look at or above the early-written position.
  a_search_below_early: assert property (@(posedge clk) disable iff (!rst_n)
    (srch_start && early_pos != '0) |-> (srch_idx < early_pos))
    else $error("saii_ctrl: search index %0d not below early position %0d", srch_idx, early_pos);

endmodule
