// saii_top: SAII (Self-Aided Incremental Indexing) FM-index constructor.
//
// Builds the BWT, C array and incomplete O table of a DNA sequence that is
// fed in one base per cycle from its last base to its first. The index of
// the suffix read so far is kept at all times and extended by one base per
// iteration: a backward-search step on the index itself (search unit)
// finds where the new suffix ranks, and the BWT and O table are refreshed
// there (insert unit), one BRAM segment per cycle. With prefetch, the $ is
// never written until the end; the next base goes straight into its place
// (prefetch monitor). After the last base the $ is inserted, stored as A,
// and its row is given by dollar_pos.
//
// Interface
//   in_valid/in_ready/in_base/in_last  serial base input (in_last with the
//                                      first base of the sequence, sent last)
//   busy, done, truncated              status; truncated: input was cut at
//                                      N_MAX-1 bases
//   seq_len, dollar_pos, c_arr         index length ($ included), $ row, C(a)
//   idx_rd_en/idx_rd_addr              after done: read segment idx_rd_addr;
//   idx_bwt/idx_occ                    one cycle later: its characters and
//                                      its O-table entry (counts before it,
//                                      $ not counted)
//   restart                            in done: clear and take a new sequence
// Timing: per base, 3 search cycles + one cycle per segment from the
// insertion segment to the last, when the next base is offered in time.
// Defaults are the paper's FPGA build: K = 2,048, 131,072 characters,
// 32 first-stage pop-count adders.
module saii_top
  import saii_pkg::*;
#(
  parameter int unsigned K      = SAII_K,
  parameter int unsigned N_MAX  = SAII_N_MAX,
  parameter int unsigned GROUPS = SAII_GROUPS,
  localparam int unsigned BLOCKS = N_MAX / K,
  localparam int unsigned AW     = (BLOCKS > 1) ? $clog2(BLOCKS) : 1,
  localparam int unsigned OW     = $clog2(K),
  localparam int unsigned PW     = $clog2(N_MAX) + 1,
  localparam int unsigned CW     = $clog2(N_MAX)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                restart,
  input  logic                in_valid,
  output logic                in_ready,
  input  base_t               in_base,
  input  logic                in_last,
  output logic                busy,
  output logic                done,
  output logic                truncated,
  output logic [PW-1:0]       seq_len,
  output logic [PW-1:0]       dollar_pos,
  output logic [3:0][PW-1:0]  c_arr,
  input  logic                idx_rd_en,
  input  logic [AW-1:0]       idx_rd_addr,
  output logic [2*K-1:0]      idx_bwt,
  output logic [3:0][CW-1:0]  idx_occ
);

  // ---------------------------------------------------------------- control
  state_t        state;
  logic [PW-1:0] pend_pos, early_pos, len;
  base_t         early_base;
  logic          last_seen, full, dollar_valid;
  logic          mon_clear, mon_accept, mon_ins_done, mon_ins_dollar;
  logic [PW-1:0] mon_ins_pos;
  base_t         mon_ins_base;
  logic          c_clear, c_add;
  base_t         c_add_base;
  logic          ctl_rd_en, mem_wr_en, wr_init;
  logic [AW-1:0] ctl_rd_addr, mem_wr_addr;
  logic          ins_first, ins_count, ins_fresh;
  logic [OW-1:0] ins_off;
  base_t         ins_base, ins_carry, carry_out;
  logic          srch_start, srch_done;
  logic [PW-1:0] srch_pos;

  saii_ctrl #(.K(K), .BLOCKS(BLOCKS), .PW(PW)) u_ctrl (
    .clk, .rst_n, .restart,
    .in_valid, .in_ready, .in_base,
    .pend_pos, .early_pos, .len, .last_seen, .full,
    .mon_clear, .mon_accept, .mon_ins_done, .mon_ins_pos, .mon_ins_base, .mon_ins_dollar,
    .c_clear, .c_add, .c_add_base,
    .mem_rd_en(ctl_rd_en), .mem_rd_addr(ctl_rd_addr),
    .mem_wr_en, .mem_wr_addr, .wr_init,
    .ins_first, .ins_off, .ins_base, .ins_count, .ins_carry, .ins_fresh, .carry_out,
    .srch_start, .srch_pos,
    .state, .busy, .done, .truncated
  );

  prefetch_monitor #(.PW(PW), .N_MAX(N_MAX)) u_mon (
    .clk, .rst_n,
    .clear       (mon_clear),
    .ins_done    (mon_ins_done),
    .ins_pos     (mon_ins_pos),
    .ins_base    (mon_ins_base),
    .ins_dollar  (mon_ins_dollar),
    .accept      (mon_accept),
    .accept_last (in_last),
    .search_done (srch_done),
    .search_pos  (srch_pos),
    .pend_pos, .early_pos, .early_base, .len, .last_seen, .full,
    .dollar_valid, .dollar_pos
  );

  // ------------------------------------------------------------------ C array
  logic [3:0][PW-1:0] occ_all;
  logic [PW-1:0]      c_total;

  c_array #(.CW(PW)) u_c (
    .clk, .rst_n,
    .clear    (c_clear),
    .add_en   (c_add),
    .add_base (c_add_base),
    .c_arr    (c_arr),
    .occ_all  (occ_all),
    .total    (c_total)
  );

  // ----------------------------------------------------------------- memories
  logic               rd_en;
  logic [AW-1:0]      rd_addr;
  logic [2*K-1:0]     bwt_rd, bwt_wr, ins_block;
  logic [3:0][CW-1:0] occ_rd, occ_wr, ins_occ, ins_old_occ;

  assign rd_en   = (state == ST_FINISH) ? idx_rd_en   : ctl_rd_en;
  assign rd_addr = (state == ST_FINISH) ? idx_rd_addr : ctl_rd_addr;

  bwt_mem #(.K(K), .BLOCKS(BLOCKS)) u_bwt (
    .clk, .rd_en, .rd_addr, .rd_data(bwt_rd),
    .wr_en(mem_wr_en), .wr_addr(mem_wr_addr), .wr_data(bwt_wr)
  );

  otable_mem #(.BLOCKS(BLOCKS), .CW(CW)) u_occ (
    .clk, .rd_en, .rd_addr, .rd_data(occ_rd),
    .wr_en(mem_wr_en), .wr_addr(mem_wr_addr), .wr_data(occ_wr)
  );

  // --------------------------------------------------------------- insert unit
  // A segment opened by this insertion has no O entry yet; everything in the
  // BWT lies before it, so its entry starts from the per-base totals.
  always_comb begin
    for (int a = 0; a < 4; a++)
      ins_old_occ[a] = ins_fresh ? CW'(occ_all[a]) : occ_rd[a];
  end

  insert_unit #(.K(K), .CW(CW)) u_ins (
    .first     (ins_first),
    .off       (ins_off),
    .ins_base  (ins_base),
    .ins_count (ins_count),
    .carry_in  (ins_carry),
    .old_block (bwt_rd),
    .old_occ   (ins_old_occ),
    .new_block (ins_block),
    .new_occ   (ins_occ),
    .carry_out (carry_out)
  );

  // The first base is written as a segment of its own.
  always_comb begin
    if (wr_init) begin
      bwt_wr      = '0;
      bwt_wr[1:0] = in_base;
      occ_wr      = '0;
    end else begin
      bwt_wr = ins_block;
      occ_wr = ins_occ;
    end
  end

  // --------------------------------------------------------------- search unit
  search_unit #(.K(K), .GROUPS(GROUPS), .PW(PW), .CW(CW)) u_srch (
    .clk, .rst_n,
    .start        (srch_start),
    .sym          (early_base),
    .r_prev       (early_pos),
    .block        (bwt_rd),
    .occ          (occ_rd),
    .c_arr        (c_arr),
    .done         (srch_done),
    .r_low        (srch_pos)
  );

  // ------------------------------------------------------------------- status
  assign seq_len = len;
  assign idx_bwt = bwt_rd;
  assign idx_occ = occ_rd;

  // The C array counts exactly the bases in the BRAM.
  a_total_matches: assert property (@(posedge clk) disable iff (!rst_n)
    (state != ST_INIT) |-> (c_total == len - PW'(dollar_valid)))
    else $error("saii_top: C array total %0d, BRAM holds %0d", c_total, len);

endmodule
