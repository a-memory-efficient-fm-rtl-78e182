// tb_saii_full: the constructor at its default size (K = 2,048, 131,072
// characters), filled to capacity.
//
// Feeds 131,071 random bases (the BRAM's 131,072 characters less the $),
// waits for the index, reads every segment back and checks it without a
// suffix sort: the BWT read back must invert (LF mapping from the $-suffix
// row, using C and ranks counted here from the BWT) to exactly the bases
// fed; every O-table entry must equal the counts before its segment,
// counted here; the C array and the $ row must agree. The cycle count must
// equal the one this design should take given the insertion rows (taken
// from the LF walk); it is printed next to the runtime model
// T = K * sum_{i=1}^{n/K} (3 + i/2).
module tb_saii_full;
  import saii_pkg::*;

  localparam int unsigned K      = SAII_K;
  localparam int unsigned N_MAX  = SAII_N_MAX;
  localparam int unsigned BLOCKS = N_MAX / K;
  localparam int unsigned AW     = $clog2(BLOCKS);
  localparam int unsigned PW     = $clog2(N_MAX) + 1;
  localparam int unsigned CW     = $clog2(N_MAX);
  localparam int          NSEQ   = int'(N_MAX) - 1;
  localparam int          LK     = $clog2(K);

  logic               clk = 1'b0;
  logic               rst_n = 1'b0;
  logic               restart = 1'b0;
  logic               in_valid = 1'b0;
  logic               in_ready;
  base_t              in_base = BASE_A;
  logic               in_last = 1'b0;
  logic               busy, done, truncated;
  logic [PW-1:0]      seq_len, dollar_pos;
  logic [3:0][PW-1:0] c_arr;
  logic               idx_rd_en = 1'b0;
  logic [AW-1:0]      idx_rd_addr = '0;
  logic [2*K-1:0]     idx_bwt;
  logic [3:0][CW-1:0] idx_occ;

  saii_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint busy_cycles = 0;

  always @(posedge clk) if (busy) busy_cycles <= busy_cycles + 1;

  initial begin
    repeat (6_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  int x[NSEQ];
  int bwt[NSEQ + 1];
  int occ_before[NSEQ + 1];   // occurrences of bwt[r] in bwt[0..r-1], $ excluded
  int row[NSEQ + 1];          // BWT row of suffix i, from the LF walk
  int fen[NSEQ + 2];          // Fenwick tree over rows

  function automatic void fen_add(int i);
    for (int j = i + 1; j <= NSEQ + 1; j += j & -j) fen[j]++;
  endfunction

  function automatic int fen_sum(int i);   // entries with row < i
    int t = 0;
    for (int j = i; j > 0; j -= j & -j) t += fen[j];
    return t;
  endfunction

  initial begin
    int k, n, r, c, bad, dpos;
    int cnt[4];
    int cexp[4];
    longint cycles, exp_cycles;
    int own;
    real model, dev;
    for (int i = 0; i < NSEQ; i++) x[i] = int'($urandom % 4);
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    // Feed the sequence from its last base to its first.
    k = NSEQ - 1;
    while (k >= 0) begin
      in_valid = 1'b1;
      in_base  = base_t'(x[k]);
      in_last  = (k == 0);
      @(posedge clk);
      if (in_ready) k--;
      #1;
    end
    in_valid = 1'b0;
    while (!done) @(posedge clk);
    #1;
    n = NSEQ;
    cycles = 1 + busy_cycles;
    check(!truncated, "not truncated");
    check(int'(seq_len) == n + 1, $sformatf("length %0d", seq_len));
    // Read back.
    for (int b = 0; b < int'(BLOCKS); b++) begin
      idx_rd_en = 1'b1;
      idx_rd_addr = AW'(b);
      @(posedge clk);
      #1;
      idx_rd_en = 1'b0;
      for (int j = 0; j < int'(K); j++) bwt[b*int'(K) + j] = int'(idx_bwt[2*j +: 2]);
      // O entry: counts before the segment, counted from what was read so far.
      cnt = '{0, 0, 0, 0};
      for (int p = 0; p < b * int'(K); p++) if (p != int'(dollar_pos)) cnt[bwt[p]]++;
      for (int a = 0; a < 4; a++)
        check(int'(idx_occ[a]) == cnt[a], $sformatf("O entry %0d base %0d = %0d, expected %0d", b, a, idx_occ[a], cnt[a]));
    end
    dpos = int'(dollar_pos);
    // C array and ranks from the BWT read back.
    cnt = '{0, 0, 0, 0};
    for (int p = 0; p <= n; p++) begin
      if (p == dpos) continue;
      occ_before[p] = cnt[bwt[p]];
      cnt[bwt[p]]++;
    end
    cexp[0] = 0;
    for (int a = 1; a < 4; a++) cexp[a] = cexp[a-1] + cnt[a-1];
    for (int a = 0; a < 4; a++) begin
      int xc;
      xc = 0;
      for (int i = 0; i < n; i++) if (x[i] < a) xc++;
      check(int'(c_arr[a]) == xc, $sformatf("C(%0d) = %0d, expected %0d", a, c_arr[a], xc));
      check(cexp[a] == xc, $sformatf("BWT base counts give C(%0d) = %0d, expected %0d", a, cexp[a], xc));
    end
    // Invert: row 0 is the suffix "$"; its BWT character is the last base.
    r = 0;
    bad = 0;
    for (int i = n - 1; i >= 0; i--) begin
      if (r == dpos || r < 0 || r > n) begin
        bad++;
        break;
      end
      row[i + 1] = r;
      c = bwt[r];
      if (c != x[i]) bad++;
      r = 1 + cexp[c] + occ_before[r];
    end
    check(bad == 0, $sformatf("inverse BWT: %0d mismatches", bad));
    check(r == dpos, $sformatf("LF walk ends at row %0d, $ row is %0d", r, dpos));
    row[0] = r;
    // Exact cycle count of this design: the base taken by suffix t
    // (t < n, and the $ for t = 0) is inserted at the row suffix t has
    // among its own suffixes, into a BWT of n - t characters.
    for (int j = 0; j <= n + 1; j++) fen[j] = 0;
    exp_cycles = 1 + 3 * longint'(n);
    for (int t = n; t >= 0; t--) begin
      own = fen_sum(row[t]);
      fen_add(row[t]);
      if (t < n) exp_cycles += 1 + ((n - t) >> LK) - (own >> LK);
    end
    check(cycles == exp_cycles, $sformatf("%0d cycles, expected %0d", cycles, exp_cycles));
    // Runtime model of the paper.
    model = 0.0;
    for (int i = 1; i <= int'(BLOCKS); i++) model += real'(K) * (3.0 + real'(i) / 2.0);
    dev = (real'(cycles) - model) / model;
    $display("n=%0d bases: %0d cycles, model %0.0f, deviation %0.3f", n, cycles, model, dev);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
