// tb_saii_top: end-to-end test of the SAII FM-index constructor.
//
// Runs a set of random DNA sequences through a small instance (K = 16,
// 256 characters, 4 first-stage adders) and checks, for each, the whole
// finished index against a reference computed here by plain suffix
// sorting: every BWT character, the $ row, every O-table entry, the C array
// and the length. It also checks the cycle count against the expected
// count 1 + 3n + sum over insertions of (1 + last segment - insertion
// segment), with the insertion positions taken from the reference suffix
// ranks, plus the cycles the constructor spent waiting for input.
// Mechanisms counted (each must occur): multi-segment sweeps, segments
// opened by an insertion, input stalls while prefetching, truncation of an
// over-long input, restart, a sequence of one base.
module tb_saii_top;
  import saii_pkg::*;

  localparam int unsigned K      = 16;
  localparam int unsigned N_MAX  = 256;
  localparam int unsigned GROUPS = 4;
  localparam int unsigned BLOCKS = N_MAX / K;
  localparam int unsigned AW     = $clog2(BLOCKS);
  localparam int unsigned PW     = $clog2(N_MAX) + 1;
  localparam int unsigned CW     = $clog2(N_MAX);
  localparam int unsigned LK     = $clog2(K);

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

  saii_top #(.K(K), .N_MAX(N_MAX), .GROUPS(GROUPS)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_multi = 0, n_fresh = 0, n_stall = 0, n_trunc = 0, n_restart = 0, n_single = 0;
  longint cyc = 0;
  longint busy_cycles = 0;
  int stall_cycles = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (busy) busy_cycles <= busy_cycles + 1;
    if (dut.state == ST_UPD) stall_cycles <= stall_cycles + 1;
    if (dut.state == ST_SWEEP && dut.u_ctrl.cur_q != dut.u_ctrl.b0_q && dut.u_ctrl.cur_q == dut.u_ctrl.blast_q)
      n_multi <= n_multi + 1;
    if (dut.state == ST_SWEEP && dut.ins_fresh) n_fresh <= n_fresh + 1;
  end

  initial begin
    repeat (200_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // s[0..n-1] bases 0..3, s[n] = -1 stands for $.
  int s[];
  int grank[];

  function automatic bit suf_less(int i, int j, int n);
    int a, b;
    while (1) begin
      a = (i <= n) ? ((i == n) ? -1 : s[i]) : -2;
      b = (j <= n) ? ((j == n) ? -1 : s[j]) : -2;
      if (a != b) return a < b;
      if (a == -1) return 0;
      i++; j++;
    end
  endfunction

  // Rank of suffix i among all suffixes of s (0..n).
  task automatic rank_all(int n);
    grank = new[n + 1];
    for (int i = 0; i <= n; i++) begin
      grank[i] = 0;
      for (int j = 0; j <= n; j++) if (j != i && suf_less(j, i, n)) grank[i]++;
    end
  endtask

  // Rank of suffix i among the suffixes of s[i..n].
  function automatic int rank_own(int i, int n);
    int r = 0;
    for (int j = i + 1; j <= n; j++) if (grank[j] < grank[i]) r++;
    return r;
  endfunction

  // Feed x (to be indexed) last base first; stall at random if asked.
  // Returns how many bases were accepted.
  task automatic feed(input int x[], input bit stalls, output int taken);
    int k = x.size() - 1;
    taken = 0;
    while (k >= 0 && !done) begin
      in_valid = !(stalls && ($urandom % 4 == 0));
      in_base  = base_t'(x[k]);
      in_last  = (k == 0);
      @(posedge clk);
      if (in_valid && in_ready) begin
        k--;
        taken++;
      end
      #1;
    end
    in_valid = 1'b0;
    in_last  = 1'b0;
  endtask

  task automatic run_one(input int n_in, input bit stalls);
    int x[];
    int n, taken, exp_dollar, got, exp_occ, r, ins;
    longint exp_cycles;
    int bwt_exp[];
    x = new[n_in];
    foreach (x[i]) x[i] = int'($urandom % 4);
    busy_cycles = 0;
    stall_cycles = 0;
    feed(x, stalls, taken);
    while (!done) @(posedge clk);
    #1;
    // The index covers the bases that were taken (the last ones of x).
    n = (n_in > int'(N_MAX) - 1) ? int'(N_MAX) - 1 : n_in;
    check(taken == n, $sformatf("n=%0d: %0d bases taken", n_in, taken));
    check(truncated == (n_in > n), $sformatf("n=%0d: truncated=%0b", n_in, truncated));
    if (n_in > n) n_trunc++;
    if (n == 1) n_single++;
    if (stall_cycles > 0) n_stall++;
    s = new[n + 1];
    for (int i = 0; i < n; i++) s[i] = x[n_in - n + i];
    s[n] = -1;
    rank_all(n);
    bwt_exp = new[n + 1];
    exp_dollar = -1;
    for (int i = 0; i <= n; i++) begin
      r = grank[i];
      if (i == 0) begin
        bwt_exp[r] = 0;
        exp_dollar = r;
      end else bwt_exp[r] = s[i - 1];
    end
    check(int'(seq_len) == n + 1, $sformatf("n=%0d: length %0d", n, seq_len));
    check(int'(dollar_pos) == exp_dollar, $sformatf("n=%0d: $ row %0d, expected %0d", n, dollar_pos, exp_dollar));
    for (int a = 0; a < 4; a++) begin
      int c;
      c = 0;
      for (int i = 0; i < n; i++) if (s[i] < a) c++;
      check(int'(c_arr[a]) == c, $sformatf("n=%0d: C(%0d)=%0d expected %0d", n, a, c_arr[a], c));
    end
    // Read the index back.
    for (int b = 0; b * int'(K) <= n; b++) begin
      idx_rd_en = 1'b1;
      idx_rd_addr = AW'(b);
      @(posedge clk);
      #1;
      idx_rd_en = 1'b0;
      for (int j = 0; j < int'(K) && b * int'(K) + j <= n; j++) begin
        int p, e;
        p   = b * int'(K) + j;
        e   = bwt_exp[p];
        got = int'(idx_bwt[2*j +: 2]);
        check(got == e, $sformatf("n=%0d: BWT[%0d]=%0d expected %0d", n, p, got, e));
      end
      for (int a = 0; a < 4; a++) begin
        exp_occ = 0;
        for (int p = 0; p < b * int'(K); p++) if (p != exp_dollar && bwt_exp[p] == a) exp_occ++;
        check(int'(idx_occ[a]) == exp_occ,
              $sformatf("n=%0d: O entry %0d base %0d = %0d expected %0d", n, b, a, idx_occ[a], exp_occ));
      end
    end
    // Cycle count: INIT, one search per base, one insertion per base after
    // the first plus the final $.
    exp_cycles = 1 + 3 * n;
    for (int i = n - 2; i >= -1; i--) begin
      // insertion of s[i] (or the $ when i = -1) at the $ row of s[i+1..]
      ins = rank_own(i + 1, n);
      exp_cycles += 1 + ((n - 1 - i) >> LK) - (ins >> LK);
    end
    check(1 + busy_cycles == exp_cycles + stall_cycles,
          $sformatf("n=%0d: %0d cycles, expected %0d (+%0d stalled)", n, 1 + busy_cycles, exp_cycles, stall_cycles));
    $display("n=%0d: %0d cycles (%0d stalled)", n, 1 + busy_cycles, stall_cycles);
    // Restart for the next sequence.
    restart = 1'b1;
    @(posedge clk);
    #1;
    restart = 1'b0;
    n_restart++;
    check(!done && in_ready, "restart returns to Initial");
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    run_one(1, 0);
    run_one(2, 0);
    run_one(5, 1);
    run_one(15, 0);
    run_one(16, 0);
    run_one(17, 1);
    run_one(33, 0);
    run_one(100, 1);
    run_one(180, 0);
    run_one(N_MAX - 1, 0);
    run_one(N_MAX + 20, 1);
    run_one(64, 0);
    $display("mechanisms: multi_segment_sweeps=%0d segments_opened=%0d stalled_runs=%0d truncated=%0d restarts=%0d single_base=%0d",
             n_multi, n_fresh, n_stall, n_trunc, n_restart, n_single);
    check(n_multi > 0, "multi-segment sweep seen");
    check(n_fresh > 0, "segment opened by an insertion seen");
    check(n_stall > 0, "input stall seen");
    check(n_trunc > 0, "truncation seen");
    check(n_restart > 0, "restart seen");
    check(n_single > 0, "single-base sequence seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
