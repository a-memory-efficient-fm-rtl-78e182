// tb_prefetch_monitor: drives the monitor through a build of random length
// (insertions at random legal positions, search results, the final $) and
// compares every register with values kept here; checks the full flag at
// N_MAX - 1 characters, the $ pointer and clear.
module tb_prefetch_monitor;
  import saii_pkg::*;
  localparam int unsigned PW = 6, N_MAX = 16;
  logic clk = 0, rst_n = 0, clear = 0;
  logic ins_done = 0, ins_dollar = 0, accept = 0, accept_last = 0, search_done = 0;
  logic [PW-1:0] ins_pos = 0, search_pos = 0;
  base_t ins_base = BASE_A;
  logic [PW-1:0] pend_pos, early_pos, len, dollar_pos;
  base_t early_base;
  logic last_seen, full, dollar_valid;
  int checks = 0, failures = 0;

  prefetch_monitor #(.PW(PW), .N_MAX(N_MAX)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int m_len, m_pend, m_early, m_base, nb;
    bit m_last;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 6; run++) begin
      nb = (run == 5) ? int'(N_MAX) - 1 : 1 + $urandom % 12;
      m_len = 0; m_pend = 0; m_early = 0; m_base = 0; m_last = 0;
      check(len == 0 && pend_pos == 0 && !dollar_valid && !last_seen, "cleared");
      for (int b = 0; b < nb; b++) begin
        // accept a base and insert it at the $ row
        @(negedge clk);
        accept = 1; accept_last = (b == nb - 1);
        ins_done = 1; ins_pos = PW'(m_pend); ins_base = base_t'($urandom % 4); ins_dollar = 0;
        m_early = m_pend; m_base = int'(ins_base); m_len++; m_last = accept_last;
        @(negedge clk);
        accept = 0; ins_done = 0;
        check(int'(len) == m_len && int'(early_pos) == m_early && int'(early_base) == m_base,
              $sformatf("after insert: len %0d early %0d", len, early_pos));
        check(last_seen == m_last, "last_seen");
        check(full == (m_len >= int'(N_MAX) - 1), $sformatf("full at len %0d", m_len));
        // search result: new $ row in [1, len]
        search_done = 1; search_pos = PW'(1 + $urandom % m_len); m_pend = int'(search_pos);
        @(negedge clk);
        search_done = 0;
        check(int'(pend_pos) == m_pend, "pend_pos takes the search result");
        check(int'(early_pos) == m_early, "early_pos kept through the search");
      end
      // final $
      ins_done = 1; ins_pos = PW'(m_pend); ins_base = BASE_A; ins_dollar = 1;
      @(negedge clk);
      ins_done = 0; ins_dollar = 0;
      check(dollar_valid && int'(dollar_pos) == m_pend && int'(len) == m_len + 1, "$ pointer");
      clear = 1;
      @(negedge clk);
      clear = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
