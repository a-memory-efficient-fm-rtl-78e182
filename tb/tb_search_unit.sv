// tb_search_unit: random segments, O-table entries, C arrays and R(W);
// R(aW) must equal C(a) + entry(a) + (count of a in positions 0..(R(W)-1)
// mod K) + 1, or C(a) + 1 for R(W) = 0. Counting the start cycle as the
// first, done and the result must come in the third cycle (M = 3), to be
// registered at its end.
module tb_search_unit;
  import saii_pkg::*;
  localparam int unsigned K = 64, GROUPS = 8, PW = 14, CW = 13;
  logic clk = 0, rst_n = 0, start = 0, done;
  base_t sym = BASE_A;
  logic [PW-1:0] r_prev = '0, r_low;
  logic [2*K-1:0] block = '0;
  logic [3:0][CW-1:0] occ = '0;
  logic [3:0][PW-1:0] c_arr = '0;
  int checks = 0, failures = 0;

  search_unit #(.K(K), .GROUPS(GROUPS), .PW(PW), .CW(CW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int exp, off;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      for (int w = 0; w < int'(2*K/32); w++) block[32*w +: 32] = $urandom;
      for (int a = 0; a < 4; a++) begin
        occ[a]   = CW'($urandom % 2000);
        c_arr[a] = PW'($urandom % 4000);
      end
      sym = base_t'($urandom % 4);
      r_prev = (t % 10 == 0) ? '0 : PW'($urandom % 8000 + 1);
      start = 1;
      if (r_prev == 0) exp = int'(c_arr[sym]) + 1;
      else begin
        off = (int'(r_prev) - 1) % int'(K);
        exp = int'(c_arr[sym]) + int'(occ[sym]) + 1;
        for (int j = 0; j <= off; j++) if (block[2*j +: 2] == sym) exp++;
      end
      @(negedge clk);
      start = 0;
      block = ~block;   // inputs are only needed in the start cycle
      check(!done, "done too early");
      @(negedge clk);
      // Third cycle (finish search): result on r_low, taken at its end.
      check(done, "done in the third cycle");
      check(int'(r_low) == exp, $sformatf("R=%0d expected %0d", r_low, exp));
      @(negedge clk);
      check(!done, "done lasts one cycle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
