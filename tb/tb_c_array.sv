// tb_c_array: feeds random bases to the C array and compares C(a), the
// per-base totals and the total with counts kept here; checks clear and
// that nothing changes without add_en.
module tb_c_array;
  import saii_pkg::*;
  localparam int unsigned CW = 10;
  logic clk = 0, rst_n = 0, clear = 0, add_en = 0;
  base_t add_base = BASE_A;
  logic [3:0][CW-1:0] c_arr, occ_all;
  logic [CW-1:0] total;
  int cnt[4];
  int checks = 0, failures = 0;

  c_array #(.CW(CW)) dut (.*);
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

  task automatic compare();
    int c, t;
    c = 0; t = 0;
    for (int a = 0; a < 4; a++) begin
      check(int'(c_arr[a]) == c, $sformatf("C(%0d)=%0d expected %0d", a, c_arr[a], c));
      check(int'(occ_all[a]) == cnt[a], $sformatf("total(%0d)=%0d expected %0d", a, occ_all[a], cnt[a]));
      c += cnt[a];
      t += cnt[a];
    end
    check(int'(total) == t, $sformatf("total=%0d expected %0d", total, t));
  endtask

  initial begin
    cnt = '{0, 0, 0, 0};
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 2; round++) begin
      for (int i = 0; i < 300; i++) begin
        @(negedge clk);
        add_en = ($urandom % 3) != 0;
        add_base = base_t'($urandom % 4);
        if (add_en) cnt[add_base]++;
        @(negedge clk);
        add_en = 0;
        compare();
      end
      @(negedge clk) clear = 1;
      @(negedge clk) clear = 0;
      cnt = '{0, 0, 0, 0};
      compare();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
