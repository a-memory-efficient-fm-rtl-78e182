// tb_pop_counter: random segments, symbols and end offsets; the count two
// cycles later must equal a plain loop count over positions 0..off, and
// out_valid must rise exactly two cycles after in_valid. K = 256 keeps the
// default 32 first-stage adders (8-character slices).
module tb_pop_counter;
  import saii_pkg::*;
  localparam int unsigned K = 256, GROUPS = 32;
  logic clk = 0, rst_n = 0, in_valid = 0, zero = 0, out_valid;
  logic [2*K-1:0] block = '0;
  base_t sym = BASE_A;
  logic [7:0] off = '0;
  logic [8:0] count;
  int checks = 0, failures = 0;

  pop_counter #(.K(K), .GROUPS(GROUPS)) dut (.*);
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
    int exp;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      for (int w = 0; w < int'(2*K/32); w++) block[32*w +: 32] = $urandom;
      sym = base_t'($urandom % 4);
      off = (t % 5 == 0) ? 8'(K - 1) : 8'($urandom);
      zero = (t % 17 == 3);
      in_valid = 1;
      exp = 0;
      if (!zero) for (int j = 0; j <= int'(off); j++) if (block[2*j +: 2] == sym) exp++;
      @(negedge clk);
      in_valid = 0;
      check(!out_valid, "out_valid not after one cycle");
      @(negedge clk);
      check(out_valid, "out_valid after two cycles");
      check(int'(count) == exp, $sformatf("count %0d expected %0d (off %0d)", count, exp, off));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
