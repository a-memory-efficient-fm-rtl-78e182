// tb_bwt_mem: checks the BWT block RAM: every word written reads back
// unchanged, read data appears exactly one cycle after the read, an
// unenabled read keeps its output, and a read of the word being written
// returns the old contents (read-first).
module tb_bwt_mem;
  localparam int unsigned K = 8, BLOCKS = 4, DW = 2 * K;
  logic clk = 0, rd_en = 0, wr_en = 0;
  logic [1:0] rd_addr = 0, wr_addr = 0;
  logic [DW-1:0] rd_data, wr_data = 0;
  logic [DW-1:0] model [BLOCKS];
  int checks = 0, failures = 0;

  bwt_mem #(.K(K), .BLOCKS(BLOCKS)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [DW-1:0] held;
    for (int r = 0; r < 3; r++) begin
      for (int a = 0; a < int'(BLOCKS); a++) begin
        @(negedge clk);
        wr_en = 1; wr_addr = 2'(a); wr_data = DW'($urandom); model[a] = wr_data;
      end
      @(negedge clk) wr_en = 0;
      for (int a = 0; a < int'(BLOCKS); a++) begin
        @(negedge clk);
        rd_en = 1; rd_addr = 2'(a);
        @(negedge clk);
        rd_en = 0;
        check(rd_data == model[a], $sformatf("word %0d: %h expected %h", a, rd_data, model[a]));
        held = rd_data;
        @(negedge clk);
        check(rd_data == held, "output held without rd_en");
      end
    end
    // Read-first on the word being written.
    @(negedge clk);
    rd_en = 1; rd_addr = 2; wr_en = 1; wr_addr = 2; wr_data = ~model[2];
    @(negedge clk);
    rd_en = 0; wr_en = 0;
    check(rd_data == model[2], "read-first returns old contents");
    model[2] = ~model[2];
    @(negedge clk) rd_en = 1; rd_addr = 2;
    @(negedge clk) rd_en = 0;
    check(rd_data == model[2], "new contents after the write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
