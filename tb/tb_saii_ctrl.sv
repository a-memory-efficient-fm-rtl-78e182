// tb_saii_ctrl: runs the controller alone, with the monitor's registers
// kept here and search results drawn at random. For every base it checks
// the state order Initial -> (POP1 POP2 FIN [UPD...] SWEEP...)* -> FINISH
// (FIN goes straight to SWEEP when the next base is offered), that
// the sweep reads and writes the segments from the insertion segment to
// the last one in order, the insert unit controls (first, offset, fresh
// segment), the read of the search segment, that a search takes 3 cycles,
// that the final $ is inserted without taking input, and truncation when
// the memory is full.
module tb_saii_ctrl;
  import saii_pkg::*;
  localparam int unsigned K = 4, BLOCKS = 8, PW = 6, N_MAX = K * BLOCKS;
  logic clk = 0, rst_n = 0, restart = 0, in_valid = 0, in_ready;
  base_t in_base = BASE_A;
  logic [PW-1:0] pend_pos = 0, early_pos = 0, len = 0, srch_pos = 0;
  logic last_seen = 0, full;
  logic mon_clear, mon_accept, mon_ins_done, mon_ins_dollar;
  logic [PW-1:0] mon_ins_pos;
  base_t mon_ins_base, c_add_base, ins_base, ins_carry, carry_out = BASE_A;
  logic c_clear, c_add, mem_rd_en, mem_wr_en, wr_init, ins_first, ins_count, ins_fresh, srch_start;
  logic [2:0] mem_rd_addr, mem_wr_addr;
  logic [1:0] ins_off;
  state_t state;
  logic busy, done, truncated;
  int checks = 0, failures = 0;
  int n_wait = 0, n_direct = 0;

  assign full = (len >= PW'(N_MAX - 1));

  saii_ctrl #(.K(K), .BLOCKS(BLOCKS), .PW(PW)) dut (.*);
  always #5 clk = ~clk;

  // Monitor registers, kept here.
  logic in_last = 0;
  always @(posedge clk) begin
    if (mon_clear) begin len <= 0; early_pos <= 0; last_seen <= 0; pend_pos <= 0; end
    else begin
      if (mon_accept) last_seen <= in_last;
      if (mon_ins_done) begin len <= len + 1; early_pos <= mon_ins_pos; end
      if (state == ST_FIN) pend_pos <= srch_pos;
    end
  end

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

  task automatic run(input int nb);
    int p, b0, bl, l, nbase;
    bit dollar;
    nbase = 0;
    // Initial: first base.
    @(negedge clk);
    check(state == ST_INIT && in_ready, "Initial takes input");
    in_valid = 1; in_base = base_t'($urandom % 4); in_last = (nb == 1);
    #1;
    check(wr_init && mem_wr_en && mem_wr_addr == 0 && mon_ins_done && c_add, "first base written to segment 0");
    @(negedge clk);
    in_valid = 0;
    nbase = 1;
    forever begin
      // Search: three cycles.
      check(state == ST_POP1 && srch_start, "POP1 starts the search");
      @(negedge clk) check(state == ST_POP2, "POP2");
      @(negedge clk) check(state == ST_FIN, "FIN");
      srch_pos = PW'(1 + $urandom % int'(len));   // search result
      #1;
      l = int'(len);
      p = int'(srch_pos);
      dollar = last_seen || full;
      if (!dollar) begin
        check(in_ready, "prefetch takes the next base in FIN");
        if ($urandom % 2 == 0) begin
          // no base offered: wait in UPD
          in_valid = 0;
          #1;
          check(!mem_rd_en, "no segment read without a base");
          @(negedge clk);
          check(state == ST_UPD && int'(pend_pos) == p, "waits in UPD with the registered row");
          repeat ($urandom % 3) begin
            @(negedge clk);
            check(state == ST_UPD && in_ready, "stall holds in UPD");
          end
          n_wait++;
        end else n_direct++;
        in_valid = 1; in_base = base_t'($urandom % 4); in_last = (nbase == nb - 1);
        #1;
      end else begin
        check(!in_ready, "no input taken for the $");
      end
      b0 = p / int'(K);
      bl = l / int'(K);
      check(mem_rd_en && int'(mem_rd_addr) == b0, "first segment read");
      @(negedge clk);
      in_valid = 0;
      for (int b = b0; b <= bl; b++) begin
        check(state == ST_SWEEP && mem_wr_en && int'(mem_wr_addr) == b, $sformatf("sweep writes segment %0d", b));
        check(ins_first == (b == b0) && int'(ins_off) == p % int'(K), "insert unit controls");
        check(ins_fresh == (b == bl && l % int'(K) == 0), "fresh segment flag");
        check(ins_count == !dollar, "inserted char counts unless $");
        if (b < bl) check(mem_rd_en && int'(mem_rd_addr) == b + 1, "next segment read");
        else begin
          check(mon_ins_done && int'(mon_ins_pos) == p, "insertion reported to the monitor");
          if (!dollar) check(mem_rd_en && int'(mem_rd_addr) == (p - 1) / int'(K), "search segment read");
        end
        @(negedge clk);
      end
      if (dollar) break;
      nbase++;
    end
    check(state == ST_FINISH && done, "Finish after the $");
    check(truncated == (nb > int'(N_MAX) - 1), "truncated flag");
    check(int'(len) == ((nb > int'(N_MAX) - 1) ? int'(N_MAX) : nb + 1), "length");
    restart = 1;
    @(negedge clk);
    restart = 0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(1);
    run(6);
    run(13);
    run(int'(N_MAX) - 1);
    run(int'(N_MAX) + 5);
    check(n_wait > 0 && n_direct > 0, "both direct prefetch and waiting seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
