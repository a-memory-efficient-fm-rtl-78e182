// tb_insert_unit: random segments and insertions. A segment holding the
// insertion point must keep its head, take the new character at off and
// move the tail up; a later segment must take carry_in first; carry_out is
// the old last character; the O entry changes by +[inserted] (bases only)
// -[carry_in] for later segments and not at all for the first.
module tb_insert_unit;
  import saii_pkg::*;
  localparam int unsigned K = 16, CW = 8;
  logic first = 0, ins_count = 0;
  logic [3:0] off = 0;
  base_t ins_base = BASE_A, carry_in = BASE_A, carry_out;
  logic [2*K-1:0] old_block = 0, new_block;
  logic [3:0][CW-1:0] old_occ = 0, new_occ;
  int checks = 0, failures = 0;

  insert_unit #(.K(K), .CW(CW)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int e[K];
    int eo;
    for (int t = 0; t < 600; t++) begin
      old_block = 32'($urandom);
      first     = $urandom % 2;
      off       = 4'($urandom);
      ins_base  = base_t'($urandom % 4);
      ins_count = ($urandom % 4) != 0;
      carry_in  = base_t'($urandom % 4);
      for (int a = 0; a < 4; a++) old_occ[a] = CW'($urandom % 200 + 1);
      #1;
      for (int j = 0; j < int'(K); j++) begin
        if (first) e[j] = (j < int'(off)) ? int'(old_block[2*j +: 2]) :
                          (j == int'(off)) ? int'(ins_base) : int'(old_block[2*(j-1) +: 2]);
        else       e[j] = (j == 0) ? int'(carry_in) : int'(old_block[2*(j-1) +: 2]);
        check(int'(new_block[2*j +: 2]) == e[j], $sformatf("t=%0d pos %0d", t, j));
      end
      check(carry_out == base_t'(old_block[2*K-1 -: 2]), "carry_out");
      for (int a = 0; a < 4; a++) begin
        eo = int'(old_occ[a]);
        if (!first) eo = eo + ((ins_count && a == int'(ins_base)) ? 1 : 0) - ((a == int'(carry_in)) ? 1 : 0);
        check(int'(new_occ[a]) == eo, $sformatf("t=%0d occ %0d = %0d expected %0d", t, a, new_occ[a], eo));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
