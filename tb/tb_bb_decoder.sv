// tb_bb_decoder: random bb and lcnt words built field by field must decode to
// the same fields; other opcodes must not be taken for bb or lcnt.
module tb_bb_decoder;
  import bb_pkg::*;
  logic [31:0] instr;
  logic is_bb, is_lcnt, lc_set_ok;
  bb_info_t bbi;
  logic [1:0] lc_set;
  int checks = 0, failures = 0;

  bb_decoder dut (.instr, .is_bb, .bb(bbi), .is_lcnt, .lc_set, .lc_set_ok);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int i = 0; i < 300; i++) begin
      int n = (i == 0) ? 65536 : (i == 1) ? 1 : 1 + int'($urandom_range(0, 65535));
      bit seq = 1'($urandom);
      logic [3:0] ls = 4'($urandom), le = 4'($urandom);
      instr = {16'(n - 1), le, ls, seq, 7'b0001011};
      #1;
      check(is_bb && !is_lcnt, "bb recognised");
      check(int'(bbi.n) == n && bbi.seq == seq && bbi.ls == ls && bbi.le == le,
            $sformatf("bb fields n=%0d got %0d", n, bbi.n));
    end
    for (int rd = 0; rd < 8; rd++) begin
      instr = {12'h7ff, 5'd3, 3'b000, 5'(rd), 7'b0101011};
      #1;
      check(is_lcnt && !is_bb, "lcnt recognised");
      check(lc_set_ok == (rd >= 1 && rd <= 4), "lcnt set range");
      if (rd >= 1 && rd <= 4) check(int'(lc_set) == rd - 1, "lcnt set index");
    end
    for (int i = 0; i < 200; i++) begin
      instr = $urandom;
      if (instr[6:0] == 7'b0001011 || instr[6:0] == 7'b0101011) instr[6:0] = 7'b0110011;
      #1;
      check(!is_bb && !is_lcnt, "other opcode");
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
