// tb_bb_checker: feeds instruction sequences of legal and illegal blocks to
// the checker and compares the exception and its cause with the BasicBlocker
// rules: one control-flow instruction in a non-sequential block, none in a
// sequential one, no bb inside a block, enforced bb at block starts.
module tb_bb_checker;
  import bb_pkg::*;
  logic clk = 0, rst_n = 0;
  logic ex_valid, ex_first, ex_last, ex_nocf, ex_is_bb, ex_is_cf, ex_illegal, not_bb;
  slot_t ex_slot;
  logic [31:0] ex_pc, not_bb_pc, e_pc;
  logic exc, e_flag;
  exc_t exc_cause, e_cause;
  int checks = 0, failures = 0;

  bb_checker dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic reset();
    rst_n = 0; #1; rst_n = 1; #1;
  endtask

  // one body instruction; returns the cause seen
  task automatic instr(input int pc, input bit first, input bit last, input bit nocf,
                       input bit is_cf, input bit is_bb, output exc_t cause);
    ex_valid = 1; ex_slot = SLOT_BODY; ex_pc = 32'(pc); ex_first = first; ex_last = last;
    ex_nocf = nocf; ex_is_cf = is_cf; ex_is_bb = is_bb; ex_illegal = 0;
    #1;
    cause = exc ? exc_cause : EXC_NONE;
    @(posedge clk); #1;
    ex_valid = 0;
  endtask

  exc_t c;
  initial begin
    ex_valid = 0; ex_slot = SLOT_NONE; ex_pc = 0; ex_first = 0; ex_last = 0; ex_nocf = 0;
    ex_is_bb = 0; ex_is_cf = 0; ex_illegal = 0; not_bb = 0; not_bb_pc = 0;
    repeat (2) @(posedge clk);
    reset();
    // legal: non-seq block of 3 with branch in the middle, then seq block of 2
    instr(4, 1, 0, 0, 0, 0, c); check(c == EXC_NONE, "legal 1");
    instr(8, 0, 0, 0, 1, 0, c); check(c == EXC_NONE, "legal branch");
    instr(12, 0, 1, 0, 0, 0, c); check(c == EXC_NONE, "legal end");
    instr(20, 1, 0, 1, 0, 0, c); check(c == EXC_NONE, "legal seq");
    instr(24, 1, 1, 0, 1, 0, c); check(c == EXC_NONE, "one-instruction block with its branch");
    // a bb arriving in a bb slot is not checked
    ex_valid = 1; ex_slot = SLOT_BB; ex_is_bb = 1; ex_first = 0; ex_last = 0; ex_is_cf = 0; #1;
    check(!exc, "bb slot ignored"); @(posedge clk); #1; ex_valid = 0;
    check(!e_flag, "no flag after legal code");
    // missing control flow
    instr(40, 1, 0, 0, 0, 0, c);
    instr(44, 0, 1, 0, 0, 0, c); check(c == EXC_NO_CF, "missing cf");
    check(e_flag && e_cause == EXC_NO_CF && e_pc == 44, "sticky flag and pc");
    reset();
    instr(40, 1, 0, 1, 1, 0, c); check(c == EXC_NONE, "cf in sequential block: pending");
    instr(44, 0, 1, 1, 0, 0, c); check(c == EXC_CF_IN_SEQ, "cf in sequential block: at block end");
    check(e_pc == 44, "raised after the last instruction");
    reset();
    instr(40, 1, 0, 0, 1, 0, c); check(c == EXC_NONE, "first cf");
    instr(44, 0, 0, 0, 1, 0, c); check(c == EXC_NONE, "second cf: pending");
    instr(48, 0, 1, 0, 0, 0, c); check(c == EXC_EXTRA_CF, "second cf: at block end");
    reset();
    instr(40, 1, 0, 1, 1, 0, c); check(c == EXC_NONE, "pending");
    instr(44, 1, 1, 1, 0, 0, c); check(c == EXC_NONE, "pending state cleared by a new block");
    reset();
    instr(40, 1, 0, 1, 0, 1, c); check(c == EXC_BB_IN_BLOCK, "bb inside block");
    reset();
    ex_valid = 1; ex_slot = SLOT_BODY; ex_first = 1; ex_last = 1; ex_nocf = 1; ex_is_cf = 0;
    ex_is_bb = 0; ex_illegal = 1; #1;
    check(exc && exc_cause == EXC_ILLEGAL, "illegal"); @(posedge clk); #1; ex_valid = 0;
    reset();
    not_bb = 1; not_bb_pc = 32'h80; @(posedge clk); #1; not_bb = 0;
    check(e_flag && e_cause == EXC_NOT_BB && e_pc == 32'h80, "enforced bb");
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
