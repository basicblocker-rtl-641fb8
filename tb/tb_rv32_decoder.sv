// tb_rv32_decoder: decodes one instruction of every class and checks the
// control bundle fields against hand-worked values; also checks that illegal
// encodings are flagged.
module tb_rv32_decoder;
  import bb_pkg::*;
  import tb_asm_pkg::*;
  logic [31:0] instr;
  ctrl_t ctrl;
  int checks = 0, failures = 0;

  rv32_decoder dut (.instr, .ctrl);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    instr = addi(5, 6, -3); #1;
    check(ctrl.legal && ctrl.reg_write && ctrl.src_b_imm && ctrl.alu_op == ALU_ADD &&
          ctrl.imm == 32'hffff_fffd && ctrl.uses_rs1 && !ctrl.uses_rs2 && ctrl.cf == CF_NONE, "addi");
    instr = sub(1, 2, 3); #1;
    check(ctrl.legal && ctrl.alu_op == ALU_SUB && ctrl.uses_rs2 && !ctrl.src_b_imm, "sub");
    instr = mul(1, 2, 3); #1;
    check(ctrl.legal && ctrl.alu_op == ALU_MUL, "mul");
    instr = mext(1, 1, 2, 3); #1;
    check(ctrl.legal && ctrl.alu_op == ALU_MULH && ctrl.reg_write, "mulh");
    instr = div(1, 2, 3); #1;
    check(ctrl.legal && ctrl.alu_op == ALU_DIV && ctrl.uses_rs2, "div");
    instr = remu(1, 2, 3); #1;
    check(ctrl.legal && ctrl.alu_op == ALU_REMU, "remu");
    instr = lw(1, 2, 8); #1;
    check(ctrl.legal && ctrl.mem_read && ctrl.reg_write && ctrl.imm == 8 && ctrl.mem_funct3 == 3'b010, "lw");
    instr = sw(1, 2, -4); #1;
    check(ctrl.legal && ctrl.mem_write && !ctrl.reg_write && ctrl.imm == 32'hffff_fffc, "sw");
    instr = bne(1, 2, -8); #1;
    check(ctrl.legal && ctrl.cf == CF_BRANCH && ctrl.br_funct3 == 3'b001 && ctrl.imm == 32'hffff_fff8 &&
          !ctrl.reg_write, "bne");
    instr = jal(1, 2048); #1;
    check(ctrl.legal && ctrl.cf == CF_JAL && ctrl.reg_write && ctrl.imm == 2048, "jal");
    instr = jalr(0, 1, 4); #1;
    check(ctrl.legal && ctrl.cf == CF_JALR && ctrl.uses_rs1 && ctrl.imm == 4, "jalr");
    instr = lui(3, 20'h12345); #1;
    check(ctrl.legal && ctrl.alu_op == ALU_PASSB && ctrl.imm == 32'h1234_5000, "lui");
    instr = 32'h00001097; #1;  // auipc x1, 1
    check(ctrl.legal && ctrl.src_a_pc && ctrl.imm == 32'h1000, "auipc");
    instr = ebreak(); #1;
    check(ctrl.legal && ctrl.halt, "ebreak");
    instr = lcnt(1, 4, 3); #1;
    check(ctrl.legal && ctrl.uses_rs1 && ctrl.imm == 3 && !ctrl.reg_write && ctrl.cf == CF_NONE, "lcnt");
    instr = bb(5, 1); #1;
    check(ctrl.legal && !ctrl.reg_write && !ctrl.mem_write && ctrl.cf == CF_NONE, "bb no datapath effect");
    instr = 32'h0; #1;
    check(!ctrl.legal, "zero word illegal");
    instr = 32'hffff_ffff; #1;
    check(!ctrl.legal, "all-ones illegal");
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
