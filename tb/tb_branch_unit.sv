// tb_branch_unit: random conditional branches, JAL and JALR; the outcome must
// be the jump target when taken and the block fall-through otherwise, and the
// link value is always the fall-through address.
module tb_branch_unit;
  import bb_pkg::*;
  cf_kind_t cf;
  logic [2:0] funct3;
  logic [31:0] pc, rs1, rs2, imm, fallthrough, target, link;
  logic taken;
  int checks = 0, failures = 0;
  bit exp_taken;
  logic [31:0] exp_target;

  branch_unit dut (.*);

  initial begin
    for (int i = 0; i < 3000; i++) begin
      cf = cf_kind_t'($urandom_range(0, 3));
      funct3 = 3'($urandom);
      pc = $urandom & ~32'd3; imm = 32'($signed(13'($urandom)));
      rs1 = $urandom; rs2 = (i % 4 == 0) ? rs1 : $urandom;
      fallthrough = $urandom & ~32'd3;
      #1;
      case (funct3)
        3'b000: exp_taken = rs1 == rs2;
        3'b001: exp_taken = rs1 != rs2;
        3'b100: exp_taken = int'(rs1) < int'(rs2);
        3'b101: exp_taken = int'(rs1) >= int'(rs2);
        3'b110: exp_taken = longint'(rs1) < longint'(rs2);
        3'b111: exp_taken = longint'(rs1) >= longint'(rs2);
        default: exp_taken = 0;
      endcase
      if (cf == CF_NONE) exp_taken = 0;
      if (cf == CF_JAL || cf == CF_JALR) exp_taken = 1;
      exp_target = !exp_taken ? fallthrough :
                   (cf == CF_JALR) ? ((rs1 + imm) & 32'hffff_fffe) : pc + imm;
      checks++;
      if (taken != exp_taken || target != exp_target || link != fallthrough) begin
        failures++;
        $display("FAIL: cf=%0d f3=%0d taken=%0d/%0d target=%h/%h", cf, funct3, taken, exp_taken,
                 target, exp_target);
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
