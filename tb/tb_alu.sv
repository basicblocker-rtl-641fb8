// tb_alu: random operands for every operation, compared with a reference
// computed in the testbench with 64-bit arithmetic. Every fifth case uses a
// small b (shift amounts, division by zero) and every seventh the signed
// division overflow -2^31 / -1.
module tb_alu;
  import bb_pkg::*;
  alu_op_t op;
  logic [31:0] a, b, y, exp_y;
  longint sa, sb, ua, ub;
  int checks = 0, failures = 0;

  alu dut (.op, .a, .b, .y);

  initial begin
    for (int i = 0; i < 3800; i++) begin
      op = alu_op_t'(i % 19);
      a = $urandom; b = (i % 5 == 0) ? 32'($urandom_range(0, 40)) : $urandom;
      if (i % 7 == 0) begin a = 32'h8000_0000; b = '1; end
      sa = longint'(int'(a)); sb = longint'(int'(b));
      ua = longint'(a);       ub = longint'(b);
      #1;
      case (op)
        ALU_ADD:   exp_y = a + b;
        ALU_SUB:   exp_y = a - b;
        ALU_SLL:   exp_y = a << (b % 32);
        ALU_SLT:   exp_y = (int'(a) < int'(b)) ? 1 : 0;
        ALU_SLTU:  exp_y = (longint'(a) < longint'(b)) ? 1 : 0;
        ALU_XOR:   exp_y = a ^ b;
        ALU_SRL:   exp_y = a >> (b % 32);
        ALU_SRA:   exp_y = 32'(int'(a) >>> (b % 32));
        ALU_OR:    exp_y = a | b;
        ALU_AND:   exp_y = a & b;
        ALU_PASSB: exp_y = b;
        ALU_MUL:    exp_y = 32'(sa * sb);
        ALU_MULH:   exp_y = 32'((sa * sb) >>> 32);
        ALU_MULHSU: exp_y = 32'((sa * ub) >>> 32);
        ALU_MULHU:  exp_y = 32'((ua * ub) >> 32);
        ALU_DIV:    exp_y = (b == 0) ? 32'hffff_ffff : 32'(sa / sb);
        ALU_DIVU:   exp_y = (b == 0) ? 32'hffff_ffff : 32'(ua / ub);
        ALU_REM:    exp_y = (b == 0) ? a : 32'(sa % sb);
        ALU_REMU:   exp_y = (b == 0) ? a : 32'(ua % ub);
        default:    exp_y = 32'hdead_beef;
      endcase
      checks++;
      if (y !== exp_y) begin
        failures++;
        $display("FAIL: op=%0d a=%h b=%h y=%h exp=%h", op, a, b, y, exp_y);
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
