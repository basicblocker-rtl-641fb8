// alu: the integer ALU of the execute stage. Implements the RV32I operations
// and the RV32M multiply and divide operations (programs for the core are
// built for rv32im). Division follows the RISC-V rules: x/0 = -1, x%0 = x,
// and the signed overflow -2^31/-1 gives -2^31 with remainder 0.
// Purely combinational: y follows op, a and b in the same cycle, so multiply
// and divide take one cycle here; a core built for speed would use a
// multi-cycle divider. The ALU is this design's own, standard RV32IM.
module alu
  import bb_pkg::*;
(
  input  alu_op_t     op,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  logic [63:0] prod_ss, prod_su, prod_uu;
  logic        ovf;   // -2^31 / -1

  always_comb begin
    prod_ss = 64'($signed({{32{a[31]}}, a}) * $signed({{32{b[31]}}, b}));
    prod_su = 64'($signed({{32{a[31]}}, a}) * $signed({32'b0, b}));
    prod_uu = {32'b0, a} * {32'b0, b};
    ovf     = (a == 32'h8000_0000) && (b == '1);
  end

  always_comb begin
    unique case (op)
      ALU_ADD:   y = a + b;
      ALU_SUB:   y = a - b;
      ALU_SLL:   y = a << b[4:0];
      ALU_SLT:   y = {31'b0, $signed(a) < $signed(b)};
      ALU_SLTU:  y = {31'b0, a < b};
      ALU_XOR:   y = a ^ b;
      ALU_SRL:   y = a >> b[4:0];
      ALU_SRA:   y = 32'($signed(a) >>> b[4:0]);
      ALU_OR:    y = a | b;
      ALU_AND:   y = a & b;
      ALU_PASSB: y = b;
      ALU_MUL:    y = a * b;
      ALU_MULH:   y = prod_ss[63:32];
      ALU_MULHSU: y = prod_su[63:32];
      ALU_MULHU:  y = prod_uu[63:32];
      ALU_DIV:    y = (b == '0) ? '1 : ovf ? a : 32'($signed(a) / $signed(b));
      ALU_DIVU:   y = (b == '0) ? '1 : a / b;
      ALU_REM:    y = (b == '0) ? a  : ovf ? '0 : 32'($signed(a) % $signed(b));
      ALU_REMU:   y = (b == '0) ? a  : a % b;
      default:   y = '0;
    endcase
  end
endmodule
