// rv32_decoder: decode stage logic for the base instruction set. Turns a
// 32-bit RV32IM word into the ctrl_t bundle used by the execute,
// memory and write-back stages, and classifies control-flow instructions
// (JAL, JALR, BEQ..BGEU) whose semantics BasicBlocker changes. bb and lcnt are
// decoded by bb_decoder; here lcnt is marked legal, reads rs1 and writes no
// integer register, and bb is legal with no effect on the datapath.
// EBREAK halts the core (this design's choice, used to end test programs);
// FENCE and ECALL are treated as no-ops. Combinational.
module rv32_decoder
  import bb_pkg::*;
(
  input  logic [31:0] instr,
  output ctrl_t       ctrl
);
  logic [6:0] opc;
  logic [2:0] f3;
  logic [6:0] f7;
  logic [31:0] imm_i, imm_s, imm_b, imm_u, imm_j;

  always_comb begin
    opc   = instr[6:0];
    f3    = instr[14:12];
    f7    = instr[31:25];
    imm_i = {{20{instr[31]}}, instr[31:20]};
    imm_s = {{20{instr[31]}}, instr[31:25], instr[11:7]};
    imm_b = {{19{instr[31]}}, instr[31], instr[7], instr[30:25], instr[11:8], 1'b0};
    imm_u = {instr[31:12], 12'b0};
    imm_j = {{11{instr[31]}}, instr[31], instr[19:12], instr[20], instr[30:21], 1'b0};

    ctrl            = '0;
    ctrl.alu_op     = ALU_ADD;
    ctrl.cf         = CF_NONE;
    ctrl.br_funct3  = f3;
    ctrl.mem_funct3 = f3;

    unique case (opc)
      OP_LUI: begin
        ctrl.legal = 1'b1; ctrl.reg_write = 1'b1;
        ctrl.alu_op = ALU_PASSB; ctrl.src_b_imm = 1'b1; ctrl.imm = imm_u;
      end
      OP_AUIPC: begin
        ctrl.legal = 1'b1; ctrl.reg_write = 1'b1; ctrl.src_a_pc = 1'b1;
        ctrl.src_b_imm = 1'b1; ctrl.imm = imm_u;
      end
      OP_JAL: begin
        ctrl.legal = 1'b1; ctrl.reg_write = 1'b1; ctrl.cf = CF_JAL; ctrl.imm = imm_j;
      end
      OP_JALR: begin
        ctrl.legal = (f3 == 3'b000); ctrl.reg_write = 1'b1; ctrl.cf = CF_JALR;
        ctrl.uses_rs1 = 1'b1; ctrl.imm = imm_i;
      end
      OP_BRANCH: begin
        ctrl.legal = (f3 != 3'b010) && (f3 != 3'b011); ctrl.cf = CF_BRANCH;
        ctrl.uses_rs1 = 1'b1; ctrl.uses_rs2 = 1'b1; ctrl.imm = imm_b;
      end
      OP_LOAD: begin
        ctrl.legal = (f3 == 3'b000) || (f3 == 3'b001) || (f3 == 3'b010) ||
                     (f3 == 3'b100) || (f3 == 3'b101);
        ctrl.reg_write = 1'b1; ctrl.mem_read = 1'b1; ctrl.uses_rs1 = 1'b1;
        ctrl.src_b_imm = 1'b1; ctrl.imm = imm_i;
      end
      OP_STORE: begin
        ctrl.legal = (f3 == 3'b000) || (f3 == 3'b001) || (f3 == 3'b010);
        ctrl.mem_write = 1'b1; ctrl.uses_rs1 = 1'b1; ctrl.uses_rs2 = 1'b1;
        ctrl.src_b_imm = 1'b1; ctrl.imm = imm_s;
      end
      OP_IMM: begin
        ctrl.legal = 1'b1; ctrl.reg_write = 1'b1; ctrl.uses_rs1 = 1'b1;
        ctrl.src_b_imm = 1'b1; ctrl.imm = imm_i;
        unique case (f3)
          3'b000: ctrl.alu_op = ALU_ADD;
          3'b010: ctrl.alu_op = ALU_SLT;
          3'b011: ctrl.alu_op = ALU_SLTU;
          3'b100: ctrl.alu_op = ALU_XOR;
          3'b110: ctrl.alu_op = ALU_OR;
          3'b111: ctrl.alu_op = ALU_AND;
          3'b001: begin ctrl.alu_op = ALU_SLL; ctrl.legal = (f7 == 7'b0); end
          default: begin
            ctrl.alu_op = f7[5] ? ALU_SRA : ALU_SRL;
            ctrl.legal  = (f7 == 7'b0) || (f7 == 7'b0100000);
          end
        endcase
      end
      OP_REG: begin
        ctrl.legal = 1'b1; ctrl.reg_write = 1'b1;
        ctrl.uses_rs1 = 1'b1; ctrl.uses_rs2 = 1'b1;
        if (f7 == 7'b0000001) begin
          ctrl.legal  = 1'b1;
          unique case (f3)
            3'b000: ctrl.alu_op = ALU_MUL;
            3'b001: ctrl.alu_op = ALU_MULH;
            3'b010: ctrl.alu_op = ALU_MULHSU;
            3'b011: ctrl.alu_op = ALU_MULHU;
            3'b100: ctrl.alu_op = ALU_DIV;
            3'b101: ctrl.alu_op = ALU_DIVU;
            3'b110: ctrl.alu_op = ALU_REM;
            default: ctrl.alu_op = ALU_REMU;
          endcase
        end else begin
          ctrl.legal = (f7 == 7'b0) || (f7 == 7'b0100000 && (f3 == 3'b000 || f3 == 3'b101));
          unique case (f3)
            3'b000: ctrl.alu_op = f7[5] ? ALU_SUB : ALU_ADD;
            3'b001: ctrl.alu_op = ALU_SLL;
            3'b010: ctrl.alu_op = ALU_SLT;
            3'b011: ctrl.alu_op = ALU_SLTU;
            3'b100: ctrl.alu_op = ALU_XOR;
            3'b101: ctrl.alu_op = f7[5] ? ALU_SRA : ALU_SRL;
            3'b110: ctrl.alu_op = ALU_OR;
            default: ctrl.alu_op = ALU_AND;
          endcase
        end
      end
      7'b0001111: ctrl.legal = 1'b1;                       // FENCE: no-op
      OP_SYSTEM: begin
        ctrl.legal = (instr[31:7] == 25'h0) || (instr[31:7] == 25'h2000);
        ctrl.halt  = (instr[31:7] == 25'h2000);            // EBREAK
      end
      OP_BB:   ctrl.legal = 1'b1;
      OP_LCNT: begin
        ctrl.legal = (f3 == 3'b000); ctrl.uses_rs1 = 1'b1;
        ctrl.src_b_imm = 1'b1; ctrl.imm = imm_i;           // alu computes rs1+imm
      end
      default: ctrl.legal = 1'b0;
    endcase
  end
endmodule
