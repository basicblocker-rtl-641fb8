// branch_unit: resolves a control-flow instruction in the execute stage.
// Under BasicBlocker a branch or jump does not redirect the PC: its outcome is
// written to the target register T and takes effect after the last
// instruction of the current basic block. This unit therefore outputs
//   taken  : the instruction changes the flow (always for JAL/JALR),
//   target : the address the next block starts at, i.e. the jump/branch
//            target when taken and the block's fall-through address otherwise,
//   link   : the value JAL/JALR write to rd. Because a call may be scheduled
//            anywhere inside its block, the return address is the block's
//            fall-through address, not pc+4 (this design's choice; the paper
//            does not say what the link register receives).
// Combinational.
module branch_unit
  import bb_pkg::*;
(
  input  cf_kind_t    cf,
  input  logic [2:0]  funct3,
  input  logic [31:0] pc,
  input  logic [31:0] rs1,
  input  logic [31:0] rs2,
  input  logic [31:0] imm,
  input  logic [31:0] fallthrough,
  output logic        taken,
  output logic [31:0] target,
  output logic [31:0] link
);
  logic cond;

  always_comb begin
    unique case (funct3)
      3'b000:  cond = (rs1 == rs2);
      3'b001:  cond = (rs1 != rs2);
      3'b100:  cond = ($signed(rs1) <  $signed(rs2));
      3'b101:  cond = ($signed(rs1) >= $signed(rs2));
      3'b110:  cond = (rs1 <  rs2);
      3'b111:  cond = (rs1 >= rs2);
      default: cond = 1'b0;
    endcase
    unique case (cf)
      CF_BRANCH: taken = cond;
      CF_JAL,
      CF_JALR:   taken = 1'b1;
      default:   taken = 1'b0;
    endcase
    if (!taken)
      target = fallthrough;
    else if (cf == CF_JALR)
      target = (rs1 + imm) & ~32'd1;
    else
      target = pc + imm;
    link = fallthrough;
  end
endmodule
