// bb_pkg: types and constants shared by the BasicBlocker RV32 core.
//
// BasicBlocker adds one instruction, bb, that opens every basic block and
// announces its length n and whether it is sequential (contains no control
// flow). Control-flow instructions no longer redirect the PC at once: they
// write a target register T that takes effect after the n-th instruction of
// the block. The loop-counter extension adds lcnt and four start/end flags per
// bb.
//
// Encodings. The text fixes the field widths (16-bit size, 1-bit sequential
// flag, four start and four end flags for bb; lcnt as an I-type with a 12-bit
// immediate) but the bit map figure is not available, so the bit positions and
// opcodes here are this design's choice:
//
//   bb    [31:16] n-1   [15:12] end flags  [11:8] start flags  [7] seq
//         [6:0] 0001011 (RISC-V custom-0)
//   lcnt  [31:20] imm   [19:15] rs1  [14:12] 000  [11:7] rd (1..4 = lc1..lc4)
//         [6:0] 0101011 (RISC-V custom-1)
//
// The size field holds n-1 so that 16 bits cover 1..65536 instructions, as
// the text says, and n = 0 cannot be encoded.
package bb_pkg;

  localparam int NLOOP   = 4;    // loop counter sets (paper: four)
  localparam int SIZE_W  = 17;   // holds n = 1..65536

  localparam logic [6:0] OP_BB     = 7'b0001011;
  localparam logic [6:0] OP_LCNT   = 7'b0101011;
  localparam logic [6:0] OP_LUI    = 7'b0110111;
  localparam logic [6:0] OP_AUIPC  = 7'b0010111;
  localparam logic [6:0] OP_JAL    = 7'b1101111;
  localparam logic [6:0] OP_JALR   = 7'b1100111;
  localparam logic [6:0] OP_BRANCH = 7'b1100011;
  localparam logic [6:0] OP_LOAD   = 7'b0000011;
  localparam logic [6:0] OP_STORE  = 7'b0100011;
  localparam logic [6:0] OP_IMM    = 7'b0010011;
  localparam logic [6:0] OP_REG    = 7'b0110011;
  localparam logic [6:0] OP_SYSTEM = 7'b1110011;

  // Decoded bb instruction.
  typedef struct packed {
    logic [SIZE_W-1:0] n;        // block length, 1..65536
    logic              seq;      // 1: no control-flow instruction in the block
    logic [NLOOP-1:0]  ls;       // loop start flags, bit k = set lc(k+1)
    logic [NLOOP-1:0]  le;       // loop end flags
  } bb_info_t;

  typedef enum logic [4:0] {
    ALU_ADD, ALU_SUB, ALU_SLL, ALU_SLT, ALU_SLTU, ALU_XOR,
    ALU_SRL, ALU_SRA, ALU_OR, ALU_AND, ALU_PASSB,
    ALU_MUL, ALU_MULH, ALU_MULHSU, ALU_MULHU,
    ALU_DIV, ALU_DIVU, ALU_REM, ALU_REMU
  } alu_op_t;

  typedef enum logic [1:0] { CF_NONE, CF_BRANCH, CF_JAL, CF_JALR } cf_kind_t;

  // Control bundle produced by the RV32 decoder.
  typedef struct packed {
    logic       legal;
    alu_op_t    alu_op;
    logic       src_a_pc;    // operand a = pc (auipc)
    logic       src_b_imm;   // operand b = immediate
    logic [31:0] imm;
    logic       uses_rs1;
    logic       uses_rs2;
    logic       reg_write;
    logic       mem_read;
    logic       mem_write;
    logic [2:0] mem_funct3;
    cf_kind_t   cf;
    logic [2:0] br_funct3;
    logic       halt;        // ebreak: stops the core
  } ctrl_t;

  // BB exception causes.
  typedef enum logic [2:0] {
    EXC_NONE        = 3'd0,
    EXC_BB_IN_BLOCK = 3'd1,  // bb inside the n instructions of a block
    EXC_CF_IN_SEQ   = 3'd2,  // control flow in a sequential block (B = 0)
    EXC_NO_CF       = 3'd3,  // non-sequential block ended without control flow
    EXC_NOT_BB      = 3'd4,  // enforced BB: block does not start with bb
    EXC_ILLEGAL     = 3'd5,  // undecodable instruction
    EXC_EXTRA_CF    = 3'd6   // second control-flow instruction in a block
  } exc_t;

  // Kind of fetch slot an instruction occupies.
  typedef enum logic [1:0] { SLOT_NONE, SLOT_BODY, SLOT_BB } slot_t;

endpackage
