// tb_asm_pkg: a small instruction assembler for the testbenches. Functions
// return 32-bit encodings of the RV32IM instructions used in the tests and of
// the two BasicBlocker instructions (bb, lcnt) in this design's encoding
// (see bb_pkg).
package tb_asm_pkg;
  function automatic logic [31:0] r_type(input logic [6:0] f7, input int rs2, input int rs1,
                                         input logic [2:0] f3, input int rd, input logic [6:0] op);
    return {f7, 5'(rs2), 5'(rs1), f3, 5'(rd), op};
  endfunction
  function automatic logic [31:0] i_type(input int imm, input int rs1, input logic [2:0] f3,
                                         input int rd, input logic [6:0] op);
    return {12'(imm), 5'(rs1), f3, 5'(rd), op};
  endfunction
  function automatic logic [31:0] s_type(input int imm, input int rs2, input int rs1,
                                         input logic [2:0] f3);
    logic [11:0] i = 12'(imm);
    return {i[11:5], 5'(rs2), 5'(rs1), f3, i[4:0], 7'b0100011};
  endfunction
  function automatic logic [31:0] b_type(input int off, input int rs2, input int rs1,
                                         input logic [2:0] f3);
    logic [12:0] i = 13'(off);
    return {i[12], i[10:5], 5'(rs2), 5'(rs1), f3, i[4:1], i[11], 7'b1100011};
  endfunction

  function automatic logic [31:0] bb(input int n, input bit seq,
                                     input logic [3:0] ls = 4'b0, input logic [3:0] le = 4'b0);
    return {16'(n - 1), le, ls, seq, 7'b0001011};
  endfunction
  function automatic logic [31:0] lcnt(input int set, input int rs1, input int imm);
    return i_type(imm, rs1, 3'b000, set, 7'b0101011);
  endfunction

  function automatic logic [31:0] addi(input int rd, input int rs1, input int imm);
    return i_type(imm, rs1, 3'b000, rd, 7'b0010011);
  endfunction
  function automatic logic [31:0] add(input int rd, input int rs1, input int rs2);
    return r_type(7'b0, rs2, rs1, 3'b000, rd, 7'b0110011);
  endfunction
  function automatic logic [31:0] sub(input int rd, input int rs1, input int rs2);
    return r_type(7'b0100000, rs2, rs1, 3'b000, rd, 7'b0110011);
  endfunction
  function automatic logic [31:0] xor_(input int rd, input int rs1, input int rs2);
    return r_type(7'b0, rs2, rs1, 3'b100, rd, 7'b0110011);
  endfunction
  function automatic logic [31:0] and_(input int rd, input int rs1, input int rs2);
    return r_type(7'b0, rs2, rs1, 3'b111, rd, 7'b0110011);
  endfunction
  function automatic logic [31:0] xori(input int rd, input int rs1, input int imm);
    return i_type(imm, rs1, 3'b100, rd, 7'b0010011);
  endfunction
  function automatic logic [31:0] andi(input int rd, input int rs1, input int imm);
    return i_type(imm, rs1, 3'b111, rd, 7'b0010011);
  endfunction
  function automatic logic [31:0] srli(input int rd, input int rs1, input int sh);
    return i_type(sh, rs1, 3'b101, rd, 7'b0010011);
  endfunction
  function automatic logic [31:0] mul(input int rd, input int rs1, input int rs2);
    return r_type(7'b0000001, rs2, rs1, 3'b000, rd, 7'b0110011);
  endfunction
  function automatic logic [31:0] mext(input int f3, input int rd, input int rs1, input int rs2);
    return r_type(7'b0000001, rs2, rs1, 3'(f3), rd, 7'b0110011);
  endfunction
  function automatic logic [31:0] div(input int rd, input int rs1, input int rs2);
    return mext(4, rd, rs1, rs2);
  endfunction
  function automatic logic [31:0] remu(input int rd, input int rs1, input int rs2);
    return mext(7, rd, rs1, rs2);
  endfunction
  function automatic logic [31:0] lw(input int rd, input int rs1, input int imm);
    return i_type(imm, rs1, 3'b010, rd, 7'b0000011);
  endfunction
  function automatic logic [31:0] lbu(input int rd, input int rs1, input int imm);
    return i_type(imm, rs1, 3'b100, rd, 7'b0000011);
  endfunction
  function automatic logic [31:0] sw(input int rs2, input int rs1, input int imm);
    return s_type(imm, rs2, rs1, 3'b010);
  endfunction
  function automatic logic [31:0] sb(input int rs2, input int rs1, input int imm);
    return s_type(imm, rs2, rs1, 3'b000);
  endfunction
  function automatic logic [31:0] beq(input int rs1, input int rs2, input int off);
    return b_type(off, rs2, rs1, 3'b000);
  endfunction
  function automatic logic [31:0] bne(input int rs1, input int rs2, input int off);
    return b_type(off, rs2, rs1, 3'b001);
  endfunction
  function automatic logic [31:0] blt(input int rs1, input int rs2, input int off);
    return b_type(off, rs2, rs1, 3'b100);
  endfunction
  function automatic logic [31:0] jal(input int rd, input int off);
    logic [20:0] i = 21'(off);
    return {i[20], i[10:1], i[11], i[19:12], 5'(rd), 7'b1101111};
  endfunction
  function automatic logic [31:0] jalr(input int rd, input int rs1, input int imm);
    return i_type(imm, rs1, 3'b000, rd, 7'b1100111);
  endfunction
  function automatic logic [31:0] lui(input int rd, input int imm20);
    return {20'(imm20), 5'(rd), 7'b0110111};
  endfunction
  function automatic logic [31:0] ebreak();
    return 32'h00100073;
  endfunction
  function automatic logic [31:0] nop();
    return addi(0, 0, 0);
  endfunction
endpackage
