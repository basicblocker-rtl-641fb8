// bb_decoder: recognises the two BasicBlocker instructions by bit mask and
// unpacks their fields. It is purely combinational, so it can sit directly on
// the instruction-memory output (the "fast decode" the paper suggests) or in
// the decode stage.
//
// bb   : is_bb, and bb.n (1..65536, from the stored n-1), bb.seq, bb.ls, bb.le.
// lcnt : is_lcnt, lc_set (rd-1), lc_set_ok (rd is 1..4); its 12-bit immediate
//        and rs1 go through the normal I-type path (count = rs1 + imm).
// Field widths follow the paper; bit positions and opcodes are this design's
// choice (see bb_pkg).
module bb_decoder
  import bb_pkg::*;
(
  input  logic [31:0] instr,
  output logic        is_bb,
  output bb_info_t    bb,
  output logic        is_lcnt,
  output logic [1:0]  lc_set,
  output logic        lc_set_ok
);
  logic [4:0] rd;

  always_comb begin
    is_bb     = (instr[6:0] == OP_BB);
    bb.n      = {1'b0, instr[31:16]} + 17'd1;
    bb.seq    = instr[7];
    bb.ls     = instr[11:8];
    bb.le     = instr[15:12];
    is_lcnt   = (instr[6:0] == OP_LCNT) && (instr[14:12] == 3'b000);
    rd        = instr[11:7];
    lc_set    = 2'(rd - 5'd1);
    lc_set_ok = (rd >= 5'd1) && (rd <= 5'd4);
  end
endmodule
