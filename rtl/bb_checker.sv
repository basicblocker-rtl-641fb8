// bb_checker: enforces the BasicBlocker rules on the executed instruction
// stream and raises the BB exception.
//
// It keeps the paper's branch flag B and a pending form of its exception flag
// E. At the first body instruction of a block B is loaded with 1 for a block
// that must hold one control-flow instruction and 0 for a sequential (or
// loop-end) block. A control-flow instruction with B = 1 clears B; one with
// B = 0 (control flow in a sequential block, or a second one) marks E pending.
// As in the paper, such an exception is raised after the block's last
// instruction, which also raises it if B is still 1 (a non-sequential block
// without control flow). A bb opcode in a body slot raises it at once (the
// paper's bb sets IC to 0 and E to 1), and so does an undecodable instruction.
// The fetch unit reports the enforced-BB case (no bb where a block starts)
// via not_bb, with the address in not_bb_pc.
//
// Inputs describe the instruction in the execute stage. exc/exc_cause are
// combinational: the instruction after which the exception is raised still
// completes (except an undecodable one), everything younger is squashed by
// the core. The sticky flag E and the cause and PC of the first exception are
// registered. Instructions in bb slots are not checked here.
module bb_checker
  import bb_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        ex_valid,
  input  slot_t       ex_slot,
  input  logic [31:0] ex_pc,
  input  logic        ex_first,
  input  logic        ex_last,
  input  logic        ex_nocf,
  input  logic        ex_is_bb,
  input  logic        ex_is_cf,
  input  logic        ex_illegal,
  input  logic        not_bb,
  input  logic [31:0] not_bb_pc,
  output logic        exc,
  output exc_t        exc_cause,
  output logic        e_flag,
  output exc_t        e_cause,
  output logic [31:0] e_pc
);
  logic b_q, b_in, b_out;
  logic pend_q, pend_in, pend_out;
  exc_t pcause_q, pcause_in, pcause_out;

  always_comb begin
    exc        = 1'b0;
    exc_cause  = EXC_NONE;
    b_in       = ex_first ? !ex_nocf : b_q;
    pend_in    = ex_first ? 1'b0 : pend_q;
    pcause_in  = ex_first ? EXC_NONE : pcause_q;
    b_out      = b_in;
    pend_out   = pend_in;
    pcause_out = pcause_in;
    if (ex_valid && ex_slot == SLOT_BODY && !e_flag) begin
      if (ex_illegal) begin
        exc = 1'b1; exc_cause = EXC_ILLEGAL;
      end else if (ex_is_bb) begin
        exc = 1'b1; exc_cause = EXC_BB_IN_BLOCK;
      end else begin
        if (ex_is_cf) begin
          if (!b_in) begin
            if (!pend_in) pcause_out = ex_nocf ? EXC_CF_IN_SEQ : EXC_EXTRA_CF;
            pend_out = 1'b1;
          end
          b_out = 1'b0;
        end
        if (ex_last && pend_out) begin
          exc = 1'b1; exc_cause = pcause_out;
        end else if (ex_last && b_out) begin
          exc = 1'b1; exc_cause = EXC_NO_CF;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b_q      <= 1'b0;
      pend_q   <= 1'b0;
      pcause_q <= EXC_NONE;
      e_flag   <= 1'b0;
      e_cause  <= EXC_NONE;
      e_pc     <= '0;
    end else begin
      if (ex_valid && ex_slot == SLOT_BODY) begin
        b_q      <= b_out;
        pend_q   <= pend_out;
        pcause_q <= pcause_out;
      end
      if (!e_flag && exc) begin
        e_flag  <= 1'b1;
        e_cause <= exc_cause;
        e_pc    <= ex_pc;
      end else if (!e_flag && not_bb) begin
        e_flag  <= 1'b1;
        e_cause <= EXC_NOT_BB;
        e_pc    <= not_bb_pc;
      end
    end
  end
endmodule
