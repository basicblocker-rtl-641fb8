// bb_fetch_unit: the non-speculative BasicBlocker fetch sequencer.
//
// The unit never guesses. It fetches an instruction only when it is certain
// to execute:
//  * the n body instructions of the current block, whose length n came from
//    the block's already executed bb instruction (counter ic = instructions
//    of the block still to fetch);
//  * the bb instruction of the next block, as soon as the next block's
//    address is certain: at once for a sequential block (and for a loop-end
//    block), otherwise when the block's control-flow instruction has been
//    resolved. This bb is interposed in the fetch stream ahead of the
//    remaining body instructions ("BB prefetching"); its decoded size and
//    flags come back from the pipeline and are held in the prefetch
//    register P until the current block has been fetched completely.
// The target register T holds the next block's address: the fall-through
// address of a sequential block, the loop start/exit chosen by the loop
// counters for a loop-end block, or the resolved outcome of the block's one
// control-flow instruction.
//
// Block switch ("promotion"): when ic = 0 and P holds a resolved bb, P becomes
// the current block in the same cycle and its first body instruction is
// fetched in that cycle. In every other cycle a pending fetch of the next bb
// has priority over body instructions, so that its size is known as early as
// possible. Promotion of a block
// whose bb carries loop flags waits while an lcnt is in decode or execute.
// If the instruction found at T is not a bb, promotion cannot happen and the
// unit raises not_bb (enforced BB).
//
// Timing, as in the paper's worst-case diagram: the pipeline reports a
// resolved control-flow instruction or bb from its EX/MEM register, i.e. in
// the cycle that instruction is in MEM, and the unit fetches with that
// information in the same cycle. A branch at the end of a block therefore
// costs the next bb's fetch in the branch's MEM cycle and the next body
// instruction in the bb's MEM cycle.
//
// With BB_PORT set, the next bb is read through a second instruction-memory
// port instead of a fetch slot: the request is made as soon as T is known
// (also in the cycle a block starts), the word is read and decoded by bit mask
// in the following cycle and goes straight into P. The bb then never enters
// the pipeline and costs no fetch cycle; a block switch that does not wait
// for a branch costs nothing. Without BB_PORT the second port is unused.
//
// Each fetched instruction is tagged with its slot (body or bb), the block
// parity tag, first/last-of-block marks, whether its block must contain no
// control flow, and the block's fall-through address, for the checker and
// for JAL/JALR link values. stall holds the fetch (results are still
// captured); halt stops it.
module bb_fetch_unit
  import bb_pkg::*;
#(
  parameter logic [31:0] RESET_PC = 32'h0,
  parameter bit          BB_PORT  = 1'b0   // read bb words through a second port
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         stall,
  input  logic         halt,
  // fetch request and its tags
  output logic         if_valid,
  output logic [31:0]  if_pc,
  output slot_t        if_slot,
  output logic         if_tag,
  output logic         if_first,
  output logic         if_last,
  output logic         if_nocf,       // block must hold no control flow (B = 0)
  output logic [31:0]  if_fallthrough,
  // second instruction port for bb words (BB_PORT only)
  output logic [31:0]  bbp_addr,
  input  logic [31:0]  bbp_rdata,
  // resolution of the bb-slot instruction (from EX/MEM)
  input  logic         bb_res_valid,
  input  logic         bb_res_is_bb,
  input  bb_info_t     bb_res_info,
  input  logic [31:0]  bb_res_addr,
  // resolution of a control-flow instruction (from EX/MEM)
  input  logic         cf_res_valid,
  input  logic         cf_res_tag,
  input  logic [31:0]  cf_res_target,
  // loop counters
  input  logic         lcnt_pending,
  output logic         lc_apply,
  output logic [31:0]  lc_bb_addr,
  output logic [NLOOP-1:0] lc_ls,
  output logic [NLOOP-1:0] lc_le,
  output logic [31:0]  lc_fallthrough,
  input  logic         loop_end,
  input  logic [31:0]  loop_target,
  // status
  output logic         not_bb,        // enforced-BB violation, sticky
  output logic [31:0]  not_bb_pc,     // where the bb was expected
  output logic         promote,       // a new block became current
  output logic         prefetch_issue // the next bb was fetched early
);
  typedef enum logic [1:0] { NB_NONE, NB_INFLIGHT, NB_READY } nb_t;

  logic [31:0]       pc_q, t_q, ft_q;
  logic [SIZE_W-1:0] ic_q;
  logic              tag_q, tk_q, nocf_q, first_q, not_bb_q;
  nb_t               nb_q;
  bb_info_t          p_q;
  logic              p_isbb_q;
  logic [31:0]       p_addr_q;

  // next-state values
  logic [31:0]       pc_d, t_d, ft_d;
  logic [SIZE_W-1:0] ic_d;
  logic              tag_d, tk_d, nocf_d, first_d;
  nb_t               nb_d;
  bb_info_t          p_d;
  logic              p_isbb_d;
  logic [31:0]       p_addr_d;
  logic              flags;

  // second-port bb read: the address is registered, the word read and
  // decoded by bit mask in the next cycle
  logic              bbp_pend_q, bbp_req;
  logic [31:0]       bbp_addr_q;
  logic              bbp_is_bb;
  bb_info_t          bbp_info;
  logic              bbp_lcnt_unused, bbp_set_ok_unused;
  logic [1:0]        bbp_set_unused;

  bb_decoder u_bbp_dec (
    .instr(bbp_rdata), .is_bb(bbp_is_bb), .bb(bbp_info), .is_lcnt(bbp_lcnt_unused),
    .lc_set(bbp_set_unused), .lc_set_ok(bbp_set_ok_unused)
  );
  assign bbp_addr = bbp_addr_q;

  always_comb begin
    pc_d = pc_q; t_d = t_q; ft_d = ft_q; ic_d = ic_q; tag_d = tag_q; tk_d = tk_q;
    nocf_d = nocf_q; first_d = first_q; nb_d = nb_q; p_d = p_q; p_isbb_d = p_isbb_q;
    p_addr_d = p_addr_q;

    // 1. control-flow outcome of the current block -> T
    if (cf_res_valid && cf_res_tag == tag_q && !nocf_q && !tk_q) begin
      t_d  = cf_res_target;
      tk_d = 1'b1;
    end
    // 2. resolved next bb -> P
    if (BB_PORT) begin
      if (nb_q == NB_INFLIGHT && bbp_pend_q) begin
        p_d      = bbp_info;
        p_isbb_d = bbp_is_bb;
        p_addr_d = bbp_addr_q;
        nb_d     = NB_READY;
      end
    end else if (nb_q == NB_INFLIGHT && bb_res_valid) begin
      p_d      = bb_res_info;
      p_isbb_d = bb_res_is_bb;
      p_addr_d = bb_res_addr;
      nb_d     = NB_READY;
    end
    // 3. block switch
    flags          = (|p_d.ls) || (|p_d.le);
    lc_bb_addr     = p_addr_d;
    lc_ls          = p_d.ls;
    lc_le          = p_d.le;
    lc_fallthrough = p_addr_d + 32'({p_d.n, 2'b00}) + 32'd4;
    promote  = (ic_q == '0) && (nb_d == NB_READY) && p_isbb_d && !(flags && lcnt_pending);
    lc_apply = promote;
    if (promote) begin
      ic_d    = p_d.n;
      pc_d    = p_addr_d + 32'd4;
      ft_d    = lc_fallthrough;
      tag_d   = ~tag_q;
      nocf_d  = p_d.seq || loop_end;
      tk_d    = p_d.seq || loop_end;
      t_d     = loop_end ? loop_target : lc_fallthrough;
      first_d = 1'b1;
      nb_d    = NB_NONE;
    end

    // 4. fetch one instruction
    if_valid       = 1'b0;
    if_slot        = SLOT_NONE;
    if_pc          = pc_d;
    if_tag         = tag_d;
    if_first       = 1'b0;
    if_last        = 1'b0;
    if_nocf        = nocf_d;
    if_fallthrough = ft_d;
    prefetch_issue = 1'b0;
    bbp_req        = 1'b0;
    if (BB_PORT) begin
      // the bb goes through its own port and never takes a body slot
      if (!halt && !not_bb_q && tk_d && nb_d == NB_NONE) begin
        bbp_req        = 1'b1;
        nb_d           = NB_INFLIGHT;
        prefetch_issue = (ic_d != '0);
      end
      if (!stall && !halt && !not_bb_q && ic_d != '0) begin
        if_valid = 1'b1;
        if_slot  = SLOT_BODY;
        if_first = first_d;
        if_last  = (ic_d == SIZE_W'(1));
        first_d  = 1'b0;
        pc_d     = pc_d + 32'd4;
        ic_d     = ic_d - SIZE_W'(1);
      end
    end else if (!stall && !halt && !not_bb_q) begin
      if (tk_d && nb_d == NB_NONE && !(promote && ic_d != '0)) begin
        if_valid       = 1'b1;
        if_slot        = SLOT_BB;
        if_pc          = t_d;
        nb_d           = NB_INFLIGHT;
        prefetch_issue = (ic_d != '0);
      end else if (ic_d != '0) begin
        if_valid = 1'b1;
        if_slot  = SLOT_BODY;
        if_first = first_d;
        if_last  = (ic_d == SIZE_W'(1));
        first_d  = 1'b0;
        pc_d     = pc_d + 32'd4;
        ic_d     = ic_d - SIZE_W'(1);
      end
    end
  end

  assign not_bb    = not_bb_q;
  assign not_bb_pc = p_addr_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc_q     <= RESET_PC;
      t_q      <= RESET_PC;
      ft_q     <= RESET_PC;
      ic_q     <= '0;
      tag_q    <= 1'b0;
      tk_q     <= 1'b1;        // the first bb sits at the reset address
      nocf_q   <= 1'b1;
      first_q  <= 1'b0;
      nb_q     <= NB_NONE;
      p_q      <= '0;
      p_isbb_q <= 1'b0;
      p_addr_q <= '0;
      not_bb_q <= 1'b0;
      bbp_pend_q <= 1'b0;
      bbp_addr_q <= RESET_PC;
    end else begin
      bbp_pend_q <= bbp_req;
      if (bbp_req) bbp_addr_q <= t_d;
      pc_q     <= pc_d;
      t_q      <= t_d;
      ft_q     <= ft_d;
      ic_q     <= ic_d;
      tag_q    <= tag_d;
      tk_q     <= tk_d;
      nocf_q   <= nocf_d;
      first_q  <= first_d;
      nb_q     <= nb_d;
      p_q      <= p_d;
      p_isbb_q <= p_isbb_d;
      p_addr_q <= p_addr_d;
      if (ic_q == '0 && nb_d == NB_READY && !p_isbb_d) not_bb_q <= 1'b1;
    end
  end

  // At most one bb may be outstanding: a resolution only arrives for one.
  property p_bb_res_expected;
    @(posedge clk) disable iff (!rst_n) bb_res_valid |-> nb_q == NB_INFLIGHT;
  endproperty
  a_bb_res_expected: assert property (p_bb_res_expected);
endmodule
