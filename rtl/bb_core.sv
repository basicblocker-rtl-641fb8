// bb_core: a five-stage in-order RV32IM pipeline, IF ID EX MEM WB, with
// all control-flow speculation removed and the BasicBlocker extension added.
//
// There is no branch predictor and no speculative fetch, so the pipeline never
// flushes: every fetched instruction retires unless a BB exception or EBREAK
// stops the core. Fetch is driven by bb_fetch_unit; control-flow instructions
// resolve in EX (branch_unit) and deliver their outcome to the fetch unit's
// target register from the EX/MEM register, as does each early-fetched bb
// instruction (its size and flags go to the prefetch register). bb_checker
// watches the EX stage; loop_counter_unit is written by lcnt in EX and
// consulted by the fetch unit when a block starts.
//
// The datapath is conventional: operands forwarded to EX from EX/MEM and
// MEM/WB, a one-cycle stall when an instruction needs the result of a load
// just ahead of it, register file written in WB (write-through to decode).
// Instructions fetched in a bb slot are carried down the pipeline only to be
// decoded; they never write registers or memory.
//
// Memory ports: imem_addr/imem_rdata (combinational read, IF); dmem_addr,
// dmem_rdata (combinational read, MEM), dmem_be/dmem_wdata (write at the end
// of MEM). Word accesses must be aligned, halfwords halfword-aligned.
// Status: halted (EBREAK reached EX), exc_flag/exc_cause/exc_pc (first BB
// exception and the instruction after which it was raised; all younger
// instructions are squashed),
// and one-cycle event pulses for performance counting.
//
// BB_INFO_STAGE chooses where a bb's size and flags return to fetch: from
// EX/MEM (2, default, the reference timing), from ID/EX (1, forwarding right
// after decode) or from IF/ID (0, bit-mask decode of the fetched word). Each
// step saves one cycle per block; control-flow results always come from
// EX/MEM.
//
// BB_PORT (default off) reads every bb through a second instruction port
// (imem2_addr/imem2_rdata, combinational read) and decodes it in the fetch
// unit, so bb words never take a fetch slot or enter the pipeline; then
// BB_INFO_STAGE has no effect.
//
// FD_DELAY (default 0) inserts that many dummy stages between IF and ID, the
// way the source study lengthened the pipeline: each one delays every
// control-flow and bb result by one cycle, and nothing else changes.
//
// The stage list and the point where control-flow results reach fetch follow
// the paper; the base pipeline itself (forwarding, load-use stall, EBREAK as
// halt, what happens after an exception: the core stops) is this design's own.
module bb_core
  import bb_pkg::*;
#(
  parameter logic [31:0] RESET_PC = 32'h0,
  parameter int unsigned FD_DELAY = 0,   // dummy stages between IF and ID
  parameter int unsigned BB_INFO_STAGE = 2, // bb size/flags to fetch from: 2 EX/MEM, 1 ID/EX, 0 IF/ID
  parameter bit          BB_PORT       = 1'b0 // read bb words through imem2
) (
  input  logic        clk,
  input  logic        rst_n,
  output logic [31:0] imem_addr,
  input  logic [31:0] imem_rdata,
  output logic [31:0] imem2_addr,      // second instruction port, bb words only
  input  logic [31:0] imem2_rdata,
  output logic [31:0] dmem_addr,
  input  logic [31:0] dmem_rdata,
  output logic [3:0]  dmem_be,
  output logic [31:0] dmem_wdata,
  output logic        halted,
  output logic        exc_flag,
  output exc_t        exc_cause,
  output logic [31:0] exc_pc,
  output logic        ev_retire,       // an instruction wrote back (bb slots included)
  output logic        ev_fetch,        // an instruction was fetched
  output logic        ev_load_stall,   // load-use stall cycle
  output logic        ev_forward,      // an EX operand was forwarded
  output logic        ev_prefetch,     // next bb fetched ahead of the current block's end
  output logic        ev_block,        // block switch
  output logic        ev_loop_back,    // a loop-end block jumps back
  output logic        ev_cf            // a control-flow outcome was delivered to T
);
  // ---------------------------------------------------------------- types
  typedef struct packed {
    logic        valid;
    logic [31:0] pc;
    logic [31:0] instr;
    slot_t       slot;
    logic        tag;
    logic        first;
    logic        last;
    logic        nocf;
    logic [31:0] ft;
  } ifid_t;

  typedef struct packed {
    logic        valid;
    logic [31:0] pc;
    slot_t       slot;
    logic        tag;
    logic        first;
    logic        last;
    logic        nocf;
    logic [31:0] ft;
    ctrl_t       ctrl;
    logic [4:0]  rs1;
    logic [4:0]  rs2;
    logic [4:0]  rd;
    logic [31:0] rs1_val;
    logic [31:0] rs2_val;
    logic        is_bb;
    bb_info_t    bb;
    logic        is_lcnt;
    logic [1:0]  lc_set;
    logic        lc_set_ok;
  } idex_t;

  typedef struct packed {
    logic        valid;
    logic        reg_write;
    logic [4:0]  rd;
    logic [31:0] result;
    logic        mem_read;
    logic        mem_write;
    logic [2:0]  funct3;
    logic [31:0] store_val;
    logic        bb_res;
    logic        bb_is_bb;
    bb_info_t    bb;
    logic [31:0] bb_addr;
    logic        cf_res;
    logic        cf_tag;
    logic [31:0] cf_target;
  } exmem_t;

  typedef struct packed {
    logic        valid;
    logic        reg_write;
    logic [4:0]  rd;
    logic [31:0] wdata;
  } memwb_t;

  ifid_t  ifid_q;
  idex_t  idex_q;
  exmem_t exmem_q;
  memwb_t memwb_q;
  logic   halted_q;

  // ---------------------------------------------------------------- fetch
  logic        f_valid, f_tag, f_first, f_last, f_nocf;
  slot_t       f_slot;
  logic [31:0] f_pc, f_ft;
  logic        stall, kill, lcnt_pending;
  logic        lc_apply, loop_end, loop_back;
  logic [31:0] lc_bb_addr, lc_ft, loop_target;
  logic [NLOOP-1:0] lc_ls, lc_le;
  logic        not_bb, not_bb_exc;
  logic [31:0] not_bb_pc;
  logic        promote, prefetch_issue;
  logic        e_flag;
  logic        bbr_valid, bbr_is_bb;
  bb_info_t    bbr_info;
  logic [31:0] bbr_addr;

  bb_fetch_unit #(.RESET_PC(RESET_PC), .BB_PORT(BB_PORT)) u_fetch (
    .clk, .rst_n,
    .stall          (stall),
    .halt           (halted_q || kill || e_flag),
    .if_valid       (f_valid),
    .if_pc          (f_pc),
    .if_slot        (f_slot),
    .if_tag         (f_tag),
    .if_first       (f_first),
    .if_last        (f_last),
    .if_nocf        (f_nocf),
    .if_fallthrough (f_ft),
    .bbp_addr       (imem2_addr),
    .bbp_rdata      (imem2_rdata),
    .bb_res_valid   (bbr_valid),
    .bb_res_is_bb   (bbr_is_bb),
    .bb_res_info    (bbr_info),
    .bb_res_addr    (bbr_addr),
    .cf_res_valid   (exmem_q.valid && exmem_q.cf_res),
    .cf_res_tag     (exmem_q.cf_tag),
    .cf_res_target  (exmem_q.cf_target),
    .lcnt_pending   (lcnt_pending),
    .lc_apply       (lc_apply),
    .lc_bb_addr     (lc_bb_addr),
    .lc_ls          (lc_ls),
    .lc_le          (lc_le),
    .lc_fallthrough (lc_ft),
    .loop_end       (loop_end),
    .loop_target    (loop_target),
    .not_bb         (not_bb),
    .not_bb_pc      (not_bb_pc),
    .promote        (promote),
    .prefetch_issue (prefetch_issue)
  );

  assign imem_addr = f_pc;

  // ---------------------------------------------------------------- fetch-to-decode delay
  // FD_DELAY dummy stages between IF and ID lengthen the pipeline without
  // changing what it computes: every control-flow and bb result then reaches
  // fetch FD_DELAY cycles later. They hold on a stall and are emptied by kill.
  ifid_t f_word, fd_out;
  logic  fd_busy, fd_lcnt;   // a dummy stage holds an instruction / an lcnt

  always_comb begin
    f_word       = '0;
    f_word.valid = f_valid;
    f_word.pc    = f_pc;
    f_word.instr = imem_rdata;
    f_word.slot  = f_slot;
    f_word.tag   = f_tag;
    f_word.first = f_first;
    f_word.last  = f_last;
    f_word.nocf  = f_nocf;
    f_word.ft    = f_ft;
  end

  if (FD_DELAY == 0) begin : g_no_delay
    assign fd_out  = f_word;
    assign fd_busy = 1'b0;
    assign fd_lcnt = 1'b0;
  end else begin : g_delay
    ifid_t dq [FD_DELAY];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int i = 0; i < FD_DELAY; i++) dq[i] <= '0;
      end else if (kill) begin
        for (int i = 0; i < FD_DELAY; i++) dq[i].valid <= 1'b0;
      end else if (!stall) begin
        dq[0] <= f_word;
        for (int i = 1; i < FD_DELAY; i++) dq[i] <= dq[i-1];
      end
    end
    always_comb begin
      fd_busy = 1'b0;
      fd_lcnt = 1'b0;
      for (int i = 0; i < FD_DELAY; i++) begin
        fd_busy = fd_busy || dq[i].valid;
        fd_lcnt = fd_lcnt || (dq[i].valid && dq[i].slot == SLOT_BODY &&
                              dq[i].instr[6:0] == OP_LCNT);
      end
    end
    assign fd_out = dq[FD_DELAY-1];
  end

  // ---------------------------------------------------------------- decode
  ctrl_t       d_ctrl;
  logic        d_is_bb, d_is_lcnt, d_lc_set_ok;
  bb_info_t    d_bb;
  logic [1:0]  d_lc_set;
  logic [31:0] d_rs1_val, d_rs2_val;
  logic [4:0]  d_rs1, d_rs2, d_rd;

  rv32_decoder u_dec (.instr(ifid_q.instr), .ctrl(d_ctrl));

  bb_decoder u_bbdec (
    .instr(ifid_q.instr), .is_bb(d_is_bb), .bb(d_bb), .is_lcnt(d_is_lcnt),
    .lc_set(d_lc_set), .lc_set_ok(d_lc_set_ok)
  );

  assign d_rs1 = ifid_q.instr[19:15];
  assign d_rs2 = ifid_q.instr[24:20];
  assign d_rd  = ifid_q.instr[11:7];

  regfile u_rf (
    .clk, .rst_n,
    .ra1(d_rs1), .ra2(d_rs2), .rd1(d_rs1_val), .rd2(d_rs2_val),
    .we (memwb_q.valid && memwb_q.reg_write), .wa(memwb_q.rd), .wd(memwb_q.wdata)
  );

  logic d_body, d_use1, d_use2;
  always_comb begin
    d_body = ifid_q.valid && ifid_q.slot == SLOT_BODY;
    d_use1 = d_body && d_ctrl.uses_rs1 && d_rs1 != 5'd0;
    d_use2 = d_body && d_ctrl.uses_rs2 && d_rs2 != 5'd0;
    stall  = idex_q.valid && idex_q.slot == SLOT_BODY && idex_q.ctrl.mem_read &&
             idex_q.rd != 5'd0 &&
             ((d_use1 && d_rs1 == idex_q.rd) || (d_use2 && d_rs2 == idex_q.rd));
    lcnt_pending = fd_lcnt || (d_body && d_is_lcnt) ||
                   (idex_q.valid && idex_q.slot == SLOT_BODY && idex_q.is_lcnt);
  end

  // ---------------------------------------------------------------- bb information to fetch
  // Where a fetched bb's size and flags are handed back to the fetch unit.
  // 2: from EX/MEM, like a control-flow result (the reference timing).
  // 1: straight after decode, from ID/EX (decode forwarding).
  // 0: from IF/ID, decoded by bit mask as soon as the word leaves the memory
  //    (fast decode); only when ID advances, so a held bb is reported once.
  if (BB_INFO_STAGE == 0) begin : g_bbr_ifid
    assign bbr_valid = ifid_q.valid && ifid_q.slot == SLOT_BB && !stall && !kill;
    assign bbr_is_bb = d_is_bb;
    assign bbr_info  = d_bb;
    assign bbr_addr  = ifid_q.pc;
  end else if (BB_INFO_STAGE == 1) begin : g_bbr_idex
    assign bbr_valid = idex_q.valid && idex_q.slot == SLOT_BB;
    assign bbr_is_bb = idex_q.is_bb;
    assign bbr_info  = idex_q.bb;
    assign bbr_addr  = idex_q.pc;
  end else begin : g_bbr_exmem
    assign bbr_valid = exmem_q.valid && exmem_q.bb_res;
    assign bbr_is_bb = exmem_q.bb_is_bb;
    assign bbr_info  = exmem_q.bb;
    assign bbr_addr  = exmem_q.bb_addr;
  end

  // ---------------------------------------------------------------- execute
  logic [31:0] x_a, x_b, x_rs1, x_rs2, x_alu, x_target, x_link;
  logic        x_taken, x_body, x_is_cf, x_fwd;
  exc_t        x_cause;
  logic        x_exc;

  always_comb begin
    x_fwd = 1'b0;
    x_rs1 = idex_q.rs1_val;
    x_rs2 = idex_q.rs2_val;
    if (idex_q.rs1 != 5'd0 && memwb_q.valid && memwb_q.reg_write && memwb_q.rd == idex_q.rs1) begin
      x_rs1 = memwb_q.wdata; x_fwd = idex_q.ctrl.uses_rs1;
    end
    if (idex_q.rs1 != 5'd0 && exmem_q.valid && exmem_q.reg_write && !exmem_q.mem_read &&
        exmem_q.rd == idex_q.rs1) begin
      x_rs1 = exmem_q.result; x_fwd = idex_q.ctrl.uses_rs1;
    end
    if (idex_q.rs2 != 5'd0 && memwb_q.valid && memwb_q.reg_write && memwb_q.rd == idex_q.rs2) begin
      x_rs2 = memwb_q.wdata; x_fwd = x_fwd || idex_q.ctrl.uses_rs2;
    end
    if (idex_q.rs2 != 5'd0 && exmem_q.valid && exmem_q.reg_write && !exmem_q.mem_read &&
        exmem_q.rd == idex_q.rs2) begin
      x_rs2 = exmem_q.result; x_fwd = x_fwd || idex_q.ctrl.uses_rs2;
    end
    x_a     = idex_q.ctrl.src_a_pc  ? idex_q.pc : x_rs1;
    x_b     = idex_q.ctrl.src_b_imm ? idex_q.ctrl.imm : x_rs2;
    x_body  = idex_q.valid && idex_q.slot == SLOT_BODY;
    x_is_cf = idex_q.ctrl.cf != CF_NONE;
  end

  alu u_alu (.op(idex_q.ctrl.alu_op), .a(x_a), .b(x_b), .y(x_alu));

  branch_unit u_br (
    .cf(idex_q.ctrl.cf), .funct3(idex_q.ctrl.br_funct3), .pc(idex_q.pc),
    .rs1(x_rs1), .rs2(x_rs2), .imm(idex_q.ctrl.imm), .fallthrough(idex_q.ft),
    .taken(x_taken), .target(x_target), .link(x_link)
  );

  bb_checker u_chk (
    .clk, .rst_n,
    .ex_valid   (idex_q.valid),
    .ex_slot    (idex_q.slot),
    .ex_pc      (idex_q.pc),
    .ex_first   (idex_q.first),
    .ex_last    (idex_q.last),
    .ex_nocf    (idex_q.nocf),
    .ex_is_bb   (idex_q.is_bb),
    .ex_is_cf   (x_is_cf),
    .ex_illegal (!idex_q.ctrl.legal),
    .not_bb     (not_bb_exc),
    .not_bb_pc  (not_bb_pc),
    .exc        (x_exc),
    .exc_cause  (x_cause),
    .e_flag     (e_flag),
    .e_cause    (exc_cause),
    .e_pc       (exc_pc)
  );

  // kill squashes everything younger than EX; squash_self also drops the EX
  // instruction (EBREAK, or an undecodable word).
  logic squash_self;
  assign kill        = x_body && (x_exc || idex_q.ctrl.halt);
  assign squash_self = x_body && (idex_q.ctrl.halt || (x_exc && x_cause == EXC_ILLEGAL));

  // A missing bb is reported once every older instruction has left EX: an
  // EBREAK or an exception ahead of it in program order takes precedence.
  assign not_bb_exc = not_bb && !fd_busy && !ifid_q.valid && !idex_q.valid && !halted_q;

  loop_counter_unit #(.NSETS(NLOOP)) u_loop (
    .clk, .rst_n,
    .lc_we      (x_body && idex_q.is_lcnt && idex_q.lc_set_ok && !squash_self),
    .lc_set     (idex_q.lc_set),
    .lc_val     (x_alu),
    .apply      (lc_apply),
    .bb_addr    (lc_bb_addr),
    .ls         (lc_ls),
    .le         (lc_le),
    .fallthrough(lc_ft),
    .loop_end   (loop_end),
    .loop_target(loop_target),
    .loop_back  (loop_back)
  );

  // ---------------------------------------------------------------- memory
  logic [31:0] m_load, m_word;
  logic [1:0]  m_off;
  always_comb begin
    dmem_addr  = exmem_q.result;
    m_off      = exmem_q.result[1:0];
    dmem_be    = 4'b0000;
    dmem_wdata = exmem_q.store_val << (8 * m_off);
    if (exmem_q.valid && exmem_q.mem_write) begin
      unique case (exmem_q.funct3[1:0])
        2'b00:   dmem_be = 4'b0001 << m_off;
        2'b01:   dmem_be = 4'b0011 << m_off;
        default: dmem_be = 4'b1111;
      endcase
    end
    m_word = dmem_rdata >> (8 * m_off);
    unique case (exmem_q.funct3)
      3'b000:  m_load = {{24{m_word[7]}},  m_word[7:0]};
      3'b001:  m_load = {{16{m_word[15]}}, m_word[15:0]};
      3'b100:  m_load = {24'b0, m_word[7:0]};
      3'b101:  m_load = {16'b0, m_word[15:0]};
      default: m_load = dmem_rdata;
    endcase
  end

  // ---------------------------------------------------------------- pipeline registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ifid_q   <= '0;
      idex_q   <= '0;
      exmem_q  <= '0;
      memwb_q  <= '0;
      halted_q <= 1'b0;
    end else begin
      // IF/ID
      if (kill) begin
        ifid_q.valid <= 1'b0;
      end else if (!stall) begin
        ifid_q <= fd_out;
      end
      // ID/EX
      if (kill || stall) begin
        idex_q.valid <= 1'b0;
      end else begin
        idex_q.valid     <= ifid_q.valid;
        idex_q.pc        <= ifid_q.pc;
        idex_q.slot      <= ifid_q.slot;
        idex_q.tag       <= ifid_q.tag;
        idex_q.first     <= ifid_q.first;
        idex_q.last      <= ifid_q.last;
        idex_q.nocf      <= ifid_q.nocf;
        idex_q.ft        <= ifid_q.ft;
        idex_q.ctrl      <= d_body ? d_ctrl : '{legal: 1'b1, alu_op: ALU_ADD, cf: CF_NONE, default: '0};
        idex_q.rs1       <= d_rs1;
        idex_q.rs2       <= d_rs2;
        idex_q.rd        <= d_rd;
        idex_q.rs1_val   <= d_rs1_val;
        idex_q.rs2_val   <= d_rs2_val;
        idex_q.is_bb     <= d_is_bb;
        idex_q.bb        <= d_bb;
        idex_q.is_lcnt   <= d_is_lcnt;
        idex_q.lc_set    <= d_lc_set;
        idex_q.lc_set_ok <= d_lc_set_ok;
      end
      // EX/MEM
      exmem_q.valid     <= idex_q.valid && !squash_self;
      exmem_q.reg_write <= x_body && !squash_self && idex_q.ctrl.reg_write && idex_q.rd != 5'd0;
      exmem_q.rd        <= idex_q.rd;
      exmem_q.result    <= x_is_cf ? x_link : x_alu;
      exmem_q.mem_read  <= x_body && idex_q.ctrl.mem_read;
      exmem_q.mem_write <= x_body && !squash_self && idex_q.ctrl.mem_write;
      exmem_q.funct3    <= idex_q.ctrl.mem_funct3;
      exmem_q.store_val <= x_rs2;
      exmem_q.bb_res    <= idex_q.valid && idex_q.slot == SLOT_BB;
      exmem_q.bb_is_bb  <= idex_q.is_bb;
      exmem_q.bb        <= idex_q.bb;
      exmem_q.bb_addr   <= idex_q.pc;
      exmem_q.cf_res    <= x_body && x_is_cf;
      exmem_q.cf_tag    <= idex_q.tag;
      exmem_q.cf_target <= x_target;
      // MEM/WB
      memwb_q.valid     <= exmem_q.valid;
      memwb_q.reg_write <= exmem_q.reg_write;
      memwb_q.rd        <= exmem_q.rd;
      memwb_q.wdata     <= exmem_q.mem_read ? m_load : exmem_q.result;
      if (x_body && idex_q.ctrl.halt) halted_q <= 1'b1;
    end
  end

  assign halted        = halted_q;
  assign exc_flag      = e_flag;
  assign ev_retire     = memwb_q.valid;
  assign ev_fetch      = f_valid;
  assign ev_load_stall = stall;
  assign ev_forward    = x_body && x_fwd;
  assign ev_prefetch   = prefetch_issue;
  assign ev_block      = promote;
  assign ev_loop_back  = lc_apply && loop_back;
  assign ev_cf         = exmem_q.valid && exmem_q.cf_res;

  // A store and a load never share the MEM stage.
  a_mem_excl: assert property (@(posedge clk) disable iff (!rst_n)
                               !(exmem_q.mem_read && exmem_q.mem_write));
endmodule
