// tb_bb_fetch_unit: drives the fetch unit with a model of the rest of the
// pipeline: every fetched instruction travels through three register slots
// (ID, EX, MEM) and, in MEM, a bb slot reports the decoded size and flags of
// the word at its address and a control-flow instruction reports its
// outcome. Decoding here is the testbench's own.
// Checks: body instructions are fetched exactly in program order, bb slots
// exactly at block starts in order (nothing is ever fetched that does not
// execute), a missing bb raises not_bb with its address, and - with no
// stalls - the fetch timing: the next bb 3 cycles after a block-ending
// branch, the next body 3 cycles after its bb, and the next bb of a
// sequential block interposed before the current block's body ends. A second
// run with random pipeline stalls must give the same order.
module tb_bb_fetch_unit;
  import bb_pkg::*;
  import tb_asm_pkg::*;

  logic clk = 0, rst_n = 0, stall;
  logic if_valid, if_tag, if_first, if_last, if_nocf;
  slot_t if_slot;
  logic [31:0] if_pc, if_fallthrough;
  logic bb_res_valid, bb_res_is_bb, cf_res_valid, cf_res_tag, lcnt_pending;
  bb_info_t bb_res_info;
  logic [31:0] bb_res_addr, cf_res_target, lc_bb_addr, lc_fallthrough, loop_target, not_bb_pc;
  logic lc_apply, loop_end, not_bb, promote, prefetch_issue;
  logic [3:0] lc_ls, lc_le;

  bb_fetch_unit dut (.clk, .rst_n, .stall, .halt(1'b0), .if_valid, .if_pc, .if_slot, .if_tag,
    .if_first, .if_last, .if_nocf, .if_fallthrough, .bbp_addr(), .bbp_rdata(32'h0), .bb_res_valid, .bb_res_is_bb, .bb_res_info,
    .bb_res_addr, .cf_res_valid, .cf_res_tag, .cf_res_target, .lcnt_pending, .lc_apply,
    .lc_bb_addr, .lc_ls, .lc_le, .lc_fallthrough, .loop_end, .loop_target, .not_bb, .not_bb_pc,
    .promote, .prefetch_issue);

  always #5 clk = ~clk;

  typedef struct packed { logic v; slot_t slot; logic tag; logic [31:0] pc; } stage_t;
  stage_t pipe [3];
  logic [31:0] mem [64];
  logic [31:0] cf_target [int];
  int checks = 0, failures = 0, cycle = 0, random_stall = 0;
  int body_seen [$], bb_seen [$];
  int fetch_at [int];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // results from the MEM slot of the model
  always_comb begin
    logic [31:0] w;
    w = mem[pipe[2].pc[7:2]];
    bb_res_valid  = pipe[2].v && pipe[2].slot == SLOT_BB;
    bb_res_is_bb  = (w[6:0] == 7'b0001011);
    bb_res_info.n = 17'(w >> 16) + 17'd1;
    bb_res_info.seq = w[7];
    bb_res_info.ls = w[11:8];
    bb_res_info.le = w[15:12];
    bb_res_addr   = pipe[2].pc;
    cf_res_valid  = pipe[2].v && pipe[2].slot == SLOT_BODY && cf_target.exists(int'(pipe[2].pc));
    cf_res_tag    = pipe[2].tag;
    cf_res_target = cf_res_valid ? cf_target[int'(pipe[2].pc)] : 32'h0;
  end

  always @(posedge clk) begin
    cycle <= cycle + 1;
    stall <= random_stall != 0 && ($urandom_range(0, 3) == 0);
    if (!rst_n) begin
      for (int i = 0; i < 3; i++) pipe[i] <= '0;
    end else begin
      if (if_valid) begin
        if (if_slot == SLOT_BODY) body_seen.push_back(int'(if_pc));
        else bb_seen.push_back(int'(if_pc));
        if (!fetch_at.exists(int'(if_pc))) fetch_at[int'(if_pc)] = cycle;
      end
      pipe[2] <= pipe[1];
      if (stall) pipe[1] <= '0;
      else begin
        pipe[1] <= pipe[0];
        pipe[0] <= '{v: if_valid, slot: if_slot, tag: if_tag, pc: if_pc};
      end
    end
  end

  task automatic run_once(input int stalls);
    random_stall = stalls;
    body_seen.delete(); bb_seen.delete(); fetch_at.delete();
    rst_n = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int c = 0; c < 400 && !not_bb; c++) @(posedge clk);
    #1;
  endtask

  int exp_body [$] = '{4, 8, 16, 20, 24, 44, 48, 56, 132, 136, 140, 148};
  int exp_bb   [$] = '{0, 12, 40, 52, 128, 144, 152};

  initial begin
    stall = 0; lcnt_pending = 0; loop_end = 0; loop_target = 0;
    foreach (mem[i]) mem[i] = nop();
    mem[0]  = bb(2, 1);
    mem[3]  = bb(3, 0); cf_target[16] = 40;          // branch first, taken
    mem[7]  = bb(1, 1);                              // skipped block
    mem[10] = bb(2, 0); cf_target[48] = 52;          // not taken: fall-through
    mem[13] = bb(1, 0); cf_target[56] = 128;         // one-instruction block, branch last
    mem[32] = bb(3, 1);
    mem[36] = bb(1, 1);
    mem[38] = 32'h0;                                 // 152: not a bb

    for (int r = 0; r < 2; r++) begin
      run_once(r);
      check(body_seen == exp_body, $sformatf("run %0d body order %p", r, body_seen));
      check(bb_seen == exp_bb, $sformatf("run %0d bb order %p", r, bb_seen));
      check(not_bb && not_bb_pc == 152, "missing bb reported");
      if (r == 0) begin
        check(fetch_at[128] - fetch_at[56] == 3, "next bb 3 cycles after block-ending branch");
        check(fetch_at[132] - fetch_at[128] == 3, "body 3 cycles after its bb");
        check(fetch_at[144] < fetch_at[140], "next bb interposed in a sequential block");
        check(fetch_at[40] - fetch_at[16] == 3, "bb fetched as soon as the branch resolves");
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
