// tb_bb_port: the end-to-end programs of tb_bb_soc on two SoCs side by side,
// one at the defaults and one that reads bb words through the second
// instruction port (BB_PORT). The default SoC is checked as in tb_bb_soc.
//
// Loads small hand-assembled programs through the load port, runs them to
// EBREAK or to a BB exception, and checks registers, memory and timing
// against values worked out by hand:
//  * program A exercises sequential blocks, a loop closed by a branch placed
//    early in its block, a call (JAL, link = end of the calling block) with an
//    instruction after it in the same block, a return placed last in its block
//    (the worst case), a load-use stall, operand forwarding, an lcnt followed
//    by a loop-counter block (three iterations), and the interposed fetch of
//    the next bb while the current block is still being fetched;
//  * fetch timing: a sequential bb's block body starts 3 cycles after the bb
//    is fetched, and after a branch that ends its block the next bb is fetched
//    3 cycles and the next body 6 cycles after the branch (resolution in EX,
//    used from the EX/MEM register);
//  * programs E1..E5 each break one BasicBlocker rule and must stop with the
//    right exception cause and PC: at once for a bb inside a block, after the
//    block's last instruction for control-flow errors, when execution reaches
//    the missing bb for the enforced-BB case; nothing younger executes.
// A second SoC built with the second bb port (BB_PORT) runs every program
// alongside and must end with the same registers, data memory, exception
// cause and PC.
// Every mechanism must occur at least once. A watchdog ends a stuck run.
`timescale 1ns/1ps
module tb_bb_port;
  import bb_pkg::*;
  import tb_asm_pkg::*;

  logic clk = 1'b0;
  logic rst_n;
  logic load_we, load_sel;
  logic [31:0] load_addr, load_data;
  logic halted, exc_flag;
  exc_t exc_cause;
  logic [31:0] exc_pc;
  logic ev_retire, ev_fetch, ev_load_stall, ev_forward, ev_prefetch, ev_block, ev_loop_back, ev_cf;

  bb_soc dut (.*);

  logic halted2, exc_flag2;
  exc_t exc_cause2;
  logic [31:0] exc_pc2;
  logic [7:0] ev2;

  bb_soc #(.BB_PORT(1'b1)) dut2 (
    .clk, .rst_n, .load_we, .load_sel, .load_addr, .load_data,
    .halted(halted2), .exc_flag(exc_flag2), .exc_cause(exc_cause2), .exc_pc(exc_pc2),
    .ev_retire(ev2[0]), .ev_fetch(ev2[1]), .ev_load_stall(ev2[2]), .ev_forward(ev2[3]),
    .ev_prefetch(ev2[4]), .ev_block(ev2[5]), .ev_loop_back(ev2[6]), .ev_cf(ev2[7])
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycle = 0;
  int n_retire, n_stall, n_fwd, n_prefetch, n_block, n_loop, n_cf, n_lcnt_wait, n_exc;
  logic [31:0] prog [1024];
  int fetch_cycle [int];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n && $test$plusargs("trace")) $display("c%0d fetch v=%0d pc=%0d slot=%0d ic=%0d nb=%0d tk=%0d t=%0d stall=%0d exmem bb=%0d cf=%0d exc=%0d/%0d", cycle, ev_fetch, dut.u_core.imem_addr, dut.u_core.u_fetch.if_slot, dut.u_core.u_fetch.ic_q, dut.u_core.u_fetch.nb_q, dut.u_core.u_fetch.tk_q, dut.u_core.u_fetch.t_q, ev_load_stall, dut.u_core.exmem_q.bb_res, dut.u_core.exmem_q.cf_res, exc_flag, exc_cause);
    if (rst_n) begin
      n_retire   += int'(ev_retire);
      n_stall    += int'(ev_load_stall);
      n_fwd      += int'(ev_forward);
      n_prefetch += int'(ev_prefetch);
      n_block    += int'(ev_block);
      n_loop     += int'(ev_loop_back);
      n_cf       += int'(ev_cf);
      if (dut.u_core.u_fetch.ic_q == '0 && dut.u_core.u_fetch.nb_d == 2'd2 &&
          dut.u_core.lcnt_pending && |(dut.u_core.u_fetch.p_d.ls | dut.u_core.u_fetch.p_d.le))
        n_lcnt_wait++;
      if (ev_fetch && !fetch_cycle.exists(int'(dut.u_core.imem_addr)))
        fetch_cycle[int'(dut.u_core.imem_addr)] = cycle;
    end
  end

  // Load prog[] into instruction memory (rest zero) and clear data memory.
  task automatic run(input int max_cycles);
    rst_n = 1'b0;
    load_we = 1'b1;
    for (int i = 0; i < 1024; i++) begin
      load_sel = 1'b0; load_addr = 32'(i * 4); load_data = prog[i];
      @(posedge clk); #1;
      load_sel = 1'b1; load_data = 32'h0;
      @(posedge clk); #1;
    end
    load_we = 1'b0;
    fetch_cycle.delete();
    @(posedge clk); #1;
    rst_n = 1'b1;
    for (int c = 0; c < max_cycles; c++) begin
      @(posedge clk); #1;
      if ((halted || exc_flag) && (halted2 || exc_flag2)) break;
    end
    repeat (5) @(posedge clk);
    #1;
  endtask

  // the BB_PORT SoC must end in the same state as the default one
  task automatic check_port(input string name);
    bit same;
    same = halted2 == halted && exc_flag2 == exc_flag &&
           (!exc_flag || (exc_cause2 == exc_cause && exc_pc2 == exc_pc));
    for (int r = 1; r < 32; r++) same &= dut2.u_core.u_rf.regs[r] == dut.u_core.u_rf.regs[r];
    for (int a = 0; a < 1024; a++) same &= dut2.u_dcache.mem[a] == dut.u_dcache.mem[a];
    check(same, $sformatf("%s: BB_PORT SoC ends in a different state (exc=%0d cause=%0d pc=%0d)",
                          name, exc_flag2, exc_cause2, exc_pc2));
  endtask

  function automatic logic [31:0] rf(input int r);
    return dut.u_core.u_rf.regs[r];
  endfunction
  function automatic logic [31:0] dm(input int a);
    return dut.u_dcache.mem[a / 4];
  endfunction

  initial begin
    #2000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; load_we = 1'b0; load_sel = 1'b0; load_addr = '0; load_data = '0;
    n_retire = 0; n_stall = 0; n_fwd = 0; n_prefetch = 0; n_block = 0; n_loop = 0;
    n_cf = 0; n_lcnt_wait = 0; n_exc = 0;

    // ---------------- program A
    foreach (prog[i]) prog[i] = 32'h0;
    prog[0]  = bb(3, 1);                 // block 0, sequential
    prog[1]  = addi(1, 0, 5);
    prog[2]  = addi(2, 0, 7);
    prog[3]  = add(3, 1, 2);             // forwarded operands: 12
    prog[4]  = bb(4, 0);                 // 16: loop block, branch second
    prog[5]  = addi(1, 1, -1);
    prog[6]  = bne(1, 0, -8);            // 24 -> 16 while x1 != 0
    prog[7]  = add(4, 4, 3);
    prog[8]  = addi(5, 5, 1);
    prog[9]  = bb(3, 0);                 // 36: call block
    prog[10] = addi(6, 0, 32'h100);
    prog[11] = jal(1, 120 - 44);         // 44: call 120, link = 52
    prog[12] = sw(4, 6, 0);              // still executed before the call takes effect
    prog[13] = bb(4, 1);                 // 52: return point, sequential
    prog[14] = lw(7, 6, 0);
    prog[15] = addi(8, 7, 1);            // load-use stall
    prog[16] = lcnt(1, 0, 3);            // lc1 = 3
    prog[17] = addi(9, 0, 0);
    prog[18] = bb(2, 0, 4'b0001, 4'b0001); // 72: loop start/end, set lc1
    prog[19] = addi(9, 9, 2);
    prog[20] = mul(10, 9, 9);
    prog[21] = bb(4, 1);                 // 84
    prog[22] = sw(10, 6, 4);
    prog[23] = lw(12, 6, 4);
    prog[24] = addi(13, 12, 1);          // load-use stall
    prog[25] = ebreak();
    prog[30] = bb(2, 0);                 // 120: function, return last (worst case)
    prog[31] = addi(11, 0, 42);
    prog[32] = jalr(0, 1, 0);            // 128 -> 52
    run(2000);
    check_port("A");
    check(halted && !exc_flag, "A: halted without exception");
    check(rf(3) == 12, $sformatf("A: x3=%0d", rf(3)));
    check(rf(4) == 60, $sformatf("A: x4=%0d", rf(4)));
    check(rf(5) == 5,  $sformatf("A: x5=%0d", rf(5)));
    check(rf(1) == 52, $sformatf("A: link x1=%0d", rf(1)));
    check(rf(7) == 60, $sformatf("A: x7=%0d", rf(7)));
    check(rf(8) == 61, $sformatf("A: x8=%0d", rf(8)));
    check(rf(9) == 6,  $sformatf("A: x9=%0d (loop iterations)", rf(9)));
    check(rf(10) == 36, $sformatf("A: x10=%0d", rf(10)));
    check(rf(11) == 42, $sformatf("A: x11=%0d", rf(11)));
    check(dm(32'h100) == 60, $sformatf("A: mem[100]=%0d", dm(32'h100)));
    check(rf(13) == 37, $sformatf("A: x13=%0d", rf(13)));
    check(dm(32'h104) == 36, $sformatf("A: mem[104]=%0d", dm(32'h104)));
    // timing
    check(fetch_cycle[4] - fetch_cycle[0] == 3,
          $sformatf("A: seq block body starts %0d cycles after its bb", fetch_cycle[4] - fetch_cycle[0]));
    check(fetch_cycle[52] - fetch_cycle[128] == 3,
          $sformatf("A: bb fetched %0d cycles after final branch", fetch_cycle[52] - fetch_cycle[128]));
    check(fetch_cycle[56] - fetch_cycle[128] == 6,
          $sformatf("A: next body %0d cycles after final branch", fetch_cycle[56] - fetch_cycle[128]));
    // bb of block 1 is fetched before block 0's body is complete (interposed)
    check(fetch_cycle[16] < fetch_cycle[12],
          $sformatf("A: next bb interposed (bb@%0d body@%0d)", fetch_cycle[16], fetch_cycle[12]));
    check(n_loop == 2, $sformatf("A: loop-back count %0d", n_loop));

    // ---------------- E1: bb inside a block
    foreach (prog[i]) prog[i] = 32'h0;
    prog[0] = bb(3, 1); prog[1] = addi(1, 0, 1); prog[2] = bb(1, 1); prog[3] = addi(2, 0, 2);
    prog[4] = bb(1, 1); prog[5] = ebreak();
    run(200);
    check(exc_flag && exc_cause == EXC_BB_IN_BLOCK && exc_pc == 8, "E1: bb in block");
    check(rf(1) == 1 && rf(2) == 0, "E1: older executed, younger squashed");
    n_exc += int'(exc_flag);
    check_port("E1");

    // ---------------- E2: control flow in a sequential block
    foreach (prog[i]) prog[i] = 32'h0;
    prog[0] = bb(2, 1); prog[1] = beq(0, 0, 8); prog[2] = addi(3, 0, 3);
    prog[3] = bb(1, 1); prog[4] = ebreak();
    run(200);
    check(exc_flag && exc_cause == EXC_CF_IN_SEQ && exc_pc == 8, "E2: branch in sequential block");
    check(rf(3) == 3, "E2: raised after the block's last instruction");
    n_exc += int'(exc_flag);
    check_port("E2");

    // ---------------- E3: non-sequential block without control flow
    foreach (prog[i]) prog[i] = 32'h0;
    prog[0] = bb(2, 0); prog[1] = addi(1, 0, 1); prog[2] = addi(2, 0, 2);
    prog[3] = bb(1, 1); prog[4] = ebreak();
    run(200);
    check(exc_flag && exc_cause == EXC_NO_CF && exc_pc == 8, "E3: missing control flow");
    check(rf(1) == 1 && rf(2) == 2, "E3: block completed before the exception");
    n_exc += int'(exc_flag);
    check_port("E3");

    // ---------------- E4: enforced BB, block without bb
    foreach (prog[i]) prog[i] = 32'h0;
    prog[0] = bb(1, 1); prog[1] = addi(1, 0, 1); prog[2] = addi(2, 0, 2); prog[3] = ebreak();
    run(200);
    check(exc_flag && exc_cause == EXC_NOT_BB && exc_pc == 8, "E4: block not opened by bb");
    check(rf(1) == 1 && rf(2) == 0, "E4: non-bb not executed");
    n_exc += int'(exc_flag);
    check_port("E4");

    // ---------------- E5: two control-flow instructions
    foreach (prog[i]) prog[i] = 32'h0;
    prog[0] = bb(3, 0); prog[1] = jal(0, 12); prog[2] = jal(0, 12); prog[3] = addi(4, 0, 4);
    prog[4] = bb(1, 1); prog[5] = ebreak();
    run(200);
    check(exc_flag && exc_cause == EXC_EXTRA_CF && exc_pc == 12, "E5: second control flow");
    check(rf(4) == 4, "E5: raised after the block's last instruction");
    n_exc += int'(exc_flag);
    check_port("E5");

    // ---------------- every mechanism happened
    $display("events: retire=%0d load_stall=%0d forward=%0d prefetch=%0d block=%0d loop_back=%0d cf=%0d lcnt_wait=%0d exc=%0d",
             n_retire, n_stall, n_fwd, n_prefetch, n_block, n_loop, n_cf, n_lcnt_wait, n_exc);
    check(n_stall > 0,     "mechanism: load-use stall");
    check(n_fwd > 0,       "mechanism: forwarding");
    check(n_prefetch > 0,  "mechanism: interposed bb prefetch");
    check(n_block > 0,     "mechanism: block switch");
    check(n_loop > 0,      "mechanism: loop counter jump back");
    check(n_cf > 0,        "mechanism: control flow to T");
    check(n_lcnt_wait > 0, "mechanism: block switch waits for lcnt");
    check(n_exc == 5,      "mechanism: BB exceptions");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
