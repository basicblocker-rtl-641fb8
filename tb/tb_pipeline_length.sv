// tb_pipeline_length: the SoC with 0 to 3 dummy stages between fetch and
// decode (FD_DELAY = k) and each of the three points where a bb's size can
// return to fetch (BB_INFO_STAGE = s: 2 EX/MEM, 1 ID/EX, 0 IF/ID), one
// instance per pair, all running the same program. Four more instances
// (k = 0..3) read bb words through the second instruction port (BB_PORT).
//
// The program sums an 8-word array (sum 92) three times:
//  * LA: a 6-instruction loop block whose branch is its second instruction;
//  * LB: a 3-instruction loop block driven by loop counter set 1, right after
//    the lcnt that loads it. The lcnt ends a long sequential block, so LB's
//    bb is known well before the lcnt has executed and the block switch must
//    wait for it, also while the lcnt sits in a dummy stage;
//  * LC: a 5-instruction loop block whose branch is its last instruction
//    (the worst case).
// Each sum must be 92 in every configuration. The steady-state loop period
// (cycles between two block switches to the same loop block) is checked
// against a count worked out from the pipeline timing. A branch result
// reaches fetch 3 + k cycles after the branch is fetched; a bb's size
// 1 + s + k cycles after the bb is fetched:
//  * LA: max(n + 1, j + 3 + s + 2k) = max(7, 5 + s + 2k)
//        (n = 6 body words, branch at position j = 2);
//  * LB: max(n + 1, 2 + s + k)      = max(4, 2 + s + k)
//        (n = 3, the next bb is fetched right after the first body word);
//  * LC: n + 3 + s + 2k             = 8 + s + 2k (n = 5, branch last).
// The first block's body must start 1 + s + k cycles after its bb.
// With the second port a bb never takes a fetch slot and its size is known
// the cycle after it is requested, so a block of n instructions costs n
// cycles and a branch result starts the next block one cycle after it
// reaches fetch:
//  * LA: max(n, j + 3 + k) = max(6, 5 + k);
//  * LB: n                 = 3;
//  * LC: n + 3 + k         = 8 + k.
// No bb may then appear on the main fetch port.
// No loop has a load-use stall, so no other cycles enter. A watchdog ends a
// stuck run.
`timescale 1ns/1ps
module tb_pipeline_length;
  import bb_pkg::*;
  import tb_asm_pkg::*;

  localparam int NK = 4, NS = 3, NCFG = NK * NS + NK;
  localparam int LA = 5 * 4, LB = 19 * 4, LC = 28 * 4;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic load_we = 1'b0, load_sel = 1'b0;
  logic [31:0] load_addr = '0, load_data = '0;
  logic loaded = 1'b0;
  int checks = 0, failures = 0, cycle = 0;
  bit done [NCFG];

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  for (genvar g = 0; g < NCFG; g++) begin : g_cfg
    localparam int K = g % NK;
    localparam bit P = g >= NK * NS;
    localparam int S = P ? 2 : g / NK;
    logic halted, exc_flag;
    exc_t exc_cause;
    logic [31:0] exc_pc;
    logic ev_retire, ev_fetch, ev_load_stall, ev_forward, ev_prefetch, ev_block, ev_loop_back, ev_cf;
    int last_at, n_stall, at0, at4;
    logic [31:0] last_pc;
    int periods [3][$];

    bb_soc #(.FD_DELAY(K), .BB_INFO_STAGE(S), .BB_PORT(P)) dut (
      .clk, .rst_n, .load_we, .load_sel, .load_addr, .load_data,
      .halted, .exc_flag, .exc_cause, .exc_pc,
      .ev_retire, .ev_fetch, .ev_load_stall, .ev_forward, .ev_prefetch,
      .ev_block, .ev_loop_back, .ev_cf
    );

    // period between consecutive block switches to the same loop block
    always @(posedge clk) begin
      if (rst_n) begin
        n_stall += int'(ev_load_stall);
        if (ev_fetch && dut.u_core.imem_addr == 0 && at0 < 0) at0 = cycle;
        if (ev_fetch && dut.u_core.imem_addr == 4 && at4 < 0) at4 = cycle;
        if (ev_block) begin
          logic [31:0] pc;
          pc = dut.u_core.u_fetch.lc_bb_addr;
          if (pc == last_pc) begin
            if (pc == LA) periods[0].push_back(cycle - last_at);
            if (pc == LB) periods[1].push_back(cycle - last_at);
            if (pc == LC) periods[2].push_back(cycle - last_at);
          end
          last_pc = pc;
          last_at = cycle;
        end
      end
    end

    initial begin
      int exp_p [3];
      last_at = 0; last_pc = '1; n_stall = 0; at0 = -1; at4 = -1;
      wait (loaded);
      for (int c = 0; c < 2000 && !halted && !exc_flag; c++) @(posedge clk);
      repeat (4) @(posedge clk);
      #1;
      exp_p[0] = (5 + S + 2 * K > 7) ? 5 + S + 2 * K : 7;
      exp_p[1] = (2 + S + K > 4) ? 2 + S + K : 4;
      exp_p[2] = 8 + S + 2 * K;
      if (P) begin
        exp_p[0] = (5 + K > 6) ? 5 + K : 6;
        exp_p[1] = 3;
        exp_p[2] = 8 + K;
      end
      check(halted && !exc_flag, $sformatf("k=%0d s=%0d: halted (exc=%0d cause=%0d pc=%0d)", K, S,
                                           exc_flag, exc_cause, exc_pc));
      check(dut.u_dcache.mem[64] == 92, $sformatf("k=%0d s=%0d: LA sum %0d", K, S, dut.u_dcache.mem[64]));
      check(dut.u_dcache.mem[65] == 92, $sformatf("k=%0d s=%0d: LB sum %0d", K, S, dut.u_dcache.mem[65]));
      check(dut.u_dcache.mem[66] == 92, $sformatf("k=%0d s=%0d: LC sum %0d", K, S, dut.u_dcache.mem[66]));
      if (P) check(at0 < 0 && at4 >= 0, $sformatf("k=%0d port: bb on the main port", K));
      else check(at4 - at0 == 1 + S + K, $sformatf("k=%0d s=%0d: first body %0d cycles after its bb",
                                                   K, S, at4 - at0));
      check(n_stall == 0, $sformatf("k=%0d s=%0d: %0d load-use stalls", K, S, n_stall));
      for (int l = 0; l < 3; l++) begin
        check(periods[l].size() == 7, $sformatf("k=%0d s=%0d loop %0d: %0d repeats", K, S, l, periods[l].size()));
        foreach (periods[l][i])
          check(periods[l][i] == exp_p[l],
                $sformatf("k=%0d s=%0d loop %0d: period %0d, expected %0d", K, S, l, periods[l][i], exp_p[l]));
      end
      $display("k=%0d s=%0d port=%0d: loop periods %0d %0d %0d", K, S, P, exp_p[0], exp_p[1], exp_p[2]);
      done[g] = 1'b1;
    end
  end

  logic [31:0] prog [64];
  initial begin
    foreach (prog[i]) prog[i] = 32'h0;
    prog[0]  = bb(4, 1);
    prog[1]  = addi(1, 0, 32'h200);
    prog[2]  = addi(2, 0, 8);
    prog[3]  = addi(3, 0, 0);
    prog[4]  = addi(4, 0, 0);
    prog[5]  = bb(6, 0);                    // LA
    prog[6]  = addi(2, 2, -1);
    prog[7]  = bne(2, 0, LA - 28);
    prog[8]  = lw(5, 1, 0);
    prog[9]  = addi(1, 1, 4);
    prog[10] = add(3, 3, 5);
    prog[11] = nop();
    prog[12] = bb(6, 1);                    // lcnt last, after the next bb is known
    prog[13] = sw(3, 0, 32'h100);
    prog[14] = addi(1, 0, 32'h200);
    prog[15] = nop();
    prog[16] = nop();
    prog[17] = nop();
    prog[18] = lcnt(1, 0, 8);
    prog[19] = bb(3, 0, 4'b0001, 4'b0001);  // LB
    prog[20] = lw(5, 1, 0);
    prog[21] = addi(1, 1, 4);
    prog[22] = add(6, 6, 5);
    prog[23] = bb(4, 1);
    prog[24] = sw(6, 0, 32'h104);
    prog[25] = addi(1, 0, 32'h200);
    prog[26] = addi(2, 0, 8);
    prog[27] = addi(7, 0, 0);
    prog[28] = bb(5, 0);                    // LC
    prog[29] = lw(5, 1, 0);
    prog[30] = addi(1, 1, 4);
    prog[31] = add(7, 7, 5);
    prog[32] = addi(2, 2, -1);
    prog[33] = bne(2, 0, LC - 132);
    prog[34] = bb(2, 1);
    prog[35] = sw(7, 0, 32'h108);
    prog[36] = ebreak();

    // load: program, then clear data memory and place the array at 0x200
    load_we = 1'b1;
    for (int i = 0; i < 1024; i++) begin
      load_sel = 1'b0; load_addr = 32'(i * 4); load_data = (i < 64) ? prog[i] : 32'h0;
      @(posedge clk); #1;
      load_sel = 1'b1;
      load_data = (i >= 128 && i < 136) ? 32'(3 * (i - 128) + 1) : 32'h0;
      @(posedge clk); #1;
    end
    load_we = 1'b0;
    @(posedge clk); #1;
    rst_n = 1'b1;
    loaded = 1'b1;
    for (int g = 0; g < NCFG; g++) wait (done[g]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #4000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
