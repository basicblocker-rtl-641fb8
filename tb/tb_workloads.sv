// tb_workloads: two benchmark kernels on the SoC at its default sizes,
// hand-assembled in BasicBlocker form.
//
//  * crc32: bitwise CRC-32 (reflected polynomial 0xEDB88320, initial value
//    and final xor all ones) over 256 generated bytes. The outer loop over
//    bytes ends in a block that holds only its branch; the inner eight-step
//    loop is a single block counted by loop counter set 1 and loaded by an
//    lcnt at the end of the preceding block.
//  * matmult: C = A * B for 16x16 32-bit integer matrices (A at 0x000,
//    B at 0x400, C at 0x800: 3 KiB of the 4 KiB data memory). The k loop is
//    one block on loop counter set 1; the j loop spans three blocks (start
//    flag on the first, end flag on the last) on set 2, around the k loop;
//    the i loop is closed by a branch scheduled second in its block.
//
// A second SoC, built with the second bb port (BB_PORT), runs each kernel
// alongside and must produce the same results; its cycle count is printed.
// Results are compared with values computed here. Every fetched word must
// retire, except the few already in the pipeline when EBREAK stops the core
// (no more than 3). Cycle counts and event counts are printed. A watchdog
// ends a stuck run.
`timescale 1ns/1ps
module tb_workloads;
  import bb_pkg::*;
  import tb_asm_pkg::*;

  localparam int NB = 256;   // crc32 input bytes
  localparam int N  = 16;    // matrix size

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
  int n_cycles2;

  bb_soc #(.BB_PORT(1'b1)) dut2 (
    .clk, .rst_n, .load_we, .load_sel, .load_addr, .load_data,
    .halted(halted2), .exc_flag(exc_flag2), .exc_cause(exc_cause2), .exc_pc(exc_pc2),
    .ev_retire(ev2[0]), .ev_fetch(ev2[1]), .ev_load_stall(ev2[2]), .ev_forward(ev2[3]),
    .ev_prefetch(ev2[4]), .ev_block(ev2[5]), .ev_loop_back(ev2[6]), .ev_cf(ev2[7])
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_cycles, n_fetch, n_retire, n_stall, n_block, n_loop, n_cf, n_prefetch;
  logic [31:0] prog [1024];
  logic [31:0] data [1024];
  int pc;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic e(input logic [31:0] instr);
    prog[pc] = instr;
    pc++;
  endtask

  // offset from the instruction about to be emitted to a byte address
  function automatic int off(input int target);
    return target - pc * 4;
  endfunction

  always @(posedge clk) begin
    if (rst_n && !halted && !exc_flag) begin
      n_cycles++;
      n_fetch    += int'(ev_fetch);
      n_retire   += int'(ev_retire);
      n_stall    += int'(ev_load_stall);
      n_block    += int'(ev_block);
      n_loop     += int'(ev_loop_back);
      n_cf       += int'(ev_cf);
      n_prefetch += int'(ev_prefetch);
    end
    if (rst_n && !halted2 && !exc_flag2) n_cycles2++;
  end

  task automatic run(input string name, input int max_cycles);
    rst_n = 1'b0;
    load_we = 1'b1;
    for (int i = 0; i < 1024; i++) begin
      load_sel = 1'b0; load_addr = 32'(i * 4); load_data = prog[i];
      @(posedge clk); #1;
      load_sel = 1'b1; load_data = data[i];
      @(posedge clk); #1;
    end
    load_we = 1'b0;
    n_cycles = 0; n_fetch = 0; n_retire = 0; n_stall = 0; n_block = 0; n_loop = 0;
    n_cf = 0; n_prefetch = 0; n_cycles2 = 0;
    @(posedge clk); #1;
    rst_n = 1'b1;
    for (int c = 0; c < max_cycles; c++) begin
      @(posedge clk); #1;
      if ((halted || exc_flag) && (halted2 || exc_flag2)) break;
    end
    repeat (5) @(posedge clk);
    #1;
    check(halted && !exc_flag, $sformatf("%s: halted (exc=%0d cause=%0d pc=%0d)", name,
                                         exc_flag, exc_cause, exc_pc));
    check(n_fetch - n_retire >= 0 && n_fetch - n_retire <= 3,
          $sformatf("%s: fetched %0d, retired %0d", name, n_fetch, n_retire));
    $display("%s: %0d cycles, %0d fetched, %0d blocks, %0d load-use stalls, %0d branches, %0d loop-counter jumps, %0d early bb fetches",
             name, n_cycles, n_fetch, n_block, n_stall, n_cf, n_loop, n_prefetch);
    check(halted2 && !exc_flag2, $sformatf("%s: BB_PORT SoC halted (exc=%0d cause=%0d pc=%0d)", name,
                                           exc_flag2, exc_cause2, exc_pc2));
    begin
      bit same = 1'b1;
      for (int a = 0; a < 1024; a++) same &= dut2.u_dcache.mem[a] == dut.u_dcache.mem[a];
      check(same, $sformatf("%s: BB_PORT SoC data memory differs", name));
    end
    check(n_cycles2 <= n_cycles, $sformatf("%s: BB_PORT SoC slower", name));
    $display("%s with the second bb port: %0d cycles", name, n_cycles2);
  endtask

  initial begin
    #20000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int l_outer, l_inner, l_i, l_j, l_k;
    logic [31:0] crc;
    logic [7:0]  bytes [NB];
    int a [N][N], b [N][N];
    logic [31:0] c_exp;

    rst_n = 1'b0; load_we = 1'b0; load_sel = 1'b0; load_addr = '0; load_data = '0;

    // ---------------- crc32
    foreach (prog[i]) prog[i] = 32'h0;
    foreach (data[i]) data[i] = 32'h0;
    for (int i = 0; i < NB; i++) begin
      bytes[i] = 8'($urandom);
      data[(32'h200 + i) / 4][8 * (i % 4) +: 8] = bytes[i];
    end
    pc = 0;
    e(bb(5, 1));
    e(lui(4, 'hEDB88));
    e(addi(4, 4, 'h320));                     // x4 = polynomial
    e(addi(1, 0, 'h200));                     // x1 = byte pointer
    e(addi(2, 0, 'h200 + NB));                // x2 = end
    e(addi(3, 0, -1));                        // x3 = crc
    l_outer = pc * 4;
    e(bb(4, 1));
    e(lbu(5, 1, 0));
    e(addi(1, 1, 1));
    e(xor_(3, 3, 5));
    e(lcnt(1, 0, 8));
    l_inner = pc * 4;
    e(bb(5, 0, 4'b0001, 4'b0001));            // eight steps on set 1
    e(andi(6, 3, 1));
    e(sub(6, 0, 6));                          // mask = -(crc & 1)
    e(and_(6, 6, 4));
    e(srli(3, 3, 1));
    e(xor_(3, 3, 6));
    e(bb(1, 0));
    e(bne(1, 2, off(l_outer)));
    e(bb(3, 1));
    e(xori(3, 3, -1));
    e(sw(3, 0, 'h100));
    e(ebreak());
    run("crc32", 100000);
    crc = '1;
    for (int i = 0; i < NB; i++) begin
      crc ^= 32'(bytes[i]);
      for (int k = 0; k < 8; k++) crc = (crc >> 1) ^ (crc[0] ? 32'hEDB8_8320 : 32'h0);
    end
    crc = ~crc;
    check(dut.u_dcache.mem['h100 / 4] == crc,
          $sformatf("crc32: %h, expected %h", dut.u_dcache.mem['h100 / 4], crc));
    check(n_loop == NB * 7, $sformatf("crc32: %0d loop-counter jumps", n_loop));

    // ---------------- matmult
    foreach (prog[i]) prog[i] = 32'h0;
    foreach (data[i]) data[i] = 32'h0;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        a[i][j] = int'($urandom_range(0, 2000)) - 1000;
        b[i][j] = int'($urandom_range(0, 2000)) - 1000;
        data[i * N + j]            = 32'(a[i][j]);
        data['h400 / 4 + i * N + j] = 32'(b[i][j]);
      end
    pc = 0;
    e(bb(3, 1));
    e(addi(20, 0, 0));                        // x20 = row of A
    e(addi(22, 0, 'h800));                    // x22 = C pointer
    e(addi(23, 0, N));                        // x23 = rows left
    l_i = pc * 4;
    e(bb(2, 1));
    e(addi(21, 0, 'h400));                    // x21 = column of B
    e(lcnt(2, 0, N));                         // j loop count
    l_j = pc * 4;
    e(bb(4, 1, 4'b0010, 4'b0000));            // j loop start, set 2
    e(addi(5, 20, 0));
    e(addi(6, 21, 0));
    e(addi(7, 0, 0));
    e(lcnt(1, 0, N));                         // k loop count
    l_k = pc * 4;
    e(bb(6, 0, 4'b0001, 4'b0001));            // k loop, set 1
    e(lw(8, 5, 0));
    e(lw(9, 6, 0));
    e(addi(5, 5, 4));
    e(addi(6, 6, 4 * N));
    e(mul(8, 8, 9));
    e(add(7, 7, 8));
    e(bb(3, 0, 4'b0000, 4'b0010));            // j loop end, set 2
    e(sw(7, 22, 0));
    e(addi(22, 22, 4));
    e(addi(21, 21, 4));
    e(bb(3, 0));
    e(addi(23, 23, -1));
    e(bne(23, 0, off(l_i)));                  // scheduled early in its block
    e(addi(20, 20, 4 * N));
    e(bb(1, 1));
    e(ebreak());
    run("matmult", 200000);
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        c_exp = '0;
        for (int k = 0; k < N; k++) c_exp += 32'(a[i][k] * b[k][j]);
        check(dut.u_dcache.mem['h800 / 4 + i * N + j] == c_exp,
              $sformatf("matmult: C[%0d][%0d] = %0d, expected %0d", i, j,
                        int'(dut.u_dcache.mem['h800 / 4 + i * N + j]), int'(c_exp)));
      end
    check(n_loop == N * N * (N - 1) + N * (N - 1),
          $sformatf("matmult: %0d loop-counter jumps", n_loop));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
