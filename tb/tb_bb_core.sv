// tb_bb_core: the core alone, with behavioural instruction and data memories
// in the testbench. Runs an array sum twice: once as a loop closed by a
// branch scheduled second in its six-instruction block, once as a
// three-instruction block driven by the hardware loop counter. Checks both
// sums (92) in memory, and the steady-state loop period: with the branch
// early enough, or with the loop counter, a block of n instructions costs
// n + 1 cycles (its bb included), i.e. no stall cycles at block transitions.
module tb_bb_core;
  import bb_pkg::*;
  import tb_asm_pkg::*;

  logic clk = 0, rst_n = 0;
  logic [31:0] imem_addr, imem_rdata, imem2_addr, imem2_rdata, dmem_addr, dmem_rdata, dmem_wdata, exc_pc;
  logic [3:0] dmem_be;
  logic halted, exc_flag;
  exc_t exc_cause;
  logic ev_retire, ev_fetch, ev_load_stall, ev_forward, ev_prefetch, ev_block, ev_loop_back, ev_cf;

  bb_core dut (.*);
  always #5 clk = ~clk;

  logic [31:0] imem [256];
  logic [31:0] dmem [1024];
  assign imem_rdata = imem[imem_addr[9:2]];
  assign imem2_rdata = imem[imem2_addr[9:2]];
  assign dmem_rdata = dmem[dmem_addr[11:2]];
  always @(posedge clk)
    for (int k = 0; k < 4; k++) if (dmem_be[k]) dmem[dmem_addr[11:2]][8*k +: 8] <= dmem_wdata[8*k +: 8];

  int checks = 0, failures = 0, cycle = 0;
  int block_at [$];
  logic [31:0] block_pc [$];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n && ev_block) begin
      block_at.push_back(cycle);
      block_pc.push_back(dut.u_fetch.lc_bb_addr);
    end
  end

  localparam int LA = 5 * 4;    // branch loop bb address
  localparam int LB = 16 * 4;   // loop-counter loop bb address

  initial begin
    foreach (imem[i]) imem[i] = 32'h0;
    foreach (dmem[i]) dmem[i] = 32'h0;
    for (int i = 0; i < 8; i++) dmem[128 + i] = 32'(3 * i + 1);   // array at 0x200
    imem[0]  = bb(4, 1);
    imem[1]  = addi(1, 0, 32'h200);
    imem[2]  = addi(2, 0, 8);
    imem[3]  = addi(3, 0, 0);
    imem[4]  = addi(4, 0, 0);
    imem[5]  = bb(6, 0);                    // LA
    imem[6]  = addi(2, 2, -1);
    imem[7]  = bne(2, 0, LA - 28);
    imem[8]  = lw(5, 1, 0);
    imem[9]  = addi(1, 1, 4);
    imem[10] = add(3, 3, 5);
    imem[11] = nop();
    imem[12] = bb(3, 1);
    imem[13] = sw(3, 0, 32'h100);
    imem[14] = addi(1, 0, 32'h200);
    imem[15] = lcnt(1, 0, 8);
    imem[16] = bb(3, 0, 4'b0001, 4'b0001);  // LB
    imem[17] = lw(5, 1, 0);
    imem[18] = addi(1, 1, 4);
    imem[19] = add(6, 6, 5);
    imem[20] = bb(2, 1);
    imem[21] = sw(6, 0, 32'h104);
    imem[22] = ebreak();
    imem[23] = bb(1, 1);
    imem[24] = ebreak();

    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int c = 0; c < 1000 && !halted && !exc_flag; c++) @(posedge clk);
    repeat (4) @(posedge clk);
    #1;
    check(halted && !exc_flag, $sformatf("halted (exc=%0d cause=%0d)", exc_flag, exc_cause));
    check(dmem[64] == 92, $sformatf("branch-loop sum %0d", dmem[64]));
    check(dmem[65] == 92, $sformatf("loop-counter sum %0d", dmem[65]));
    begin
      int na = 0, nb = 0;
      for (int i = 1; i < block_pc.size(); i++) begin
        if (block_pc[i] == LA && block_pc[i - 1] == LA) begin
          na++;
          check(block_at[i] - block_at[i - 1] == 7,
                $sformatf("branch loop period %0d", block_at[i] - block_at[i - 1]));
        end
        if (block_pc[i] == LB && block_pc[i - 1] == LB) begin
          nb++;
          check(block_at[i] - block_at[i - 1] == 4,
                $sformatf("loop-counter period %0d", block_at[i] - block_at[i - 1]));
        end
      end
      check(na == 7, $sformatf("branch loop iterations %0d", na + 1));
      check(nb == 7, $sformatf("loop-counter iterations %0d", nb + 1));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
