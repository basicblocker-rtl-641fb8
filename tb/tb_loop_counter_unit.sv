// tb_loop_counter_unit: the paper's single-block loop (lcnt 3, a bb with the
// start and end flag of set 1) must jump back twice and then fall through,
// i.e. run the body three times; a two-block loop on set 3 (start flag in one
// bb, end flag in another) with lcnt computed as rs1 + imm; an unflagged bb
// leaves the counters alone.
module tb_loop_counter_unit;
  import bb_pkg::*;
  logic clk = 0, rst_n = 0;
  logic lc_we, apply, loop_end, loop_back;
  logic [1:0] lc_set;
  logic [31:0] lc_val, bb_addr, fallthrough, loop_target;
  logic [3:0] ls, le;
  int checks = 0, failures = 0;

  loop_counter_unit dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic do_lcnt(input int set, input int val);
    lc_we = 1; lc_set = 2'(set); lc_val = 32'(val);
    @(posedge clk); #1; lc_we = 0;
  endtask

  // apply a bb; check the combinational decision before the clock edge
  task automatic do_bb(input logic [31:0] addr, input logic [3:0] s, input logic [3:0] e,
                       input bit exp_end, input bit exp_back, input logic [31:0] exp_t,
                       input string what);
    apply = 1; bb_addr = addr; ls = s; le = e; fallthrough = addr + 12;
    #1;
    check(loop_end == exp_end && loop_back == exp_back && loop_target == exp_t,
          $sformatf("%s end=%0d back=%0d target=%h", what, loop_end, loop_back, loop_target));
    @(posedge clk); #1; apply = 0;
  endtask

  initial begin
    lc_we = 0; apply = 0; lc_set = 0; lc_val = 0; bb_addr = 0; ls = 0; le = 0; fallthrough = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // single-block loop, set lc1 (flag bit 0), 3 iterations
    do_lcnt(0, 3);
    do_bb(32'h48, 4'b0001, 4'b0001, 1, 1, 32'h48, "iter1");
    do_bb(32'h48, 4'b0001, 4'b0001, 1, 1, 32'h48, "iter2");
    do_bb(32'h48, 4'b0001, 4'b0001, 1, 0, 32'h54, "iter3 exit");
    // plain bb: no loop effect
    do_bb(32'h100, 4'b0000, 4'b0000, 0, 0, 32'h10c, "plain");
    // two-block loop on set lc3 (bit 2), count 2
    do_lcnt(2, 2);
    do_bb(32'h200, 4'b0100, 4'b0000, 0, 0, 32'h20c, "A start");
    do_bb(32'h220, 4'b0000, 4'b0100, 1, 1, 32'h200, "C back");
    do_bb(32'h200, 4'b0100, 4'b0000, 0, 0, 32'h20c, "A start 2");
    do_bb(32'h220, 4'b0000, 4'b0100, 1, 0, 32'h22c, "C exit");
    // set lc1 untouched by set lc3 activity: counter 0 -> exit at once
    do_bb(32'h48, 4'b0001, 4'b0001, 1, 0, 32'h54, "lc1 exhausted");
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
