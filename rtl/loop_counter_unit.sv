// loop_counter_unit: the BasicBlocker hardware loop counters.
//
// NSETS sets, each a trip count and a loop start address.
//  * lcnt writes a count into one set (lc_we, lc_set, lc_val = rs1 + imm),
//    from the execute stage.
//  * When a block becomes the current block (apply), its bb's flags act:
//    for every start flag the set saves the bb's own address as the loop start
//    and its count is decremented; if an end flag is set, the block ends in a
//    jump back to that set's start address while the (decremented) count is
//    not zero, and falls through to the next block in memory otherwise.
//    With lcnt 3 the body therefore runs three times.
// The end decision (loop_end, loop_target) is combinational from the apply
// inputs so the fetch unit knows the block's successor in the same cycle; the
// counters update on the clock edge.
// Follows the paper: four sets, start/end flags per set, save of the start
// address and decrement at the start bb, test at the end bb. This design's
// choices: the decrement saturates at zero; with several end flags the lowest
// set decides; the count is tested after the decrement of the same bb.
module loop_counter_unit
  import bb_pkg::*;
#(
  parameter int NSETS = NLOOP
) (
  input  logic             clk,
  input  logic             rst_n,
  // lcnt
  input  logic             lc_we,
  input  logic [1:0]       lc_set,
  input  logic [31:0]      lc_val,
  // block start
  input  logic             apply,
  input  logic [31:0]      bb_addr,
  input  logic [NSETS-1:0] ls,
  input  logic [NSETS-1:0] le,
  input  logic [31:0]      fallthrough,
  output logic             loop_end,
  output logic [31:0]      loop_target,
  output logic             loop_back     // loop_end and jumping back
);
  logic [31:0] cnt   [NSETS];
  logic [31:0] start [NSETS];
  logic [31:0] cnt_nx   [NSETS];
  logic [31:0] start_nx [NSETS];

  always_comb begin
    for (int k = 0; k < NSETS; k++) begin
      cnt_nx[k]   = cnt[k];
      start_nx[k] = start[k];
      if (ls[k]) begin
        start_nx[k] = bb_addr;
        cnt_nx[k]   = (cnt[k] == 32'd0) ? 32'd0 : cnt[k] - 32'd1;
      end
    end
    loop_end    = |le;
    loop_back   = 1'b0;
    loop_target = fallthrough;
    for (int k = NSETS - 1; k >= 0; k--) begin
      if (le[k]) begin
        loop_back   = (cnt_nx[k] != 32'd0);
        loop_target = loop_back ? start_nx[k] : fallthrough;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < NSETS; k++) begin
        cnt[k]   <= '0;
        start[k] <= '0;
      end
    end else begin
      if (apply) begin
        for (int k = 0; k < NSETS; k++) begin
          cnt[k]   <= cnt_nx[k];
          start[k] <= start_nx[k];
        end
      end
      if (lc_we && (int'(lc_set) < NSETS)) cnt[lc_set] <= lc_val;
    end
  end
endmodule
