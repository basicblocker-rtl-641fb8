// bb_soc: top level. A BasicBlocker RV32 core with its 4096-byte instruction
// and data memories, plus a load port that writes either memory while the core
// is held in reset (load_sel 0: instruction memory, 1: data memory; word
// address load_addr, data load_data). The core starts at RESET_PC, where the
// program's first bb instruction must sit. Status and performance-event
// outputs come straight from the core; see bb_core. FD_DELAY adds dummy
// pipeline stages between fetch and decode for pipeline-length studies; 0 is
// the normal five-stage core. BB_INFO_STAGE selects where a bb's size returns
// to fetch (2 EX/MEM, the reference timing; 1 after decode; 0 bit-mask decode
// of the fetched word). BB_PORT reads bb words through a second read port of
// the instruction memory, in parallel with the block body.
module bb_soc
  import bb_pkg::*;
#(
  parameter int          IMEM_BYTES = 4096,
  parameter int          DMEM_BYTES = 4096,
  parameter logic [31:0] RESET_PC   = 32'h0,
  parameter int unsigned FD_DELAY   = 0,
  parameter int unsigned BB_INFO_STAGE = 2,
  parameter bit          BB_PORT    = 1'b0
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        load_we,
  input  logic        load_sel,
  input  logic [31:0] load_addr,
  input  logic [31:0] load_data,
  output logic        halted,
  output logic        exc_flag,
  output exc_t        exc_cause,
  output logic [31:0] exc_pc,
  output logic        ev_retire,
  output logic        ev_fetch,
  output logic        ev_load_stall,
  output logic        ev_forward,
  output logic        ev_prefetch,
  output logic        ev_block,
  output logic        ev_loop_back,
  output logic        ev_cf
);
  logic [31:0] imem_addr, imem_rdata, imem2_addr, imem2_rdata;
  logic [31:0] dmem_addr, dmem_rdata, dmem_wdata;
  logic [3:0]  dmem_be;

  bb_core #(.RESET_PC(RESET_PC), .FD_DELAY(FD_DELAY), .BB_INFO_STAGE(BB_INFO_STAGE),
            .BB_PORT(BB_PORT)) u_core (
    .clk, .rst_n,
    .imem_addr, .imem_rdata, .imem2_addr, .imem2_rdata, .dmem_addr, .dmem_rdata, .dmem_be, .dmem_wdata,
    .halted, .exc_flag, .exc_cause, .exc_pc,
    .ev_retire, .ev_fetch, .ev_load_stall, .ev_forward, .ev_prefetch,
    .ev_block, .ev_loop_back, .ev_cf
  );

  icache #(.BYTES(IMEM_BYTES)) u_icache (
    .clk, .raddr(imem_addr), .rdata(imem_rdata), .raddr2(imem2_addr), .rdata2(imem2_rdata),
    .we(load_we && !load_sel), .waddr(load_addr), .wdata(load_data)
  );

  dcache #(.BYTES(DMEM_BYTES)) u_dcache (
    .clk, .addr(dmem_addr), .rdata(dmem_rdata), .be(dmem_be), .wdata(dmem_wdata),
    .load_we(load_we && load_sel), .load_addr(load_addr), .load_data(load_data)
  );
endmodule
