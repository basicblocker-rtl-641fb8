// icache: instruction memory of the core, BYTES bytes of 32-bit words
// (default 4096 bytes as the paper's instruction cache).
// The paper gives only the size and organisation (4096 bytes, one way) of the
// instruction cache and nothing of the memory behind it, so this block is the
// cache's data array used as a tightly coupled memory: every access hits.
// Read: combinational, rdata = word at raddr (byte address, low two bits
// ignored, address wraps at BYTES). A second read port (raddr2/rdata2) lets
// the fetch unit read the next block's bb in parallel with the block body; it
// is used only when the core is built with that option. Write: one word per clock through the
// program-load port (we, waddr, wdata), used to fill it before reset is
// released.
module icache #(
  parameter int BYTES = 4096
) (
  input  logic        clk,
  input  logic [31:0] raddr,
  output logic [31:0] rdata,
  input  logic [31:0] raddr2,
  output logic [31:0] rdata2,
  input  logic        we,
  input  logic [31:0] waddr,
  input  logic [31:0] wdata
);
  localparam int WORDS = BYTES / 4;
  localparam int AW    = $clog2(WORDS);

  logic [31:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr[AW+1:2]] <= wdata;
  end

  assign rdata  = mem[raddr[AW+1:2]];
  assign rdata2 = mem[raddr2[AW+1:2]];
endmodule
