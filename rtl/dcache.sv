// dcache: data memory of the core, BYTES bytes (default 4096 bytes as the
// paper's data cache). As for the instruction side, the paper gives only the
// size, so this is the cache's data array used as a tightly coupled memory:
// every access hits in one cycle.
// Port A (core, MEM stage): combinational read of the word at addr;
// byte-enabled write (be) of wdata on the clock edge. Port B: word write for
// loading data before reset is released. Addresses are byte addresses and wrap
// at BYTES.
module dcache #(
  parameter int BYTES = 4096
) (
  input  logic        clk,
  input  logic [31:0] addr,
  output logic [31:0] rdata,
  input  logic [3:0]  be,
  input  logic [31:0] wdata,
  input  logic        load_we,
  input  logic [31:0] load_addr,
  input  logic [31:0] load_data
);
  localparam int WORDS = BYTES / 4;
  localparam int AW    = $clog2(WORDS);

  logic [31:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (load_we) begin
      mem[load_addr[AW+1:2]] <= load_data;
    end else begin
      for (int i = 0; i < 4; i++)
        if (be[i]) mem[addr[AW+1:2]][8*i +: 8] <= wdata[8*i +: 8];
    end
  end

  assign rdata = mem[addr[AW+1:2]];
endmodule
