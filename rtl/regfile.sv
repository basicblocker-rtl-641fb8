// regfile: 32 x 32-bit integer registers, x0 reads as zero. Two asynchronous
// read ports and one synchronous write port. A read of the register written in
// the same cycle returns the new value (write-through), so the write-back
// stage needs no separate bypass. All registers reset to zero.
module regfile (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [4:0]  ra1,
  input  logic [4:0]  ra2,
  output logic [31:0] rd1,
  output logic [31:0] rd2,
  input  logic        we,
  input  logic [4:0]  wa,
  input  logic [31:0] wd
);
  logic [31:0] regs [32];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 32; i++) regs[i] <= '0;
    end else if (we && wa != 5'd0) begin
      regs[wa] <= wd;
    end
  end

  always_comb begin
    rd1 = (ra1 == 5'd0) ? 32'd0 : (we && wa == ra1) ? wd : regs[ra1];
    rd2 = (ra2 == 5'd0) ? 32'd0 : (we && wa == ra2) ? wd : regs[ra2];
  end
endmodule
