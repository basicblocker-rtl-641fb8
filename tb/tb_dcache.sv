// tb_dcache: random byte-enabled writes and loads against a shadow byte array
// of 4096 bytes; every read is compared with the shadow.
module tb_dcache;
  logic clk = 0, load_we;
  logic [31:0] addr, rdata, wdata, load_addr, load_data;
  logic [3:0] be;
  logic [7:0] shadow [4096];
  int checks = 0, failures = 0;

  dcache dut (.*);
  always #5 clk = ~clk;

  initial begin
    load_we = 0; be = 0; addr = 0; wdata = 0; load_addr = 0; load_data = 0;
    for (int i = 0; i < 1024; i++) begin
      load_we = 1; load_addr = 32'(i * 4); load_data = 32'(i);
      for (int k = 0; k < 4; k++) shadow[i * 4 + k] = (k == 0) ? 8'(i) : (k == 1) ? 8'(i >> 8) : 8'h0;
      @(posedge clk); #1;
    end
    load_we = 0;
    for (int i = 0; i < 3000; i++) begin
      addr = $urandom_range(0, 4095) & ~32'd3;
      be = 4'($urandom); wdata = $urandom;
      #1;
      checks++;
      if (rdata != {shadow[addr + 3], shadow[addr + 2], shadow[addr + 1], shadow[addr]}) begin
        failures++; $display("FAIL: read %h", addr);
      end
      @(posedge clk); #1;
      for (int k = 0; k < 4; k++) if (be[k]) shadow[addr + k] = wdata[8*k +: 8];
      be = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
