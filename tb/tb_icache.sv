// tb_icache: fills the 4096-byte instruction memory through the load port
// with an address-dependent pattern and reads every word back, including the
// wrap of addresses beyond the size, on both read ports at once (the second
// port reads the words in reverse order).
module tb_icache;
  logic clk = 0, we;
  logic [31:0] raddr, rdata, raddr2, rdata2, waddr, wdata;
  int checks = 0, failures = 0;

  icache dut (.*);
  always #5 clk = ~clk;

  function automatic logic [31:0] pat(input int i);
    return 32'(i) * 32'h9e37_79b9 ^ 32'h1234_5678;
  endfunction

  initial begin
    we = 0; raddr = 0; raddr2 = 0; waddr = 0; wdata = 0;
    for (int i = 0; i < 1024; i++) begin
      we = 1; waddr = 32'(i * 4); wdata = pat(i);
      @(posedge clk); #1;
    end
    we = 0;
    for (int i = 0; i < 1024; i++) begin
      raddr  = 32'(i * 4) + ((i % 7 == 0) ? 32'd4096 : 32'd0);
      raddr2 = 32'((1023 - i) * 4);
      #1;
      checks += 2;
      if (rdata != pat(i)) begin failures++; $display("FAIL: word %0d", i); end
      if (rdata2 != pat(1023 - i)) begin failures++; $display("FAIL: port 2 word %0d", 1023 - i); end
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
