// tb_regfile: random writes and reads against a shadow copy; x0 stays zero;
// a read of the register being written returns the new value.
module tb_regfile;
  logic clk = 0, rst_n = 0, we;
  logic [4:0] ra1, ra2, wa;
  logic [31:0] rd1, rd2, wd;
  logic [31:0] shadow [32];
  int checks = 0, failures = 0;

  regfile dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    we = 0; wa = 0; wd = 0; ra1 = 0; ra2 = 0;
    foreach (shadow[i]) shadow[i] = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 32; i++) begin
      ra1 = 5'(i); #1; check(rd1 == 0, "reset value");
    end
    for (int i = 0; i < 1000; i++) begin
      we = 1'($urandom); wa = 5'($urandom); wd = $urandom;
      ra1 = 5'($urandom); ra2 = (i % 3 == 0) ? wa : 5'($urandom);
      #1;
      check(rd1 == ((ra1 == 0) ? 0 : (we && wa == ra1) ? wd : shadow[ra1]), "port 1");
      check(rd2 == ((ra2 == 0) ? 0 : (we && wa == ra2) ? wd : shadow[ra2]), "port 2");
      @(posedge clk);
      if (we && wa != 0) shadow[wa] = wd;
      #1;
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
