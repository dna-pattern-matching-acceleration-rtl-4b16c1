// tb_piso8: self-checking testbench of the 8-bit PISO register. Loads random bytes every
// eight clocks and checks the serial stream bit by bit (bit 0 first), then checks that
// zeros follow once the register is empty.
`timescale 1ns/1ps
module tb_piso8;
  logic clk = 0, rst_n = 0, load = 0, shift = 1, sout;
  logic [7:0] pin;
  always #1 clk = ~clk;
  piso8 dut (.clk, .rst_n, .load, .pin, .shift, .sout);
  int unsigned checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    logic [7:0] v;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 100; t++) begin
      v = 8'($urandom);
      pin = v; load = 1; @(negedge clk); load = 0;
      for (int i = 0; i < 8; i++) begin
        check(sout == v[i], $sformatf("byte %0d bit %0d: %0d expected %0d", t, i, sout, v[i]));
        if (i < 7) @(negedge clk);
      end
    end
    @(negedge clk);
    for (int i = 0; i < 10; i++) begin check(sout == 0, "zeros after the last bit"); @(negedge clk); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
