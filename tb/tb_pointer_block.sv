// tb_pointer_block: self-checking testbench of one pattern-detector pointer block (W = 8).
// Drives random C/R events spaced three clocks apart, as the FSM does, and checks the
// counter and the maximum register against a reference: the maximum must be updated one
// clock after R and the counter cleared two clocks after R; CLR clears the counter and
// clr_max the maximum. A run of 300 increments checks saturation at 255.
`timescale 1ns/1ps
module tb_pointer_block;
  localparam int unsigned W = 8;
  logic clk = 0, rst_n = 0, c = 0, r = 0, clr = 0, clr_max = 0;
  logic [W-1:0] ctr, max;
  always #1 clk = ~clk;
  pointer_block #(.W(W)) dut (.clk, .rst_n, .c, .r, .clr, .clr_max, .ctr, .max);
  int unsigned checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    #400000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  int unsigned rc, rm;
  task automatic ev(input bit inc, input bit long_run);
    @(negedge clk);
    c = inc; r = !inc;
    @(negedge clk);
    c = 0; r = 0;
    if (inc) begin
      if (rc < 255) rc++;
      check(ctr == W'(rc), $sformatf("counter %0d, expected %0d", ctr, rc));
    end else begin
      check(ctr == W'(rc), "counter must not change before the delayed compare");
      @(negedge clk);
      if (rc > rm) rm = rc;
      check(max == W'(rm), $sformatf("max %0d one clock after R, expected %0d", max, rm));
      check(ctr == W'(rc), "counter must still hold one clock after R");
      rc = 0;
      @(negedge clk);
      check(ctr == 0, "counter must be zero two clocks after R");
      return;
    end
    @(negedge clk);
  endtask
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    clr_max = 1; @(negedge clk); clr_max = 0;
    rc = 0; rm = 0;
    for (int i = 0; i < 300; i++) ev($urandom_range(2, 0) != 0, 0);
    for (int i = 0; i < 300; i++) ev(1, 1);
    ev(0, 0);
    check(max == 255, "saturated maximum must be 255");
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    check(ctr == 0 && max == 255, "CLR clears only the counter");
    clr_max = 1; @(negedge clk); clr_max = 0;
    check(max == 0, "clr_max clears the maximum");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
