// tb_comparison_logic: self-checking testbench of the comparison logic (P = 3, W = 8).
// Random max1..max3 (including ties); the global maximum register must take the largest
// value on load, hold without load and clear on clear.
`timescale 1ns/1ps
module tb_comparison_logic;
  localparam int unsigned P = 3, W = 8;
  logic clk = 0, rst_n = 0, clear = 0, load = 0;
  logic [W-1:0] max_in [P];
  logic [W-1:0] gmax;
  always #1 clk = ~clk;
  comparison_logic #(.P(P), .W(W)) dut (.clk, .rst_n, .clear, .load, .max_in, .global_max(gmax));
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
    int unsigned e, prev;
    repeat (2) @(negedge clk);
    rst_n = 1;
    prev = 0;
    for (int t = 0; t < 200; t++) begin
      for (int j = 0; j < P; j++) max_in[j] = (t % 4 == 0) ? W'(7) : W'($urandom_range(255, 0));
      e = 0;
      for (int j = 0; j < P; j++) if (max_in[j] > e) e = max_in[j];
      load = (t % 3 != 2);
      @(negedge clk);
      load = 0;
      if (t % 3 != 2) prev = e;
      check(gmax == W'(prev), $sformatf("global max %0d, expected %0d", gmax, prev));
    end
    clear = 1; @(negedge clk); clear = 0;
    check(gmax == 0, "clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
