// tb_row_selector: self-checking testbench of the 6-bit row counter and 6-to-64 decoder.
// Checks the one-hot row select for every row, disable, wrap and clear.
`timescale 1ns/1ps
module tb_row_selector;
  localparam int unsigned NROW = 64;
  logic clk = 0, rst_n = 0, clear = 0, inc = 0, enable = 0;
  logic [5:0] count;
  logic [NROW-1:0] d;
  always #1 clk = ~clk;
  row_selector #(.NROW(NROW)) dut (.clk, .rst_n, .clear, .inc, .enable, .count, .d);
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
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 2 * NROW + 5; k++) begin
      enable = 1; #0.1;
      check(d == (NROW'(1) << (k % NROW)), $sformatf("step %0d: wrong row selected", k));
      enable = 0; #0.1;
      check(d == '0, "d must be zero when disabled");
      inc = 1; @(negedge clk); inc = 0;
    end
    clear = 1; @(negedge clk); clear = 0;
    check(count == 0, "clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
