// tb_column_selector: self-checking testbench of the 7-bit column counter and 7-to-128
// decoder. Steps through all 128 columns and checks that exactly the selected column of z
// is 1 while enabled, that z is all-zero when disabled, that the counter wraps and clears.
`timescale 1ns/1ps
module tb_column_selector;
  localparam int unsigned NCOL = 128;
  logic clk = 0, rst_n = 0, clear = 0, inc = 0, enable = 0;
  logic [6:0] count;
  logic [NCOL-1:0] z;
  always #1 clk = ~clk;
  column_selector #(.NCOL(NCOL)) dut (.clk, .rst_n, .clear, .inc, .enable, .count, .z);
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
    for (int k = 0; k < 2 * NCOL; k++) begin
      enable = 1; #0.1;
      check(z == (NCOL'(1) << (k % NCOL)), $sformatf("step %0d: z has wrong column", k));
      enable = 0; #0.1;
      check(z == '0, "z must be zero when disabled");
      inc = 1; @(negedge clk); inc = 0;
    end
    inc = 1; @(negedge clk); inc = 0;
    clear = 1; @(negedge clk); clear = 0;
    check(count == 0, "clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
