// tb_mux_selector: self-checking testbench of the 4-bit multiplexer select counter.
// Checks that sel counts 0..15 and wraps and that row_adv is high exactly on the increment
// that leaves sel = 15 (the AND of all counter outputs).
`timescale 1ns/1ps
module tb_mux_selector;
  localparam int unsigned NGRP = 16;
  logic clk = 0, rst_n = 0, clear = 0, inc = 0;
  logic [3:0] sel;
  logic row_adv;
  always #1 clk = ~clk;
  mux_selector #(.NGRP(NGRP)) dut (.clk, .rst_n, .clear, .inc, .sel, .row_adv);
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
    int unsigned exp_sel;
    repeat (2) @(negedge clk);
    rst_n = 1;
    exp_sel = 0;
    for (int k = 0; k < 100; k++) begin
      inc = ($urandom_range(3, 0) != 0); #0.1;
      check(sel == 4'(exp_sel), $sformatf("sel %0d expected %0d", sel, exp_sel));
      check(row_adv == (inc && exp_sel == 15), "row_adv must mark the increment out of sel = 15");
      @(negedge clk);
      if (inc) exp_sel = (exp_sel + 1) % 16;
      inc = 0;
    end
    clear = 1; @(negedge clk); clear = 0;
    check(sel == 0, "clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
