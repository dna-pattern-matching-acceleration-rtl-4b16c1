// tb_tag_register: self-checking testbench of the 512 tag flip-flops. Random match-line
// vectors; tags must follow on capture, hold otherwise and clear on clear.
`timescale 1ns/1ps
module tb_tag_register;
  localparam int unsigned M = 512;
  logic clk = 0, rst_n = 0, clear = 0, capture = 0;
  logic [M-1:0] ml, tag, exp_tag;
  always #1 clk = ~clk;
  tag_register #(.M(M)) dut (.clk, .rst_n, .clear, .capture, .ml, .tag);
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
    exp_tag = '0;
    for (int t = 0; t < 100; t++) begin
      for (int i = 0; i < M; i += 32) ml[i +: 32] = $urandom;
      capture = $urandom_range(1, 0);
      @(negedge clk);
      if (capture) exp_tag = ml;
      capture = 0;
      check(tag == exp_tag, $sformatf("cycle %0d: tags differ", t));
    end
    clear = 1; @(negedge clk); clear = 0;
    check(tag == '0, "clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
