// tb_pd_fsm: self-checking testbench of the pattern-detector state machine (P = 3).
// Drives random X/D sequences and checks every state against a reference that tracks the
// pointer index (bit i belongs to pointer ((i-1) mod 3)+1) and whether the bit was 1 (Cj)
// or 0 (Rj); also checks Initial/Exit, the CLR output and that Exit holds (XX self-loop).
`timescale 1ns/1ps
module tb_pd_fsm;
  localparam int unsigned P = 3;
  logic clk = 0, rst_n = 0, start = 0, x = 0, d = 0;
  logic [P-1:0] c, r;
  logic clr, in_init, in_exit;
  always #1 clk = ~clk;
  pd_fsm #(.P(P)) dut (.clk, .rst_n, .start, .x, .d, .c, .r, .clr, .in_init, .in_exit);
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
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(in_exit && clr, "after reset the FSM should idle in Exit");
    for (int t = 0; t < 50; t++) begin
      int unsigned n, ptr;
      bit lastx;
      n = $urandom_range(40, 1);
      start = 1; @(negedge clk); start = 0;
      check(in_init && clr && c == 0 && r == 0, "Initial state expected after start");
      for (int i = 0; i < n; i++) begin
        x = $urandom_range(1, 0);
        d = 0;
        lastx = x;
        ptr = i % P;
        @(negedge clk);
        check(!clr && c == (lastx ? P'(1) << ptr : '0) && r == (lastx ? '0 : P'(1) << ptr),
              $sformatf("bit %0d x=%0d: c=%b r=%b, expected pointer %0d %s", i, lastx, c, r, ptr + 1, lastx ? "C" : "R"));
      end
      x = $urandom_range(1, 0); d = 1;
      @(negedge clk);
      d = 0;
      check(in_exit && clr && c == 0 && r == 0, "Exit expected after D");
      x = $urandom_range(1, 0); d = $urandom_range(1, 0);
      @(negedge clk);
      check(in_exit, "Exit must hold for any input");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
