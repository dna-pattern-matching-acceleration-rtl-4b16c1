// tb_block_selector: self-checking testbench of the block selector. For every block index
// and both enable values checks the one-hot activation and its inversion for NS.
`timescale 1ns/1ps
module tb_block_selector;
  localparam int unsigned NBLK = 8;
  logic [2:0] blk_idx;
  logic enable;
  logic [NBLK-1:0] blk_act, ns_blk;
  block_selector #(.NBLK(NBLK)) dut (.blk_idx, .enable, .blk_act, .ns_blk);
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
    for (int e = 0; e < 2; e++)
      for (int b = 0; b < NBLK; b++) begin
        blk_idx = 3'(b); enable = e[0]; #1;
        check(blk_act == (e ? NBLK'(1) << b : '0), $sformatf("blk %0d en %0d: act %b", b, e, blk_act));
        check(ns_blk == ~blk_act, "NS must be the inverted activation");
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
