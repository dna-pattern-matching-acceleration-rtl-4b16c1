// tb_match_index_mem: self-checking testbench of the 64 x 128 match-index memory model.
// Writes 128 random tag vectors column by column (one-hot z), then reads every row in
// sixteen 8-cell groups through the multiplexers and sense amplifiers and compares with a
// reference array; checks that the read path is silent when rd is low and that one reset
// returns every cell to HRS (0).
`timescale 1ns/1ps
module tb_match_index_mem;
  localparam int unsigned NROW = 64, NCOL = 128;
  logic clk = 0, wr = 0, rd = 0, rst = 0;
  logic [NROW-1:0] tag, d;
  logic [NCOL-1:0] z;
  logic [3:0] sel;
  logic [7:0] csa;
  logic [NCOL-1:0] refm [NROW];
  always #1 clk = ~clk;
  match_index_mem #(.NROW(NROW), .NCOL(NCOL)) dut (.clk, .wr, .rd, .rst, .tag, .z, .d, .sel, .csa);
  int unsigned checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    #200000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic read_all(input bit expect_zero);
    for (int i = 0; i < NROW; i++)
      for (int s = 0; s < NCOL / 8; s++) begin
        d = NROW'(1) << i; sel = 4'(s); rd = 1; #0.1;
        check(csa == (expect_zero ? 8'h00 : refm[i][8*s +: 8]),
              $sformatf("row %0d group %0d: read %h expected %h", i, s, csa, refm[i][8*s +: 8]));
      end
    rd = 0;
  endtask
  initial begin
    d = '0; sel = '0; z = '0; tag = '0;
    @(negedge clk);
    rst = 1; @(negedge clk); rst = 0;
    for (int i = 0; i < NROW; i++) refm[i] = '0;
    for (int j = 0; j < NCOL; j++) begin
      tag = {$urandom, $urandom};
      z = NCOL'(1) << j;
      wr = 1; @(negedge clk); wr = 0;
      for (int i = 0; i < NROW; i++) refm[i][j] = tag[i];
    end
    z = '0;
    read_all(0);
    d = NROW'(1); #0.1;
    check(csa == 8'h00, "csa must be 0 while rd is low");
    @(negedge clk);
    rst = 1; @(negedge clk); rst = 0;
    read_all(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
