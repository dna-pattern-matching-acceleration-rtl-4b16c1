// tb_control_unit: self-checking testbench of the control unit at reduced size (4 blocks,
// 8 search cycles, 6 read groups, P = 3). A small pattern-detector stand-in answers done
// a fixed time after d. Checks: blocks are visited in mask order and only those selected;
// each block has exactly NW tag captures and NW memory writes, each write half a slow
// cycle after its capture; NGRP PISO loads with pd_start on the first; d comes 8+P+1 fast
// cycles after the last load; the memory reset lasts one slow cycle; and done pulses once.
`timescale 1ns/1ps
module tb_control_unit;
  localparam int unsigned NBLK = 4, NW = 8, NGRP = 6, P = 3, W = 8;
  logic clk = 0, rst_n = 0, go = 0;
  logic [NBLK-1:0] blk_mask;
  logic busy, done, result_valid, ce1, ce_half, blk_en, sw_load, sw_shift, sw_clear, tag_capture;
  logic mem_wr, mem_rd, mem_rst, col_inc, sel_inc, sel_clear, piso_load, pd_start, pd_d, pd_done;
  logic [1:0] result_blk, blk_idx;
  logic [W-1:0] result_max, pd_max;
  always #1 clk = ~clk;
  control_unit #(.NBLK(NBLK), .NW(NW), .NGRP(NGRP), .P(P), .W(W)) dut (
    .clk, .rst_n, .go, .blk_mask, .busy, .done, .result_valid, .result_blk, .result_max,
    .ce1, .ce_half, .blk_idx, .blk_en, .sw_load, .sw_shift, .sw_clear, .tag_capture,
    .mem_wr, .mem_rd, .mem_rst, .col_inc, .sel_inc, .sel_clear, .piso_load,
    .pd_start, .pd_d, .pd_done, .pd_max);
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
  // detector stand-in: done two clocks after d, result = 10 + block index
  logic [1:0] d_dly;
  always @(posedge clk) begin
    d_dly <= {d_dly[0], pd_d};
    if (pd_start) pd_done <= 0;
    else if (d_dly[1]) pd_done <= 1;
  end
  assign pd_max = W'(10) + W'(blk_idx);

  initial begin
    int unsigned caps, wrs, loads, cyc, t_cap, t_lastload, nres, ndone, t_rst;
    int exp_blk;
    bit pd_d_q;
    pd_d_q = 0;
    pd_done = 0; d_dly = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 3; t++) begin
      blk_mask = (t == 0) ? 4'b1011 : (t == 1) ? 4'b0100 : 4'b0000;
      @(negedge clk); go = 1; @(negedge clk); go = 0;
      caps = 0; wrs = 0; loads = 0; cyc = 0; nres = 0; ndone = 0; exp_blk = -1; t_rst = 0;
      while (busy || ndone == 0) begin
        @(posedge clk); #0.1; cyc++;
        if (tag_capture) begin caps++; t_cap = cyc; end
        if (mem_wr) begin
          wrs++;
          check(cyc - t_cap == 4, $sformatf("write %0d fast cycles after capture, expected 4", cyc - t_cap));
        end
        if (piso_load) begin
          check(pd_start == (loads == 0), "pd_start must come with the first load only");
          loads++; t_lastload = cyc;
        end
        if (pd_d && !pd_d_q) check(cyc - t_lastload == 8 + P + 1, $sformatf("d %0d cycles after last load", cyc - t_lastload));
        pd_d_q = pd_d;
        if (mem_rst) begin
          check(ce1, "reset strobe on slow-cycle boundary");
          if (t_rst != 0 && nres > 0) check(cyc - t_rst == 7, $sformatf("reset strobe %0d fast cycles into the reset phase, expected 7 (its 8th cycle)", cyc - t_rst));
        end
        if (int'(dut.state) == 6 && t_rst == 0) t_rst = cyc;
        if (int'(dut.state) != 6) t_rst = 0;
        if (result_valid) begin
          nres++;
          begin
            int nb;
            nb = -1;
            for (int b = NBLK - 1; b > exp_blk; b--) if (blk_mask[b]) nb = b;
            check(int'(result_blk) == nb, $sformatf("result for block %0d, expected %0d", result_blk, nb));
            exp_blk = nb;
          end
          check(result_max == W'(10) + W'(result_blk), "result_max must be the detector's value");
          check(caps == NW && wrs == NW && loads == NGRP,
                $sformatf("block %0d: %0d captures %0d writes %0d loads", result_blk, caps, wrs, loads));
          caps = 0; wrs = 0; loads = 0;
        end
        if (done) ndone++;
      end
      check(nres == $countones(blk_mask), $sformatf("%0d results for mask %b", nres, blk_mask));
      check(ndone == 1, "done must pulse once");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
