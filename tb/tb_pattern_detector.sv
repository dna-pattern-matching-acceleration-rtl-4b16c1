// tb_pattern_detector: self-checking testbench of pattern_detector (P = 3, W = 8).
//
// First replays the published example (X = 1 0 1 1 1 0 0 0 0, D high on the ninth bit,
// expected global maximum 2) and checks the FSM state sequence Initial, S2, S3, S6, S2, S4,
// S5, S1, S3, Exit. Then runs random bit streams (with long runs so counters saturate)
// against a reference that, for every residue class mod 3, counts the longest run of 1s.
// Also checks that done rises exactly n+P+4 clocks after start.
`timescale 1ns/1ps
module tb_pattern_detector;
  localparam int unsigned P = 3, W = 8;
  logic clk = 0, rst_n = 0, start = 0, x = 0, d = 0;
  logic [W-1:0] gmax;
  logic done;
  always #1 clk = ~clk;

  pattern_detector #(.P(P), .W(W)) dut (.clk, .rst_n, .start, .x, .d, .global_max(gmax), .done);

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

  // Published state name of the FSM state.
  function automatic string sname();
    if (dut.u_fsm.in_init) return "Initial";
    if (dut.u_fsm.in_exit) return "Exit";
    for (int j = 0; j < P; j++) begin
      if (dut.u_fsm.c[j]) return $sformatf("S%0d", 2 * j + 2);
      if (dut.u_fsm.r[j]) return $sformatf("S%0d", 2 * j + 1);
    end
    return "?";
  endfunction

  // Feed bits (already including trailing zeros); d on the last. Returns cycles to done.
  task automatic run(input bit bits [], output int unsigned lat);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    lat = 1;
    for (int i = 0; i < bits.size(); i++) begin
      x = bits[i];
      d = (i == bits.size() - 1);
      @(negedge clk);
      lat++;
    end
    x = 0; d = 0;
    while (!done) begin @(negedge clk); lat++; end
  endtask

  initial begin
    bit ex [] = '{1,0,1,1,1,0,0,0,0};
    string exp_states [10] = '{"Initial","S2","S3","S6","S2","S4","S5","S1","S3","Exit"};
    int unsigned lat;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // published example, with state trace
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    for (int i = 0; i < 9; i++) begin
      check(sname() == exp_states[i], $sformatf("step %0d state %s, expected %s", i, sname(), exp_states[i]));
      x = ex[i]; d = (i == 8);
      @(negedge clk);
    end
    x = 0; d = 0;
    check(sname() == "Exit", $sformatf("final state %s, expected Exit", sname()));
    repeat (3) @(negedge clk);
    check(done && gmax == 2, $sformatf("example: global max %0d done %0d, expected 2", gmax, done));

    // random streams
    for (int t = 0; t < 40; t++) begin
      int unsigned n, best, runlen [P];
      bit s [];
      n = $urandom_range(300, 3);
      s = new[n + P + 1];
      best = 0;
      for (int j = 0; j < P; j++) runlen[j] = 0;
      for (int i = 0; i < n; i++) begin
        if (t % 8 == 7) s[i] = (i % P == 1) || ($urandom_range(9, 0) == 0);  // long runs
        else            s[i] = ($urandom_range(2, 0) != 0);
        if (s[i]) begin
          runlen[i % P]++;
          if (runlen[i % P] > best) best = runlen[i % P];
        end else runlen[i % P] = 0;
      end
      for (int i = n; i < n + P + 1; i++) s[i] = 0;
      run(s, lat);
      if (best > 255) best = 255;
      check(gmax == W'(best), $sformatf("stream %0d (n=%0d): global max %0d, expected %0d", t, n, gmax, best));
      check(lat == n + P + 4, $sformatf("stream %0d: done after %0d clocks, expected %0d", t, lat, n + P + 4));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
