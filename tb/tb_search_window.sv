// tb_search_window: self-checking testbench of the MASK/PATTERN registers (N = 130, P = 3).
// Loads a random pattern and shifts it across all 128 window positions. At every position
// the active columns must carry the published search voltage of their pattern character
// (A 250 mV, C 380 mV, G 530 mV, T 710 mV on both lines) and every other column the mask
// voltages (V_LDL = 800 mV, V_UDL = 0). clear must mask every column.
`timescale 1ns/1ps
module tb_search_window;
  import dna_pkg::*;
  localparam int unsigned N = 130, P = 3;
  logic clk = 0, rst_n = 0, clear = 0, load = 0, shift = 0;
  nuc_t pattern [P];
  mv_t v_ldl [N], v_udl [N];
  always #1 clk = ~clk;
  search_window #(.N(N), .P(P)) dut (.clk, .rst_n, .clear, .load, .pattern, .shift, .v_ldl, .v_udl);
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
  function automatic int unsigned mv_of(nuc_t n);
    case (n) NUC_A: return 250; NUC_C: return 380; NUC_G: return 530; default: return 710; endcase
  endfunction
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 3; t++) begin
      for (int j = 0; j < P; j++) pattern[j] = nuc_t'($urandom_range(3, 0));
      load = 1; @(negedge clk); load = 0;
      for (int k = 0; k <= N - P; k++) begin
        for (int c = 0; c < N; c++) begin
          if (c >= k && c < k + P)
            check(v_ldl[c] == mv_t'(mv_of(pattern[c-k])) && v_udl[c] == mv_t'(mv_of(pattern[c-k])),
                  $sformatf("pos %0d col %0d: active voltages %0d/%0d", k, c, v_ldl[c], v_udl[c]));
          else
            check(v_ldl[c] == 800 && v_udl[c] == 0, $sformatf("pos %0d col %0d: not masked", k, c));
        end
        shift = 1; @(negedge clk); shift = 0;
      end
    end
    clear = 1; @(negedge clk); clear = 0;
    for (int c = 0; c < N; c++) check(v_ldl[c] == 800 && v_udl[c] == 0, "clear must mask all columns");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
