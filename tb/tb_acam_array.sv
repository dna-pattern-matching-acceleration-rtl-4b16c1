// tb_acam_array: self-checking testbench of the aCAM array model at reduced size
// (16 x 10 array, 4 blocks of 4 rows; the cell and match-line behaviour do not depend on
// the size). Programs random rows (some cells MM), checking that each row takes 8
// programming steps, then applies random search voltages per column: for every row the
// match line must equal a reference that treats a column as matching when it is masked
// (800/0 mV) or when the applied voltage lies in the published interval of the stored
// character (A 0.19-0.31, C 0.32-0.44, G 0.46-0.59, T 0.63-0.79 V; MM never), and rows of
// deactivated blocks must always match. Also replays the published example: pattern CAG
// in the first three columns against rows CAG.., ATC.., CGT.. gives match, mismatch,
// mismatch.
`timescale 1ns/1ps
module tb_acam_array;
  import dna_pkg::*;
  localparam int unsigned M = 16, N = 10, NBLK = 4;
  logic clk = 0, rst_n = 0, prog_start = 0, prog_busy;
  logic step_en;
  logic [3:0] prog_row;
  nuc_t prog_data [N];
  mv_t v_ldl [N], v_udl [N];
  logic [NBLK-1:0] ns_blk;
  logic [M-1:0] ml;
  nuc_t stored [M][N];
  always #1 clk = ~clk;
  acam_array #(.M(M), .N(N), .NBLK(NBLK)) dut (.clk, .rst_n, .step_en, .prog_start, .prog_row,
    .prog_data, .prog_busy, .v_ldl, .v_udl, .ns_blk, .ml);
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
  function automatic bit in_iv(nuc_t n, int unsigned v);
    case (n)
      NUC_A: return v >= 190 && v <= 310;
      NUC_C: return v >= 320 && v <= 440;
      NUC_G: return v >= 460 && v <= 590;
      NUC_T: return v >= 630 && v <= 790;
      default: return 0;
    endcase
  endfunction
  // step_en every 4th clock, like a slow clock enable
  int unsigned ph = 0;
  always @(posedge clk) ph <= ph + 1;
  assign step_en = (ph % 4 == 3);

  task automatic program_row(int unsigned r);
    int unsigned steps;
    @(negedge clk);
    prog_row = 4'(r); prog_data = stored[r]; prog_start = 1;
    @(negedge clk); prog_start = 0;
    steps = 0;
    while (prog_busy) begin if (step_en) steps++; @(negedge clk); end
    check(steps == 8, $sformatf("row %0d programmed in %0d steps, expected 8", r, steps));
  endtask

  initial begin
    bit masked [N];
    int unsigned v [N];
    bit e;
    ns_blk = '0;
    for (int c = 0; c < N; c++) begin v_ldl[c] = 800; v_udl[c] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < M; r++)
      for (int c = 0; c < N; c++)
        stored[r][c] = ($urandom_range(15, 0) == 0) ? NUC_MM : nuc_t'($urandom_range(3, 0));
    stored[0][0] = NUC_C; stored[0][1] = NUC_A; stored[0][2] = NUC_G;
    stored[1][0] = NUC_A; stored[1][1] = NUC_T; stored[1][2] = NUC_C;
    stored[2][0] = NUC_C; stored[2][1] = NUC_G; stored[2][2] = NUC_T;
    for (int r = 0; r < M; r++) program_row(r);
    // published example
    v_ldl[0] = 380; v_udl[0] = 380; v_ldl[1] = 250; v_udl[1] = 250; v_ldl[2] = 530; v_udl[2] = 530;
    #0.1;
    check(ml[0] == 1 && ml[1] == 0 && ml[2] == 0, $sformatf("CAG example: ml[2:0] = %b, expected 001", ml[2:0]));
    // random searches
    for (int t = 0; t < 400; t++) begin
      for (int c = 0; c < N; c++) begin
        masked[c] = ($urandom_range(2, 0) != 0);
        v[c] = (t % 2) ? 100 + $urandom_range(700, 0)
                       : ((c % 4 == 0) ? 250 : (c % 4 == 1) ? 380 : (c % 4 == 2) ? 530 : 710);
        v_ldl[c] = masked[c] ? mv_t'(800) : mv_t'(v[c]);
        v_udl[c] = masked[c] ? mv_t'(0)   : mv_t'(v[c]);
      end
      ns_blk = NBLK'($urandom_range(15, 0));
      #0.1;
      for (int r = 0; r < M; r++) begin
        e = 1;
        for (int c = 0; c < N; c++) if (!masked[c] && !in_iv(stored[r][c], v[c])) e = 0;
        if (ns_blk[r / (M / NBLK)]) e = 1;
        check(ml[r] == e, $sformatf("search %0d row %0d: ml %0d expected %0d", t, r, ml[r], e));
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
