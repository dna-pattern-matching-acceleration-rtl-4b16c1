// tb_dna_pm_top: end-to-end self-checking testbench of dna_pm_top at reduced size (32 x 34 aCAM, four 8-row blocks).
//
// It builds a random DNA text that fills every block of the aCAM, plants runs of
// back-to-back pattern copies (one run crossing a row boundary, so it is only found through
// the replicated cells, and the text ends before the last row is full, so MM padding is
// used), loads the text row by row through the programming port and runs two searches:
// all blocks with pattern CAG, then a subset of blocks with pattern GAA. Each block result
// is compared with a reference computed here directly from the text: the longest chain of
// pattern occurrences P characters apart that start inside the block (saturated at the
// counter width). It also checks the row-programming time (8 slow cycles per row), the
// search-plus-write time ((N-(P-1)) + 0.5 slow cycles), the read-and-detect time, the
// one-slow-cycle memory reset, and that every mechanism happened at least once.
`timescale 1ns/1ps
module tb_dna_pm_top;
  import dna_pkg::*;

  localparam int unsigned M    = 32;
  localparam int unsigned N    = 34;
  localparam int unsigned P    = 3;
  localparam int unsigned NBLK = 4;
  localparam int unsigned W    = 8;
  localparam int unsigned NCOL = N - (P - 1);
  localparam int unsigned NROW = M / NBLK;
  localparam int unsigned BLKLEN = NROW * NCOL;          // text characters per block
  localparam int unsigned L    = M * NCOL - 40;     // text length (last row not full)

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #0.0625 clk = ~clk;   // 8 GHz fast clock

  logic                    prog_start = 1'b0;
  logic [$clog2(M)-1:0]    prog_row = '0;
  nuc_t                    prog_data [N];
  logic                    prog_busy;
  logic                    go = 1'b0;
  logic [NBLK-1:0]         blk_mask = '0;
  nuc_t                    pattern [P];
  logic                    busy, done, result_valid;
  logic [$clog2(NBLK)-1:0] result_blk;
  logic [W-1:0]            result_max;

  dna_pm_top #(.M(M), .N(N), .P(P), .NBLK(NBLK), .W(W)) u_dut (
    .clk, .rst_n, .prog_start, .prog_row, .prog_data, .prog_busy,
    .go, .blk_mask, .pattern, .busy, .done, .result_valid, .result_blk, .result_max
  );

  int unsigned checks = 0, failures = 0;
  nuc_t        text [L];
  int unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // mechanism counters
  int unsigned n_blocks = 0, n_skipped = 0, n_boundary = 0, n_mm = 0, n_reset = 0,
               n_patterns = 0, n_satur = 0, n_masked_col = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic bit occ(int unsigned pos, nuc_t pat [P]);
    if (pos + P > L) return 0;
    for (int unsigned i = 0; i < P; i++) if (text[pos + i] != pat[i]) return 0;
    return 1;
  endfunction

  // Reference: longest chain of occurrences P apart starting inside block b.
  function automatic int unsigned ref_max(int unsigned b, nuc_t pat [P]);
    int unsigned run [BLKLEN];
    int unsigned best = 0;
    for (int unsigned i = 0; i < BLKLEN; i++) begin
      int unsigned pos;
      pos = b * BLKLEN + i;
      if (pos < L && occ(pos, pat)) run[i] = 1 + ((i >= P) ? run[i - P] : 0);
      else                          run[i] = 0;
      if (run[i] > best) best = run[i];
    end
    return best;
  endfunction

  task automatic plant(int unsigned pos, int unsigned reps, nuc_t pat [P]);
    for (int unsigned r = 0; r < reps; r++)
      for (int unsigned i = 0; i < P; i++)
        if (pos + r * P + i < L) text[pos + r * P + i] = pat[i];
  endtask

  task automatic load_row(int unsigned row);
    int unsigned t0, ce_cnt;
    for (int unsigned c = 0; c < N; c++) begin
      int unsigned pos;
      pos = row * NCOL + c;
      prog_data[c] = (pos < L) ? text[pos] : NUC_MM;
      if (pos >= L) n_mm++;
    end
    @(negedge clk);
    prog_row   = ($clog2(M))'(row);
    prog_start = 1'b1;
    @(negedge clk);
    prog_start = 1'b0;
    ce_cnt = 0;
    while (prog_busy) begin
      if (u_dut.u_ctrl.ce1) ce_cnt++;
      @(negedge clk);
    end
    check(ce_cnt == 8, $sformatf("row %0d took %0d slow cycles to program, expected 8", row, ce_cnt));
  endtask

  // Run one search over blk_mask and check every block result and the phase timing.
  task automatic run_search(input logic [NBLK-1:0] mask, input nuc_t pat [P]);
    int unsigned got [NBLK];
    bit          seen [NBLK];
    int unsigned t_load = 0, t_lastwr = 0, t_rd = 0, t_pd = 0, t_rst = 0;
    bit          in_rd = 0;
    bit          pd_done_q = 1;
    for (int b = 0; b < NBLK; b++) seen[b] = 0;
    @(negedge clk);
    pattern  = pat;
    blk_mask = mask;
    go       = 1'b1;
    @(negedge clk);
    go = 1'b0;
    while (!done) begin
      @(posedge clk);
      #0.01;
      if (u_dut.u_ctrl.sw_load && u_dut.u_ctrl.ce1) t_load = cyc;
      if (u_dut.blk_en && u_dut.u_ctrl.k == 0) begin
        int cnt_masked;
        cnt_masked = 0;
        for (int c = 0; c < N; c++) if (u_dut.v_ldl[c] == MASK_LDL_MV) cnt_masked++;
        if (cnt_masked == N - P) n_masked_col++;
      end
      if (u_dut.mem_wr) t_lastwr = cyc;
      if (u_dut.mem_rd && !in_rd) begin t_rd = cyc; in_rd = 1; end
      if (u_dut.pd_done && !pd_done_q && in_rd && t_pd == 0) t_pd = cyc;
      pd_done_q = u_dut.pd_done;
      if (u_dut.mem_rst) begin
        bit allzero;
        allzero = 1;
        @(posedge clk); #0.01;
        for (int i = 0; i < NROW; i++) if (u_dut.u_mem.lrs[i] != '0) allzero = 0;
        check(allzero, "match-index memory not all HRS after reset");
        if (t_pd != 0) check(cyc - t_pd >= 8 && cyc - t_pd <= 24, $sformatf("reset came %0d fast cycles after detection", cyc - t_pd));
        if (t_pd != 0) n_reset++;
        in_rd = 0; t_pd = 0;
      end
      if (result_valid) begin
        int unsigned e, es;
        e  = ref_max(result_blk, pat);
        es = (e > 2**W - 1) ? 2**W - 1 : e;
        if (e > 2**W - 1) n_satur++;
        if (e > 0) n_patterns++;
        check(mask[result_blk] && !seen[result_blk], $sformatf("unexpected result for block %0d", result_blk));
        seen[result_blk] = 1;
        check(result_max == W'(es), $sformatf("block %0d: max run %0d, expected %0d", result_blk, result_max, es));
        $display("block %0d pattern %s%s%s: max run %0d (expected %0d)", result_blk,
                 pat[0].name(), pat[1].name(), pat[2].name(), result_max, es);
        // search+write: from the window load to the last write, in fast cycles
        check(t_lastwr - t_load == 8 * NCOL + 4,
              $sformatf("search+write took %0d fast cycles, expected %0d", t_lastwr - t_load, 8 * NCOL + 4));
        // read+detect: read start to detector done
        check(t_pd - t_rd == 8 * (NROW * NCOL / 8) + P + 4 + 7,
              $sformatf("read+detect took %0d fast cycles, expected %0d", t_pd - t_rd, 8 * (NROW * NCOL / 8) + P + 11));
        n_blocks++;
      end
    end
    for (int b = 0; b < NBLK; b++) begin
      if (!mask[b]) n_skipped++;
      check(seen[b] == mask[b], $sformatf("block %0d result presence %0d, mask %0d", b, seen[b], mask[b]));
    end
  endtask

  initial begin
    #(2000000);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    nuc_t cag [P];
    nuc_t gaa [P];
    cag = '{NUC_C, NUC_A, NUC_G};
    gaa = '{NUC_G, NUC_A, NUC_A};
    for (int c = 0; c < N; c++) prog_data[c] = NUC_A;
    pattern = cag;
    // random text, then planted runs
    for (int unsigned i = 0; i < L; i++) text[i] = nuc_t'($urandom_range(0, 3));
    for (int unsigned b = 0; b < NBLK; b++) begin
      int unsigned reps, pos;
      reps = $urandom_range(40, 2);
      pos  = b * BLKLEN + $urandom_range(BLKLEN / 2, 0);
      plant(pos, reps, cag);
      plant(b * BLKLEN + BLKLEN / 2 + $urandom_range(BLKLEN / 4, 0), $urandom_range(12, 2), gaa);
    end
    // a run across the boundary of rows 1 and 2
    plant(2 * NCOL - 4, 9, cag);
    for (int unsigned r = 1; r < M; r++)
      for (int unsigned i = 1; i < P; i++)
        if (r * NCOL >= i && occ(r * NCOL - i, cag)) n_boundary++;
    
    repeat (5) @(negedge clk);
    rst_n = 1'b1;
    repeat (3) @(negedge clk);

    for (int unsigned r = 0; r < M; r++) load_row(r);

    run_search('1, cag);
    run_search(NBLK'(4'b0101), gaa);

    check(n_blocks > 0,     "no block was searched");
    check(n_skipped > 0,    "no block was skipped by the block mask");
    check(n_boundary > 0,   "no occurrence crossed a row boundary");
    check(n_mm > 0,         "no MM padding cell was loaded");
    check(n_reset > 0,      "match-index memory was never reset");
    check(n_patterns > 0,   "no block contained the pattern");
    check(n_masked_col > 0, "column masking never observed");
    $display("mechanisms: blocks=%0d skipped=%0d row_boundary_occ=%0d mm_cells=%0d resets=%0d saturated=%0d masked_window=%0d",
             n_blocks, n_skipped, n_boundary, n_mm, n_reset, n_satur, n_masked_col);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
