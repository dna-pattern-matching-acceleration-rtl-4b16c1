// tb_disease_panel: repeat-expansion screening workload on dna_pm_top at its default size.
//
// The aCAM holds eight gene regions, one per 64-row block, as the block selector intends:
// each block is a random DNA text with one run of the gene's trinucleotide planted in it.
// The genes and their repeat thresholds are the published examples of trinucleotide repeat
// disorders (FMR1 CGG, FXN GAA, HTT CAG, AFF2 CCG, ATXN1 CAG, JPH3 CTG, AR CAG, PABPN1 GCG);
// the planted repeat counts are this testbench's choice, some in the normal and some in the
// disease range. For every gene the testbench then runs one search with only that gene's
// block selected and its own pattern, and checks
//   - that exactly one result arrives, for that block;
//   - that the reported run equals the longest run computed here from the text;
//   - that the normal/disease call made from the reported run (run >= the lowest disease
//     count) matches the range the planted count was drawn from.
// JPH3 is searched and checked for its count only: its published normal (6-28) and disease
// (4-60) ranges overlap, so no call is made. The four-base CCTG repeat of myotonic dystrophy
// type 2 is left out: it needs P = 4, which the default sizes do not support.
// Timing is checked by the end-to-end testbenches; this one checks the results only.
`timescale 1ns/1ps
module tb_disease_panel;
  import dna_pkg::*;

  localparam int unsigned M      = 512;
  localparam int unsigned N      = 130;
  localparam int unsigned P      = 3;
  localparam int unsigned NBLK   = 8;
  localparam int unsigned W      = 8;
  localparam int unsigned NCOL   = N - (P - 1);
  localparam int unsigned NROW   = M / NBLK;
  localparam int unsigned BLKLEN = NROW * NCOL;     // text characters per block
  localparam int unsigned L      = M * NCOL;

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

  dna_pm_top u_dut (
    .clk, .rst_n, .prog_start, .prog_row, .prog_data, .prog_busy,
    .go, .blk_mask, .pattern, .busy, .done, .result_valid, .result_blk, .result_max
  );

  int unsigned checks = 0, failures = 0;
  int unsigned n_disease = 0, n_normal = 0;
  nuc_t        text [L];

  // one gene per block: pattern, lowest disease count (0: no call), planted repeats
  typedef struct {
    string       gene;
    nuc_t        pat [P];
    int unsigned disease_min;
    int unsigned planted;
  } gene_t;
  gene_t panel [NBLK];

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
      if (occ(b * BLKLEN + i, pat)) run[i] = 1 + ((i >= P) ? run[i - P] : 0);
      else                          run[i] = 0;
      if (run[i] > best) best = run[i];
    end
    return best;
  endfunction

  task automatic plant(int unsigned pos, int unsigned reps, nuc_t pat [P]);
    for (int unsigned r = 0; r < reps; r++)
      for (int unsigned i = 0; i < P; i++) text[pos + r * P + i] = pat[i];
  endtask

  task automatic load_row(int unsigned row);
    for (int unsigned c = 0; c < N; c++) begin
      int unsigned pos;
      pos = row * NCOL + c;
      prog_data[c] = (pos < L) ? text[pos] : NUC_MM;
    end
    @(negedge clk);
    prog_row   = ($clog2(M))'(row);
    prog_start = 1'b1;
    @(negedge clk);
    prog_start = 1'b0;
    while (prog_busy) @(negedge clk);
  endtask

  function automatic string pat_str(nuc_t pat [P]);
    string s;
    s = "";
    for (int unsigned i = 0; i < P; i++) s = {s, (pat[i] == NUC_MM) ? "-" : pat[i].name().substr(4, 4)};
    return s;
  endfunction

  task automatic set_gene(int unsigned b, string gene, nuc_t p0, nuc_t p1, nuc_t p2,
                          int unsigned disease_min, int unsigned planted);
    panel[b].gene        = gene;
    panel[b].pat[0]      = p0;
    panel[b].pat[1]      = p1;
    panel[b].pat[2]      = p2;
    panel[b].disease_min = disease_min;
    panel[b].planted     = planted;
  endtask

  task automatic screen(int unsigned b);
    int unsigned n_res = 0, got = 0, e, es;
    @(negedge clk);
    pattern  = panel[b].pat;
    blk_mask = NBLK'(1) << b;
    go       = 1'b1;
    @(negedge clk);
    go = 1'b0;
    while (!done) begin
      @(posedge clk);
      #0.01;
      if (result_valid) begin
        n_res++;
        got = int'(result_max);
        check(result_blk == ($clog2(NBLK))'(b),
              $sformatf("%s: result for block %0d, expected %0d", panel[b].gene, result_blk, b));
      end
    end
    check(n_res == 1, $sformatf("%s: %0d results, expected 1", panel[b].gene, n_res));
    e  = ref_max(b, panel[b].pat);
    es = (e > 2**W - 1) ? 2**W - 1 : e;
    check(got == es, $sformatf("%s: run %0d, expected %0d", panel[b].gene, got, es));
    if (panel[b].disease_min != 0) begin
      bit call_disease, want_disease;
      call_disease = (got >= panel[b].disease_min);
      want_disease = (panel[b].planted >= panel[b].disease_min);
      check(call_disease == want_disease,
            $sformatf("%s: called %s, planted %0d repeats", panel[b].gene,
                      call_disease ? "disease" : "normal", panel[b].planted));
      if (call_disease) n_disease++; else n_normal++;
      $display("%-7s %s block %0d: longest run %0d repeats -> %s range (disease from %0d)",
               panel[b].gene, pat_str(panel[b].pat), b, got, call_disease ? "disease" : "normal", panel[b].disease_min);
    end else begin
      $display("%-7s %s block %0d: longest run %0d repeats (no call)",
               panel[b].gene, pat_str(panel[b].pat), b, got);
    end
  endtask

  initial begin
    #(60000);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    set_gene(0, "FMR1",   NUC_C, NUC_G, NUC_G,  55,  80);
    set_gene(1, "FXN",    NUC_G, NUC_A, NUC_A,  66,  20);
    set_gene(2, "HTT",    NUC_C, NUC_A, NUC_G,  41,  45);
    set_gene(3, "AFF2",   NUC_C, NUC_C, NUC_G, 201, 230);
    set_gene(4, "ATXN1",  NUC_C, NUC_A, NUC_G,  39,  30);
    set_gene(5, "JPH3",   NUC_C, NUC_T, NUC_G,   0,  50);
    set_gene(6, "AR",     NUC_C, NUC_A, NUC_G,  40,  50);
    set_gene(7, "PABPN1", NUC_G, NUC_C, NUC_G,  12,   8);
    for (int unsigned i = 0; i < L; i++) text[i] = nuc_t'($urandom_range(0, 3));
    for (int unsigned b = 0; b < NBLK; b++)
      plant(b * BLKLEN + $urandom_range(BLKLEN - P * panel[b].planted - 1, 0),
            panel[b].planted, panel[b].pat);
    repeat (5) @(negedge clk);
    rst_n = 1'b1;
    repeat (3) @(negedge clk);
    for (int unsigned r = 0; r < M; r++) load_row(r);
    for (int unsigned b = 0; b < NBLK; b++) screen(b);
    check(n_disease > 0 && n_normal > 0,
          $sformatf("panel made %0d disease and %0d normal calls, expected both kinds", n_disease, n_normal));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
