// dna_pm_top: DNA repeat-expansion pattern matcher built around an analog CAM.
//
// The DNA text is held in an M x N analog CAM (acam_array), one block of M/NBLK rows per
// gene region. To measure the longest run of back-to-back copies of a length-P pattern in a
// block, the accelerator
//   1. slides a P-column search window across the block (search_window, block_selector):
//      in every slow cycle all rows compare the window against the pattern in parallel and
//      the tags (tag_register) capture one match bit per row;
//   2. writes those bits column by column into the 1T1R match-index memory
//      (match_index_mem, column_selector), so that memory row i, column j says whether the
//      pattern starts at character j of text row i;
//   3. reads the memory back in text order, eight cells per slow cycle (row_selector,
//      mux_selector), and streams the bits through an 8-bit PISO register (piso8) into the
//      pattern detector (pattern_detector), one bit per fast cycle;
//   4. resets the memory and moves on to the next selected block.
// control_unit sequences the phases; its result port reports the maximum run per block.
//
// Ports: clk is the fast clock (CLK2); the slow clock is derived inside the control unit.
// prog_* load one aCAM row (the host lays out the text with the P-1 replicated characters
// and MM padding); go with blk_mask and pattern starts a search of the selected blocks;
// result_valid/result_blk/result_max report each block; done pulses at the end.
// Default sizes are the published ones: a 512 x 130 aCAM in eight 64-row blocks, P = 3,
// a 64 x 128 match-index memory and 8-bit pointer counters.
// Routing the active block's 64 tags to the 64 memory rows through a block multiplexer is
// this design's choice (the publication does not show that connection).
// Timing per block, in slow cycles T = 8 fast cycles: search and memory write take
// N-(P-1)+0.5 T, read and detection (NROW*NCOL + P + 11)/8 T, the memory reset 1 T; loading
// the array takes 8 T per row.
// Signals left unread on purpose: ce_half (used inside the control unit only), blk_act
// (the active-high decoder output; the array consumes its inverse, ns_blk), col_cnt and
// row_cnt (the selector counters, whose decoded outputs z and d drive the memory). They are
// kept as named nets for debugging.
module dna_pm_top
  import dna_pkg::*;
#(
  parameter int unsigned M    = 512,
  parameter int unsigned N    = 130,
  parameter int unsigned P    = 3,
  parameter int unsigned NBLK = 8,
  parameter int unsigned W    = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // aCAM loading
  input  logic                    prog_start,
  input  logic [$clog2(M)-1:0]    prog_row,
  input  nuc_t                    prog_data [N],
  output logic                    prog_busy,
  // search
  input  logic                    go,
  input  logic [NBLK-1:0]         blk_mask,
  input  nuc_t                    pattern [P],
  output logic                    busy,
  output logic                    done,
  output logic                    result_valid,
  output logic [$clog2(NBLK)-1:0] result_blk,
  output logic [W-1:0]            result_max
);

  localparam int unsigned NROW = M / NBLK;          // memory rows = rows per block
  localparam int unsigned NCOL = N - (P - 1);       // memory columns = search cycles
  localparam int unsigned NGRP = NROW * NCOL / 8;   // read groups per block

  // control
  logic                    ce1, ce_half;
  logic [$clog2(NBLK)-1:0] blk_idx;
  logic                    blk_en, sw_load, sw_shift, sw_clear, tag_capture;
  logic                    mem_wr, mem_rd, mem_rst, col_inc, sel_inc, sel_clear, piso_load;
  logic                    pd_start, pd_d, pd_done;
  logic [W-1:0]            pd_max;

  // datapath
  mv_t                     v_ldl [N];
  mv_t                     v_udl [N];
  logic [NBLK-1:0]         blk_act, ns_blk;
  logic [M-1:0]            ml, tag;
  logic [NROW-1:0]         tag_blk;
  logic [$clog2(NCOL)-1:0] col_cnt;
  logic [NCOL-1:0]         z;
  logic [$clog2(NCOL/8)-1:0] sel;
  logic                    row_adv;
  logic [$clog2(NROW)-1:0] row_cnt;
  logic [NROW-1:0]         d;
  logic [7:0]              csa;
  logic                    x;


  control_unit #(.NBLK(NBLK), .NW(NCOL), .NGRP(NGRP), .P(P), .W(W)) u_ctrl (
    .clk, .rst_n, .go, .blk_mask, .busy, .done, .result_valid, .result_blk, .result_max,
    .ce1, .ce_half, .blk_idx, .blk_en, .sw_load, .sw_shift, .sw_clear, .tag_capture,
    .mem_wr, .mem_rd, .mem_rst, .col_inc, .sel_inc, .sel_clear, .piso_load,
    .pd_start, .pd_d, .pd_done, .pd_max
  );

  // ---------------- associative memory ----------------
  search_window #(.N(N), .P(P)) u_sw (
    .clk, .rst_n, .clear(sw_clear), .load(sw_load), .pattern, .shift(sw_shift),
    .v_ldl, .v_udl
  );

  block_selector #(.NBLK(NBLK)) u_bsel (
    .blk_idx, .enable(blk_en), .blk_act, .ns_blk
  );

  acam_array #(.M(M), .N(N), .NBLK(NBLK)) u_acam (
    .clk, .rst_n, .step_en(ce1), .prog_start, .prog_row, .prog_data, .prog_busy,
    .v_ldl, .v_udl, .ns_blk, .ml
  );

  tag_register #(.M(M)) u_tag (
    .clk, .rst_n, .clear(1'b0), .capture(tag_capture), .ml, .tag
  );

  // Tags of the searched block go to the match-index memory rows.
  assign tag_blk = tag[blk_idx * NROW +: NROW];

  // ---------------- match-index memory ----------------
  column_selector #(.NCOL(NCOL)) u_csel (
    .clk, .rst_n, .clear(sw_load), .inc(col_inc), .enable(mem_wr), .count(col_cnt), .z
  );

  mux_selector #(.NGRP(NCOL / 8)) u_msel (
    .clk, .rst_n, .clear(sel_clear), .inc(sel_inc), .sel, .row_adv
  );

  row_selector #(.NROW(NROW)) u_rsel (
    .clk, .rst_n, .clear(sel_clear), .inc(row_adv), .enable(mem_rd), .count(row_cnt), .d
  );

  match_index_mem #(.NROW(NROW), .NCOL(NCOL)) u_mem (
    .clk, .wr(mem_wr), .rd(mem_rd), .rst(mem_rst), .tag(tag_blk), .z, .d, .sel, .csa
  );

  piso8 u_piso (
    .clk, .rst_n, .load(piso_load), .pin(csa), .shift(1'b1), .sout(x)
  );

  // ---------------- pattern detector ----------------
  pattern_detector #(.P(P), .W(W)) u_pd (
    .clk, .rst_n, .start(pd_start), .x, .d(pd_d), .global_max(pd_max), .done(pd_done)
  );

endmodule
