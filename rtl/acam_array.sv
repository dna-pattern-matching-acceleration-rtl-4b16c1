// acam_array: behavioural model of the M x N analog CAM array built from 8T2M cells.
// The memristor cells, match lines and their pre-charge/evaluate circuits are analog; this
// file models their logical behaviour only.
//
// Cell: two memristors per cell. R_LB sets the lowest lower-data-line voltage that still
// matches, R_UB the highest upper-data-line voltage. A cell keeps its match line (ML) charged
// only if V_LDL >= LB and V_UDL <= UB (dna_pkg::cell_keeps_ml). Separate lower and upper
// data lines let a column be masked: V_LDL = VDD, V_UDL = 0 match any stored interval.
// A cell whose NS line stays high during evaluation cannot discharge the ML either.
//
// Array: the DNA text is stored row by row; each row holds N-(P-1) new characters followed
// by P-1 copies of the first characters of the next row, so a pattern split over two rows
// is still seen inside one row. The padding cells of the last row hold the MM interval.
// Rows are grouped into NBLK blocks; each block has one NS line (block selector output,
// inverted by the drivers). A block with NS high reads as all-match.
//
// Search: column c receives v_ldl[c], v_udl[c] (mV). ml[r] is combinational and is the AND
// of the row's cells (1 = whole row matches).
//
// Programming: prog_start, prog_row and the N characters prog_data start a row write. As in
// the published loading scheme, all cells of a row that need the same resistance are
// written together, one resistance level per step, so a row takes 8 steps (four characters
// times two memristors), one per clock with step_en high (one slow-clock cycle). prog_busy
// stays high until the 8th step. The MM resistances coincide with levels already used
// (R_UB of T and R_LB of A), so MM cells are written in those same steps (this model's
// choice). Loading M rows takes 8*M slow cycles. Stored resistances are modelled as one of
// the eight discrete levels of dna_pkg::rlevel_t.
module acam_array
  import dna_pkg::*;
#(
  parameter int unsigned M    = 512,   // rows
  parameter int unsigned N    = 130,   // columns (N-(P-1) text characters + P-1 replicated)
  parameter int unsigned NBLK = 8      // blocks of rows
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 step_en,              // one programming step per enabled clock
  input  logic                 prog_start,
  input  logic [$clog2(M)-1:0] prog_row,
  input  nuc_t                 prog_data [N],
  output logic                 prog_busy,
  input  mv_t                  v_ldl [N],
  input  mv_t                  v_udl [N],
  input  logic [NBLK-1:0]      ns_blk,               // 1 = block deactivated (NS high)
  output logic [M-1:0]         ml
);

  localparam int unsigned ROWS_PER_BLK = M / NBLK;

  // Memristor states of every cell.
  rlevel_t r_lb [M][N];
  rlevel_t r_ub [M][N];

  // Programming sequencer.
  nuc_t                 pdata [N];
  logic [$clog2(M)-1:0] prow;
  rlevel_t              pstep;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prog_busy <= 1'b0;
      prow      <= '0;
      pstep     <= R_2500K;
    end else if (!prog_busy) begin
      if (prog_start) begin
        prog_busy <= 1'b1;
        prow      <= prog_row;
        pstep     <= R_2500K;
      end
    end else if (step_en) begin
      pstep <= rlevel_t'(pstep + 3'd1);
      if (pstep == R_5K06) prog_busy <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (!prog_busy && prog_start) pdata <= prog_data;
  end

  // One resistance level per step into every cell of the row that needs it.
  always_ff @(posedge clk) begin
    if (prog_busy && step_en) begin
      for (int c = 0; c < N; c++) begin
        if (rlb_of(pdata[c]) == pstep) r_lb[prow][c] <= pstep;
        if (rub_of(pdata[c]) == pstep) r_ub[prow][c] <= pstep;
      end
    end
  end

  // Match lines.
  for (genvar r = 0; r < M; r++) begin : g_ml
    always_comb begin
      ml[r] = 1'b1;
      for (int c = 0; c < N; c++)
        ml[r] = ml[r] & cell_keeps_ml(r_lb[r][c], r_ub[r][c], v_ldl[c], v_udl[c],
                                      ns_blk[r / ROWS_PER_BLK]);
    end
  end

  initial begin
    assert (M % NBLK == 0) else $error("acam_array: M must be a multiple of NBLK");
  end

endmodule
