// search_window: the MASK and PATTERN registers that drive the aCAM data lines.
//
// A window of P adjacent columns is active at a time. The active columns receive the search
// voltage of their pattern character on both data lines (V_LDL = V_UDL = interval midpoint);
// every other column is masked with V_LDL = VDD and V_UDL = 0 so it matches whatever it
// stores. load places the pattern in columns 0..P-1; each shift moves the mask and the
// pattern one column to the right, so after k shifts the window covers columns k..k+P-1.
// clear masks every column. The voltages are the published search-data values; holding the
// mask and pattern as two N-wide shift registers (one slow-clock shift per search cycle) is
// this design's choice, since the publication shows the two registers but not their insides.
//
// Timing: load/shift/clear act on the rising clock edge (one of them per edge, clear first);
// the voltage outputs follow the registers combinationally.
module search_window
  import dna_pkg::*;
#(
  parameter int unsigned N = 130,   // aCAM columns
  parameter int unsigned P = 3      // pattern length
) (
  input  logic clk,
  input  logic rst_n,
  input  logic clear,
  input  logic load,
  input  nuc_t pattern [P],
  input  logic shift,
  output mv_t  v_ldl [N],
  output mv_t  v_udl [N]
);

  logic [N-1:0] mask;     // 1 = column active
  nuc_t         pat [N];  // pattern character seen by each column

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mask <= '0;
    end else if (clear) begin
      mask <= '0;
    end else if (load) begin
      mask <= N'((1 << P) - 1);
    end else if (shift) begin
      mask <= mask << 1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < N; c++) pat[c] <= NUC_A;
    end else if (load) begin
      for (int c = 0; c < N; c++) pat[c] <= (c < P) ? pattern[c] : NUC_A;
    end else if (shift) begin
      pat[0] <= NUC_A;
      for (int c = 1; c < N; c++) pat[c] <= pat[c-1];
    end
  end

  always_comb begin
    for (int c = 0; c < N; c++) begin
      v_ldl[c] = mask[c] ? search_mv(pat[c]) : MASK_LDL_MV;
      v_udl[c] = mask[c] ? search_mv(pat[c]) : MASK_UDL_MV;
    end
  end

endmodule
