// match_index_mem: behavioural model of the 1T1R match-index memory with its read path
// (memristor cells, transmission gates and current sense amplifiers are analog; this file
// models their logical behaviour only).
//
// Each cell is a memristor with an access transistor. LRS stores 1 (the pattern matched at
// that text position) and HRS stores 0.
//  - write (wr strobe): all rows are written in parallel. Row i receives tag[i]; the one-hot
//    column select z chooses the column whose line is grounded. A cell whose row sees a 1
//    is SET to LRS; a row that sees a 0 leaves its cell in HRS (the array was reset before).
//  - read (rd high): the one-hot row select d picks a row and eight n/8-to-1 multiplexers,
//    all on select sel, connect columns 8*sel .. 8*sel+7 (0-based) to eight current sense
//    amplifiers; csa[k] is 1 when cell (row, 8*sel+k) is in LRS (its resistance is below
//    R_ref = 14 kOhm). Combinational; csa is 0 when rd is low (read circuit disconnected).
//  - reset (rst strobe): every cell returns to HRS in one cycle.
// Only one mode may be active at a time (asserted). The mode encoding as three strobes is
// this model's choice.
module match_index_mem #(
  parameter int unsigned NROW = 64,
  parameter int unsigned NCOL = 128
) (
  input  logic                        clk,
  input  logic                        wr,
  input  logic                        rd,
  input  logic                        rst,
  input  logic [NROW-1:0]             tag,
  input  logic [NCOL-1:0]             z,     // one-hot write column
  input  logic [NROW-1:0]             d,     // one-hot read row
  input  logic [$clog2(NCOL/8)-1:0]   sel,   // read multiplexer select
  output logic [7:0]                  csa
);

  logic [NCOL-1:0] lrs [NROW];   // 1 = LRS

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < NROW; i++) lrs[i] <= '0;
    end else if (wr) begin
      for (int i = 0; i < NROW; i++)
        if (tag[i]) lrs[i] <= lrs[i] | z;
    end
  end

  always_comb begin
    csa = '0;
    if (rd) begin
      for (int i = 0; i < NROW; i++)
        if (d[i])
          for (int k = 0; k < 8; k++) csa[k] = lrs[i][8*sel + k];
    end
  end

  initial begin
    assert (NCOL % 8 == 0) else $error("match_index_mem: NCOL must be a multiple of 8");
  end

  a_one_mode: assert property (@(posedge clk) $onehot0({wr, rd, rst}))
    else $error("match_index_mem: more than one of write/read/reset active");

endmodule
