// control_unit: sequences the accelerator through its phases for every selected block.
//
// The accelerator runs on one fast clock (CLK2, 8 GHz in the published design). The slow
// clock CLK1 (1 GHz) that paces the search, the memory write/read and the memory reset is
// represented here by a divide-by-8 phase counter: ce1 marks the last fast cycle of each
// slow cycle and ce_half the middle one. Deriving CLK1 this way instead of from a separate
// clock generator output is this design's choice.
//
// For each block whose bit is set in blk_mask (lowest first):
//   SEARCH  NW = N-(P-1) slow cycles. The pattern window is loaded at the start and shifted
//           at the end of every slow cycle, when the tags capture the match lines. Half a
//           slow cycle after each capture the tags are written into the next column of the
//           match-index memory (column selector incremented after each write).
//   WTAIL   the half cycle that writes the last column: search plus write take
//           (NW + 0.5) slow cycles.
//   READ    NGRP = rows*cols/8 slow cycles. Each slow cycle eight cells are loaded into the
//           PISO register and the multiplexer select counter advances (its wrap advances the
//           row selector). The pattern detector is started with the first load, so
//           detection begins one slow cycle after reading.
//   DRAIN   the last eight bits and then P+1 zeros leave the PISO; the end-of-sequence flag
//           d is raised with the last of those zeros. When the detector reports done, the
//           result (block index and global maximum) is output with result_valid.
//   RESET   one slow cycle that returns the whole match-index memory to HRS; the next
//           block's search starts at its end.
// A run also begins with one RESET slow cycle, because the memory contents are unknown at
// power-up (this design's choice). When no selected block is left, done pulses for one fast cycle and the unit is idle.
// The control unit is published as a function only (it could be software on a
// coprocessor); this state machine is the simplest hardware that produces the published
// phase order and timing.
module control_unit #(
  parameter int unsigned NBLK = 8,
  parameter int unsigned NW   = 128,        // search cycles per block, N-(P-1)
  parameter int unsigned NGRP = 64*128/8,   // 8-bit read groups per block
  parameter int unsigned P    = 3,
  parameter int unsigned W    = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // host side
  input  logic                    go,
  input  logic [NBLK-1:0]         blk_mask,
  output logic                    busy,
  output logic                    done,
  output logic                    result_valid,
  output logic [$clog2(NBLK)-1:0] result_blk,
  output logic [W-1:0]            result_max,
  // slow-clock enables
  output logic                    ce1,
  output logic                    ce_half,
  // associative memory
  output logic [$clog2(NBLK)-1:0] blk_idx,
  output logic                    blk_en,
  output logic                    sw_load,
  output logic                    sw_shift,
  output logic                    sw_clear,
  output logic                    tag_capture,
  // match-index memory
  output logic                    mem_wr,
  output logic                    mem_rd,
  output logic                    mem_rst,
  output logic                    col_inc,
  output logic                    sel_inc,
  output logic                    sel_clear,
  output logic                    piso_load,
  // pattern detector
  output logic                    pd_start,
  output logic                    pd_d,
  input  logic                    pd_done,
  input  logic [W-1:0]            pd_max
);

  typedef enum logic [2:0] {
    ST_IDLE, ST_SEARCH, ST_WTAIL, ST_READ, ST_DRAIN, ST_WAITRST, ST_RESET
  } state_t;

  localparam int unsigned DRAIN_D = 8 + P + 1;   // fast cycle of the drain carrying d = 1

  state_t                    state;
  logic [2:0]                phase;
  logic [NBLK-1:0]           pending;
  logic [$clog2(NW+1)-1:0]   k;
  logic [$clog2(NGRP+1)-1:0] g;
  logic [$clog2(DRAIN_D+1)-1:0] dcnt;
  logic                      have_next;
  logic [$clog2(NBLK)-1:0]   next_blk;

  // Divide-by-8 phase counter standing for CLK1.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) phase <= '0;
    else        phase <= phase + 3'd1;
  end
  assign ce1     = (phase == 3'd7);
  assign ce_half = (phase == 3'd3);

  // Lowest pending block.
  always_comb begin
    have_next = |pending;
    next_blk  = '0;
    for (int b = NBLK - 1; b >= 0; b--)
      if (pending[b]) next_blk = ($clog2(NBLK))'(b);
  end

  // Phase boundary at which a new block's search may start.
  logic start_blk;
  assign start_blk = ce1 && (state == ST_RESET) && have_next;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= ST_IDLE;
      pending      <= '0;
      k            <= '0;
      g            <= '0;
      dcnt         <= '0;
      blk_idx      <= '0;
      done         <= 1'b0;
      result_valid <= 1'b0;
      result_blk   <= '0;
      result_max   <= '0;
    end else begin
      done         <= 1'b0;
      result_valid <= 1'b0;
      case (state)
        ST_IDLE: if (go) begin
          pending <= blk_mask;
          state   <= ST_RESET;
        end
        ST_RESET: if (ce1) begin
          if (have_next) begin
            blk_idx           <= next_blk;
            pending[next_blk] <= 1'b0;
            k                 <= '0;
            state             <= ST_SEARCH;
          end else begin
            done  <= 1'b1;
            state <= ST_IDLE;
          end
        end
        ST_SEARCH: if (ce1) begin
          k <= k + 1'b1;
          if (k == ($clog2(NW+1))'(NW - 1)) state <= ST_WTAIL;
        end
        ST_WTAIL: if (ce1) begin
          g     <= '0;
          state <= ST_READ;
        end
        ST_READ: if (ce1) begin
          g <= g + 1'b1;
          if (g == ($clog2(NGRP+1))'(NGRP - 1)) begin
            dcnt  <= ($clog2(DRAIN_D+1))'(1);
            state <= ST_DRAIN;
          end
        end
        ST_DRAIN: begin
          if (dcnt != ($clog2(DRAIN_D+1))'(DRAIN_D)) dcnt <= dcnt + 1'b1;
          if (pd_done) begin
            result_valid <= 1'b1;
            result_blk   <= blk_idx;
            result_max   <= pd_max;
            state        <= ST_WAITRST;
          end
        end
        ST_WAITRST: if (ce1) state <= ST_RESET;
        default:    state <= ST_IDLE;
      endcase
    end
  end

  assign busy        = (state != ST_IDLE);
  assign blk_en      = (state == ST_SEARCH);
  assign sw_load     = start_blk;
  assign sw_shift    = ce1 && (state == ST_SEARCH);
  assign sw_clear    = ce1 && (state == ST_WTAIL);
  assign tag_capture = ce1 && (state == ST_SEARCH);
  // A write follows each capture by half a slow cycle.
  assign mem_wr      = ce_half && (((state == ST_SEARCH) && (k != '0)) || (state == ST_WTAIL));
  assign col_inc     = mem_wr;
  assign mem_rd      = (state == ST_READ);
  assign piso_load   = ce1 && (state == ST_READ);
  assign sel_inc     = piso_load;
  assign pd_start    = piso_load && (g == '0);
  assign pd_d        = (state == ST_DRAIN) && (dcnt == ($clog2(DRAIN_D+1))'(DRAIN_D));
  assign mem_rst     = ce1 && (state == ST_RESET);
  assign sel_clear   = mem_rst;

endmodule
