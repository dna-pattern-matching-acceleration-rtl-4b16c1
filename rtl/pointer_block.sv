// pointer_block: counter, comparator and maximum register of one pattern-detector pointer.
//
// c (state Cj) increments the run counter. r (state Rj) ends a run: one clock later the
// counter is compared with the maximum register and the larger value is kept, and one more
// clock later the counter is reset. The pointer sees a new bit only every P clocks, so both
// steps finish before its next bit (published timing: compare delayed by one cycle, reset
// by two). clr (Initial and Exit states) resets the counter at once. clr_max (Initial
// state) also clears the maximum register and any pending compare/reset; that and the
// saturation of the counter at its largest value are this design's choices.
// Widths follow the published 8-bit counter, comparator and maximum register.
module pointer_block #(
  parameter int unsigned W = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         c,
  input  logic         r,
  input  logic         clr,
  input  logic         clr_max,
  output logic [W-1:0] ctr,
  output logic [W-1:0] max
);

  logic r_d1, r_d2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_d1 <= 1'b0;
      r_d2 <= 1'b0;
    end else if (clr_max) begin
      r_d1 <= 1'b0;
      r_d2 <= 1'b0;
    end else begin
      r_d1 <= r;
      r_d2 <= r_d1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                   ctr <= '0;
    else if (clr || r_d2)         ctr <= '0;
    else if (c && (ctr != '1))    ctr <= ctr + 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                   max <= '0;
    else if (clr_max)             max <= '0;
    else if (r_d1 && (ctr > max)) max <= ctr;
  end

endmodule
