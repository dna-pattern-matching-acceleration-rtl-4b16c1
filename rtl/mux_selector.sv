// mux_selector: select counter of the eight read multiplexers of the match-index memory.
//
// Every read cycle the eight multiplexers pick columns 8*sel+1 .. 8*sel+8 of the selected
// row (multiplexer k sees columns k, k+8, ...). sel is a log2(n/8)-bit counter advanced by
// inc on the rising clock edge. As published, the AND of all counter outputs clocks the row
// selector; in this synchronous version that AND is the output row_adv, which tells the row
// selector to advance together with the counter's wrap. clear returns sel to 0.
module mux_selector #(
  parameter int unsigned NGRP = 16   // n/8 column groups per row
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    inc,
  output logic [$clog2(NGRP)-1:0] sel,
  output logic                    row_adv
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     sel <= '0;
    else if (clear) sel <= '0;
    else if (inc)   sel <= sel + 1'b1;
  end

  assign row_adv = inc && (&sel);

endmodule
