// tag_register: one flip-flop per aCAM row that samples the row's match line.
//
// After each search cycle the match line of every row (buffered by two inverters in the
// published circuit) is stored in the row's tag flip-flop, from where it is written into the
// match-index memory. capture samples all match lines on the rising clock edge; clear
// zeroes the tags. Tag bits hold their value otherwise.
module tag_register #(
  parameter int unsigned M = 512
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         capture,
  input  logic [M-1:0] ml,
  output logic [M-1:0] tag
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       tag <= '0;
    else if (clear)   tag <= '0;
    else if (capture) tag <= ml;
  end

endmodule
