// row_selector: chooses the match-index memory row being read.
//
// As published, a log2(m)-bit counter followed by a log2(m)-to-m decoder (and drivers and
// transmission gates, which are analog). The counter advances when the multiplexer select
// counter wraps (inc = mux_selector.row_adv), so a row is left only after all its columns
// were read. d is the one-hot row select, combinational, all-zero when enable is low.
module row_selector #(
  parameter int unsigned NROW = 64
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    inc,
  input  logic                    enable,
  output logic [$clog2(NROW)-1:0] count,
  output logic [NROW-1:0]         d
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     count <= '0;
    else if (clear) count <= '0;
    else if (inc)   count <= count + 1'b1;
  end

  always_comb begin
    d = '0;
    if (enable) d[count] = 1'b1;
  end

endmodule
