// column_selector: chooses the match-index memory column written in each search cycle.
//
// As published, it is a log2(n)-bit counter followed by a log2(n)-to-n decoder; the decoder
// output z selects the transmission gate that grounds the chosen column line Y while all
// other columns stay high (so only that column is written). inc advances the counter on the
// rising clock edge after a write; clear returns it to column 0. z is combinational from
// the counter and is all-zero when enable is low (column selector disconnected).
module column_selector #(
  parameter int unsigned NCOL = 128
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    inc,
  input  logic                    enable,
  output logic [$clog2(NCOL)-1:0] count,
  output logic [NCOL-1:0]         z
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     count <= '0;
    else if (clear) count <= '0;
    else if (inc)   count <= count + 1'b1;
  end

  always_comb begin
    z = '0;
    if (enable) z[count] = 1'b1;
  end

endmodule
