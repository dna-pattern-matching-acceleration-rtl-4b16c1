// comparison_logic: finds the largest of the pointer maximum registers and stores it in the
// global maximum register.
//
// For three pointers this is the published two comparators and two multiplexers: the larger
// of max1 and max2 is compared with max3. For other P the same compare-and-select step is
// chained P-1 times. load writes the result into the global maximum register on the rising
// clock edge (the pattern detector loads it while in the Exit state); clear zeroes it.
module comparison_logic #(
  parameter int unsigned P = 3,
  parameter int unsigned W = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         load,
  input  logic [W-1:0] max_in [P],
  output logic [W-1:0] global_max
);

  logic [W-1:0] chain [P];

  always_comb begin
    chain[0] = max_in[0];
    for (int j = 1; j < P; j++)
      chain[j] = (max_in[j] > chain[j-1]) ? max_in[j] : chain[j-1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     global_max <= '0;
    else if (clear) global_max <= '0;
    else if (load)  global_max <= chain[P-1];
  end

endmodule
