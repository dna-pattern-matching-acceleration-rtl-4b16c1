// piso8: 8-bit parallel-in serial-out register between the sense amplifiers and the pattern
// detector.
//
// load captures the eight sensed bits (bit 0 = lowest column) on the rising clock edge;
// every other clock with shift high moves the register one place towards bit 0 and shifts
// in a 0. sout is bit 0, so the eight bits leave in column order, one per fast clock, and
// zeros follow once the register is empty. load has priority over shift.
module piso8 (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       load,
  input  logic [7:0] pin,
  input  logic       shift,
  output logic       sout
);

  logic [7:0] q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     q <= '0;
    else if (load)  q <= pin;
    else if (shift) q <= {1'b0, q[7:1]};
  end

  assign sout = q[0];

endmodule
