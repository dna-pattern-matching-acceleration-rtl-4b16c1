// pattern_detector: reports the longest run of back-to-back pattern occurrences in the
// serial match-bit stream.
//
// A 1 in the stream marks a pattern occurrence starting at that text position; P
// back-to-back repeats of a length-P pattern therefore show as 1s exactly P positions apart.
// The stream is split round-robin over P pointers (bit i goes to pointer ((i-1) mod P)+1);
// each pointer counts its consecutive 1s and keeps its longest run, which also handles
// patterns whose occurrences can overlap. The structure is the published one: a finite
// state machine (pd_fsm), P pointer blocks (pointer_block) and the comparison logic.
//
// Protocol: pulse start one cycle before the first bit; then present one bit per clock on x.
// After the last data bit present P+1 more zeros with d = 1 on the last of them (for P = 3:
// four zeros, the end-of-sequence signal delayed by four cycles, as published). The FSM then
// enters Exit, where the global maximum register is loaded; done rises two cycles after
// Exit is entered and global_max is then final. For n data bits, done is high n+P+4 clocks
// after start.
// The pointers' counter outputs (ctr_r) are left unread here; they are kept for observing
// the running counts in simulation.
module pattern_detector #(
  parameter int unsigned P = 3,
  parameter int unsigned W = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic         x,
  input  logic         d,
  output logic [W-1:0] global_max,
  output logic         done
);

  logic [P-1:0] c, r;
  logic         clr, in_init, in_exit, exit_d1;
  logic [W-1:0] max_r [P];
  logic [W-1:0] ctr_r [P];

  pd_fsm #(.P(P)) u_fsm (
    .clk, .rst_n, .start, .x, .d,
    .c, .r, .clr, .in_init, .in_exit
  );

  for (genvar j = 0; j < P; j++) begin : g_ptr
    pointer_block #(.W(W)) u_ptr (
      .clk, .rst_n,
      .c       (c[j]),
      .r       (r[j]),
      .clr     (clr),
      .clr_max (in_init),
      .ctr     (ctr_r[j]),
      .max     (max_r[j])
    );
  end

  comparison_logic #(.P(P), .W(W)) u_cmp (
    .clk, .rst_n,
    .clear      (in_init),
    .load       (in_exit),
    .max_in     (max_r),
    .global_max (global_max)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      exit_d1 <= 1'b0;
      done    <= 1'b0;
    end else begin
      exit_d1 <= in_exit && !start;
      done    <= in_exit && exit_d1 && !start;
    end
  end

endmodule
