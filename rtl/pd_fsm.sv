// pd_fsm: finite state machine of the pattern detector.
//
// The serial match bits are dealt round-robin to P pointers: bit 1 to pointer 1, bit 2 to
// pointer 2, and so on. For every bit the machine enters a state that names the pointer and
// what it must do: Cj (bit was 1, increment counter j) or Rj (bit was 0, update maximum j
// and reset counter j). For P = 3 these are the published states S1 = R1, S2 = C1,
// S3 = R2, S4 = C2, S5 = R3, S6 = C3, plus Initial and Exit, both of which assert CLR.
// Inputs are X (the bit) and D (end of sequence). From Initial or from a state of pointer j
// the next state belongs to pointer j+1 (wrapping to 1): C on X=1, R on X=0; D=1 leads to
// Exit, where the machine stays. This follows the published example sequence (Initial -10->
// S2 -00-> S3 -10-> S6 -10-> S2 -10-> S4 -00-> S5 -00-> S1 -00-> S3 -01-> Exit).
// start (this design's addition) forces Initial for the next cycle, so a new sequence can
// follow; the first bit of the sequence must be presented in the Initial cycle.
//
// Outputs are Moore outputs of the registered state: c[j], r[j] (one-hot or zero), clr,
// in_init and in_exit.
module pd_fsm #(
  parameter int unsigned P = 3
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic         x,
  input  logic         d,
  output logic [P-1:0] c,
  output logic [P-1:0] r,
  output logic         clr,
  output logic         in_init,
  output logic         in_exit
);

  typedef enum logic [1:0] {PH_INIT, PH_RUN, PH_EXIT} phase_t;

  typedef struct packed {
    phase_t                phase;
    logic [$clog2(P)-1:0]  ptr;   // pointer index 0..P-1 (pointer j = ptr+1)
    logic                  inc;   // 1 = Cj state, 0 = Rj state
  } state_t;

  state_t state, next;

  always_comb begin
    next = state;
    if (start) begin
      next.phase = PH_INIT;
      next.ptr   = '0;
      next.inc   = 1'b0;
    end else begin
      case (state.phase)
        PH_INIT, PH_RUN: begin
          if (d) begin
            next.phase = PH_EXIT;
          end else begin
            next.phase = PH_RUN;
            next.inc   = x;
            if (state.phase == PH_INIT)               next.ptr = '0;
            else if (state.ptr == ($clog2(P))'(P - 1)) next.ptr = '0;
            else                                      next.ptr = state.ptr + 1'b1;
          end
        end
        default: next = state;   // Exit: stay
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) state <= '{phase: PH_EXIT, ptr: '0, inc: 1'b0};
    else        state <= next;
  end

  always_comb begin
    c = '0;
    r = '0;
    if (state.phase == PH_RUN) begin
      if (state.inc) c[state.ptr] = 1'b1;
      else           r[state.ptr] = 1'b1;
    end
  end

  assign in_init = (state.phase == PH_INIT);
  assign in_exit = (state.phase == PH_EXIT);
  assign clr     = in_init || in_exit;

endmodule
