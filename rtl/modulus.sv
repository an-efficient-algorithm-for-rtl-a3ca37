// modulus: A mod B by shift-and-subtract, with no multiplier or divider.
//
// How it works. A four-state machine (IDLE, ALIGN, SUBT, FINISH) drives three
// registers: dividend, divisor and shift. On start, IDLE loads A, B and 0.
// ALIGN doubles the divisor (and counts shift up) while
//     condition1 = (divisor <= dividend) && !divisor[N-1] && (shift < N),
// so the divisor ends just above the dividend, or at the top bit. SUBT then
// walks back down: each cycle it subtracts the divisor when dividend >= divisor,
// halves the divisor and counts shift down, until
//     condition2 = (dividend < B) || (shift == 0) || (shift >= N).
// FINISH copies the dividend into result and pulses done. Every condition is
// evaluated on the register values of the current cycle, so the last SUBT
// cycle is the one that operates at shift 0 (divisor == B).
//
// Interface: clk, reset (synchronous, active high), start, A, B in; result
// and done out. B must be non-zero; the system feeding this unit is expected to
// check that, and an assertion reports a violation in simulation.
//
// Timing: start is sampled in IDLE. With k the number of ALIGN doublings, the
// unit spends k+1 cycles in ALIGN, at most k+1 cycles in SUBT and 1 in
// FINISH; done rises on the clock edge that leaves FINISH, so the latency from
// the start edge to the done edge is at most 2k+3 cycles, i.e. linear with
// slope 2 in the bit-length difference of A and B (k is that difference plus
// at most one). result keeps its value until the next FINISH.
//
// The state machine, the two conditions, the per-state register operations
// and the three-mux / four-register datapath follow the published algorithm
// and its RTL diagram. Comparing with B (not the shifted divisor) in
// condition2 follows the diagram caption; the reset polarity, the width of the
// shift register and the one-cycle done pulse are this design's own choices.
module modulus #(
    parameter int unsigned N = 2048
) (
    input  logic         clk,
    input  logic         reset,
    input  logic         start,
    input  logic [N-1:0] A,
    input  logic [N-1:0] B,
    output logic [N-1:0] result,
    output logic         done
);

  localparam int unsigned SW = $clog2(N) + 1;  // shift counter holds 0..N

  typedef enum logic [1:0] {
    IDLE   = 2'd0,
    ALIGN  = 2'd1,
    SUBT   = 2'd2,
    FINISH = 2'd3
  } state_t;

  state_t         state, state_nx;
  logic [N-1:0]   dividend, dividend_nx;
  logic [N-1:0]   divisor, divisor_nx;
  logic [SW-1:0]  shift, shift_nx;

  // Comparators of the RTL diagram.
  logic lte;      // divisor <= dividend
  logic gte1;     // dividend >= divisor
  logic true1;    // divisor[N-1] != 0
  logic lt;       // shift < N
  logic gte2;     // shift >= N
  logic true2;    // shift == 0
  logic lt_b;     // dividend < B
  logic condition1, condition2;

  assign lte   = (divisor <= dividend);
  assign gte1  = lte;
  assign true1 = divisor[N-1];
  assign lt    = (shift < SW'(N));
  assign gte2  = !lt;
  assign true2 = (shift == '0);
  assign lt_b  = (dividend < B);

  assign condition1 = lte && !true1 && lt;
  assign condition2 = lt_b || true2 || gte2;

  // Next-state logic and the three register multiplexers (mux1..mux3).
  always_comb begin
    state_nx    = state;
    dividend_nx = dividend;
    divisor_nx  = divisor;
    shift_nx    = shift;
    unique case (state)
      IDLE: begin
        if (start) begin
          dividend_nx = A;
          divisor_nx  = B;
          shift_nx    = '0;
          state_nx    = ALIGN;
        end
      end
      ALIGN: begin
        if (condition1) begin
          divisor_nx = divisor << 1;
          shift_nx   = shift + SW'(1);
        end else begin
          state_nx = SUBT;
        end
      end
      SUBT: begin
        if (gte1) dividend_nx = dividend - divisor;
        divisor_nx = divisor >> 1;
        shift_nx   = shift - SW'(1);
        if (condition2) state_nx = FINISH;
      end
      FINISH: begin
        state_nx = IDLE;
      end
      default: state_nx = IDLE;
    endcase
  end

  always_ff @(posedge clk) begin
    if (reset) begin
      state    <= IDLE;
      dividend <= '0;
      divisor  <= '0;
      shift    <= '0;
      result   <= '0;
      done     <= 1'b0;
    end else begin
      state    <= state_nx;
      dividend <= dividend_nx;
      divisor  <= divisor_nx;
      shift    <= shift_nx;
      done     <= (state == FINISH);
      if (state == FINISH) result <= dividend;
    end
  end

  // The divisor must be non-zero when an operation starts.
  a_b_nonzero : assert property (@(posedge clk) disable iff (reset)
      (state == IDLE && start) |-> (B != '0))
    else $error("modulus: start with B == 0");

endmodule
