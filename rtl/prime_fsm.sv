// prime_fsm: controller of the prime search (all primes below A).
//
// How it works. Twelve states sequence the datapath (the published text speaks
// of 13 states; its state diagram draws these twelve):
//   WAIT   clear the datapath registers; leave on start
//   S1     load A, n <- 0 + 1
//   S2     n <- n + (sel_1 ? 2 : 1); sel_2 <- 0
//   S3     i <- 3 while sel_2 == 0; go on if p (n < A), else DONE
//   S4     r | t (n == 2 or i == n): PRIME; q (i < n): S5; else REPEAT
//   S5     start n mod i
//   S6     wait for done_mod
//   S7     sel_2 <- 1; s (n mod i == 0): REPEAT, else S8
//   S8     i <- i + 2, back to S3
//   PRIME  prime_found, load the prime register, then REPEAT
//   REPEAT sel_1 <- (r ? 0 : 1), back to S2
//   DONE   done for one cycle, back to WAIT
// So after n = 2 the next candidate is 3 and from then on n steps by 2: only
// odd numbers are tried, each against the odd divisors 3, 5, ... up to n.
// sel_1 and sel_2 are set in one state and used in a later one, so they are
// held in two flag registers; WAIT clears both.
//
// Interface: clk, rst (synchronous, active high), start, stat (datapath
// flags) in; ctrl (datapath controls), prime_found, done out.
//
// Timing: one clock per state, except S6, which lasts until the modulus unit
// reports done. Outputs depend on the state only (Moore), apart from the
// "if sel_2 == 0" load in S3 and the "if r" choice in REPEAT, which read the
// flag register and the datapath flag r.
//
// States, transitions and the per-state control signals follow the published
// state diagram and its control-signal table, written, as described there, as
// one clocked and one combinational always block. The priority among the
// three exits of S4 and clearing the flags in WAIT are this design's choices.
module prime_fsm
  import prime_pkg::*;
(
    input  logic          clk,
    input  logic          rst,
    input  logic          start,
    input  prime_status_t stat,
    output prime_ctrl_t   ctrl,
    output logic          prime_found,
    output logic          done
);

  typedef enum logic [3:0] {
    WAIT   = 4'd0,
    S1     = 4'd1,
    S2     = 4'd2,
    S3     = 4'd3,
    S4     = 4'd4,
    S5     = 4'd5,
    S6     = 4'd6,
    S7     = 4'd7,
    S8     = 4'd8,
    PRIME  = 4'd9,
    REPEAT = 4'd10,
    DONE   = 4'd11
  } pstate_t;

  pstate_t state, state_nx;
  logic    sel_1_q, sel_1_nx;
  logic    sel_2_q, sel_2_nx;

  // State and flag registers.
  always_ff @(posedge clk) begin
    if (rst) begin
      state   <= WAIT;
      sel_1_q <= 1'b0;
      sel_2_q <= 1'b0;
    end else begin
      state   <= state_nx;
      sel_1_q <= sel_1_nx;
      sel_2_q <= sel_2_nx;
    end
  end

  // Next state and control signals.
  always_comb begin
    state_nx    = state;
    sel_1_nx    = sel_1_q;
    sel_2_nx    = sel_2_q;
    ctrl        = '0;
    ctrl.sel_1  = sel_1_q;
    ctrl.sel_2  = sel_2_q;
    prime_found = 1'b0;
    done        = 1'b0;
    unique case (state)
      WAIT: begin
        ctrl.clr_reg = 1'b1;
        sel_1_nx     = 1'b0;
        sel_2_nx     = 1'b0;
        if (start) state_nx = S1;
      end
      S1: begin
        ctrl.ld_A = 1'b1;
        ctrl.ld_n = 1'b1;
        state_nx  = S2;
      end
      S2: begin
        ctrl.ld_n = 1'b1;
        sel_2_nx  = 1'b0;
        state_nx  = S3;
      end
      S3: begin
        if (!sel_2_q) ctrl.ld_i = 1'b1;
        state_nx = stat.p ? S4 : DONE;
      end
      S4: begin
        if (stat.r || stat.t) state_nx = PRIME;
        else if (stat.q)      state_nx = S5;
        else                  state_nx = REPEAT;
      end
      S5: begin
        ctrl.start_mod = 1'b1;
        state_nx       = S6;
      end
      S6: begin
        if (stat.done_mod) state_nx = S7;
      end
      S7: begin
        sel_2_nx = 1'b1;
        state_nx = stat.s ? REPEAT : S8;
      end
      S8: begin
        ctrl.ld_i = 1'b1;
        state_nx  = S3;
      end
      PRIME: begin
        prime_found = 1'b1;
        ctrl.ld_p   = 1'b1;
        state_nx    = REPEAT;
      end
      REPEAT: begin
        sel_1_nx = stat.r ? 1'b0 : 1'b1;
        state_nx = S2;
      end
      DONE: begin
        done     = 1'b1;
        state_nx = WAIT;
      end
      default: state_nx = WAIT;
    endcase
  end

endmodule
