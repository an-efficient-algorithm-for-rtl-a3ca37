// prime_system: finds every prime below a limit A by trial division, using
// the shift-and-subtract modulus unit for each division.
//
// How it works. prime_fsm drives prime_datapath through the prime_ctrl_t
// controls and reads back the prime_status_t flags, as in the published
// controller/datapath interface. Candidates are 2, then 3, 5, 7, ...; each odd
// candidate n is divided by 3, 5, 7, ... until a divisor leaves remainder 0
// (not prime) or the divisor reaches n (prime). prime_counter counts the
// primes and the clock cycles of the whole search.
//
// Interface: clk, rst (synchronous, active high), start, A (W bits) in;
// prime (last prime found, W bits), prime_found (one-cycle pulse per prime,
// with prime valid on the following cycle), done (one-cycle pulse at the
// end), prime_count, cycle_count out.
//
// Timing: A is sampled on the clock after start is seen. The search length
// grows roughly with the sum over odd n < A of the cost of the trial
// divisions, each one a full modulus operation of a few to a few dozen cycles.
module prime_system
  import prime_pkg::*;
#(
    parameter int unsigned W  = 32,
    parameter int unsigned CW = 64
) (
    input  logic          clk,
    input  logic          rst,
    input  logic          start,
    input  logic [W-1:0]  A,
    output logic [W-1:0]  prime,
    output logic          prime_found,
    output logic          done,
    output logic [31:0]   prime_count,
    output logic [CW-1:0] cycle_count
);

  prime_ctrl_t   ctrl;
  prime_status_t stat;

  prime_fsm u_fsm (
      .clk, .rst, .start, .stat, .ctrl, .prime_found, .done);

  prime_datapath #(.W(W)) u_datapath (
      .clk, .rst, .A, .ctrl, .stat, .prime);

  prime_counter #(.PW(32), .CW(CW)) u_counter (
      .clk, .rst, .start, .prime_found, .done, .prime_count, .cycle_count);

endmodule
