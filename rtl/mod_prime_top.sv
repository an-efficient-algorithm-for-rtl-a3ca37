// mod_prime_top: both systems built around the shift-and-subtract modulus
// unit, side by side on one clock and reset.
//
//   modulus_eval_system  UART-attached measurement system: receives two N-bit
//                        operands on rx, returns A mod B and the cycle count
//                        of the modulus unit on tx.
//   prime_system         stand-alone prime search below prime_limit, with its
//                        own W-bit modulus unit.
//
// The two share nothing but clk and reset; on the original boards they were
// separate FPGA builds, and placing them under one top is this design's
// choice, so that a single top holds every block.
//
// Interface: clk, reset (synchronous, active high); rx/tx for the evaluation
// system; prime_start, prime_limit in and prime, prime_found, prime_done,
// prime_count, prime_cycles out for the prime search.
module mod_prime_top #(
    parameter int unsigned N            = 2048,
    parameter int unsigned CLKS_PER_BIT = 1085,
    parameter int unsigned W            = 32
) (
    input  logic         clk,
    input  logic         reset,
    input  logic         rx,
    output logic         tx,
    input  logic         prime_start,
    input  logic [W-1:0] prime_limit,
    output logic [W-1:0] prime,
    output logic         prime_found,
    output logic         prime_done,
    output logic [31:0]  prime_count,
    output logic [63:0]  prime_cycles
);

  modulus_eval_system #(.N(N), .CLKS_PER_BIT(CLKS_PER_BIT)) u_eval (
      .clk, .reset, .rx, .tx);

  prime_system #(.W(W), .CW(64)) u_prime (
      .clk, .rst(reset), .start(prime_start), .A(prime_limit),
      .prime, .prime_found, .done(prime_done),
      .prime_count, .cycle_count(prime_cycles));

endmodule
