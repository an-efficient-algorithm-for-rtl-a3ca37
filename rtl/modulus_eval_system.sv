// modulus_eval_system: the measurement system built around the modulus unit.
//
// A host sends two N-bit operands as bytes over a UART; the system computes
// A mod B and answers with the result and the number of clock cycles the
// modulus unit took. Five blocks are wired as in the published block diagram:
//   uart_rx            -> bytes (data, done) into the controller
//   modulus_controller -> assembles A and B, pulses modulus_start
//   modulus            -> computes A mod B, pulses done
//   cycle_counter      -> counts from modulus_start to modulus done
//   uart_tx            <- reply bytes from the controller
//
// Interface: clk, reset (synchronous, active high), rx in, tx out. Message
// format (this design's own): N/8 bytes of A then N/8 bytes of B, then the
// reply N/8 bytes of result and 4 bytes of cycle count, all most significant
// byte first, 8N1 frames at CLKS_PER_BIT clocks per bit.
//
// Timing: the reply starts a few clocks after the modulus unit finishes; the
// whole exchange is dominated by the UART, about 10 * CLKS_PER_BIT clocks per
// byte.
module modulus_eval_system #(
    parameter int unsigned N            = 2048,
    parameter int unsigned CLKS_PER_BIT = 1085
) (
    input  logic clk,
    input  logic reset,
    input  logic rx,
    output logic tx
);

  localparam int unsigned CW = 32;   // cycles[31:0] in the block diagram

  logic [7:0]    rx_data, tx_data;
  logic          rx_done, tx_done, tx_start;
  logic [N-1:0]  op_a, op_b, mod_result;
  logic          modulus_start, modulus_done;
  logic [CW-1:0] cycles;

  uart_rx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_uart_rx (
      .clk, .reset, .rx, .data(rx_data), .done(rx_done));

  modulus_controller #(.N(N), .CW(CW)) u_ctrl (
      .clk, .reset,
      .rx_valid(rx_done), .uart_rx_data(rx_data),
      .modulus_done, .result(mod_result), .cycle_count(cycles),
      .tx_done, .uart_tx_data(tx_data), .tx_start,
      .A(op_a), .B(op_b), .modulus_start);

  modulus #(.N(N)) u_modulus (
      .clk, .reset, .start(modulus_start), .A(op_a), .B(op_b),
      .result(mod_result), .done(modulus_done));

  cycle_counter #(.W(CW)) u_cycle_counter (
      .clk, .reset, .start_cnt(modulus_start), .done_cnt(modulus_done), .cycles);

  uart_tx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_uart_tx (
      .clk, .reset, .start(tx_start), .data(tx_data), .tx, .done(tx_done));

endmodule
