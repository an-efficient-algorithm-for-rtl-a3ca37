// modulus_controller: glue between the UART link and the modulus unit in the
// evaluation system.
//
// How it works. Received bytes are shifted into the A register until N/8 bytes
// have arrived, then into the B register for another N/8 bytes; both arrive
// most significant byte first. The controller then pulses modulus_start for
// one clock (the same pulse starts the cycle counter) and waits for
// modulus_done. On done it captures the result and the cycle count into one
// reply buffer and sends it, again most significant byte first: N/8 result
// bytes followed by CW/8 cycle-count bytes. Each byte is handed to the
// transmitter with a one-clock tx_start, and the next one only after tx_done.
// After the last byte it waits for the next pair of operands.
//
// Interface (names as in the published block diagram): rx_valid and
// uart_rx_data from the receiver; A, B and modulus_start to the modulus unit;
// modulus_done, result and cycle_count back; uart_tx_data, tx_start to the
// transmitter and tx_done from it. clk, reset (synchronous, active high).
//
// Timing: modulus_start follows the clock after the last B byte; result and
// cycle_count are sampled on the edge that sees modulus_done, when both are
// already final. N and CW must be multiples of 8.
//
// The published system states what this block does (assemble operands, start,
// collect result and cycle count, send them back); the message layout and byte
// order are this design's own choice.
module modulus_controller #(
    parameter int unsigned N  = 2048,
    parameter int unsigned CW = 32
) (
    input  logic          clk,
    input  logic          reset,
    input  logic          rx_valid,
    input  logic [7:0]    uart_rx_data,
    input  logic          modulus_done,
    input  logic [N-1:0]  result,
    input  logic [CW-1:0] cycle_count,
    input  logic          tx_done,
    output logic [7:0]    uart_tx_data,
    output logic          tx_start,
    output logic [N-1:0]  A,
    output logic [N-1:0]  B,
    output logic          modulus_start
);

  localparam int unsigned NB  = N / 8;          // bytes per operand
  localparam int unsigned TB  = (N + CW) / 8;   // bytes per reply
  localparam int unsigned IW  = $clog2(TB + 1);
  localparam int unsigned RW  = N + CW;

  typedef enum logic [2:0] {
    C_RX_A, C_RX_B, C_START, C_WAIT, C_TX_SEND, C_TX_WAIT
  } ctrl_state_t;

  ctrl_state_t    state;
  logic [IW-1:0]  idx;
  logic [RW-1:0]  txbuf;

  assign modulus_start = (state == C_START);
  assign tx_start      = (state == C_TX_SEND);
  assign uart_tx_data  = txbuf[RW-1 -: 8];

  always_ff @(posedge clk) begin
    if (reset) begin
      state <= C_RX_A;
      idx   <= '0;
      A     <= '0;
      B     <= '0;
      txbuf <= '0;
    end else begin
      unique case (state)
        C_RX_A: if (rx_valid) begin
          A <= {A[N-9:0], uart_rx_data};
          if (idx == IW'(NB - 1)) begin
            idx   <= '0;
            state <= C_RX_B;
          end else begin
            idx <= idx + IW'(1);
          end
        end
        C_RX_B: if (rx_valid) begin
          B <= {B[N-9:0], uart_rx_data};
          if (idx == IW'(NB - 1)) begin
            idx   <= '0;
            state <= C_START;
          end else begin
            idx <= idx + IW'(1);
          end
        end
        C_START: state <= C_WAIT;
        C_WAIT: if (modulus_done) begin
          txbuf <= {result, cycle_count};
          idx   <= '0;
          state <= C_TX_SEND;
        end
        C_TX_SEND: state <= C_TX_WAIT;
        C_TX_WAIT: if (tx_done) begin
          txbuf <= txbuf << 8;
          if (idx == IW'(TB - 1)) begin
            idx   <= '0;
            state <= C_RX_A;
          end else begin
            idx   <= idx + IW'(1);
            state <= C_TX_SEND;
          end
        end
        default: state <= C_RX_A;
      endcase
    end
  end

  initial begin
    assert (N % 8 == 0 && CW % 8 == 0 && N >= 16)
      else $error("modulus_controller: N and CW must be multiples of 8");
  end

endmodule
