// uart_tx: UART transmitter, 8 data bits, no parity, one stop bit (8N1).
//
// How it works. A start pulse in the idle state captures data and sends a
// frame on tx: a low start bit, the eight data bits least significant bit
// first, and a high stop bit, each CLKS_PER_BIT clocks long. When the stop
// bit has been sent, done pulses for one clock and the transmitter is ready
// for the next byte. A start pulse while a frame is in flight is ignored.
//
// Interface: clk, reset (synchronous, active high), start, data[7:0] in; tx
// (registered, idle high) and done (one-cycle strobe) out.
//
// Timing: the frame begins on the clock after start is sampled and done
// rises 10 * CLKS_PER_BIT clocks after that. The default 1085 clocks per bit
// is 115200 baud at 125 MHz.
//
// Port names follow the published system's block diagram; the frame format
// and baud rate are this design's own choices.
module uart_tx #(
    parameter int unsigned CLKS_PER_BIT = 1085
) (
    input  logic       clk,
    input  logic       reset,
    input  logic       start,
    input  logic [7:0] data,
    output logic       tx,
    output logic       done
);

  localparam int unsigned CW = $clog2(CLKS_PER_BIT + 1);
  localparam logic [CW-1:0] FULL = CW'(CLKS_PER_BIT - 1);

  typedef enum logic [1:0] {TX_IDLE, TX_START, TX_DATA, TX_STOP} tx_state_t;

  tx_state_t      state;
  logic [CW-1:0]  cnt;
  logic [2:0]     bit_idx;
  logic [7:0]     shreg;

  always_ff @(posedge clk) begin
    if (reset) begin
      state   <= TX_IDLE;
      cnt     <= '0;
      bit_idx <= '0;
      shreg   <= '0;
      tx      <= 1'b1;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        TX_IDLE: begin
          tx  <= 1'b1;
          cnt <= '0;
          if (start) begin
            shreg <= data;
            tx    <= 1'b0;
            state <= TX_START;
          end
        end
        TX_START: begin
          if (cnt == FULL) begin
            cnt     <= '0;
            bit_idx <= '0;
            tx      <= shreg[0];
            state   <= TX_DATA;
          end else begin
            cnt <= cnt + CW'(1);
          end
        end
        TX_DATA: begin
          if (cnt == FULL) begin
            cnt <= '0;
            if (bit_idx == 3'd7) begin
              tx    <= 1'b1;
              state <= TX_STOP;
            end else begin
              tx    <= shreg[bit_idx + 3'd1];
            end
            bit_idx <= bit_idx + 3'd1;
          end else begin
            cnt <= cnt + CW'(1);
          end
        end
        TX_STOP: begin
          if (cnt == FULL) begin
            cnt   <= '0;
            done  <= 1'b1;
            state <= TX_IDLE;
          end else begin
            cnt <= cnt + CW'(1);
          end
        end
        default: state <= TX_IDLE;
      endcase
    end
  end

endmodule
