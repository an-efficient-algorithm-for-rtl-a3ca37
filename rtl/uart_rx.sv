// uart_rx: UART receiver, 8 data bits, no parity, one stop bit (8N1).
//
// How it works. The rx line passes through a two-flop synchroniser. A falling
// edge starts a frame; the start bit is checked again half a bit period later,
// and from there every data bit is sampled one full bit period apart, at its
// middle, least significant bit first. If the stop bit reads high the byte is
// presented on data and done pulses for one clock; a frame with a low stop bit
// is dropped.
//
// Interface: clk, reset (synchronous, active high), rx (idle high) in; data
// (8 bits, held until the next byte) and done (one-cycle strobe) out.
//
// Timing: CLKS_PER_BIT clocks per bit; the default 1085 gives 115200 baud at
// 125 MHz. done rises about 9.5 bit periods after the start bit's falling
// edge, plus two clocks of synchroniser delay.
//
// Only the port names and the task (bitstream in, 8-bit data out) come from
// the published system; frame format, baud rate and sampling scheme are this
// design's own choices.
module uart_rx #(
    parameter int unsigned CLKS_PER_BIT = 1085
) (
    input  logic       clk,
    input  logic       reset,
    input  logic       rx,
    output logic [7:0] data,
    output logic       done
);

  localparam int unsigned CW = $clog2(CLKS_PER_BIT + 1);
  localparam logic [CW-1:0] FULL = CW'(CLKS_PER_BIT - 1);
  localparam logic [CW-1:0] HALF = CW'((CLKS_PER_BIT - 1) / 2);

  typedef enum logic [1:0] {RX_IDLE, RX_START, RX_DATA, RX_STOP} rx_state_t;

  rx_state_t      state;
  logic [1:0]     sync;
  logic           rx_s;
  logic [CW-1:0]  cnt;
  logic [2:0]     bit_idx;
  logic [7:0]     shreg;

  assign rx_s = sync[1];

  always_ff @(posedge clk) begin
    if (reset) begin
      sync    <= 2'b11;
      state   <= RX_IDLE;
      cnt     <= '0;
      bit_idx <= '0;
      shreg   <= '0;
      data    <= '0;
      done    <= 1'b0;
    end else begin
      sync <= {sync[0], rx};
      done <= 1'b0;
      unique case (state)
        RX_IDLE: begin
          cnt <= '0;
          if (!rx_s) state <= RX_START;
        end
        RX_START: begin
          if (cnt == HALF) begin
            cnt     <= '0;
            bit_idx <= '0;
            state   <= rx_s ? RX_IDLE : RX_DATA;   // glitch: back to idle
          end else begin
            cnt <= cnt + CW'(1);
          end
        end
        RX_DATA: begin
          if (cnt == FULL) begin
            cnt   <= '0;
            shreg <= {rx_s, shreg[7:1]};
            if (bit_idx == 3'd7) state <= RX_STOP;
            bit_idx <= bit_idx + 3'd1;
          end else begin
            cnt <= cnt + CW'(1);
          end
        end
        RX_STOP: begin
          if (cnt == FULL) begin
            cnt   <= '0;
            state <= RX_IDLE;
            if (rx_s) begin
              data <= shreg;
              done <= 1'b1;
            end
          end else begin
            cnt <= cnt + CW'(1);
          end
        end
        default: state <= RX_IDLE;
      endcase
    end
  end

endmodule
