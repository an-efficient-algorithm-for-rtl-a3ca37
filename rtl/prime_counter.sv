// prime_counter: counts the primes found and the clock cycles of one prime
// search.
//
// How it works. The edge that samples start while the counter is idle clears
// both counts and arms it. While armed, every prime_found pulse adds one to
// prime_count and every clock edge adds one to cycle_count, until the edge
// that samples done, which disarms it; both counts then hold until the next
// start. cycle_count is therefore the number of clock edges from the one that
// starts the search to the one that enters the controller's DONE state.
//
// Interface: clk, rst (synchronous, active high), start, prime_found, done
// in; prime_count (PW bits) and cycle_count (CW bits) out.
//
// The inputs and what is counted follow the published description of the
// counter module; widths and counting convention are this design's own. The
// default 64-bit cycle count covers a search up to 500,000: the published run
// time for it is about 7.4e9 clocks at 125 MHz and this controller needs about
// 6.4e10, both beyond a 32-bit counter.
module prime_counter #(
    parameter int unsigned PW = 32,
    parameter int unsigned CW = 64
) (
    input  logic          clk,
    input  logic          rst,
    input  logic          start,
    input  logic          prime_found,
    input  logic          done,
    output logic [PW-1:0] prime_count,
    output logic [CW-1:0] cycle_count
);

  logic running;

  always_ff @(posedge clk) begin
    if (rst) begin
      running     <= 1'b0;
      prime_count <= '0;
      cycle_count <= '0;
    end else if (!running) begin
      if (start) begin
        running     <= 1'b1;
        prime_count <= '0;
        cycle_count <= '0;
      end
    end else begin
      if (prime_found) prime_count <= prime_count + PW'(1);
      if (done) running     <= 1'b0;
      else      cycle_count <= cycle_count + CW'(1);
    end
  end

endmodule
