// cycle_counter: measures how many clock cycles one modulus operation takes.
//
// How it works. The clock edge that samples start_cnt clears the count and
// arms the counter; every following edge adds one, until the edge that
// samples done_cnt, which stops it. The count then holds until the next
// start_cnt. With start_cnt tied to the modulus unit's start and done_cnt to
// its done pulse, cycles equals the number of clock edges from the one that
// starts the operation to the one that raises done.
//
// Interface: clk, reset (synchronous, active high), start_cnt, done_cnt in;
// cycles (W bits, default 32) out.
//
// The role (start counting with modulus_start, stop with modulus_done) and
// the port names follow the published evaluation system; the exact counting
// convention is this design's own.
module cycle_counter #(
    parameter int unsigned W = 32
) (
    input  logic         clk,
    input  logic         reset,
    input  logic         start_cnt,
    input  logic         done_cnt,
    output logic [W-1:0] cycles
);

  logic running;

  always_ff @(posedge clk) begin
    if (reset) begin
      cycles  <= '0;
      running <= 1'b0;
    end else if (start_cnt) begin
      cycles  <= '0;
      running <= 1'b1;
    end else if (running) begin
      if (done_cnt) running <= 1'b0;
      else          cycles  <= cycles + W'(1);
    end
  end

endmodule
