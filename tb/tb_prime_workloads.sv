// tb_prime_workloads: the prime-search experiment at the limits that can be
// simulated in reasonable time, with the prime system at its default widths
// (32-bit datapath and modulus unit, 64-bit cycle counter).
//
// For A = 10, 100, 1,000 and 10,000 the testbench runs one complete search
// and checks
//   * prime_count against the published counts 4, 25, 168 and 1,229, which
//     are also the true counts of primes below A;
//   * the last prime reported (7, 97, 997, 9,973);
//   * cycle_count against a cycle model of the controller and modulus unit
//     (one clock per state, S6 lasting the modulus latency).
// It prints the search time at 125 MHz next to the published hardware time.
// The larger published limits (100,000 to 500,000) take 3e9 to 6.4e10
// clocks in this design and are not simulated.
module tb_prime_workloads;

  localparam int unsigned W = 32;
  localparam int unsigned NRUNS = 4;
  localparam int unsigned LIMITS[NRUNS]     = '{10, 100, 1000, 10000};
  localparam int unsigned PAPER_COUNT[NRUNS] = '{4, 25, 168, 1229};
  localparam int unsigned LAST_PRIME[NRUNS]  = '{7, 97, 997, 9973};
  localparam real         PAPER_TIME[NRUNS]  = '{0.68e-6, 64.58e-6, 0.468e-3, 0.0345};

  logic clk = 1'b0;
  logic rst = 1'b1;
  logic start = 1'b0;
  logic [W-1:0] A = '0;
  logic [W-1:0] prime;
  logic prime_found, done;
  logic [31:0] prime_count;
  logic [63:0] cycle_count;
  always #5 clk = ~clk;

  int unsigned checks = 0, failures = 0;

  prime_system dut (.*);

  // ---------------------------------------------------------------- cycle model
  function automatic int unsigned mod_latency(int unsigned a, int unsigned b);
    longint unsigned d = b, dv = a, old_dv;
    int unsigned k = 0, steps = 0;
    int s, old_s;
    while (d <= a && ((d >> (W - 1)) & 1) == 0 && k < W) begin
      d = d << 1;
      k++;
    end
    s = k;
    do begin
      old_dv = dv;
      old_s  = s;
      if (dv >= d) dv = dv - d;
      d = d >> 1;
      s--;
      steps++;
    end while (!(old_dv < b || old_s == 0 || old_s >= W));
    return (k + 1) + steps + 1;
  endfunction

  function automatic longint unsigned model_search_cycles(int unsigned lim);
    longint unsigned c = 1;                 // S1
    int unsigned n = 2;
    forever begin
      c += 2;                               // S2, S3
      if (n >= lim) break;
      c += 1;                               // S4
      if (n == 2) c += 2;                   // PRIME, REPEAT
      else begin
        for (int unsigned i = 3; ; i += 2) begin
          if (i == n) begin c += 2; break; end
          c += mod_latency(n, i) + 3;       // S5, S6, S7
          if (n % i == 0) begin c += 1; break; end   // REPEAT
          c += 3;                           // S8, S3, S4
        end
      end
      n = (n == 2) ? 3 : n + 2;
    end
    return c;
  endfunction

  // ---------------------------------------------------------------- runs
  int unsigned last_seen;
  always @(posedge clk) if (!rst && prime_found) begin
    @(posedge clk); #1;
    last_seen = prime;
  end

  task automatic search(int r);
    longint unsigned model, t;
    real secs;
    last_seen = 0;
    @(negedge clk);
    A = LIMITS[r];
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    t = 0;
    while (!done && t < 64'd100_000_000) begin @(negedge clk); t++; end
    repeat (3) @(negedge clk);
    model = model_search_cycles(LIMITS[r]);
    checks++;
    if (prime_count != PAPER_COUNT[r]) begin
      failures++;
      $display("FAIL A=%0d: %0d primes, published %0d", LIMITS[r], prime_count, PAPER_COUNT[r]);
    end
    checks++;
    if (last_seen != LAST_PRIME[r]) begin
      failures++;
      $display("FAIL A=%0d: last prime %0d, expected %0d", LIMITS[r], last_seen, LAST_PRIME[r]);
    end
    checks++;
    if (cycle_count != model) begin
      failures++;
      $display("FAIL A=%0d: %0d cycles, model %0d", LIMITS[r], cycle_count, model);
    end
    secs = real'(cycle_count) / 125.0e6;
    $display("A=%0d: %0d primes, last %0d, %0d cycles = %.6g s at 125 MHz (published %.6g s)",
             LIMITS[r], prime_count, last_seen, cycle_count, secs, PAPER_TIME[r]);
  endtask

  initial begin
    repeat (4) @(negedge clk);
    rst = 1'b0;
    repeat (2) @(negedge clk);
    for (int r = 0; r < NRUNS; r++) search(r);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
