// tb_prime_system: end-to-end test of the prime search (32-bit datapath).
//
// For each limit A in {0, 2, 3, 4, 10, 100, 1000, 2000} the testbench starts a
// search and checks:
//   * every prime_found pulse is followed by the next prime below A, in
//     increasing order, on the prime output (reference: sieve of Eratosthenes);
//   * prime_count at the end equals the number of primes below A; the paper's
//     table gives 4, 25 and 168 for A = 10, 100 and 1000;
//   * done pulses exactly once;
//   * cycle_count equals a cycle model of the controller: S1, then per
//     candidate S2, S3, S4 and per trial divisor S5, S6 (modulus latency + 1),
//     S7, and S8, S3, S4 when the division leaves a remainder, then PRIME and
//     REPEAT, or REPEAT, and S2, S3 for the final candidate.
// A second start after a finished search must give the same answer.
module tb_prime_system;

  localparam int unsigned W = 32;

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

  prime_system #(.W(W), .CW(64)) dut (.*);

  // ---------------------------------------------------------------- models
  function automatic int mod_latency(longint unsigned a, longint unsigned b);
    longint unsigned d = b, dv = a, old_dv;
    int k = 0, s, old_s, steps = 0;
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

  // ---------------------------------------------------------------- checks
  int unsigned exp_primes[$];
  int unsigned seen, n_done, order_errs;

  always @(posedge clk) begin
    if (!rst && done) n_done++;
    if (!rst && prime_found) begin
      @(posedge clk); #1;
      if (seen >= exp_primes.size() || prime != exp_primes[seen]) order_errs++;
      seen++;
    end
  end

  task automatic search(int unsigned lim);
    bit is_comp[];
    longint unsigned t0;
    is_comp = new[lim + 1];
    exp_primes.delete();
    for (int unsigned p = 2; p < lim; p++) begin
      if (!is_comp[p]) begin
        exp_primes.push_back(p);
        for (int unsigned m = 2 * p; m < lim; m += p) is_comp[m] = 1'b1;
      end
    end
    seen = 0; n_done = 0; order_errs = 0;
    @(negedge clk);
    A = lim;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    @(negedge clk);
    A = 32'hDEAD_BEEF;                      // A must already be captured (S1)
    t0 = 0;
    while (!done && t0 < 64'd5_000_000) begin @(negedge clk); t0++; end
    repeat (5) @(negedge clk);
    checks++;
    if (prime_count != exp_primes.size() || seen != exp_primes.size()) begin
      failures++;
      $display("FAIL A=%0d: %0d primes counted, %0d pulses, expected %0d", lim, prime_count, seen,
               exp_primes.size());
    end
    checks++;
    if (order_errs != 0) begin
      failures++;
      $display("FAIL A=%0d: %0d primes out of order or wrong", lim, order_errs);
    end
    checks++;
    if (n_done != 1) begin
      failures++;
      $display("FAIL A=%0d: done pulsed %0d times", lim, n_done);
    end
    checks++;
    if (cycle_count != model_search_cycles(lim)) begin
      failures++;
      $display("FAIL A=%0d: %0d cycles, model %0d", lim, cycle_count, model_search_cycles(lim));
    end
    $display("A=%0d: %0d primes, last %0d, %0d cycles (%0.9f s at 125 MHz)", lim, prime_count,
             prime, cycle_count, real'(cycle_count) / 125.0e6);
  endtask

  initial begin
    repeat (4) @(negedge clk);
    rst = 1'b0;
    repeat (2) @(negedge clk);
    search(0);
    search(2);
    search(3);
    search(4);
    search(10);
    search(10);        // a second run after a finished one
    search(100);
    search(1000);
    search(2000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
