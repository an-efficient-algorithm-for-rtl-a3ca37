// tb_prime_counter: self-checking test of the prime and cycle counter.
//
// Each run pulses start, gives a random number of prime_found pulses spread
// over a random interval, and raises done on the edge L after the start edge
// (as the controller's DONE state does). Expected: prime_count equals the
// number of pulses, cycle_count equals L, both hold afterwards; a start held
// high for several clocks counts once; prime_found outside a run is ignored;
// and reset clears both counts.
module tb_prime_counter;

  logic clk = 1'b0;
  logic rst = 1'b1;
  logic start = 1'b0, prime_found = 1'b0, done = 1'b0;
  logic [31:0] prime_count;
  logic [63:0] cycle_count;
  always #5 clk = ~clk;

  int unsigned checks = 0, failures = 0;

  prime_counter #(.PW(32), .CW(64)) dut (.*);

  task automatic expect_eq(string what, longint unsigned got, longint unsigned exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic run(int L, int primes, int start_len);
    int given = 0;
    @(negedge clk) start = 1'b1;
    repeat (start_len) @(negedge clk);      // edge e0 samples start
    start = 1'b0;
    for (int c = start_len; c <= L; c++) begin
      prime_found = (given < primes) && ($urandom % 2 == 0 || L - c <= primes - given);
      if (prime_found) given++;
      @(negedge clk);
    end
    prime_found = 1'b0;
    done = 1'b1;                             // high after edge e(L), seen at e(L+1)
    @(negedge clk) done = 1'b0;
    expect_eq($sformatf("L=%0d cycles", L), cycle_count, L);
    expect_eq($sformatf("L=%0d primes", L), prime_count, given);
    prime_found = 1'b1;                      // outside a run: ignored
    repeat (3) @(negedge clk);
    prime_found = 1'b0;
    expect_eq($sformatf("L=%0d cycles held", L), cycle_count, L);
    expect_eq($sformatf("L=%0d primes held", L), prime_count, given);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    expect_eq("reset cycles", cycle_count, 0);
    expect_eq("reset primes", prime_count, 0);
    rst = 1'b0;
    run(5, 0, 1);
    run(20, 4, 1);
    run(30, 3, 4);          // start held for 4 clocks
    for (int i = 0; i < 40; i++) run(10 + $urandom % 200, $urandom % 8, 1);
    @(negedge clk) rst = 1'b1;
    @(negedge clk) rst = 1'b0;
    expect_eq("reset cycles again", cycle_count, 0);
    expect_eq("reset primes again", prime_count, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
