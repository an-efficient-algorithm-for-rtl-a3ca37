// tb_mod_prime_top: end-to-end test of the whole design at reduced size
// (N = 64-bit modulus evaluation, 8 clocks per UART bit, 32-bit prime search).
//
// Two things run at the same time, as on one chip:
//   * a host model exchanges 24 operand pairs with the evaluation system over
//     rx/tx and checks each returned A mod B (against %) and cycle count
//     (against a cycle model of the modulus algorithm);
//   * the prime search runs for A = 10, 100 and 1000 and must report 4, 25 and
//     168 primes, the numbers in the paper's table, with the right last prime.
// It also counts how often each mechanism of the design occurred and fails
// if one never did: alignment stopped because the divisor went past the
// dividend, alignment stopped by the divisor's top bit, subtraction ended
// early by dividend < B, subtraction ended at shift == 0, an operation with
// A < B, a prime found, a composite rejected by a zero remainder, the n == 2
// special case, the controller waiting in S6 for the modulus unit, and the
// UART reply path.
module tb_mod_prime_top;

  localparam int unsigned N   = 64;
  localparam int unsigned CPB = 8;
  localparam int unsigned W   = 32;

  logic clk = 1'b0;
  logic reset = 1'b1;
  logic rx = 1'b1;
  logic tx;
  logic prime_start = 1'b0;
  logic [W-1:0] prime_limit = '0;
  logic [W-1:0] prime;
  logic prime_found, prime_done;
  logic [31:0] prime_count;
  logic [63:0] prime_cycles;
  always #5 clk = ~clk;

  int unsigned checks = 0, failures = 0;

  mod_prime_top #(.N(N), .CLKS_PER_BIT(CPB), .W(W)) dut (.*);

  // ---------------------------------------------------------------- mechanism counters
  int unsigned m_align_past, m_align_topbit, m_subt_early, m_subt_zero, m_a_lt_b;
  int unsigned m_prime, m_composite, m_n_is_2, m_s6_wait, m_replies;

  always @(posedge clk) if (!reset) begin
    // modulus unit of the evaluation system (state 1 = ALIGN, 2 = SUBT)
    if (dut.u_eval.u_modulus.state == 1 && !dut.u_eval.u_modulus.condition1) begin
      if (dut.u_eval.u_modulus.true1) m_align_topbit++;
      else                            m_align_past++;
      if (dut.u_eval.u_modulus.shift == 0) m_a_lt_b++;
    end
    if (dut.u_eval.u_modulus.state == 2 && dut.u_eval.u_modulus.condition2) begin
      if (dut.u_eval.u_modulus.true2) m_subt_zero++;
      else if (dut.u_eval.u_modulus.lt_b) m_subt_early++;
    end
    // prime controller (state 6 = S6, 7 = S7, 4 = S4)
    if (prime_found) m_prime++;
    if (dut.u_prime.u_fsm.state == 7 && dut.u_prime.u_fsm.stat.s) m_composite++;
    if (dut.u_prime.u_fsm.state == 4 && dut.u_prime.u_fsm.stat.r) m_n_is_2++;
    if (dut.u_prime.u_fsm.state == 6 && !dut.u_prime.u_fsm.stat.done_mod) m_s6_wait++;
  end

  // ---------------------------------------------------------------- host UART
  task automatic host_send(logic [7:0] b);
    rx = 1'b0;
    repeat (CPB) @(negedge clk);
    for (int i = 0; i < 8; i++) begin
      rx = b[i];
      repeat (CPB) @(negedge clk);
    end
    rx = 1'b1;
    repeat (CPB) @(negedge clk);
  endtask

  task automatic host_recv(output logic [7:0] b);
    @(negedge tx);
    repeat (CPB / 2) @(posedge clk);
    for (int i = 0; i < 8; i++) begin
      repeat (CPB) @(posedge clk);
      b[i] = tx;
    end
    repeat (CPB) @(posedge clk);
  endtask

  function automatic int model_cycles(logic [N-1:0] a, logic [N-1:0] b);
    logic [N-1:0] d = b, dv = a, old_dv;
    int k = 0, s, old_s, steps = 0;
    while (d <= a && !d[N-1] && k < N) begin
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
    end while (!(old_dv < b || old_s == 0 || old_s >= N));
    return (k + 1) + steps + 1;
  endfunction

  task automatic transaction(logic [N-1:0] a, logic [N-1:0] b);
    logic [N-1:0] res;
    logic [31:0]  cyc;
    logic [7:0]   by;
    fork
      begin
        for (int i = N / 8 - 1; i >= 0; i--) host_send(a[i*8 +: 8]);
        for (int i = N / 8 - 1; i >= 0; i--) host_send(b[i*8 +: 8]);
      end
      begin
        for (int i = 0; i < N / 8; i++) begin host_recv(by); res = {res[N-9:0], by}; end
        for (int i = 0; i < 4; i++)     begin host_recv(by); cyc = {cyc[23:0], by}; end
      end
    join
    m_replies++;
    checks++;
    if (res != a % b) begin
      failures++;
      $display("FAIL %h mod %h: got %h", a, b, res);
    end
    checks++;
    if (cyc != 32'(model_cycles(a, b))) begin
      failures++;
      $display("FAIL %h mod %h: %0d cycles, model %0d", a, b, cyc, model_cycles(a, b));
    end
  endtask

  function automatic logic [N-1:0] rand_len(int len);
    logic [N-1:0] v = {$urandom, $urandom};
    if (len < N) v = v & ((N'(1) << len) - 1);
    v[len-1] = 1'b1;
    return v;
  endfunction

  task automatic prime_run(int unsigned lim, int unsigned exp_count, int unsigned exp_last);
    int unsigned last = 0;
    int guard = 0;
    @(negedge clk);
    prime_limit = lim;
    prime_start = 1'b1;
    @(negedge clk);
    prime_start = 1'b0;
    while (!prime_done && guard < 2_000_000) begin
      @(negedge clk);
      guard++;
      if (dut.u_prime.u_fsm.state == 9) last = dut.u_prime.u_datapath.reg_n;   // PRIME
    end
    @(negedge clk);
    checks++;
    if (prime_count != exp_count || last != exp_last) begin
      failures++;
      $display("FAIL primes below %0d: %0d (last %0d), expected %0d (last %0d)", lim,
               prime_count, last, exp_count, exp_last);
    end
    $display("primes below %0d: %0d, last %0d, %0d cycles", lim, prime_count, last, prime_cycles);
  endtask

  task automatic expect_seen(string what, int unsigned n);
    checks++;
    if (n == 0) begin
      failures++;
      $display("FAIL mechanism never exercised: %s", what);
    end else begin
      $display("mechanism %-40s %0d", what, n);
    end
  endtask

  initial begin
    repeat (4) @(negedge clk);
    reset = 1'b0;
    repeat (4) @(negedge clk);
    fork
      begin
        transaction(64'd29, 64'd5);
        transaction(64'd3, 64'd1000);
        transaction({64{1'b1}}, {1'b1, 63'd3});
        transaction({1'b1, 63'd0}, 64'd1);
        for (int t = 0; t < 20; t++)
          transaction(rand_len(1 + $urandom % N), rand_len(1 + $urandom % N));
      end
      begin
        prime_run(10, 4, 7);
        prime_run(100, 25, 97);
        prime_run(1000, 168, 997);
      end
    join
    expect_seen("ALIGN stop: divisor above dividend", m_align_past);
    expect_seen("ALIGN stop: divisor top bit", m_align_topbit);
    expect_seen("SUBT end: dividend < B", m_subt_early);
    expect_seen("SUBT end: shift == 0", m_subt_zero);
    expect_seen("operand A < B", m_a_lt_b);
    expect_seen("prime found", m_prime);
    expect_seen("composite rejected (s)", m_composite);
    expect_seen("n == 2 case (r)", m_n_is_2);
    expect_seen("controller waits in S6", m_s6_wait);
    expect_seen("UART replies", m_replies);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
