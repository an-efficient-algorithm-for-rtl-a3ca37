// tb_mod_prime_top_full: one complete operation of the whole design with
// every parameter at its default: 2048-bit modulus evaluation over a UART at
// 1085 clocks per bit, and the 32-bit prime search.
//
// The host model sends one pair of 2048-bit operands (256 bytes each) on rx
// and decodes the 260-byte reply on tx: the result must equal A % B and the
// cycle count must match a cycle model of the modulus algorithm. The
// operands have a bit-length difference of about 1000, so the modulus unit
// runs for about 2000 cycles; a second pair has the largest bit-length
// difference, 2047 (about 4100 cycles). Meanwhile the prime search runs for A = 1000
// and must report 168 primes, the last one 997. About 17 million clocks.
module tb_mod_prime_top_full;

  localparam int unsigned N   = 2048;   // defaults of mod_prime_top
  localparam int unsigned CPB = 1085;
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

  mod_prime_top dut (.*);

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
    checks++;
    if (res != a % b) begin
      failures++;
      $display("FAIL %h mod %h: got %h", a, b, res);
    end
    $display("%0d-bit operands, bit lengths differ by %0d: %0d cycles", N, $clog2(a + 1) - $clog2(b + 1), cyc);
    checks++;
    if (cyc != 32'(model_cycles(a, b))) begin
      failures++;
      $display("FAIL %h mod %h: %0d cycles, model %0d", a, b, cyc, model_cycles(a, b));
    end
  endtask

  function automatic logic [N-1:0] rand_len(int len);
    logic [N-1:0] v;
    for (int w = 0; w < N / 32; w++) v[w*32 +: 32] = $urandom;
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

  initial begin
    repeat (4) @(negedge clk);
    reset = 1'b0;
    repeat (4) @(negedge clk);
    fork
      begin
        transaction(rand_len(1900), rand_len(900));
        transaction(rand_len(2048), rand_len(1));    // largest bit-length difference
      end
      prime_run(1000, 168, 997);
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
