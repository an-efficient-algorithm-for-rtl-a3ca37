// tb_modulus_sizes: the operand-size experiment for the modulus unit.
//
// Six modulus units, N = 32, 64, 128, 256, 1024 and 2048 bits, run side by
// side on one clock. Each gets SAMPLES operand pairs whose bit lengths are
// drawn uniformly from 1..N and whose other bits are uniform random; the
// larger operand is used as A so that the bit-length difference x = len(A) -
// len(B) covers 0..N-1. For every sample the testbench checks
//   * result == A % B (the language's own operator),
//   * done is a single pulse,
//   * the cycle count, from the edge that samples start to the edge that
//     raises done, equals a loop model of the algorithm and lies in
//     [3, 2x + 5].
// Per size it then fits cycles = a * x + b by least squares and requires
// the slope a to lie between 1.9 and 2.1 (the published fits have slopes of
// 1.99 to 2.0); the fit is printed so that it can be compared with the
// published lines, which have an intercept near 2 where this unit has one
// near 4 (it counts the start and FINISH cycles).
module tb_modulus_sizes;

  localparam int unsigned NSIZES  = 6;
  localparam int unsigned SAMPLES = 10_000;
  localparam int unsigned SIZES[NSIZES] = '{32, 64, 128, 256, 1024, 2048};

  logic clk = 1'b0;
  logic reset = 1'b1;
  always #5 clk = ~clk;

  int unsigned checks = 0, failures = 0;
  int unsigned finished = 0;

  task automatic expect_true(string what, bit ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  for (genvar g = 0; g < NSIZES; g++) begin : g_size
    localparam int unsigned N = SIZES[g];
    typedef logic [N-1:0] word_t;

    logic  start = 1'b0;
    word_t a = '0, b = '0;
    word_t result;
    logic  done;

    modulus #(.N(N)) dut (.clk, .reset, .start, .A(a), .B(b), .result, .done);

    function automatic word_t rand_len(int unsigned len);
      word_t v = '0;
      for (int unsigned i = 0; i < N; i += 32) v = (v << 32) | word_t'($urandom);
      if (len < N) v = v & ((word_t'(1) << len) - word_t'(1));
      v[len-1] = 1'b1;
      return v;
    endfunction

    function automatic int unsigned bitlen(word_t v);
      for (int i = N - 1; i >= 0; i--) if (v[i]) return i + 1;
      return 0;
    endfunction

    function automatic int unsigned model_cycles(word_t x, word_t y);
      word_t d = y, dv = x, old_dv;
      int unsigned k = 0, s, old_s, steps = 0;
      while (d <= x && !d[N-1] && k < N) begin
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
      end while (!(old_dv < y || old_s == 0 || old_s >= N));
      return (k + 1) + steps + 1;
    endfunction

    initial begin : run
      real sx = 0.0, sy = 0.0, sxx = 0.0, sxy = 0.0, slope, icept;
      int unsigned bad_res = 0, bad_cyc = 0, bad_bound = 0, bad_done = 0, max_cyc = 0;
      @(negedge clk);
      while (reset) @(negedge clk);
      for (int unsigned t = 0; t < SAMPLES; t++) begin
        word_t x, y, tmp;
        int unsigned cyc, pulses, dx;
        cyc = 0;
        x = rand_len(1 + $urandom % N);
        y = rand_len(1 + $urandom % N);
        if (x < y) begin tmp = x; x = y; y = tmp; end
        dx = bitlen(x) - bitlen(y);
        a = x;
        b = y;
        start = 1'b1;
        @(posedge clk);               // this edge samples start
        #1 start = 1'b0;
        do begin
          @(posedge clk);
          cyc++;
          #1;
        end while (!done && cyc < 4 * N + 20);
        pulses = done ? 1 : 0;
        @(posedge clk); #1;
        if (done) pulses++;
        if (result != x % y) bad_res++;
        if (pulses != 1) bad_done++;
        if (cyc != model_cycles(x, y)) bad_cyc++;
        if (cyc < 3 || cyc > 2 * dx + 5) bad_bound++;
        if (cyc > max_cyc) max_cyc = cyc;
        sx  += real'(dx);
        sy  += real'(cyc);
        sxx += real'(dx) * real'(dx);
        sxy += real'(dx) * real'(cyc);
        @(negedge clk);
      end
      slope = (SAMPLES * sxy - sx * sy) / (SAMPLES * sxx - sx * sx);
      icept = (sy - slope * sx) / SAMPLES;
      expect_true($sformatf("N=%0d: %0d wrong results", N, bad_res), bad_res == 0);
      expect_true($sformatf("N=%0d: %0d bad done pulses", N, bad_done), bad_done == 0);
      expect_true($sformatf("N=%0d: %0d cycle counts off the model", N, bad_cyc), bad_cyc == 0);
      expect_true($sformatf("N=%0d: %0d cycle counts outside [3, 2x+5]", N, bad_bound), bad_bound == 0);
      expect_true($sformatf("N=%0d: slope %f", N, slope), slope > 1.9 && slope < 2.1);
      $display("N=%4d: %0d samples, fit cycles = %.3f * x + %.2f, longest %0d cycles",
               N, SAMPLES, slope, icept, max_cyc);
      finished++;
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    reset = 1'b0;
    wait (finished == NSIZES);
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
