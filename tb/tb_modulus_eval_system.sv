// tb_modulus_eval_system: end-to-end test of the UART measurement system at
// N = 64 bits and 8 clocks per UART bit.
//
// The testbench plays the host: it sends A and B as 8N1 frames on rx (most
// significant byte first), decodes the reply on tx with its own UART
// receiver, and checks the returned result against A % B and the returned
// cycle count against a cycle model of the modulus algorithm. Operands cover
// A < B, A == B, equal bit lengths, the largest bit-length difference and a
// divisor with its top bit set, plus random operands of random lengths.
module tb_modulus_eval_system;

  localparam int unsigned N   = 64;
  localparam int unsigned CPB = 8;

  logic clk = 1'b0;
  logic reset = 1'b1;
  logic rx = 1'b1;
  logic tx;
  always #5 clk = ~clk;

  int unsigned checks = 0, failures = 0;

  modulus_eval_system #(.N(N), .CLKS_PER_BIT(CPB)) dut (.clk, .reset, .rx, .tx);

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
    repeat (CPB) @(posedge clk);   // stop bit
  endtask

  // ---------------------------------------------------------------- models
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
    logic [N-1:0]  res;
    logic [31:0]   cyc;
    logic [7:0]    by;
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
      $display("FAIL %h mod %h: got %h expected %h", a, b, res, a % b);
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

  initial begin
    repeat (4) @(negedge clk);
    reset = 1'b0;
    repeat (4) @(negedge clk);
    transaction(64'd29, 64'd5);
    transaction(64'd5, 64'd29);
    transaction(64'd12345, 64'd12345);
    transaction({1'b1, 63'd0}, 64'd1);
    transaction({64{1'b1}}, {1'b1, 63'd7});
    transaction(rand_len(64), rand_len(64));
    for (int t = 0; t < 12; t++) transaction(rand_len(1 + $urandom % N), rand_len(1 + $urandom % N));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
