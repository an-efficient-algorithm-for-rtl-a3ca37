// tb_modulus_controller: self-checking test of the evaluation-system
// controller, with N = 64 and a 32-bit cycle count.
//
// The testbench stands in for the receiver, the modulus unit, the cycle
// counter and the transmitter. For each of 30 random transactions it hands
// over 8 bytes of A and 8 bytes of B (most significant first, with random
// gaps), then checks that A and B are assembled, that modulus_start pulses
// exactly once, after the last byte. It answers after a random delay with a
// done pulse, a result and a cycle count, accepts each tx_start after a random
// transmit time, and checks the 12 reply bytes: result then cycle count, most
// significant first, one tx_start per tx_done.
module tb_modulus_controller;

  localparam int unsigned N  = 64;
  localparam int unsigned CW = 32;

  logic clk = 1'b0;
  logic reset = 1'b1;
  always #5 clk = ~clk;

  logic          rx_valid = 1'b0;
  logic [7:0]    uart_rx_data = '0;
  logic          modulus_done = 1'b0;
  logic [N-1:0]  result = '0;
  logic [CW-1:0] cycle_count = '0;
  logic          tx_done = 1'b0;
  logic [7:0]    uart_tx_data;
  logic          tx_start;
  logic [N-1:0]  A, B;
  logic          modulus_start;

  int unsigned checks = 0, failures = 0;
  int unsigned starts = 0;

  modulus_controller #(.N(N), .CW(CW)) dut (.*);

  always @(posedge clk) if (!reset && modulus_start) starts++;

  task automatic expect_true(string what, bit ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic give_byte(logic [7:0] b);
    repeat ($urandom % 4) @(negedge clk);
    rx_valid = 1'b1;
    uart_rx_data = b;
    @(negedge clk);
    rx_valid = 1'b0;
    uart_rx_data = 8'($urandom);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    reset = 1'b0;
    for (int t = 0; t < 30; t++) begin
      logic [N-1:0] a, b, res;
      logic [CW-1:0] cyc;
      logic [N+CW-1:0] reply, got;
      int unsigned s0;
      a   = {$urandom, $urandom};
      b   = {$urandom, $urandom};
      res = {$urandom, $urandom};
      cyc = $urandom;
      s0  = starts;
      for (int i = N / 8 - 1; i >= 0; i--) give_byte(a[i*8 +: 8]);
      expect_true($sformatf("#%0d no start before B", t), starts == s0);
      for (int i = N / 8 - 1; i >= 0; i--) give_byte(b[i*8 +: 8]);
      // modulus_start within two clocks of the last byte
      repeat (2) @(negedge clk);
      expect_true($sformatf("#%0d one modulus_start", t), starts == s0 + 1);
      expect_true($sformatf("#%0d A assembled", t), A == a);
      expect_true($sformatf("#%0d B assembled", t), B == b);
      expect_true($sformatf("#%0d no tx before done", t), !tx_start);
      repeat ($urandom % 20) @(negedge clk);
      result = res;
      cycle_count = cyc;
      modulus_done = 1'b1;
      @(negedge clk);
      modulus_done = 1'b0;
      result = '0;
      cycle_count = '0;
      reply = {res, cyc};
      got = '0;
      for (int k = 0; k < (N + CW) / 8; k++) begin
        int guard = 0;
        while (!tx_start && guard < 10) begin @(negedge clk); guard++; end
        expect_true($sformatf("#%0d tx_start for byte %0d", t, k), tx_start);
        got = {got[N+CW-9:0], uart_tx_data};
        @(negedge clk);
        repeat (2 + $urandom % 10) begin
          @(negedge clk);
          if (tx_start) expect_true($sformatf("#%0d tx_start before tx_done", t), 1'b0);
        end
        tx_done = 1'b1;
        @(negedge clk);
        tx_done = 1'b0;
      end
      expect_true($sformatf("#%0d reply %h expected %h", t, got, reply), got == reply);
      repeat (3) @(negedge clk);
      expect_true($sformatf("#%0d idle after reply", t), !tx_start && starts == s0 + 1);
    end
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
