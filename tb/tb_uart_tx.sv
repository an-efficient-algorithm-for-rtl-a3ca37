// tb_uart_tx: self-checking test of the UART transmitter.
//
// Sends 150 random bytes and two fixed ones at 16 clocks per bit. An
// independent line monitor waits for the falling edge of each start bit,
// samples every bit in its middle and checks start bit, data (LSB first) and
// stop bit. The done pulse must come exactly 10 bit periods after the clock
// that samples start, the line must idle high, and a start pulse given while
// a frame is in flight must be ignored.
module tb_uart_tx;

  localparam int unsigned CPB = 16;

  logic clk = 1'b0;
  logic reset = 1'b1;
  logic start = 1'b0;
  logic [7:0] data = '0;
  logic tx, done;
  always #5 clk = ~clk;

  int unsigned checks = 0, failures = 0;
  int unsigned frames = 0;
  logic [7:0] mon_byte;
  logic       mon_ok;

  uart_tx #(.CLKS_PER_BIT(CPB)) dut (.clk, .reset, .start, .data, .tx, .done);

  // Line monitor.
  initial begin
    @(negedge reset);
    forever begin
      @(negedge tx);
      repeat (CPB / 2) @(posedge clk);
      mon_ok = (tx == 1'b0);
      for (int i = 0; i < 8; i++) begin
        repeat (CPB) @(posedge clk);
        mon_byte[i] = tx;
      end
      repeat (CPB) @(posedge clk);
      mon_ok = mon_ok && (tx == 1'b1);
      frames++;
    end
  end

  task automatic send_check(input logic [7:0] b, input bit poke_busy);
    int unsigned f0 = frames;
    int cyc = 0;
    @(negedge clk);
    data  = b;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    data  = ~b;
    if (poke_busy) begin
      repeat (3 * CPB) @(negedge clk);
      start = 1'b1;         // must be ignored
      @(negedge clk);
      start = 1'b0;
      cyc = 3 * CPB + 1;
    end
    do begin @(posedge clk); cyc++; #1; end while (!done && cyc < 20 * CPB);
    checks++;
    if (cyc != 10 * CPB) begin
      failures++;
      $display("FAIL byte %02h: done after %0d clocks, expected %0d", b, cyc, 10 * CPB);
    end
    repeat (CPB) @(negedge clk);
    checks++;
    if (frames != f0 + 1 || !mon_ok || mon_byte != b) begin
      failures++;
      $display("FAIL byte %02h: monitor saw %02h ok=%0b frames=%0d", b, mon_byte, mon_ok, frames - f0);
    end
    checks++;
    if (tx !== 1'b1) begin
      failures++;
      $display("FAIL line not idle high after byte %02h", b);
    end
  endtask

  initial begin
    repeat (4) @(negedge clk);
    checks++;
    if (tx !== 1'b1) begin failures++; $display("FAIL tx not high in reset"); end
    reset = 1'b0;
    repeat (4) @(negedge clk);
    send_check(8'h55, 1'b0);
    send_check(8'h80, 1'b1);
    for (int i = 0; i < 150; i++) send_check(8'($urandom), (i % 7) == 3);
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
