// tb_uart_rx: self-checking test of the UART receiver.
//
// Drives 8N1 frames on rx at 16 clocks per bit: 200 random bytes, all-zero
// and all-one bytes, back-to-back frames, a frame with a low stop bit (must
// be dropped) and a short low glitch (must not produce a byte). Each byte must
// appear on data with exactly one done pulse, between 9 and 10 bit periods
// after the start bit begins.
module tb_uart_rx;

  localparam int unsigned CPB = 16;

  logic clk = 1'b0;
  logic reset = 1'b1;
  logic rx = 1'b1;
  logic [7:0] data;
  logic done;
  always #5 clk = ~clk;

  int unsigned checks = 0, failures = 0;
  int unsigned n_done = 0;
  logic [7:0] last;
  longint unsigned t_done;

  uart_rx #(.CLKS_PER_BIT(CPB)) dut (.clk, .reset, .rx, .data, .done);

  always @(posedge clk) if (done) begin
    n_done++;
    last   = data;
    t_done = $time / 10;
  end

  task automatic send(input logic [7:0] b, input logic stop_bit);
    rx = 1'b0;
    repeat (CPB) @(negedge clk);
    for (int i = 0; i < 8; i++) begin
      rx = b[i];
      repeat (CPB) @(negedge clk);
    end
    rx = stop_bit;
    repeat (CPB) @(negedge clk);
    rx = 1'b1;
  endtask

  task automatic expect_byte(input logic [7:0] b);
    int unsigned n0 = n_done;
    longint unsigned t0 = $time / 10;
    send(b, 1'b1);
    repeat (CPB) @(negedge clk);
    checks++;
    if (n_done != n0 + 1 || last != b) begin
      failures++;
      $display("FAIL byte %02h: got %02h, %0d strobes", b, last, n_done - n0);
    end
    checks++;
    if (t_done < t0 + 9 * CPB || t_done > t0 + 10 * CPB) begin
      failures++;
      $display("FAIL byte %02h: done %0d clocks after start bit", b, t_done - t0);
    end
  endtask

  initial begin
    repeat (4) @(negedge clk);
    reset = 1'b0;
    repeat (4) @(negedge clk);

    expect_byte(8'h00);
    expect_byte(8'hFF);
    expect_byte(8'hA5);
    for (int i = 0; i < 200; i++) expect_byte(8'($urandom));

    // back-to-back frames with no idle time between them
    begin
      int unsigned n0;
      n0 = n_done;
      send(8'h3C, 1'b1);
      send(8'hC3, 1'b1);
      repeat (CPB) @(negedge clk);
      checks++;
      if (n_done != n0 + 2 || last != 8'hC3) begin
        failures++;
        $display("FAIL back-to-back frames");
      end
    end

    // framing error: low stop bit, the byte is dropped
    begin
      int unsigned n0;
      n0 = n_done;
      send(8'h5A, 1'b0);
      repeat (2 * CPB) @(negedge clk);
      checks++;
      if (n_done != n0) begin
        failures++;
        $display("FAIL byte with bad stop bit was delivered");
      end
    end

    // glitch shorter than half a bit
    begin
      int unsigned n0;
      n0 = n_done;
      rx = 1'b0;
      repeat (CPB / 4) @(negedge clk);
      rx = 1'b1;
      repeat (12 * CPB) @(negedge clk);
      checks++;
      if (n_done != n0) begin
        failures++;
        $display("FAIL glitch produced a byte");
      end
    end

    expect_byte(8'h81);

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
