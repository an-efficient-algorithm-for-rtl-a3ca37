// tb_cycle_counter: self-checking test of the modulus cycle counter.
//
// Pulses start_cnt, waits a random number of clocks L, pulses done_cnt on the
// clock edge L after the start edge, and expects cycles == L, held steady
// afterwards. Also checks that a new start clears the count, that done_cnt
// without a start changes nothing, and that reset clears the count.
module tb_cycle_counter;

  logic clk = 1'b0;
  logic reset = 1'b1;
  logic start_cnt = 1'b0, done_cnt = 1'b0;
  logic [31:0] cycles;
  always #5 clk = ~clk;

  int unsigned checks = 0, failures = 0;

  cycle_counter #(.W(32)) dut (.clk, .reset, .start_cnt, .done_cnt, .cycles);

  task automatic expect_eq(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: %0d expected %0d", what, got, exp);
    end
  endtask

  // start on edge e0, done raised after edge e0+L (as the modulus unit does).
  task automatic run(int L);
    @(negedge clk) start_cnt = 1'b1;
    @(negedge clk) start_cnt = 1'b0;        // e0 has passed
    repeat (L - 1) @(negedge clk);          // edges e1..e(L-1)
    @(posedge clk); #1 done_cnt = 1'b1;     // after edge eL
    @(posedge clk); #1 done_cnt = 1'b0;     // edge eL+1 sees done
    expect_eq($sformatf("L=%0d", L), cycles, 32'(L));
    repeat (5) @(negedge clk);
    expect_eq($sformatf("L=%0d held", L), cycles, 32'(L));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    expect_eq("reset", cycles, 0);
    reset = 1'b0;
    run(1);
    run(2);
    run(9);
    for (int i = 0; i < 50; i++) run(1 + ($urandom % 300));
    // done without start: no change
    begin
      logic [31:0] held;
      held = cycles;
      @(negedge clk) done_cnt = 1'b1;
      @(negedge clk) done_cnt = 1'b0;
      repeat (4) @(negedge clk);
      expect_eq("stray done", cycles, held);
    end
    @(negedge clk) reset = 1'b1;
    @(negedge clk) reset = 1'b0;
    expect_eq("reset again", cycles, 0);
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
