// tb_prime_datapath: self-checking test of the prime-search datapath, driven
// directly through its control struct (no controller).
//
// Checks, against values worked out in the testbench:
//   * clr_reg clears Reg_A, Reg_n, Reg_i, Reg_p (seen through p, r, q, t and
//     the prime output);
//   * ld_A captures A; ld_n adds 1 (sel_1 = 0) or 2 (sel_1 = 1); ld_i loads 3
//     (sel_2 = 0) or i + 2 (sel_2 = 1); ld_p copies n; nothing moves without
//     its load;
//   * the flags p = n < A, r = n == 2, q = i < n, t = i == n;
//   * start_mod computes n mod i: done_mod pulses once and s = (n mod i == 0),
//     for 300 random (n, i) pairs reached by stepping the registers.
module tb_prime_datapath;
  import prime_pkg::*;

  localparam int unsigned W = 16;

  logic clk = 1'b0;
  logic rst = 1'b1;
  logic [W-1:0] A = '0;
  prime_ctrl_t ctrl = '0;
  prime_status_t stat;
  logic [W-1:0] prime;
  always #5 clk = ~clk;

  int unsigned checks = 0, failures = 0;
  int unsigned mn, mi, ma, mp;   // model registers

  prime_datapath #(.W(W)) dut (.clk, .rst, .A, .ctrl, .stat, .prime);

  task automatic expect_true(string what, bit ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  task automatic check_flags(string what);
    expect_true({what, ": p"}, stat.p == (mn < ma));
    expect_true({what, ": r"}, stat.r == (mn == 2));
    expect_true({what, ": q"}, stat.q == (mi < mn));
    expect_true({what, ": t"}, stat.t == (mi == mn));
    expect_true({what, ": prime"}, prime == W'(mp));
  endtask

  task automatic pulse(prime_ctrl_t c);
    @(negedge clk);
    ctrl = c;
    @(negedge clk);
    ctrl = '0;
    if (c.clr_reg) begin mn = 0; mi = 0; ma = 0; mp = 0; end
    else begin
      if (c.ld_A) ma = A;
      if (c.ld_p) mp = mn;           // old n, same edge
      if (c.ld_n) mn = (mn + (c.sel_1 ? 2 : 1)) % (1 << W);
      if (c.ld_i) mi = c.sel_2 ? (mi + 2) % (1 << W) : 3;
    end
  endtask

  task automatic do_mod();
    int guard = 0, pulses = 0;
    @(negedge clk);
    ctrl = '0;
    ctrl.start_mod = 1'b1;
    @(negedge clk);
    ctrl = '0;
    while (guard < 4 * W + 10) begin
      @(posedge clk); #1;
      if (stat.done_mod) pulses++;
      guard++;
      if (pulses > 0 && !stat.done_mod) break;
    end
    expect_true($sformatf("%0d mod %0d: one done_mod", mn, mi), pulses == 1);
    expect_true($sformatf("%0d mod %0d: s", mn, mi), stat.s == ((mn % mi) == 0));
  endtask

  prime_ctrl_t c;

  initial begin
    mn = 0; mi = 0; ma = 0; mp = 0;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    check_flags("after reset");

    // load A, step n by 1 and 2, load i
    A = 16'd50;
    c = '0; c.ld_A = 1; c.ld_n = 1; pulse(c);  check_flags("S1-like");
    expect_true("n == 1 after first ld_n", mn == 1);
    A = 16'd7;                                  // no ld_A: must not change
    c = '0; c.ld_n = 1; pulse(c);              check_flags("n -> 2");
    expect_true("r when n == 2", stat.r);
    c = '0; c.ld_i = 1; pulse(c);              check_flags("i <- 3");
    c = '0; c.ld_p = 1; pulse(c);              check_flags("P <- n");
    c = '0; c.ld_n = 1; pulse(c);              check_flags("n -> 3");
    expect_true("t when i == n", stat.t);
    c = '0; c.ld_n = 1; c.sel_1 = 1; pulse(c); check_flags("n -> 5");
    expect_true("q when i < n", stat.q);
    c = '0; c.ld_i = 1; c.sel_2 = 1; pulse(c); check_flags("i -> 5");
    c = '0; c.ld_i = 1; c.sel_2 = 1; pulse(c); check_flags("i -> 7");
    c = '0; c.sel_1 = 1; c.sel_2 = 1; pulse(c); check_flags("selects alone move nothing");

    // clear
    c = '0; c.clr_reg = 1; pulse(c);           check_flags("clr_reg");
    expect_true("clr_reg clears prime", prime == '0);

    // modulus unit through the registers: random n, i reached by stepping
    A = 16'hFFFF;
    c = '0; c.ld_A = 1; pulse(c);
    for (int t = 0; t < 300; t++) begin
      int unsigned tn, ti;
      tn = 3 + $urandom % 400;
      ti = 3 + 2 * ($urandom % 60);
      c = '0; c.clr_reg = 1; pulse(c);
      c = '0; c.ld_A = 1; pulse(c);
      while (mn < tn) begin
        c = '0; c.ld_n = 1; c.sel_1 = (tn - mn >= 2); pulse(c);
      end
      c = '0; c.ld_i = 1; pulse(c);
      while (mi < ti) begin
        c = '0; c.ld_i = 1; c.sel_2 = 1; pulse(c);
      end
      check_flags($sformatf("n=%0d i=%0d", mn, mi));
      do_mod();
      c = '0; c.ld_p = 1; pulse(c);
      check_flags("ld_p");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
