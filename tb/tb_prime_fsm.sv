// tb_prime_fsm: self-checking test of the prime-search controller.
//
// The testbench holds a behavioural model of the datapath: registers A, n, i,
// P updated from the controller's loads and selects (Mux1: 1 or 2, Mux2: 3 or
// i + 2), the flags p, q, r, t, and a modulus unit that answers start_mod
// after a random delay of 1 to 20 clocks with s = (n % i == 0). With it the
// controller must find exactly the primes below A (checked against a sieve)
// in order, issue one start_mod per trial division of an odd n by 3, 5, ...
// up to its smallest factor, and pulse done once. Also checked:
// clr_reg while waiting, ld_A together with ld_n on the clock after start,
// prime_found together with ld_p, and no start_mod while a division runs.
module tb_prime_fsm;
  import prime_pkg::*;

  logic clk = 1'b0;
  logic rst = 1'b1;
  logic start = 1'b0;
  prime_status_t stat;
  prime_ctrl_t ctrl;
  logic prime_found, done;
  always #5 clk = ~clk;

  int unsigned checks = 0, failures = 0;

  prime_fsm dut (.clk, .rst, .start, .stat, .ctrl, .prime_found, .done);

  // ---------------------------------------------------------------- datapath model
  int unsigned lim_in;
  int unsigned ra, rn, ri, rp;
  int unsigned busy, res_s;
  logic done_mod = 1'b0;
  int unsigned mods, found_bad, n_found, n_done, overlap, found_no_ldp;
  int unsigned found_list[$];

  assign stat.p = (rn < ra);
  assign stat.r = (rn == 2);
  assign stat.q = (ri < rn);
  assign stat.t = (ri == rn);
  assign stat.s = res_s[0];
  assign stat.done_mod = done_mod;

  always @(posedge clk) begin
    if (rst) begin
      ra <= 0; rn <= 0; ri <= 0; rp <= 0; busy <= 0; done_mod <= 1'b0; res_s <= 0;
    end else begin
      done_mod <= 1'b0;
      if (ctrl.clr_reg) begin
        ra <= 0; rn <= 0; ri <= 0; rp <= 0;
      end else begin
        if (ctrl.ld_A) ra <= lim_in;
        if (ctrl.ld_n) rn <= rn + (ctrl.sel_1 ? 2 : 1);
        if (ctrl.ld_i) ri <= ctrl.sel_2 ? ri + 2 : 3;
        if (ctrl.ld_p) rp <= rn;
      end
      if (ctrl.start_mod) begin
        if (busy != 0) overlap++;
        mods++;
        busy <= 1 + $urandom % 20;
        res_s <= (ri != 0 && rn % ri == 0) ? 1 : 0;
      end else if (busy == 1) begin
        busy <= 0;
        done_mod <= 1'b1;
      end else if (busy > 1) begin
        busy <= busy - 1;
      end
      if (prime_found) begin
        n_found++;
        found_list.push_back(rn);
        if (!ctrl.ld_p) found_no_ldp++;
      end
      if (done) n_done++;
    end
  end

  task automatic expect_true(string what, bit ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic search(int unsigned lim);
    int unsigned exp_list[$];
    int unsigned exp_mods = 0;
    int guard = 0;
    for (int unsigned n = 2; n < lim; n++) begin
      bit pr = 1;
      for (int unsigned d = 2; d < n; d++) if (n % d == 0) begin pr = 0; break; end
      if (pr) exp_list.push_back(n);
    end
    for (int unsigned n = 3; n < lim; n += 2) begin
      for (int unsigned i = 3; i < n; i += 2) begin
        exp_mods++;
        if (n % i == 0) break;
      end
    end
    found_list.delete();
    mods = 0; n_found = 0; n_done = 0; overlap = 0; found_no_ldp = 0;
    @(negedge clk);
    expect_true("clr_reg while waiting", ctrl.clr_reg && !ctrl.ld_A);
    lim_in = lim;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    expect_true("ld_A and ld_n after start", ctrl.ld_A && ctrl.ld_n && !ctrl.clr_reg);
    while (n_done == 0 && guard < 1_000_000) begin @(negedge clk); guard++; end
    repeat (4) @(negedge clk);
    expect_true($sformatf("A=%0d: one done (%0d)", lim, n_done), n_done == 1);
    expect_true($sformatf("A=%0d: %0d primes, expected %0d", lim, n_found, exp_list.size()),
                n_found == exp_list.size());
    expect_true($sformatf("A=%0d: prime list", lim), found_list == exp_list);
    expect_true($sformatf("A=%0d: %0d divisions, expected %0d", lim, mods, exp_mods), mods == exp_mods);
    expect_true($sformatf("A=%0d: start_mod while busy", lim), overlap == 0);
    expect_true($sformatf("A=%0d: prime_found without ld_p", lim), found_no_ldp == 0);
  endtask

  initial begin
    lim_in = 0;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    search(2);
    search(3);
    search(10);
    search(11);
    search(12);
    search(100);
    search(500);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
