// tb_modulus: self-checking test of the shift-and-subtract modulus unit.
//
// Three instances run one after another on one clock:
//   * N = 6, the worked example 29 mod 5 = 4 (nine cycles from the start edge
//     to the done edge: three doublings, then four subtract steps);
//   * N = 8, every A in 0..255 against every B in 1..255;
//   * N = 2048, random operands of random bit lengths.
// Results are compared with the language's own % operator. The latency from
// the start edge to the done edge is compared with a cycle model of the
// algorithm written as a plain loop, and is checked to stay within
// 2*(bit-length difference) + 5, i.e. linear with slope 2.
// A watchdog ends the run with a failure if it hangs.
module tb_modulus;

  localparam int unsigned NW = 2048;
  typedef logic [NW-1:0] wide_t;

  logic clk = 1'b0;
  logic reset = 1'b1;
  always #5 clk = ~clk;

  int unsigned checks = 0;
  int unsigned failures = 0;

  // ---------------------------------------------------------------- DUTs
  logic       s6;  logic [5:0]    a6, b6, r6;   logic d6;
  logic       s8;  logic [7:0]    a8, b8, r8;   logic d8;
  logic       sw;  wide_t         aw, bw, rw;   logic dw;

  modulus #(.N(6))  u6 (.clk, .reset, .start(s6), .A(a6), .B(b6), .result(r6), .done(d6));
  modulus #(.N(8))  u8 (.clk, .reset, .start(s8), .A(a8), .B(b8), .result(r8), .done(d8));
  modulus #(.N(NW)) uw (.clk, .reset, .start(sw), .A(aw), .B(bw), .result(rw), .done(dw));

  // ---------------------------------------------------------------- models
  function automatic int bitlen(wide_t v);
    for (int i = NW - 1; i >= 0; i--) if (v[i]) return i + 1;
    return 0;
  endfunction

  // Cycles from the start edge (exclusive) to the done edge (inclusive).
  function automatic int model_cycles(wide_t a, wide_t b, int n);
    wide_t d = b, dv = a, old_dv;
    int k = 0, s, old_s, steps = 0;
    while (d <= a && !d[n-1] && k < n) begin
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
    end while (!(old_dv < b || old_s == 0 || old_s >= n));
    return (k + 1) + steps + 1;
  endfunction

  task automatic check(string what, wide_t got, wide_t exp, int cyc, int exp_cyc, int bld);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: result %0h expected %0h", what, got, exp);
    end
    checks++;
    if (cyc != exp_cyc) begin
      failures++;
      if (failures < 10) $display("FAIL %s: %0d cycles, model %0d", what, cyc, exp_cyc);
    end
    checks++;
    if (bld >= 0 && cyc > 2 * bld + 5) begin
      failures++;
      if (failures < 10) $display("FAIL %s: %0d cycles exceeds 2*BLD+5 (BLD=%0d)", what, cyc, bld);
    end
  endtask

  int cyc;
  int max_slope_excess = 0;

  initial begin
    s6 = 0; s8 = 0; sw = 0;
    a6 = '0; b6 = '0; a8 = '0; b8 = '0; aw = '0; bw = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) reset = 1'b0;

    // ---- worked example: 29 mod 5 in a 6-bit unit
    a6 = 6'd29; b6 = 6'd5; s6 = 1'b1;
    @(posedge clk); @(negedge clk) s6 = 1'b0;
    cyc = 0;
    do begin @(posedge clk); cyc++; #1; end while (!d6);
    check("29 mod 5", wide_t'(r6), wide_t'(4), cyc, 9, -1);
    checks++;
    if (model_cycles(29, 5, 6) != 9) begin
      failures++; $display("FAIL cycle model disagrees with the worked example");
    end

    // ---- exhaustive 8-bit
    for (int a = 0; a < 256; a++) begin
      for (int b = 1; b < 256; b++) begin
        @(negedge clk);
        a8 = 8'(a); b8 = 8'(b); s8 = 1'b1;
        @(posedge clk); @(negedge clk) s8 = 1'b0;
        cyc = 0;
        do begin @(posedge clk); cyc++; #1; end while (!d8);
        check($sformatf("%0d mod %0d", a, b), wide_t'(r8), wide_t'(a) % wide_t'(b), cyc,
              model_cycles(wide_t'(a), wide_t'(b), 8),
              (a >= b) ? bitlen(wide_t'(a)) - bitlen(wide_t'(b)) : 0);
      end
    end

    // ---- 2048-bit random operands of random lengths
    for (int t = 0; t < 60; t++) begin
      wide_t ra, rb;
      int la, lb;
      for (int w = 0; w < NW / 32; w++) begin
        ra[w*32 +: 32] = $urandom;
        rb[w*32 +: 32] = $urandom;
      end
      la = 1 + ($urandom % NW);
      lb = 1 + ($urandom % NW);
      if (t == 0) begin la = NW; lb = 1; end          // largest bit-length difference
      if (t == 1) begin la = NW; lb = NW; end         // divisor top bit set
      ra = (la == NW) ? ra | (wide_t'(1) << (NW - 1)) : (ra & ((wide_t'(1) << la) - 1)) | (wide_t'(1) << (la - 1));
      rb = (lb == NW) ? rb | (wide_t'(1) << (NW - 1)) : (rb & ((wide_t'(1) << lb) - 1)) | (wide_t'(1) << (lb - 1));
      @(negedge clk);
      aw = ra; bw = rb; sw = 1'b1;
      @(posedge clk); @(negedge clk) sw = 1'b0;
      cyc = 0;
      do begin @(posedge clk); cyc++; #1; end while (!dw);
      check($sformatf("2048-bit #%0d", t), rw, ra % rb, cyc, model_cycles(ra, rb, NW),
            (la >= lb) ? la - lb : 0);
    end

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
