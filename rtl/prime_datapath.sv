// prime_datapath: registers, adders, comparators and the modulus unit of the
// prime search.
//
// How it works. Four registers hold the limit A (Reg_A), the candidate n
// (Reg_n), the trial divisor i (Reg_i) and the last prime found (Reg_p).
// Reg_n loads n + 1 or n + 2 (Mux1, sel_1); Reg_i loads the constant 3 or
// i + 2 (Mux2, sel_2); Reg_p loads n. Comparators produce
//   p = (n < A), r = (n == 2), q = (i < n), t = (i == n),
// and a modulus unit computes n mod i, started by start_mod; s = (Y == 0)
// with Y its result. clr_reg (and reset) clear the four registers.
//
// Interface: clk, rst (synchronous, active high), A (W bits), ctrl
// (prime_ctrl_t from the controller) in; stat (prime_status_t) and prime
// (Reg_p) out.
//
// Timing: all loads take effect on the next clock edge; p, q, r, t follow the
// registers combinationally; done_mod is the modulus unit's one-cycle done
// pulse, after which s stays valid until the next start_mod finishes.
//
// The register set, the Mux1 inputs 1 and 2, the Mux2 inputs 3 and i + 2, the
// comparators and the modulus unit computing mod(n, i) follow the published
// datapath diagram. Which select value picks which mux input, and the width
// W, are this design's choices.
module prime_datapath
  import prime_pkg::*;
#(
    parameter int unsigned W = 32
) (
    input  logic          clk,
    input  logic          rst,
    input  logic [W-1:0]  A,
    input  prime_ctrl_t   ctrl,
    output prime_status_t stat,
    output logic [W-1:0]  prime
);

  logic [W-1:0] reg_a, reg_n, reg_i, reg_p;
  logic [W-1:0] mux1, mux2, y;
  logic         done_mod;

  assign mux1 = ctrl.sel_1 ? W'(2) : W'(1);
  assign mux2 = ctrl.sel_2 ? reg_i + W'(2) : W'(3);

  always_ff @(posedge clk) begin
    if (rst || ctrl.clr_reg) begin
      reg_a <= '0;
      reg_n <= '0;
      reg_i <= '0;
      reg_p <= '0;
    end else begin
      if (ctrl.ld_A) reg_a <= A;
      if (ctrl.ld_n) reg_n <= reg_n + mux1;
      if (ctrl.ld_i) reg_i <= mux2;
      if (ctrl.ld_p) reg_p <= reg_n;
    end
  end

  // HW mod [mod(n, i)]: A input n, B input i.
  modulus #(.N(W)) u_mod (
      .clk, .reset(rst), .start(ctrl.start_mod), .A(reg_n), .B(reg_i),
      .result(y), .done(done_mod));

  assign stat.p        = (reg_n < reg_a);
  assign stat.r        = (reg_n == W'(2));
  assign stat.q        = (reg_i < reg_n);
  assign stat.t        = (reg_i == reg_n);
  assign stat.s        = (y == '0);
  assign stat.done_mod = done_mod;

  assign prime = reg_p;

endmodule
