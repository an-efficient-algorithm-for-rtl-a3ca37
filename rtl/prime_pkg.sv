// prime_pkg: the signal bundles that pass between the prime-search controller
// (prime_fsm) and its datapath (prime_datapath).
//
// prime_ctrl_t carries the eight controls the controller drives into the
// datapath: register loads ld_A, ld_n, ld_i, ld_p, the two adder-input
// selects sel_1 and sel_2, the start pulse of the modulus unit and the clear
// of all datapath registers. prime_status_t carries the six flags that come
// back: p (n < A), q (i < n), r (n == 2), s (n mod i == 0), t (i == n) and
// done_mod (the modulus unit has finished). The names are those of the
// published controller/datapath interface; grouping them into two packed
// structs is this design's own choice.
package prime_pkg;

  typedef struct packed {
    logic ld_A;       // load Reg_A from the input limit A
    logic ld_n;       // load Reg_n with n + (sel_1 ? 2 : 1)
    logic ld_i;       // load Reg_i with (sel_2 ? i + 2 : 3)
    logic ld_p;       // load Reg_p (last prime) with n
    logic sel_1;      // Mux1: 0 -> add 1, 1 -> add 2
    logic sel_2;      // Mux2: 0 -> constant 3, 1 -> i + 2
    logic start_mod;  // start n mod i
    logic clr_reg;    // clear Reg_A, Reg_n, Reg_i, Reg_p
  } prime_ctrl_t;

  typedef struct packed {
    logic p;          // n < A
    logic q;          // i < n
    logic r;          // n == 2
    logic s;          // (n mod i) == 0
    logic t;          // i == n
    logic done_mod;   // modulus unit finished
  } prime_status_t;

endpackage
