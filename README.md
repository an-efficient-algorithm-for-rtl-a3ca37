# Shift-and-subtract modulus in hardware, and a prime search built on it

Computing `A mod B` in hardware does not need a divider. Slide a copy of `B`
to the left until it sits just above `A`, then walk it back to the right one
bit at a time. At each position, subtract it from `A` if it fits. When the
copy is back at its original position, what is left of `A` is the remainder.

This is ordinary long division without keeping the quotient. It needs:

- two N-bit registers (the running dividend and the shifted divisor);
- a small shift counter;
- one subtractor;
- a handful of comparators.

There is no multiplier and no divider, and the cost does not grow with N
beyond the width of those parts. The number of clock cycles depends on how
far the divisor has to travel. That is the bit-length difference between
`A` and `B`, not the operand width. So a 2048-bit unit takes under ten
cycles for a 2048-bit `A` with a 2047-bit `B`, and about 4100 cycles for the
worst case.

This RTL contains the modulus unit and the two systems built around it:

- **An evaluation system.** A host sends operand pairs over a UART. The
  system answers with the remainder and the number of cycles the unit took.
- **A prime search.** It lists every prime below a limit `A` by trial
  division. The modulus unit does the divisions, and a 12-state controller
  drives a small datapath.

Both sit side by side under `mod_prime_top`. All of it is synthesizable
SystemVerilog-2017, with one synchronous, active-high reset and one clock.

## The modulus unit (`modulus`)

### States and datapath

The unit has three working registers and a result register:

- `dividend` (N bits);
- `divisor` (N bits);
- `shift` (`$clog2(N)+1` bits, so that it can hold N);
- `result`.

Each working register is fed by a three-way multiplexer: load an input, load
a computed value, or hold.

| State  | What happens on the clock edge | Leaves when |
|--------|--------------------------------|-------------|
| IDLE   | on `start`: `dividend ← A`, `divisor ← B`, `shift ← 0` | `start` |
| ALIGN  | while condition1: `divisor ← divisor << 1`, `shift ← shift + 1` | condition1 false → SUBT |
| SUBT   | if `dividend ≥ divisor`: `dividend ← dividend − divisor`; always `divisor ← divisor >> 1`, `shift ← shift − 1` | condition2 true → FINISH |
| FINISH | `result ← dividend`, then `done` pulses | always → IDLE |

The two conditions:

```
condition1 = (divisor <= dividend) && !divisor[N-1] && (shift < N)
condition2 = (dividend < B)        || (shift == 0)  || (shift >= N)
```

condition1 stops the alignment in one of two ways:

- the divisor has passed the dividend;
- the divisor's top bit is set, so one more doubling would lose it.

condition2 ends the subtraction phase in one of two ways:

- as soon as the remainder is already smaller than `B`. This early exit
  matters when `A` has long runs of bits that need no subtraction;
- once the divisor is back at `B` (`shift == 0`).

`shift >= N` is a guard that cannot trigger with these widths.

### The subtle point: which registers the conditions see

All comparisons use the register values of the current cycle, as is usual in
a clocked FSM. The last SUBT cycle therefore works on the divisor at
`shift == 0`, so `B` itself is subtracted one last time if it still fits.

The published algorithm listing writes the SUBT exit test as
`dividend < divisor`. Its state diagram caption and its prose use
`dividend < B`. With registered values the listing's form is wrong. In the
example below it would stop in the first SUBT cycle, because 29 < 40, and
return 29. This RTL uses `dividend < B`. A fault copy with the other
comparison fails about 36,000 checks in the unit's testbench.

### Worked example: 29 mod 5

Each row is the state of the registers after the given clock edge. Edge 0
samples `start`.

| Edge | State after | dividend | divisor | shift | Note |
|-----:|-------------|---------:|--------:|------:|------|
| 0 | ALIGN  | 29 | 5  | 0 | operands loaded |
| 1 | ALIGN  | 29 | 10 | 1 | 5 ≤ 29 |
| 2 | ALIGN  | 29 | 20 | 2 | 10 ≤ 29 |
| 3 | ALIGN  | 29 | 40 | 3 | 20 ≤ 29 |
| 4 | SUBT   | 29 | 40 | 3 | 40 > 29: stop aligning |
| 5 | SUBT   | 29 | 20 | 2 | 40 does not fit |
| 6 | SUBT   | 9  | 10 | 1 | 29 − 20 |
| 7 | SUBT   | 9  | 5  | 0 | 10 does not fit |
| 8 | FINISH | 4  | 2  | − | 9 − 5; shift was 0, so stop |
| 9 | IDLE   | 4  |    |   | `result = 4`, `done` high |

### Latency

Let k be the number of doublings in ALIGN. The unit spends:

- k+1 cycles in ALIGN;
- at most k+1 cycles in SUBT (fewer when `dividend < B` ends it early);
- 1 cycle in FINISH.

`done` rises on the edge that leaves FINISH. Counting from the edge that
samples `start` to the edge that raises `done`, the latency is at most 2k+3
cycles.

For `A ≥ B`, k is the bit-length difference x, or x+1 when `B` shifted by x
is still not above `A`. Without an early exit, the latency is therefore
2x+3 or 2x+5 cycles. When the top bit stops the alignment, k = x and it is
2x+3 cycles.

The published measurements fit 2x+2. The slope of 2 is the same, but this RTL
counts about three cycles more per operation. The difference comes from:

- the start and FINISH cycles;
- one ALIGN cycle that only discovers the divisor has passed the dividend.

The cycle-count convention used for the published fit is not stated.

For `A < B`, no doubling happens, and the unit takes 3 cycles.

`done` is a one-cycle pulse. `result` holds until the next operation
finishes. `B = 0` is not allowed: the system feeding the unit must prevent
it, and an assertion reports it in simulation.

## The evaluation system (`modulus_eval_system`)

A host exchanges operands and results with the FPGA over a serial line. Five
blocks are wired as in the published block diagram:

| From | Signals | To |
|------|---------|----|
| pin `rx` | serial line | `uart_rx` |
| `uart_rx` | `data`, `done` (as `uart_rx_data`, `rx_valid`) | `modulus_controller` |
| `modulus_controller` | `A`, `B`, `modulus_start` | `modulus` |
| `modulus_controller` | `modulus_start` | `cycle_counter` (start) |
| `modulus` | `result`, `done` (`modulus_done`) | `modulus_controller`; `done` also stops `cycle_counter` |
| `cycle_counter` | `cycle_count` | `modulus_controller` |
| `modulus_controller` | `uart_tx_data`, `tx_start` | `uart_tx` |
| `uart_tx` | `tx_done` | `modulus_controller` |
| `uart_tx` | serial line | pin `tx` |

The message format is this design's own. The published system only says
that operands go in and results and cycle counts come back.

- **Framing:** 8N1 frames at `CLKS_PER_BIT` clocks per bit. The default 1085
  gives 115,200 baud from 125 MHz.
- **Host to FPGA:** N/8 bytes of `A`, then N/8 bytes of `B`, each most
  significant byte first.
- **FPGA to host:** N/8 bytes of the remainder, then 4 bytes of the cycle
  count, each most significant byte first.

**`uart_rx`:**

- synchronises `rx` with two flops;
- detects the start bit and checks it again at mid-bit;
- samples each data bit at mid-bit, LSB first;
- delivers the byte with a one-clock `done` once the stop bit is seen high;
- drops a frame with a low stop bit.

**`uart_tx`:**

- sends a byte given with a one-clock `start`;
- ignores `start` while busy;
- pulses `done` exactly 10 × `CLKS_PER_BIT` clocks after the start.

**`cycle_counter`:** the edge that samples `modulus_start` clears the count.
Each later edge adds one, up to the edge that raises the unit's `done`; the
edge that samples `done` stops the count without adding. The reported number is therefore exactly the latency defined
above: 9 for 29 mod 5.

**`modulus_controller`** works in these steps:

1. Shifts received bytes into `A` and then `B`.
2. Pulses `modulus_start` for one clock.
3. Waits for `done`.
4. Captures `{result, cycle_count}` in one reply buffer.
5. Sends the buffer a byte at a time, waiting for `tx_done` between bytes.

At the default N = 2048, one exchange is 512 bytes in and 260 bytes out. That
takes about 8.4 million clocks of UART time for a few thousand clocks of
arithmetic.

## The prime search (`prime_system`)

### Method

The method is plain trial division:

- 2 is reported as prime;
- every odd n below the limit `A` is divided by 3, 5, 7, … ;
- the first zero remainder rejects n;
- reaching i = n accepts n.

The published step-by-step algorithm checks every n. Its datapath and
controller instead step n by 2 after 3. This RTL follows the hardware, so
even numbers are never tried.

### Datapath (`prime_datapath`)

Registers:

| Register | Holds | Loads |
|----------|-------|-------|
| Reg_A | the limit | `A` on `ld_A` |
| Reg_n | the candidate | `n + 1` (`sel_1 = 0`) or `n + 2` (`sel_1 = 1`) through Mux1 on `ld_n` |
| Reg_i | the trial divisor | 3 (`sel_2 = 0`) or `i + 2` (`sel_2 = 1`) through Mux2 on `ld_i` |
| Reg_p | the last prime | `n` on `ld_p`; its value is the `prime` output |

The datapath also holds a W-bit `modulus` instance computing `n mod i`,
started by `start_mod`.

Flags sent to the controller:

| Flag | Meaning |
|------|---------|
| p | n < A |
| q | i < n |
| r | n == 2 |
| t | i == n |
| s | remainder == 0 |
| done_mod | the modulus unit finished |

`clr_reg` clears all four registers. The control and status bundles are the
packed structs `prime_ctrl_t` and `prime_status_t` in `prime_pkg`.

### Controller (`prime_fsm`)

| State | Controls | Next |
|-------|----------|------|
| WAIT   | `clr_reg`; clear the sel flags | S1 on `start` |
| S1     | `ld_A`, `ld_n` (n ← 1) | S2 |
| S2     | `ld_n` (n ← n + 1 or + 2); `sel_2` flag ← 0 | S3 |
| S3     | `ld_i` if the `sel_2` flag is 0 (i ← 3) | p ? S4 : DONE |
| S4     | – | r or t ? PRIME : q ? S5 : REPEAT |
| S5     | `start_mod` | S6 |
| S6     | – | done_mod ? S7 : S6 |
| S7     | `sel_2` flag ← 1 | s ? REPEAT : S8 |
| S8     | `ld_i` (i ← i + 2) | S3 |
| PRIME  | `prime_found`, `ld_p` | REPEAT |
| REPEAT | `sel_1` flag ← (r ? 0 : 1) | S2 |
| DONE   | `done` | WAIT |

`sel_1` and `sel_2` are decided in one state and used in a later one, so the
controller keeps them in two flag registers. The `sel_1` flag is 0 until the
REPEAT state after n = 2. The first steps are therefore 1 → 2 → 3, and
after that n steps by 2. `sel_2` is set after the first division of each
candidate, so S3 loads i = 3 only once per candidate.

The exit `!q` from S4 to REPEAT is kept as drawn, but it cannot be taken:
i starts at 3 ≤ n and stops at i = n.

### Counting (`prime_counter`)

The edge that samples `start` clears both counts. Every `prime_found` pulse
then increments `prime_count` (32 bits). Every clock increments
`cycle_count` until the edge that samples `done`. `cycle_count` is 64 bits
wide, because a search to 500,000 needs about 6.4·10¹⁰ cycles with this
controller.

After `done` the controller returns to WAIT, which clears the datapath, so
`prime` reads 0 again. Each prime is on `prime` during the clock after its
`prime_found` pulse, until the next prime or the end of the search.

### Cost per candidate

Each odd candidate n costs:

- 4 cycles for a composite (S2, S3, S4, REPEAT), 5 for a prime (PRIME is
  added);
- plus, per trial divisor i, the modulus latency for (n, i) and 6 more
  cycles (S5, S6, S7, S8, S3, S4), 2 fewer for the divisor that ends the
  loop.

The modulus latency is small, about 2·(bits(n) − bits(i)) + 5, so the
controller overhead is a large share of the time.

## Measured against the published results

Cycle counts of the prime search, this RTL, converted at 125 MHz:

| Limit A | Primes | Cycles (this RTL) | Time at 125 MHz | Published time |
|--------:|-------:|------------------:|----------------:|---------------:|
| 10 | 4 | 72 | 0.58 µs | 0.68 µs |
| 100 | 25 | 6,988 | 55.9 µs | 64.6 µs |
| 1,000 | 168 | 505,506 | 4.04 ms | 0.468 ms |
| 10,000 | 1,229 | 37,395,638 | 0.299 s | 0.0345 s |
| 100,000 | 9,592 | 2.94·10⁹ | 23.5 s | 2.71 s |
| 500,000 | 41,538 | 6.40·10¹⁰ | 512 s | 59.0 s |

How these numbers were obtained:

- The cycle counts for A up to 10,000 are simulated at the default widths
  (`tb_prime_workloads`) and checked against an independent cycle model.
- The larger rows come from the same cycle model and are not simulated.

For A = 10 and 100, this RTL is 13–15 % faster than the published times:
the published cycle counts are about 1.15 times this RTL's. From A = 1,000
on, the published times are about 8.6 times shorter than this RTL. That
ratio is stable from 1,000 to 500,000. If the published counts kept the
1.15 ratio of the two smallest rows, they would be about ten times larger
than printed. The published series itself grows 7.2× from
100 to 1,000, where the amount of work grows about 72×. So the published
timings above 100 are most likely not on the same scale as the two smallest
ones.

The prime counts agree with the published table except at 400,000. There the
table prints 33,380, and the true count, which this controller reaches in the
cycle model, is 33,860.

For the modulus unit alone, `tb_modulus_sizes` repeats the operand-size
experiment. It runs 10,000 random pairs at each of 32, 64, 128, 256, 1024
and 2048 bits, with bit lengths drawn uniformly. A least-squares fit of
cycles against bit-length difference gives:

| Operand size | Fit (this RTL) |
|-------------:|----------------|
| 32 | 1.985x + 3.8 |
| 64 | 1.997x + 3.6 |
| 128 | 2.000x + 3.6 |
| 256 | 2.000x + 3.5 |
| 1024 | 2.000x + 3.5 |
| 2048 | 2.000x + 3.5 |

The published fits are 1.99x + 2.26 at 32 bits and 2x + 2 at 2048 bits. The
slopes agree; the intercepts differ by the counting convention.

The other testbenches check the exact latency 2k+3, and therefore the slope 2
in the bit-length difference:

- 8-bit operands: every pair of values;
- 2048-bit operands: random pairs and a 1000-bit and a 2047-bit length
  difference (2005 and 4097 cycles).

## What follows the published design and what does not

These follow the published design:

- the modulus FSM, its two conditions, the per-state register operations and
  the four-register / three-multiplexer datapath;
- the evaluation system's five blocks and their signal names;
- the prime datapath's registers, multiplexer inputs (1 or 2; 3 or i + 2),
  comparators and modulus unit;
- the controller's states, transitions and per-state controls.

These are this design's own choices, where nothing is published:

- Synchronous, active-high reset. The published block diagram draws a bubble
  on reset, and its waveform shows reset high at the start.
- The shift register width, and the one-cycle `done` pulse. The published
  algorithm sets `done` and never clears it.
- The whole UART layer: baud rate, framing, byte order, reply format.
- The cycle-counting convention, and the 64-bit prime cycle counter.
- Which select value picks which multiplexer input.
- Keeping `sel_1` and `sel_2` in flag registers, and clearing them in WAIT.
- The priority among S4's exits.
- Writing the prime datapath's registers and multiplexers inline in one
  module. The published datapath was built from register and multiplexer
  submodules; the behaviour is the same.
- Putting both systems under one top. On the original boards they were
  separate FPGA builds.

These are conflicts or gaps in the published material:

- **SUBT exit.** The listing uses `dividend < divisor`; the diagram caption
  and the prose use `dividend < B`. The latter is used here, for the reason
  given above.
- **State count.** The prose speaks of 13 controller states. The state
  diagram and the control table show the twelve implemented here.
- **Loop flags.** The prose defines two flags, i < n and i == n. The
  datapath drawing shows one "i <= n" comparator. The two flags q and t are
  built here.
- **Cycle-count formula.** It is 2x+2 published, against about 2x+5 here
  (see Latency).
- **Resource use and power.** The published FPGA resource, timing and power
  figures come from vendor tools. They are not reproduced here. At N = 2048
  the modulus unit holds about 6,160 flip-flop bits: dividend, divisor and
  result, plus the shift counter and the state. The whole evaluation system
  holds about 12,450, because the controller also buffers A, B and the
  reply. The published utilisation for the 2048-bit build is 5,280
  flip-flops. That is fewer than the three 2048-bit registers the published
  datapath diagram itself draws, so it cannot be matched by this RTL or
  explained from the published description.

## Parameters

| Module | Parameter | Default | Meaning |
|--------|-----------|--------:|---------|
| `modulus` | `N` | 2048 | operand width (the published sizes run from 32 to 2048) |
| `modulus_eval_system`, `modulus_controller` | `N` | 2048 | operand width on the link |
| `uart_rx`, `uart_tx`, `modulus_eval_system` | `CLKS_PER_BIT` | 1085 | 125 MHz / 115,200 baud |
| `cycle_counter`, `modulus_controller` | `W` / `CW` | 32 | width of the modulus cycle count |
| `prime_system`, `prime_datapath` | `W` | 32 | width of A, n, i, p and of the prime search's modulus unit |
| `prime_system`, `prime_counter` | `CW` | 64 | width of the search cycle count |
| `mod_prime_top` | `N`, `CLKS_PER_BIT`, `W` | 2048, 1085, 32 | passed down |

`N` and `CW` must be multiples of 8 in the evaluation system, because they
travel as whole bytes.

## Files

`rtl/` holds the design:

- `prime_pkg.sv` (control and status structs);
- `modulus.sv`;
- `uart_rx.sv`, `uart_tx.sv`;
- `cycle_counter.sv`;
- `modulus_controller.sv`, `modulus_eval_system.sv`;
- `prime_datapath.sv`, `prime_fsm.sv`, `prime_counter.sv`, `prime_system.sv`;
- `mod_prime_top.sv`.

`tb/` holds one self-checking testbench per module, `tb_<module>.sv`, plus
`tb_mod_prime_top_full.sv`. Each testbench prints a closing line
`TB_RESULT checks=<n> failures=<n>` and has a watchdog. The checks compare
against values computed independently in the testbench:

- SystemVerilog `%`;
- a sieve;
- cycle models of the modulus unit and of the controller.

What each testbench covers:

- **`tb_modulus`:** the worked example at N = 6, every pair at N = 8, and
  random 2048-bit pairs. It checks the result, the exact latency, the slope
  bound and the `done` pulse.
- **`tb_uart_rx`, `tb_uart_tx`:** frame timing, bit order, back-to-back
  bytes, start ignored while busy, a bad stop bit.
- **`tb_modulus_eval_system`:** N = 64, 8 clocks per bit. A host model sends
  operand pairs and checks remainder and cycle count.
- **`tb_prime_fsm`:** the controller against a behavioural datapath whose
  modulus answers after a random delay. It checks the prime list, the number
  of divisions and the handshake rules.
- **`tb_prime_system`:** limits 0, 2, 3, 4, 10, 100, 1,000 and 2,000. It
  checks the list, the counts and the exact cycle count.
- **`tb_mod_prime_top`:** the whole design, reduced (N = 64, 8 clocks per
  bit). It runs UART exchanges and prime searches at the same time, and
  fails if any of these mechanisms never occurred:
  - either alignment stop;
  - either subtraction exit;
  - `A < B`;
  - a prime found, or a composite rejected;
  - the n = 2 case;
  - the controller waiting on the modulus unit;
  - a UART reply.
- **`tb_modulus_sizes`:** the operand-size experiment described above
  (about 40 s).
- **`tb_prime_workloads`:** prime searches to 10, 100, 1,000 and 10,000 at
  the default widths. It checks the published prime counts, the last prime
  and the exact cycle count (about 20 s).
- **`tb_mod_prime_top_full`:** the top at its default parameters. It runs two
  complete 2048-bit exchanges over the 115,200-baud link, one with a
  1000-bit and one with a 2047-bit length difference, and a full prime
  search to 1,000. It takes about 15 s in Verilator.

## Simulating with Verilator

Any testbench builds the same way: list the package first, and let
Verilator find the other modules in `rtl/`.

```sh
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl \
    rtl/prime_pkg.sv tb/tb_modulus.sv --top-module tb_modulus -o sim
./obj_dir/sim
```

To run another test, replace `tb_modulus` with it, for example
`tb_prime_system` or `tb_mod_prime_top_full`. Lint the design alone with:

```sh
verilator --lint-only -Wall -Irtl rtl/prime_pkg.sv \
    $(ls rtl/*.sv | grep -v prime_pkg) --top-module mod_prime_top
```

The simulator has only two states, so every register that is read is reset.
`--assert` enables the check that the modulus unit is never started with
`B = 0`.

To change a size, override the parameter on the instance:

- `mod_prime_top #(.N(256))` gives a 256-bit evaluation system;
- `prime_system #(.W(20))` is enough for limits up to 2²⁰.
