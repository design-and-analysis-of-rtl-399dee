# Shift-register stochastic maximum / minimum

In stochastic computing a number x in [0, 1] is carried by a bit stream
whose bits are 1 with probability x (unipolar coding). Multiplication needs
only an AND gate and scaled addition a multiplexer. A maximum or minimum of
two streams, needed for max pooling in stochastic neural networks and for
image filters, takes more than that. This RTL implements a small sequential
circuit for it: an XOR gate, an AND gate, a 2:1 multiplexer and an L-cell
shift register. It consumes one bit of each input stream per clock and
produces one output bit in the same cycle. The ones rate of the output
stream approximates max(a, b), or min(a, b) in the mirrored variant.

The circuit comes from published work on stochastic max/min circuits
(Lunglmayr, Wiesinger, Haselmayr, "Design and Analysis of Efficient
Maximum/Minimum Circuits for Stochastic Computing"). The structure and
behaviour follow that description. Reset, clear, stall and timing details
are choices made here, listed under "Departures and choices" below.

## The circuit

```
 A ---+-----------------------------------> dir   FSM element     U
      |                                           (L-cell      -------> mux input 1
      +--> XOR --- D ---+-----------------> EN    shift reg.)
 B ---+--> XOR          |
      |                 +--> AND --- S -------------------------------> mux select
      +--> NOT -------------> AND
      |
      +---------------------------------------------------------------> mux input 0
                                                                  mux output = C
```

* `D = A xor B` is 1 when the two input bits differ. Only then does the
  register change.
* The FSM element is a shift register of L cells. When D = 1 and A = 1, a
  one enters from the left and everything moves right. When D = 1 and
  A = 0, a zero enters from the right and everything moves left. Starting
  from empty, the register always holds a block of ones at its left end.
  The number of ones is the FSM state, 0..L, so the FSM has M = L + 1
  states. The rightmost cell, U, is 1 only when the register is full.
* `S = D and not B`, which is the same as `A and not B`. The multiplexer
  outputs U when S = 1 and B otherwise.

Per cycle this gives three cases:

| A | B | register                  | C |
|---|---|---------------------------|---|
| equal | equal | unchanged         | B |
| 0 | 1 | zero shifted in (state - 1, stays at 0 when empty) | 1 |
| 1 | 0 | one shifted in (state + 1, stays at L when full)   | U (1 only if full) |

## Why it computes a maximum

Every one of B appears in C. The ones of A that B lacks are not passed on
straight away. Each cycle with (A, B) = (1, 0) stores one in the register,
and each cycle with (0, 1) takes one out. Once the register is full, a
further (1, 0) cycle sends a one to C. If A has more ones than B, the
register fills up and the surplus of A flows through, so C follows A. If B
has more ones, the register stays mostly empty and C follows B.

This can be written as exact identities for any finite stream, with C's
ones counted as o(C):

* `o(C) = o(B) + o_R`, where o_R is the number of (1, 0) cycles met with a
  full register ("right overflows"). When b >= a these are the only
  error.
* `o(C) = o(A) + o_L - o_S`, where o_L is the number of (0, 1) cycles met
  with an empty register ("left overflows"). Each of these hands a one of B
  to C without taking one out of storage. o_S is the number of ones still
  in the register when the stream ends. When a > b these two terms are the
  error.

The unit, full-size and L-sweep testbenches check both identities on
every stream they run.

For long independent streams the FSM is a birth-death chain. From its
steady state the output value is

    c = b + (b - a) / ( (b(1-a) / (a(1-b)))^M - 1 ),   M = L + 1,

which tends to max(a, b) as M grows. Where a = b the formula's limit is
b + a(1-a)/M, so the unit overshoots by a(1-a)/M there: 0.0156 at
a = b = 0.5 with M = 16, measured 0.0156 over 10^6 bits. Away from a = b
the error decays quickly: at M = 64 the measured rate is within 0.001 of
max(a, b) for |a - b| >= 0.02. The exponent is M here, where the older
comparator-based designs have M/2, so the error falls off much faster
with register length.

## Choosing L

A longer register means fewer overflows. It also means more ones stranded
in the register at the end of a stream (o_S, up to L). That loss matters
for finite streams of N bits. So for each N there is a best length. The
predicted optima, with the mean error over uniformly drawn (a, b), are:

| N       | best L | predicted mean error | measured here          |
|---------|--------|----------------------|------------------------|
| 1 000   | 6      | 4.13e-3              | 4.19e-3 (4000 cases)   |
| 10 000  | 15     | 1.03e-3              | 1.030e-3 (10000 cases) |
| 30 000  | 22     | 5.18e-4              | 5.38e-4 (400 cases)    |
| 50 000  | 27     | 3.75e-4              | 3.87e-4 (300 cases)    |
| 100 000 | 34     | 2.41e-4              | 2.38e-4 (500 cases)    |

The error of one case is |o(C) - o(B)|/N if a <= b and |o(C) - o(A)|/N if
a > b. The default `L = 15` is the optimum for N = 10^4. It is also the
M = 16 configuration used for the transfer curves.

## Minimum

`min(a, b) = 1 - max(1 - a, 1 - b)`. With `MODE = SC_MIN` the unit inverts
A and B on entry and C on exit around the same core. The register then
stores the surplus zeros.

## Files

| file | contents |
|------|----------|
| `rtl/sc_maxmin_pkg.sv` | `sc_mode_e` (`SC_MAX`, `SC_MIN`), default length `SR_LEN_DEFAULT = 15` |
| `rtl/fsm_element.sv`   | the L-cell shift-register FSM |
| `rtl/smax_smin.sv`     | top: XOR, AND, mux and FSM element; the max/min unit |
| `tb/fsm_element_tb.sv` | FSM element against a saturating-counter model, L = 15 and L = 1 |
| `tb/smax_smin_tb.sv`   | unit checks: cycle-exact model, ones identities, long-stream values against the formula for M = 16 and 64, minimum mode, L = 1 |
| `tb/smax_smin_full_tb.sv` | default-size end-to-end run: 10 000 streams of 10 000 bits with random idle cycles; mean error against 1.03e-3 |
| `tb/smax_lopt_tb.sv`   | error against L for N = 1000 ... 100 000 (table above) |
| `tb/smax_fig8_tb.sv`   | transfer curve: a = 0.5, b = 0.40 ... 0.60, N = 10^6, M = 16 and 64, against the formula |

### Interface of `smax_smin`

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk` | in | 1 | clock, one stream bit per cycle |
| `rst_n` | in | 1 | asynchronous reset, active low; empties the register |
| `clr` | in | 1 | synchronous clear; empties the register before a new stream |
| `bit_en` | in | 1 | `a`, `b` carry a stream bit this cycle; when 0 the register holds |
| `a`, `b` | in | 1 | current bits of the input streams |
| `c` | out | 1 | current output bit, combinational, same cycle |
| `sr_q` | out | L | register contents, bit L-1 = leftmost cell; `$countones(sr_q)` is o_S at the end of a stream |

Parameters: `L` (register length, default 15, any value >= 1) and `MODE`
(`SC_MAX` default, or `SC_MIN`).

Timing: `c` depends combinationally on `a`, `b` and the register. It is
valid in the cycle the bits are presented and uses the register state from
before that cycle's update. The register updates at the rising edge. There
is no pipeline latency, and the throughput is one bit per clock whenever
`bit_en` is 1. Input streams must be statistically independent of each
other. Bit generators (for example LFSR-based comparators) and the output
counter are not part of the unit.

## Simulating

```
verilator --binary --timing -Wno-fatal --top-module smax_smin_tb \
  -y rtl -y tb +libext+.sv rtl/sc_maxmin_pkg.sv tb/smax_smin_tb.sv
./obj_dir/Vsmax_smin_tb
```

Replace the top module name with `fsm_element_tb`, `smax_smin_full_tb` or
`smax_lopt_tb` or `smax_fig8_tb` for the others. Each prints `TB_RESULT checks=N failures=F`.
The full-size run takes about 70 s, the L sweep about 60 s and the
transfer-curve sweep about 15 s. The unit
tests take a few seconds.

## Departures and choices

* **Empty start.** Reset and `clr` set the register to all zeros (state
  S0). The published description does not state an initial state. The error analysis
  counts the ones left at the end as lost, which presumes an empty start.
* **`clr` and `bit_en`** are additions for practical use: a new stream, or
  a source that cannot supply a bit every cycle. With `bit_en = 1` and no
  `clr` the unit is exactly the described circuit.
* **Zero latency.** The output bit is combinational and U is read before
  the shift. This is how the described behaviour (C = U in the (1, 0) case,
  with U the last-state indicator) maps onto a clocked design.
* **Shift register, not counter.** The FSM is kept as a real shift
  register. Its cells have equal weight, which is the published reason for the
  choice: a flipped cell shifts the state by at most one. A binary counter
  would give the same function fault-free at lower cost for large L.
* **MODE is a parameter**, not a run-time input, because the minimum is
  described as a conversion of the circuit.
* **AND-gate probability.** The published derivation writes the select probability as
  P_D(1 - P_B) = P_A(1 - P_B). The first form treats D and B as independent,
  which they are not. The logic built is S = A and not B, and its
  probability is the second form.
* **Bipolar coding.** The same circuit works for bipolar streams
  (x = 2P - 1). Nothing changes in the hardware.
* Not built: the two earlier max circuits (an STanh comparator with two
  multiplexers, and an XOR-enabled STanh FSM). They were published only as
  comparisons.
