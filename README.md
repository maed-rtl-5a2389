# MAED activation units: sigmoid, tanh and ReLU that check their own results

A laser pulse, a clock glitch or a voltage glitch aimed at the moment a neural-network
accelerator evaluates an activation function can skip an operation or corrupt a register,
and turn a correct classification into a wrong one. The best known example forces a ReLU to
output zero, or skips the minus sign in the `e^-x` of a sigmoid. MAED (Mathematical Activation
Error Detection) defends the activation functions with their own algebra. After computing
`y = f(x)` it applies a transformation `h(y)` that, for a correct `y`, gives back a quantity
`g(x)` that can also be obtained from `x` by a different route. It raises an error flag when
the two disagree by more than a threshold `EPS`:

| function | output | check |
|---|---|---|
| sigmoid | `y = 1/(1 + e^-x)` | `h1(y) = y/(1-y)` must equal `e^x` |
| tanh | `y = (1 - e^-2x)/(1 + e^-2x)` | `alpha = (1-y)/(1+y)`, `h2 = (alpha-1)/(alpha+1)` must equal `(e^-2x - 1)/(e^-2x + 1)` |
| ReLU | `y = max(0, x)` | recompute on `-x`: `ReLU(x) + ReLU(-x)` must be non-zero exactly when `x` is non-zero |

The exponentials come from a truncated Maclaurin series, `e^x ~ sum_k x^k/k!`. The terms
`T_k = x^k/k!` are computed once and cached. The sigmoid uses them with alternating signs
(`e^-x`) and the check uses the same terms without the signs (`e^x`). The check therefore
costs one extra summation, one subtraction, one division and a compare, but no second series.

This RTL implements the sigmoid datapath of the paper that proposed MAED (single-precision
floating point, five series terms, 7 cycles for the bare sigmoid and 9 with the check). It
adds a tanh unit built from the same submodules and the ReLU recomputation check. A small
top level puts all three behind one request interface.

## Block structure

```
maed_top                     function select, one request at a time
 +- maed_sigmoid             controller + datapath, 7/9 cycles
 |   +- term_calc            x^k/k!, one term per cycle, term registers
 |   |   +- fp_mul           x * (x or r)  -> next power r
 |   |   +- fp_div           r / k!        -> T_k
 |   +- fp_sum_terms         mode 1: 2 - T1 + T2 - ...  (= e^-x + 1)
 |   |                       mode 0: 1 + T1 + T2 + ...  (= e^x)
 |   +- fp_div               y = 1 / (e^-x + 1)
 |   +- fp_addsub            1 - y
 |   +- error_indicator      fp_div y/(1-y), fp_addsub residual, |residual| > EPS
 +- maed_tanh                same submodules on u = 2x, 4 dividers, 7/9 cycles
 +- relu_checker             ReLU(x), ReLU(-x), h3, 1 cycle
fp_div                       Newton-Raphson: seed + 3 x (fp_mul, fp_addsub, fp_mul) + fp_mul
fp32_pkg                     number type, enums, fault-hook struct, fp32 add/mul functions
```

Each file in `rtl/` holds one module or package and begins with a description of its
function, interface and timing.

## Number format and arithmetic units

All values are IEEE 754 single precision (`fp32_t`, 32 bits).

* `fp_mul` is combinational. The sign is the XOR of the operand signs, the exponent is the
  sum of the exponents less the bias, and the 48-bit product of the two 24-bit significands
  is normalised on its carry-out and rounded. It is bit-exact with correctly rounded
  multiplication for normal numbers.
* `fp_addsub` is combinational. It orders the operands by magnitude, aligns the smaller one
  with guard, round and sticky bits, adds or subtracts, renormalises and rounds. It is
  bit-exact with correctly rounded addition.
* `fp_div` is combinational, so a division takes one cycle of the surrounding datapath. It
  has no long division. The divisor's significand is placed in `[0.5, 1)` (`D`), a seed
  `X0 = 48/17 - (32/17)·D` is refined by three Newton-Raphson steps `X = X·(2 - D·X)`,
  the dividend is multiplied by `X`, and the divisor's exponent is restored in the result.
  The quotient is within a few ulp of the exact one, not correctly rounded.
* Conventions, chosen for this design: round to nearest-even; subnormals read as zero and
  underflow to zero; NaN, `inf*0`, `inf-inf`, `0/0` and `inf/inf` give the quiet NaN
  `0x7FC00000`; overflow gives a signed infinity.

The factorials `k!` are computed at elaboration from these same package functions, so no
constant table is stored.

## The sigmoid schedule

`maed_sigmoid` runs one operation at a time. Cycle 1 is the cycle in which `start` is high
(and `busy` is low); `x` is sampled at its end.

| cycle | unit | register written |
|---|---|---|
| 1 | `term_calc` load | `x`, `r = x`, `T1 = x`; `T2..T5` cleared |
| 2..5 | `term_calc` step `k` | `r = x·r` (`x·x` when `k = 2`), `T_k = r/k!` |
| 6 | `fp_sum_terms`, mode 1 | `s1 = 2 - T1 + T2 - T3 + T4 - T5` |
| 7 | `fp_div` | `y = 1/s1`; `y_valid` pulses in cycle 8 |
| 8 | `fp_sum_terms`, mode 0; `fp_addsub` | `ex = 1 + T1 + ... + T5`, `omy = 1 - y` |
| 9 | `error_indicator` | `err = |y/omy - ex| > EPS` or NaN; `done` pulses in cycle 10 |

So `y` is ready 7 cycles after the request and the checked result after 9. These are the
cycle counts the paper reports for its unprotected and protected FPGA designs. `y` and `err`
hold until the next request. One summation unit serves both modes: the check costs a second
use of it, not a second adder tree. The first term needs no arithmetic, so the
multiplier/divider path produces `T2..T5`, and the five terms still take five cycles.

`maed_tanh` runs the same schedule on `u = 2x`. Cycle 6 forms `s1 = e^-2x + 1`; cycle 7 forms
`y = (2 - s1)/s1`; cycle 8 forms `E = e^2x` (mode 0) and `alpha = (1-y)/(1+y)`; cycle 9
compares `h2 = (alpha-1)/(alpha+1)` with `g2 = (1-E)/(1+E)`. `g2` is the paper's
`(e^-2x - 1)/(e^-2x + 1)` multiplied through by `e^2x`. Writing it this way makes the
reference side come from the mode-0 sum, which has no negations. A skipped negation in the
output path therefore cannot cancel out of the comparison.

`relu_checker` registers `y = ReLU(x)` and `err = h3` one cycle after `valid_in`. `h3` is 0
when `ReLU(x) + ReLU(-x)` and `x` are both non-zero or both zero, and 1 otherwise.

## Why the check needs a threshold, and how large it must be

This is the part of the design that most needs care. The identity `y/(1-y) = e^x` holds
exactly only for exact exponentials. With a truncated series the two sides are different
approximations: `y/(1-y)` equals `1/S-(x)`, while the reference is `S+(x)`, where `S-` and
`S+` are the five-term series of `e^-x` and `e^x`. They drift apart quickly as `|x|` grows.
Here is the largest fault-free residual over `|x| <= a` (five terms, exact arithmetic):

| a | sigmoid `|1/S-(x) - S+(x)|` | tanh `|h2 - g2|` |
|---|---|---|
| 0.25 | 8.9e-7 | 2.2e-5 |
| 0.5 | 7.8e-5 | 1.5e-3 |
| 1.0 | 1.1e-2 | 0.12 |
| 1.5 | 0.30 | 3.8 |
| 2.0 | 7.7 | 1.0e3 |

Beyond `x ~ 2.4`, `S-(x)` even turns negative, so the five-term sigmoid itself is
meaningless there. The default `EPS = 2^-6` (`0x3C800000`) is this design's choice. It keeps
the check free of false alarms for sigmoid inputs with `|x| <= 1` and tanh inputs with
`|x| <= 0.5`. It still catches faults that move the result by more than about 1.6e-2: a
skipped negation, a corrupted exponent, a skipped or replaced term. Faults in the low
fraction bits of a term pass unnoticed. In the testbench, random single-bit flips of random
terms are detected roughly a quarter of the time at this threshold.

The paper reaches about 95-100% detection because its fault-coverage study used double
precision, 30 to 40 terms and thresholds of 1e-14 to 1e-15. That configuration is a software
model, not this hardware. To trade range against sensitivity, change `N_TERMS` and `EPS`
(both are parameters of every unit and of the top). `k!` stays finite in single precision up
to `N_TERMS = 34`. For example, with `N_TERMS = 16` the
sigmoid and its check hold the whole range `[-3, 3]` without false alarms at the default
`EPS`, at a cost of 18 cycles for `y` and 20 for the check (`tb_maed_sigmoid_range`). No
input clipping is built in. Callers must keep `x` in the range their `N_TERMS`/`EPS` pair
supports.

## Measured fault coverage at the default size

`tb_fault_campaign` injects faults into the term registers. Each run uses a new input and
new fault positions, with 100 runs per case. Inputs are drawn from `|x| <= 1` for the sigmoid
and `|x| <= 0.5` for tanh. The table gives the detection rate over faults that moved the
output by more than 1e-4 relative:

| fault model | sigmoid | tanh |
|---|---|---|
| bit flip, random or burst, 1-5 bits in 1-5 terms | 45-75% | 35-70% |
| stuck-at-1 / stuck-at-0, 1-5 bits in 1-5 terms | 20-85% | 15-75% |
| term skipped, 1-4 of 5 terms | 40-70% | 30-60% |
| all 5 terms skipped | 0% | 0% |
| term replaced by a random number | 97-100% | 97-100% |

These rates are well below the near-100% of the original double-precision, 30-term study.
The coarse threshold that five single-precision terms force (previous section) lets
moderate errors through. One blind spot is structural and independent of `EPS`. If every
term is skipped, all term registers stay 0, which is what `x = 0` produces. The output
`y = 0.5` and the reference `e^x = 1` then agree, and the fault cannot be seen.

## Fault-injection hook

Every unit has a `fault` input of type `fault_cfg_t` (`en`, `term_sel`, `model`, `mask`).
It exists to test the detectors and must be tied to zero (`'0`) in use. With `en = 1`, the
write of every term register `k` whose bit `k-1` is set in `term_sel` is corrupted according
to `model`:

* `FLT_FLIP`: XOR with `mask`.
* `FLT_SA1`: OR with `mask`.
* `FLT_SA0`: AND with `~mask`.
* `FLT_SKIP`: the register is not written and stays 0.
* `FLT_RAND`: replaced by `mask`.

These are the fault models of the paper's coverage study, applied to the register that holds
`x^k/k!`. Two more models reproduce the DeepLaser effects:

* `FLT_NEG`: the summation adds the odd terms in mode 1 instead of subtracting them, i.e.
  the negation in the exponent is skipped.
* `FLT_ZERO`: the ReLU output is forced to zero.

All selected terms share one mask. The original study drew fresh bit positions for each
faulty term.

## Interface of `maed_top`

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; active-low asynchronous reset |
| `start` | in | 1 | request; accepted when `busy` is low |
| `func` | in | `act_func_e` | `ACT_SIGMOID`, `ACT_TANH`, `ACT_RELU` |
| `x` | in | 32 | input, sampled with `start` |
| `fault` | in | `fault_cfg_t` | test hook, tie to `'0` |
| `busy` | out | 1 | an operation is in progress |
| `y_valid` | out | 1 | pulse: `y` is ready (cycle 7 for sigmoid/tanh, 1 for ReLU) |
| `y` | out | 32 | activation value |
| `done` | out | 1 | pulse: `err` is ready (cycle 9 for sigmoid/tanh, 1 for ReLU) |
| `err` | out | 1 | fault detected; valid with `done`, held until the next request |

Parameters: `N_TERMS` (default 5) and `EPS` (default `32'h3C80_0000`).

## What follows the paper and what does not

From the paper:
* the three checks and their formulas;
* the sigmoid organisation: term calculation with a power/factorial multiplier-divider pair,
  term registers, one six-operand summation unit with a 0/1 mode and a constant of 1 or 2,
  a division for `1/(1+e^-x)`, and an error indicator dividing `y` by `1-y`;
* single-precision arithmetic, with the multiplier built as described;
* the Newton-Raphson divider;
* five terms;
* the 7- and 9-cycle latencies.

Chosen here:
* the request/`busy`/`done` handshake and the reset;
* `T1 = x` loaded directly;
* the adder internals and the order of additions;
* all odd terms negated in mode 1. The paper says mode 1 negates "one of the intermediate
  inputs"; `e^-x` needs every odd term negated;
* the Newton-Raphson seed constants and three iterations;
* the threshold test on `|h - e^x|` in place of the exact-match XOR drawn in the paper's
  block diagram. `EPS = 0` gives the exact match;
* the value of `EPS`;
* the whole tanh datapath. The paper says only that tanh reuses the sigmoid's submodules;
* the single-cycle ReLU checker;
* the shared top level;
* the fault hook.

The sigmoid drawing shows three separate dividers, and the RTL keeps them separate. The
paper's area figures (almost no extra LUTs for the check) suggest that its FPGA build
shares more hardware than drawn. This RTL does not attempt to match those area or timing
numbers, and it has not been synthesised for an FPGA.

## Simulating

Every testbench in `tb/` is self-checking and ends with a line
`TB_RESULT checks=N failures=M`. Each needs the packages `rtl/fp32_pkg.sv` and
`tb/tb_fp_pkg.sv` (double-precision reference helpers) ahead of the other files, for example:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/fp32_pkg.sv tb/tb_fp_pkg.sv rtl/*.sv tb/tb_maed_top.sv --top-module tb_maed_top
./obj_dir/Vtb_maed_top
```

| testbench | checks |
|---|---|
| `tb_fp_mul`, `tb_fp_addsub` | bit-exact against correctly rounded results, special values |
| `tb_fp_div` | within 4 ulp over a wide exponent range, special values |
| `tb_fp_sum_terms` | both modes and the skipped-negation hook, 2000 random `x` in [-3, 3] |
| `tb_term_calc` | one term per cycle, `x^k/k!` to 1e-6, each register fault model |
| `tb_error_indicator` | no false alarm on `|x| <= 1`, negation fault caught for `|x| >= 0.3` |
| `tb_maed_sigmoid`, `tb_maed_tanh` | values, 7/9-cycle latency, detection of strong faults of every model, detection ratio of single-bit flips (printed) |
| `tb_relu_checker` | `max(0, x)`, 1-cycle latency, forced-zero fault |
| `tb_maed_top` | all three functions interleaved at default parameters, latencies, every fault model, each mechanism counted |
| `tb_maed_sigmoid_range` | sigmoid with 16 terms over `[-3, 3]`: values, latency, no false alarms |
| `tb_fault_campaign` | fault-coverage campaign (previous sections), no false alarms in the clean runs |

All testbenches except `tb_maed_sigmoid_range` run at the default parameters (five terms),
and each finishes in well under a minute. The
simulator is two-state, so every register that is read has a reset value.
