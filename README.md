# Low-precision sample generator for nested multilevel Monte Carlo

Multilevel Monte Carlo (MLMC) prices an option by adding up the expected
differences `E[P_l - P_(l-1)]` between payoffs from SDE paths with `2^l`
and `2^(l-1)` time steps. The *nested* variant splits each of those
expectations again:

```
E[dP_l] = E[dP~_l] + E[dP_l - dP~_l]
```

`dP~_l` is the same level difference computed cheaply, in narrow fixed-point
arithmetic and with approximate normal increments. Most samples are spent on
the cheap term. The correction term `dP_l - dP~_l` has a small variance, so
it needs only a few expensive full-precision samples. Those come from a CPU
that draws the same random integers.

This RTL is the cheap half: a sample generator for geometric Brownian motion
(GBM) and a European call. It has three ideas:

* **Approximate normals from tiny tables.** A d-bit uniform integer becomes
  an approximate N(0,1) value with one table read. Three generators are
  built: a piecewise-constant table, a sum of two reads from a very small
  table, and a piecewise-linear fit on dyadic intervals.
* **Coupling through the integer.** The host keeps the full 32-bit integer
  `J` for its exact normal. The FPGA uses only the top d bits of `J`. So
  each low-precision sample is tied to a full-precision sample of the same
  Brownian path.
* **A separate fixed-point format for every variable.** Every intermediate
  of the Euler-Maruyama step has its own exponent and bit-width, and each
  operation rounds to nearest into its result's format. The widths are
  chosen offline per level, by trading the cost of the arithmetic against
  the variance of the rounding error.

The design follows a published numerical framework (I.-B. Haas and
M. B. Giles, "A nested MLMC framework for efficient simulations on FPGAs"). That framework
was evaluated in software only, so the hardware structure here (handshakes,
timing, run control, table ports) is this design's own. Where it departs from
or adds to the framework is listed in the last sections.

## Data flow

```
 host J stream --> j = J[31:22] --+--> rng_pwc_lut    (method 1) --+
  (valid/ready)                   +--> rng_sum_lut    (method 2) --+--> z --> gbm_path_engine
                                  +--> rng_dyadic_pwl (method 3) --+        fine + coarse paths
                                        rng_method selects                    |
                                                                  s_fine, s_coarse
                                                                             |
                                            call_payoff: max(S-K,0), difference
                                                                             |
                                          sample stream + mlmc_accumulator (n, sum, sum of squares)
```

`nested_mlmc_fpga` is the top. The host does the rest:

* It fills the generator tables.
* It computes the level constants `con1 = r*h` and `con2 = sigma*sqrt(h)`.
* It draws the uniform integers. It needs that stream anyway for its
  full-precision samples.
* It turns the sums into a mean and a variance, and applies the discount
  factor.

## Number formats

A variable `x` with exponent `E` (`|x| < 2^E`) and bit-width `D` is stored
as a signed `D+1`-bit word whose LSB weighs `2^(E-D)`. Values are kept
inside `+-(2^D - 1)`. This is exactly the set of sign-and-magnitude numbers
`(-1)^s * n * 2^(E-D)` with `n < 2^D`. Two's complement is used only for
convenience.

`fxp_requant` is the single rounding point. It does three things:

* **Rounding.** It takes an exact intermediate with any LSB and rounds to
  nearest into the target format, with ties going up. The error is then at
  most half an LSB, which the error model below relies on.
* **Clamping.** A result outside the range is clamped and flagged. With
  exponents chosen from the observed maximum of each variable, clamping
  should not happen. The flag is carried to the output (`sample_sat`,
  `sat_paths`) so that a badly chosen exponent is visible.
* **Helpers.** `fxp_mul` forms the exact product and then calls
  `fxp_requant`. `fxp_add` aligns both operands to the finer LSB, adds, and
  then calls it.

The default exponents assume r = 0.05, sigma = 0.2, T = 1 and S0 = 1 at
level 0:

| variable | meaning | E | default D |
|---|---|---|---|
| Z | approximate normal | 2 | 16 |
| con1 | r h | -4 | 16 |
| con2 | sigma sqrt(h) | -2 | 16 |
| mul1 | con2 * Z | 0 | 16 |
| sum1 | con1 + mul1 | 0 | 16 |
| mul2 | S * sum1 | 1 | 16 |
| S | asset price | 2 | 16 |

All defaults use one width, 16, which is the widest of the uniform widths
studied. A real deployment builds one configuration per level. Each one
takes the optimised `D_*` and, as `h` shrinks, smaller `E_CON1`,
`E_CON2`, `E_MUL1` and `E_SUM1`. All of these are parameters of the top.

## The approximate normal generators

All three generators take the d-bit integer `j` (default d = 10). `j`
stands for the uniform value `u` in `[j 2^-d, (j+1) 2^-d)`. Each generator
returns a word in the Z format. Each has a synchronous write port for its
table, and its lookup is combinational.

**Method 1, piecewise constant (`rng_pwc_lut`).** The table holds 2^(d-1)
values. Each is the mean of the inverse normal CDF over one interval of
[0, 1/2), which is negative. The leading bit of `j` selects the half:

* **Bit 0** (`u < 1/2`): the lower d-1 bits index the table directly.
* **Bit 1** (`u >= 1/2`): the index is the bitwise complement of the lower
  bits, and the value is negated.

The complement mirrors the interval about 1/2, so the integer still maps
to the interval of `u` it stands for. This keeps the low-precision value
consistent with the host's `Phi^-1(U)`.

**Method 2, sum of variables (`rng_sum_lut`).** `j` is cut into n fields of
d/n bits, with the first field in the most significant bits. In each field
the leading bit is a sign and the rest index one shared table of
2^(d/n-1) entries. The output is the sum of the n signed values. The
default is n = 2, which gives a 16-entry table for d = 10.

The table is fitted offline, and the fit is not monotone in `j`. So the
host keeps a permutation table, mapping each `j` to the rank of its output,
to pick the matching full-precision uniform. Nothing on the FPGA is
mirrored for this method.

**Method 3, dyadic piecewise linear (`rng_dyadic_pwl`).**

* **Sign and index.** The sign bit and the mirroring work as in method 1.
  The remaining integer `k` falls in an interval `[2^(i-1), 2^i - 1]`, and
  `i` is found from the position of the leading one of `k`.
* **Table.** Each interval has its own line `a_i + b_i*k`, so the table is
  only d-1 coefficient pairs. The intervals get shorter towards the tail,
  where the inverse CDF is steepest.
* **k = 0.** This value belongs to no interval of that form. This design
  puts it in interval 1.
* **Arithmetic.** `a + b*k` is formed exactly and rounded once.

Accuracy, measured on the hardware outputs for every input integer
(`tb_rng_mse_sweep`, mean squared error against `Phi^-1` on [0,1]):

| d | method 1 | method 2 (unfitted start table) | method 3 |
|---|---|---|---|
| 10 | 1.50e-4 | 4.26e-4 | 1.91e-4 |
| 12 | 3.13e-5 | 1.10e-4 | 7.26e-5 |

Method 1 halves its error with every extra bit. Method 3 is slightly worse
at d = 10 and about twice as bad at d = 12, because its error does not go
to zero as d grows. Method 2 reaches roughly twice the method-1 error only
after the offline table fit. That fit is host software and is not part of
this RTL.

## The path engine: fine and coarse paths together

`gbm_path_engine` takes one increment per clock and applies the decomposed
Euler step, rounding after every operation:

```
mul1 = con2 * z        sum1 = con1 + mul1
mul2 = S * sum1        S    = S + mul2
```

A level-l sample needs the fine path with `2^l` steps and the coarse path
with `2^(l-1)` steps, both driven by the same Brownian increments. The engine
uses the equivalent form in which the coarse path also takes `2^l` small
steps, but freezes its drift and volatility at every even step:

```
S^c(i+1) = S^c(i) + S^c(2*floor(i/2)) * sum1(i)
```

For GBM the drift and volatility are both proportional to S. So the coarse
step reuses the fine path's `sum1`, and the coarse path costs only one
multiplier, one adder and a register that holds `S^c` from the last even
step. At odd steps the multiplier takes that register instead of the
current `S^c`. At level 0 there is no coarse path: its value is computed but
ignored (`has_coarse = 0`), and the coarse payoff is defined as zero.

Timing:

* `start`, taken while idle, loads `S^f = S^c = s0` and the level
  constants.
* The engine then asserts `z_ready` and advances one step in every cycle
  with `z_valid`.
* After the `2^l`-th step it returns to idle and pulses `done`. The
  terminal values hold until the next start.
* With no input gaps, a path takes `2^l + 1` cycles from one start to the
  next. The extra cycle is the one in which `done` and the next `start`
  coincide.

The whole step is one combinational chain: two multipliers, then an add,
then the S update. Nothing is pipelined across paths.

## Payoff, statistics and run control

* **Payoff.** `call_payoff` forms `max(S^f - K, 0)`, `max(S^c - K, 0)` (zero
  at level 0) and their difference. It does this exactly, in the LSB of the
  S format.
* **Statistics.** `mlmc_accumulator` adds every sample into a count, a sum
  and a sum of squares. Their widths are large enough that they cannot
  overflow before the count wraps. The host forms the mean as `sum/n` and
  the variance as `(sumsq - sum^2/n)/(n-1)`, in units of the S-format LSB.
* **Run control.** A pulse on `run_start` with `n_paths` runs that many
  paths back to back. `run_done` pulses one cycle after the last sample.
  With `J` always valid a run takes `n_paths*(2^l + 1) + 1` cycles.
* **Configuration.** The level, `s0`, the strike, `con1`, `con2` and
  `rng_method` are sampled at each path's start. Hold them steady during a
  run.
* **Clearing.** `acc_clear` zeroes the sums and `sat_paths`. A run does not
  clear them, so several runs can be pooled.

Top-level ports:

| group | ports |
|---|---|
| configuration | `rng_method` (0 = method 1, 1 = method 2, 2 = method 3), `level`, `s0`, `strike`, `con1`, `con2` |
| table loading | `pwc_we/addr/wdata`, `sum_we/addr/wdata`, `dy_we/addr/a/b` (address `i-1` for dyadic interval `i`) |
| run | `run_start`, `n_paths`, `run_busy`, `run_done`, `acc_clear` |
| random input | `j_valid`, `j_data[31:0]`, `j_ready`; only the top `RNG_D` bits are used, and the host keeps the rest for its full-precision uniform |
| per-sample output | `sample_valid`, `sample_p_fine`, `sample_p_coarse`, `sample_delta`, `sample_sat` |
| statistics | `acc_count`, `acc_sum`, `acc_sumsq`, `sat_paths` |

## Rounding error against the model

The bit-widths are chosen offline with a linear error model. Each rounded
intermediate `x_i` contributes its rounding error times the sensitivity
`dP/dx_i`, giving two estimates of the error variance:

* **Independent errors:** `(1/12) sum_i E[xbar_i^2] LSB_i^2`
* **Fully correlated errors:** `(sum_i sqrt(E[xbar_i^2]) LSB_i / 2)^2`

`tb_gbm_error_model` checks the hardware against these estimates:

* It runs the path engine with all widths equal to d, for N = 1 and for the
  level-4 difference (N = 16).
* It feeds full-precision normals rounded to the Z format.
* It computes, in real arithmetic, the exact sample and the sensitivities
  by a backward sweep.

Results for 4000 samples per case:

| d | N | measured | independent estimate | correlated estimate |
|---|---|---|---|---|
| 8 | 1 | 2.37e-5 | 1.84e-5 | 2.19e-4 |
| 8 | 16 | 1.75e-4 | 5.56e-4 | 1.01e-1 |
| 11 | 1 | 2.54e-7 | 3.03e-7 | 3.62e-6 |
| 11 | 16 | 4.62e-6 | 8.67e-6 | 1.57e-3 |
| 14 | 1 | 5.62e-9 | 4.56e-9 | 5.43e-8 |
| 14 | 16 | 1.00e-7 | 1.32e-7 | 2.40e-5 |

The measured variance falls by about 4 per bit and always stays below the
correlated estimate. At N = 16 it is below the independent estimate. At
N = 1 it is up to about 1.3 times that estimate, so at a single step the
independent estimate is a good approximation but not a strict bound.

This experiment gives Z the exponent 3, because untabulated normals reach
|Z| of about 5. The generators of the design stop near 3.4, which the
default exponent of 2 covers.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `J_W` | 32 | width of the host's uniform integer (assumed) |
| `RNG_D` | 10 | bits of the low-precision integer j |
| `RNG_N` | 2 | summed variables in method 2; must divide `RNG_D` |
| `LEVEL_W` | 4 | width of `level`; levels 0 to 15 (N up to 32768) |
| `CNT_W` | 32 | path and sample counters |
| `D_*`, `E_*` | see the format table | bit-width and exponent of each path variable |
| `D_A`, `E_A`, `D_B`, `E_B` | 18, 3, 24, 0 | method-3 intercept and slope formats |

For d > 10, set `RNG_D`. Method 1's table grows as 2^(d-1), so d = 16 needs
32768 words. Keep `RNG_D` divisible by `RNG_N`.

## Choices made here that the framework leaves open

* **Tables.** Generator tables are loaded at run time through write ports;
  the framework only says how their values are computed. Reads are
  asynchronous, which suits distributed RAM.
* **Upper-half mapping.** Methods 1 and 3 mirror the index in the upper
  half as well as negating the value. The framework specifies only that the
  leading bit sets the sign.
* **Method 2 fields.** The first field is the top bits, and a set sign bit
  negates.
* **Method 3, k = 0.** It belongs to the first dyadic interval.
* **Rounding and overflow.** Ties round up. Out-of-range values clamp and
  are flagged. The framework states round-to-nearest and says nothing about
  overflow.
* **Formats.** Coarse-path variables share the fine path's formats.
* **Level constants.** `con1` and `con2` are computed by the host and
  arrive already rounded.
* **Payoff.** It is undiscounted, and the strike is a port.
* **Generator choice.** All three generators are present and selected at
  run time. The framework offers them as alternatives without picking one.
* **Throughput.** One time step per clock, valid/ready input, run
  controller, output statistics.
* **Defaults.** All path variables are 16 bits, and the exponents are for
  level 0 with S0 = 1. The framework's optimised per-level widths are given
  only as plots. Under its cost model (`d_i*d_j` per product and
  `max(d_i, d_j)` per sum), the default fine path costs 544 per step,
  against about 41 for the optimised level-0 configuration.

## Not included

* **Uniform random integers.** Nothing here generates them; they arrive on
  `j_data`.
* **Host software.** The full-precision paths, the correction samples, the
  method-2 table fit and permutation table, and the bit-width optimisation
  are host software.

## Simulation

Every file in `rtl/` and `tb/` holds one module or package, named after the
file. Testbenches print `TB_RESULT checks=N failures=M` and stop on a
watchdog. For example:

```
verilator --binary --timing --timescale 1ns/1ps -Wno-fatal \
  -y rtl -y tb +libext+.sv rtl/mlmc_pkg.sv tb/tb_ref_pkg.sv \
  tb/tb_nested_mlmc_fpga.sv --top-module tb_nested_mlmc_fpga -o sim
./obj_dir/sim
```

| testbench | checks |
|---|---|
| `tb_fxp_requant` | rounding, ties, exact left shifts, clamping, against a real-number model |
| `tb_rng_pwc_lut` | all 1024 inputs with the real table; MSE about 1.5e-4 |
| `tb_rng_sum_lut` | all inputs for n = 2 and n = 5, including clamping |
| `tb_rng_dyadic_pwl` | least-squares fitted and random coefficients, all inputs |
| `tb_gbm_path_engine` | levels 0 to 6, fine and coarse terminal values, stalls, timing, clamp flag |
| `tb_call_payoff`, `tb_mlmc_accumulator` | exact integer models |
| `tb_nested_mlmc_fpga` | default parameters, end to end (see below) |
| `tb_rng_mse_sweep` | generator accuracy at d = 10 and 12 |
| `tb_gbm_error_model` | rounding error against the linear model |

`tb_nested_mlmc_fpga` runs the top at its default parameters. It acts as the
host: it builds all three tables from the inverse normal CDF and streams
random `J`. It compares every sample bit-exactly with a real-arithmetic
model. Its runs are:

* 4000 level-0 paths with method 1. The mean must match the exact one-step
  value 0.10727 within four standard errors.
* 400 level-3 paths with method 2 and random input stalls. The variance
  must be below a quarter of the level-0 variance.
* 150 level-5 paths with method 3.
* A run with oversized constants, which makes the clamp fire.

The testbench also plays the host's half of the nested estimator. The same
`J` drives a full-precision path with `Z = Phi^-1((J + 1/2) 2^-32)` in real
arithmetic. The result is the variance of the correction term
`dP - dP~`, relative to the variance of `dP~`:

| run | correction variance / sample variance |
|---|---|
| method 1, level 0 | 1.4e-4 (checked below 1e-2) |
| method 3, level 5 | 2.2e-3 (checked below 5e-2) |
| method 2, level 3, no permutation table | about 1.7 (printed only) |

The method-2 row shows why that generator needs the host's permutation
table. Without it, the two samples are not coupled.

It also counts each mechanism: every generator, level 0 and coupled coarse
paths, stalls, clamping, clearing, back-to-back paths, and positive and
negative differences. A mechanism that never occurs counts as a failure.
