# Takagi-Sugeno Fuzzy-PI controller in SystemVerilog

A PI controller computes its command from the control error and its
integral. In the Fuzzy-PI form used here, that law becomes a nonlinear
surface. The scaled error increment `x0 = Kp·Δe` and the scaled error
`x1 = Ki·e` go into a Takagi-Sugeno (TS) fuzzy inference with 7 × 7 rules.
The inference returns a command increment `v_d`. An integrator with
anti-windup limits adds the increments into the actuator command `r`.
This is the "velocity" form of a PI controller: the fuzzy surface takes the
place of the constant gains.

The hardware is fully parallel. All 14 membership functions, 49 rules and
49 weighted consequents are separate circuits. A new sample can therefore
be accepted on every clock edge. The two ends of the datapath differ:

* the fixed-point front end (error processing, membership functions,
  rule strengths, numerator and denominator sums);
* a single-precision floating-point division for the final weighted mean,
  converted back to fixed point for the integrator.

There are two versions of the inference core, selected by a parameter:

* **one-shot**: purely combinational. The command `r(n)` depends on `y(n)`
  in the same clock. The clock is slower and there is no loop delay.
* **pipelined**: four register ranks. The clock can be shorter, but `v_d`
  arrives four samples late, which adds delay to the control loop.

## Signal chain and number formats

Fixed-point formats are written `[sT.W]` (two's complement) or `[uT.W]`
(unsigned): T bits in total, W of them fractional. Every width follows from
N, the number of fractional bits (default 16), through the functions in
`fuzzy_pkg`:

| signal | meaning | format | width at N = 16 |
|---|---|---|---|
| `y`, `y_sp`, `e`, `Δe` | measurement, set point, error, error increment | `[sM.N]`, M = N + YMAX_LOG2 + 1 | 19 |
| `x0`, `x1` | scaled inference inputs, range [−1, 1) | `[sV.N]`, V = N + 1 | 17 |
| `f` | membership degree, range [0, 1) | `[uN.N]` | 16 |
| `o` | rule strength (min of two degrees) | `[uN.N]` | 16 |
| `a_g` | one weighted consequent | `[sH.N]`, H = N + 3 | 19 |
| `a` | numerator, sum of 49 `a_g` | `[sP.N]`, P = H + ⌈log2 49⌉ | 25 |
| `b` | denominator, sum of 49 `o` | `[uQ.N]`, Q = N + ⌈log2 49⌉ + 1 | 23 |
| `v_d` | command increment | `[sV.N]` | 17 |
| `r` | actuator command | `[sG.N]`, G = N + G_INT + 1 | 18 |
| MF breakpoints | membership-function constants | `[sW.T]`, W = 2T + 1 | 21 at T = 10 |

```
 y_sp ─┐   ┌────── IPM ──────┐   ┌──────────── TS-FIMM ─────────────┐   ┌─ IM ─┐
       ├──►│ e, Δe, ×Kp, ×Ki │──►│ MFM ─► OM ─► OFM (NM, DM, ÷)     │──►│ Σ,   │──► r
 y ────┘   └─────────────────┘x0 └──────────────────────────────────┘v_d│ clamp│
                              x1                                        └──────┘
```

### Input processing (`ipm`)

`e(n) = y_sp(n) − y(n)` and `Δe(n) = e(n) − e(n−1)`. One register holds
`e(n−1)`. Both differences are formed one bit wider and saturated back to
M bits. The gains are elaboration-time `real` parameters (`KP = 2000`,
`KI = 0.1`). They are converted to signed constants with N fractional bits
and `KW = N + 13` bits, which leaves room for a gain of 2000. The products
carry 2N fractional bits. They are floored to N bits and saturated to
[−1, 1 − 2^−N]. `x0_sat` and `x1_sat` flag a clipped sample. With `Kp`
as large as 2000, any step in the set point clips `x0`. This is normal and
expected in operation.

### Fuzzification (`mf`, `mfg`, `mfm`)

Each input has seven membership functions, named LN, MN, SN, ZZ, SP, MP
and LP (large, medium and small negative; zero; small, medium and large
positive):

| function | shape | breakpoints |
|---|---|---|
| LN | right trapezoid | 1 below −0.75, falls to 0 at −0.5 |
| MN, SN, ZZ, SP, MP | triangles | peaks at −0.5, −0.25, 0, 0.25, 0.5; half-width 0.25 |
| LP | left trapezoid | rises from 0 at 0.5, 1 above 0.75 |

For every input, the seven degrees sum to one. The breakpoints are
stored as `[sW.T]` constants. All of them are multiples of 0.25, so any
T ≥ 2 holds them exactly, and T has almost no effect on accuracy.

Each edge is a subtraction followed by a division by the edge width. That
width is an elaboration-time constant, so the division is a multiplication
by a rounded reciprocal with two extra guard bits. The result is within one
LSB of the exact quotient. A degree of exactly 1 cannot be held in
`[uN.N]`, so it saturates to 1 − 2^−N. `mfg` holds the seven functions of one
input. `mfm` holds the two groups.

### Rules (`olk`, `om`)

Rule `g = l·7 + k` combines function `l` of `x0` with function `k` of
`x1`. Its strength is `o_g = min(f0_l, f1_k)`, built as a comparator that
drives a 2:1 multiplexer. `om` instantiates all 49 of them.

### Defuzzification (`wm`, `nm`, `dm`, `fp2f`, `fdiv`, `f2fp`, `ofm`)

This is the least obvious part of the design. The output is the weighted
mean of the rule consequents:

```
v_d = Σ_g o_g · (A_g·x0 + B_g·x1 + C_g)  /  Σ_g o_g   =  a / b
```

* **`wm`** computes one term `a_g`. The consequent `A_g·x0 + B_g·x1 + C_g`
  is kept at 2N fractional bits. Multiplying it by `o_g` gives 3N
  fractional bits, which are floored to N for `a_g [sH.N]`.
* **`nm`** instantiates the 49 `wm` units, with the rule's coefficients
  as parameters, and sums them in a balanced adder tree (`adder_tree`,
  six levels for 49 leaves) into `a [sP.N]`.
* **`dm`** sums the 49 strengths into `b [uQ.N]`. `b` is never negative,
  so it is unsigned.
* **`fp2f`** converts each sum to IEEE-754 single precision. It splits
  the value into sign and magnitude, finds the leading one, and shifts.
  Mantissa bits beyond 23 are truncated.
* **`fdiv`** divides the two floats. It is a combinational restoring
  division of the 24-bit significands into 26 quotient bits, normalised by
  at most one place and truncated. A zero dividend gives 0. A zero divisor
  gives 0 and raises `div_by_zero`. Only zeros and normal numbers reach it,
  so infinities, NaNs and denormals are not handled. The exponent is
  clamped to the normal range; this never triggers here.
* **`f2fp`** converts the quotient back to `[sV.N]`. It truncates toward
  zero and saturates magnitudes of 1 or more, raising `sat`.
* **`ofm`** wires these together.

The float division keeps the relative precision of the ratio the same,
whatever the size of `b`. At any input, at most four rules fire, and `b`
lies close to 1. Because every conversion and the division truncate,
`v_d` carries a small negative bias of a few LSB (see *Accuracy*).

### Integration (`im`)

`r(n) = clamp(v_d(n) + r(n−1), v_min, v_max)`. The limits default to
−1 and +1, so G = N + 2. The register stores the clamped value. Saturated
windup therefore cannot build up: the command leaves a limit as soon as
`v_d` changes sign. `r(n)` is combinational from `v_d(n)`. `sat_hi` and
`sat_lo` flag a clamped sample.

## One-shot and pipelined inference (`tsfimm_os`, `tsfimm_p`)

`tsfimm_os` is MFM → OM → OFM with no registers. `x0` and `x1` also go
straight to the OFM, because the consequents need them.

`tsfimm_p` adds four register ranks:

| rank | registers | holds sample |
|---|---|---|
| 1 | `x0`, `x1` at the input | n |
| 2 | all 14 membership degrees | n − 1 |
| 3 | all 49 rule strengths, plus two more ranks on `x0`/`x1` so they meet the strengths of the same sample at the OFM | n − 2 |
| 4 | `v_d` and its flags | seen as n − 4 at the output |

The pipeline accepts one sample per clock and has a latency of four
clocks. All registers reset asynchronously (active-low `rst_n`) to zero.

## Top level (`fuzzy_pi`)

`fuzzy_pi` is one controller channel: `ipm` → `tsfimm_os` or `tsfimm_p`
→ `im`.

Parameters:

| parameter | default | meaning |
|---|---|---|
| `N` | 16 | fractional bits of the datapath |
| `T` | 10 | fractional bits of the MF constants |
| `YMAX_LOG2` | 2 | integer bits of `y`: \|e\| < 4, e.g. angles in radians |
| `G_INT` | 1 | integer bits of `r` |
| `KP` | 2000.0 | proportional gain |
| `KI` | 0.1 | integral gain |
| `PIPELINED` | 0 | selects the inference core |

Ports:

| port | direction | meaning |
|---|---|---|
| `clk` | input | one rising edge per sample |
| `rst_n` | input | asynchronous, active low |
| `y_sp`, `y` | input | set point and measurement `[sM.N]` |
| `r` | output | command `[sG.N]` |
| `x0`, `x1`, `vd` | output | observation |
| `status` | output | flag bits, listed below |

The bits of `status` are:

* `[4]`: divide by zero
* `[3]`: `v_d` saturated
* `[2]`: `r` at `v_min`
* `[1]`: `r` at `v_max`
* `[0]`: `x0` or `x1` clipped

To control several joints or axes, instantiate one `fuzzy_pi` per axis.
The sensor, its sampler, the actuator and the plant lie outside this RTL.
`y` and `y_sp` arrive as sampled fixed-point codes, and `r` leaves as a
fixed-point code for the actuator.

## Choices not fixed by the published description

* **Rule base.** The consequent coefficients are not published. This
  design uses `A_g = 0.5 − |l−3|/16`, `B_g = 0.25 + |k−3|/32` and
  `C_g = (l+k−6)/64`, which are exact in `[sV.N]` for N ≥ 6. This gives a
  smooth, odd-symmetric surface.
  `|v_d| < 1` always holds, so `f2fp` never saturates. To change the rule
  base, edit `coef_a64`, `coef_b64` and `coef_c64` in `fuzzy_pkg`.
* **Membership breakpoints.** Only the peaks at −0.5, 0 and 0.5 are
  marked numerically in the source drawing. The others follow from the
  evenly spaced layout.
* **Ranges.** `YMAX_LOG2 = 2`, `G_INT = 1` and `v_min`/`v_max` = ∓1 are
  assumed.
* **Rounding.** Every narrowing truncates: floor for two's complement,
  toward zero for floats and sign-magnitude values. The description
  does not say how values are rounded.
* **Gain format.** `KW = N + 13` bits, and the gains are
  elaboration-time parameters, not run-time inputs.
* **Reset.** Reset is asynchronous and active low. It clears `e(n−1)`,
  `r(n−1)` and the pipeline registers.
* **Float divider.** Its insides and its corner-case behaviour, described
  above, are this design's own.
* **Integrator feedback.** The clamped value is fed back, as in the
  block diagrams of the original. One of its equations writes the sum
  before the clamp.
* **Numerator sum.** One form of the weighted-mean formula in the
  original starts the numerator sum at rule 1 and the denominator sum at
  rule 0. The block diagram feeds every rule, rule 0 included, into the
  numerator tree, and so does this design.
* **Spare bit of `b`.** The `b` width keeps the published sign bit. Its
  top bit is therefore always zero.
* **Multiplier count.** This design does not match the original's
  multiplier count. Each `wm` has two coefficient multipliers, which
  synthesis folds into constants, and one full multiplier by `o_g`.

## Accuracy

`tb_tsfimm_mse` evaluates the inference on a 100 × 100 grid over
[−1, 1]² (10 000 points). It compares the results with a double-precision
model of the same rule base:

| N | T | MSE | in LSB² | max error |
|---|---|---|---|---|
| 8 | 4 | 4.8e−5 | 3.1 | 4.4 LSB |
| 8 | 10 | 4.8e−5 | 3.1 | 4.4 LSB |
| 10 | 6 | 3.1e−6 | 3.2 | 4.5 LSB |
| 12 | 8 | 1.9e−7 | 3.2 | 4.4 LSB |
| 14 | 4 | 1.2e−8 | 3.2 | 4.6 LSB |
| 16 | 10 | 7.6e−10 | 3.3 | 4.8 LSB |

The error scales with the LSB and does not depend on T. It is dominated
by the bias of the truncations: the input quantisation, `wm`, the two
float conversions, the division and the return conversion. Published
figures for a floating-point reference with a different rule base are
about 20 times lower, at about 0.16 LSB². Changing the narrowing steps to
round-to-nearest would be the way to close that gap.

## Verification

Every block has a self-checking testbench in `tb/`, compared against
independent models. The real-valued reference in `tb/tb_fuzzy_ref.svh`
holds the membership functions, the rules, the TS inference and float32
decoding.

| testbench | what it checks |
|---|---|
| `tb_mf`, `tb_mfg`, `tb_mfm` | degrees within 1 LSB of the exact value; `tb_mfg` is exhaustive at N = 8 |
| `tb_olk`, `tb_om` | exact min and rule indexing |
| `tb_wm`, `tb_nm`, `tb_dm` | exact integer models of the sums and products |
| `tb_fp2f`, `tb_fdiv`, `tb_f2fp` | bit-exact against truncated real arithmetic, including zero, divide-by-zero and saturation |
| `tb_ofm`, `tb_tsfimm_os`, `tb_tsfimm_p` | within 8 LSB of the real-valued inference; `tb_tsfimm_p` also checks the four-clock latency |
| `tb_ipm`, `tb_im` | exact differences, gains, saturation and clamping |
| `tb_tsfimm_mse` | the accuracy sweep above |
| `tb_fuzzy_pi`, `tb_fuzzy_pi_pipe` | end-to-end runs at full default size, described below |
| `tb_fuzzy_pi_joints` | three joints at three word sizes, described below |

The end-to-end testbenches `tb_fuzzy_pi` (one-shot) and
`tb_fuzzy_pi_pipe` (pipelined) run the full-size controller in two phases.

1. **Open loop.** `y` is held at 0 while the set point is first +0.5 and
   then −0.5. The integrator must reach both limits.
2. **Closed loop.** The controller drives a simple integrating joint model,
   `θ(n+1) = θ(n) + 4·10⁻⁴·r(n)`. The set points are 90°, 0°, 45°, −45°
   and 90°, each held for 200 000 samples (2 s at a 10 µs sample time).

Every sample is checked:

* `x0` and `x1` exactly;
* `v_d` against the real-valued inference, with the pipeline delay
  applied;
* `r` exactly against its clamp equation;
* at the end of each segment, the joint angle within 0.02 rad of the set
  point.

The testbench counts clipped `x0` samples, samples with `r` at each limit,
and set-point changes, and fails if any of them never happens. Both
variants settle in all five segments. The maximum `v_d` error is about
4 LSB.

`tb_fuzzy_pi_joints` runs the validation scenario of a three-joint arm.
Each joint has its own controller, and the three word sizes N = 12, 14
and 16 run side by side, so there are nine controllers. The set points
change every 2 s over 10 s:

| joint | set points (degrees) |
|---|---|
| 1 | 90, 0, 45, −45, 90 |
| 2 | 45, 45, 0, 22.5, 45 |
| 3 | 45, 22.5, 0, 22.5, 45 |

Each joint is modelled by the same integrator as above. The arm's
dynamics are not modelled. At every word size, every joint settles
within 0.02 rad in each segment. Once settled, the N = 12 and N = 14
runs stay within 0.02 rad of the N = 16 run. During the transients the
word sizes differ by up to 0.18 rad.

To simulate a testbench with Verilator 5, from the directory that holds
`rtl/` and `tb/`:

```
verilator --binary --timing -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/fuzzy_pkg.sv tb/tb_fuzzy_pi.sv --top-module tb_fuzzy_pi
./obj_dir/Vtb_fuzzy_pi
```

Every testbench ends with a line
`TB_RESULT checks=<n> failures=<m>`. The end-to-end run simulates
about 10⁶ clocks in a few seconds. The nine-controller run takes about
half a minute. All testbenches have a watchdog.

## Lint notes

Verilator reports two unused-bit warnings. In `fp2f`, the low bits of
the widened, shifted magnitude fall below the 23 mantissa bits and are
truncated. In `fdiv`, the divider computes one quotient bit below the
lowest bit that either normalisation case keeps. Both are dropped on purpose.
