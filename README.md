# Sign-persistence estimator of the AR(1) correlation coefficient

A first-order autoregressive process, X[n] = rho * X[n-1] + W[n], is described
completely by its correlation coefficient rho. The usual estimator divides
the lag-one autocorrelation by the energy. In hardware that means two
multipliers per sample, two running sums, long delay lines of products and
a divider.

This design avoids all of that. It does not use the sample values at all,
only their signs. For a Gaussian AR(1) process the sign sequence is a
two-state Markov chain. Let lambda be the probability that two consecutive
samples have the same sign. Then

    rho = cos(pi * (1 - lambda))          (Kedem's relation)

so estimating rho reduces to counting sign agreements. The cosine is
replaced by a five-segment piecewise-linear curve whose offsets and slopes
are dyadic fractions. Evaluating it takes a few shifts, adds and
comparisons. The result is a correlation estimator with no multiplier,
divider or CORDIC stage. It produces a new estimate over the last N
samples every clock, two cycles after the newest sample.

The RTL follows the architecture of Borges, Cintra, Coelho and Dimitrov,
"Low-complexity Architecture for AR(1) Inference". The defaults are that
work's FPGA configuration: 10-bit samples, a window of N = 512 and a
10-bit signed output. Where that description is ambiguous or silent, this
RTL makes its own choices. They are listed in
[Departures and design choices](#departures-and-design-choices).

## Block structure

```
            +-------------------- lambda_estimator ---------------------+
 x[B-1:0] --+-> MSB --+--------------------+                             |
            |         |                    v                             |
            |         +-> [sign_q] ----> ( = ) --> [eq_q] --+----------+ |
            |                                               |          | |
            |              window_shift_register (N stages) v          v |
            |              [z^-1][z^-1] ... [z^-1] --old_eq--(-)  (+) ---+-- lambda_cnt
            |                                                 \   /      |     |
            |                                                 (sum)<-[acc_q]   |
            +-----------------------------------------------------------+     |
                                                                              v
            +------------------------- rho_tilde -------------------------------+
            |  5/8 l, 63/32 l, 3 l  ->  five offset adders  ->  mux  -> [rho]   |
            |  four comparators on lambda_cnt  -------------->  select          |
            +------------------------------------------------------------------+
```

| Module | File | Role |
|---|---|---|
| `ar1_estimator` | `rtl/ar1_estimator.sv` | Top level. Chains the two stages. |
| `lambda_estimator` | `rtl/lambda_estimator.sv` | Sign extraction, sign comparison and the sliding-window count. |
| `window_shift_register` | `rtl/window_shift_register.sv` | N-stage, 1-bit delay line that drops old comparisons from the window. |
| `rho_tilde` | `rtl/rho_tilde.sv` | Piecewise-linear map from the count to rho, registered. |
| `ar1_pkg` | `rtl/ar1_pkg.sv` | Default sizes, segment breakpoints, the `segment_e` type and the threshold function. |

## Counting sign agreements over a sliding window

Each sample is cut down to its most significant bit. `sign_q` remembers the
sign of the previous sample. The comparator output, 1 when the two signs
agree, is registered as `eq_q`.

The count over the window has to be updated every clock without adding N
bits. The design keeps a running sum and corrects it at both ends of the
window:

    lambda_cnt = acc_q + eq_q - old_eq          acc_q <= lambda_cnt

`old_eq` is the comparison that entered the N-stage shift register N
cycles earlier. Each comparison is therefore added once when it arrives
and subtracted once when it leaves. The sum can never drift or overflow.
It always lies in [0, N], and an assertion in `lambda_estimator` checks
this. Without the subtraction the count would cover the whole history and
grow without bound.

`lambda_cnt` is taken at the adder, ahead of the accumulator register. So
the count already includes the sample clocked in on the most recent edge.
The estimate of lambda is `lambda_cnt / N`. N is a power of two, so this
"division" only moves the binary point by log2(N) places. No divider
exists anywhere in the design.

Zero samples: the MSB of 0 is 0, so zero counts as positive. The
theoretical sign process uses 1 for X > 0, which differs only when a
sample is exactly 0.

## The piecewise-linear map

With l = lambda_cnt / N:

| Segment | l range | Ideal curve fit | Built (dyadic) |
|---|---|---|---|
| SEG_1 | [0, 0.14) | -1.01 + 0.64 l | -1 + 5/8 l |
| SEG_2 | [0.14, 0.30) | -1.20 + 1.97 l | -5/4 + 63/32 l |
| SEG_3 | [0.30, 0.70) | -1.51 + 3.02 l | -3/2 + 3 l |
| SEG_4 | [0.70, 0.86) | -0.77 + 1.97 l | -3/4 + 63/32 l |
| SEG_5 | [0.86, 1] | +0.37 + 0.64 l | +3/8 + 5/8 l |

The curve is odd-symmetric about l = 1/2. Segments 4 and 5 reuse the
slopes of segments 2 and 1, so only three products are formed. Each one
uses shifts and a single add or subtract:

    5/8 l   = ((l << 2) + l) >> 3
    63/32 l = (l << 1) - (l >> 5)
    3 l     = (l << 1) + l

Five adders apply the offsets. Four comparators on `lambda_cnt` drive the
multiplexer.

The breakpoints are converted to integer thresholds on the count,
`ceil(p * N / 100)` for p = 14, 30, 70, 86 (72, 154, 359 and 441 at
N = 512). With these, "l < p/100" holds exactly when the count is below
the threshold. l = 1, reached with a count of N, belongs to the last
segment.

All arithmetic uses log2(N) + 5 fraction bits, which is 14 at N = 512.
This is enough for every shifted term, including l >> 5, to be exact. The
selected value is then truncated (floored) to the output format and
registered.

Accuracy of the map itself (`tb_rho_tilde` tests every count 0 to 512):

- With the dyadic constants, the largest difference from cos(pi(1 - l))
  is 0.073. It occurs at the start of segment 2, where -5/4 stands in for
  -1.20.
- With the two-decimal constants, the fit error would be about 0.02.

## Number formats and timing

| Signal | Format |
|---|---|
| `x` | B-bit two's complement (default 10). Only the MSB is used, so the scaling does not matter. |
| `lambda_cnt` | Unsigned count, `$clog2(N+1)` bits (10 at N = 512). l = count / N. |
| `rho` | Signed, `RHO_W` = 10 bits with `RHO_FRAC` = 8 fraction bits. Range [-2, 2), step 1/256. The output stays within [-1, +1], and +1 is exact. |
| `seg` | `segment_e`, the segment used for `rho`. |

Timing:

- One sample per clock. There is no valid or enable signal.
- From a sample on `x` to the first `rho` that includes it takes two cycles.
  The first is the comparison register; the second is the output register
  of `rho_tilde`.
- The first N + 2 estimates after reset are based on a window that is not
  yet full. Reset clears that window to all-disagree.
- `rst_n` is active-low and synchronous, and clears every register.

Parameters of `ar1_estimator`:

| Parameter | Default | Notes |
|---|---|---|
| `B` | 10 | Sample width. |
| `N` | 512 | Window length. Must be a power of two and at least 8. |
| `RHO_W` | 10 | Output width. |
| `RHO_FRAC` | 8 | Output fraction bits. |

After coarse synthesis the top level has 537 flip-flop bits: 512 in the
window, 10 in the accumulator, 13 for the output and segment, and 2 for
the sign and comparison registers. The remaining logic is about ten adders
and a few comparators. The published FPGA build reported 582
flip-flops, 98 LUTs and 242 MHz; its extra flip-flops presumably come from
pipeline registers inside the map.

## Departures and design choices

These points come from conflicts or gaps in the published description.

- **Window length.** The published block diagram draws N - 1 delay cells
  after the comparison register. That would give a window of N - 1
  comparisons, as in the textbook estimator, which divides by N - 1. The
  accompanying description instead calls for a shift register of size N
  and a window of the last N clock pulses. This design uses N, because a
  power-of-two window makes the division free.
- **Slope-3 path.** The published figure labels this path with a single
  right shift by one and an adder, which would give 3/2. The constant table
  gives 3 for the 3.02 slope. The RTL builds 3 l as (l << 1) + l.
- **Slope 63/32.** The figure shows a right shift by five and an adder. The
  RTL realises 63/32 as (l << 1) - (l >> 5).
- **Offset of segment 5.** The figure labels it -3/8, while the equation
  has +0.37. +3/8 is used. With -3/8 the curve would end at 1/4 instead of
  1 when l = 1.
- **Extra outputs.** `lambda_cnt` and `seg` are outputs for observation.
  The original block has only the estimate as output.
- **Own choices.** The output fraction bits, truncation instead of
  rounding, synchronous reset, and the use of the MSB as the sign are this
  design's choices.
- **Not included.** The reference correlators the estimator was compared
  against are not part of this RTL. These are the exact autocorrelation
  estimator (multipliers, delay lines of products, divider) and the
  Kedem estimator with a CORDIC cosine.

## Verification

Each module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<n>` and includes a watchdog.

- `tb_window_shift_register`: random bits at N = 512. It checks the exact
  N-cycle delay, the zeros after reset and a second reset.
- `tb_lambda_estimator`: N = 32, so the window wraps many times. The
  sample streams range from constant sign to alternating to random, and
  include zero samples. A reference model checks the count every cycle.
  The test also requires the window to be seen both completely full and
  completely empty.
- `tb_rho_tilde`: every count 0 to 512, then random counts. Each output is
  compared with a floating-point evaluation of the segment table and with
  the cosine (tolerance 0.075). It also checks the segment index, the
  one-cycle delay and that all five segments are used.
- `tb_ar1_estimator`: the top level at its default parameters. A
  bit-exact model runs beside the design and checks `lambda_cnt`, `rho`
  and `seg` after every edge, which also pins the two-cycle latency. The
  test has three parts:
  - Directed phases drive the window to full (rho = +1) and to empty
    (rho = -1).
  - A directed latency measurement must find 2 cycles.
  - A Monte Carlo run reproduces the published bias study. It uses
    Gaussian AR(1) data with W ~ N(0, 0.61^2), rho from -1 to 1 in steps
    of 0.04, and 1000 non-overlapping 512-sample windows per rho value,
    26 million samples in all.

  Each mechanism must be seen at least once: all five segments, counts
  lowered by a comparison leaving the window, and full and empty windows.

Monte Carlo results:

- The mean estimate stays within 0.058 of the true rho over the whole
  range (tolerance 0.08).
- The largest bias is in the range rho = -0.88 to -0.64, which is
  segment 2. Its -5/4 offset is the coarsest of the dyadic
  approximations.
- The exact cosine applied to the same counts stays within 0.006. Almost
  all of the bias therefore comes from the dyadic constants, not from
  sign counting.
- The published bias plot was made with the two-decimal constants and
  shows a bias within about 0.03.

Running a test with Verilator 5 (the package is listed first; the other
files are found through `-y`):

```
verilator --binary --timing --assert -Wall -Wno-fatal -y rtl -Irtl \
    rtl/ar1_pkg.sv tb/tb_ar1_estimator.sv --top-module tb_ar1_estimator \
    -o sim && ./obj_dir/sim
```

The full-size end-to-end test takes about 30 seconds. Replace the
testbench name to run the others. To try another window length,
instantiate `ar1_estimator #(.N(...))`. The thresholds, internal widths
and count width all follow from N.
