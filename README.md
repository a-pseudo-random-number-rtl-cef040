# Biased pseudo-random bit streams from one shared LFSR

This is a small pseudo-random bit generator in which the **probability of a 1
can be set**, and several uncorrelated bit streams can be drawn from the same
generator. Most PRNGs aim for a fair coin. Some users want a biased coin whose
bias can be changed over time, simulated annealing and CMOS Ising machines for
example. Such a user starts with a lot of randomness and reduces it as the
solution settles.

The idea fits in one line: turn the state of a long LFSR into a uniformly
distributed M-bit number `A`, and output `A > T`. The output is 1 with
probability

    P(1) = ((2^M - 1) - T) / 2^M

so the threshold `T` sets the statistics. `T` comes from a loadable counter. If
the counter is held, the bias is fixed. If it counts, the density of 1s falls
linearly until, at the all-ones threshold, the output is constantly 0. Every
further output stream costs only M XOR gates and one comparator. The LFSR and
the threshold counter are shared.

```
              +--------+   A0 (M bits)   +-------------+
         +--->| XORs 0 |---------------->| A0 > T      |---> prng_out[0]
+------+ |    +--------+                 +-------------+
| LFSR |-+          ...                        ...
| N=32 | |    +--------+   A(S-1)        +-------------+
+------+ +--->| XORs S-1|--------------->| A(S-1) > T  |---> prng_out[S-1]
              +--------+                 +------^------+
+---------------------------+   T (M bits)      |
| threshold counter (M bits)|-------------------+ (to every comparator)
+---------------------------+
```

Default size: N = 32 LFSR stages, M = 8 bit numbers and threshold, and one
output stream (`NUM_SEQ = 1`). The design this RTL follows was laid out with
these sizes, in 65 nm, on about 0.0013 mm², and was reported to run at 2 GHz
at about 0.57 pJ per output bit. Those figures belong to the original
full-custom implementation, not to this RTL.

## Files

| file | contents |
|---|---|
| `rtl/prng_pkg.sv` | default sizes, the LFSR polynomial and seed, and the tap-set functions `tap_mask` and `stream_rank` |
| `rtl/lfsr.sv` | N-stage Fibonacci LFSR |
| `rtl/xor_taps.sv` | the M XOR gates of one stream |
| `rtl/threshold_controller.sv` | loadable, saturating up-counter that holds `T` |
| `rtl/digital_comparator.sv` | `A > B` magnitude comparator |
| `rtl/prng_top.sv` | the generator: one LFSR, one counter, `NUM_SEQ` streams |
| `tb/prng_ref_pkg.sv` | independent reference model and correlation function for the testbenches |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_prng_full` |

## Top-level interface (`prng_top`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | clock; everything is on the rising edge |
| `rst_n` | in | 1 | synchronous, active-low reset: LFSR to its seed, threshold to 0 |
| `thr_set` | in | 1 | load `thr_init` into the threshold counter (beats `thr_step`) |
| `thr_init` | in | M | initial threshold |
| `thr_step` | in | 1 | advance the threshold by one on this edge; stops at 2^M - 1 |
| `threshold` | out | M | current threshold `T` |
| `thr_saturated` | out | 1 | `T` is all ones: every output is now constantly 0 |
| `prng_out` | out | NUM_SEQ | one biased pseudo-random bit per stream |

Parameters: `N` (LFSR length, 32), `M` (number and threshold width, 8), `K`
(taps per XOR gate, 5), `NUM_SEQ` (output streams, 1; up to 23 at the other
defaults), `POLY` and `SEED` (LFSR polynomial and reset state, see below).

Timing: each stream produces a new bit every clock. `prng_out` is a
combinational function of the LFSR and counter flip-flops, so it is valid
throughout the cycle after the edge that set them. A loaded threshold affects
the output in the cycle right after the load edge. There is no handshake: the
generator is free-running.

Typical use:

* **Fixed bias**: pulse `thr_set` with the wanted `T`, and keep `thr_step` low.
* **Annealing**: load a starting `T` (for example 0, almost all 1s). Then pulse
  `thr_step` at whatever rate the schedule needs. If `thr_step` is tied high, the
  threshold climbs by one per clock and reaches its maximum after
  `2^M - 1 - T0` clocks. After that the output stays 0 until the next load.

## The LFSR

`lfsr` is a Fibonacci register. On each clock, stage i+1 takes stage i, and
stage 1 takes the XOR of every stage whose polynomial coefficient is 1. The
polynomial is a parameter, `POLY`: bit i-1 is the coefficient of x^i, and bit
N-1 (x^N) must be set. The three-stage example x^3 + x^2 + 1 (`POLY = 3'b110`)
feeds back stages 2 and 3 and cycles through all 7 non-zero states. The
default is x^32 + x^22 + x^2 + x + 1, a primitive polynomial, so the register
visits all 2^32 - 1 non-zero states. At 2 GHz that is a period of about two
seconds. The seed must be non-zero, because the all-zero state never leaves
itself. An assertion watches for it.

"Primitive" is the property that matters here. Every primitive polynomial is
irreducible, but not every irreducible polynomial is primitive, and only a
primitive one gives the maximal period. If you change `POLY`, pick it from a
table of primitive polynomials.

## Choosing the XOR taps: why the spacing matters

This is the least obvious part of the design. Each bit of `A` is the XOR of K
LFSR stages. All stages of a shift register carry the same bit sequence, only
delayed. So any XOR of stages is again the same maximal-length sequence at some
other delay. That shift-and-add property makes every bit individually fair.
What has to be avoided is two bits whose delays are a fixed number of clocks
apart. Two tap sets with the same spacing, say {1, 4, 9} and {3, 6, 11},
produce the same stream two clocks apart. Both bits of the number, or both
output streams, would then be shifted copies of each other.

The rule is therefore that no two XOR gates in the whole design may use tap
sets with the same spacing. The spacing rule is necessary but not sufficient,
and the obvious way to satisfy it is a trap. Anchoring every set at the same
stages, for example {1, 2, j} with a different j per gate, gives distinct
spacings. But every bit then contains the common term s1 XOR s2, and because
stage j at time t+1 holds what stage j-1 held at time t, the number of the next
clock is essentially the present number shifted left by one bit, with a common
bit flipped. A second stream built the same way is, eight clocks later, either
equal to the first or its complement. At T = 127 this cannot be seen. Away
from the middle, the thresholded outputs correlate strongly (|R| of about 0.5
was measured at T = 7 and T = 247).

What is needed is linear independence over GF(2). Every XOR of stages is a
linear function of the LFSR state. The M bits of a number must be independent
for the number to be uniform. The bits of one number and those of another, or
of the same number some clocks later, must be jointly independent for the
thresholded outputs to be uncorrelated at that lag. Sparse, regular tap sets
fail this easily. Spread, irregular ones rarely do. For four streams and lags up to 16, 28 of
30 randomly drawn five-tap assignments passed the test described below; with
three taps only 1 of 30 did.

The tap sets are therefore drawn from a fixed integer hash (`prng_pkg::tap_mask`):

* gate `g = s*M + b` drives bit `b` of stream `s`;
* start from `x = g * 0x9E3779B9 (mod 2^32)`, then repeat
  `x = x * 1664525 + 1013904223 (mod 2^32)` and take tap `(x >> 16) mod N`,
  skipping taps already chosen, until K = 5 taps are chosen.

For N = 32, M = 8, K = 5 this assignment was checked offline for up to 23
streams: every stream's 8 masks have full rank; every number together with
the same number 1 to 16 clocks later has rank 16; every pair of streams at
lags 0 to 16 has rank 16; and no two gates share a spacing. At 24 streams two
gates share a spacing. In the RTL, two of these properties are checked again
at elaboration. `xor_taps` stops with an error if its stream's masks are not
of full rank (`prng_pkg::stream_rank`), and `prng_top` stops if any two gates
share a spacing (`prng_pkg::taps_distinct`). The lagged-rank property is not
checked in RTL. If you change N, M or K, re-check it, or at least run
`tb_prng_correlation`.

For a stream of full rank, `A` takes each of its 256 values equally often over
one LFSR period, except 0, which occurs once less. The LFSR state has only 32
dimensions, so the bits of many streams together cannot all be independent.
Independence holds for pairs of streams at small lags, which is what the
correlation figures measure.

Neither K nor the tap sets were published with the original design. Both are
choices of this RTL. The original only asks for distinct spacings and notes
that more taps per gate allow more streams.

## The threshold counter

`threshold_controller` is an M-bit up-counter. `set` loads it, `step` advances
it, and it holds once all its bits are 1. The original circuit stopped the
counter by gating its clock: a NAND of all counter bits, combined with the
clock through a second NAND and an inverter. This RTL keeps the same behaviour
with a synchronous enable, `step && !(&count)`. A gated clock is poor practice
in synthesized logic and gives no functional difference. The counter's own
clock in the original is modelled by the `step` strobe. That way the annealing
rate can be slower than the LFSR clock; tie `step` high for one step per
clock.

With the counter stepping at a constant rate from 0, P(1) falls linearly with
time. The cumulative number of 1s, normalised to its final value and with time
normalised so that saturation happens at t = t_s, is then

    CC(t) = 2 (t/t_s) - (t/t_s)^2      for t <= t_s,   1 afterwards.

With t_s = 0.8 this is 2.5 t - 1.5625 t², close to the published least-squares
fit -1.5396 t² + 2.4658 t + 0.0055. `tb_prng_top` reproduces that experiment.

## The comparator

`digital_comparator` keeps only the "greater than" output of a three-output
magnitude comparator. It scans from the most significant bit down, and the
first position where `a` and `b` differ decides. The result is 1 exactly when
`a > b`. For a uniform `a`, this happens for 2^M - 1 - `b` of the 2^M possible
values, which gives the P(1) formula above. At `b` = 2^M - 1 the output can
never be 1. At `b` = 0 it is 1 except when `a` = 0.

## Verification

Each testbench prints `TB_RESULT checks=<n> failures=<n>` and has a watchdog.
The results at the time of writing:

* `tb_lfsr`: the three-stage example against a flip-flop model (period 7), a
  16-stage primitive register for its exact period of 65535 with no early
  repeat, and the default 32-stage register against a model step by step.
* `tb_xor_taps`: four streams. Every set has five taps, no two of the 32
  sets share a spacing, and every output bit equals the XOR of its taps. The
  histogram of `A` over 65536 LFSR steps ranges from 205 to 308, against a
  mean of 256.
* `tb_threshold_controller`: reset, load, one count per step, 255 steps from 0
  to saturation, hold at the maximum, fixed hold, load priority, and 5000
  random cycles against a model.
* `tb_digital_comparator`: all 65536 input pairs, plus the 1-count for every
  threshold.
* `tb_prng_top` (four streams): every output bit against a reference model in
  every cycle. Measured P(1) at fixed thresholds 27, 127, 227, 0 and 255 is
  within ±0.02 of the formula; the worst error was about 0.004. Over 8192 bits
  at T = 127, the largest |cross-correlation| between streams at lags -8..8
  was 0.032, and the largest |auto-correlation| at lags 1..16 was 0.021.
  Stepping every clock, the threshold saturates after exactly 255 clocks, and
  then the outputs stay 0. In a slow anneal (one step per 64 clocks), the
  normalised cumulative count stays within 0.008 of the published quadratic
  fit at t = 0.1 ... 0.7. The testbench also counts that each mechanism
  occurred: load, fixed hold, count, hold at the maximum, and differing
  streams.
* `tb_prng_correlation` (two streams): 16384 bits at each threshold 7, 27,
  ..., 247. At every threshold, the largest |cross-correlation| (lags
  -16..16) was at most 0.022, and the largest |auto-correlation| (lags 1..16)
  at most 0.026. The limit checked is 0.06; one standard deviation of the
  estimate is about 0.008.
* `tb_prng_full`: the default configuration, unmodified. It sweeps the
  threshold over 0, 7, 27, ..., 247, 255 (8192 bits each; all within ±0.025 of
  the formula), then anneals from 0 to saturation.

## Simulating

With Verilator 5, from the folder that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -y rtl -y tb \
    rtl/prng_pkg.sv tb/prng_ref_pkg.sv tb/tb_prng_top.sv \
    --top-module tb_prng_top -o sim
./obj_dir/sim
```

Replace `tb_prng_top` with any other testbench name. The testbenches that do not
use the reference model do not need `tb/prng_ref_pkg.sv`, but listing it does
no harm. Every run finishes in well under a second.

To change the sizes, override `N`, `M`, `K` and `NUM_SEQ` on `prng_top`. For
`N` other than 32, also pass a matching primitive polynomial as `POLY` (and
a non-zero `SEED`); `prng_top` forwards both to the LFSR. The reference
model in `tb/prng_ref_pkg.sv` is written for N = 32, M = 8 and K = 5.

## Where this RTL departs from, or adds to, the original design

* **Own choices, not published**: the 32-bit polynomial, the seed, the reset,
  K = 5 taps per XOR gate, and the hashed tap assignment. The tap-spacing
  rule alone does not make the streams uncorrelated (see the tap section),
  so this RTL also requires linear independence.
* **Counter clocking**: the original cuts the counter's clock off with gates.
  Here a synchronous count enable does it, and a `step` strobe stands in for
  the counter's clock, whose rate relative to the LFSR clock was not given.
* **Load**: the initial value is loaded synchronously, with priority over
  counting.
* **Number of streams**: the default is one. The published layout and its
  energy-per-bit figure (1.14 mW at 2 GHz, one bit per clock) describe a
  single stream. The multi-stream version is the `NUM_SEQ` parameter. A
  cross-correlation study needs `NUM_SEQ` of 2 or more.
* **Threshold direction in the anneal**: in the published anneal experiment,
  the threshold starts at 0 and increases, so the density of 1s decreases.
  One figure legend speaks of a "threshold linear decrease". The RTL follows
  the text: the counter counts up.
* **Not modelled**: the physical implementation (65 nm layout, area, power,
  2 GHz operation).
