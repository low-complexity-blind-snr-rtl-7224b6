# Blind single-snapshot SNR estimator for mmWave antenna arrays — RTL

A base station with a large antenna array sees a millimetre-wave user
through only a few propagation paths. After a spatial DFT, which maps the
antenna vector into *beamspace*, most of the received energy therefore sits
in a handful of beams. Every other beam carries noise only. This design
uses that sparsity to estimate three things from **one** received vector,
with no pilots, no iterations and no averaging over time:

* the average noise power `N0^`,
* the average signal power `Px^`,
* the SNR `rho^ = Px^ / N0^`.

The idea fits in one sentence. Sort the beam powers in ascending order, walk
up from the smallest, and stop at the first jump that is too large to be
the next value of a noise-only sequence. Everything below the jump is
noise, so its mean is the noise power.

This repository holds synthesizable SystemVerilog for everything after the
beamspace transform: the squaring unit, the sorter, the separating unit,
the signal-power unit and the SNR divider. It also holds self-checking
testbenches for each of them and for the whole chain. The FFT itself is an
off-the-shelf streaming core and is not included. A behavioural DFT model
in `tb/` stands in for it in the end-to-end test.

## The estimate

Let `p_1 <= p_2 <= ... <= p_M` be the sorted beam powers `|ybar_m|^2` of one
vector of `M` antennas. The unit computes:

```
S_m     = p_1 + ... + p_m                  running sum
Delta_m = p_{m+1} - p_m                    gap to the next value
hit at m  if   m * Delta_m >= gamma(m) * S_m    (and S_m != 0)
m*      = first m in 1..M-1 that hits, else M
N0^     = S_m* / m*
Px^     = max(S_M / M - N0^, 0)
rho^    = Px^ / N0^
```

The hit test is the gap rule `Delta_m >= gamma * mean(p_1..p_m)`, with
both sides multiplied by `m`. This removes the division. For pure complex
Gaussian noise the powers are exponential, and the gaps between sorted
exponential samples are themselves exponential with known means. A gap many
times larger than the running mean is therefore unlikely to be noise. The
threshold `gamma` depends on where the search is. It takes one of three
powers of two:

| interval of m | default | parameter |
|---|---|---|
| `1 .. M1` (M1 = M/4) | gamma_1 = 16 | `G1 = 4` |
| `M1+1 .. M2` (M2 = 3M/4) | gamma_2 = 8 | `G2 = 3` |
| `M2+1 .. M-1` | gamma_3 = 4 | `G3 = 2` |

Because `gamma = 2^G`, the multiplication by `gamma` is a shift.

The original description gives the structure of `gamma` (three
power-of-two levels, each the median of a per-index threshold over its
interval) but no numbers. The defaults above are this design's own. They
come from a Monte-Carlo run of the rule on sparse vectors (M = 64, one to
three beams, -10 to +20 dB SNR): the mean of `N0^/N0` stayed between 0.93
and 0.99. Smaller thresholds stop too early on noise and underestimate
`N0`. Larger ones let signal beams into the mean. Any integer `G` from -8 to
8 is accepted. A negative `G` is applied as a left shift of the other side
of the comparison, so it costs no precision.

**First hit, not last.** The search ends at the *first* index that hits.
(An algorithm listing of the method overwrites `m*` at every hit, which
gives the last one. On sparse vectors the last hit falls between two signal
beams and badly overestimates `N0`.)

**Zero sums never hit.** With 8 fractional bits, the smallest powers
often truncate to 0. Then `S_1 = 0`, and `m * Delta >= gamma * 0` would
stop the search at `m = 1` with `N0^ = 0`. In exact arithmetic `S_m` is
never zero. The unit therefore refuses a hit while `S_m = 0`, and an
all-zero vector falls through to `m* = M`.

## Data path

```
 beamspace       +--------+  |y|^2   +-------------+ sorted  +-----------------+  N0^, S_M
 Re, Im  ------->| sq_mag |--------->| sorting_unit|-------->| separating_unit |----------+
 (from FFT)      +--------+          +-------------+         +-----------------+          |
                                     \________ noise_power_estimator ________/            |
                                                                                          v
                                    rho^  +-------------+   Px^   +-------------------+
                          out_est <-------| snr_divider |<--------| signal_power_unit |
                                          +-------------+         +-------------------+
```

| file | role |
|---|---|
| `rtl/snr_pkg.sv` | word lengths, fixed-point types, the `est_t` result bundle, saturating add |
| `rtl/sq_mag.sv` | `re^2 + im^2`, one sample per clock |
| `rtl/sorting_unit.sv` | systolic insertion sorter with load / flush / output FSM |
| `rtl/separating_unit.sv` | running sum, gap, hit test, `S_m*` capture, 1/m table, `N0^` |
| `rtl/noise_power_estimator.sv` | sorter followed by separating unit |
| `rtl/signal_power_unit.sv` | `Px^ = max(S_M >> log2 M - N0^, 0)` |
| `rtl/snr_divider.sv` | radix-2 restoring divider, 24-bit quotient |
| `rtl/snr_estimator_top.sv` | the chain above; holds N0^, S_M, Px^ until rho^ is ready |

The top takes one complex beamspace sample per clock. A sample is taken on
a clock edge where `in_valid` and `in_ready` are both high. After `M`
samples, the top emits one `out_valid` pulse with `out_est` = {`n0`, `sm`,
`px`, `rho`}. It also outputs `out_hit` (a boundary was found), `out_mstar`
(the number of beams counted as noise) and `out_clamped` (the signal power
was clamped to zero). The order of samples within a vector does not matter.

## The systolic sorter

This is the part with the most timing subtlety. The sorter is a chain of `M`
stages. Each stage has:

* a *kept* register, the smallest value the stage has seen so far, with a
  valid bit;
* a *pass* register that feeds the next stage;
* one comparator.

A value arriving at a stage is compared with the kept value. The smaller
one stays in the stage and the larger one moves into the pass register. An
empty stage simply takes the value. Each stage does one compare per clock,
and each comparator output goes straight to a register. The longest
combinational path is therefore one comparator and one multiplexer,
whatever `M` is.

Stage 1 sees every value and keeps the minimum. Stage 2 sees all but the
minimum and keeps the second smallest, and so on. So the result does not
depend on how the values are spaced in time. The FSM has three states:

| state | length | what happens |
|---|---|---|
| LOAD | M accepted values | `in_ready = 1`; value enters stage 1 |
| FLUSH | M-1 clocks | values still travelling in pass registers settle; the last value in can move at most M-1 stages |
| OUT | M clocks | kept registers shift one stage towards stage 1; stage 1's value is the output |

Output comes out smallest first, flagged by `out_first` and `out_last`. It
is taken at the stage-1 end of the chain because, with the smaller value
kept, that is where the ascending order starts. (A drawing of the original
architecture shows the sorted stream leaving at stage M. That matches a
chain that keeps the larger value. The two cannot both hold, and the
kept-smaller rule is the one stated in words.)

The sorter holds one vector at a time. The next vector can only load after
the current one has drained, so a vector occupies it for `3M - 1` clocks.

## The separating unit

The sorted values arrive one per clock. The unit keeps the previous sample
`p_m`, the sum `S_{m-1}` and the index `m`. When `p_{m+1}` arrives, it
evaluates in the same clock:

```
S_m     = sat16(S_{m-1} + p_m)
Delta_m = p_{m+1} - p_m
lhs = m * Delta_m  (one multiplier)     rhs = S_m << G(m)   (G < 0: lhs << -G instead)
```

On the first `lhs >= rhs` (with `S_m != 0`), it latches `S_m` and `m`.
After the last sample, one more clock forms `S_M`. If nothing hit, it
selects `S_M` and `m* = M`. The next clock multiplies `S_m*` by the table
entry `round(2^16 / m*)`. The table has `M + 1` entries of 17 bits and is
built by a constant function at elaboration. The product is shifted right
by 16, which truncates `N0^` to 8 fractional bits. `N0^` and `S_M` are
valid 3 clock edges after the edge that took the last sorted sample.

## Number formats

All words are fixed point with 8 fractional bits.

| quantity | bits | format |
|---|---|---|
| beamspace sample Re, Im | 10 | signed, range [-2, 2) |
| `|ybar|^2` | 16 | unsigned, truncated from 16 to 8 fractional bits |
| `S_m`, `S_M` | 16 | unsigned, saturating at 0xFFFF |
| `N0^`, `Px^` | 16 | unsigned |
| `rho^` | 24 | unsigned, all ones when `N0^ = 0` |

These widths are those of the published implementation. The squared
magnitude of a 10-bit sample is at most 8.0, so the squaring never
overflows. Two consequences are worth knowing before this is used:

* **Dynamic range.** A beam can carry at most power 8.0, and the weakest
  representable power is 1/256. An array of `M` antennas concentrates
  `M * Px` into a few beams. At 64 antennas and 20 dB SNR, the noise must
  therefore sit within a few LSBs for the strong beam to fit. The
  estimates then become limited by quantisation (see the statistics that
  `tb_full_size` prints). The input must be scaled by the FFT (or before
  it) so that the strongest beam stays inside +-2.
* **The zero clamp of `Px^` is almost never used at these widths.** The
  noise mean can only exceed `S_M / M` when the 16-bit sum saturates and
  the hit comes late with `gamma < 1`. With the default gammas (all >= 4)
  and powers <= 8.0 this cannot happen. The end-to-end test exercises the
  clamp with `G3 = -2`.

## Timing

With samples back to back, `out_valid` is set by clock edge number
`3M + 28` after the edge that accepted a vector's first sample:

| stage | clocks |
|---|---|
| squaring | 1 |
| sorter: load, flush, output | M + (M-1) + M |
| separating unit after the last sorted sample | 3 |
| signal power | 1 |
| divider (load + 24 bits) and output register | 26 |

| M | this RTL | published, sorting+separating+signal/SNR units |
|---|---|---|
| 16 | 76 | 57 + 39 = 96 |
| 32 | 124 | 98 + 39 = 137 |
| 64 | 220 | 201 + 39 = 240 |
| 128 | 412 | 389 + 39 = 428 |

The published totals also include the FFT, which adds 84 to 351 clocks
depending on `M`; the right-hand column leaves it out. A new vector can be accepted every `3M` clocks.
The published throughput, `f_clk / M` vectors per second, would need
loading to overlap draining. That overlap is not described, and this RTL
does not do it.

## Where this RTL departs from, or adds to, the published design

* The FFT (a vendor streaming core) is outside the top. The top's input is
  its beamspace output stream.
* The values of `gamma_1..3`, `M1` and `M2` are this design's own (see
  above).
* First hit rather than last hit. No hit while the running sum is zero.
* Each sorter stage has two registers (kept and pass), so that each stage
  does one compare per clock. Output is taken at stage 1.
* The separating unit counts `m` itself instead of receiving it.
* Rounding choices: squares and `N0^` are truncated; the 1/m table is
  rounded to nearest; the sum saturates; `rho^` saturates to all ones on a
  zero noise estimate.
* The SNR divider is a plain radix-2 restoring divider (25 clocks). The
  published signal-power-plus-SNR stage takes 39.
* Throughput is one vector per `3M` clocks, not per `M`.
* Handshake and reset: `valid`/`ready` on the input, a one-clock
  `out_valid`, and an asynchronous active-low reset. None of these is
  specified in the original description.

## Verification

Each testbench checks the design against an independent reference model,
`tb/snr_ref_pkg.sv`. The model sorts with the queue `sort()` method,
evaluates the hit rule in real arithmetic and recomputes the table entries.
Each testbench prints `TB_RESULT checks=N failures=F` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_sq_mag` | every output against `(re^2+im^2) >> 8`, including -2.0 corners; 1-clock latency |
| `tb_sorting_unit` (M=16) | ascending output equal to the sorted input for random, equal, ascending, descending and duplicate-heavy vectors, with and without idle gaps; first/last flags; first output M-1 clocks after load ends; `in_ready` |
| `tb_separating_unit` (M=16) | N0^, S_M, hit, m* for noise-only, sparse, dense, zero and saturating vectors; hits in all three gamma intervals and the fallback; 3-edge latency |
| `tb_noise_power_estimator` (M=32) | sorter + separator on shuffled vectors; latency 3M |
| `tb_signal_power_unit` | Px^ and the clamp flag for random and edge pairs |
| `tb_snr_divider` | quotient, divide-by-zero, busy, 25-clock latency |
| `tb_snr_estimator_top` (M=64, G3=-2) | every output of 60 back-to-back vectors; latency 3M+28; counts that each mechanism happened: fallback, hit in each gamma interval, clamp, saturated sum, zero noise estimate, back-pressure |
| `tb_workload_sizes` (M=16, 32, 128) | the other published array sizes, each in its own `size_run` harness: antenna-domain channels through the behavioural DFT into the top, exact match with the model, latency 3M+28 |
| `tb_full_size` (all defaults) | antenna-domain sparse channels (1-3 paths, QPSK, AWGN) through the behavioural DFT into the top at -10/0/10/20 dB; exact match with the model; latency; prints mean N0^/N0, Px^/N0 and rho^ per SNR |

To run one with plain Verilator (from the repository root):

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/snr_pkg.sv tb/snr_ref_pkg.sv tb/tb_full_size.sv --top-module tb_full_size
./obj_dir/Vtb_full_size
```

Each testbench finishes in a few seconds.

## Changing the design

* `M` (a power of two, at least 16 so that the divider is free for each new
  vector) sets the vector length. It is a parameter of every module and of
  the top.
* `M1`, `M2`, `G1`, `G2`, `G3` set the threshold intervals and levels.
* Word lengths live in `snr_pkg`. `SUM_W` is the one most worth widening
  for `M = 128` or for strong inputs, since the 16-bit sum saturates once
  the mean power exceeds `65535 / (256 M)`.
