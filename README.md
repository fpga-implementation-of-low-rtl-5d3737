# Roots-of-Unity Equalizer: a multiplierless chromatic-dispersion filter

Chromatic dispersion (CD) in optical fiber spreads each transmitted symbol over
many neighbouring samples. A coherent receiver undoes it with a long complex FIR
filter, and that filter is usually one of the most power-hungry blocks of the
receiver DSP. Implementations normally work in the frequency domain (FFT,
multiply, inverse FFT), which needs many multipliers.

The ideal CD-compensating filter has taps of almost constant magnitude whose
phase follows a parabola in the tap index. The Roots-of-Unity Equalizer (RUE)
keeps only the phase and rounds it to one of NR = 30 fixed angles, the 30th
roots of unity:

    h[k]  ~  theta_{r[k]},   theta_j = exp(j * 2*pi * j / 30)   (12 degree steps)

The table r[k] ("the mapping") is the only thing that depends on the fiber. It is
written at run time by an external controller that estimates the dispersion.
The hardware itself never changes with the fiber length.

This repository holds synthesizable SystemVerilog for that equalizer: one
filter unit for one complex stream, following the architecture of the
published RUE (*FPGA Implementation of Low-Power Multiplierless Pre-Processing
Free Chromatic Dispersion Equalizer*, Gomes, Freire, Prilepsky, Turitsyn).
Everything the publication leaves open is this implementation's own choice,
and the sections below say which parts those are.

## From a convolution to shifts and adds

The output of the filter is

    Y = sum_k x[n-k] * theta_{r[k]}

There are up to a few hundred taps, but only 30 distinct coefficients. Group the
samples by the root they are multiplied with:

    X^S_j = sum over the taps k with r[k] = j of x[n-k]       (the "pre-sums")
    Y     = sum_j X^S_j * theta_j

Since theta_j = theta_1^j, Horner's rule turns the 30 products into 29 rotations
by the same constant:

    Y = X^S_0 + theta_1 (X^S_1 + theta_1 (X^S_2 + ... + theta_1 X^S_29))

Rotation by the fixed angle of 12 degrees needs no multiplier. With
theta_1 held in Q1.15 (cos = 32052/2^15, sin = 6813/2^15), each product with a
constant is a short sum of shifted copies of the operand:

    32052 = 2^15 - 2^10 + 2^8 + 2^6 - 2^4 + 2^2
     6813 = 2^13 - 2^11 + 2^9 + 2^7 + 2^5 - 2^2 + 2^0

These are canonical-signed-digit (CSD) expansions. `theta_rotator` computes them
at elaboration from the two integer parameters, so changing the constants needs
no hand edits. The whole filter is therefore built from adders, and its
structure is the same for every fiber length. A shorter fiber only marks more
taps as unused in the mapping.

## The datapath

```
            in_valid/in_ready                                    out_valid/out_ready
 in_sample ------------------> sample_window ---x[n-k]--+                +--> out_sample
                                   ^ rd_k               |                |
                                   | tap_k              v                |
 map_wr_* --> mapping_memory --r[k]--> presum_stage (Sigma + demux,      |
 (controller                                     30 pre-sum registers)   |
  writes r[k])                                          | X^S_0..29      |
                                                        v                |
                                      multiplierless_stage (mux, Sigma,  |
                                         theta_rotator in the feedback)  |
                                                        | Y              |
                                                        v                |
                                                 output_control ---------+
                    rue_controller sequences the three stages per sample
```

| Module | Role |
|---|---|
| `rue_pkg` | Sizes (NR = 30, 16-bit samples, MAX_TAPS = 256), theta_1 constants, `sample_t`, `map_entry_t`, controller states |
| `sample_window` | Circular register buffer of the last MAX_TAPS input samples; read port addressed by age k, so it returns x[n-k] |
| `mapping_memory` | The table r[k]: one `{used, root}` entry per tap, written by the external controller, read one tap per clock |
| `presum_stage` | Clears the 30 complex pre-sum registers, then for k = 0..MAX_TAPS-1 adds x[n-k] into X^S_{r[k]} |
| `theta_rotator` | Combinational multiplication by theta_1 with CSD shifts and adds, rounded |
| `multiplierless_stage` | Horner loop: acc <= X^S_j + theta_1 * acc for j = 29 down to 0 |
| `output_control` | Right shift by `out_shift`, saturation to 16 bits, valid/ready output register |
| `rue_controller` | FSM IDLE -> PRESUM -> ROTATE -> OUTPUT, one pass per input sample |
| `rue_top` | Wires the above together |

The pre-sum stage and the multiplierless stage do not depend on the fiber. Only
the contents of `mapping_memory` do.

## The mapping table and how to program it

This is the one interface that needs care.

* **Indexing.** Entry k belongs to the sample of age k: k = 0 is the sample that
  has just been accepted, and k = MAX_TAPS-1 is the oldest sample in the window.
  Whatever ordering the estimator uses for its filter taps (centred, reversed),
  it must be translated into this one.
* **Entry format** (`map_entry_t`): `used` (1 bit) and `root` (5 bits, 0..29).
  Root j stands for the coefficient exp(+j * 12 deg * j), so the rotation is
  counter-clockwise. An entry with `used = 0`, or with a root of 30 or more,
  contributes nothing. After reset every entry is unused and the filter
  outputs zeros.
* **Filter length.** The hardware always walks all MAX_TAPS entries. A filter
  of N taps sets entries 0..N-1 and leaves the rest unused. The timing is the
  same for every N.
* **Writing.** `map_wr_en`, `map_wr_k` and `map_wr_entry` write one entry per
  clock. A write is visible one cycle later, and the core keeps running while
  the table is written. An output whose pre-sum pass overlaps a rewrite can mix
  old and new entries. To switch cleanly between mappings, hold `in_valid` low
  until the outstanding output has left, rewrite the table, and resume. The
  sample history is kept across the switch.
* **Where r[k] comes from.** The published method is a dispersion scan run
  off-chip. It tries filter lengths N. For each one it derives the tap phases
  phi[k] = (pi/4 + pi*alpha*k^2) mod 2*pi, with k counted from the centre tap.
  It rounds them to roots, r[k] = round(phi[k] / 12 deg) mod 30, and keeps
  the N that gives the best error rate. The publication prints the curvature
  as alpha = sqrt(1/(N-1)). The curvature that matches the dispersion filter
  is alpha = 1/(N-1): for the usual tap count N, N - 1 is about
  D*lambda^2*z/(c*T^2). With the square root, the equalizer does not
  equalize at all; see "Finding the fiber length" below. Any other estimator
  that produces tap phases works the same way. A data-aided estimator, for
  example, could round the phases of the ideal dispersion filter. The
  estimator is not part of this RTL. The testbenches model it in software.

## Timing

One input sample gives one output sample. Every sample goes through the same
fixed sequence:

| cycle (relative to acceptance) | what happens |
|---|---|
| 0 | `in_valid && in_ready`: the sample is written into the window and the pre-sum pass starts (the pre-sum registers clear) |
| 1 .. MAX_TAPS | one tap per clock accumulated into the pre-sums |
| MAX_TAPS + 1 | `presum_stage.done`; Horner pass starts |
| MAX_TAPS + 2 .. MAX_TAPS + NR + 1 | one root per clock |
| MAX_TAPS + NR + 2 | `multiplierless_stage.done` |
| MAX_TAPS + NR + 3 | result loaded into the output register (if it is free) |
| MAX_TAPS + NR + 4 | `out_valid` high; `in_ready` high again |

At the defaults this is 290 clocks per sample, or 0.0034 samples per clock. At
250 MHz that is 0.86 MS/s per filter unit. `in_ready` is high only in IDLE. If
the receiver holds `out_ready` low, the next result waits in OUTPUT and the
input stalls with it. The two stages never overlap, because they share one set
of pre-sum registers. Assertions in `rue_top`, `presum_stage`,
`multiplierless_stage` and `output_control` check these rules.

## Number formats

* Input and output samples: 16-bit two's complement I and Q (`sample_t`). The
  16-bit width is the published quantization.
* Pre-sums and Horner accumulator: ACC_W = 16 + log2(MAX_TAPS) + 2 = 26 bits.
  A pre-sum of 256 full-scale samples needs 24 bits. The Horner result is
  bounded by the sum of all sample magnitudes times sqrt(2), which needs 25
  bits. Nothing can overflow.
* theta_1: Q1.15. Each rotation rounds half-up at 2^-15. The quantized theta_1
  has magnitude 1 + 2.7e-6, so 29 rotations add well under one part in 10^4 of
  gain error plus at most about 15 LSB of rounding.
* Output: `out = saturate16(acc >>> out_shift)` (the shift rounds toward minus
  infinity). All coefficients have magnitude 1, so the filter gain is about
  sqrt(N) for random data. `out_shift` brings the result back into 16 bits.
  The remaining constant scale is left to the adaptive equalizer that follows
  CD compensation in a coherent receiver.

## Sizes and what fits

| Parameter | Default | Origin |
|---|---|---|
| NR (roots) | 30 | published choice (Q-factor penalty levels off above 28 roots) |
| sample width | 16 | published |
| MAX_TAPS | 256 | this design: enough for 8 spans of 80 km |
| ACC_W | 26 | this design, derived from MAX_TAPS |

The filter lengths below are estimates. They use the standard dispersion tap
count for standard single-mode fiber (D = 16.8 ps/nm/km at 1550 nm, 32 GBd at
2 samples per symbol), reduced to the published working point of 60 % of that
count plus two taps:

| Reach | taps needed | fits in 256 |
|---|---|---|
| 1 span (80 km) | 29 | yes |
| 2 spans | 55 | yes |
| 4 spans | 108 | yes |
| 6 spans | 161 | yes |
| 8 spans (640 km) | 214 | yes |
| 10 spans | 267 | no |
| 12 spans | 319 | no |
| 16 spans (1280 km) | 425 | no: set MAX_TAPS = 512 |

MAX_TAPS is an ordinary parameter. Raising it to 512 covers 16 spans, adds one
accumulator bit, and makes each sample take 256 more clocks.

After generic synthesis, the default `rue_top` has about 230 word-level cells
(adders, multiplexers, comparators, no multipliers), 1674 flip-flop bits and
9728 bits of array storage. The storage is the 256 x 32-bit sample window and
the 256 x 6-bit mapping table. Both are written as register arrays with an
asynchronous read, so an FPGA flow maps them to LUT RAM or flip-flops rather
than block RAM. For comparison, the published FPGA unit (8-span reach) used
2329 LUTs, 2124 flip-flops, no block RAM and no DSP slices. That design is
faster (see below), so its numbers are not directly comparable.

## How well it equalizes

`rue_cd_tb` runs the default-size RTL on a real dispersion problem. It builds a
16-QAM signal at 2 samples per symbol, band-limited to the symbol rate, and
applies the exact quadratic-phase dispersion of standard single-mode fiber in
the frequency domain. It then takes the ideal compensating impulse response
and keeps N = 0.6 x (usual tap count) + 2 taps, rounded to odd, around its
centre. Each tap's phase is rounded to the nearest root to give r[k]. The
testbench writes that mapping, streams the quantized signal through the
equalizer, and compares the symbol-spaced outputs with the transmitted symbols
after fitting one complex gain. There is no noise and no nonlinearity, so these
figures measure only what the root approximation and the shortened filter
cost:

| Reach | taps N | SNR before | SNR after | symbol errors (of 2048) |
|---|---|---|---|---|
| 80 km | 29 | -7.5 dB | 14.5 dB | 39 |
| 160 km | 55 | -11.0 dB | 17.2 dB | 0 |
| 320 km | 109 | -14.4 dB | 19.5 dB | 0 |
| 640 km | 213 | -16.5 dB | 21.2 dB | 0 |

The shortest filter is the weakest. With only 29 taps, truncating the impulse
response costs more than the 12 degree phase steps do. The testbench requires
at least 12 dB after equalization and a gain of at least 8 dB.

## Finding the fiber length

`rue_scan_tb` plays the estimation controller with the RTL in the loop. It
does not know the fiber length. For each candidate N it writes the scanning
mapping (alpha = 1/(N-1), taps 0..N-1 used) and streams 768 samples of a
dispersed 16-QAM signal. It then scores the output SNR after a complex gain
fit. A noiseless channel gives zero bit errors for most N, so SNR replaces the
BER that the publication uses. A coarse pass steps N by 2 x spans, and a fine
pass refines it in steps of 2:

| Reach | usual tap count | N found | SNR at N found | same N, alpha = sqrt(1/(N-1)) |
|---|---|---|---|---|
| 80 km | 45 | 45 | 17.8 dB | -9.3 dB |
| 160 km | 89 | 89 | 20.0 dB | -10.9 dB |
| 320 km | 177 | 177 | 21.2 dB | -18.3 dB |

The fine pass matters for long fibers. A change of N by 4 at N = 177 moves the
phase of the outer taps by about 3 radians. At 640 km the full-length scan
would need 353 taps, more than the 256 built. The shortened 213-tap filter
of the previous section does fit.

## Departures from the published design

* **Throughput.** The published FPGA unit runs at about 0.04 samples per clock.
  This implementation handles one tap and one root per clock, and gets
  1/(MAX_TAPS + NR + 4), about 0.0034 samples per clock at the defaults. The
  publication does not describe how its unit is parallelized. Reaching 0.04
  would take about 12 taps per clock in the pre-sum stage and an overlapped
  Horner pass. Neither is built here.
* **Input window.** The published architecture diagram feeds input samples
  straight into the pre-sum adder. Here a circular buffer of the last MAX_TAPS
  samples is added, so that every output can re-read its whole window.
* **Controller, handshakes, widths, rounding, output scaling, reset.** None of
  these are published. The choices above are this implementation's.
* **Mapping updates** take effect immediately. There is no shadow table.
* **Counting additions.** The publication counts 2(N-1) real additions per
  output for an N-tap filter. This datapath always performs one complex
  pre-sum addition for each of the MAX_TAPS entries, used or not. It then
  performs 30 complex Horner additions, and each rotation adds 26 shifted
  terms. The fixed pass over all entries is the price of a schedule that
  does not depend on the fiber.
* **Not included:** the dispersion-estimation microcontroller and its scanning
  software, and the FFT-based reference equalizer that the publication compares
  against.

## Verification

Each module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| Testbench | What it checks |
|---|---|
| `theta_rotator_tb` | bit-exact against integer multiplication; within 1 LSB + 1e-5 of an ideal 12 degree rotation; 30 rotations return to the start |
| `sample_window_tb` | depths 8 and 6 (wrap-around), random pushes with gaps, every age read back |
| `mapping_memory_tb` | reset state, the example rows 0->7, 1->13, 2->0, write/read-back, roots >= NR read as unused, random rewrites |
| `presum_stage_tb` | random samples and mappings, full-scale extremes, pass length MAX_TAPS + 1 |
| `multiplierless_stage_tb` | bit-exact Horner model and ideal sum_j X_j exp(j*12deg*j); single-root vectors; pass length NR + 1 |
| `output_control_tb` | shift, saturation, hold under back-pressure, single transfer |
| `rue_controller_tb` | FSM protocol against randomly timed stage models |
| `rue_top_tb` | full default size. Mappings for 1, 2, 4 and 8 spans from the scanning rule, then all 256 taps with random roots. Every output is compared bit-exactly, and the model is compared with the direct convolution. Checks the 290-cycle latency and sample period. Counts unused taps, run-time mapping updates, input gaps, input back-pressure, output stalls and saturation, and fails if any of them never happened. |
| `rue_cd_tb` | full default size. Equalization of real fiber dispersion for 1, 2, 4 and 8 spans (see above). |
| `rue_scan_tb` | full default size. Dispersion scan with the equalizer in the loop for 1, 2 and 4 spans (see above). |

`cd_sim_pkg` holds the shared fiber and signal models: FFT, dispersion phase,
16-QAM generation and SNR fit.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl --top-module rue_top_tb \
    rtl/rue_pkg.sv tb/rue_top_tb.sv
./obj_dir/Vrue_top_tb
```

The two dispersion testbenches also need the model package:

```
verilator --binary --timing --assert -Irtl -y rtl --top-module rue_scan_tb \
    rtl/rue_pkg.sv tb/cd_sim_pkg.sv tb/rue_scan_tb.sv
./obj_dir/Vrue_scan_tb
```

Replace the testbench name to run any other one. `-y rtl` lets
Verilator find the modules by file name. The testbenches are two-state-safe:
they initialise or reset everything they read.
