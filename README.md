# Frequency-domain adaptive RFI canceller for a single-dish radio telescope

A radio telescope that shares the sky with transmitters receives their
interference (RFI) on top of a sky signal that is many orders of magnitude
weaker. This design removes the interference in real time. A second,
*reference* antenna points at the interference and picks up little sky. Both
antenna signals are digitised at 2 GSPS and cut into 4096 spectral channels,
each 244 kHz wide, covering DC to 1 GHz. In every channel an adaptive complex
weight learns how the interference seen by the reference antenna appears in the
primary antenna. That weighted reference spectrum is then subtracted from the
primary spectrum. The cleaned spectrum is integrated over a long time
(536 ms by default), as an astronomical spectrometer back-end would do.

All of it is written in synthesizable SystemVerilog (IEEE 1800-2017). It runs
at 8 samples per clock per antenna, so a 250 MHz clock handles the full
2 GSPS.

## The cancellation loop

Take one channel `n`. During spectrum `i` the primary antenna gives
`X = A + I`, where `A` is the sky and `I` the interference. The reference
antenna gives `R`, whose interference part is related to `I` by an unknown
complex gain. The filter output is

    F_i = X_i - G_i * R_i

The weight is adapted with a least-mean-squares step, accumulated over `N`
spectra:

    G_{i+1} = G_i + (epsilon / N) * sum over the N spectra of F * conj(R)
    G_0     = 0

Every channel has its own `G`, and channels never interact. The loop settles
when `F` is uncorrelated with `R`, which means all of `R` has been taken out
of `X`.

The loop behaves like a first-order system. Here is how to reason about the
settings:

* **Convergence.** With a steady reference power `r = |R|^2`, the error
  shrinks by `b = 1 - epsilon*r` per update. The time constant is about
  `1/(epsilon*r)` updates. The loop is stable for `0 < epsilon*r < 2`.
* **Choosing epsilon.** `epsilon*r` close to 1 converges in a few spectra.
  Because epsilon is global, the channel with the strongest reference sets the
  limit. Weaker channels converge more slowly.
* **Added noise.** A fast loop pays in noise. Each update also picks up the
  sky noise that is correlated by chance, so the cleaned channel ends up
  about `(epsilon*r)^2 / (1 - b^2)` times the sky power above its ideal level.
  That is 0.45 at `epsilon*r = 0.62` with N = 1. Larger `N` averages over more
  spectra and lowers this term.
* **Number formats.** `N = 2**log2n` (1 to 1024) and
  `epsilon = 2**-eps_shift`. Both are run-time inputs. `epsilon` is expressed
  in the units of the FFT output words (see *Fixed-point formats*).

## Data flow

    adc_prim[8] ─► fft_wideband_real ─X─┐
                                          ├─► adaptive_filter ×4 ─F─► f_*
    adc_ref[8]  ─► fft_wideband_real ─R─┘            │
                                             spec_integrator ×4 ─► spec_*

The two FFTs share one valid strobe and run in lock step. Their outputs are
therefore channel-aligned, and an assertion in `rfi_filter_top` checks this.
Each FFT emits four channels per clock, on four output lanes. Channels in
different lanes are independent, so the adaptive filter and the integrator
are simply instantiated once per lane. Each copy handles 1024 channels
through one time-multiplexed datapath.

| module              | role                                                            |
|---------------------|-----------------------------------------------------------------|
| `rfi_pkg`           | shared sizes and word widths                                    |
| `fft_wideband_real` | 8192-point real FFT taking 8 samples per clock                  |
| `fft_r2sdf`         | streaming radix-2 SDF FFT, one sample per clock (one lane)      |
| `fft_sdf_stage`     | one radix-2 decimation-in-frequency delay-feedback stage        |
| `adaptive_filter`   | `F = X - G R` and the weight update for all channels of a lane  |
| `cmult`             | full-precision complex multiplier, optional conjugate           |
| `accum_bank`        | per-channel accumulator of `F conj(R)` over N spectra           |
| `gain_scale`        | the `epsilon/N` scaling: one rounding, saturating shift         |
| `gain_update`       | per-channel weight memory, `G <- G + delta` or `G <- 0`         |
| `spec_integrator`   | per-channel `|F|^2` integration over `2**int_log2` spectra      |
| `rfi_filter_top`    | the whole design                                                |

## The parallel FFT

At 2 GSPS and a realistic FPGA clock, eight samples arrive every clock, so a
textbook one-sample-per-clock pipeline FFT is not enough.
`fft_wideband_real` splits the 8192-point transform (P = 8192, L = 8 lanes,
M = P/L = 1024) as

    X[k1 + M*k2] = sum_{l=0}^{L-1} W_L^(l*k2) * ( W_P^(l*k1) * Y_l[k1] )

Lane `l` receives the samples `x[L*m + l]`, and `Y_l` is the M-point FFT of
that lane.

1. **Lane FFTs.** Each lane runs its own streaming 1024-point FFT
   (`fft_r2sdf`). It is a chain of radix-2 single-path delay-feedback stages
   with its imaginary input held at 0. All eight lanes see the same framing,
   so their outputs arrive together, in the same order.
2. **Rotation.** A per-lane ROM gives `W_P^(l*k1)`, and each lane output is
   multiplied by it.
3. **Cross-lane DFT.** An 8-point DFT is computed directly, as a constant
   matrix, across the lanes. Only outputs `k2 < 4` are kept, because the input
   is real and the upper half of the spectrum mirrors the lower half. Output
   lane `j` therefore carries channel `k1 + 1024*j`.

**Output order.** The lane FFTs use decimation in frequency, so `k1` comes out
in bit-reversed order. Nothing reorders it. Instead every output word is
labelled with its `k1`, on `out_bin`, `f_bin` and `spec_bin`. All downstream
memories are addressed by that label, so the order never matters. A spectrum
starts when the label is 0.

**Scaling.** `fft_shift` has one bit per radix-2 level, 13 in all:

* Bits 0 to 9 belong to the lane stages. Each set bit halves that stage's
  result, rounding half up.
* Bits 10 to 12 are the three levels of the 8-point cross-lane DFT. They are
  applied together as one shift.

Every stage saturates to 18 bits and raises `fft_ovf_*` when it clips. The
input word keeps one guard bit, and with every bit set each level at most
doubles and then halves. Clearing bits buys resolution for weak signals, at
the risk of clipping strong ones.

**Latency.** One SDF stage holds back half its block, so a complete spectrum
leaves about one spectrum time (1024 clocks) after its last sample went in.
The rotation and the cross-lane DFT add 2 clocks.

The first complete spectrum after reset comes out correct. The partial block
that the pipeline holds at start-up is suppressed.

## The loop in hardware (`adaptive_filter`)

One datapath serves every channel of a lane, one channel per clock:

| cycle | work                                                                               |
|-------|------------------------------------------------------------------------------------|
| c0    | read `G[bin]` from `gain_update`; work out the loop-control flags                 |
| c1    | `G*R` (`cmult`), round away the `G` fraction, subtract from `X`, saturate → `F`    |
| c2    | `F` leaves on `f_*`; `F*conj(R)` (`cmult`) goes into `accum_bank`                  |
| c3    | at the end of an accumulation cycle: scale by `epsilon/N` and write `G[bin]` back  |

**Latency and channel spacing.** `F` leaves two clocks after its `X`/`R`
input. `G[bin]` is written three clocks after it was read, so a channel may
come back no sooner than four clocks later. An assertion checks this.
Channels repeat every spectrum, 1024 clocks apart, so the limit is far away.

**Memory ports.** `G` stays fixed during an accumulation cycle, so the update
path can reuse the value read in c0: `G_new = G_old + delta`. The weight
memory then needs only one read port and one write port, which is a plain
block RAM. The accumulator does its read-modify-write within one clock.

**Loop control.** A spectrum starts at the sample whose bin is 0.

* While `loop_en` is low, every weight is written to 0 and `F = X`.
* Raising `loop_en` takes effect at a spectrum start, and only after one
  complete open spectrum. By then every weight has been cleared, which gives
  the `G_0 = 0` starting point channel by channel. A memory cannot be cleared
  in one clock.
* Lowering `loop_en` takes effect at the next spectrum start.
* `log2n` and `eps_shift` are sampled at the start of each accumulation
  cycle.
* `loop_active` shows the state, and `g_update` pulses for every weight
  write.

## The integrator (`spec_integrator`)

Each channel's `|F|^2` is summed over `2**int_log2` spectra. `int_log2 = 17`
gives 131072 spectra of 4.096 µs each, or 536.9 ms.

* The first integration starts at the first spectrum start after reset.
* During the last spectrum of an integration, each channel's total leaves on
  `spec_*` one clock after its last sample. `spec_last` marks the end of the
  dump.
* The next integration starts without a gap.

The sums are 64 bits wide. They cannot overflow, even at `int_log2 = 20` with
full-scale data.

## Fixed-point formats

| quantity              | format                                                               |
|-----------------------|----------------------------------------------------------------------|
| ADC samples           | 8-bit signed integers, placed at the top of the 18-bit FFT word      |
| FFT words, `X`, `R`, `F` | 18-bit signed, per real and imaginary part                        |
| twiddles              | 18-bit, Q2.16, computed at elaboration in integer arithmetic (see below) |
| weight `G`            | 32-bit signed with 22 fractional bits (range ±512)                    |
| `F conj(R)` product   | 37 bits                                                              |
| accumulator           | 47 bits (N up to 1024)                                               |
| weight increment      | `sum * 2**(22 - log2n - eps_shift)`, rounded half up, saturated to 32 bits |
| integrated power      | 64-bit unsigned                                                      |

**Twiddle tables** are built at elaboration without floating point, so that
every tool can build them:

* `rfi_pkg::tw_cs` sums a Taylor series for the base angle.
* Each table is then filled by the rotation `w[j+1] = w[j] * w[1]`, carried in
  Q60 with 128-bit words.
* Each entry is rounded to Q2.16, halves away from zero.

For every angle of the 8192-point transform, the result equals `cos`/`sin`
rounded directly.

Every saturation raises a flag:

* `fft_ovf_prim` and `fft_ovf_ref` for the two FFTs;
* `filt_sat` for `F`, for the increment and for `G`.

A one-line check for epsilon: `epsilon * |R|^2` should be about 1 in the
strongest interference channel, with `|R|` counted in units of the 18-bit FFT
output.

## Using `rfi_filter_top`

**Inputs:**

* `adc_valid`, `adc_prim[8]`, `adc_ref[8]`: eight samples per clock per
  antenna. `adc_*[l]` holds sample `8*m + l`. The first valid word after reset
  starts spectrum 0, and the stream must not pause while a spectrum is being
  flushed.
* Settings: `fft_shift`, `loop_en`, `log2n`, `eps_shift` and `int_log2`. They
  are plain ports, to be driven from whatever register interface the board
  provides.

**Outputs:**

* `f_valid`, `f_bin` and `f_re[4]`/`f_im[4]`: the cleaned spectrum, every
  spectrum.
* `spec_valid`, `spec_bin`, `spec_power[4]` and `spec_last`: the integrated
  spectrum.
* Status: `fft_ovf_prim`, `fft_ovf_ref`, `loop_active`, `g_update` and
  `filt_sat`.

On both lane outputs, lane `j` is channel `bin + 1024*j`.

**Resizing.** `NCH` (channels) and `NLANES` (samples per clock, a power of two
of at least 2) can be changed. Word widths come from `rfi_pkg`. Reset is
synchronous and active high.

## What follows the source design and what does not

These follow the published design:

* the loop equations and `G_0 = 0`;
* the block structure: two FFTs, the subtract-multiply-accumulate loop with
  `epsilon/N` scaling, and an integrating back-end;
* the 4096 channels over 1 GHz at 2 GSPS;
* user-selectable `N` and `epsilon`;
* the 536 ms integration.

These are this implementation's own choices, because the source describes
none of them:

* **FFT architecture.** The SDF lanes, the 8-lane decomposition, the
  bit-reversed labelled output and the shift schedule. The original used a
  vendor FFT library that is not described.
* **Powers of two only.** `N` and `epsilon` are restricted to powers of two,
  so the division and the gain become one shift. Every setting used in the
  original measurements (`N = 1`, `epsilon` near `2**-11` and `2**-15`) is a
  power of two.
* **Numbers.** All word widths, the rounding and the saturation.
* **Control.** The loop-control timing, the integration framing and the
  output streaming.

These are not included:

* The ADCs. They are external converters. Their samples enter on `adc_*`.
* The board's host processor and register/readout interface. Settings are
  ports, and spectra stream out.
* Timing closure at 250 MHz. It has not been checked on an FPGA.

## Verification

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=<n> failures=<n>` and has a cycle watchdog.

* `tb_cmult` and `tb_gain_scale` compare against integer or real-arithmetic
  models over random and corner-case operands.
* `tb_gain_update` and `tb_accum_bank` check the memory semantics: clear,
  saturation, restart and dump timing.
* `tb_fft_r2sdf` (64 points) and `tb_fft_wideband_real` (64 points, 4 lanes)
  compare every bin with a direct DFT in real arithmetic. They also check the
  framing, and that overflow is flagged when scaling is turned off.
* `tb_adaptive_filter` runs a bit-exact model of the loop (8 channels), checks
  the 2-clock latency, and checks that a constant complex gain is learned for
  N = 1 and N = 4.
* `tb_spec_integrator` checks the power sums and the dump framing.
* `tb_rfi_filter_top` runs the whole design at 32 channels and 4 lanes.
  `tb_rfi_filter_full` runs it at full size, with no parameter overrides:
  8192-point FFTs, 8 lanes and 16 interfering carriers. Both use a sky of
  white noise in the primary antenna only, and interference that reaches the
  primary antenna through a short linear channel. They take the design through
  these phases:
  1. loop open;
  2. loop closed with N = 1;
  3. a switch to N = 4;
  4. FFT scaling turned off.

  They check that:
  * the carriers are suppressed (by about 23 dB at full size);
  * the cleaned channels return to the sky level, within the loop's added
    noise;
  * the other channels stay at the sky level;
  * weights update at the rate `N` sets;
  * overflow and saturation are flagged.

  They count each of these and require it to happen at least once: open and
  closed loop, weight updates, integration dumps, FFT overflow and filter
  saturation.

Simulate with Verilator 5, for example the full-size run (about 2 s):

    verilator --binary --timing -j 0 -y rtl rtl/rfi_pkg.sv tb/tb_rfi_filter_full.sv \
              --top-module tb_rfi_filter_full -o sim
    ./obj_dir/sim

Any other testbench runs the same way: swap in its file and module name. The
testbenches use `$urandom` and do not depend on the simulator's initial
values. To see the loop converge, or to try other settings, change `EPS`,
`log2n` or the carrier list at the top of `tb_rfi_filter_full.sv`.
