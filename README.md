# APFFT frequency-locking core

This core locks an oscillator, for example a 10 MHz VCO, to a better reference, for
example a rubidium clock. Both signals are sampled by the same ADC clock. At regular
instants the core measures the phase of each signal, then turns the change of their
phase difference into a frequency error. A digital PID loop drives the VCO's tuning DAC
until that error is zero.

The precision of the loop depends on how well the phase is estimated. A plain FFT of a
finite record gives a phase with a bias: when the tone lies between two bins, the bias
depends on the bin offset. The core uses the **all-phase FFT (APFFT)** instead.
(2N-1) samples are weighted by a triangle centred on the middle sample and folded onto
N points, and an N-point FFT of the folded record gives the phase of the middle sample.
That phase has no offset-dependent bias, and the leakage of the spectrum falls off as
sinc² instead of sinc.

The RTL follows the method and the FPGA architecture of Zheng et al., *"A High-Precision
Frequency Locking Method Based on All-Phase FFT Demonstrated on a Crystal Oscillator with
Rubidium Clock Reference"*, with the prototype's numbers as defaults: N = 2048, 16-bit
samples and a 100 MHz clock that is also the sampling clock. Where the paper names a block
without giving its insides (the FFT core, the arctangent unit, the loop filter, the PID
arithmetic, the word formats), the choices are this design's own; they are listed in the
section on differences from the prototype.

## Signal flow

```
 adc_ref ─► apfft_channel (REF) ─┐ phase_ref              ┌─► ferr (to host)
                                 ├─► fde ──► lpf_iir ──► pid_ctrl ──► dac_code ─► DAC ─► VCO
 adc_dut ─► apfft_channel (DUT) ─┘ phase_dut

 apfft_channel = seg_buffer ─► ap_preproc ─► fft_r2sdf ─► peak_bin_sel ─► cordic_atan
                 (2N-1 seg.)   (triangle +    (N-point     (k* = largest    (atan2 → turns)
                               fold → N pts)  streaming)   |X[k]|², k<N/2)
```

| file | role |
|---|---|
| `rtl/apfft_pkg.sv` | shared widths (`ADC_W`, `PHASE_W`, `WRAP_W`, `FERR_W`) and types |
| `rtl/seg_buffer.sv` | 2N-word circular buffer; streams the pairs (u[n], u[n-N]) |
| `rtl/ap_preproc.sv` | all-phase preprocessing: y[n] = ((N-n) u[n] + n u[n-N]) / N |
| `rtl/fft_r2sdf.sv` | streaming FFT: `r2sdf_stage.sv` ×log2 N and `fft_reorder.sv` |
| `rtl/peak_bin_sel.sv` | peak-bin search over the positive-frequency half |
| `rtl/cordic_atan.sv` | pipelined vectoring CORDIC; phase in turns |
| `rtl/apfft_channel.sv` | one complete phase-estimation channel |
| `rtl/fde.sv` | frequency-deviation extraction with wrap counter |
| `rtl/lpf_iir.sv` | first-order low-pass filter on the error |
| `rtl/pid_ctrl.sv` | PID controller, DAC word |
| `rtl/apfft_lock_top.sv` | top level: two channels, FDE, LPF and PID |

## All-phase preprocessing as a stream

The idea is easiest to see on one segment. Take the samples u[-N+1] … u[N-1] around the
centre sample u[0]. Each of the N windows of length N that contain u[0] is rotated so that
u[0] comes first, and the N rotated windows are averaged. Sample n of the average is

    y[n] = ((N-n)·u[n] + n·u[n-N]) / N ,   n = 0 … N-1.

This is the whole segment multiplied by a triangle of height 1 at u[0], folded onto N
points. For a tone of frequency β (in bins) and phase φ0 at u[0], bin k of the N-point FFT
of y is (A/2)·sin²(π(β-k))/(N² sin²(π(β-k)/N))·e^{jφ0}. Its phase is φ0 whatever the bin
offset. The FFT of u[0..N-1] alone would carry an extra (β-k)·π.

In hardware, segments follow each other every **N** samples: segment m has its centre at
sample c_m = N-1 + m·N. Consecutive segments therefore share N-1 samples, and a new phase
is available every N clocks (20.48 µs at N = 2048 and 100 MS/s). `seg_buffer` uses the fact
that y[n] needs just two samples, u[n] = x[s-N] and u[n-N] = x[s-2N], where s is the sample
arriving now. It keeps a circular memory of 2N words. The word that sample s overwrites is
exactly x[s-2N], and the word half the memory away is x[s-N]. Both are read in the same
clock as the write, with the read done before the write. The buffer therefore produces one
pair per incoming sample, with no separate read phase. The first pair appears 2N clocks
after the first sample (4096 clocks). `ap_preproc` multiplies by the integer weights N-n
and n, adds the products, and divides by N. It keeps two fraction bits (3-clock pipeline).

The estimate belongs to the centre sample c_m. Both channels see the same sample
instants, so the REF and DUT phases of one segment are taken at the same instant.

## FFT, peak bin and phase

`fft_r2sdf` is a radix-2 single-path delay-feedback pipeline (decimation in frequency).
Stage s holds a feedback memory of N/2^(s+1) words. It passes the half-block sums on
directly and sends the differences back through the memory, multiplied by the twiddles.
The twiddles are computed at elaboration (18 bit, 16 fraction bits). The stages produce
the spectrum in bit-reversed order. `fft_reorder` writes it into one half of a ping-pong
memory at the bit-reversed address while reading the other half in natural order. The FFT
is unscaled, so the 18-bit input grows to 30 bits: log2 N bits of growth plus one guard
bit. Like every block in the chain, it advances only on valid input and expects whole frames
back to back. An assertion checks that the frame marker keeps step with the frame count.

`peak_bin_sel` scans bins 1 … N/2-1. It skips DC and ignores the mirror half of a real input,
and keeps the bin with the largest re²+im², together with its real and imaginary parts.
`cordic_atan` converts that bin to a phase: first a pre-rotation by half a turn, then 35
micro-rotations with a 40-bit angle accumulator, rounded to a 32-bit phase word.

## Phases in turns and the wrap counter

All phases are unsigned 32-bit fractions of a turn (2³² = 2π). The difference of two phases
therefore wraps modulo one turn by ordinary overflow. `fde` forms the differential phase
Δφ = φ_ref − φ_dut for each pair of estimates. Over a measurement interval Tp =
`tp_frames`·N/Fs it outputs

    ferr = Δφ_n − Δφ_(n−1) + C_n        [turns]  = (f_ref − f_dut)·Tp

Here C_n is the number of whole turns the difference made during the interval. The wrap
counter behind C_n is updated with every estimate, not just once per interval. If the
wrapped Δφ jumps by more than +½ turn between two estimates, that counts as a wrap downwards
(C −1). If it jumps by less than −½ turn, that counts as a wrap upwards (C +1). This stays
unambiguous for any Tp as long as |f_ref − f_dut| < Fs/(2N), which is 24.4 kHz here. The
result is a signed 48-bit number with 32 fraction bits (16-bit integer turns). It is
proportional to the frequency error: divide by Tp to get hertz. For example, 1 µHz at
Tp = 1 s is 10⁻⁶ turn, or 4295 LSB.

`wrap_up`/`wrap_dn` pulse for every counted wrap. `dphi` gives the differential phase of
every estimate, and `ferr` is the unfiltered error that a host would log.

## Loop filter and controller

`lpf_iir` computes y += (x − y)/2^`lpf_shift` once per interval (`lpf_shift` = 0 is a bypass).
`pid_ctrl` computes

    dac = dac_hold + (kp·e + Σ ki·e + kd·(e − e_prev)) / 2^24

and clips the result to 16 bits. With `lock_en` low the loop is open: `dac_code` = `dac_hold`,
and the integrator and derivative history are cleared, so closing the loop starts without a
bump. The integrator does not run further into a clipped output. A positive error (REF
faster) raises the DAC word; for a VCO with negative tuning slope, use negative gains.
A rough guide to tuning: one interval changes the word by ki·(Δf·Tp·2³²)/2²⁴. Pick ki so
that this is a fraction (0.2–0.5) of the correction Δf/K_VCO. The first estimate already
lags the input by about 2.3 intervals at Tp = 2 estimates, so the loop gain has to stay low
for short Tp.

## Settings

| port | meaning | typical |
|---|---|---|
| `tp_frames` | Tp in estimates of N samples | 48828 → 0.99998 s; 49 → 1.0035 ms |
| `lpf_shift` | filter constant, 0 = off | 0 … 15 |
| `lock_en` | 0 open loop, 1 locked | |
| `kp`, `ki`, `kd` | signed 24-bit gains, scale 2⁻²⁴ per turn·2³² | |
| `dac_hold` | open-loop word and loop bias | mid-scale |

Tp is counted in whole estimates, so a 1 s or 1 ms interval can only be approximated at
N = 2048 and 100 MS/s.

## Timing

| stage | this RTL (clocks at 100 MHz) | prototype |
|---|---|---|
| segment buffering | 2N = 4096 | 4096 (40.96 µs) |
| all-phase preprocessing | 3 | 0.03 µs |
| FFT, first in to first out | 2N + log2 N = 4107 | 42.56 µs (vendor core) |
| peak-bin selection | N/2 + 3 = 1027 | 10.27 µs |
| CORDIC | 37 | 0.37 µs |
| **first phase after first sample** | **9270** (92.70 µs) | 94.19 µs |
| phase update interval | N = 2048 (20.48 µs) | 20.48 µs |
| `ferr` after the closing phase pair | 1 | — |
| `dac_code` after `ferr` | 3 | — |

Every block takes one sample per clock and has a fixed latency. The testbenches check each
of these numbers.

## Differences from the prototype

- **FFT core.** The prototype uses a vendor FFT IP core. Here it is replaced by the streaming
  SDF FFT described above: same function and throughput, 149 clocks less latency, unscaled
  fixed point.
- **Peak-bin criterion.** The paper only says that the peak bin is selected. Here the
  criterion is squared magnitude, DC is skipped and the lower bin wins a tie.
- **Word formats.** Phases are 32-bit turns, the error is 48-bit turns per Tp, the DAC word
  is 16 bit and gains are 24 bit. None of these widths are given in the paper. The error is
  not divided by Tp: the gains absorb the constant 1/Tp.
- **Unwrapping.** The paper cites a counter-assisted method from earlier work without
  describing it. The per-estimate wrap counter here is one reading of it.
- **Loop filter.** The paper names a low-pass filter before the PID but does not give it.
  The first-order IIR filter is an assumption.
- **Measurement interval.** Tp is a whole number of estimates (see Settings).
- **Outside the core.** The ADC (ADS5263-class, 16 bit, 100 MS/s) and its LVDS receiver,
  the DAC, the clock cleaner and FPGA clocking, and the link to a host computer are not
  part of the RTL. Samples enter as parallel words with a valid strobe; the DAC word and
  all measurement results leave as ports.
- Reset is asynchronous and active low on all control state. Memories are not reset; the
  valid flags keep their stale content from being used.

## Verification

Each block has a self-checking testbench in `tb/`. Each one prints `TB_RESULT checks=…
failures=…`, stops itself with a watchdog, and checks against values computed independently
in the testbench, usually in real arithmetic.

| testbench | what it shows |
|---|---|
| `seg_buffer_tb` | pairs (x[c+n], x[c+n−N]) for every n and segment, input gaps, 2N priming |
| `ap_preproc_tb` | exact triangular fold incl. full-scale inputs, 3-clock latency |
| `fft_r2sdf_tb` | bins against a real-valued DFT (tone, impulse, DC, random), order, latency |
| `peak_bin_sel_tb` | winner, DC/mirror exclusion, ties, N/2+3 latency |
| `cordic_atan_tb` | atan2 within 2·2⁻³² turn, all quadrants and axes, 37-clock latency |
| `apfft_channel_tb` | phase at the segment centre within 10⁻³ turn (measured ≤ 2·10⁻⁴) for bin offset 0.4, where a plain FFT would be 0.2 turn off; peak bin; first-result latency 2N+3+2N+log2N+N/2+3+37; N-clock spacing |
| `fde_tb` | exact ferr = tp·d with several wraps per interval in both directions, wrap counts |
| `lpf_iir_tb` | recursion against real arithmetic, bypass, step response |
| `pid_ctrl_tb` | against an integer model, both clip limits, anti-windup, open-loop hold |
| `apfft_lock_top_tb` | N = 64: open-loop error of ±1.024 turn per interval within 2·10⁻³ (measured 5·10⁻⁵), wraps both ways, loop closes with filtering and pulls the VCO model onto the reference; counts every mechanism |
| `apfft_lock_top_full_tb` | default size (N = 2048): common-source error below 2·10⁻⁵ turn (measured 7·10⁻⁷), 1 kHz-offset error within 10⁻⁴ turn, closed-loop lock to 2 DAC LSB, 9270-clock latency, 2048-clock spacing |
| `apfft_noise_floor_tb` | common-source noise at N = 1024/2048/4096, SNR 50 and 72 dB, against the thermal-noise formula |

The noise-floor bench uses the prediction std = √2 / (π·√(3N·SNR)·sinc²(δ)) turns per
interval. Measured against it (about 60 intervals per point):

| N | δ | SNR | measured | predicted |
|---|---|---|---|---|
| 1024 | 0.4 | 72 dB | 3.0e-6 | 3.6e-6 |
| 2048 | 0.2 | 72 dB | 1.7e-6 | 1.65e-6 |
| 4096 | 0.4 | 72 dB | 1.7e-6 | 1.8e-6 |

At Tp = 1 s, the N = 2048 value corresponds to 1.65 µHz rms. This is the thermal-noise
floor the prototype predicts for its measured 72 dB SNR. The fixed-point datapath adds
nothing measurable to it.

What was not simulated: a full 1 s interval (10⁸ clocks) and the analogue behaviour of a
real VCO, ADC and DAC. The VCO and ADC in the benches are ideal models with white noise.

## Simulating

With Verilator 5 (any testbench; the order of files does not matter):

```
verilator --binary --timing --assert -Wno-fatal rtl/*.sv tb/apfft_lock_top_tb.sv \
          --top-module apfft_lock_top_tb -Mdir obj
./obj/Vapfft_lock_top_tb
```

The block benches take seconds. `apfft_lock_top_full_tb` runs about 340 k clocks at N = 2048
in roughly ten seconds, and `apfft_noise_floor_tb` takes under a minute.

## Changing the design

- **N** is a parameter of every block and of the top, a power of two. The benches cover
  N = 16 to 4096 for the buffer and preprocessing, and N = 64 to 4096 for the whole core.
  The twiddle tables are computed from N at elaboration. The segment buffer holds 2N words per channel
  and the FFT 3N complex words per channel (feedback plus ping-pong). At N = 2048 the whole
  core holds about 1 Mbit of memory.
- **ADC width** is `ADC_W`. The preprocessing and FFT widths follow from it.
- **Phase and error formats** come from `apfft_pkg`. The error keeps the phase word's
  fraction bits.
- `FRAC` in `apfft_channel` sets the fraction bits kept after the fold.
  `ITER`/`ANG_W` in `cordic_atan` set the CORDIC's precision and latency.
