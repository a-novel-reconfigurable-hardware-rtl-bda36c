# Multi-band magnitude-and-phase spectral subtraction in hardware

This design removes additive background noise from a speech stream. It works one frame at a time,
in the frequency domain. Each frame of 256 samples is transformed. The spectrum is then split into
two parallel representations, magnitude and phase. For each one, the design learns a noise profile
from the first few frames, which are assumed to hold noise only. After that, every frame has a
scaled copy of that profile subtracted from it, in four frequency bands with separate strengths.
The strength of each band follows that band's own signal-to-noise ratio. The cleaned magnitude and
phase are then put back together into a complex spectrum and transformed back to time samples.

Classic spectral subtraction only touches the magnitude and reuses the noisy phase. The idea here
is to treat the phase spectrum exactly like the magnitude spectrum, with a second, identical
subtraction path running side by side.

## Data path

```
 in_sample ──► fft_core ──► cordic_arctan ──┬─ magnitude ─► spectral_path ─► delay 11 ─┐
   (256-pt,      (forward)   (vectoring)    │                                         ├► recon_mult ─► fft_core ─► out_sample
   frame in)                                 └─ phase ────► spectral_path ─► cordic_sincos ┘   (re, im)   (inverse)
```

Each `spectral_path` is a chain of small blocks:

```
         ┌───────────────► noise_estimator (spram_wf + ram_controller) ──── noise N[k] ──┐
 Y[k] ──►┤                                                                               │
         └─► band_controller ─► multiband_separator ─► per band b:  snr_compute ─► oversub_factor
                                                                      │                  │ factor_b
                                                                      └► spectral_subtractor ◄┘
                                                         band_adder ◄── four band outputs
```

| Module | Job | Latency (clocks) |
|---|---|---|
| `fft_core` (INVERSE=0) | 256-point radix-2 FFT, scaled by 1/N | frame-serial, see below |
| `cordic_arctan` | (re, im) → magnitude, phase | 13 |
| `noise_estimator` | per-bin noise profile, learnt over 5 frames | 2 |
| `band_controller` | one-hot band of the current bin | combinational |
| `multiband_separator` | four enabled registers, one per band | 1 |
| `snr_compute` | max(signal)/max(noise) per band and frame | 26 after the last bin |
| `oversub_factor` | SNR → dB → alpha, times the band's delta | 1 |
| `spectral_subtractor` | max(Y − factor·N, N) | 3 |
| `band_adder` | re-gates and joins the four bands | 1 |
| `spectral_path` | all of the above, one path | 7 |
| `cordic_sincos` | phase → cos, sin | 11 |
| `recon_mult` | magnitude × cos, magnitude × sin | 1 |
| `fft_core` (INVERSE=1) | 256-point inverse FFT, unscaled | frame-serial |
| `mbmpss_top` | the whole chain | 2338 (first frame), 2371 (later) |

`mbmpss_pkg` holds the shared widths and formats. `pipe_delay` is a plain shift register used for
alignment.

## Number formats

All data words are 16-bit two's complement.

| Quantity | Format | Notes |
|---|---|---|
| input and output samples | signed 16-bit integer | |
| FFT bins | signed 16-bit | forward transform divided by N = 256, so bins cannot overflow |
| magnitude | signed 16-bit, same scale as the bins | CORDIC gain removed |
| phase | Q3.13 radians | ±π fits with headroom; ±4 rad is full scale |
| cos, sin | Q1.14 | 16384 = 1.0 |
| SNR ratio | unsigned Q8.8 | ratio of maxima, saturates at 255.996 |
| SNR in dB, alpha, factor | Q8.8 / Q4.8 / Q4.8 (12 bits) | factor = alpha·delta, at most 12.5 |

The forward FFT halves its values at each of its 8 stages, and the inverse is unscaled. A frame that
goes through both therefore comes back at its original scale. Each halving rounds half to even.
Plain rounding up leaves a DC bias that shows up as an impulse at sample 0 after the inverse
transform. The round trip is accurate to a few tens of LSB. That is the precision floor of
16-bit words with per-stage scaling.

## Frames and the FFT handshake

`fft_core` is an iterative radix-2 decimation-in-time core with one butterfly unit. Twiddle
factors are computed while elaborating, from `$cos`/`$sin` in constant functions, so no table
file is needed. It works in four phases:

1. LOAD: 256 samples are written in bit-reversed order, one per clock while `in_valid`.
2. CALC: 8 stages × 128 butterflies, one per clock (1024 clocks).
3. WAIT: the frame is held until `out_frame_ready` is high.
4. UNLOAD: 256 bins in natural order, one per clock, with `out_index` and `out_last`.

`in_ready` is high only in LOAD, so the sample source must stall during CALC, WAIT and UNLOAD.
Without waiting, a frame takes 256 + 1024 + 1 + 256 = 1537 clocks. `edone` pulses on the clock
before the first bin appears. The spectral paths use it as their frame-start signal.

The forward core's `out_frame_ready` is tied to the inverse core's `in_empty`. As a result, the
forward core only releases a frame when the inverse core can take all 256 bins without stalling.
The stages in between (CORDICs, paths, multipliers) are fixed pipelines with no back-pressure.
From the second frame on, the forward core waits 33 clocks in WAIT for the inverse core to finish
unloading. The top flags this on `fft_waiting`. In steady state one frame passes every 1569
clocks, about 16 Msamples/s at a 100 MHz clock. That is three orders of magnitude more than
16 kHz speech needs.

## Noise learning

`ram_controller` counts `edone` pulses. For the first `NOISE_FRAMES` = 5 frames it holds the
RAM write enable high (`learning`), and then it stops for good. The first of those frames is
flagged `first`.

`noise_estimator` multiplies each bin by 0.2 (13107/65536) and adds it to the stored value for
that bin, so after five frames the RAM holds the mean of five frames. The RAM is not reset. The
first learning frame therefore writes instead of adds, so the stored values do not depend on
power-up contents.

`spram_wf` is a single-port write-first RAM. It has two read outputs:
- `rdata`, an asynchronous read, which lets the adder do read-add-write of a bin in one clock;
- `q`, a registered output, which carries the noise estimate for the bin passing through.

Because the RAM is write-first, a bin being written already shows its updated value on `q`.

While learning, the paths already subtract the partly learnt profile. The output of those frames is
not meant to be used as speech.

## Bands

The 256 bins of a real signal's spectrum come in mirror pairs, k and 256−k. `band_controller`
therefore bands on the folded frequency min(k, 256−k), which runs from 0 to 128. That range is
split linearly into four bands of 32, 32, 32 and 33 frequencies. Because a mirror pair always
falls in the same band, both bins get the same treatment and the spectrum stays conjugate
symmetric. During one frame the bands are visited in the order 1, 2, 3, 4, 4, 3, 2, 1.

`multiband_separator` has one register per band, loaded when that band is enabled. A register is
cleared while any other band is enabled, so each band output carries only its own band's bins,
and zero in between.

`band_adder` gates each band's subtracted output with the same (delayed) enables and adds the
four. Exactly one band is active at a time, so the sum is that band's value.

## SNR and the over-subtraction factor

For each band, `snr_compute` keeps a running maximum of the signal and of the noise estimate over
the frame. The maximum logic is a comparator, a multiplexer and a register that is enabled by the
band. At the frame's last bin it divides the two maxima with a restoring divider, one quotient bit
per clock. The result is an unsigned Q8.8 ratio. Its special cases:
- a noise maximum ≤ 0 gives full scale;
- a signal maximum ≤ 0 gives 0.

These cases matter for the phase path, whose values are signed.

`oversub_factor` converts the ratio to decibels, as 20·log10 of the amplitude ratio. log2 is
approximated by the position of the leading one plus a linear mantissa, which is within 0.52 dB.
From the dB value it derives alpha:

| SNR (dB) | alpha |
|---|---|
| below −5 | 5 |
| −5 to 20 | 4 − 0.15·SNR |
| above 20 | 1 |

It then multiplies alpha by the band's tweak factor delta.

The delta values are fixed per band, from the band's upper frequency f = (b+1)·FS/8:

| Band's upper frequency | delta |
|---|---|
| below 1 kHz | 1 |
| up to FS/2 − 2 kHz | 2.5 |
| above FS/2 − 2 kHz | 1.5 |

With `FS_HZ` = 16000 the four bands get 2.5, 2.5, 2.5 and 1.5. With 8000 they get 2.5, 2.5, 1.5
and 1.5.

The ratio measured over frame t sets the factor used on frame t+1. The divider finishes after the
frame has left, so there is no other way without buffering a frame. Until the first ratio arrives,
alpha is 1.

## Subtraction and the floor

`spectral_subtractor` computes Y − ((N·factor) >> 8) with saturation. When the result falls below
the noise estimate N, it outputs N instead. This is a comparator driving a multiplexer, so the
output never drops below the noise floor, which limits "musical noise". The top's `mag_floored`
output shows, per band, when this floor was taken on the magnitude path.

## Reconstruction

The enhanced phase goes through `cordic_sincos`, which is a rotation CORDIC with ±π range
reduction and 11 clocks of latency. The enhanced magnitude is delayed by the same 11 clocks.
`recon_mult` then forms re = mag·cos and im = mag·sin, rounded and saturated, and the inverse FFT
turns the bins back into samples. `out_sample` is the real output of the inverse transform.

The phase spectrum is processed literally, so the mirror bins' phases are not exactly negatives of
each other after subtraction. The inverse transform therefore has a non-zero imaginary part. It is
available on `out_imag` and is simply discarded by a consumer of `out_sample`.

## Top-level interface (`mbmpss_top`)

| Port | Dir | Width | Meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock, asynchronous active-low reset |
| `in_valid`, `in_ready`, `in_sample` | in/out/in | 1/1/16 | sample stream; a sample is taken when both valid and ready |
| `out_valid`, `out_last`, `out_index`, `out_sample` | out | 1/1/8/16 | enhanced frame, 256 consecutive clocks, no back-pressure |
| `out_imag` | out | 16 | imaginary output of the inverse FFT |
| `learning` | out | 1 | noise frames still being learnt |
| `mag_factor`, `ph_factor` | out | 4 × 12 | current alpha·delta per band, Q4.8 |
| `mag_floored` | out | 4 | magnitude path output floored to the noise, per band |
| `fft_waiting` | out | 1 | forward FFT is holding a frame for the inverse FFT |

| Parameter | Default | Meaning |
|---|---|---|
| `N` | 256 | frame length / FFT size (power of two) |
| `NB` | 4 | number of bands |
| `FS_HZ` | 16000 | sampling rate, only used to pick the deltas |
| `NOISE_FRAMES` | 5 | noise-only frames at start-up |

The top contains two concurrent assertions:
- the inverse FFT is ready whenever a spectrum bin reaches it;
- the magnitude and phase paths deliver the same bin index on the same clock.

## Where this departs from the published design

- **FFT cores.** The original uses a vendor's pipelined streaming FFT with 278 clocks of latency
  and double-buffered block RAM. Here a small frame-serial core is used, written from scratch. The
  transform is the same, but the delay from a frame's last input to its first output is 2338
  clocks, against a published total of 604. The input also stalls for about 1300 clocks per frame.
- **Path latency.** The magnitude/phase operation takes 7 clocks here, against a published 24. The
  two CORDIC latencies (13 and 11) match the published ones.
- **Noise learning length.** The source asks for "5" noise-only inputs, and elsewhere for 1.25 ms
  of noise. This design learns over five whole frames (80 ms at 16 kHz), because the noise store
  holds one value per frequency bin.
- **SNR definition.** The formula in the source is the sum, over a band, of the squared ratio
  signal/noise, in 10·log10. The hardware description instead divides the band maxima, and that
  is what is built, taken as an amplitude ratio in 20·log10.
- **Alpha break points.** The printed rule is self-contradictory: 5 below 5 dB, linear between −5
  and 5, 1 above 20. The standard rule with break points −5 dB and 20 dB is used.
- **Band register resets.** In the original, each register is cleared by the next band and the
  last one has no reset. Folded banding visits the bands in both directions, so here every register
  is cleared by any other band.
- **Floor input.** Which multiplexer input the comparator selects was not stated. This design
  chooses the noise estimate as the floor.
- **Board.** The FPGA board, its DDR2 memory and the audio path are not part of this RTL. The top
  takes and gives a plain sample stream.

## Simulating

Every module has a self-checking testbench in `tb/` named `tb_<module>`. `tb_ifft` checks the
inverse configuration of `fft_core`. Each prints `TB_RESULT checks=<n> failures=<m>` and stops,
with a watchdog against hangs. For example:

```
verilator --binary -j 4 --timing -Irtl -y rtl rtl/mbmpss_pkg.sv tb/tb_mbmpss_top.sv \
          --top-module tb_mbmpss_top -Mdir obj_top -o sim
./obj_top/sim
```

`tb_mbmpss_top` runs the top with its default parameters. It feeds 13 frames and takes about
0.03 s of simulation time:
- frames 0 to 4 are white noise, which is learnt as the noise profile;
- frames 5 to 10 add a cosine of amplitude 8000 on bin 20 (1.25 kHz);
- frames 11 and 12 are quiet noise, which drives alpha to 5.

It checks the following:
- the frame order, `out_last`, and the frame delay (2338, then 2371 clocks);
- that the tone survives: on frames 7 to 10, the output's amplitude at bin 20 lies between
  0.5 and 1.1 times the input's (about 6100 in practice).

It also counts how often each mechanism occurred. These are input stalls, FFT holds, learning
frames (exactly five), the learning-to-subtracting switch, floors, and each alpha region: 1, 5 and
in between. A mechanism that never occurred counts as a failure.

The block testbenches compare against reference values computed in the testbench itself: a direct
DFT, `$atan2`/`$cos`/`$sin` in real arithmetic, and integer models of the band, SNR and
subtraction rules. Inputs come from `$urandom`.
