# Spiketrum digital cochlea: SystemVerilog RTL

Spiketrum turns a sound wave into spike trains on 120 output fibres. It does not
use a bank of band-pass filters with a spike generator behind each one. It
describes the sound as a short sum of known waveforms: 40 Gammatone kernels
shaped like the impulse responses of the ear's frequency channels. The
description is found greedily (matching pursuit). For each 696-sample
segment of audio (43.5 ms at 16 kHz), the encoder:

1. correlates the segment with every kernel at every time offset;
2. takes the single best match as a *code* `(m, tau, s)`: kernel index, time
   position and intensity;
3. subtracts `s` times kernel `m`, placed at `tau`, from the segment;
4. repeats on the remainder, up to a chosen number of codes per segment, or until a
   code's intensity falls below a threshold.

Each code becomes exactly one spike. Every kernel owns three fibres, one for
each of three intensity levels (0.0065, 0.4115 and 25.8744). The spike goes to
the fibre of kernel `m` whose level is nearest to `s`. It fires `tau` sample
periods after the code is found. The codes can be read out directly as well, and the
original sound can be rebuilt from them as `x(t) ~ sum_i s_i phi_mi(t - tau_i)`.

This RTL implements that encoder as one clocked digital core. It follows the
architecture of the published FPGA prototype (Alsakkal and Wijekoon, "Spiketrum:
An FPGA-based Implementation of a Neuromorphic Cochlea"): its block structure,
memory organisation, 34-bit word, 2048-point transforms and intensity levels.
The vendor cores of that prototype (FFT, complex multiplier, memories) are
replaced here by plain SystemVerilog with the same architecture class: an
iterative "burst" FFT for the segment, a pipelined streaming inverse FFT for
the 40 convolutions. At 200 MHz the core makes up to 82 codes per 43.5 ms
segment in real time, which matches the prototype's 80. The [last section](#how-far-to-trust-it-and-where-it-departs)
lists every place where this RTL departs from the published design.

## Data flow

```
 audio ──► Signal RAM ──► FFT ──► FFT RAM ──┐
 (valid/   2048 x 34       (scaled 1/N)      ▼
  ready)      ▲                      complex multiplier ◄── F-D kernel ROM
              │                              │              40 x 2048 x 68
              │                              ▼
              │                 pipelined IFFT (40 frames back to back)
              │                              ▼
              │                      code generator ──► (m, tau, s) ──► feedback ──► controller
              │                                              │
              │   subtractor ◄── multiplier (x s) ◄── shifter ◄── T-D kernel ROM
              └──── x - s·phi                                  40 x 2048 x 34
                                                             │
                                  intensity-to-place: nearest of C1..C3, delay tau ──► spikes[119:0]
```

`spiketrum_controller` drives the loop. The stages of one code are:

| stage | what happens | cycles (N = 2048, L = 1353) |
|---|---|---|
| capture | accept 696 samples, then write zeros to addresses 696..2047 | 696 sample handshakes + 1352 |
| FFT | stream the Signal RAM into the forward FFT; store the spectrum in the FFT RAM | 2N + log2 N·(N/2 + 2) ≈ 15.4 k |
| convolve ×40 | spectrum × kernel spectrum m, for m = 0..39 back to back → pipelined IFFT → max search | 40·N + 2.1 k ≈ 84.0 k |
| code | code generator presents `(m, tau, s)`; feedback decides | 2 |
| residual | shift kernel, scale by `s`, subtract from the Signal RAM | L + 2N + 3 ≈ 5.5 k |

The FFT is taken again after every residual update, because the segment has changed.
One code therefore takes 104,842 cycles, as measured in the full-size bench. At 200 MHz a
segment lasts 8.7 M cycles, so 82 codes fit. Real-time operation also needs
the next segment's samples to be buffered upstream while the current one is
encoded (see [Using the core](#using-the-core)).

## The two transforms

The forward transform runs once per code. It has time to spare, so it uses a small
iterative core (`fft_core`). The core loads the frame at bit-reversed addresses, runs 11
radix-2 stages in place, and unloads the result in natural order. It does one butterfly
per cycle from a memory split into two banks. A word's bank is the XOR of its address
bits. The two words of a butterfly differ in exactly one address bit, so they always sit
in different banks, and each bank needs only one read and one write port. The
read–compute–write pipeline is three steps deep, so it drains for two cycles between
stages: a stage reads what the previous one wrote.

The inverse transform runs 40 times per code and sets the throughput. `fft_sdf`
is a radix-2 single-path delay-feedback pipeline with 11 stages. Stage `s` holds
a delay line of N/2^(s+1) words. During the first half of each block, the stage
fills the delay line. During the second half, it adds and subtracts each
incoming word and the word leaving the delay line. The sum goes out at once.
The difference goes back into the delay line, and leaves, times its twiddle
factor, during the next block's first half. The core takes and gives one sample per clock, so
the 40 products stream through without a gap. Its results come out in
bit-reversed order. This costs nothing here, because the code generator only
needs each value with its index, and `out_idx` supplies that. Bin N−1 comes
last in every frame, in both orders. The controller uses it to move its kernel
label on to the next frame.

Every sample carries a valid tag through the stages. A stage advances while
tagged samples arrive. After the last one it runs one block further on its
own, to empty its delay line, and then stops at a block boundary. The first
output of a burst appears N − 1 + 2·log2 N = 2,069 cycles after its first
input.

## The correlation, and what `tau` means

This is the part most easily got wrong when changing the design.

*Zero padding.* A segment has S = 696 samples and a kernel L = 1353 taps.
Their full linear convolution has S + L − 1 = 2048 points, which is exactly the
transform size N. The Signal RAM therefore holds the segment at addresses
0..695 and zeros at 696..2047. With this padding the circular convolution of
the FFT equals the linear one, with no wrap-around.

*Correlation as convolution.* Matching pursuit needs the correlation
`c(lag) = sum_n x[n] · phi[n − lag]`. The frequency-domain kernel memory
therefore holds the spectrum of the **time-reversed**, zero-padded kernel:

```
Psi_m[k] = sum_{n=0}^{L-1} phi_m[L-1-n] · exp(-j·2·pi·k·n / N),   k = 0..N-1
```

This is stored as `{re, im}` in fixed point at address `m·N + k`. The
inverse FFT of `X[k]/N · Psi_m[k]` is then the linear convolution
`y[tau] = (x * phi_rev)[tau]`, for tau = 0..2047.

*Meaning of tau.* `tau` is the index of that convolution output. The best-matching kernel then starts at
segment sample `tau − (L − 1)`. A value of `tau` below 1352 means the kernel began before
the segment and only its tail overlaps it. The shifter writes tap `i` to Shifter
RAM address `(i + tau − 1352) mod 2048`. Taps that would fall before sample 0 wrap into the
unused top of the buffer. The subtractor touches only samples 0..695, so the
zero padding stays zero.

*Scaling.* The forward FFT halves its values in each of its 11 stages (result X/N). The
inverse FFT is unscaled. The product therefore comes out in true units: `s` is
the inner product of the segment with the shifted kernel. With unit-energy
kernels that is the amplitude of the kernel in the sound, and the residual
update `x − s·phi` is the usual matching-pursuit step. The intermediate values of the
inverse transform are bounded by the largest correlation, so they cannot
overflow unless the result itself does.
Both transforms compute their twiddle factors at elaboration from `$cos`/`$sin`.

## Number format

Every datapath value is a 34-bit two's-complement word with 26 fraction bits:
range ±128, resolution 1.5·10⁻⁸. The package `spiketrum_pkg` holds this
format, the sizes, the levels C1..C3 and `to_fixed()`, which converts a real
constant. The FFT twiddle factors use the same width with 32 fraction bits, so
no table file is needed.
Products are rounded to nearest; sums wrap.

## Intensity-to-place coding and spike timing

`itp_selector` forms `|s − C1|`, `|s − C2|` and `|s − C3|` and keeps the smallest. The
output channel is `3·m + level`, counted from 0. Channel 0 is kernel 0 at level C1.
Each of the 120 channels has its own `spike_delay` counter. The code loads it
with `tau`, and it fires a one-clock pulse on the (tau+1)-th `tick`. In real-time use,
`tick` is the 16 kHz sample strobe. A channel holds one pending spike. A
second code for the same channel before the first has fired restarts the wait,
and `spike_collision` pulses.

## Feedback (active mode)

With `feedback_en = 1`, `feedback_unit` compares each new code's `s` with
`stop_threshold`. The classification experiments behind the design used a
threshold of 0.01, which is `spiketrum_pkg::STOP_THRESHOLD_DEFAULT`. If `s` is
below the threshold, that code is still emitted and the segment ends, so
every segment yields at least one code. With `feedback_en = 0` (passive mode), every
segment produces exactly `max_codes` codes. `seg_stopped` tells which rule
ended the segment.

## Using the core

Top module: `spiketrum_top`. All parameters default to the published sizes
(`N = 2048`, `SEG = 696`, `L = 1353`, `NUM_K = 40`).

1. Hold `rst_n` low for a cycle. After reset the shifter spends N cycles
   clearing its RAM.
2. Load the kernels:
   * `td_we/td_addr/td_data`: tap `i` of kernel `m` (unit energy, fixed point) at
     address `m·N + i`, for i < L.
   * `fd_we/fd_addr/fd_re/fd_im`: `Psi_m[k]` as defined above, at address `m·N + k`.
   * The kernel set itself is not part of the hardware. The testbenches build
     Gammatone kernels `t³·exp(−2π·b·t)·cos(2π·f·t)` with
     `b = 1.019 · 24.7 · (4.37·f/1000 + 1)` and compute `Psi` by a direct DFT.
3. Set `max_codes` (1..2047 codes per segment), `feedback_en` and
   `stop_threshold`.
4. Stream samples with `audio_valid`/`audio_ready`. The core accepts a segment
   only when it is idle. A real-time source needs a FIFO in front of the core to
   hold the next segment while the current one is being encoded.
5. Read `spikes[119:0]`, or the codes (`code_valid`, `code_m`, `code_tau`,
   `code_s`). `seg_done` pulses at the end of each segment.

## Files

| file | block |
|---|---|
| `rtl/spiketrum_pkg.sv` | word format, sizes, C1..C3, threshold |
| `rtl/spiketrum_top.sv` | the whole core; memory port multiplexing |
| `rtl/spiketrum_controller.sv` | sequencing FSM |
| `rtl/sp_ram.sv` | single-port RAM: Signal RAM, FFT RAM, T-D kernel ROM, Shifter RAM |
| `rtl/sdp_ram.sv` | one-write one-read RAM: F-D kernel ROM |
| `rtl/fft_core.sv` | iterative radix-2 FFT (forward transform) |
| `rtl/fft_sdf.sv`, `rtl/fft_sdf_stage.sv` | pipelined streaming FFT (inverse transform) |
| `rtl/complex_mult.sv` | 10-cycle complex multiplier |
| `rtl/code_generator.sv` | maximum search |
| `rtl/feedback_unit.sv` | stop comparator |
| `rtl/kernel_shifter.sv` | RAM-based kernel shift with clear-after-read |
| `rtl/residual_multiplier.sv` | scaling by `s`, 3+3 pipeline stages |
| `rtl/residual_subtractor.sv` | read-modify-write of the Signal RAM |
| `rtl/itp_selector.sv`, `rtl/spike_delay.sv`, `rtl/itp_coder.sv` | intensity-to-place stage |

Every file begins with a description of its timing and interface.

## Simulation

Every testbench in `tb/` checks itself and ends with a line
`TB_RESULT checks=<n> failures=<n>`. To run one with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_spiketrum_top \
  -y rtl -y tb +libext+.sv -Irtl rtl/spiketrum_pkg.sv tb/tb_spiketrum_top.sv -o sim
./obj_dir/sim
```

* `tb_spiketrum_top`: the whole core at 64-point / 22-sample / 43-tap / 4-kernel
  size, four segments. A floating-point matching-pursuit reference checks every
  code: its `s` must equal the true correlation at the chosen `(m, tau)`, and
  no other position may correlate better. The reference then follows the
  hardware's choice. The bench also checks each spike's channel and time, and why
  each segment ended. It requires that the following all occur: a passive end, a
  feedback stop, left and right kernel shifts, all three intensity levels, and
  spikes. It runs in under a second.
* `tb_spiketrum_full`: the same checks with every parameter at its
  default (2048-point, 40 kernels of 1353 taps, 120 channels): one segment and
  three codes. It also checks that consecutive codes are at most 108,750
  cycles apart, the budget for 80 codes per segment at 200 MHz. It runs
  in about 20 s, most of which is compilation.
* `tb_spiketrum_workloads`: full size, about a minute of simulation. It runs
  the kinds of input the published evaluation used:
  * one code per segment for single-kernel inputs, where each code must name the kernel that was fed in;
  * active mode at threshold 0.01;
  * a passive 80-code segment, with every code inside the real-time budget.
* One bench per block (`tb_fft_core` and `tb_fft_sdf` against a direct DFT, `tb_complex_mult`,
  `tb_kernel_shifter`, `tb_itp_coder`, …). Where a latency is documented, these benches
  check it to the cycle.

## How far to trust it, and where it departs

Verified: the end-to-end encoder agrees with a floating-point matching
pursuit at both sizes. Every block passes its own bench with random initial
register contents. Each bench was also shown to fail on a deliberately broken
copy of its block.

Departures from the published prototype:

* **Transform cores.** The prototype uses vendor cores: a radix-4 burst FFT
  and a pipelined streaming IFFT. This RTL uses a radix-2 burst core and a
  radix-2 SDF pipeline. Throughput is about the same: 82 codes per segment
  against 80. Higher code counts (the 64–1024 per segment of the published
  spike-rate study) run correctly, but slower than real time.
* **Shifter RAM size.** The prototype's Shifter RAM is about 13 kB (≈ 3072 ×
  34 bit). Here, circular addressing needs only 2048 words. The RAM is also
  cleared once after reset, which the published description does not mention.
* **Kernel ROMs are loadable RAMs.** The kernel values are not part of the
  design description, so both kernel memories have load ports. The
  frequency-domain one ("dual-port ROM" in the original) uses its second port
  for loading.
* **Memory sizes** follow from the stated capacities: 8.7 kB = 2048 × 34,
  17.4 kB = 2048 × 68, and about 693 kB / 346 kB ≈ 40 × 2048 × 68 / 34. The small
  differences from the stated kilobyte figures are not explained in the source.
* **Choices where the description is silent:** the 26-bit binary point;
  round-to-nearest; the signed maximum (not the magnitude) in the code
  generator; the first of equal maxima kept, in arrival order (kernel by
kernel, each in bit-reversed bin order); ties in the level choice going to
  the lower level; the low-threshold code still emitted; one pending spike per
  channel; the `tick` time base for the delays; and audio accepted only
  between segments (valid/ready).
* **Not included:** the microphone amplifier and ADC, the USB-3 host
  interface, the USB-C/AER spike output and the clock generation of the
  board. The core exposes plain ports where they would connect.
* **Arithmetic range:** the sums in the FFT and the subtractor wrap rather
  than saturate. With unit-energy kernels and audio within ±1 this leaves a
  wide margin. By Cauchy–Schwarz, a correlation is at most √696 ≈ 26 against
  a range of ±128.
