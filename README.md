# A spiking-neuron spectral denoiser in SystemVerilog

This design removes noise from speech recorded at 16 kHz. It works in the
frequency domain. The audio is cut into overlapping frames and each frame is
turned into 256 frequency bands. A bank of spiking neurons, one per band,
decides how much of each band to keep. The kept spectrum is turned back into
sound. Each band's magnitude goes through the neurons, while its phase goes
around them and is put back at the end. A band whose energy stays below the
neurons' firing threshold produces no spikes and is silenced. A strong band
fires often or early and passes unchanged.

The architecture follows HPCNeuroNet, a hybrid spiking/transformer audio model
built on an FPGA: an STFT and an ISTFT built on FFT cores, an SNN encoder and
decoder, magnitude and phase paths through delay units, and a multiplier that
joins them. The paper names the transformer stages (embedding, transformer
layers, spiking self-attention) but gives none of their sizes or weights. They
are not built here. Their place in the pipeline is a pair of stream ports, so
an external model can be inserted (see *The feature path*).

## Data flow

```
 clip memory ──► STFT ──► CORDIC polar ──┬──► delay unit (magnitude) ────────────┐
 (48000 x 16b)   512-pt FFT,              ├──► delay unit (phase) ───────────┐    │
                 hop 128, bands 0..255    └──► [feature path] ──► SNN encoder │    │
                                                                  │ spikes   ▼    ▼
                                                                  ▼        mask_combine ──► ISTFT ──► audio out
                                                              SNN decoder ──► gain ─┘         512-pt IFFT,
                                                                                              overlap-add
```

Every arrow is a valid/ready stream in the AXI-Stream style: a beat moves when
`valid` and `ready` are both high, and an offered beat stays unchanged until
it is taken. Each block is a small state machine with its own memory, so
consecutive frames overlap in the pipeline. A stall anywhere, such as the
output sink holding `out_ready` low, backs up through the whole chain without
losing data. Within a frame, bands always travel in order 0..255, with a
`last` flag on band 255. No block needs a band index on the bus.

| module | job | clocks per frame |
|---|---|---|
| `noisy_data_buffer` | holds one clip and plays it at up to one sample per clock | 128 per hop |
| `stft` | 512-sample ring buffer; every 128 samples it sends the window to an FFT | 512 + 2304 + 512 |
| `fft_core` | radix-2 FFT/IFFT, in place, one butterfly per clock | 3328 |
| `cordic_polar` | complex band to (magnitude, phase) | 18 per band |
| `delay_unit` (x2) | FIFO of 512 words: magnitudes in one, phases in the other | — |
| `snn_encoder` | LIF neurons, T = 16 time steps, sends address events | 256 + 4096 |
| `snn_decoder` | spike counts / first-spike times to a Q1.15 gain | 256 |
| `mask_combine` | magnitude x gain, rotated back to the phase | 18 per band |
| `istft` | Hermitian rebuild, IFFT, overlap-add, 128 samples out | 256 + 3328 |

In steady state the pipeline completes a frame about every 8,700 clocks,
limited by the two CORDIC units (256 x 18 clocks each). Real time at 16 kHz
needs one frame per 8 ms: 2,000,000 clocks at 250 MHz, or 800,000 at
100 MHz. A full 48,000-sample clip (375 frames) takes 3.27 million clocks from
`start` to the last output sample, including playback.

## Fixed-point spectrum

Audio samples and both parts of every spectrum value are 16-bit two's
complement. `fft_core` works inside on 34-bit values with 8 fraction bits and
rounds only once, at its output:

* **forward** (STFT): the result is divided by N = 512, so a full-scale input
  can never overflow a 16-bit bin;
* **inverse** (ISTFT): the result is not scaled, so `IFFT(FFT(x)) = x`.

The STFT uses a rectangular window. With a hop of N/4, every output sample is
covered by exactly four frames. The ISTFT adds the four inverse transforms and
divides by 4, which gives back the input exactly when every gain is 1.0. The
cost of this choice is more spectral leakage than a tapered window would give.

The STFT keeps bins 0..255: 0 Hz to 7.97 kHz in steps of 31.25 Hz. It drops
the Nyquist bin 256 and the mirrored upper half. The ISTFT rebuilds the upper
half as the complex conjugate of the lower half (X[512-k] = conj X[k]), sets
bin 256 to zero, and keeps only the real part of the IFFT.

The output is the input delayed by N − HOP = 384 samples. Output sample *i*
belongs to input sample *i* − 384. The first 384 outputs belong to the zeros
assumed before the clip. To flush the last 384 samples of a clip, append 384
zero samples.

End to end, with every gain at 1.0, the chain adds an error of about 2 to 3
LSB rms. It comes from rounding in the 16-bit bins and in the CORDIC. For
the two-tone test signal of the clip testbench this gives 63 dB SNR near full
scale and 39 dB at 30 dB below it. A full-scale sine sits about 78 dB above
this floor. The 16-bit sample format spans 96 dB, which is the dynamic range
the source quotes, but the chain as built does not reach it. Dividing the
forward transform by less than N would lower the floor. The price is a
possible overflow of a bin on loud, tonal input.

## Magnitude, phase and the CORDIC gain

`cordic_polar` rotates each band vector onto the positive real axis in 16
shift-and-add steps. It adds π first when the real part is negative. The
result is:

* `mag` = K·|X|, 18 bits unsigned, where K = ∏ √(1 + 2^(−2i)) ≈ 1.6468 is the
  CORDIC gain, left in on purpose;
* `phase` = angle(X), 16 bits signed, with 2^15 standing for π.

`mask_combine` computes r = mag · gain / 2^15 · (1/K²), using 1/K² = 12083 in
Q1.15. It then rotates (r, 0) by the phase in 16 more CORDIC steps, adding a
half-turn first when |phase| > π/2. The rotation multiplies by K again, so the
band leaves as |X| · gain · e^(j·phase). The neurons therefore see the
magnitude scaled by K ≈ 1.65. Set thresholds with that factor in mind.
Because of K, the magnitude needs 18 bits (up to √2 · 32768 · 1.65 ≈ 76,000).
The source describes the encoder as working on 16-bit data. Here the encoder
input is 18 bits wide; the gain it produces is 16 bits.

## The spiking neurons

`snn_encoder` holds one leaky integrate-and-fire neuron per band. One
datapath is time-shared over all 256 bands, and each neuron's state sits in
an array. A neuron has the four parts of a classic hardware spiking unit:

1. **multiplier**: input current I = mag · w / 256, where w is a Q8.8
   per-band weight (reset value 1.0, writable through `w_we/w_addr/w_data`);
2. **accumulator**: the membrane potential v (24 bits, saturating);
3. **threshold**: compared against `threshold`;
4. **spike encoder**: sends an address event for each spike.

For one frame, the encoder loads the 256 magnitudes, clears every v, and then
runs T = 16 time steps. In each step it updates every band once, in band
order.

*Rate coding* (`mode = CODE_RATE`):

```
if the neuron is resting:  count the rest down; v and the output stay as they are
else:
  v ← v − (v >> leak_shift) + I        (no leak when leak_shift = 0)
  if v ≥ threshold:  spike;  v ← v − threshold  (v ← 0 when reset_zero = 1)
                     rest for the next `refrac` steps
```

The recovery period `refrac` (0 to 15 steps) caps the rate: a neuron can fire
at most once every `refrac` + 1 steps, so its gain is at most
⌈T / (refrac + 1)⌉ / T. With reset to zero, the charge above the threshold is
thrown away at each spike, instead of being carried over to the next step.

*Time-to-first-spike coding* (`mode = CODE_TTFS`):

```
v ← v + I
if v ≥ threshold and the neuron has not fired in this frame:  spike (once)
```

With leak, the potential of a band with constant current settles at
I·2^leak_shift. A band never fires if I·2^leak_shift < threshold: this is the
noise gate. A band with I ≥ threshold fires in every step in rate mode, and at
step 0 in TTFS mode.

Each spike leaves as an 18-bit event {eof, mode, step[7:0], band[7:0]}. After
the last step, one end-of-frame event (eof = 1) carries the coding used. The
encoder samples `mode`, `threshold`, `leak_shift`, `refrac` and `reset_zero`
when a frame's first magnitude arrives, so they can be changed between frames. The encoder can
emit one event per clock. While the sink is busy, it holds the spiking neuron
without losing the spike.

`snn_decoder` keeps a spike count and a first-spike step per band. When the
end-of-frame event arrives, it sends one gain per band and clears its state:

* rate: gain = count / T;
* TTFS: gain = (T − first step) / T, or 0 when the band never fired.

The gain is in Q1.15, where 32768 stands for 1.0.

With the defaults (weights 1.0), these settings give two useful behaviours:

| setting | effect |
|---|---|
| `threshold = 1`, `leak_shift = 0`, rate | every non-zero band gets gain 1.0: pass-through |
| `threshold = 400`, `leak_shift = 2`, rate | bands with K·\|X\| < 100 are removed |
| `threshold = 400`, TTFS | bands below 400/16 are removed, gain falls with the first-spike delay |

In the test signal, a tone of amplitude 8000 plus uniform noise of ±300,
either gate setting removes about 24 dB of the noise.

## The feature path

In the original model, the transformer embedding, the transformer layers and a
spiking self-attention block sit between the magnitudes and the spike
encoder. With `xf_bypass = 1`, the magnitudes go straight to the encoder.
With `xf_bypass = 0`, the top sends them out on `feat_out_*`, one 18-bit value
per band in band order, and the encoder reads `feat_in_*` instead. Whatever
sits outside must return 256 values per frame, in band order, all in the
encoder's input format.

The delay units absorb the difference in latency. Their 512-word depth holds
two frames. If the external path is slower than that, the delay units fill
and the STFT side stalls, which is safe. The delay units pass data on
valid/ready rather than after a fixed number of clocks, because the time the
SNN takes depends on how many spikes it sends.

## Using the top level

1. Write the clip: `wr_en`, `wr_addr` (0..47999), `wr_data`, one sample per
   clock.
2. Set `mode`, `threshold`, `leak_shift`, `refrac`, `reset_zero` and
   `xf_bypass`. Optionally write
   weights.
3. Pulse `start` with `length`. `busy` stays high while samples are being
   played.
4. Take 128 samples per frame from `out_valid/out_ready/out_sample`.
   `out_last` marks the last sample of each frame.

Reset (`rst_n` low, asynchronous) clears every pipeline state. It does not
clear the clip memory or the weights. A second `start` after the first clip
ends continues the same stream, because the STFT keeps its history. A longer
recording can therefore be processed in pieces of up to 48,000 samples.

Parameters of `hpcneuronet_top`: `CLIP_LEN` (48000), `N` (512), `HOP` (128),
`NB` (256), `T` (16, a power of two), `VW` (24), `DELAY_D` (512). `fft_core`
reads its twiddle table, cos(2πk/512) and −sin(2πk/512) for k < 256 in Q1.15
scaled by 32767, from `rtl/fft_twiddle.hex`. It opens that path relative to
the directory the simulator runs in. To change `N`, regenerate the table. A
CORDIC atan table, atan(2^−i)·2^15/π, sits in `hpc_pkg`.

## What follows the source architecture and what does not

Taken from the source:

* the chain STFT → SNN encode → SNN decode → ISTFT, with two FFT cores;
* magnitude and phase paths through two delay units into one multiplier;
* window 512, hop 128, 256 bands, 0–8 kHz, 16 kHz sampling, 16-bit real and
  imaginary data;
* the 48,000-sample clip;
* AXI-style interfaces;
* multiplier / accumulator / threshold / encoder neurons, LIF, rate and
  time-to-first-spike coding;
* weights, thresholds, leak, recovery duration and reset as settings of
  the neurons.

Choices made here, where the source is silent:

* the in-house FFT, used instead of the FPGA vendor's FFT IP;
* the rectangular window and all scaling;
* CORDIC for magnitude and phase;
* the neuron equations, T = 16 and the weight format;
* how the recovery period and the reset choice are encoded (the source only
  lists decay, recovery duration and reset among the neuron's settings);
* reading the decoded value as a per-band gain;
* the event format;
* the FIFO-style delay units;
* the clip-memory control interface.

Not built:

* the transformer embedding, transformer layers and spiking self-attention
  (no dimensions or weights are published);
* on-chip training (no mechanism is described);
* a summing node that the source's block diagram draws right after the STFT,
  with a second input marked only by a sine-wave symbol. Nothing says what
  it adds, so the STFT output goes straight to the three paths.

The source's operation count (960 MOP per inference) and latency (13.5 ms at
100 MHz) describe its full network. They cannot be compared directly with this
pipeline. For scale, the pipeline here takes 32.7 ms of 100 MHz clocks for a
48,000-sample clip, most of it waiting on playback and the CORDIC units.

The source gives two clock frequencies (250 MHz in its characteristics table,
100 MHz in its results) and a frame rate of "up to 50 frames/s". A hop of 128
at 16 kHz needs 125 frames/s. None of this changes the RTL. The design meets
real time at either clock with a wide margin.

## Simulation

All files are SystemVerilog-2017. `hpc_pkg.sv` must be compiled first. Each
block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`, and each has a watchdog. Run simulations from
the directory that holds `rtl/` and `tb/`, so that the twiddle table is
found. For example:

```
verilator --binary --timing --assert -Irtl rtl/hpc_pkg.sv rtl/*.sv tb/tb_hpcneuronet_top.sv \
          --top-module tb_hpcneuronet_top -o sim && ./obj_dir/sim
```

* `tb_fft_core`, `tb_stft`, `tb_istft` compare against direct DFTs computed
  with real arithmetic in the testbench.
* `tb_cordic_polar` and `tb_mask_combine` compare against `$atan2`, `$sqrt`,
  `$cos` and `$sin`.
* `tb_snn_encoder` compares every spike event against a behavioural LIF model.
* `tb_snn_decoder` and `tb_delay_unit` check against reference counts and a
  queue model.
* `tb_hpcneuronet_top` runs five 2048-sample clips through the whole design:
  pass-through, rate-coded gate, TTFS gate, and the external feature path with
  random stalls. It counts how often each mechanism occurred: both coding
  modes, full delay units, output back-pressure, external path, gated and
  full-gain bands, neuron steps spent resting. A fifth clip uses a recovery
  period of 2 steps and checks that the largest gain is exactly 6/16. It also
  checks the measured frame interval against 50
  frames/s at 250 MHz and the measured event rate against 8.76 Mevents/s.
* `tb_hpcneuronet_clip` runs at the default sizes. It streams a 30 s
  recording (480,000 samples) through the clip memory as 10 back-to-back
  clips of 48,000 and checks that the output is one continuous stream,
  3750 frames long. It also measures the scale-invariant signal-to-noise
  ratio (SI-SNR), the usual quality figure for speech denoising, against the
  clean signal: 28.7 dB for the noisy input, 51.3 dB for the output. The test
  signal is two gated tones in white noise, so these numbers show that the
  gate works. They say nothing about speech quality, which depends on the
  trained network that is not built here. This takes about 35 s of
  simulation.

Verilator simulates with two states. Every memory that is read before it is
written (the STFT history, the overlap-add accumulator) is handled by logic
rather than by reset values. Random start-up contents therefore do not
matter.
