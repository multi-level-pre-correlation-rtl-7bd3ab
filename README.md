# Multi-level pre-correlation RFI flagging: SystemVerilog RTL

Radio telescopes keep getting more sensitive, and the radio spectrum keeps
getting busier. Interference (RFI) is usually removed after correlation, by
iterative flagging algorithms that cannot keep up with pre-correlation data
rates. This design moves the flagging up front. At several points of the
digital chain, each with its own time-frequency resolution, a streaming
detector looks at every sample of every channel. It decides on the fly
whether the sample's power is anomalous compared with a robust running
estimate of that channel's noise power. The decisions serve two purposes:

* they are reported as **RFIlets** (one record per flagged sample) for an
  RFI database;
* they steer an **oriented accumulation**. At the end of the chain every
  channel keeps two power spectra, one of clean samples and one of flagged
  samples, so nothing is thrown away.

The RTL follows the UniBoard/EMBRACE configuration described by
Dumez-Viou, Weber and Ravier ("Multi-Level Pre-Correlation RFI Flagging for
Real-Time Implementation on UniBoard"). The input is 248 beamlets of
200 kHz. They pass a detection stage, an 8-bin channeliser, a second
detection stage on 1984 channels of 25 kHz, a second 8-bin channeliser and
a third detection stage on 15872 channels of 3.125 kHz. An RFI decision and
the oriented accumulation follow. Section [Departures](#departures-and-open-points)
lists what here is this implementation's own choice and not the authors'.

```
beamlets (K0=248) ─► detection ─► pfb8 ─► detection ─► pfb8 ─► detection ─► rfi_decision ─► oriented_accumulator ─► powerlets
                       (K0)               (8·K0)               (64·K0)         ▲   ▲
                        │ flags ───────────────────────────────────────────────┘   │
                        │                   │ flags ───────────────────────────────┘
                        ▼ RFIlets           ▼ RFIlets            ▼ RFIlets
```

## The stream

Every block uses the same time-multiplexed stream (`rfi_pkg::wave_bus_t`):

| field   | width | meaning |
|---------|-------|---------|
| `valid` | 1     | this clock carries a slot |
| `sof`   | 1     | start of frame: the slot is channel 0 of a new time sample |
| `ts`    | 32    | time stamp: index of the *first-stage* time sample the slot comes from |
| `x`     | 2×16  | complex sample, signed I and Q |

A frame holds one time sample of all K channels, in channel order, one
channel per valid slot. Gaps in `valid` may appear anywhere; every block
freezes while `valid` is low. There is no back-pressure. All blocks that
keep per-channel state count slots from `sof` (`slot_counter`). None of
them clears its memories at reset. Until a memory location has been written
after reset, `slot_counter` makes it read as zero, by counting whole frames.

The time stamp lets flags from different resolutions be matched. A
channeliser gives each of its output frames the time stamp of the first
input sample of its block. A third-stage sample with time stamp `ts`
therefore covers first-stage samples `ts … ts+63`.

## Robust recursive power estimate (`rrp_estimator`)

A detector threshold must follow the noise power σ² of each channel. It
must not follow the interference. The estimator is a first-order IIR on the
instantaneous power p = |x|². The update is skipped whenever p is already
an outlier:

```
if p(t) < λ̃·σ̃²(t-1):  σ̃²(t) = σ̃²(t-1) + 2^-n · (p(t) − σ̃²(t-1))
else:                  σ̃²(t) = σ̃²(t-1)          (freeze)
```

Because the estimator never sees samples above λ̃·σ̃², it converges to the
mean of a clipped exponential distribution. For λ̃ = 4 that mean is
σ²/1.113. Every threshold of the stage is written as a multiple of this
clipped estimate, so no correction is ever applied explicitly. Useful
values of the method:

| λ (true-σ² threshold) | gain g̃(λ) | λ̃ = λ·g̃ | samples clipped under noise |
|---|---|---|---|
| 3.59352 | 1.113 | 4 | 2.75 % |
| 7.9785  | 1.003 | 8 | 0.03 % |

Hardware (one slot per clock):

* `power_calc` squares and adds in two register stages. The waveform is
  delayed by the same two cycles.
* The state σ̃²ₖ(t-1) of the slot's channel is read from a K-entry memory,
  updated and written back in the same cycle. This memory is the K-stage
  shift register of the original data-flow drawing, addressed instead of
  shifted.
* β = 2^-n is an arithmetic right shift (`BETA_SHIFT`, default 11, which
  gives an equivalent window of about 2^(n+1) = 4096 unclipped samples).
  λ̃ is a constant multiplier (`LAMBDA`, 5 fraction bits, default 128 = 4).
* σ̃² has 48 bits: the 32-bit power plus 16 fraction bits. Without the
  fraction bits, a 2^-11 step of a small difference would truncate to
  zero, and the estimate would stop moving.
* `power_reset` loads `power_reset_value` into the state of the current
  slot's channel, so holding it for one frame resets every channel. For a
  fast and safe start, the value should be at least the true clipped power.
  The first frame after `rst` is always loaded this way.
* Output bus `rrp_bus_t`: the sample, its p, and the σ̃²(t-1) that was used
  to test it. The output follows the input by 3 cycles.

The filter delays the estimate by about τ̃ = (1/β − 1)/(1 − e^−λ) samples,
which is 2105 for n = 11. The estimator can delay the waveform and its
power by `SYNC_DELAY` frames to make up for this (default 2105). That delay
line needs K·τ̃ entries, 33 million at the last stage. The top therefore
sets `SYNC_DELAY = 0` everywhere, which is valid when the noise power
varies slowly.

## Counting outliers (`bernoulli_detector`)

A detector marks a sample as an outlier when p ≥ λ̃_d·σ̃². It raises its
flag when at least T_d of the channel's last T samples were outliers. The
window count is a running sum, ν(t) = ν(t-1) + b(t) − b(t−T), built from
two memories: a T×K bit delay line supplying b(t−T) and a K-entry store of
ν. Strong, short interference is caught with a high λ̃_d and T_d = T.
Weak, long interference is caught with a low λ̃_d, a long T and T_d < T.
Under noise alone the false-alarm rate per window is the binomial tail
Σ_{k≥T_d} C(T,k)·p^k·(1−p)^(T−k), with p = e^−λ_d.

Every stage uses both detectors of the original method:

| detector | λ̃_d | T | T_d | per-sample outlier rate (noise) | false alarm (theory) |
|---|---|---|---|---|---|
| strong   | 4 (128)     | 3  | 3  | 2.75 % | 2.1·10⁻³ % |
| weak     | 29/32 (29)  | 30 | 25 | 44.3 % | 1.3·10⁻³ % |

The flag follows its slot by one cycle. The flag marks only the **last**
sample of the polluted window.

## Aligning and merging flags (`flag_sync`)

This is the least obvious part of a stage. The original description gives
only its purpose. Detector i says at time t that samples t−T_i+1 … t are
polluted. Its window length differs from the other detectors', so the
flags of one sample reach the merge point at different times. The module:

1. delays the waveform (and its time stamps) by **D = T_max − 1** frames,
   so that the sample leaving at time t is s = t − D;
2. delays the flag of detector i by **T_max − T_i** frames. A flag raised
   for window [t−T_i+1, t] now arrives exactly when sample t−T_i+1, the
   first of its window, leaves the delay;
3. stretches each delayed flag over the T_i samples of its window with a
   per-channel down-counter (`cnt ← T_i−1` on a flag, then count down;
   the sample is flagged while the counter is non-zero);
4. ORs all stretched flags and a **reset flag**. The reset flag covers the
   first `reset_len` output frames after `rst`, and restarts on
   `rfi_reset` (the top ties this to the stage's RRP power reset). It hides
   the time during which the estimator converges.

With the default detectors (T = 3 and 30) the waveform is delayed by
29 frames. The waveform delay is by far the largest memory of a stage
(29·K complex words). Output samples appear only once the delay holds 29
whole frames. The per-detector stretched flags stay available (`det_flags`)
for the RFIlets.

## Blanking and RFIlets (`blanking`, `rfilet_gen`)

`blanking` has two multiplexers. The first picks a replacement according to
the static mode: 0 = zero, 1 = a sample from an external Gaussian
generator, 2 = go-through (the sample stays as it is). The second uses the
replacement only for flagged samples. The flag always travels with the
sample. Go-through is the mode to use when later stages must analyse the
data. In zero mode, blanked samples reach the next stage as zeros, and that
stage sees them as clean. No Gaussian generator is provided: the original
firmware did not have one, and its variance tracking is not specified. The
`gauss` input is where one would connect.

`rfilet_gen` emits one record per flagged sample: time stamp, channel and
source bits (`{reset only, weak, strong}`). Clean samples produce nothing,
so the metadata rate equals the flag rate.

`detection_module` wires one stage together:
RRP → detectors → flag_sync → blanking, with rfilet_gen on the synchronised
stream. Its latency is 6 cycles plus T_max − 1 = 29 frames.

## Channelisers (`pfb8`)

Each channeliser splits every input channel into 8 sub-channels at 1/8 of
the rate ("maximally decimated"), so the slot rate is unchanged. The
original specifies only this function, not the prototype filter. This
implementation uses the simplest filter bank with that function: one tap
per polyphase branch, which is an 8-point DFT of each block of 8
consecutive samples, scaled by 1/8:

    X_b(m) = 1/8 · Σ_{r=0..7} x(8m+r) · e^(−j2πrb/8)

Twiddles are Q14 constants. Results are truncated and saturated to 16 bits.
Because the window is rectangular, adjacent sub-channels overlap more than
in a real polyphase filter bank, and tones between bin centres leak.
Replacing the DFT with a windowed polyphase filter would change only this
module.

* Block alignment comes from the time stamp: row r = ts[S+2:S] of bank
  ts[S+3], with S = `TS_SHIFT` (0 for the first channeliser, 3 for the
  second, whose input time stamps step by 8). Frames before the first
  block boundary are dropped.
* Two banks of 8×K samples alternate. While one bank is being written, the
  previous block is transformed from the other, one bin per input slot.
  Latency is one block plus one cycle.
* Output slot b·K + k is bin b of input channel k. Output channel c thus
  descends from input channel c mod K, which the RFI decision relies on.

## Inheritance (`rfi_decision`)

A polluted coarse sample pollutes every fine sample computed from it. A
final sample with time stamp ts in channel c is flagged when any of these
holds:

* its own stage-3 flag is set;
* any first-stage flag of beamlet c mod 248 was set in samples ts … ts+63;
* any second-stage flag of channel c mod 1984 was set in samples
  ts, ts+8, …, ts+56.

For each coarse stage the module ORs flags per channel and per 64-sample
block into a ring of `HIST` = 64 blocks, overwriting an entry at the
block's first sample. The final stage reads both rings by its own time
stamp. The coarse stages run ahead of the final stage by about 35 blocks
(mostly the 29-frame synchronisation delays of stages 2 and 3), so 64
blocks is enough. An assertion checks that the block read is complete and
has not been overwritten. `out_src` tells which source fired.

## Oriented accumulation (`oriented_accumulator`)

The power of each final sample goes to one of two per-channel accumulators,
chosen by the decision: flagged samples to one, clean samples to the other.
After M = M0 + M1 frames (default M = 1024, about 0.33 s; the original
leaves M open) each channel outputs a powerlet:
`pl_mean0` = sum0/M0 and `pl_mean1` = sum1/M1, together with M0 and M1.
An average whose count is zero is output as 0. The averages use plain
dividers. The first frame of an integration overwrites the accumulators, so
they never need clearing.

## Top level (`uniboard_rfi_top`)

Parameters: `K0` = 248, `BETA_SHIFT` = 11, `LAMBDA` = 128 (λ̃ = 4),
`ACC_M` = 1024, `HIST` = 64. The later stages have 8·K0 and 64·K0 channels.
Static inputs are given per stage:

| input | meaning |
|---|---|
| `power_reset`, `power_reset_value` | RRP reset request and value (integer power) |
| `reset_len` | frames flagged after a reset |
| `mode` | blanking mode |
| `gauss` | replacement sample for mode 1 |

Outputs: three RFIlet streams, the final decision with its source bits, and
the powerlets.

Approximate storage at the default size:

| part | bits per channel | K | total |
|---|---|---|---|
| detection stage (RRP state 48, detectors 40, sync 29×32 + 27 + 10) | ≈1053 | 248 / 1984 / 15872 | 0.26 M / 2.1 M / 16.7 M |
| channeliser (2 banks × 8 × 32) | 512 | 248 / 1984 | 0.13 M / 1.0 M |
| RFI decision rings | 64 | 248 + 1984 | 0.14 M |
| accumulators (2 × 42 + 11) | 95 | 15872 | 1.5 M |

In total about 22 Mbit, three quarters of it in the last stage's waveform
delay. A single Stratix IV of the UniBoard generation does not hold this.
A real build would split the last stage across FPGAs or keep the delay in
external memory.

End-to-end latency (first-stage time samples): roughly 29 (stage 1) + 8
(channeliser) + 29·8 (stage 2) + 64 (channeliser) + 29·64 (stage 3), about
2200 samples or 11 ms at 200 kHz.

## Departures and open points

Choices of this implementation, where the original is silent:

* word widths (16-bit I/Q, 32-bit power, 48-bit estimate);
* the stream format (valid, sof, time stamp; no ready signal);
* the use of both detectors at every stage;
* the synchronisation arithmetic and the meaning and length of the reset
  flag;
* the RFIlet record format;
* the rectangular one-tap channeliser, its channel order and its
  time-stamp alignment;
* M = 1024 and the history depth of the decision.

Left out or changed:

* the RRP resynchronisation delay is present in `rrp_estimator` but removed
  in the top;
* there is no Gaussian generator;
* registers that a fast FPGA build would add between the estimator's
  operators are not added, so the feedback loop reads and writes the state
  memory in one cycle (asynchronous read). This keeps the update exactly
  as specified, but it is not block-RAM friendly.

The RFI database and the board platform are not part of the RTL.

## Verification

Every module has a self-checking testbench in `tb/`. Each drives random
traffic with gaps in `valid`, compares every output slot with a model
written independently in the testbench, and prints
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_power_calc` | power and 2-cycle delay, including −32768 |
| `tb_rrp_estimator` | exact estimate against a model of the update rule, 3-cycle latency, freezes on impulses, convergence, power reset mid-run, 3-frame resynchronisation |
| `tb_bernoulli_detector` | windowed counts for (T, T_d) = (5, 3) and (3, 3) |
| `tb_flag_sync` | waveform delay, per-detector stretching, OR, reset flag after reset and after a pulse |
| `tb_blanking`, `tb_rfilet_gen` | all modes; one record per flagged sample |
| `tb_pfb8` | each bin against a floating-point DFT (±2 LSB), tone placement, dropping of unaligned frames, time stamps |
| `tb_rfi_decision` | inheritance from both coarse stages, against flags recorded by the testbench |
| `tb_oriented_accumulator` | averages and counts per channel |
| `tb_detection_module` | one stage: zero blanking exact, cycle-exact latency, a 3-sample pulse caught by the strong detector, a +5 dB weak tone caught, quiet channel not flagged |
| `tb_two_detector_sim` | one channel at the default detector settings: false-alarm rates under 6 M noise samples against the binomial tail (measured about 2.0·10⁻⁵ strong and 1.0·10⁻⁵ weak, theory 2.1·10⁻⁵ and 1.3·10⁻⁵), 15 dB 3-sample pulses and 2 dB 300-sample carriers all caught |
| `tb_uniboard_rfi_top` | whole chain with 2 beamlets: decision = OR of RFIlets of the parent channels, powerlets equal to the testbench's own accumulation, every mechanism exercised at least once |
| `tb_uniboard_full` | the same at full size (248 beamlets, M = 1024), one complete integration, about 17 M clock cycles |

In `tb_uniboard_rfi_top` a tone 9 dB below the noise of its beamlet is
required to be reported by the finest stage, in the expected channel. This
is the resolution gain the multi-level scheme is meant to provide: after two
8-bin channelisers the tone stands about 9 dB above the noise of its final
channel (−9 dB + 10·log10 64).

Running a testbench with plain Verilator, from the directory holding `rtl/`
and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_uniboard_rfi_top \
    -Irtl -Itb rtl/rfi_pkg.sv rtl/*.sv tb/tb_uniboard_rfi_top.sv
./obj_dir/Vtb_uniboard_rfi_top
```

(Listing `rfi_pkg.sv` first is enough; Verilator ignores the duplicate.)
The full-size run takes about half a minute. Memories are not reset, so
run with `+verilator+rand+reset+2` to check that nothing depends on their
initial contents.

## Files

`rtl/rfi_pkg.sv` (types, widths, threshold test), `rtl/slot_counter.sv`
(stream position helper), one file per block named after the module, and
`rtl/uniboard_rfi_top.sv`. Testbenches are in `tb/`, one per module, plus
`tb_uniboard_full.sv`.
