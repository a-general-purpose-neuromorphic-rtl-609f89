# Spiketrum encoder, area-optimized: synthesizable RTL

Spiketrum turns a sampled analogue signal (sound, ECG, EMG) into spike trains.
It works by *matching pursuit*. A segment of the signal is compared with a
fixed dictionary of short waveforms: 40 Gammatone kernels, like the filters of
the cochlea. The kernel and time shift that match best become one **code**
`(m, tau, s)`: kernel index, time position and signed intensity. That kernel,
scaled and shifted, is then subtracted from the segment. The search is repeated
on what is left, up to `k` times per segment, or until the best match is too
weak to matter. Each code becomes one spike. Its place depends on the kernel
and on how strong the match was: each kernel owns three output channels, one
per intensity level, so 40 kernels give 120 channels. The spike's time in the
train is given by `tau`.

This is the *area-optimized* form of the encoder. The whole search uses one
multiply-accumulate unit in the time domain. A faster published form instead
uses FFT-based convolution with many multipliers; it is not part of this RTL.

```
             +------------------------- Controller <--- stop --- Feedback <-----+
             |                                                                  |
 samples --> Signal RAM --x(t)--> Convolution with kernel set --> Code Generator --(m,tau,s)--+--> Intensity-to-Place
   ^         (2048 x 34)          (one MACC, every m and shift)   (34-bit max)                |     (120 delays)
   |                                    ^ phi_m                                               |        |
   |                             Time-Domain Kernel ROM (40 x 2048 x 34)                      |     spikes[119:0]
   |                                    | phi_m                                               |
   +--- x_new = x - s*phi_m(t-d) <-- Subtractor <-- Multiplier (x s) <-- Shifter (RAM) <-----+
```

## The encoding loop

A segment is `LEN` = 2048 samples. Once the Signal RAM holds a full segment,
the controller takes it with a valid/ready hand-shake and runs this loop:

1. **Search** (`conv_engine`, `macc_core`). For every kernel `m` and every
   time position `tau` = 0..2048, compute the correlation

       c(m, tau) = sum over n of x[n] * phi_m[n - d],   d = tau - 1024

   over the `2048 - |d|` samples where the segment and the shifted kernel
   overlap. The MACC core takes one product per cycle. One search is
   40 x (2049 x 2048 - 1024 x 1025) = **125,870,080 cycles**.
2. **Pick** (`code_generator`). A 34-bit comparator keeps the result with the
   largest |c|, with its `m` and `tau`. On a tie, the earlier result is kept.
3. **Decide** (`feedback`). If |s| is below `cfg_threshold`, the segment
   ends and this code is dropped. Otherwise the code is emitted to the spike
   generator. If it is the `k`-th code (`cfg_k`), the segment ends.
4. **Remove** (`kernel_elimination` with `shifter`, `residual_multiplier`,
   `subtractor`). The segment is overwritten in place with
   `x[n] - s * phi_m[n - d]`. This takes about 24,300 cycles at the default size.
5. Go to 1.

When the segment ends, the Signal RAM is released and capture of the next
segment starts. There is only one segment buffer. While a segment is being
encoded, `in_ready` is low and the sample source has to wait.

## Numbers

Every sample, kernel value, intensity and residual is a 34-bit two's-complement
fixed-point word. The split is Q9.24: 9 integer bits, 24 fraction bits, range
±512. The 34-bit width is the published one; the split is this design's choice.
With kernels of unit energy, `s` is roughly the amplitude of the kernel in the
signal.

- The MACC core keeps a 79-bit sum. That is exact for 2048 products.
- At the end of a sum, the result is shifted right by 24 and saturated to
  34 bits.
- The residual multiplier uses the same scaling and saturation.
- The subtractor saturates its result.

These rules are in `spiketrum_pkg` (`scale_sat`, `word_abs`). The testbenches
check them with their own 128-bit arithmetic.

## Time shifts, and why the shifter is a RAM

`tau` is carried as an unsigned position 0..2048 inside the segment.
`tau = 1024` means no shift, and `d = tau - 1024` runs from -1024 to +1024.

Removing a kernel needs `phi_m` shifted by `d`. Shifting 2048 words with
multiplexers would be costly, so the shift is done by *where the kernel is
written*:

- The Shifter RAM holds 3072 words (13 kB) and is all zeros between uses.
- **Load.** Kernel sample `phi[j]` is written at address `tau + j`. Writes past
  address 3071 are dropped.
- **Read.** The reader always reads addresses 1024..3071. Address `1024 + n`
  holds `phi[n - d]`. That is the shifted kernel, with zeros where it falls
  outside the kernel. A positive shift starts the kernel above address 1024
  (shifted right in time); a negative one starts it below (shifted left, and
  the first `|d|` samples are never read).
- **Clear.** The words that were written are set back to zero, so the next
  load starts from a clean RAM. The Kernel ROM is never modified.

The Signal RAM has a single port. The residual step therefore works one sample
at a time, and each sample takes 10 cycles:

| step | cycles |
|---|---|
| read `x[n]` and the shifted kernel sample | 1 |
| capture the read data | 1 |
| three input stages, multiply, three output stages | 6 |
| subtract | 1 |
| write `x_new[n]` back | 1 |

This is small next to the search.

## Intensity-to-Place coding

Each kernel `m` owns channels `3m`, `3m+1` and `3m+2`, with centre
intensities 0.0065, 0.4115 and 25.8744. A code goes to the channel whose
centre is nearest to |s|, measured as a linear distance.

- The switch from the first level to the second is at |s| = 0.209.
- The switch from the second level to the third is at |s| = 13.143.

The chosen channel's delay element is armed with `tau`. It counts `itp_tick`
pulses, and after `tau` ticks the channel gives a one-cycle spike. Normally
`itp_tick` is the sample strobe; tie it high to count clock cycles.

Each channel holds one pending spike. A second code for the same channel is
dropped while a spike is still pending, and `itp_overflow` pulses. At full size
this cannot happen: a search (0.63 s) is far longer than the longest delay.

The centre intensities are parameters of `spike_generator` (Q9.24 integers).
They can be rounded to cheaper values.

## Top-level interface (`spiketrum_top`)

| port | dir | width | use |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `in_valid`, `in_ready`, `in_data` | in/out/in | 1/1/34 | sample stream, Q9.24; a stalled sample must stay offered unchanged (checked by an assertion) |
| `kl_en`, `kl_m`, `kl_j`, `kl_data` | in | 1/6/11/34 | writes kernel `m` sample `j` into the Kernel ROM; only while `busy` is low |
| `cfg_k` | in | 10 | codes per segment, read when a segment is accepted; 0 = none |
| `cfg_threshold` | in | 34 | halting threshold on \|s\|, Q9.24 |
| `itp_tick` | in | 1 | time base of the spike delays |
| `spikes` | out | 120 | one-cycle spike per channel, channel = 3m + level |
| `code_valid`, `code_out` | out | 1/52 | every emitted code `{m[5:0], tau[11:0], s[33:0]}` |
| `seg_done` | out | 1 | pulses when a segment is finished and the buffer is free |
| `stop_thr`, `stop_cnt` | out | 1 | the segment ended on the threshold / on `k` |
| `itp_overflow`, `itp_pending` | out | 1 | a code was dropped at a busy channel / spikes are pending |
| `n_codes`, `busy` | out | 10/1 | codes made in this segment; encoder busy |

**Timing.**

- The Kernel ROM must be loaded once, 81,920 words, before the first segment.
- A code follows the start of its search after the search length plus 2 cycles.
  The next code of the same segment comes 125,870,080 + 24,289 cycles later at
  the default size.
- The spike of a code leaves `tau + 3` cycles after `code_valid` when
  `itp_tick` is always high.

Parameters: `LEN` (2048), `N_K` (40), `STEP` (1). `LEN` must be a power of two.
`STEP` > 1 searches only every `STEP`-th time position. That divides the search
time by about `STEP`, at the cost of a coarser time grid.

## How far this follows the published design

The following come from the published description:

- the three stages and their blocks, and how they are wired;
- the single-port Signal RAM (8.7 kB = 2048 x 34 bits);
- the single-port Kernel ROM;
- the 13 kB Shifter RAM with its fixed read window 1024..3071, and the write
  start address that moves with the shift;
- three pipeline stages on each side of the residual multiplier;
- the subtractor in plain logic;
- the 34-bit comparator in the Code Generator;
- the single threshold comparator in Feedback;
- the 3 channels per kernel with their centre intensities;
- the channel numbering `3m + level`;
- a delay equal to `tau` before each spike.

The following are this design's own, because the description is silent:

- the Q9.24 format, the rounding and the saturation;
- all handshakes and port protocols;
- the pipeline depths of the MACC core and the memories;
- the order of the search loops;
- comparing |s| rather than signed `s`;
- "nearest" as a linear distance;
- dropping the code that falls below the threshold;
- skipping the residual step after the last code;
- clearing the shifter with explicit zero writes;
- the tick input of the delays;
- the one-spike-per-channel overflow rule;
- a write port on the Kernel ROM, since the kernel values themselves are not
  published. The testbenches compute their own Gammatone dictionary:
  ERB-spaced centre frequencies from 100 Hz to 6 kHz, unit energy.

**Throughput.** The published throughput figures do not agree with each other:

- 16 spikes per segment (115 per second);
- 9 spikes per segment, 4.7 ms per spike (206 per second);
- 3000 spikes per second for the chip.

None of them follows from an exhaustive time-domain search, which takes 0.63 s
per code at 200 MHz. The description does not say how the search was shortened.
This RTL searches every shift by default. `STEP` = 179 would come close to
4.7 ms per code, with a 179-sample time grid. Treat throughput as an open
question, not as a property of this RTL.

**Memories.** The memories are written as plain arrays (`sp_ram`, `kernel_rom`),
so that any flow can map them. The Kernel ROM holds 40 x 2048 x 34 bits =
348,160 bytes; the published size is 346 kB. The kernel length of 2048 is
inferred, not stated. In the fabricated chip, the Signal RAM and the Kernel ROM
sit off-chip. For such a version, move `u_signal_ram`'s `sp_ram` and
`u_kernel_rom` out of the top and bring their ports out.

**Not in the RTL.** The following are outside the logic; their signals are the
top's ports:

- the USB 3 link that streams segments from a host;
- the microphone front end;
- the clock manager;
- the output connector (or an AER link);
- chip pads and clock-gating cells.

## Files

| file | what it is |
|---|---|
| `rtl/spiketrum_pkg.sv` | widths, Q9.24 helpers, code struct, centre intensities |
| `rtl/spiketrum_top.sv` | the encoder; memory-port sharing between phases |
| `rtl/signal_ram_ctrl.sv`, `rtl/sp_ram.sv` | Signal RAM, capture and hand-shake |
| `rtl/kernel_rom.sv` | kernel dictionary |
| `rtl/conv_engine.sv`, `rtl/macc_core.sv` | correlation search |
| `rtl/code_generator.sv`, `rtl/feedback.sv` | best match, halting test |
| `rtl/spiketrum_controller.sv` | iteration sequencer |
| `rtl/kernel_elimination.sv`, `rtl/shifter.sv`, `rtl/residual_multiplier.sv`, `rtl/subtractor.sv` | residual computing |
| `rtl/spike_generator.sv`, `rtl/itp_delay.sv` | intensity-to-place coding |
| `tb/tb_ref_pkg.sv` | reference arithmetic, matching-pursuit model, Gammatone generator |
| `tb/tb_<block>.sv` | one self-checking testbench per block |
| `tb/tb_spiketrum_top.sv` | end to end at 64 samples and 4 kernels: every mechanism |
| `tb/tb_spiketrum_full.sv` | end to end at the default size: two codes of one segment |
| `tb/tb_spiketrum_workload.sv` | ECG-like and cymbal-like segments, 40 kernels, 16 codes each, 256-sample segments |

## Verification

Every testbench is self-checking. It ends with the line
`TB_RESULT checks=N failures=M`, and a watchdog ends it if it hangs. The
references are computed inside the testbenches. `tb_ref_pkg` holds an
independent matching-pursuit model with the same fixed-point rules, and the
end-to-end benches compare every code with it bit for bit. They also check:

- each spike's channel and delay;
- the number of cycles per code.

`tb_spiketrum_top` counts these mechanisms and fails if any never happens:

- the `k` limit;
- the threshold stop;
- `k = 0`;
- input back-pressure;
- positive and negative shifts;
- all three output levels;
- a channel overflow.

`tb_spiketrum_workload` runs signal-like input through the full dictionary:

- a generated ECG-like beat;
- a generated cymbal-like burst of decaying high tones and noise.

Each segment is 256 samples and gets 16 codes (about 1 minute). Besides the
bit-exact comparison, the signal is rebuilt from the codes the encoder gives,
and the error energy must fall with every code. It falls from 7.8 to 1.2 for
the beat and from 6.3 to 0.7 for the burst.

`tb_spiketrum_full` takes about 4 minutes (250 million cycles). Each block's
testbench was also run against a copy of the block with one deliberate bug, and
each one failed.

Run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/spiketrum_pkg.sv tb/tb_ref_pkg.sv tb/tb_spiketrum_top.sv \
    --top-module tb_spiketrum_top -Mdir obj -O2
./obj/Vtb_spiketrum_top
```

Replace the last file and the top module for any other bench.

To change the design:

- `LEN`, `N_K` and `STEP` on `spiketrum_top` scale it.
- The code struct allows up to 64 kernels (`M_W`) and positions up to 4095
  (`TAU_W`).
- The centre intensities and the fixed-point split are in `spiketrum_pkg`.
