# Continuous supernova readout stream of a MicroBooNE front-end module

A core-collapse supernova would produce a burst of low-energy neutrino interactions in
the MicroBooNE liquid-argon TPC lasting tens of seconds, with no trigger to mark when it
started. To catch it, each front-end module (FEM) of the TPC readout sends a second,
untriggered copy of all its data: the supernova (SN) stream. Every FEM digitises 64 wires
and keeps them at 2 MS/s, which is 128 M samples per second of 12-bit data. That is far
more than the servers downstream can write to disk. The FEM's FPGA therefore reduces the
stream as it goes, in two lossy-then-lossless steps:

1. **Zero suppression (ZS).** Only samples that stand out from the channel's baseline by
   more than a per-channel threshold are kept, plus a few samples before and after each one.
2. **Huffman coding.** Inside each kept region, small sample-to-sample differences are
   written as short variable-length codes, packed several to a 16-bit word.

The result is cut into records of 1.6 ms (3200 samples per channel), each with a
twelve-word header, and sent onto the readout crate's backplane. The backplane is shared
with the normal triggered readout, which always goes first.

This repository holds synthesizable SystemVerilog for that SN path of one FEM, from the
ADC samples to the backplane, plus self-checking testbenches. The reduction algorithms,
the Huffman table, the baseline estimator and the main sizes follow the published
description of the MicroBooNE continuous readout. Many lower-level details were never
published: the SRAM packing, the word tags, the header layout, the handshakes and the
token protocol. This design fills them in with its own choices, and each one is marked
below.

## Dataflow

```
 ADCs 64 x 12 bit @ 16 MS/s
   |  adc_valid / adc_data
 downsampler         keep 1 vector in 8  -> 2 MS/s
   |
 ringbuf_writer      3 samples of a channel per 36-bit word, time order
   |                         +---------------------------------+
   +---- sram_* ports ------>|  external SRAM 1 M x 36 (ring)  |
   |                         +---------------------------------+
 ringbuf_sn_reader   one finished 1.6 ms frame at a time, channel by channel
   |
 [dynamic_baseline]  only when DYNAMIC_BASELINE = 1
   |
 zero_suppress       threshold + sign per channel, 7 presamples / 8 postsamples
   |
 huffman_encoder     16-bit words: channel header, timestamp, raw, Huffman
   |
 frame_builder       buffer the frame, then 12-word header + payload
   |
 dataway_arbiter <-- trg_* (trigger-stream packets, priority)
   |  bp_* , token_in / token_out
 crate backplane
```

`zs_config` holds the run configuration and feeds every stage. `fem_sn_top` wires it
all together. Between stages, data moves on valid/ready streams, one item per clock,
so any stage can stall the ones before it.

## Storing and re-reading the samples

The ADCs give all 64 channels at the same instant, but the SN processing wants one
channel's 1.6 ms waveform after another. This transpose happens in the external SRAM:
samples go in by time and come out by channel.

**Packing.** A 36-bit SRAM word holds three successive samples of one channel. Tick
`3q` goes in bits 11:0, tick `3q+1` in bits 23:12 and tick `3q+2` in bits 35:24. The word
address is `{q mod 2^14, channel}`, so one "triple" `q` fills 64 neighbouring words. The
1 M-word SRAM then holds 16384 triples: 49152 ticks, or 15.4 frames. When the address
wraps, the oldest data are overwritten.

**Writing.** `ringbuf_writer` keeps the first two sample vectors of a triple in
registers. When the third vector arrives, it writes the 64 packed words in 64 clocks in a
row. `wr_triples` counts finished triples. It is the only thing the reader is told about
the writer.

**Reading.** Frame `f` covers ticks `3200f ... 3200f+3199`. Because 3200 is not a
multiple of 3, a frame can start at any of the three slots of a word. The reader keeps
the frame's first triple `fq` and start slot `fs`, and reads `(fs + 3199)/3 + 1` words per
channel. A word shared by two frames is read once for each. Reading of a frame starts once
`wr_triples` has passed its last triple. The comparison uses signed subtraction, so it
still works when the counter wraps. The SRAM has one port. The writer owns it whenever
`sram_we` is high, and the reader issues reads in the remaining clocks. Reads are issued
only while the 32-word FIFO has room for everything in flight, with data returning
`RD_LAT` = 2 clocks after the read. An unpacker turns each word into up to three samples,
one per clock. The FIFO holds 96 samples, enough to keep the unpacker busy through a
64-clock write burst. With only 8 words, the unpacker would idle for about 40 of
every 240 clocks at the simulated clock. It tags each sample with channel, tick, frame number and the markers
`sol`/`eol`/`eof` (start and end of channel, end of frame).

**Port budget at 128 MHz.** Per three ticks (1.5 µs = 192 clocks), the writer needs
64 clocks and the reader needs about 64. The SRAM port is therefore two-thirds busy.

## Clock and throughput

Everything runs on one clock. The published description names a 128 MHz SRAM but no
FPGA clock. After the SRAM, the datapath processes one sample per clock, and the input is
64 × 2 MS/s = 128 MS/s. The clock must therefore be **faster than 128 MHz**. At exactly
128 MHz there is no slack: the end-of-frame drains and the time `frame_builder` spends
sending a record would pile up. A lag is harmless while it is short, because the reader
simply falls behind the writer in the ring buffer. It can fall up to about 13 frames
behind before unread data are overwritten, and nothing checks for that. The full-size
testbench runs at 10 clocks per 16 MS/s vector (a 160 MHz clock), which gives a 25 %
margin. There, each frame's record is complete 0.81 frame times after the frame's last
sample, and the testbenches fail if that delay ever reaches a full frame time.

## Zero suppression

For sample `x` of a channel with baseline `b`, threshold `t` and sign `s`, the sample
*passes* if:

| sign (2 bits) | pass condition |
|---|---|
| 0 off | never (an unused channel sends only its header) |
| 1 positive | x > b + t |
| 2 negative | x < b − t |
| 3 either | x > b + t or x < b − t |

A sample is *kept* if it passes, if any of the next `pre` samples passes (presamples),
or if any of the previous `post` samples passed (postsamples). The run uses `pre` = 7 and
`post` = 8, which are the largest values the field widths allow (post is clamped to 8).
A run of kept samples is an ROI (region of interest), and overlapping ROIs merge into
one. Each frame is suppressed on its own, so an ROI ends at a frame boundary.

**Implementation.** The stream is channel-interleaved only at channel boundaries: one
channel's 3200 samples arrive in a row, then the next channel's. The ZS uses a 7-deep
delay line. The *candidate* is the entry `pre` places back, and the newer entries are
its look-ahead. A down-counter reloaded with `post` on every passing candidate handles
the postsamples. Between channels, the delay line is not flushed, which would cost 7
clocks per channel. Instead, each entry carries a one-bit *segment* tag that toggles at
every channel start, and look-ahead and postsample logic ignore entries of another
segment. At the end of a frame, when no further input is waiting, the line drains by
itself. The block emits one item per kept sample, plus one per channel start (channel
header) and one per frame end.

**Static baselines (default).** Each channel's baseline is a register written at run
start, normally the most frequent ADC value of that channel in a reference run. Channel
thresholds are set so that a target fraction of noise is removed (for example, the
98.5 % interval of the noise distribution). Plane-wide values such as U −25, V ±15 and
Y +30 counts fit just as well.

## Dynamic baseline (build option)

With `DYNAMIC_BASELINE = 1`, `dynamic_baseline` sits in front of the ZS and estimates
each channel's baseline from the data:

* The channel's samples are cut into contiguous blocks of 64 (32 µs).
* Per block: **mean** = (sum of the 64 samples) >> 6. **Variance** = (sum of
  (x − mean)²) >> 6, where a sample with |x − mean| ≥ 63 adds 4095 instead of its
  square. This keeps the sum bounded.
* After each block, the last three blocks are compared pairwise. If all three mean
  differences are ≤ `mean_tol` and all three variance differences are ≤ `var_tol`, the
  **middle** block's mean becomes the baseline. It applies from the first sample after
  the third block. Otherwise the old baseline stays.
* Until the first success, a channel has no baseline, and the ZS keeps nothing of it.

The typical tolerances are 2 counts for the mean and 3 counts² for the variance. These
are the reset values.

**Implementation.** This is the subtle block. The variance needs the block's mean
before it can sum the squares, so every sample goes through a 64-entry delay line. On
the entering side, the block sum is accumulated, and the mean is ready when the 64th
sample enters. On the leaving side, the squared differences of the same block are summed
against that mean. When the block's last sample leaves, the three-block test runs. A
sample therefore leaves with the baseline in force at that moment. That is exactly the
"applied after the third block" rule: the first sample to see a new baseline is the
first sample of the block after the three compared.

The blocks belong to channels, but the stream arrives one channel's frame at a time.
Because 3200 = 50 × 64, a block never straddles two channels. So the per-channel state is
kept in 64-entry arrays, indexed by the channel of the leaving sample: baseline, valid
flag, and the means and variances of the two previous blocks. Block boundaries count
from the start of the run and continue across frames. As in the ZS, the delay line runs
on across channel boundaries and drains by itself at a frame end. This adds 64 samples
of latency.

## Word format and Huffman coding

All output words are 16 bits. Bit 15 tells the two families apart:

| bits 15:12 | word | contents |
|---|---|---|
| `0001` | channel header | bits 5:0 = channel (one per channel per frame, even if empty) |
| `0010` | ROI timestamp | bits 11:0 = tick within the frame of the ROI's first sample |
| `0011` | raw ADC | bits 11:0 = ADC value |
| `1xxx` | Huffman word | bits 14:0 = packed codes |

The tags `0001`/`0010`/`0011` and the per-ROI timestamp are this design's own. The
published format only says that non-Huffman words have the ADC value in the low 12 bits
and a header in the rest, and that each channel is preceded by a header and a timestamp.

The first sample of an ROI is always sent as a timestamp word followed by a raw word.
Each later sample is coded by its difference Δ to the previous sample:

| Δ | 0 | −1 | +1 | −2 | +2 | −3 | +3 | other |
|---|---|---|---|---|---|---|---|---|
| code | `1` | `01` | `001` | `0001` | `00001` | `000001` | `0000001` | raw word |

Every code ends in a `1`, so the codes need no separators. They are packed from bit 14
downward. A word is closed, with its unused low bits zero, when the next code does not
fit or when a raw word, a new ROI or a new channel follows. A new Huffman word then
continues the run. For example, the differences 0, +1, −1, 0 after a raw word give the
codes `1`, `001`, `01`, `1`. Behind the flag in bit 15 they fill bits 14..8 as `1001011`,
and the rest is zero. The word is `0xCB00`, if the ROI ends there.

To decode, read a raw word to get the value. Then for each `1` in a Huffman word
(counted from bit 14 downward), the number of zeros before it selects Δ from the table.

`huffman_encoder` takes one item per clock and can produce up to four words for it: the
closing Huffman word, a channel header, a timestamp and a raw word. The words leave
through a 6-entry queue, one per clock.

## Frame record

`frame_builder` collects one frame's payload in an on-chip buffer of 2^18 words. The
buffer is needed because the word count and checksum come before the payload. It stands
in for the per-stream DRAM of the real FEM. At the end of the frame, it sends:

| word | contents |
|---|---|
| 0 | `0xF000` \| FEM address (5 bits) |
| 1, 2 | payload word count (high, low) |
| 3, 4 | sequential identifier: records sent since reset (high, low) |
| 5, 6 | frame number, 24 bits (high byte in word 5) |
| 7, 8 | checksum: 32-bit sum of all payload words (high, low) |
| 9–11 | zero |
| 12… | payload |

The layout is this design's own; the published description lists only the fields. The
worst case with 7 presamples and 8 postsamples is 64 × (1 + 3200 + 200) = 217 664 words,
so the buffer cannot overflow at the defaults. If a smaller buffer fills, words are
dropped (the record stays well formed) and `sn_buf_overflow` pulses. While a record is
being sent the builder does not accept new words, so the pipeline behind it stalls.

## Sharing the backplane

`dataway_arbiter` implements "the trigger stream goes first, using a token". The token
arrives as a one-clock pulse on `token_in`. The FEM then sends one whole packet: a
trigger-stream packet if one is waiting, otherwise an SN record. It then passes the token
on with a pulse on `token_out`. With nothing to send, it passes the token on at once. A
packet, once started, is always finished. `bp_sn` says which stream the current packet
belongs to. The token ring, its timing and the 16-bit packet interface are assumed. The
512 MB/s figure of the real backplane is not modelled.

## Configuration registers

Writes go through `cfg_we`/`cfg_addr`/`cfg_wdata`. `cfg_rdata` reads back the
addressed register combinationally.

| address | bits |
|---|---|
| `0x00`–`0x3F` (channel) | 11:0 baseline, 23:12 threshold, 25:24 sign |
| `0x80` (FEM) | 2:0 presamples, 7:4 postsamples (>8 stored as 8), 15:8 mean tolerance, 23:16 variance tolerance, 28:24 FEM address |

Reset values: all channels have sign *off*; presamples 7, postsamples 8, tolerances 2
and 3, FEM address 0. A channel must be configured before it produces data.

## Parameters of `fem_sn_top`

| parameter | default | meaning |
|---|---|---|
| `NCH` | 64 | channels per FEM (power of two) |
| `FRAME_TICKS` | 3200 | 2 MS/s samples per frame (1.6 ms) |
| `DS_RATIO` | 8 | 16 MS/s → 2 MS/s |
| `SRAM_AW` | 20 | SRAM address bits (1 M × 36) |
| `RD_LAT` | 2 | SRAM read latency in clocks (assumed) |
| `BUF_AW` | 18 | frame buffer, 2^BUF_AW words |
| `DYNAMIC_BASELINE` | 0 | 0 = static baselines, 1 = sliding-window estimator |

The dynamic baseline assumes `FRAME_TICKS` is a multiple of 64.

## External connections

The top stops where the published design uses parts it does not describe. These parts
connect through ports:

* **ADCs**: `adc_valid` marks each 16 MS/s vector. The downsampler keeps the first of
  every 8, with the phase set by the first vector after reset. It decimates without
  filtering.
* **SRAM**: `sram_we`, `sram_re`, `sram_addr`, `sram_wdata`, `sram_rdata`, a
  synchronous single port with read data `RD_LAT` clocks after `sram_re`.
  `tb/sram_model.sv` is a behavioural model for simulation.
* **Trigger-stream readout**: the triggered readout of the same SRAM is documented
  elsewhere and is not included. Its packets enter on `trg_*`. In a real FEM it would
  also need SRAM port time, which this design gives entirely to the SN stream.
* **Crate**: `token_in`/`token_out` and the `bp_*` dataway. The transmitter board,
  optical links, DAQ servers and their disk policy are outside the FPGA.

## Where this differs from the original firmware

* Downsampling is plain decimation (keep 1 of 8). The original method is not published.
* The frame numbering starts at 0 at reset. The header layout, the word tags, the
  per-ROI timestamp and the checksum definition (32-bit sum) are assumptions.
* ZS treats each frame on its own. An ROI crossing a frame boundary is split, and the
  second part starts with new presamples only if they fall in the new frame.
* The clock must exceed 128 MHz (see above). There is no check that the reader stays
  within the ring buffer.
* Offline steps of the SN analysis (baseline interpolation from pre/postsamples, the
  flipped-bit filter, deconvolution, hit finding) are software and are not part of the
  hardware.

## Simulation

Each block has a self-checking testbench in `tb/`. Each testbench compares the block
against an independent model and prints `TB_RESULT checks=N failures=M`. The main
ones:

* `tb_fem_sn_top`: the whole chain at reduced size (4 channels, 128-sample frames,
  a 3-frame ring, so the ring wraps). It runs twice, with static and with dynamic
  baselines, through six frames, with trigger packets and a stalling backplane.
* `tb_fem_sn_full`: the top with all defaults (64 channels, 3200-sample frames,
  1 M-word SRAM) for two full frames, in about a second of simulation time.
* `tb_fem_sn_planes`: the same at full size with plane-wide thresholds
  (U −25 negative, V ±15 either sign, Y +30 positive). A FEM reads 16 U, 16 V
  and 32 Y wires, which the test takes as channels 0–15, 16–31 and 32–63.
* `tb_fem_sn_dynamic`: full size built with the dynamic baseline, three frames,
  with a 20-count step on half the channels that the baseline has to follow.

Both use `tb/tb_sn_env.sv`, which generates the waveforms: per-channel baselines,
noise, and pulses of several slopes and polarities. It also applies random data to the 7
of every 8 ADC vectors that must be discarded. It computes the expected kept samples
straight from the ZS definition (and, for the dynamic mode, from a direct block-by-block
evaluation of the baseline rule). It decodes every record, checks the header fields and
checksum, and compares every decoded sample. It also counts that presamples,
postsamples, raw words, Huffman words, word splits, ring wrap, trigger packets and
baseline updates and rejections all occurred.

Build and run any testbench with plain Verilator 5, for example:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -y rtl -y tb \
    rtl/sn_pkg.sv tb/tb_fem_sn_top.sv --top tb_fem_sn_top -Mdir obj_top
./obj_top/Vtb_fem_sn_top
```

All RTL is synthesizable. There is one clock, an asynchronous active-low reset, and the
frame buffer is an inferred memory. The SRAM is off-chip and sits in the testbench.
