# Continuous readout with real-time compression for a liquid-argon TPC

A liquid-argon time projection chamber records every wire continuously: in
MicroBooNE, 8256 wires are sampled at 2 MS/s with 12-bit ADCs. Reading all of it
out all the time, for instance to catch the neutrino burst of a supernova that
nobody can trigger on in advance, means roughly 4 GB/s for each of the nine
readout crates. The disk behind each crate takes about 50 MB/s. The data must
therefore shrink by about a factor of 80 on the way, and that happens in the
FPGA of each front-end module (FEM), in two stages:

1. **Zero suppression (lossy).** Only samples that leave a band around the
   channel's baseline are kept, plus a few samples before and after each
   excursion. The baseline is either loaded per channel or estimated live from
   the data.
2. **Huffman coding (lossless).** Inside a kept region, small sample-to-sample
   differences (|d| <= 3) are replaced by 1- to 7-bit codes, several of which
   share one 16-bit word.

The same FEM also keeps a second, uncompressed path: frames that receive a
trigger are sent whole on the *Trigger Stream*. The compressed path is the
*Continuous Readout Stream* (also called the supernova stream, SN).

This repository holds SystemVerilog for the digital part of one crate: the FEM
FPGA logic and the crate's backplane collection of both streams. It follows the
MicroBooNE readout as published by its authors. Where the publication is
silent, this design fills the gap; the sections below name each such choice.

## The crate at a glance

```
           16 MS/s x 64 ch                 2 MS/s        channel order
ADCs ──► downsampler ──► ring_buffer_ctrl ◄──► external SRAM (1M x 36, 8 frames)
                              │
              ┌───────────────┴──────────────────┐
              ▼                                  ▼
      zero_suppressor                      trigger_formatter
   (+ baseline_estimator)                  (triggered frames, raw)
              ▼                                  ▼
      huffman_encoder                       stream_fifo
              ▼                                  │
        stream_fifo                              │
              └────────────► backplane_arbiter ◄─┘   (one per crate, the XMIT)
                              │            │
                       Trigger Stream   Continuous Stream  ──► optical links
```

`fem_fpga` is one FEM (64 wires). `tpc_crate` holds `N_FEM = 15` of them plus
the `backplane_arbiter`. Everything runs on one clock, the 128 MHz SRAM clock.
At that clock an ADC strobe arrives every 8 clocks (16 MS/s) and a 2 MS/s tick
every 64 clocks. The shared types, word labels and register addresses are in
`lartpc_pkg`.

The number of FEMs per crate is not published. Fifteen comes from spreading
8256 wires over 9 crates (14.3 FEMs of 64 wires each). Fifteen FEMs also give
15 x 64 x 2 MS/s x 2 bytes = 3.84 GB/s, which matches the quoted ~4 GB/s per
crate.

## From time order to channel order: the SRAM ring

The ADCs deliver all channels at once, one time step after another. Both
compression stages, however, work along one channel's waveform. The FEM bridges
the two with an external 1M x 36-bit SRAM used as a ring of 8 frames. Each
frame is 1.6 ms, i.e. 3200 ticks, so the ring holds 12.8 ms. Frames are written
in time order and, once complete, read back in channel order.

The SRAM port budget is the tightest point of the design:

* One 36-bit word holds two consecutive samples of one channel.
* 64 channels every two ticks is 64 writes per 128 clocks.
* Reading a frame back at the rate it was written is another 64 reads per
  128 clocks.

The single SRAM port is therefore busy on every clock. `ring_buffer_ctrl`
reserves it as follows:

* On each odd tick, the 64 sample pairs go to a write buffer and are written in
  a 64-clock burst, with priority.
* Reads fill every other clock. Each word read is split into two samples, one
  per clock.
* A 64-word read queue carries the output through each write burst.

With this schedule a frame leaves within one frame period of its completion, so
the ring never fills. The full-size test confirms it. A shorter queue (8 words)
was measured to sustain only ~60% of the needed read rate.

The address is `{frame[2:0], channel[5:0], pair[10:0]}`. Of the 2048 pair slots
per channel and frame, 1600 are used. Bits 35:24 of each word are unused and
written as zero.

A trigger pulse marks the frame being written. Every sample of that frame then
leaves the ring with `triggered = 1`.

## Zero suppression

For each sample, with the channel's baseline B, threshold T and sign setting:

| sign | sample passes when |
|---|---|
| positive | adc > B + T |
| negative | adc < B − T |
| both | either |
| none | never |

A *region of interest* (ROI) is every passing sample, plus up to `pre` samples
before the first and up to `post` samples after the last. Both counts are set
per FEM, and the maximum (7 and 8) is what the detector used. Overlapping
windows merge into one ROI. An ROI never crosses a channel or frame boundary.

`zero_suppressor` does this with a short shift register:

* A sample enters at stage 0 with its pass flag.
* The decision is made at stage 7. There, the sample is kept if:
  * it passes itself;
  * or one of the next `pre` samples of the same channel passes (they are
    already in stages 0..6);
  * or the last passing sample is at most `post` samples back (a counter).
* One more stage delays each kept sample until the next decision is known. That
  tells the sample whether it is the last of its ROI.

The threshold, sign and static baseline are per channel, so the design can run
either a plane-wide threshold (the same value written to all channels) or
per-channel thresholds.

## The dynamic baseline

Used instead of a static one, `baseline_estimator` follows the channel's own
pedestal. It works on blocks of 64 consecutive samples of one channel. Blocks
start at ticks that are multiples of 64; a frame holds exactly 50 of them, so a
channel's blocks run on across frames. For each block it computes:

* **mean:** μ = (Σ adc) >> 6;
* **variance:** σ² = (Σ e) >> 6, where e = (adc − μ)² if |adc − μ| < 63, and
  e = 4095 otherwise. The clamp keeps the sum bounded.

After each block, the newest three blocks (i−1, i, i+1) are compared. If all
three pairwise mean differences are <= the mean tolerance, and all three
variance differences are <= the variance tolerance, then:

* μ_i (the middle block's mean) becomes the channel's baseline;
* the channel is marked *valid*.

Otherwise the old baseline stays in force. A block containing a pulse thus
fails the test, and neither it nor its neighbours set the baseline. Until a
channel's first window passes, that channel produces no samples. Both
tolerances are per FEM.

Two details make this work in a stream where 64 channels are interleaved frame
by frame:

* **History per channel.** The estimator keeps, per channel, the means and
  variances of the two previous blocks and a count of blocks seen. The window
  therefore slides independently for each channel.
* **Two passes over each block.** The variance needs the block's mean first.
  Samples therefore go into one of two 64-entry buffers while the sum
  accumulates. After the block ends, a second pass over that buffer (one sample
  per clock, while the next block fills the other buffer) sums the squared
  differences. The decision comes 66 clocks after the block's last sample.

The baseline should apply from the sample after the third block of a window.
To make that hold, the suppressor delays the sample stream by 72 samples
(`ZS_DELAY`, at least one block plus the second pass). It then latches the
estimator's value at the start of every block of the delayed stream. As a
result, a window ending at block i+1 sets the baseline used for block i+2, and
the baseline is constant within a block. The reference model in the testbenches
does the arithmetic independently and checks this exactly.

## Word format and Huffman packing

Both streams are made of 16-bit words. A word with bit 15 = 0 carries a 4-bit
label and a 12-bit value. The publication fixes only the raw-sample layout
(value in bits 11:0, label in bits 15:12); the label values and the three
header words are this design's choice.

| bits 15:12 | word | bits 11:0 |
|---|---|---|
| `0000` | raw ADC sample | sample |
| `0001` | channel header | channel number |
| `0010` | ROI header (SN stream only) | tick of the ROI's first sample |
| `0100` | frame header | frame counter, mod 4096 |
| `1xxx` | Huffman word | bits 14:0 hold codes |

Each frame starts with a frame header. Each channel starts with a channel
header. In the SN stream, each ROI starts with an ROI header followed by its
first sample raw. Every later sample of the ROI is coded relative to the
previous one, d = adc[i] − adc[i−1]:

| d | 0 | −1 | +1 | −2 | +2 | −3 | +3 |
|---|---|---|---|---|---|---|---|
| code | `1` | `01` | `001` | `0001` | `00001` | `000001` | `0000001` |

Codes are laid into the 15 payload bits from right to left. The first code sits
lowest, and the finished group is pushed up against bit 14, with zeros filling
the unused low bits. A word is closed:

* when the next code does not fit; that code starts a new word;
* when a difference exceeds ±3; that sample follows as a raw word;
* at the end of the ROI.

Example: differences (−2, −1, 0, +1) become `1 | 001 1 01 0001 | 00000` =
`0x9A20`, one word instead of four.

A code of length L is a single 1 preceded by L−1 zeros. `huffman_encoder`
therefore keeps only an accumulator and a length:

* add a code: `acc |= 1 << len; len += L`;
* close the word: emit `{1, acc << (15 − len)}`.

Decoding goes the other way (see `stream_decoder` in `tb/tb_lartpc_pkg.sv`):

1. Skip the trailing zeros.
2. Each 1 found moving up ends one code; its distance from the previous 1 (or
   from the end of the padding) is the code length.
3. The last code is ended by bit 15 itself.

One sample in, up to four words out per clock. The worst case is frame header +
channel header + ROI header + raw sample.

## Trigger Stream

`trigger_formatter` sends every sample of a triggered frame as a raw word,
behind frame and channel headers, with no suppression. Untriggered frames are
dropped from this stream. Every frame, triggered or not, also goes through the
SN path.

## Stream buffers and the backplane

Each FEM has two `stream_fifo`s, one per stream. Each takes 0..4 words per clock
and offers beats of 1 or 2 words (32 bits). A burst that does not fit is dropped
whole. Dropping sets the sticky `*_overflow` flag and adds to a count.

In the crate, `backplane_arbiter` is the XMIT board's collection logic:

* One dataway carries one 32-bit beat per clock, i.e. 512 MB/s at 128 MHz.
* Each stream has its own token, which visits the FEM slots in order. The
  holder sends beats until its buffer is empty or it has sent 256 beats
  (`MAX_BURST`), then passes the token.
* The Trigger Stream always gets the dataway first; an SN beat goes only in a
  clock the Trigger Stream leaves free.
* Outputs are ready/valid beats per stream, tagged with the source slot,
  because the words themselves do not name their FEM.

The publication states the token passing, the shared dataway and the priority.
The token order, the release rule and the burst limit are this design's
choices.

## Configuration

Writes go through `cfg_we/cfg_addr/cfg_wdata`; at crate level `cfg_fem` selects
the FEM.

| address | content |
|---|---|
| `0x000 + ch` | bits 13:12 sign (0 none, 1 positive, 2 negative, 3 both), bits 11:0 threshold |
| `0x100 + ch` | static baseline (12 bits) |
| `0x200` | bit 8 dynamic baseline, bits 6:4 presamples (<= 7), bits 3:0 postsamples (<= 8) |
| `0x201` | mean tolerance |
| `0x202` | variance tolerance |

After reset every channel's sign is *none*, so nothing is kept until thresholds
are written. Presamples and postsamples reset to 7 and 8.

## What is not here, and where this departs from the source

* **The per-stream DRAM of the FEM is not modelled.** The on-chip FIFOs are
  1024 words each. For the compressed stream that is ample: at a compression of
  ~80 a crate sends ~50 MB/s over a 512 MB/s dataway. A triggered frame is a
  different matter: 409.6 kB per FEM, 6.1 MB per crate, which needs about 12 ms
  of dataway time against a 1.6 ms frame. With more than a few FEMs triggered
  at once, the Trigger Stream FIFOs overflow. The real board buffers this in
  DRAM.
* **External parts are ports, not models.** The SRAM, ADCs, optical links,
  crate controller, trigger board and DAQ computers are outside the design. The
  testbenches use a behavioural SRAM (`tb/sram_model.sv`: synchronous, read
  data two clocks after the command).
* **Downsampling is plain decimation** (the first of every 8 samples). The
  publication does not say whether the FPGA filters.
* **Design choices:**
  * the framing words (frame, channel and ROI headers) and the raw first sample
    of each ROI;
  * the trigger granularity: a whole frame;
  * the register map;
  * the single clock;
  * the pair packing in SRAM;
  * the `ZS_DELAY` scheme.
* **Headers before a baseline exists.** In dynamic mode a channel yields no
  samples until its first window passes, but its channel header is still sent.
  A decoder sees an empty channel.
* **The compressed stream has no back-pressure into the pipeline.** The
  suppressor and encoder take one sample per clock and never stall. If a stream
  FIFO fills, data is dropped and flagged.
* **Lint warnings:**
  * Some outputs are left open on purpose: the FIFO `level`/`drop_cnt`
    outputs, and the estimator's per-block debug outputs.
  * Verilator reports the asynchronous reset also being used as an assertion
    disable.
  * A constant-comparison warning remains on the presample clamp, because the
    3-bit field can never exceed `PRE_MAX` = 7.

## Simulating

Each testbench is self-checking and prints `TB_RESULT checks=N failures=M`. With
Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/lartpc_pkg.sv tb/tb_lartpc_pkg.sv tb/<testbench>.sv --top-module <testbench>
obj_dir/V<testbench>
```

| testbench | what it checks |
|---|---|
| `tb_downsampler` | one set kept per 8 strobes, the right one, at the right time |
| `tb_ring_buffer_ctrl` | channel-order readout of several frames through a wrapping ring, trigger flags, SRAM timing |
| `tb_baseline_estimator` | mean, clamped variance and accept/reject decisions against an independent model |
| `tb_zero_suppressor` | ROI membership and first/last flags: static baseline with 7/8, dynamic baseline with other pre/post settings |
| `tb_huffman_encoder` | the published example word `0x9A20`, then random ROIs decoded back to the samples |
| `tb_trigger_formatter` | raw frames with headers, untriggered frames dropped |
| `tb_stream_fifo` | order, beat splitting, whole-burst drop and counting on overflow |
| `tb_backplane_arbiter` | token order, burst limit, Trigger Stream priority, slot tags, one beat per clock |
| `tb_fem_fpga` | one FEM end to end, both streams decoded, random back-pressure, frame latency under two frame periods |
| `tb_tpc_crate` | a reduced crate (2 FEMs x 4 channels, 128-tick frames, 4-frame ring); every mechanism must occur at least once |
| `tb_tpc_crate_full` | the full crate at default sizes (15 x 64 channels, 3200-tick frames, 1M-word SRAMs), one frame through both compression stages and the backplane |

The full-size test runs in well under a minute. Its FEMs are split over the
three zero-suppression settings MicroBooNE ran with: static baseline with
per-channel thresholds, dynamic baseline with one threshold for all channels,
and dynamic baseline with per-channel thresholds. On its synthetic signal (a ±1-count noisy pedestal with
a short pulse every ~400 µs per channel) it reaches a compression factor of
about 49, framing words included. The factor on detector data depends on noise
and thresholds.

To change sizes, override the parameters of `tpc_crate`:

| parameter | meaning |
|---|---|
| `N_FEM` | FEMs per crate |
| `NCH` | channels per FEM |
| `SAMPLES_PER_FRAME` | ticks per frame |
| `NFRAMES` | frames in the ring |
| `ADDR_W` | SRAM address width |

`ADDR_W` must be at least log2(NFRAMES) + log2(NCH) + log2(SAMPLES_PER_FRAME/2).
Each block has more internal sizes (FIFO depths, `ZS_DELAY`, `MAX_BURST`) with
their constraints checked at elaboration.
