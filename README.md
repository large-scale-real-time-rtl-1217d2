# Real-time TPC readout processing on one readout FPGA

The ALICE Time Projection Chamber is read out continuously. Each readout card
receives 20 optical GBT links from the front-end cards. Every link carries the
samples of 80 pad channels, one sample per channel every time-bin (a 5 MHz
sampling clock). The card must turn this stream into compact packets, at full
rate and with no dead time. On the way it removes pedestals and the common-mode
baseline shift, corrects the ion tail of large signals, suppresses samples
below threshold, and integrates the digital currents (IDCs) for calibration.

This repository holds a synthesizable SystemVerilog model of that user logic.
It covers one card (20 links, 1600 channels) at its nominal clock of 240 MHz.
It is written from the published description of the pipeline. Where that
description names a unit but does not give its insides, the simplest
structure that does the job was chosen. Each of these choices is stated in
the opening comment of the file concerned.

## Time-bins, streams and formats

The pipeline is organised around a **time-bin of 48 clock cycles**:
- 240 MHz / 5 MHz gives 48 cycles.
- 40 of them carry data. Each link delivers two channels per cycle (even and
  odd), so 40 × 2 = 80 channels.
- The other 8 cycles are idle. Several units use them to finish per-time-bin
  work.

Two streams run through the pipeline side by side (`rtl/tpc_pkg.sv`):

- **Link data stream**, one per link: `link_data_t`, two `chan_data_t`
  entries per cycle. Each entry has these fields:
  - a 12-bit sample in I10F2 (10 integer bits, 2 fractional bits);
  - the channel's pedestal and threshold (attached by the parameter memory);
  - flags: `zero`, `stream_active`, `rejected`.
- **Time-info stream**, one for all links: `time_info_t`. Its fields:
  - `channel_id`, the cycle index 0..39;
  - the bunch crossing (BC) of the time-bin;
  - the OR of the trigger bits seen during the previous time-bin;
  - the flags `tb_start`, `tb_end`, `adc_valid`, `first_tb` and `resync`.

Every unit delays both streams by the same amount, so they stay aligned.

Other formats:
- Per-channel parameters are written over a single configuration bus
  (`cfg_wr_t`). It selects a link, a channel and a target memory: pedestal,
  threshold, 1/k_pad, k_pad, k_x or k_2.
- Run-time controls arrive as one packed struct (`ul_ctrl_t`).

## Processing chain

```
GBT frames ─► 20 × gbt_frame_decoder ─► global_aligner ─► pattern_generator ─► ped_thr_memory ─┬─► idc_processor ─► IDC packets (2 streams)
                  ▲                        ▲                                                   │
          resync_controller ───────────────┘                                                   ├─► cmc_top ───────────┐ common mode
                                                                                               └─► delay_unit(64) ────┴─► 20 × pedestal_core
                                                                                                  ─► 40 × itf_core (+ delay_unit(13) for the other fields)
                                                                                                  ─► threshold_check ─► 2 × dense_packing ─► data packets
```

### Front end: decoding, alignment and resynchronisation

- **Decoders** (`gbt_frame_decoder`):
  - Each decoder splits a 112-bit frame into five SAMPA half-streams. Each
    half-stream is an E-link pair carrying 5-bit nibbles.
  - It searches each half-stream for the SYNC pattern and builds 10-bit
    samples from nibble pairs.
  - It watches the three ADC-clock E-links. A disagreement between them, or
    a clock phase that does not match the sample timing, sets a flag.
- **Aligner** (`global_aligner`):
  - The front-end links have different latencies. Each decoded stream is
    written into its own FIFO.
  - All FIFOs are read together from a programmable reference time `t_align`
    (counted from the resynchronisation) onwards.
  - It builds the time-info stream from the BC and trigger inputs.
  - A link whose FIFO has no data at read time is marked `rejected`. Its
    samples are zero.
  - Data rate: a link delivers 10 samples every 6 cycles. The reader takes 2
    samples per cycle during 40 of 48 cycles. The two rates match, so the FIFO
    level is set by `t_align`: the data that arrive before read-out starts
    wait in the FIFO. With `FIFO_DEPTH = 512`, `t_align` must stay below
    about 600 cycles plus the link latency.
- **Resynchronisation** (`resync_controller`):
  - A request starts the aligner's `t_align` count at once.
  - After `t_wait` cycles it resets all decoders, which then wait for the
    next SYNC.
  - Until read-out restarts, the aligner sends well-formed time-bins with
    zero samples and the `resync` flag set.
  - The first time-bin after a resynchronisation carries `first_tb`.
- **Pattern generator** (`pattern_generator`):
  - It can replace all samples by a 32-bit LFSR stream with an occupancy
    threshold, or by fixed patterns: constant, channel number, time-bin
    number, or a combination.
  - Its counters restart on `first_tb`.

### Common-mode correction

A common baseline shift of all pads of a time-bin ("common mode") is
estimated once per time-bin by `cmc_top` and removed in the pedestal cores.

The estimate:
1. Each sample is reduced by its pedestal and divided by its pad's coupling
   factor k_pad. The unit multiplies by a stored 1/k_pad; it never divides
   per sample.
2. An offset of 100.0 is added, so the interesting range −100..+28 ADC is
   non-negative.
3. A pad counts as **empty** if:
   - its scaled value is below threshold T1;
   - its value lies in the valid range set by T2;
   - more than N of ten reference pads agree with it within `d_match`.
4. The common mode is the mean of the empty pads. An adder tree sums them
   over the time-bin, and a single pipelined divider (latency 8) divides by
   their count at the end.

Implementation details:
- The ten references of a sample are chosen by a fixed "randomizer" wiring.
  Reference n of sample a (a = 2·link + parity) is sample
  (a + 2n + 3) mod 40. That gives 400 comparators for 20 links.
- The result is an I8F8 magnitude and a sign. It appears 20 cycles after the
  last valid cycle of its time-bin:
  - scaler: 3 cycles;
  - compare and match: 2 cycles;
  - adder tree: 5 cycles;
  - divider: 8 cycles;
  - offset and output registers: 2 cycles.
- If fewer than `n_min` empty pads are found, the value is zero.
- The parameters that were found to be optimal (T1 = 12, d_match = 3.0,
  N = 5) are run-time inputs.

**Delay unit.** The samples must meet their own time-bin's common mode.
`delay_unit` delays both streams by 64 cycles: the common-mode value of a
time-bin arrives while the delayed time-bin passes. Any delay in 60..67 works.
- It is one RAM used as a circular buffer at constant fill.
- Its time-info output stays idle after reset until the buffer has been
  filled once. The memory itself is not reset.

**Pedestal core** (`pedestal_core`, one per link, latency 3):
- It latches the common mode when the value arrives.
- It forms k_pad·CM with rounding.
- It computes sample + `sample_offset` − pedestal − k_pad·CM, clamped to
  0..4095.
- Bypass passes the raw sample.
- A debug mode replaces one channel by the common-mode value (magnitude in
  bits 10:0, sign in bit 11).

### Ion-tail filter

Large signals leave a slowly decaying tail. `itf_core` (40 cores, one per
link and parity) applies the recursive filter

    q_out = q_in − k_x · q_cor
    q_cor ← k_2 · (q_in + q_cor)

per channel, in IEEE-754 single precision.

- q_cor of every channel is kept in a dual-port RAM indexed by channel.
- The pipeline is 13 cycles long and has no feedback inside it. The same
  channel returns only 48 cycles later, so the read-modify-write of q_cor
  never collides.
- Stages:
  - cycle 1: RAM reads;
  - cycles 1–4: k_x·q_cor and the fixed-to-float conversion;
  - cycles 4–7: subtraction;
  - cycles 7–10: output offset;
  - cycles 10–13: conversion back to I10F2 with clamping.
- In parallel, the sum q_in + q_cor is formed, multiplied by k_2 and written
  back at cycle 10.
- On `first_tb`, q_cor is treated as zero, so no tail is carried across a
  resynchronisation.
- The float operators are plain combinational functions in `tpc_fp_pkg`
  (truncating rounding, no NaN handling). The pipeline registers around them
  meet the 13-cycle latency; retiming them is left to the synthesis tool.
- A second delay unit (13 cycles) carries the other fields of the stream
  beside the filters.

`threshold_check` then sets the final Zero flag: a sample at or below its
threshold is zero, as is any sample of an inactive or rejected link.

### IDC integration

`idc_processor` sums the samples per channel over integration windows. It
taps the stream after the parameter memory.

- **Link cores.** Each of the 20 cores holds two banks of 80 sums (24-bit,
  saturating) in dual-port memory. While one bank integrates, the other is
  read out.
- **Controller.** It closes a window at every n-th orbit, or on selected
  trigger bits (`idc_trig_mode`, `idc_trig_mask`).
- **Packetizers.** Two of them (links 0–9 and 10–19) send one packet per
  window:
  - a header word `{16'h1DC0, packetizer id, number of links, window id,
    start BC, number of time-bins}`;
  - eight 32-bit sums per 256-bit word.
- If a window ends while a packetizer is still busy, the banks are not
  switched and `overrun` is set.

### Dense packing

`dense_packing` turns the zero-suppressed samples of 10 links into packets
for the host. Two instances cover the 20 links.

**Block format.** Each time-bin with at least one kept sample becomes a block,
written LSB-first with no byte alignment inside the payload:

| field | bits | content |
|---|---|---|
| block header | 16 | [11:0] BC, [15:12] number of link headers |
| link header, static | 1 + 5 + 80, padded to bytes | bit 0 = 1, [5:1] link id, one mask bit per channel |
| link header, dynamic | 1 + 5 + 10 + 8·g, padded to bytes | bit 0 = 0, link id, a 10-bit group mask, an 8-bit mask for each of the g non-empty 8-channel groups |
| payload | 12 per sample | the kept samples in channel order, link by link |
| pad | 4 | if the number of samples is odd, so the block ends on a byte |

- The dynamic header is used when at most 8 groups are non-empty, unless
  `dp_force_static` is set.
- Links with no kept sample get no header.

**Packets.** Blocks are collected per heartbeat frame (HBF), which starts at
a time-bin that carries the heartbeat trigger bit. Each packet is:
- two 256-bit header words (RDH);
- at most 253 payload words;
- one trailer word.

That is at most 8 KiB. A frame that does not fit is split over several
packets with increasing page numbers. The last packet has the stop bit set.

RDH word 0 fields:

| bits | content |
|---|---|
| [7:0] | version 7 |
| [15:8] | header size 64 |
| [31:16] | FEE id |
| [47:32] | offset to the next packet |
| [63:48] | memory size |
| [71:64] | packet counter |
| [103:72] | frame number |
| [115:104] | BC |
| [147:116] | trigger type |
| [163:148] | page |
| [171:164] | stop |

RDH word 1 [15:0] holds the number of payload words.

Trailer fields:

| bits | content |
|---|---|
| [15:0] | word count |
| [31:16] | packet counter |
| [63:32] | frame number |
| [127:124] | marker 4'hE |
| [159:128] | trigger type |
| [171:160] | BC |
| [255] | set in the last packet of a frame |

**Implementation:**
- A double-banked capture memory holds two time-bins.
- A serializer walks through the link headers and samples and hands
  variable-length items to `dp_bit_packer`. The packer accumulates them into
  256-bit words.
- `dp_packet_builder` buffers two packets, so one can be sent while the next
  is filled. It writes the RDH when the packet closes.
- There is no backpressure on the output.

**Limits:**
- The serializer needs about 52 cycles for a fully occupied time-bin (800
  samples). At 100 % occupancy, time-bins are therefore dropped with
  `overflow`. At realistic occupancy (about 30 % for Pb–Pb at 50 kHz) a
  time-bin takes about 26 cycles.
- The published design uses a multi-stage packer with asymmetric FIFOs
  (64 → 128 → 256 bits). That structure is not reproduced; a single bit
  packer is used instead.
- The RDH field positions above are this design's own. They are not the
  official header layout.

## Top level

`tpc_user_logic` wires the chain for `NLINKS = 20`.

Inputs:
- the 20 GBT frame streams;
- BC and trigger;
- a resynchronisation request;
- the configuration bus;
- the control struct.

Outputs:
- the two dense-packing streams;
- the two IDC streams;
- status and monitoring: decoder lock, alignment errors, FIFO overflow,
  resynchronisation count, the common mode, counters of blocks, packets and
  kept samples.

Not part of this model:
- the transceivers and GBT protocol core;
- the timing receiver;
- the pattern player that sends SYNC to the front end;
- the DMA engine.

Their signals are ports of the top.

## Verification

Every unit has a self-checking testbench in `tb/`. Each compares the unit
with an independent model and prints `TB_RESULT checks=N failures=M`.

- `fec_link_model` produces the GBT frames of one front-end card: SYNC, then
  a known sample function `sample_value(link, half-stream, channel,
  time-bin)`.
- `stream_source` produces aligned link data directly.
- Bit-exact models:
  - `tb_cmc_top` re-implements the empty-pad decision and the mean.
  - `tb_itf_core` runs the filter with the same float operators. It also
    runs it in double precision and requires agreement within one LSB.
  - `tb_dense_packing` decodes the packets bit by bit: headers, masks,
    samples, padding, packet splitting, page and stop fields, trailers. It
    compares every sample with the input.
- `tb_tpc_user_logic` runs the full design at its default size:
  - 20 link models, all parameters written over the configuration bus;
  - two resynchronisations;
  - heartbeat and orbit triggers;
  - a pattern-generator phase (which produces a non-zero common mode), the
    debug channel and the pedestal bypass.

  What it checks:
  - front end: every sample after the parameter memory;
  - common mode: the value applied to each time-bin is the one computed from
    that time-bin;
  - back end: a reference model of pedestal core, ion-tail filter and
    threshold predicts every output sample and Zero flag. All blocks of both
    dense-packing outputs are decoded and compared with it.
  - mechanisms: it counts each one and fails if one never happened.

  A time-bin may be missing from the output only if an overflow was
  reported.

Running one test with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
  --top-module tb_tpc_user_logic rtl/tpc_pkg.sv rtl/tpc_fp_pkg.sv tb/tb_util_pkg.sv \
  tb/tb_tpc_user_logic.sv
./obj_dir/Vtb_tpc_user_logic
```

Replace the top module name for the other testbenches. The end-to-end test
simulates about 18 000 cycles and takes about a minute, most of it build
time.

## Where the model departs from the published design, and what to trust

- **Own choices (formats and encodings).** These parts were not given and
  are this design's own: the SYNC pattern, the frame bit layout, the
  configuration bus, the control struct, the IDC and RDH layouts, the
  randomizer wiring, the k_pad format (8 bits, 1.0 = 64), the rounding
  rules, and the debug word. The dataflow, the formats I10F2 / I8F8 / I7F4,
  the time-bin structure, the common-mode algorithm, the filter equation,
  the 13-cycle filter latency, the 8-cycle divider and the 8 KiB packet
  limit follow the published description.
- **Float operators.** They truncate instead of rounding to nearest.
- **Dense packing throughput.** It is below the 48-cycle budget only for
  occupancies below roughly 90 %. See above.
- **Not modelled:** the separate laser, pulser and HV-monitoring firmware
  variants of the same hardware platform.
