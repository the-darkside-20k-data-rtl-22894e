# DarkSide-20k front-end DAQ logic in SystemVerilog

The DarkSide-20k detector reads out 2720 SiPM channels with no global
trigger. Every channel is digitised continuously at 125 MS/s, 16 bits. The
FPGA of each digitiser keeps only the stretches of waveform that hold a pulse
and stamps each one with a common sample time. A small clock-and-control tree
keeps the digitisers aligned. It has one Global Data Manager (GDM) and eight
Crate Data Managers (CDMs). The tree gives all boards the same time, cuts the
data stream into one-second Time Slices with Time Slice Markers (TSM), and
pauses the whole detector when any buffer runs full. Downstream computers
rebuild the data one Time Slice at a time from those markers.

This repository holds synthesizable RTL for that front end:

* the per-channel firmware chain: FIR filter, Dynamic Acquisition Window
  trigger, decimation, delta+Huffman compression, channel buffers;
* the per-board readout: start-ordered Sort & Merge, hit map, busy;
* the GDM and CDM logic: absolute time, run start, TSMs, veto, triggers;
* `daq_top`, which wires 48 digitisers of 64 channels (3072 channels), 8 CDMs
  and the GDM together.

Everything runs in one clock domain: the 250 MHz digitiser FPGA clock.
Software stages are outside the RTL. These are the Front End Processors,
Pool Manager, Time Slice Processors and Merger. The vendor parts of the
digitiser are outside it too: ADC, DDR4, ARM CPU and 10 GbE. Both reach the
RTL through ports.

## Block map

```
                 pps, GPS fields, run_req, ext_in
                               |
                            [ gdm ] --- ctrl packet (run, sync, tsm, veto, ext_trig, trig_word, ts_id)
                     busy ^    |    ^ hit maps
                          |    v    |
            [ cdm ] x 8 (per crate: one for 9 TPC boards, one for 3 veto boards)
                          |    v    |
   adc[64] --> [ wfd_board ] x 48 --> m_valid/m_data/m_sop  (to DDR4 / ARM / FEP)
                 |
                 +-- wfd_channel x 64
                 |     fir_filter -> (trigger value) -> daw_trigger -> decimator
                 |        -> raw 4-sample packing  or  delta_huffman_encoder
                 |        -> channel_buffer (WAVE 4096x64, PARAMS 512x64)
                 +-- sort_merge (start-order queue, Sort & Merge FIFO 1024x64, TSM events)
                 +-- hitmap (1.2 us snapshots)
```

`daq_pkg` holds the shared types: the control packet, board status, channel
and board configuration, segment header and segment stream beat.
`sync_fifo` is the one FIFO primitive (first-word-fall-through, with
overflow and underflow assertions). All memories are plain arrays.

## Time base

`clk` is 250 MHz. Each board has a 2-bit phase counter, and phases 1 and 3
give the 125 MS/s sample enable. `tnow` counts samples (8 ns) in 48 bits, so
it wraps after 26 days. When the GDM starts a run it first sends a `sync`
pulse, which clears the phase counter and `tnow` on every board on the same
clock. Since all boards share the clock and receive the same packet, their
timestamps agree exactly. Every timestamp in the data is in samples since
the last sync.

A control packet takes two registered hops to reach a board: GDM, then CDM.
A busy takes three hops back (channel register, board register, CDM) and
then one more clock in the GDM to become the veto.

## One channel

### FIR filter (`fir_filter`)

This is a 64-tap filter with signed 16-bit coefficients, built from only 16
multipliers. It accepts one sample every 4 clocks, which is every other ADC
sample (62.5 MS/s). In the 4 clocks after a sample, phase *p* multiplies taps
16*p* .. 16*p*+15 by their coefficients and adds the 16 products to an
accumulator. The result is `sum(coef[k]*x[n-k]) >>> 15`, clamped to 0..65535.
Coefficients are Q1.15, so a filter with unit DC gain keeps the baseline in
ADC counts and the thresholds stay in ADC counts. Latency is 5 clocks. The
channel holds each output for two samples. The filter output is used only to
make the trigger decision; the stored waveform is always the raw samples.
`fir_en` selects filtered or raw values for the trigger.

### Dynamic Acquisition Window (`daw_trigger`)

This is the heart of the data reduction, and the block with the most state.
Per sample:

1. **Trigger.** `tot` consecutive samples at or above `thr` accept a
   trigger on the last of them.
2. **Gate.** The gate stays open until a sample falls below `post_thr`
   (a second, lower threshold). Then `post` more samples are taken. A new
   threshold crossing during those post samples extends the gate.
3. **Pre-trigger.** The segment begins `pre` samples before the accepted
   sample. This needs history, so every raw sample goes into a 1024-deep ring
   buffer (8.2 us) and the segment is read out of the ring. Its output lags
   the input by `pre+1` samples, so `pre` is limited to 1023.
4. **Cap.** A gate that reaches `MAX_GATE` = 4096 samples (33 us) is closed
   and flagged `truncated`. The channel then waits for the value to drop
   below `thr` before it can trigger again.
5. **Split.** When `max_seg` is non-zero, the segment is cut every
   `4*max_seg` samples. Every piece after the first carries the `cont` flag
   and its own timestamp. Short pieces can leave the board while a long pulse
   is still running.
6. **Veto.** While the global veto is on and the channel's `veto_en` bit is
   set, triggers are refused and counted. The count (saturating at 255) goes
   into the header of the next segment as `missed`.
7. **Triggered mode.** With `trig_mode` set, self-triggering stops. Each
   external trigger addressed to the board opens the window
   [t-`pre`, t+`post`].

The output is a stream of beats: `valid`, `sof`, `eof`, `sample`,
`tstamp` (valid on `sof`), `flags` and `missed`.

### Decimation (`decimator`)

When the channel's `decim_en` bit is set, the decimator keeps the first
sample of each segment and then one sample in every `decim`. The header
counts only the kept samples and carries the `decimated` flag.

### Packing and compression (`wfd_channel`, `delta_huffman_encoder`)

Raw mode packs four samples per 64-bit word, the first sample in bits
15:0. The last word of a segment is zero padded.

With `comp_en` set, samples go to the compressor two per beat. It has four
pipeline stages:

1. Residual: each sample minus the previous one. The first sample of a
   segment is taken against 0.
2. LUT read. The LUT has 130 entries: 129 for residuals in [-64, +64] and 1
   for the escape. Each entry holds a length and an MSB-aligned code.
3. Concatenation of the two codes. An escape is followed by the raw 16-bit
   sample.
4. A 128-bit bit buffer that sends out full 64-bit words, MSB first. The
   tail word of a segment is zero padded.

At reset the LUT holds an order-0 exp-Golomb code of v = zigzag(r)+1:
residual 0 costs 1 bit and ±1 costs 3 bits. The escape is v = 130 (15 bits)
followed by the raw sample. The `lut_we/lut_addr/lut_len/lut_code` port
loads a Huffman table built from real waveforms. A segment can end exactly
on a word boundary; then the encoder signals `out_last` without a word.

### Channel buffers (`channel_buffer`)

Each channel has two buffers:

* WAVE: 4096 x 64 bits.
* PARAMS: 512 words, two 64-bit words per segment (header and timestamp).

The PARAMS entry is written when the segment's last word is in WAVE. A
small metadata FIFO in `wfd_channel` holds it while the compressor drains.
`almost_full` is raised when WAVE reaches `wave_af` words or PARAMS reaches
`params_af` words. `busy` is set by `almost_full` and cleared only when both
buffers are below their recovery levels (`wave_rec`, `params_rec`). This
hysteresis stops the global veto from chattering. If a word still arrives
at a full WAVE buffer, it is dropped and the sticky `lost` flag is set. That
should never happen while the busy levels are set below the depths.

The levels are run-time settings, not parameters. The occupancy threshold
studied for this detector is 80 %, which for WAVE means `wave_af` = 3277
words. A split length near 628 samples corresponds to `max_seg` = 157.

## One board

### Sort & Merge (`sort_merge`)

Segments leave a board in the order in which they **started**. A segment is
sent only once its end is known. So a long pulse on one channel holds back
every segment that started after it, including segments that have already
ended. This is exactly why the busy mechanism exists.

The implementation:

* Each `seg_start` pulse (first beat at the channel output) adds 1 to a
  4-bit pending count for its channel.
* An arbiter moves one pending start per clock into the start-order queue
  (1024 entries of channel numbers), lowest channel first. Starts that are
  a few clocks apart may therefore swap; they are never more than N_CH
  clocks apart. The ordering is by output time, so channels with different
  `pre` values are ordered by their delayed starts.
* The merger takes the oldest queue entry and waits for that channel's
  PARAMS entry. It then copies the header word, the timestamp word and
  `nwords` waveform words into the 1024 x 64 Sort & Merge FIFO, one word per
  clock. That is 64 bits per 4 ns, or 1000 MS/s of raw samples. A 65th bit
  marks the first word of each event (`m_sop`).
* A TSM gets its own queue entry, ahead of any start pending on the same
  clock. It produces a two-word event with no waveform (see the format
  below). N_CH must be a power of two, because the TSM entry is coded as
  number N_CH.
* Module busy is raised while the FIFO holds 1000 words or more.

### Board glue and hit map (`wfd_board`, `hitmap`)

The board decodes the control packet:

* `run`, `veto` and `trig_mode` are levels.
* `sync` and `tsm` are pulses.
* `ext_trig` counts only if the board's bit in the 48-bit `trig_word` is
  set; the board number is the bit index.

Board busy = OR of the 64 channel busy flags OR the module busy.

The hit map ORs each channel's "trigger value >= thr" bit over fixed
150-sample (1.2 us) windows. The windows are aligned to the sync pulse, so
all boards send their maps on the same clock.

### Output format (per event, 64-bit words)

| word | bits | field |
|------|------|-------|
| 0 | 63 | `tsm` — 1 for a Time Slice Marker event |
| 0 | 62:59 | flags: `cont`, `truncated`, `decimated`, `compressed` |
| 0 | 55:48 | channel (0xFF for a TSM) |
| 0 | 47:40 | triggers missed under veto since the previous segment |
| 0 | 39:24 | samples in the segment (after decimation) |
| 0 | 23:8 | waveform words that follow word 1 |
| 0 | 7:0 | board number |
| 1 | 63:0 | segment: timestamp of the first sample; TSM: {ts_id[15:0], time[47:0]} |
| 2.. | 63:0 | waveform words (raw: 4 samples, LSB first; compressed: bit stream, MSB first) |

## Control tree

### CDM (`cdm`)

The CDM registers the control packet on its way down. On the way up it
registers the OR of its boards' busy lines and their hit maps. It also
counts busy assertions, pauses and resumes for live-time monitoring. In each crate,
one CDM serves the nine TPC boards and one serves the three veto boards.

### GDM (`gdm`)

* **Absolute time.** The decoded fields of the one-per-second GPS packet
  arrive on `gps_valid`. The packet carries the time of the previous pulse
  and a bias correction in ns. On the next `pps` edge the GDM sets
  `abs_sec` = previous + 1. It restarts `sub_tick` at
  `delay_ticks + bias_ns/8`, which corrects for the fibre delay from the
  surface. Without pulses, `sub_tick` wraps by itself every
  `TICKS_PER_SEC` (holdover on the rubidium clock).
* **Run start and Time Slices.** When `run_req` rises, the GDM sends a sync
  pulse, then turns `run` on, then sends TSM 0. After that it sends a TSM
  every `TS_LEN` = 125,000,000 samples (1 s).
* **Veto.** `veto = run & (OR of CDM busy)`. The GDM records the rise
  (pause) and fall (resume) with their absolute times. It also counts paused
  samples as dead time.
* **Run time origin.** `run_t0` holds the absolute time
  ({`abs_sec`, `sub_tick`}) at which the sync pulse went out. Boards count
  sample time from that sync, so `run_t0` plus a sample time gives the
  absolute time of the sample.
* **Triggers** (only in triggered mode; triggered and triggerless operation
  exclude each other):
  - A rising `ext_in` triggers all 48 sectors.
  - A set of hit maps whose total count of hit channels reaches `hm_thr`
    triggers the sectors with a non-empty map. This rule is this design's
    own; the trigger algorithm is left open upstream.
  - `hit_total` accumulates the counts for rate monitoring.

## Configuration

Per channel (`ch_cfg_t`):

* `enable`, `fir_en`, `decim_en`, `veto_en`;
* 12-bit `pre` and `post`;
* 16-bit `thr`, `post_thr` and `tot`.

Per board (`board_cfg_t`):

* `max_seg` (4-sample units);
* `decim` (the factor);
* `wave_af`, `params_af`, `wave_rec`, `params_rec`;
* `comp_en`;
* 64 FIR coefficients.

The channel mask, thresholds, pre/post, time over threshold, max segment
length, decimation, FIR and veto enables and the almost-full levels
correspond to the usual digitiser settings. The recovery levels,
`comp_en`, `trig_mode` and the LUT port are this design's additions.

## Where this design makes its own choices

These points were decided here. Where the source describes something
differently or leaves it open, the note says so.

* **Clocking.** A single clock domain models the link clocks. The 125 MHz
  control-packet link and the 62.5 MHz board clock become registered words
  on the 250 MHz clock.
* **Reset.** All resets are synchronous and active low.
* **Trigger polarity.** Thresholds compare unsigned ADC counts, so pulses
  must be positive going. For negative pulses, invert upstream or change the
  comparisons in `daw_trigger`.
* **Gate cap.** MAX_GATE = 4096 samples is one reading of "a few tens of
  microseconds".
* **Ring buffer.** RING = 1024 samples; the 8 us ring buffer is 1000
  samples, rounded up to a power of two.
* **Sort & Merge rate.** One word per clock (the nominal 1000 MS/s). The
  factor-five limit seen in real firmware is not modelled.
* **Ordering.** Start order among starts a few clocks apart is not exact
  (see Sort & Merge). The FEP-side time sorting absorbs this.
* **Compression.** The default LUT is a generic code, not a table trained
  on detector waveforms. Compression is a board-wide switch.
* **Hit-map trigger.** The multiplicity rule is this design's own.
* **Counters and monitors.** Live-time bookkeeping follows the source: the
  CDMs count busy, pause and resume transitions, the GDM timestamps pause and
  resume, and each segment header carries the triggers missed under veto.
  The counter widths, the 255 saturation of the missed count and the
  dead-time counter (paused samples) are this design's.
* **Event header.** The digitiser's native output format reserves five
  64-bit header words per event. This design packs its own header into two
  words (table above), because the board here hands events straight to
  the readout instead of going through the vendor's format.
* **TSM time information.** A TSM event carries the slice number and the
  board's sample time. The absolute LNGS time of the run start is kept once,
  in the GDM's `run_t0`, so that any sample time can be converted to
  absolute time. The source describes time-corrected LNGS time stored
  locally on each board. Keeping it at the root instead is a simplification.
* **Absent features.** No DC offset control and no load-pattern test mode.

## Verification

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog. The benches also
pass when every register starts at a random value
(`+verilator+rand+reset+2`): their monitors ignore clocks while `rst_n` is
low.

| testbench | what it establishes |
|-----------|---------------------|
| `tb_fir_filter` | outputs against a reference convolution for random inputs and coefficients; 4 clocks per sample; latency |
| `tb_daw_trigger` | segment boundaries against an independent reference model: time over threshold, post threshold, gate extension, cap and truncation, splitting, veto and missed count, external trigger |
| `tb_decimator` | kept samples and flags |
| `tb_delta_huffman_encoder` | round trip through a bit-level decoder, escapes, word-boundary endings, LUT reload |
| `tb_channel_buffer` | word order, busy hysteresis, PARAMS-driven busy |
| `tb_wfd_channel` | raw, compressed and decimated segments decoded and compared with the input waveform |
| `tb_sort_merge` | the start-order example (1,2,3 / TSM / 4,5), one word per clock, module busy |
| `tb_hitmap` | window length and map contents |
| `tb_wfd_board` | TSM event, start order across channels, external trigger addressing, hit map |
| `tb_cdm`, `tb_gdm` | packet/busy latency, counters; GPS time and holdover, run start and run_t0, TSM period, veto, dead time, both triggers |
| `tb_daq_top` | end to end at reduced size (see below) |
| `tb_daq_two_boards` | two full-size boards (64 channels, full buffer depths) on the full tree: T0 TSM and pulsed segments |

`tb_daq_top` runs one crate with one TPC and one veto board, 4 channels
each, small buffers, a 3000-sample Time Slice and a 4000-sample second. It
recomputes every sample of every segment from the stimulus, decoding the
compressed ones. It counts how often each mechanism happened, and fails if
any count is zero:

* segments and TSM events;
* split pieces and truncation;
* compression and decimation;
* busy, pause, resume and missed triggers;
* external and hit-map triggers;
* GPS seconds and holdover.

A typical run gives about 950 segments, 214 split pieces, 365 compressed and
88 decimated segments, 1 pause/resume with 73 missed triggers, and 70
hit-map triggers.

Running it:

```
verilator --binary --timing --assert -Irtl rtl/daq_pkg.sv rtl/*.sv \
          tb/tb_daq_top.sv --top-module tb_daq_top -Mdir obj -o sim
./obj/sim
```

Other testbenches build the same way with their own top module. The package
must come first on the command line.

**Sizes simulated.** The whole design at its default size (48 boards, 3072
channels) lints and elaborates cleanly. It is too large to compile into a
Verilator simulation in reasonable time; the generated C++ runs to hundreds
of files. The largest configuration simulated is `tb_daq_two_boards`: two
boards of 64 channels with every buffer at its full depth, on the same GDM
and CDM logic.

**Faults.** Each block's testbench was also run against a copy of the block
with one deliberate bug, and each of those runs failed. Examples:

* a FIR tap that never shifts;
* an off-by-one in time over threshold;
* a swapped zigzag sign in the encoder;
* a missing waveform word in Sort & Merge;
* the GDM's busy inputs tied off.

## Files

`rtl/` holds one module or package per file, named after it. `tb/` holds one
testbench per block plus the two system tests.
