# Dead-time-free pulse capture for 16 PMT channels on an RFSoC

This is the programmable-logic (PL) part of a 16-channel front end for
photomultiplier tubes (PMTs), written in synthesizable SystemVerilog. Each
PMT is sampled at 1 GS/s by an RF-ADC of the RFSoC. The logic does four things:

- It removes the slow negative overshoot that a PMT shows after a large
  (muon) pulse.
- It smooths the waveform.
- It decides when something worth keeping has happened.
- It keeps short windows of waveform around those moments and ships them
  to the processor as self-describing frames.

The guiding requirement is that no pulse is missed because the electronics
were busy. The trigger, the storage and the readout therefore all run
continuously at the full sample rate:

- A channel can accept a new trigger in the cycle after its previous window
  closed, or even while it is still open. Overlapping windows merge.
- Each channel has a large buffer, which absorbs bursts such as the
  afterpulse trains that follow a muon.
- When a buffer does fill, whole events are dropped and counted. Frames are
  never truncated or corrupted.

Everything runs on one 125 MHz clock. A single 128-bit word carries eight
consecutive samples, i.e. 8 ns of waveform. In the rest of this document a
"word" or "cycle" means those 8 ns.

## Data flow

```
 RF-ADC ch c ──► dsp_module ─┬─► digital_discriminator ─► trigger_selector ─┐
 (8 x 16 bit)   (BLR + MA)   │                  TTL in ─► sync_edge ─────────┤ (shared)
                             │  RJ45 force ─► sync_edge ─ OR ─ FORCE reg ───┤
                             │                                               ▼
                             └─► stream_delay (34 cyc) ─► data_trigger ◄── trigger
 l-gain ADC ch c ─► lgain_adc_if ─┘   (l-gain rides in TUSER)  │ TVALID gated to window
                                                               ▼
                                             frame_generator (3584 x 128 bit BRAM)
                                                               ▼
                                             axis_width_conv 128 → 64
                                                               ▼
                 16 channels ─► axis_rr_interconnect (round robin per frame, TID = channel)
                                                               ▼
                                             axis_fifo (1024 x 64 bit) ─► to DMA
 timestamp_counter (64 bit, cleared by RJ45 sysreset) ─► every frame_generator
 pl_regs (AXI4-lite) ─► CTRL, TRIG_MODE, PRE, POST, FORCE, THRESHOLD[c]; ◄─ DROPPED[c]
```

- `fe_channel` groups the per-channel chain.
- `rfsoc_fe_top` instantiates 16 channels plus the shared blocks.

## The DSP module: baseline restoration and smoothing

The RF-ADC delivers 16-bit words, but only the upper 12 bits are
meaningful. The module drops the lower 4 bits and treats the rest as
signed samples.

**Baseline restoration (BLR).** A large pulse is followed by an undershoot
lasting many microseconds. This undershoot would hide the small pulses
that follow. BLR estimates the baseline from the negative part of the
waveform only:

    b[n]   = floor( (1/64) * sum_{k=0..63} min(x[n-k], 0) )
    blr[n] = x[n] - b[n]

Clipping positive samples to zero keeps the PMT pulses themselves
(positive after the front end) out of the estimate. The estimate
therefore follows the overshoot but not the signal.

**Moving average (MA).** The BLR output then passes an 8-sample boxcar:

    y[n] = floor( (1/8) * sum_{k=0..7} blr[n-k] )

The boxcar lowers the high-frequency noise. For white noise the RMS
becomes sqrt(σ²/8 + 1/12); the second term comes from the floor. For
example, 2.1 counts become 0.8 counts. The boxcar's first zero lies at
125 MHz.

**Computing eight outputs per cycle.** Both averages are running sums over
windows that cross word boundaries. For each word the module forms:

- the eight prefix sums of the current word;
- the total of each of the last eight words, kept in a shift register.

Output lane i is then "sum of whole earlier words + part of an older word
+ prefix of the current word". This uses no per-sample recursion, so the
critical path does not depend on the lane count.

**Pipeline.** The latency is a fixed 3 cycles:

1. truncate and clip;
2. BLR;
3. MA.

The bypass bits `blr_en` and `ma_en` (register CTRL) replace a stage by
its input without changing the latency. The trigger and data paths thus
stay aligned in every mode.

Both averages are causal: the window ends at the current sample.
Division is a floor (an arithmetic shift).

**What BLR does to noise.** BLR averages only the negative half of the
noise, so on a quiet baseline its estimate sits below the true baseline,
and the corrected noise is lifted by a fraction of its RMS. For white noise
of 2.1 counts the lift is about 1.1 counts, measured in
`tb_workload_noise`. Discriminator thresholds are therefore effectively
about one count lower with BLR enabled. The floor in the moving average
shifts the mean by a further −7/16 count.

**What BLR does to a step.** The baseline estimate lags by up to 64 ns.
A slowly decaying overshoot is followed closely: the error is the decay
over 32 ns, well below a count. An abrupt *upward* step of the baseline,
however, appears as a positive excursion of the step's size for a few tens
of nanoseconds. An example is a signal that jumps from -40 counts back to
0. Such an excursion triggers the discriminator like a real pulse.
Real PMT overshoots recover smoothly, so this matters only for unusual
inputs.

## Triggering

A channel's trigger flag is the OR of up to three hit flags. Each is
enabled by a bit of `TRIG_MODE`:

| bit | source | origin |
|---|---|---|
| 0 | event hit | `digital_discriminator`: any of the 8 filtered samples ≥ the channel's `THRESHOLD` (signed) |
| 1 | external hit | front-panel TTL input, synchronised and edge-detected (`sync_edge`), shared by all channels |
| 2 | forced | a write to the `FORCE` register, or a rising edge on the RJ45 force line, shared by all channels |

- The discriminator registers its output (1 cycle), and the selector
  registers its output (1 cycle).
- The top also exports per channel which sources fired (`trig_source`).
  This is a debugging aid.

The default threshold is 8 counts. With a single-photoelectron peak near
40 counts, that is about 1/5 of a photoelectron.

## Pre-trigger, post-trigger and the data trigger

The second copy of the filtered stream, with the l-gain samples alongside
in TUSER, goes through `stream_delay`. This is a 34-cycle shift register
(PRE_MAX + 2).

- The +2 cancels the discriminator and selector latency.
- The remaining PRE_MAX = 32 cycles form a look-back store.

`data_trigger` then gates TVALID of that delayed stream:

- It delays the trigger flag by a further PRE_MAX − `PRE` cycles. The
  delayed flag therefore coincides with the word `PRE` cycles *before* the
  triggering word.
- It opens TVALID for that word.
- It loads a down-counter with `PRE` + `POST`, and keeps TVALID high while
  the counter is non-zero.

A single trigger therefore yields a window of PRE + 1 + POST words. The
defaults are PRE = 2 and POST = 7, i.e. 10 words = 80 ns.

A trigger that arrives while a window is open reloads the counter. The
window is thereby extended and never split, so overlapping pulses end up
in one longer event. The largest pre-trigger time is PRE_MAX words
(256 ns). The post-trigger time is a 16-bit count.

The low-gain ADC runs at 250 MS/s, i.e. two samples per cycle.
`lgain_adc_if` registers the two samples and delays them by the DSP
latency. Each h-gain word therefore carries the l-gain samples of the
same instant.

## Frame generator: events, buffer and overflow

The frame generator sees only a gated stream. A run of consecutive valid
words is one event.

**Storing an event.**

- As each word arrives it is written to a ring buffer of 3584 × 128 bits
  (56 kB, block RAM).
- The generator tracks the minimum and maximum l-gain sample of the event.
- When TVALID falls, it appends a 64-bit footer.
- The header (timestamp of the first word, word count, sequence number,
  dropped count) goes into a separate descriptor FIFO of 512 entries.
  Keeping headers out of the buffer means the buffer needs only one write
  per cycle. A new event can therefore start in the very next cycle.

**Reading an event.** The read side starts on a descriptor and sends:

1. the header;
2. the stored words, then the footer with TLAST.

A two-entry output register hides the one-cycle BRAM read latency, so
frames leave at one word per cycle while TREADY is high.

**Overflow.** An event is dropped in either of these cases:

- while it is being written, the buffer cannot take one more word plus the
  footer;
- the descriptor FIFO is full when the event ends.

Dropping rolls the write pointer back to the start of the event, so
nothing of it is read out. The drop also does three things:

- pulses `overflow` for that channel;
- increments a saturating 16-bit counter, readable as `DROPPED[c]`;
- puts the counter value into the following headers.

Together with the sequence number, which counts stored events only,
software can tell exactly how much was lost.

A single event longer than 3583 words (28.7 µs) can never fit, so it is
always dropped.

### Frame format

The 128-bit path is converted to 64 bits before the merge. A frame of an
N-word event is 16 + 16·N + 8 bytes, which is 184 bytes for N = 10.

| 64-bit beat | content | TKEEP |
|---|---|---|
| 0 | header bits 63:0: timestamp (64 bit) | FF |
| 1 | header bits 127:64: {8'hA5, channel[7:0], words[15:0], seq_no[15:0], dropped[15:0]} (MSB first) | FF |
| 2 … 2N+1 | samples, 4 per beat, earliest sample in the low bits | FF |
| 2N+2 | footer {8'h5A, channel, l-gain min, l-gain max, words}, TLAST | FF |

- The header is the packed struct `frame_hdr_t`, whose first field is the
  most significant: {A5, channel, words, seq_no, dropped, timestamp}.
  Its low 64 bits (the timestamp) leave first.
- Samples are the filtered values as 16-bit signed numbers on the 12-bit
  ADC scale. BLR can push them slightly beyond the 12-bit range.
- The footer is one 64-bit beat. At 128 bits it occupies the low half of a
  word whose upper half has TKEEP = 0; the width converter drops that
  empty half.

## Merging and output

`axis_rr_interconnect` merges the 16 frame streams:

- It grants one channel at a time and holds the grant until TLAST, so
  frames never interleave.
- The next grant goes to the next channel with data after the last one
  served (round robin).
- Arbitration takes one idle cycle.
- `m_axis_tid` carries the channel number. The header carries it too.

`axis_fifo` (1024 × 77 bits: data, keep, last, id) decouples the merged
stream from the DMA engine. It absorbs stalls of the sink, and
`fifo_count` reports its fill level.

## Timestamps and synchronisation

`timestamp_counter` is a free-running 64-bit count of 8 ns cycles. A
rising edge on the RJ45 system-reset line clears it. That line is
synchronised by `sync_edge` (two flip-flops plus an edge detector), so
several boards can be aligned.

The timestamp in a header is the count when the event's first word was
stored. Because of the fixed pipeline, that is 37 cycles after the first
word of the window entered the top. Externally or force-triggered frames
of all 16 channels therefore carry identical timestamps.

## Registers (AXI4-lite, 32-bit, byte addresses)

| addr | name | bits | reset |
|---|---|---|---|
| 0x00 | CTRL | 0: blr_en, 1: ma_en | 3 |
| 0x04 | TRIG_MODE | 2:0 enable {forced, external, event} | 1 |
| 0x08 | PRE | 5:0 pre-trigger words (≤ 32) | 2 |
| 0x0C | POST | 15:0 post-trigger words | 7 |
| 0x10 | FORCE | write 1 in bit 0: one forced flag | – |
| 0x40 + 4c | THRESHOLD[c] | 15:0 signed | 8 |
| 0x80 + 4c | DROPPED[c] | 15:0, read only | 0 |

Notes on the bus:

- A write needs the address and data channels together.
- The processing system's interface converts its transactions to this
  form.
- Unmapped addresses read as 0.

## Capacity and rates at the default size

| case | needed | built |
|---|---|---|
| 25 kHz dark hits per PMT, 16 PMTs, 184-byte events | 588.8 Mbit/s, 400 k frames/s | 8 Gbit/s (64 bit × 125 MHz); 24 cycles per frame → 5.2 M frames/s |
| 32 kHz external trigger on 16 channels | 753.7 Mbit/s | as above |
| 1 MHz afterpulses for 1 ms on one channel | 1.47 Gbit/s during the burst | fits |
| 1 MHz afterpulses for 1 ms on all 16 channels at once | 23.5 Gbit/s | does not fit: buffers fill after ≈0.48 ms, then whole events are dropped and counted |

Per-channel storage is 3584 words, i.e. 325 events of 80 ns or one
28.7 µs window.

The PL output is far faster than the 1 GbE link that follows it in the
complete system. In practice the rate limit lies in the DMA and network
path, not in this logic.

## Departures and open points

**Filter details.** The BLR and MA window lengths (64 and 8 samples)
follow the source description. The following are this design's choices:

- causal alignment;
- floor rounding;
- clipping at zero;
- the 3-cycle pipeline.

The original filter was built in a graphical DSP tool, so exact numerical
agreement with it cannot be promised.

**Interconnect.** The source design used a vendor AXI4-Stream
interconnect. Here it is replaced by a small per-frame round-robin
arbiter with the same job.

**Formats and register map.** These are not given by the source and are
this design's own, in particular:

- the header, footer and sample layout;
- the magic bytes;
- the descriptor FIFO;
- the drop policy;
- the register map and reset values.

Only the 184-byte size of an 80 ns event was matched. To fit that size,
the l-gain samples travel as the minimum and maximum over the event in the
footer, not as a second waveform.

**Not included.** The following are outside this RTL, and their
signals are ports of `rfsoc_fe_top`:

- the l-gain ADC's serial (LVDS) capture and deserialisation: `lg_data`
  is already parallel;
- the RF-ADC tiles, with their 2 GS/s sampling and ×2 decimation;
- the slow DACs that set the ADC offsets;
- the 50 MHz external clock and the clock generation;
- the DMA engine, the processor, the DDR buffer and the network;
- the TTL output, whose function is not specified;
- the SFP+ 10 GbE option.

**Startup.** Right after reset the delay line is still filling. A
trigger within the first ~40 cycles therefore yields a record that is
one or more words short.

**Back-pressure.** RF-ADC TREADY is not modelled. The ADC stream is
assumed never to stall, and a gap in the ADC's TVALID simply ends or
splits an event.

## Files

`rtl/`:

- `fe_pkg.sv`: shared widths, configuration and frame structs.
- Channel blocks:
  - `dsp_module.sv`
  - `digital_discriminator.sv`
  - `trigger_selector.sv`
  - `stream_delay.sv`
  - `data_trigger.sv`
  - `lgain_adc_if.sv`
  - `frame_generator.sv`
  - `axis_width_conv.sv`
- `fe_channel.sv`: one channel, wired from the blocks above.
- Shared blocks:
  - `sync_edge.sv`
  - `timestamp_counter.sv`
  - `pl_regs.sv`
  - `axis_rr_interconnect.sv`
  - `axis_fifo.sv`
- `rfsoc_fe_top.sv`: the top.

`tb/` holds one self-checking testbench per block (`tb_<module>.sv`),
plus two system-level ones:

- `tb_rfsoc_fe_top.sv` runs the full-size top end to end. It drives
  synthetic PMT waveforms: noise, single-photoelectron pulses, and large
  pulses with overshoot. It walks through every trigger source, every
  bypass combination, back-pressure, overflow and a timestamp reset, and
  checks every sample of every frame against a reference model of the
  filters.
- `tb_workload_rates.sv` measures the 32 kHz, 25 kHz and 1 MHz-burst
  cases from the table above.
- `tb_workload_threshold_scan.sv` gives each channel a different
  threshold (28..43 counts) and injects 40-count triangular test pulses
  (20 ns rise, 20 ns fall). The hit count steps from all to none right
  above the filtered pulse height: 36 counts with the moving average,
  40 without.
- `tb_workload_noise.sv` feeds white noise of 2.1 counts RMS into
  `dsp_module`. It checks the output RMS for each BLR/MA setting: about
  2.1 counts without the average, 0.8 with it.
- `tb_workload_blr_overshoot.sv` places single-photoelectron pulses on the
  decaying overshoot after a saturating pulse. The overshoot depth is
  20..170 counts depending on the channel. With BLR every pulse is found.
  Without BLR, pulses on overshoots deeper than about 90 counts are all
  lost. Frame counts are compared with a model of the filters.

Every testbench prints `TB_RESULT checks=<n> failures=<n>` at the end and
has a watchdog.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl \
    rtl/fe_pkg.sv tb/tb_rfsoc_fe_top.sv --top-module tb_rfsoc_fe_top -o sim
./obj_dir/sim
```

Replace the testbench name to run any other testbench. `-Irtl` lets
Verilator find the modules by name.

| testbench | compile time | run time |
|---|---|---|
| full top | about a minute | under a second for 24 000 cycles |
| `tb_workload_rates` | about a minute | about 400 000 cycles |

Lint the synthesizable code with:

```
verilator --lint-only -Wall -Irtl rtl/fe_pkg.sv rtl/rfsoc_fe_top.sv
```

To change the size, override the top's parameters:

- `NCH`: channels;
- `BUF_DEPTH`: words of the event buffer per channel;
- `FIFO_DEPTH`: output FIFO depth;
- `PRE_MAX`: look-back; the stream delay follows it automatically.
