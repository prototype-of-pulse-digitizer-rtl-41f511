# RAIN4HPGe pulse digitizer firmware

A germanium detector of the CDEX-10 dark-matter experiment produces two
kinds of pulses for each hit. Shaping amplifiers (6 us and 12 us shaping
time) give "slow" pulses whose height measures the energy. Timing amplifiers
(~300 ns) give "fast" pulses whose 10 %-90 % rise time tells surface, bulk and
very-bulk events apart. The RAIN4HPGe board digitizes the slow pulses with
14-bit 100 MSPS ADCs and the fast pulses with 12-bit 1 GSPS ADCs. One FPGA
holds the recent waveform of every channel and forms a trigger. On a trigger
it cuts a record window out of every channel, stamps the event with the time,
stores it in a 1 GB DDR3 buffer and passes it to a readout module, which sends
it to a PC over Gigabit Ethernet.

This repository holds SystemVerilog for that FPGA logic. It follows the
board as published in "Prototype of Pulse Digitizer and Readout Electronics
for CDEX-10 in CJPL": the channel counts, sample rates and resolutions, the
record lengths, the trigger gates and their timing, the DDR3 size and its
bandwidth test. The published description gives these numbers and the block
diagram, but no firmware internals. The internals here (word formats,
handshakes, buffer management, pre-trigger length, clocking) are this
design's own choices. They are marked as such below and in each file's
header.

## Block map

```
 slow_adc[0..7] (14 b, 1/clk) ──► ring_buffer x8 ──┐
 fast_adc[0..3] (12 b, 10/clk) ─► ring_buffer x4 ──┤ shared read-offset buses
                                                   ▼
 inhibit ─► inhibit_veto ─┐            event_builder ──(64-bit words)──► ddr_event_buffer ──► ro_* readout stream
 slow_adc[trig_ch] ─► over_threshold_trigger ─AND─┐    ▲  (word_packer)           │ app_* (512-bit beats)
 random_trigger ───────────────────────────────── OR ─► accept ─► timestamp_timer  ▼
                            (trigger_unit)                          DDR3 memory controller core (external)
                                                    ddr_bw_tester ──► same app_* port when test_mode=1
 spi_master ──► ADC / DAC slow control pins
```

| file | role |
|---|---|
| `rtl/rain_pkg.sv` | shared constants (channel counts, widths, record lengths, timing) and types |
| `rtl/rain4hpge_top.sv` | top level: wiring, trigger acceptance, DDR3 port sharing |
| `rtl/trigger_unit.sv` | Trigger-in = (over-threshold AND vetoed inhibit) OR random |
| `rtl/inhibit_veto.sv` | NOT of the preamplifier inhibit, held low for 10 ms |
| `rtl/over_threshold_trigger.sv` | leading-edge discriminator with hysteresis |
| `rtl/random_trigger.sv` | 0.05 Hz periodic trigger |
| `rtl/timestamp_timer.sv` | 64-bit time base, latched on each accepted trigger |
| `rtl/ring_buffer.sv` | per-channel circular waveform memory with record freeze |
| `rtl/event_builder.sv` | packages frozen records into an event word stream |
| `rtl/word_packer.sv` | gearbox from 16/64/160-bit chunks to 64-bit words |
| `rtl/ddr_event_buffer.sv` | DDR3 as a circular event FIFO behind the controller user interface |
| `rtl/ddr_bw_tester.sv` | DDR3 write/read efficiency measurement |
| `rtl/spi_master.sv` | SPI master for ADC and offset-DAC set-up |

The ADC chips and their LVDS receivers, the DDR3 memory controller core, the
DDR3 chips, the ZYNQ-based readout module and the analog front end are not
part of this RTL. Their signals are ports of `rain4hpge_top`.

## Clock and sample format

Everything runs on one clock, taken to be 100 MHz, the slow sample rate. A
slow channel delivers one 14-bit sample per clock. A fast channel delivers ten
12-bit samples per clock on a 120-bit bus, sample 0 in the low bits, which is
1 GSPS. The LVDS deserializers that would produce these buses are outside.
Inside, every sample sits in a 16-bit slot, zero-extended. So a slow ring
buffer word is 16 bits and a fast one is 160 bits.

The DDR3 controller's user interface is also assumed to run on this clock.
A real DDR3-1600 controller in 4:1 mode has a 200 MHz user clock, so a
hardware build needs a clock-domain-crossing FIFO on the `app_*` signals, or
the firmware must run on the user clock. At 100 MHz the 512-bit user
interface moves at most 51.2 Gbit/s. That is enough for triggered records.
It is not enough to stream all twelve ADCs continuously (59.2 Gbit/s); this
design never does that.

## Trigger

```
trig_in = (over_threshold AND veto_n) OR random
```

* **veto_n** (`inhibit_veto`): the reset-type preamplifier raises an inhibit
  pulse of about 0.9 ms at every reset, about every 1.2 s. The inhibit is
  synchronized by two flops and inverted. `veto_n` stays low while it is high
  and for `VETO_CYCLES` = 1,000,000 clocks (10 ms) after it falls. A new
  inhibit restarts the hold. Timing the hold from the falling edge is a
  choice: the published text says only "for 10 ms after the inhibited pulse".
* **over_threshold** (`over_threshold_trigger`): one slow channel, chosen at
  run time by `trig_ch`, is compared with `threshold`. That channel is
  normally the 6 us, 0-12 keV shaping channel. The first sample above the
  threshold gives a one-clock pulse. The discriminator re-arms only after the
  signal falls to `threshold - hysteresis` or below. Positive-going pulses are
  assumed.
* **random** (`random_trigger`): a pulse every `RANDOM_PERIOD` = 2×10⁹ clocks
  (0.05 Hz). It samples the baseline noise at moments unrelated to physics
  events. It is gated by `random_en`.

`trig_in` comes two clocks after the first sample over threshold. Its source
flags `{random, over_threshold}` go into the event header.
`vetoed_triggers` counts discriminator pulses the veto removed.

**Acceptance and dead time.** `rain4hpge_top` accepts a `trig_in` only when
two conditions hold. Every ring buffer must hold a full pre-trigger history
(`armed`), and the previous event must have been packaged completely. A
trigger that arrives at any other time is counted in `lost_triggers` and
dropped. The paper states no acceptance rule; this one is the design's own.

## Ring buffers and the record window

This is the part that sets the timing of all data, so the exact rules
follow.

Each channel writes one word per clock into a circular memory of `DEPTH`
words. `DEPTH` is the record length rounded up to a power of two: 16384 for
slow channels, 2048 for fast ones. The record is `RECORD` words, of which
`PRE` come before the trigger:

| channel | record | RECORD (words) | PRE (words) | POST (words) |
|---|---|---|---|---|
| slow | 120 us = 12000 samples | 12000 | 6000 (60 us) | 6000 |
| fast | 16 us = 16000 samples | 1600 | 800 (8 us) | 800 |

The record lengths are the published ones. The split at half the record is a
choice, and `SLOW_PRE`/`FAST_PRE` on the top change it.

* The word written in the clock of the accepted trigger is post-trigger word
  0. `POST-1` more words are written. Then the buffer stops writing
  (`frozen`), and the record is the last `RECORD` words written.
* The event timestamp is the timer value in the trigger clock. So ring word
  *i* of a slow record holds the sample taken at time `stamp - SLOW_PRE + i`.
  Fast ring word *i* holds the ten samples of clock `stamp - FAST_PRE/10 + i`.
* Fast buffers freeze after 800 clocks and slow ones after 6000. Packaging
  starts when all are frozen.
* The event builder's `done` releases all buffers. Each one becomes `armed`
  again after `PRE` new words, so no record ever holds history older than the
  last freeze.

Freezing makes the design simple and keeps every record intact. The cost is
dead time while an event is packaged: about 120,000 clocks (1.2 ms) for a
full 12-channel event. The trigger rates involved are 0.05 Hz random and a
physics rate far below 1 Hz, so the lost time is negligible.

## Event format

`event_builder` writes each event as 64-bit words, in this order:

| word | content |
|---|---|
| 0 | `[63:48]` 0xCDE0, `[43:32]` channel mask, `[31:0]` event number |
| 1 | 64-bit timestamp (clocks since reset or `ts_clear`) |
| 2 | `[49:48]` source {random, over_threshold}, `[31:0]` total words of the event, fill included |
| per enabled channel | header `[63:48]` 0xC4A0, `[47:40]` channel, `[39:32]` lanes (1 or 10), `[31:0]` data words; then the record, four 16-bit sample slots per word, oldest sample in the low slot of the first word |
| fill | 0xFFFF_FFFF_FFFF_FFFF up to a multiple of 8 words (one DDR3 beat) |

Channels 0-7 are slow and 8-11 are fast. They appear in ascending order, and
only those set in `ch_mask` are included. A full event is 40016 words (5002
beats, 320 kB). The 3-slow + 3-fast set-up of one detector gives 21016
words. The builder reads one ring-buffer word per clock while `word_packer`
has room for it. A slow channel therefore takes 12000 clocks and a fast
channel 1600, unless the DDR3 side pushes back.

## DDR3 event buffer

`ddr_event_buffer` uses the whole 1 GB as a FIFO of `NUM_BEATS` = 2²⁴
beats of 512 bits.

* **Write side.** Eight event words, word 0 in the low bits, make a beat. A
  beat gets the next beat address, `app_addr` = beat × 8, since addresses are
  in 64-bit units (BL8). It is written with one write command (`app_en`,
  `app_cmd`=0) and one data beat (`app_wdf_wren` = `app_wdf_end`). The command
  and the data are each held until `app_rdy` or `app_wdf_rdy` accepts them.
  They may be accepted in different clocks.
* **Read side.** Once a beat is committed, meaning both halves have been
  accepted, it may be read back. Read commands are issued only when the 8-beat
  read-data FIFO has room for every outstanding read. `app_rd_data` is
  expected in command order. Beats leave as 64-bit words on `ro_*`.
* **Arbitration.** A pending write command wins over a read.
* **Full region.** When the region is full, `in_ready` falls. That stalls the
  event builder and, through it, trigger acceptance.

Assertions check the user-interface rules: a command or data beat is held
unchanged until accepted, and read data never arrives unrequested.

## DDR3 bandwidth test

With `test_mode` high, the `app_*` port belongs to `ddr_bw_tester`. On
`bwtest_start` it writes the sequence 0, 1, …, 268435455 as 32-bit patterns,
16 per beat, pattern *p* at byte address 4p. That fills exactly 1 GB. It then
reads everything back and compares. It reports:

* beats moved: `n_w`, `n_r`
* clocks taken: `n_cw`, from the first write clock to acceptance of the last
  write; `n_cr`, from the first read clock to arrival of the last data
* read errors

Write and read efficiency are `n_w/n_cw` and `n_r/n_cr`. The published
measurement gives 84.68 % and 91.87 %. It divides the pattern count by the
clock count, which implies about one pattern per user clock. Here one beat
carries 16 patterns, so the counters count beats. Against the simulation
model of the controller (refresh plus 10 % random not-ready clocks) the full
run of 2²⁸ patterns gives about 88 % both ways; the model has no banks or rows, so
this number says nothing about real DDR3. Switch `test_mode` only
while both users of the port are idle.

## Slow control

`spi_master` sends 24-bit frames, MSB first, in SPI mode 0 at clk/(2·10) =
5 MHz, to one of four chip selects. It returns the 24 bits read on MISO. A
frame lasts 2·CLK_DIV·24 clocks from `spi_start` to `spi_done`. The published
description says only that the ADCs are set up over SPI. It also mentions a
DAC for offset tuning but not its interface. Frame size, mode and rate are
choices.

## How far to trust it, and where it departs

Taken from the published design: 8 slow channels (14-bit, 100 MSPS) and 4
fast channels (12-bit, 1 GSPS); 120 us and 16 us records; the trigger gate
structure, the 10 ms veto and the 0.05 Hz random trigger; the 1 GB, 64-bit
DDR3 buffer and its controller-core user interface; the bandwidth-test
pattern sequence and its count; SPI slow control.

Design choices and departures:

* **Order of steps.** One sentence of the description has data "read from
  DDR3 SDRAM, stamped with timer … and transmitted" on a trigger. Elsewhere
  the ring buffers "wait for trigger signal to select", and the DDR3 capacity
  is counted in stored events. This design follows the second reading.
  Triggers select records from the ring buffers. Records are stamped and
  packaged, stored in the DDR3, then read out.
* **Clocking.** One 100 MHz clock, the DDR3 user interface included (see
  above).
* **Storage density.** Samples are stored in 16-bit slots. The 1 GB buffer
  therefore holds 6386 events of the 3+3-channel set-up, where the published
  estimate for packed samples is ~7585.
* **Own choices.** Pre-trigger length, ring-buffer freeze and dead time,
  acceptance rule, event format, channel mask, SPI parameters, and the
  64-bit valid/ready readout stream.
* **Not built.** The readout module's side of the link, offline energy and
  rise-time analysis, and any on-line pulse-shape discrimination are outside
  this logic.

## Simulation

Each block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. They need Verilator 5 with timing support:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/rain_pkg.sv tb/rain_tb_pkg.sv tb/tb_ring_buffer.sv --top-module tb_ring_buffer
./obj_dir/Vtb_ring_buffer
```

| testbench | what it shows |
|---|---|
| `tb_inhibit_veto` | veto timing against a history model, hold restart |
| `tb_over_threshold_trigger` | one trigger per pulse at the right clock, hysteresis |
| `tb_random_trigger` | exact period, enable |
| `tb_trigger_unit` | gate equation, vetoed pulses, source flags |
| `tb_timestamp_timer` | count, latch, clear |
| `tb_ring_buffer` | pre/post split, freeze timing, re-arming, record contents |
| `tb_event_builder` | word-exact event format for several channel masks under back-pressure |
| `tb_ddr_event_buffer` | ordered lossless transfer through a stalling controller model, full-region hold-off |
| `tb_ddr_bw_tester` | counts, cycle accounting, patterns at their physical addresses |
| `tb_spi_master` | frames both ways, chip select, frame length |
| `tb_rain4hpge_top` | whole design at small sizes: over-threshold and random events, a lost trigger, a vetoed trigger, the DDR3 region filling, a partial mask, timestamp clear, bandwidth test and return to event mode, SPI; every sample of every event checked |
| `tb_rain4hpge_full` | whole design with every parameter at its default: a 0.9 ms inhibit pulse and a vetoed pulse, one full 40016-word event, then a 21016-word event with three slow and three fast channels, all checked sample by sample (a few seconds) |
| `tb_ddr_efficiency` | full bandwidth test, 2²⁸ patterns (1 GB), against the controller model: beat counts, no read errors, patterns at their addresses, efficiency printed (about a minute, 2 GB of memory) |

The full-design benches use `tb/ddr3_mig_model.sv`, a behavioural model of
the controller's user interface. It stores beats in a sparse array, returns
reads after a fixed latency, and drops its ready signals for periodic
refresh and at random. They also use `tb/rain_event_checker.sv`, which
parses the readout stream. ADC inputs are functions of the firmware's own
time counter (`tb/rain_tb_pkg.sv`), so every sample of a record can be
predicted from its timestamp.

## Changing it

All sizes are parameters of `rain4hpge_top`, with defaults from `rain_pkg`:
channel counts, samples per clock, record and pre-trigger lengths (in
samples), veto and random-trigger periods (in clocks), DDR3 region size (in
beats), bandwidth-test pattern count and number of SPI selects. Keep these
constraints:

* Record lengths give whole 64-bit words (slow records a multiple of 4
  samples, fast records a multiple of `FAST_SPC`).
* The fast pre-trigger length is a multiple of `FAST_SPC`.
* At most 12 channels, because the header mask field is 12 bits.

Checks in the `initial` blocks of `ring_buffer`, `event_builder` and
`ddr_bw_tester` report violations at elaboration.
