# TDC for drift-tube readout: RTL model

This is a 24-channel time-to-digital converter (TDC) for drift-tube chambers.
Each channel receives the discriminated signal of one tube from an
amplifier/shaper/discriminator (ASD) chip. The TDC measures the times of the
leading and trailing edges with a bin of 0.78125 ns over a range of 102.4 µs
(17 bits). It then sends the measurements to a chamber service module over
two serial lines. It has two operating modes:

* **Triggerless mode** (the main mode). Every hit is sent as soon as it is
  complete, so the whole data stream can be used off-chip by a first-level
  trigger.
* **Triggered mode.** Hits are kept in a per-channel ring buffer. Only those
  that fall inside a time window around a trigger are sent, packed into
  events.

The RTL covers:

* the digital time measurement;
* the complete logic unit for both modes;
* the serial output at 320, 160 and 80 Mbit/s;
* JTAG configuration and monitoring.

Three parts are not included, and the top exposes their signals as ports:

* the PLL that makes the clocks;
* the transistor-level sampling registers;
* the differential I/O cells.

## Clocks and time measurement

The logic runs on one clock and the time measurement uses two more. All three
come from an on-chip PLL that is not part of the RTL:

| Clock | Frequency | Phase |
|---|---|---|
| `clk160` | 160 MHz | logic clock |
| `clk320_0` | 320 MHz | 0/180 degrees; rises together with `clk160` |
| `clk320_90` | 320 MHz | 90/270 degrees |

**Sampling.** The usual TDC scheme samples the hit signal with many clock
phases. This design does the reverse: the hit edge samples the clocks.
Each channel has two *TDC slices* (`tdc_slice`). One is clocked by the rising
edge of the hit, the other by the falling edge.

**Fine time.** At its edge a slice captures the levels of `clk320_0` and
`clk320_90`. Those two bits tell which quarter of the 3.125 ns period the
edge fell in. That quarter is the 2-bit fine time:

| (clk0, clk90) | 10 | 11 | 01 | 00 |
|---|---|---|---|---|
| fine code | 0 | 1 | 2 | 3 |

**Coarse time.** One shared 15-bit counter (`coarse_counter`) counts rising
edges of `clk320_0`. A copy of its value is registered on the falling edge.
Each slice samples both values together with the clock levels.

**Ambiguous bins.** A counter sampled near the moment it increments can
return either value. The slice therefore takes the coarse count from the copy
that is stable in the sampled quarter:

* quarters 1 and 2: the rising-edge counter;
* quarter 3: the falling-edge copy;
* quarter 0 (just after a rising edge): the falling-edge copy plus one.

The result is `time = {coarse[14:0], fine[1:0]}`. For an edge at time t this
equals `floor((t - t0) / 0.78125 ns) mod 2^17`, where `t0` is the moment the
counter last restarted from 0. The testbenches check this formula against
every edge they drive.

**Counter reset.** The counter is cleared by the chip reset and by the
bunch-counter reset (BCR) from the TTC line. After a BCR:

* bits 16:5 of a time are the bunch-crossing number (25 ns = 32 bins);
* those bits line up with the bunch counter used for triggers.

**Hand-over to the logic clock.** Each capture flips a toggle bit. The
channel passes this bit through three `clk160` flip-flops. When the last two
differ, the captured time is read; it has been stable for at least two
cycles.

* Consequence: on each edge type a channel can take one hit per 160 MHz
  cycle.
* The hit-clocked flip-flops are ordinary RTL registers here. On the chip
  they are custom low-power sampling registers.

## Hit building (`hit_builder`)

**Edge mode.** Each edge becomes its own word:

* leading edge: mode 00;
* trailing edge: mode 01.

If a new edge arrives while the previous word of the same kind is still
waiting for the channel FIFO, the older word is lost and `lost` pulses.

**Pair mode.** A leading edge is held until its trailing edge arrives. The
pair then becomes one word (mode 11) carrying:

* the leading time;
* the pulse width, `(t_trail - t_lead) >> width_sel`, saturated to 8 bits.

`width_sel` trades width range for resolution. Orphan edges are dropped:

* a trailing edge with no leading edge before it;
* a leading edge replaced by a newer one before its trailing edge arrives.

## Triggerless readout

The path is hit builder → 4-deep channel FIFO → round-robin channel
multiplexer (adds the 5-bit channel number) → 16-deep readout FIFO → serial
interface.

* The multiplexer moves one word per cycle.
* The serial line moves one 32-bit word per 10 cycles at 320 Mbit/s.
* Bursts therefore wait in the FIFOs.
* When a channel FIFO is full, the hit builder stalls and then loses hits.

Latency in simulation (`tb_tdc_rate`) is measured from the trailing edge of a
pulse to the last bit of its word on the line:

| Hit rate per channel | Hits within 350 ns | Hits lost |
|---|---|---|
| isolated hits | all (about 106 ns each) | none |
| 200 kHz | 100% | none |
| 400 kHz | 99.6% | none |
| 660 kHz | — | about 0.1% |

The 660 kHz case is 99% of the line capacity (see below). With random
(Poisson) arrivals the queues there grow to several microseconds, and the
4-deep channel FIFOs occasionally overflow.

## Triggered readout

* **Ring buffer.** Every built hit is written into the channel's 16-entry ring
  buffer (`hit_buffer`), in time order.
* **Fake hits.** `fake_hit_gen` writes a *fake hit* into every ring buffer at
  a programmable period, counted in bunch crossings (BC). Fake hits are tagged
  with mode 10 and never match. Their job is to push old hits out. The time a
  hit stays available is therefore about 16 × the fake period, less whatever
  real hits take up.
* **Trigger sources.** A trigger comes from the TTC line or from the dedicated
  trigger pin (`trigger_interface`).
* **Time stamp.** The trigger is stamped with `bunch counter - trig_offset`.
  This points back to the bunch crossing that caused it. It also gets an
  event ID from an 8-bit event counter. Both go into a 16-deep trigger FIFO.
  If that FIFO is full, the trigger is lost and counted.
* **Waiting for the window.** `trigger_match_ctrl` takes one trigger at a
  time. It waits until the bunch counter has passed `bcid + window + 2`, so
  that every hit of the window is in the buffers. It then broadcasts the BCID
  and the window to all channels.
* **Matching.** Each `trigger_match` unit compares all 16 entries at once. An
  entry matches if it is a real hit and `(t[16:5] - bcid) mod 4096 < window`.
  The window opens at the trigger BCID.
* **Sending matched hits.** The matched entries are sent to the channel FIFO,
  oldest first.
  * A hit stays in the ring buffer after it is sent, so overlapping triggers
    can select it again.
  * If a matched entry is overwritten before it is sent, it is lost and
    flagged.
* **Event building.** `event_builder` writes a header, then every matched hit
  of channel 0, 1, … 23, then a trailer. A channel is finished when its
  matching is no longer busy and its FIFO is empty. The trailer asks the
  serial interface for a comma, which separates events.

## Word formats

| Word | Bits | Layout |
|---|---|---|
| edge hit | 24 | `chid[4:0]` `mode[1:0]` (00 leading, 01 trailing) `t[16:0]` |
| pair hit | 32 | `chid[4:0]` `11` `t_lead[16:0]` `width[7:0]` |
| header | 24 | `1110` `event_id[7:0]` `bcid[11:0]` |
| trailer | 24 | `1111` `err[3:0]` `event_id[5:0]` `hit_count[9:0]` |

**Trailer error bits:**

* `err[0]`: a matched hit was overwritten in a ring buffer before it was sent.
* `err[1]`: a trigger was lost because the trigger FIFO was full.
* `err[2]`: a hit builder lost a hit.
* `err[3]`: the hit count exceeded 1023.

Errors seen between events are reported in the next trailer.

**Telling words apart.** The first four bits of a header (1110) or trailer
(1111) cannot be the start of a hit word, because channel numbers stop at 23.
The first byte of a hit word tells pair from edge. A receiver can therefore
find every word's length from its first byte.

## Serial interface (`serial_interface`, `enc8b10b`)

**320 and 160 Mbit/s.**

* Each word becomes 3 or 4 bytes, most significant byte first.
* Each byte is coded with the standard 8b/10b code, with running disparity.
* The 10-bit symbols form one bit stream. Even bits go to line 0 and odd bits
  to line 1.
* Each line is delivered as two bits per `clk160` cycle (`dout*[0]` first),
  for a double-data-rate output cell.
  * At 320 Mbit/s both bits are new.
  * At 160 Mbit/s each bit fills both slots.

**Commas (K28.5).** A comma is sent:

* whenever the readout FIFO is empty;
* after every trailer;
* after `comma_limit` words without a comma (0 means no limit).

Receivers use commas to find symbol boundaries; the limit keeps them locked
under continuous data.

**Speed.** A 4-byte word takes 10 cycles (62.5 ns) at 320 Mbit/s.

**80 Mbit/s.** This mode is compatible with the previous TDC generation.

* Line 0 only.
* Each word is sent as a start bit 1, then 24 or 32 data bits MSB first, then
  a stop bit 0.
* Each bit lasts two cycles.
* The line stays 0 while there is nothing to send.

## Configuration and monitoring (`jtag_config`)

`jtag_config` is a standard IEEE 1149.1 test access port with a 4-bit
instruction register. Data is shifted LSB first.

| IR | Register | Bits |
|---|---|---|
| 0001 | IDCODE (selected after reset), `0x1DC00001` | 32 |
| 0010 | configuration `cfg_t`, written on Update-DR | 76 |
| 0011 | status `{events built[7:0], triggers lost[7:0], hits lost[15:0]}` | 32 |
| 0100 | ASD chain: TDI/TDO pass through; `asd_shift/capture/update` strobes | — |
| other | bypass | 1 |

`cfg_t` fields, from MSB to LSB, with reset values:

| Field | Bits | Reset | Meaning |
|---|---|---|---|
| `chan_en` | 24 | all 1 | channel enables |
| `fake_period` | 12 | 32 | fake-hit period in BC, 0 = off |
| `match_window` | 12 | 16 | matching window in BC |
| `trig_offset` | 12 | 400 | trigger latency in BC (10 µs) |
| `comma_limit` | 8 | 255 | words between forced commas |
| `width_sel` | 4 | 0 | pair width shift |
| `rate` | 2 | 0 | 0 = 320, 1 = 160, 2 = 80 Mbit/s |
| `pair_mode` | 1 | 1 | pair (1) or edge (0) mode |
| `triggered` | 1 | 0 | triggered (1) or triggerless (0) mode |

**When to write it.** The configuration crosses into the logic clock domain
as a quasi-static value. Write it only while no data is in flight. A
global-reset command on the TTC line then restarts the logic. The global
reset leaves these unchanged:

* the configuration;
* the monitoring counters;
* the coarse counter.

So send a BCR afterwards to realign the coarse counter with the bunch counter.

**Hit-loss counter.** Each cycle the counter adds the number of channels
that lost a hit, and saturates at its maximum.

## TTC command line (`ttc_decoder`)

The bunch-crossing strobe is made inside the chip by dividing `clk160` by
four; its phase is set by the reset. One bit is sampled per bunch crossing. The line idles at 0. A command is a
start bit 1 followed by two bits:

| Bits | Command |
|---|---|
| 00 | trigger |
| 10 | bunch-counter reset |
| 01 | event-counter reset |
| 11 | global reset |

## Capacity

At 320 Mbit/s the two lines carry 640 Mbit/s:

* 16 million pair words per second;
* 15.94 million with a comma every 255 words.

| Hit rate per channel | Words per second | Line load |
|---|---|---|
| 200 kHz | 4.8 M | 30% |
| 400 kHz | 9.6 M | 60% |
| 660 kHz | 15.84 M | 99% |

**Triggered mode at a 1 MHz trigger rate with 10 µs latency:**

* The offset register reaches 102 µs.
* A trigger, its hits and its comma take about 224 bits at 400 kHz per
  channel with a 16-BC window.
* With fake hits every 32 BC, the ring buffers hold 12.8 µs when there are no
  real hits. At high real-hit rates the fake period must be raised (for
  example to 40 BC) so that hits survive 10 µs.

## Where this RTL departs from, or goes beyond, the source design

The overall structure follows the published description:

* the clock-sampling TDC slices with a shared coarse counter;
* the hit builder with edge and pair modes;
* the 4-deep channel FIFOs and the 16-deep readout and trigger FIFOs;
* the per-channel 16-entry ring buffers, parallel trigger matching and fake
  hits;
* the header/hits/trailer events;
* 8b/10b with commas and a comma limit;
* the three line rates;
* JTAG.

These are this design's own choices:

* the fine-code mapping and the ambiguous-bin rule;
* the toggle hand-over;
* word layouts of header and trailer, the fake-hit tag, and the error bits;
* width of the bunch counter (12 bits) and the event counter (8 bits);
* the matching comparison and the wait before matching;
* the TTC command code;
* legacy framing polarity;
* the JTAG register map and IDCODE;
* round-robin channel arbitration;
* saturation of the pair width;
* all configuration defaults except the 320 Mbit/s pair triggerless mode.

**Not modelled:**

* the PLL;
* the custom low-power sampling register;
* the LVDS/differential I/O;
* triple modular redundancy of the control logic, which the source design
  lists as pending.

**Known difference in measured behaviour.** The source design reports no
loss at 660 kHz per channel. This model loses about 0.1% of hits at that rate
under Poisson arrivals. The average load fits, but the 4-deep channel FIFOs
overflow during random bursts.

## Files

**Package `rtl/tdc_pkg.sv`.** Shared sizes, types (`hit_t`, `rdo_word_t`,
`cfg_t`, `trig_t`) and word-building functions.

**Modules:**

| Module | Role |
|---|---|
| `coarse_counter` | 15-bit coarse time counter and its falling-edge copy |
| `tdc_slice` | one hit-clocked time measurement |
| `hit_builder` | edge or pair words per channel |
| `sync_fifo` | parameterised FIFO (channel, readout, trigger) |
| `hit_buffer` | 16-entry ring buffer |
| `trigger_match` | parallel window comparison, sends matches |
| `fake_hit_gen` | periodic fake-hit strobe |
| `tdc_channel` | one channel: slices, hit builder, ring buffer, matching, FIFO |
| `channel_mux` | round-robin multiplexer of the 24 channel FIFOs |
| `ttc_decoder` | TTC command decoder |
| `trigger_interface` | bunch and event counters, trigger time stamps |
| `trigger_match_ctrl` | sequences triggers to the channels |
| `event_builder` | header, hits, trailer |
| `enc8b10b` | 8b/10b encoder |
| `serial_interface` | symbol stream, commas, line split, legacy mode |
| `jtag_config` | TAP, configuration, status, ASD chain |
| `tdc_top` | the chip |

**Testbenches.** Each module has a self-checking testbench `tb/tb_<module>.sv`
that prints `TB_RESULT checks=N failures=M`. Testbench helpers:

* `tb/tb_codec_pkg.sv`: a table-driven reference 8b/10b encoder and decoder;
* `tb/tb_jtag_task.svh`: JTAG driver tasks;
* `tb/tb_check.svh`: check macros.

Two testbenches run the whole chip at its full size of 24 channels:

* `tb_tdc_top` is end to end. It covers:
  * every mode and line rate;
  * back-pressure;
  * lost hits;
  * BCR, event-counter reset and global reset;
  * triggers from both sources;
  * overlapping triggers;
  * trigger-FIFO overflow;
  * fake-hit flushing;
  * JTAG.

  It counts each mechanism and fails if one never happens.
* `tb_tdc_rate` runs the 200/400/660 kHz latency measurements.

## Simulating

A testbench runs with plain Verilator 5:

```
verilator --binary --timing --timescale 1ns/1ps --top-module tb_tdc_top -Irtl -Itb -y rtl -y tb \
    rtl/tdc_pkg.sv tb/tb_codec_pkg.sv tb/tb_tdc_top.sv
./obj_dir/Vtb_tdc_top
```

Replace `tb_tdc_top` with any other testbench name.

* The full-chip testbenches use a 1 ps / 10 fs time scale. This lets the
  0.78125 ns bins and the 90-degree clock be exact.
* `tb_tdc_top` simulates about 250 µs in a few seconds.
* `tb_tdc_rate` simulates 1.2 ms.
* Everything is initialised or reset, so two-state simulation is enough.
