# Pulse sequencer and 16-channel DDS controller for trapped-atom experiments

Experiments with cold trapped atoms and ions switch laser beams with
acousto-optic modulators and shutters. Each modulator needs its own RF drive,
and its frequency, amplitude and phase must change at exact moments of a pulse
sequence that runs from microseconds to seconds. The unit described here does
this with one main FPGA and sixteen small FPGAs, one on each DDS board:

* the **main FPGA** plays a TTL pulse sequence with 40 ns resolution on 32
  outputs. It counts and time-tags photomultiplier (PMT) pulses with 10 ns
  resolution. It loads the DDS boards over one shared 16-bit bus;
* each **DDS board** keeps a list of complete RF settings, 128 bits each:
  frequency, amplitude, phase and two ramp rates. It moves to the next
  setting whenever the main FPGA pulses its trigger line. It programs its DDS
  chip and its amplitude DAC with only what changed.

The main idea is to load everything before the run. The sequence is stored
as a list of output changes. The RF settings are stored on the boards. While
the sequence runs, nothing comes from the computer, and every delay in the
system is a fixed number of clock cycles. The host can therefore cancel a
delay by triggering that much earlier.

This RTL reconstructs the digital part of a published instrument (Pruttivarasin
and Katori, *Compact FPGA-based pulse-sequencer and radio-frequency generator
for experiments with trapped atoms*). The publication gives the architecture,
the 128-bit word format, the resolutions and the measured switching times. It
does not give the FPGA logic itself. All the logic below is therefore this
design's own, written to meet what was published. Where a choice was
necessary, it is marked as such in this file and in each module's header.

```
               host ports (stand-in for the USB link)
                          |
 +------------------------v-----------------------------------+
 | ok_fpga (100 MHz)                                          |
 |  pulse_sequencer --> ttl_out[31:0]                         |
 |        |          --> dds_trig[15:0] ----------------+     |
 |  pmt_in -> sync_edge -> pmt_counter   -> FIFO -> host |     |
 |                     -> pmt_timetagger -> FIFO -> host |     |
 |  dds_bus_master --> dds_bus (16 data, 4 sel, wr, clr)  |     |
 +-----------------------|-------------------------------|-----+
                         | shared by all boards          | one line per board
        +----------------v-------------------------------v--+
        | dds_board i (own clock, 62.5 MHz), i = 0..15      |
        |  dds_bus_receiver -> dds_word_ram (1024 x 128)    |
        |  sync_edge(trigger) -> dds_channel_ctrl           |
        |      ramp_counter x2, ad9915_writer, dac_writer   |
        +------|-------------------------------|------------+
               v                               v
        AD9915 DDS chip (16-bit port)   AD9744 DAC -> VGA (amplitude)
```

## The pulse sequence

A sequence is a list of **events**, sorted by time. Each event holds a 32-bit
time, counted in 40 ns ticks, and the complete 48-bit output state from that
time on. The state has 32 TTL channels (bits 31:0) and one step-trigger line
per DDS board (bits 47:32). The first event, normally at time 0, gives the
initial state of every channel. Memory therefore grows with the number of
edges in the sequence, not with its length. The default memory holds 2048
events, so a sequence can have about 2000 output changes and last up to
2^32 x 40 ns = 172 s.

`pulse_sequencer` divides the 100 MHz clock by four. On each tick it compares
the tick count with the time of the next event, which it has already
prefetched. When the two match, it registers that event's state onto the
outputs. Events may fall on consecutive ticks, so the shortest pulse is 40 ns.
With the start command taken at clock edge 0, an event at tick T drives the
outputs from clock edge 4(T+1). The run ends with a `done` pulse after the
last event. The outputs then keep their last state.

A DDS trigger is an ordinary pulse on one of bits 47:32. Only its rising edge
counts. It must stay high for at least three board clock periods (48 ns), so
two ticks is a safe width.

## Loading the DDS boards

The boards share one bus: 16 data lines, a 4-bit board select, a write
strobe `wr` and a clear line `clr`. `dds_bus_master` sends each 16-bit word
in two halves:

* for `STROBE_CYCLES` clocks (80 ns), `wr` is high, with data and select
  driven;
* for another `STROBE_CYCLES` clocks, `wr` is low, with data and select still
  held.

Each board runs on its own clock. It synchronises `wr`, and on the
synchronised rising edge it samples data and select. It can sample them
directly because they have been stable for several of its clock periods.

A board keeps only the words whose select matches its `BOARD_ID`. It packs
eight of them, least significant first, into one 128-bit setting. It writes
that setting to the next address of its word memory. A pulse on `clr` does
two things on every board: the load address goes back to 0, and the step
position goes back to "before word 0".

One 128-bit setting takes 8 x 160 ns = 1.28 us to send. Loading all 16 boards
with 100 settings each therefore takes about 2 ms.

### The 128-bit setting

The field widths are those of the published format. The bit positions are
not published; this design packs the fields in the published order, starting
from bit 0.

| bits    | field            | width | unit, at a 2 GHz DDS clock                                 |
|---------|------------------|-------|------------------------------------------------------------|
| 63:0    | frequency        | 64    | 2 GHz / 2^64 = 0.1 nHz                                     |
| 77:64   | amplitude        | 14    | 60 dB / 2^14 = 0.0037 dB. A code of 0 means output off.    |
| 93:78   | phase            | 16    | 360 deg / 2^16                                             |
| 109:94  | frequency ramp   | 16    | 113.7 Hz/ms per unit, up to 7.45 MHz/ms. 0 means jump.     |
| 125:110 | amplitude ramp   | 16    | 0.0017 dB/ms per unit, up to 114 dB/ms. 0 means jump.      |
| 127:126 | spare            | 2     |                                                            |

## Stepping a board: what gets programmed, and when

This is the core of the design, in `dds_channel_ctrl`. The RF output has two
independent controls:

* the **DDS chip**, reached over a 16-bit parallel port, sets the frequency
  and phase and can switch the output on and off;
* a **14-bit DAC** sets the control voltage of a variable-gain amplifier,
  which gives 60 dB of amplitude range, linear in dB.

Writing the DDS chip is slow and writing the DAC is fast. The controller
therefore does only the writes that a step needs.

On a trigger edge the controller does three things:

1. It reads the next word. This takes two clocks.
2. It loads the frequency and the amplitude ramp counters with the word's
   targets and rates. A counter with rate 0 jumps to its target at once.
3. It records whether the phase has changed.

Chip writes are not tied to steps. Both chips follow the counters all the
time:

* **DAC.** Whenever the amplitude counter differs from the code the DAC
  holds, and the DAC is free, the new code is latched into the DAC.
* **DDS chip.** When the DDS writer is free, it takes the first pending item
  in this order:
  1. **output on/off**, whenever the amplitude counter has crossed to or from
     0 (one half-word);
  2. **phase**, when the step changed it (one half-word);
  3. **frequency**, whenever the frequency counter differs from what the chip
     was last given (four half-words).

  Every write ends with an IO_UPDATE pulse, so the chip applies the new values
  together.

The published switching cases follow from these rules:

* **Amplitude change only:** one DAC write. The DDS chip is not touched.
* **Amplitude to or from 0:** a DAC write, plus one DDS on/off write.
* **Frequency change:** one four-half-word DDS write. It runs alongside any
  DAC write, so a combined change of amplitude and frequency switches the
  amplitude as fast as an amplitude-only change.
* **Ramps:** each counter steps once per update period (2.048 us), and the
  rules above write out each new value. A frequency write takes 28 board
  clocks (0.45 us), so it always fits within one update period.

Latencies at the default settings (62.5 MHz board clock, 16 ns per clock),
from the trigger edge at the board pin to the chip pin:

| change            | what is written             | digital latency (this RTL) | published total switching time |
|-------------------|-----------------------------|----------------------------|--------------------------------|
| amplitude only    | DAC latch clock             | 7 clocks: 112-128 ns       | about 350 ns                   |
| to/from off       | DAC, then one DDS half-word | 13 clocks to IO_UPDATE     | about 550 ns                   |
| phase             | one DDS half-word           | 13 clocks: 208-224 ns      | about 500 ns                   |
| frequency         | four DDS half-words         | 31 clocks: 496-512 ns      | about 1.0 us                   |

The range in each latency comes from synchronising the trigger. The published
times are longer because they also contain the DDS chip's internal pipeline
and the response of the amplifier. The digital part here fits within them.
Every latency is an exact number of board clocks. `WR_CYCLES`, `UPD_CYCLES`
and the DAC latch width are parameters that can be set to match the
datasheets of the parts actually used.

Further stepping rules:

* After a clear, the first trigger applies word 0.
* The controller remembers one trigger that arrives while a step is still
  being read.
* Triggers after the last loaded word are ignored.

## Ramps

The board has two ramp counters, one for frequency and one for amplitude.
Both come from one module, `ramp_counter`. Each counter holds its value in an
accumulator that may have extra fraction bits. A load with a non-zero rate
starts from the present value. Every `PERIOD_CYCLES` clocks, the counter moves
the value by `rate << SHIFT` accumulator units towards the target, and it
stops exactly on the target. The period divider restarts at each load.

At the default period (128 clocks = 2.048 us):

* **Frequency:** `SHIFT = 31`. One rate unit adds 2^31 frequency-word units
  per period:

  2^31 x 2 GHz / 2^64 / 2.048 us = 113.7 Hz/ms

  The 16-bit maximum is 7.45 MHz/ms. Both numbers are the published
  resolution and range. The published 7 MHz/ms demonstration is rate 61572.
* **Amplitude:** 10 fraction bits. One rate unit is 1/1024 of an amplitude
  step per period:

  (60 dB / 2^14) / 1024 / 2.048 us = 0.0017 dB/ms

  This is the published resolution. The published 20 dB/ms demonstration is
  rate 11455.

Both ramps can run at the same time, and the ramps on different boards run
independently. A ramp down to amplitude 0 switches the output off when it
arrives there.

## Photon counting and time tagging

The PMT input is synchronised once. It then feeds two blocks:

* **`pmt_counter`** counts rising edges in back-to-back windows of `period`
  clocks, and pushes each window's total into a 1024-entry FIFO. Counting
  runs at up to one pulse per 10 ns clock. No pulse is lost at a window
  boundary.
* **`pmt_timetagger`** stores, for every pulse during a run, the number of
  10 ns clocks since the run started. The tags go into a 4096-entry FIFO.
  Because the FIFO is read only by the host, tags from many runs can pile up
  and be read out together.

A tag counts the clocks from the edge that accepts the start command to the
edge that first samples the pulse. On the same scale, an event at tick T
changes the outputs at clock 4(T+1). Both FIFOs set a sticky `overflow` flag
instead of overwriting data.

## Clocks and reset

There are two clock domains:

* the main FPGA runs on one 100 MHz clock, `clk_ok`;
* each board runs on its own clock, `clk_dds[i]`, 62.5 MHz assumed. The
  boards need not be in phase with the main FPGA or with each other.

Only two kinds of signal cross between the domains. The trigger lines go
through a two-flop synchroniser and an edge detector. The bus write strobe
and the clear line are synchronised the same way, and they qualify data that
is held stable around them. All resets are synchronous and active high. After
reset:

* the sequencer is idle with its outputs low;
* every board points before word 0 with its output marked off;
* the FIFOs are empty.

The memories are not cleared.

## Where this departs from, or adds to, the published system

* The published instrument uses an Opal Kelly module with a USB link driven
  by the vendor's API. That link is vendor IP and is not reproduced here. The
  top level brings its endpoints out as plain ports:
  * event-memory writes, start and stop;
  * two FIFO read ports;
  * a valid/ready word port and a clear request for the DDS bus.
* The option of clocking the main FPGA from an external reference through a
  TTL input is not modelled; the clock is an input.
* The bus is single-ended here. The differential line drivers of the real
  unit have no logic function.
* The following are this design's own, because the publication does not give
  them:
  * the clock rates (100 MHz main, 62.5 MHz board);
  * the event format;
  * the bus protocol;
  * the memory depths (2048 events, 1024 settings, 4096 tags, 1024 counts);
  * the bit positions in the 128-bit setting;
  * the ramp scheme;
  * "amplitude 0 means off";
  * the DDS write order.
* **Amplitude-ramp range.** The published resolution (0.0017 dB/ms per unit)
  and the published maximum (22.9 dB/ms) do not agree for a 16-bit rate:
  2^16 x 0.0017 dB/ms = 111 dB/ms. This design follows the resolution, so its
  maximum is 114 dB/ms.
* **DDS register addresses.** The addresses the controller uses on the DDS
  chip's port (`DDS_ADDR_*` in `pulser_pkg`) are placeholders. So is the
  mapping of the 64-bit frequency onto four half-words. Set them from the
  chip's datasheet before use in hardware. The same holds for the write-cycle
  timing.
* **Gated PMT counts.** Counting in fixed gate windows with a FIFO is one
  simple reading of the published "100 MHz counter". The publication does
  not say how counts are gated.

## Files

| file                    | what it is                                                        |
|-------------------------|-------------------------------------------------------------------|
| `rtl/pulser_pkg.sv`     | shared widths, the setting word, bus and event types, DDS addresses |
| `rtl/pulser_system.sv`  | top: main FPGA plus 16 boards                                     |
| `rtl/ok_fpga.sv`        | main FPGA                                                         |
| `rtl/pulse_sequencer.sv`| event-list TTL sequencer                                          |
| `rtl/pmt_counter.sv`    | gated PMT counter with FIFO                                       |
| `rtl/pmt_timetagger.sv` | PMT time tagger with FIFO                                         |
| `rtl/dds_bus_master.sv` | bus driver of the main FPGA                                       |
| `rtl/dds_board.sv`      | one DDS board's FPGA                                              |
| `rtl/dds_bus_receiver.sv`| bus receiver and word packer                                     |
| `rtl/dds_word_ram.sv`   | 128-bit setting memory                                            |
| `rtl/dds_channel_ctrl.sv`| step logic and change-driven chip updates                        |
| `rtl/ramp_counter.sv`   | frequency/amplitude ramp counter                                  |
| `rtl/ad9915_writer.sv`  | DDS parallel-port write engine                                    |
| `rtl/dac_writer.sv`     | amplitude DAC latch                                               |
| `rtl/sync_edge.sv`, `rtl/sync_fifo.sv` | synchroniser/edge detector, FIFO                   |
| `tb/tb_<module>.sv`     | one self-checking testbench per module                            |
| `tb/tb_workloads.sv`    | the published demonstrations, run on one board                    |
| `tb/ad9915_model.sv`    | testbench model of the DDS chip's port (register capture)         |

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops by itself.
With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/pulser_pkg.sv tb/tb_pulser_system.sv --top-module tb_pulser_system -o sim
./obj_dir/sim
```

Replace `tb_pulser_system` with any other testbench name. The tests start
from random register values (`+verilator+rand+reset+2`), so every register
that is read is reset.

`tb_pulser_system` runs the complete unit at its default sizes in a few
seconds. It acts as the host:

1. It loads all 16 boards and a 200 us sequence, runs it with random PMT
   pulses, and reads back tags and counts.
2. It checks the TTL outputs at every clock, and each board's chip and DAC
   values after each step.
3. It checks the phase-flip latency, every time tag, the sum of the counts,
   and the bus clear.
4. It counts how often each mechanism happened: amplitude-only switch, on/off,
   frequency switch, phase switch, both ramps, tags, count windows, triggers
   to every board and the clear. A mechanism that never happened is a
   failure.

## How far to trust it

* Every module has a testbench that compares against values worked out
  independently. Where a latency is defined, the testbench checks the exact
  cycle count.
* For every module, a deliberately broken copy was run against its testbench,
  and that testbench failed.
* No part of this RTL has been run on the real boards. The DDS chip and the
  DAC are modelled only at the level of their write strobes.
* The parallel-port addresses and write timings are placeholders (see above).
* Timing closure at 100 MHz and 62.5 MHz has not been checked on an FPGA.
  The deepest logic is the 64-bit compare and add in the frequency ramp.
