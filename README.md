# PARISROC digital part in SystemVerilog

PARISROC reads out a "macro pixel" of 16 small photomultiplier tubes with no
external trigger. Each tube has its own analogue channel that triggers itself,
stores the pulse and its arrival time in a small analogue memory, and digitises
both later. Only the channels that were hit are sent out, on a single serial
line. In a large water-Cherenkov detector, only useful data then leaves each
16-tube module. Per hit, the chip measures:

- a 12-bit charge;
- a 24-bit coarse time at 10 MHz (100 ns steps);
- a 12-bit fine time, sampled from a 100 ns voltage ramp.

This repository has synthesizable RTL for the digital part of such a chip:

- the analogue-memory management;
- the timestamp counter;
- the digital half of the Wilkinson ADC;
- the trigger logic;
- the selective serial readout;
- the sequencer;
- the slow-control register.

It also has a self-checking testbench for every block and an end-to-end test.
The analogue circuits have no RTL: preamplifier, shapers, discriminators,
DACs, delay line, capacitor memory, voltage ramps, comparators and bandgap.
Their control and result signals are ports of the top module. A behavioural
model of them is in `tb/`, for simulation only.

## Signal chain of one channel

```
PMT -> preamp (common 4-bit gain, per-channel 8-bit correction)
        |-> slow shaper (CRRC2, 50/100/200 ns) -> 2 charge cells -+
        |                                                         |-> comparators
        |   TDC ramp (100 ns, common) ----------> 2 time cells ---+   vs ADC ramp
        |                                                               |
        `-> fast shaper (15 ns) -> discri A / discri B -> mux -> trig_o  |
                                                          |            v
                         variable delay <-----------------+     wilkinson_adc
                               |                                       |
             trig_delayed_i OR ext_hold_i -> sca_manager -> cell_hold_o
```

Everything left of the digital ports is analogue. `parisroc_digital` sees
these signals:

- `discri_a_i`, `discri_b_i`: the two discriminator outputs of each channel.
- `trig_o`, `trig_or_o`: the 16 trigger outputs and their OR.
- `trig_delayed_i`: the triggers coming back from the delay line.
- `ext_hold_i`: an external hold common to all channels.
- `cell_hold_o[c][k]`: 1 freezes memory cell k of channel c.
- `read_cell_o[c]`: the cell of channel c connected to its comparators.
- `tdc_ramp_sync_o`: the 10 MHz pulse that restarts the TDC ramp.
- `adc_ramp_run_o`: runs the ADC ramp while high; low resets it.
- `cmp_charge_i`, `cmp_time_i`: the comparator outputs, high once the ADC
  ramp has passed the held level.
- `dout_o`, `transmit_on_o`: the serial data line and its word qualifier.
- `sc_*`, `sc_cfg_o`: the slow-control link and the settings it drives into
  the analogue part.

## Life of a hit

Timings are in 40 MHz cycles (25 ns) unless marked as 10 MHz ticks.

1. **Trigger.** The selected discriminator fires and `trig_o[c]` goes high.
   The analogue delay line holds it back so that it comes out when the slow
   shaper reaches its peak.
2. **Hold.** `trigger_logic` ORs the delayed trigger with the external hold.
   `sca_manager` synchronises this request with two flip-flops and acts on its
   rising edge. On that edge it:
   - freezes the cell under its write pointer (`cell_hold_o` goes high 3 edges
     after the request);
   - stores the current coarse timestamp with that cell;
   - moves the write pointer to the other cell.

   The TDC ramp is frozen in the same cell pair, which gives the fine time
   within the 100 ns period.
3. **Conversion.** `top_manager` is idle and sees a channel with a held cell.
   It records the set of such channels and starts `wilkinson_adc`. The ADC
   releases the common ramp and counts clock cycles from 0. Each of the 32
   comparators (charge and fine time of 16 channels) latches the count at the
   first edge where it is seen high. After 4096 counts (102.4 us), any
   comparator that has not fired gets code 4095, and `done` pulses.
4. **Store and release.** On the next edge, the codes and timestamps of the
   recorded channels are written into `event_registers`. On the same edge
   their cells are released: each returns to tracking, and its read pointer
   moves to the other cell. One edge later the readout starts.
5. **Readout.** `readout` sends the channels with a valid register, and only
   those, in increasing channel order. Each goes out as one 52-bit word, MSB
   first, one bit per 10 MHz tick. One idle tick follows each word.
   `top_manager` then clears the registers and returns to idle.

If the other cell of a channel holds a sample by then, the next conversion
starts at once. Hits keep arriving throughout conversion and readout. Each
channel can therefore absorb two hits per conversion-and-readout cycle, which
takes about 102.4 us + 5.3 us per hit channel. A third hit on a channel whose
two cells are full is dropped and reported on `lost_o[c]`.

## Readout word and line timing

| bits    | field                     |
|---------|---------------------------|
| 51..48  | channel number            |
| 47..24  | coarse timestamp (100 ns) |
| 23..12  | charge code               |
| 11..0   | fine-time code            |

`transmit_on_o` is high for exactly the 52 ticks of a word, and `dout_o` is 0
outside words. A word takes 53 ticks, or 5.3 us. All 16 channels take
84.8 us, inside the 100 us the chip must meet for a full readout.
`dout_o` changes on the clock edge at which the tick enable is high. A
receiver that samples on that same edge, as the testbenches do, takes the bit
that has been stable for the previous 100 ns.

## Analogue memory as a FIFO (`sca_manager`)

Each channel has `DEPTH` = 2 cell pairs, one capacitor for charge and one for
time in each. A free cell tracks its input. The module keeps:

- a full flag per cell;
- a write pointer and a read pointer;
- one stored timestamp per cell.

`pending_o` is the full flag of the read cell. `rd_ts_o` is that cell's
timestamp. `release_i` is legal only when the read cell is full; an assertion
checks this. A release and a new hold may happen on the same edge. A request
that finds the write cell full is lost, even if a release frees a cell on
that same edge.

## Wilkinson conversion (`wilkinson_adc`)

The conversion is one common ramp compared with all 32 held levels. The digital
side is a 12-bit counter and 32 latches with "already latched" flags.

- The code equals the number of clock edges between ramp start and the
  comparator switching. Comparator delay only adds a constant pedestal.
- From the edge that takes `start_i` to the edge that raises `done_o` is
  exactly 2^12 = 4096 cycles.
- `ramp_run_o` is high for the whole conversion, and the analogue ramp
  generator resets while it is low.

## Slow control (`slow_control`)

A 219-bit shift register is clocked by `sc_clk_i`, with `sc_dout_o` as its
last stage so several chips can be daisy-chained. Bits go in MSB first, in the
order of `sc_config_t` in `parisroc_pkg`. A cycle with `sc_load_i` high copies
the register to the active settings `cfg_o`, and the settings do not move
while bits are shifted in. Bit positions:

| bits     | field         | meaning                                        |
|----------|---------------|------------------------------------------------|
| 218..215 | `gain_common` | preamplifier variable gain, all channels       |
| 214..87  | `gain_corr`   | 8-bit gain correction, channel 15 highest      |
| 86..85   | `shaper_tau`  | slow shaper time constant: 0, 1, 2 = 50, 100, 200 ns |
| 84..75   | `dac_thr_a`   | 10-bit threshold, discriminator A              |
| 74..65   | `dac_thr_b`   | 10-bit threshold, discriminator B              |
| 64..1    | `dac_adj`     | 4-bit per-channel threshold adjust, ch. 15 highest |
| 0        | `trig_sel_b`  | 1: triggers from discriminator B               |

Only `trig_sel_b` is used inside the digital part. Everything else goes out
on `sc_cfg_o` to the analogue part. The settings are meant to change only
between runs, so they enter the 40 MHz domain without a synchroniser.

## Clocking and reset

The whole digital part runs on one 40 MHz clock. The 10 MHz timestamp and
readout rate is a one-in-four enable made by a 2-bit divider in
`parisroc_digital`. That enable also restarts the TDC ramp
(`tdc_ramp_sync_o`), so the coarse count and the fine time stay aligned. The
slow control has its own clock. Every register has an asynchronous active-low
reset `rst_ni`. The coarse counter is held at zero while `run_i` is low, so a
run starts from timestamp 0. Hold requests are ignored while `run_i` is low.

## How this RTL relates to the chip description

These come from the published description of the chip:

- 16 channels;
- a two-deep analogue memory managed as a FIFO;
- a 24-bit coarse counter at 10 MHz;
- a 12-bit Wilkinson ADC with a 40 MHz conversion clock and common ramps;
- two discriminators per channel, multiplexed onto 16 trigger outputs, plus
  an OR output;
- a hold formed from the delayed trigger OR an external hold;
- a 52-bit word of 4 + 24 + 12 + 12 bits;
- selective readout at 10 MHz on one wire;
- the list of settings.

These are this design's own choices:

- **One clock.** The description names two clocks, 40 MHz and 10 MHz. Here
  the 10 MHz one is an enable derived from the 40 MHz clock, which keeps the
  design in one clock domain.
- **Synchronised hold.** The 2-3 cycle hold latency must be absorbed by the
  programmable delay.
- **Strict sequencing.** Conversion and readout never overlap.
- **Serial format.** The bit order, the channel order, the idle tick between
  words and `transmit_on_o`.
- **Saturation.** A comparator that never fires gives the full-scale code.
- **Slow-control protocol and layout.** The 2-bit shaping-time code, a single
  trigger-select bit for all channels, and the per-channel 4-bit threshold
  adjustment, which is shown in the channel schematic but not described in
  the text.
- **No delay setting.** The variable delay has no slow-control field, because
  its range and code width are not given.

Two inconsistencies in the source description:

- The common gain is given as "8 to 1 on 4 bits" in the text, and the block
  diagram labels the amplifier "(1-5)". Only the 4-bit field is built, and
  the code means whatever the analogue gain circuit makes of it.
- One sentence speaks of a single 10-bit threshold DAC and another of two. Two
  are built, which matches the channel schematic and the "Dual DAC" on the
  layout.

Not built: the analogue multiplexed charge output of the block diagram, whose
channel selection is not described.

## Verification

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench              | what it checks                                      |
|------------------------|-----------------------------------------------------|
| `tb_coarse_counter`    | 1 count per tick (1000 in 100 us), clear on stop, wrap |
| `tb_sca_manager`       | against a reference FIFO: cells held, read timestamp, losses, enable, 3-cycle latency |
| `tb_wilkinson_adc`     | 32 random levels, saturation, 4096-cycle conversion |
| `tb_trigger_logic`     | random vectors against a bitwise reference          |
| `tb_event_registers`   | random loads, masks and clears against a copy       |
| `tb_readout`           | serial receiver: word contents, order, 52 bits, 53 ticks per word, 16 words within 100 us |
| `tb_slow_control`      | shifting, shadow load, field positions, daisy-chain output |
| `tb_top_manager`       | protocol monitor with stub ADC and readout          |
| `tb_parisroc_digital`  | whole design with the behavioural analogue model    |

`tb_parisroc_digital` runs the top at its full size: 16 channels, depth 2,
24/12-bit fields. For every hold it records the expected timestamp from an
independent 10 MHz count, and the expected charge and fine time from the
model's inputs. It then checks every received word against these records,
and checks that no hold goes unread. It also counts each mechanism and fails
if one never happens:

- selective readout of 1 to 16 channels;
- a full 16-channel frame within 100 us;
- use of the second memory cell;
- a hit lost on a full memory;
- the external hold;
- the trigger OR;
- triggering through discriminator B after a slow-control switch;
- pulses below threshold;
- saturated charge codes.

It simulates about 2.2 ms of chip time in a few seconds. The analogue model
(`tb/analog_frontend_model.sv`) works in ADC codes:

- A pulse amplitude is the level the cell holds.
- A discriminator fires when the amplitude exceeds 4 times its DAC code.
- The delay line is 2 cycles.
- The TDC ramp gives 137 + 1000 per cycle of phase within the 100 ns period.

## Simulating

With Verilator 5, for the end-to-end test:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
    -y rtl -y tb -Irtl rtl/parisroc_pkg.sv tb/tb_parisroc_digital.sv \
    --top-module tb_parisroc_digital -Mdir obj
./obj/Vtb_parisroc_digital
```

Any other testbench builds the same way with its own name. The sizes are in
`parisroc_pkg`. Each block also takes its sizes as parameters (`DEPTH`,
`TS_W`, `N_CMP`, `ADC_W`, `NCH`), so a block can be tested on its own at
another size.

## Files

- `rtl/parisroc_pkg.sv`: constants, readout word, slow-control struct,
  sequencer states.
- `rtl/parisroc_digital.sv`: top; clock enable and wiring.
- `rtl/trigger_logic.sv`, `rtl/sca_manager.sv`, `rtl/coarse_counter.sv`,
  `rtl/wilkinson_adc.sv`, `rtl/event_registers.sv`, `rtl/readout.sv`,
  `rtl/top_manager.sv`, `rtl/slow_control.sv`: the blocks described above.
- `tb/tb_*.sv`: testbenches.
- `tb/analog_frontend_model.sv`: behavioural model of the analogue channels.
