# PARISROC digital part: triggerless readout of a 16-photomultiplier array

PARISROC is a readout chip for arrays of 16 photomultipliers (PMTs) that share
one front-end module in very large water-Cherenkov or liquid-scintillator
detectors. No external trigger exists: each of the 16 channels triggers on its
own pulses, stores the charge and the precise arrival time of the pulse in a
small analog memory, digitises them with an on-chip Wilkinson ADC, and sends
out only the channels that were hit. A hit is reported as one 52-bit word:
channel number, a 24-bit coarse timestamp counted at 10 MHz, a 12-bit charge
code and a 12-bit fine-time code (the position of the hit on a 100 ns ramp).

This repository gives synthesizable SystemVerilog for the logic of that chip:
the trigger latches and OR, the trigger-to-hold delay, the management of the
analog memories as FIFOs, the timestamp, the Wilkinson ADC counter and its 32
code registers, the phase sequencer and the selective serial readout. The
analog chain (preamplifier, shapers, discriminators, threshold DACs, memory
capacitors, voltage ramps, ADC comparators, bandgap) is not RTL; its logic
signals are ports of the top module `parisroc`, and the testbenches stand in
for it with a small behavioural model.

The RTL follows the published description of the chip for everything that
description fixes (sizes, rates, word format, the order of operations) and makes
its own choices where it says nothing. Those choices are marked below and in
the opening comment of each file.

## The channel and the digital boundary

```
 PMT -> preamp -> slow shaper --------------------> [cell 0 | cell 1]  charge memory
                \-> fast shaper -> discri 1 \                |  (hold_o, rd_cell_o)
                                  discri 2 --mux-> latch -> variable delay -> hold request
                                                    |                ext. hold --^
                                                    +-> trig_o, OR -> or_trig_o
 100 ns fine-time ramp --------------------------> [cell 0 | cell 1]  fine-time memory
 ADC ramp (common) -> comparator(charge), comparator(time) -> adc_cmp_q_i, adc_cmp_t_i
```

Everything left of the arrows into the memories is analog. The RTL begins at
the discriminator outputs (`discri_a_i`, `discri_b_i`) and ends at the switches
of the memories (`hold_o`, `rd_cell_o`), the ADC ramp start (`start_ramp_o`) and
the ADC comparator outputs (`adc_cmp_q_i`, `adc_cmp_t_i`).

Each channel has two memories of depth 2: one for the slow-shaper voltage
(charge) and one for the fine-time ramp, sampled at the same instant. A cell
*tracks* its input until its hold switch opens; it then *holds* that sample
until it has been converted and read out.

## Life of a hit

All timing is in cycles of the 40 MHz clock `clk` (25 ns). The 10 MHz clock of
the timestamp and readout is a one-in-four enable, `ck10_tick_o`.

1. **Trigger latch** (`trigger_logic`). A common select bit picks one of the
   two discriminators of each channel. The selected output sets a flip-flop
   asynchronously, so `trig_o` rises with the discriminator however short the
   pulse, and the flip-flop clears at the next clock edge once the
   discriminator is low again: the trigger is held to the end of the clock
   cycle in which it fired. `or_trig_o` is the OR of the 16 triggers.
2. **Hold delay** (`variable_delay`). The slow shaper peaks 50 to 200 ns after
   the fast trigger, so the hold must wait. The trigger is sampled, and its
   rising edge loads a counter with `hold_delay_i`; when the counter runs out a
   one-cycle hold request is issued. From the first clock edge that sees the
   trigger, the hold request is high after edge `hold_delay_i + 2`. A trigger
   that arrives while its channel is still counting is ignored. An external
   hold pulse `ext_hold_i` requests a hold on all 16 channels at once.
3. **Cell write** (`sca_fifo_manager`, `timestamp_registers`). The request
   opens the hold switch of the cell at the channel's write pointer and, in the
   same clock edge, copies the 24-bit timestamp into that cell's register. If
   both cells of the channel already hold samples, the request is lost and
   `lost_o` pulses for that channel.
4. **Conversion** (`top_manager`, `adc_counter`, `adc_registers`). As soon as
   any cell is held, the sequencer takes a snapshot: every channel that holds a
   cell joins the conversion with its oldest cell, which is connected to the
   ADC comparators (`rd_cell_o`). The common ramp starts and the counter counts
   from 0 to 2^N-1 for an N-bit conversion; each of the 32 code registers
   (charge and fine time of 16 channels) stores the count at the first cycle its
   comparator is high.
5. **Readout** (`readout`). One 52-bit word per snapshot channel, lowest
   channel first, one bit per 10 MHz period.
6. **Release**. After the last word the converted cells go back to tracking,
   and the next snapshot can be taken on the following cycle if more cells are
   held.

Acquisition never stops for the whole chip while this happens: a channel keeps
accepting hits into its free cell during a conversion and a readout. A channel
is blind only while both of its cells hold samples.

## The analog memory as a FIFO

This is the part that decides dead time and data order, so it is described in
full. Per channel, `sca_fifo_manager` keeps a write pointer `wp`, a read
pointer `rd_cell_o` and an occupancy count (0, 1 or 2).

| event (per channel)        | effect                                                     |
|----------------------------|------------------------------------------------------------|
| hold request, count < 2    | `hold_o[ch][wp] <= 1`, `wp` advances, count + 1, `wr_o` = 1 |
| hold request, count = 2    | request dropped, `lost_o[ch]` pulses next cycle            |
| `conv_start_i`             | `conv_mask_o[ch] <= (count != 0)` for every channel        |
| `release_i`, channel in mask | `hold_o[ch][rd] <= 0`, `rd` advances, count - 1           |

A write and a release may happen in the same cycle on the same channel; they
always touch different cells. The snapshot is taken once per conversion, so a
hold that arrives after `conv_start_i` waits for the next round even if the
ramp has not passed its level yet. A channel that holds two cells is converted
in two rounds, oldest first, so words of one channel always come out in time
order. Two assertions guard the bookkeeping: a released cell must be holding,
and a written cell must be free.

## Wilkinson conversion

The ADC turns voltage into time: a ramp common to all channels rises from the
start of the conversion, and the counter value at which the ramp passes the
held voltage is the code. One 12-bit counter serves all 32 comparators. The
resolution is selected by `adc_res_i` (8, 10 or 12 bits); the analog ramp must
be made correspondingly steeper, which is outside the RTL. The conversion lasts
exactly 2^N clock cycles:

| resolution | cycles | time     |
|------------|--------|----------|
| 8 bits     | 256    | 6.4 us   |
| 10 bits    | 1024   | 25.6 us  |
| 12 bits    | 4096   | 102.4 us |

A comparator that has not fired by the last count (input above full scale)
leaves the full-scale code 2^N-1. Comparator outputs are assumed to be
synchronous to `clk`; channels outside the snapshot are masked off.

## Readout word

Words are sent most significant bit first on `dout_o`; `dvalid_o` is high for
every bit. Both outputs change at the clock edge that ends a 10 MHz tick cycle
and then stay stable for four clock cycles.

| bits    | field                                    |
|---------|------------------------------------------|
| 51..48  | channel number                           |
| 47..24  | coarse timestamp (100 ns steps)          |
| 23..12  | charge code (zero-extended below 12 bits) |
| 11..0   | fine-time code (zero-extended)           |

Words follow each other without a gap, so an event with all 16 channels hit
takes 16 x 52 = 832 periods of 100 ns, 83.2 us, inside the chip's 100 us
maximum. The type `parisroc_pkg::frame_t` gives the layout.

The timestamp is cleared one cycle after acquisition starts and counts 10 MHz
periods while acquisition runs (wrapping after 2^24 x 100 ns = 1.68 s). It is
captured when the cell is held, i.e. at the same instant as the charge and
fine-time samples; the full arrival time of a hit is the timestamp plus the
fine time within its 100 ns period.

## Sequencer

`top_manager` has four states: IDLE, ACQ, CONV and READ. `acq_enable_i` starts
acquisition (IDLE to ACQ, timestamp cleared). In ACQ a held cell starts a
conversion; the end of the conversion starts the readout; the end of the
readout releases the cells and returns to ACQ. Lowering `acq_enable_i` takes
effect in ACQ, i.e. after any readout in progress. Hold requests are ignored in
IDLE.

## Top-level ports (`parisroc`)

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | 40 MHz clock, asynchronous active-low reset |
| `acq_enable_i` | in | 1 | run acquisition |
| `adc_res_i` | in | 2 | `RES_8`, `RES_10`, `RES_12` |
| `discri_sel_i` | in | 1 | 0: discriminator 1, 1: discriminator 2 |
| `hold_delay_i` | in | 4 | trigger-to-hold delay in 25 ns steps |
| `ext_hold_i` | in | 1 | one-cycle external hold of all channels |
| `discri_a_i`, `discri_b_i` | in | 16 | discriminator outputs |
| `adc_cmp_q_i`, `adc_cmp_t_i` | in | 16 | ADC comparators, charge and fine time |
| `trig_o`, `or_trig_o` | out | 16, 1 | latched triggers and their OR |
| `hold_o` | out | 16 x 2 | hold switch of each cell (1 = holding) |
| `rd_cell_o` | out | 16 x 1 | cell connected to the ADC comparators |
| `start_ramp_o` | out | 1 | ADC ramp runs |
| `ck10_tick_o` | out | 1 | 10 MHz tick (fine-time ramp restart) |
| `lost_o` | out | 16 | hit lost, channel full |
| `state_o` | out | 2 | sequencer state |
| `dout_o`, `dvalid_o` | out | 1 | serial data and valid |

Parameters `NCH` (16), `DEPTH` (2), `TS_W` (24), `ADC_W` (12) and `DLY_W` (4)
default to the chip's sizes. The logic synthesises to about 1600 word-level
cells, 812 flip-flop bits and 768 bits of timestamp storage.

## Where this RTL departs from the chip or fills gaps

Taken from the chip's description: 16 channels, two-cell memories managed as a
FIFO, two discriminators multiplexed to one trigger per channel, trigger latched
to the end of the clock cycle and delayed to the slow-shaper peak, OR of the
triggers, external hold ORed with the auto-trigger, a 24-bit timestamp at 10
MHz, a Wilkinson ADC at 40 MHz with one common ramp and counter and 8/10/12-bit
resolution, 32 timestamp registers of 24 bits and 32 code registers of 12 bits,
the 52-bit word with its four fields, selective readout within 100 us.

Choices of this design, where the description is silent:

* One clock domain; the 10 MHz clock is an enable derived from the 40 MHz one.
* The trigger-to-hold delay is a digital counter in 25 ns steps (the chip uses
  an analog delay cell); its 4-bit range is chosen to cover 200 ns shaping.
* The discriminator select is one bit for all channels.
* Conversion starts as soon as any cell is held; all hit channels are
  converted together from one snapshot; cells are freed after the readout.
* A hit on a full channel is dropped and flagged.
* Field order on the wire, MSB-first bit order, channel order, one data line
  with a valid strobe, zero-extension of short codes.
* Full-scale code on overflow; comparators synchronous to the clock.
* The chip's description gives the ADC resolutions once as 8, 9 or 12 bits and
  elsewhere as 8/10/12 bits; 8/10/12 is used, as in its block diagram and its
  measurements.

Not provided: the slow-control register that loads the chip's settings (its
contents and order are not published; the settings are plain ports here), the
addressing of the multiplexed analog charge output, and all analog blocks.

## Verification

Each block has a self-checking testbench in `tb/` that compares the block with
an independent reference and prints `TB_RESULT checks=N failures=M`:

| testbench | what it checks |
|-----------|----------------|
| `trigger_logic_tb` | asynchronous rise, hold to the clock edge, select, OR |
| `variable_delay_tb` | hold latency `delay + 2` edges, one pulse, retrigger ignored |
| `timestamp_counter_tb` | count at 10 MHz, run/stop, clear, wrap |
| `sca_fifo_manager_tb` | every output against a queue model under random traffic |
| `timestamp_registers_tb` | random writes and reads against an array |
| `adc_counter_tb` | count sequence and 2^N-cycle window at 8/10/12 bits |
| `adc_registers_tb` | first-crossing capture and overflow for 32 comparators |
| `readout_tb` | decoded words, selectivity, 52 periods per word |
| `top_manager_tb` | phase order and pulses with random response times |
| `parisroc_tb` | whole chip at default sizes with a behavioural analog model |
| `adc_transfer_tb` | ADC transfer of all channels at 8/10/12 bits, DC repeatability |

`parisroc_tb` injects single hits, bursts that fill a channel and lose a hit,
16-channel events and external holds, at every resolution, then stops and
restarts acquisition. Every word is checked against the held values (charge
and fine-time codes exactly, timestamp within one step), and the test counts
and requires each mechanism: both discriminators, the OR output, external
hold, two held cells, a lost hit, each resolution, ADC overflow, full and
selective readout, holds taken during a conversion, restart. It runs in a few
seconds.

To run a testbench with Verilator 5 (from the directory holding `rtl/` and `tb/`):

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb --top-module parisroc_tb \
    rtl/parisroc_pkg.sv tb/parisroc_tb.sv
./obj_dir/Vparisroc_tb
```

Replace `parisroc_tb` by any testbench name. The testbenches use `$urandom`
only, so they also run on simulators without a constraint solver.

## Files

`rtl/parisroc_pkg.sv` holds the shared sizes, the resolution and state enums
and the word struct; every other file in `rtl/` is one module, named as above.
`tb/` holds one testbench per module plus `adc_transfer_tb`.
