# Time-multiplexed electrode control: one fast DAC for a hundred trap electrodes

A trapped-ion processor built as a quantum charge-coupled device moves ions
between trap zones by changing the voltages on many trap electrodes, roughly
ten electrodes per qubit. The usual approach gives every electrode its own
DAC updating at a few hundred kHz to a few MHz. That means 10,000 DACs, with
their wiring, for 1,000 qubits.

This design replaces them with far fewer, much faster DACs. One DAC running
at A samples per second serves N electrodes in turn. Each DAC sample period,
called a *slot*, belongs to one electrode. During its slot that electrode's
analog switch connects the DAC output to a small hold capacitor. The
capacitor then keeps the voltage, buffered by an op-amp, until the same
electrode's next slot N slots later. One pass over all N electrodes is a
*frame*. Each electrode is therefore updated at A / N. With A = 50 Msps and
N = 100 this is 0.5 MHz, as fast as a conventional dedicated DAC.

The RTL here is the digital side of that scheme:

* the FPGA logic that plays stored waveforms through the shared DAC;
* the decoder that picks the switch to close.

It also has behavioural models of the DAC and the electrode channels, so
the whole chain can be simulated down to electrode volts.

## Numbers the design is built around

| quantity | value | where it comes from |
|---|---|---|
| DAC rate A | 50 Msps, slot = 20 ns | scaling estimate |
| DAC settling time | 10 ns | scaling estimate |
| switch charge time | 7.5 ns, i.e. 5 RC constants of 150 pF x 10 ohm | scaling estimate |
| electrodes per DAC N | 100, frame = 2 us, update rate 0.5 MHz | scaling estimate |
| droop between charges | 1 - e^(-2 us / 1.5 ms) = 0.13 % (150 pF x 10 Mohm) | scaling estimate |
| DAC bus | 16 data lines + 1 clock | I/O count |
| decoder lines | ceil(log2 100) = 7 | I/O count |
| pins per DAC+decoder unit | 24 | I/O count |
| units per FPGA | 8 (8 x 24 = 192 of 200 I/O), so 800 electrodes | I/O count |
| 10,000 electrodes | 13 FPGAs, 104 DACs | I/O count |
| fabric clock | 400 MHz (2.5 ns grid) | this design's choice |
| waveform memory | 256 frames x 128 channel slots x 16 bit per unit | this design's choice |

The slot rule behind these numbers is *settle, then charge*. A switch closed
while the DAC output is still moving charges its capacitor to the wrong
value. So within a slot the DAC first gets its settling time with every
switch open. Only then is the electrode's switch closed, for the charge
time. Settling time plus charge time must fit in the slot
(10 + 9.5 ns < 20 ns, counting 1 ns switch edges). That sum limits the DAC
rate; the droop of the held voltage over a frame limits N.

## Structure

```
electrode_ctrl_system            (simulation top: one FPGA and its board)
 |- electrode_ctrl_fpga          (synthesizable FPGA logic)
 |   `- control_unit x 8         (one DAC + one decoder each)
 |       |- waveform_mem         samples, {frame, channel} addressed
 |       |- tdm_sequencer        slot/frame timing, select code
 |       `- dac_if               16-bit bus + DAC clock
 |- hs_dac_model x 8             DAC + amplifier (behavioural)
 |- switch_decoder x 8           7 select lines -> 100 switch enables
 `- hold_channel_model x 800     switch + capacitor + op-amp (behavioural)
```

Shared constants, the configuration record `tdm_cfg_t` and the host write
record `wave_wr_t` are in `rtl/tdm_pkg.sv`.

The FPGA logic and the decoder are synthesizable. The decoder is separate
because it sits on the board next to the switches, not in the FPGA. The DAC
and channel models use `real` voltages and simulation time, so
`electrode_ctrl_system` is a simulation top. To build hardware, synthesize
`electrode_ctrl_fpga` and put the decoder logic on the board.

## The slot, cycle by cycle

At the default configuration a slot is 8 cycles of 2.5 ns. The cycles are
numbered as the sequencer's counter c; every pin output lags c by the same
two registers, so the pins show the same pattern shifted by two cycles.

```
c          0     1     2     3     4     5     6     7  | 0 (next channel)
DAC clock  ^rise                   .           fall       ^rise
DAC bus                            [next channel's code launched at c=4]
memory     read next sample (c=0), data back (c=1)
select     idle  idle  idle  idle  ch i  ch i  ch i  idle | idle ...
           <------ settle 10 ns --><-- on 7.5 ns -->
```

* **DAC clock and data.** The DAC takes a code on the rising edge of its
  clock at the start of each slot. The next slot's code is put on the bus
  half a slot earlier (c = slot/2), when the clock falls. The bus is
  therefore stable for half a slot on either side of the edge.
* **Decoder select lines.** These carry the slot's channel number only for
  cycles `settle_cyc .. settle_cyc + on_cyc - 1`. At all other times they
  carry the all-ones code, which is not a channel number when N < 2^7, so no
  switch is closed. Using a spare code as "off" keeps the decoder at the
  7 lines of the I/O count, with no separate enable line.
* **Memory read.** The sample for the next slot is read at c = 0 and arrives
  at c = 1, well before it is launched.
* **Output registers.** `dac_if` puts one output register on the DAC clock
  and data. The select lines get one matching register in `control_unit`.
  Without it the switch would close one cycle, 2.5 ns, early, eating into
  the settling time.

Channels are visited 0, 1, ..., `last_ch`, then 0 again. The frame index
advances when channel 0 comes round and wraps after `last_frame`. The
waveform memory row for frame f holds every channel's value in that frame:

* one row (`last_frame = 0`) gives static trapping voltages;
* many rows give time-varying transport waveforms, one update per frame.

## Configuration and control

The slot timing and sizes are a runtime record, so one bitstream covers both
the 50 Msps estimate and slower, larger-settling hardware:

| field | default | meaning |
|---|---|---|
| `slot_cyc` | 8 | cycles per DAC sample (>= 4) |
| `settle_cyc` | 4 | cycles from the DAC edge to switch on (>= 1) |
| `on_cyc` | 3 | cycles the switch is closed; `settle_cyc + on_cyc <= slot_cyc` |
| `last_ch` | 99 | last active channel (channels above it are never switched) |
| `last_frame` | 255 | last frame of the waveform loop |

An assertion in `tdm_sequencer` flags an illegal record while running.

**Start and stop.**

* With `enable` high, a pulse on `sync_in` starts all units in the same
  cycle. The first slot is a *priming* slot that only fetches channel 0's
  sample, with no switch closed.
* Dropping `enable` stops at the end of the current slot.
* A `sync_in` pulse while running is ignored.

In a multi-FPGA system, `enable`, `sync_in` and the common clock come from
a master controller over the FPGAs' serial transceivers. That controller is
not part of this RTL; the three signals are plain ports.

**Loading waveforms.** The host writes one 16-bit two's complement sample
per cycle through `wr` (`en`, `frame`, `ch`, `sample`), and `wr_unit`
selects the unit. Writes are allowed while running and land in whatever
frame the sequencer reaches next; there is no double buffering.

**Voltage scale.** A sample s gives a DAC code of s + 32768 (offset binary,
on the 16 data lines). At the defaults of the models this becomes
s / 32768 x 1 V at the DAC and 50 times that, +-50 V, on the electrode.
With `DAC_BITS = 14` the interface drives the top 14 bits, as for a 14-bit
DAC.

## Behavioural models

* `hs_dac_model`: on each clock edge the output jumps half way to the new
  value and reaches it `SETTLE_NS` (10 ns) later. This crude shape is
  enough to make a switch that closes too early visibly charge to the wrong
  voltage.
* `hold_channel_model`: while the switch is closed, the capacitor follows
  the DAC with tau = C x R_sw (1.5 ns). While it is open, it decays with
  tau = C x R_amp (1.5 ms). The output is `GAIN` (50) times the capacitor
  voltage. The model is event driven: it advances exactly to every switch
  or input change, and between events it shows the value of the last one.
  Switch edges are ideal, and there is no charge injection or coupling
  between channels. The model therefore shows no crosstalk; real boards do,
  at the level of -60 dB.

## How far to trust it

Taken directly from the scheme:

* the slot structure and round-robin order;
* the settle-then-charge rule;
* the 100 / 7 / 16 / 8 sizes;
* the pin count;
* the RC values in the channel model.

This design's own choices:

* the 400 MHz clock and 2.5 ns grid;
* the idle select code;
* the priming slot and the enable/sync protocol;
* the memory organisation and its 256-frame depth;
* offset-binary DAC data;
* half-slot data launch;
* the runtime configuration record;
* the model shapes and the 1 V / x50 voltage scale.

Limits:

* A 2.5 ns grid cannot hit every DAC rate: 30 Msps becomes 13 cycles,
  30.8 Msps.
* Switch rise and fall times fall inside the grid instead of being modelled.
* The decoder is a plain binary-to-one-hot decoder. A small board can
  instead route one FPGA line straight to each switch, with no decoder.
  That variant is not provided.
* Waveform memory contents are not reset.
* The clock, sync and control network between FPGAs is not implemented.

## Simulating

Each block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. With Verilator 5, from the folder above
`rtl/` and `tb/`:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -y rtl \
    rtl/tdm_pkg.sv tb/electrode_ctrl_system_tb.sv \
    --top-module electrode_ctrl_system_tb -Mdir obj && obj/Velectrode_ctrl_system_tb
```

Replace the testbench name for the others:

* `switch_decoder_tb`, `dac_if_tb`, `waveform_mem_tb`: the small blocks.
* `tdm_sequencer_tb`: slot spacing, window position, channel and frame
  order, launch timing.
* `control_unit_tb`: at the pins, the code the DAC took before each window.
* `electrode_ctrl_fpga_tb`: 8 units in lock step, writes reach only the
  addressed unit.
* `hs_dac_model_tb`, `hold_channel_model_tb`: the models against their
  closed-form values. The channel test also covers a prototype-sized
  channel: 30 pF with a 282.6 us discharge constant loses 0.06 % over a
  166.6 ns recharge cycle.

Two testbenches run the whole system with every parameter at its default.
They take about a second each.

* `electrode_ctrl_system_tb` has four phases:
  1. static voltages on all 800 electrodes;
  2. stop and restart;
  3. 16-frame sinusoids;
  4. a 5-channel, 13-cycle-slot run;
  5. a run that closes the switch before the DAC has settled, to show the
     electrode voltages then come out wrong.

  It checks every electrode after every charge. It also counts that each
  mechanism happened: sync start, stop, static frames, loop wrap, droop,
  short frames and settle violations.
* `poc_five_sine_tb` runs the five-channel demonstration: five sinusoids
  with a 200-frame loop at 30.8 Msps. It checks the 162.5 ns recharge
  period and that unused channels stay untouched.
