# Trigger Logic Unit for the MALTA beam telescope

The MALTA telescope tracks beam particles through six MALTA monolithic pixel planes.
Devices under test sit between the two three-plane arms. Every plane has its own
readout FPGA board. It keeps the plane's full time-stamped hit data and stores an
event only when it receives a trigger, the Level-1 Accept (L1A).

The Trigger Logic Unit (TLU) decides when an L1A is sent. It runs on a single
Kintex-7 board. Each plane also has a *fast signal* (hitOR): a pulse of a few ns,
sent straight out of the plane without any processing whenever the plane sees a
hit. A scintillator behind the last plane gives a faster and more precise timing
pulse. The TLU combines these pulses:

* Each fast signal is captured into a 320 MHz clock.
* Each captured signal is stretched into a window of programmable length.
* The TLU ANDs the windows of the channels selected for triggering.
* Every new coincidence becomes an L1A. The L1A has a programmable length and a
  maximum rate, and it is sent on up to ten SMA outputs.

A PC controls the TLU over Gigabit Ethernet with the IPbus protocol. It selects
the trigger channels, sets all widths and vetoes, starts and stops runs, and reads
the rate counters.

This repository holds synthesizable SystemVerilog for the TLU firmware logic, from
the input pins to the IPbus register bank. It also has a self-checking testbench
for every module.

## Signal path

```
fast_in[ch] ─► input_capture ─► pulse_shaper (width, veto) ─┬─► coincidence_logic ─► output_processor ─► sma_out[0..9]
  (async)       toggle + sync     coincidence window        │     AND over mask        length, max-rate veto,
                                                            │                          run gating, SMA mask
                                   rate_counter (32 bit) ◄──┘ edges        run_control (IDLE/RUNNING, seconds)
                                                                           ipbus_regs (settings, counters)
```

There are seven inputs, in the order of the run-control panel:

| index | channel      |
|------:|--------------|
| 0     | Scintillator |
| 1     | HGTD (spare input used for another detector) |
| 2..6  | Plane 1 .. Plane 5 |

All time settings are counts of the 3.125 ns clock period.

### Capturing pulses shorter than a clock period (`input_capture`)

The planes' fast pulses can be shorter than the 3.125 ns clock period, so sampling
them with the clock could miss some. Instead, each input drives the clock pin of a
toggle flip-flop, which flips on every rising edge however short the pulse is.
The toggle level then crosses into the 320 MHz domain through a two-flop
synchronizer. An XOR of the last two stages gives one single-cycle pulse per input
edge.

This adds 2 to 3 cycles of latency, and the TLU quantizes hit times to one clock
period. That quantization is the known ≈0.9 ns (3.125/√12) contribution of the TLU
to the timing resolution. Two edges on one input less than about two clock periods
apart can merge into one.

### The coincidence window (`pulse_shaper` on each input)

This is the part that decides which particles trigger. MALTA's fast signal arrives
later for smaller charge deposits, so the planes crossed by one particle fire up
to about 5–15 ns apart. Each accepted edge is therefore stretched to a level of
`width` cycles. The AND fires while every selected level is high, so the width
acts as the coincidence window.

Each shaper also has a `veto` window of `veto` cycles, counted from the accepted
edge. A new edge is taken only when both the stretched level and the veto window
have ended. So after one hit, the channel is blind for `max(width, veto)` cycles.

This gives the rate-versus-width behaviour measured with the telescope:

* Widening the window at first raises the trigger rate quickly.
* It then saturates at about 25 ns, because hits arriving during a long stretched
  pulse are ignored.

With the reset settings, the planes use a 40 ns width (13 cycles) and a 44 ns veto
(15 cycles). The scintillator uses a 30 ns width (10 cycles) and a 44 ns veto.

The trigger time should come from the scintillator, not from the slower planes.
Delay the scintillator pulse with cable so that it arrives last, inside the
planes' windows. Its edge then opens the AND, and the L1A is aligned to it within
one clock period.

### Coincidence and L1A (`coincidence_logic`, `output_processor`)

`coincidence_logic` ANDs the stretched levels of the channels whose bit is set in
`TRIG_MASK`. An empty mask never fires. The AND is registered once.

`output_processor` takes the rising edge of that level during a run and feeds it
to a second pulse shaper:

* Its width is the L1A output length (reset value 120 ns = 39 cycles).
* Its veto is the maximum-rate window (reset value 50 µs = 16000 cycles, which
  limits triggers to 20 kHz).

A coincidence that arrives inside the veto is dropped and reported on
`trig_vetoed`. The plane readout FIFOs limit the system to 50 kHz, which is a veto
of 6400 cycles. The L1A is copied to each SMA output enabled in `OUT_MASK` (all ten
at reset) through one output register.

The latency from the last needed input edge to `sma_out` is 6 to 7 cycles:

| stage            | cycles |
|------------------|-------:|
| capture          | 2–3    |
| input shaper     | 1      |
| AND register     | 1      |
| output shaper    | 1      |
| SMA register     | 1      |

That is about 19–22 ns.

### Runs and counters (`run_control`, `rate_counter`)

`run_control` has two states, IDLE and RUNNING, and is moved by the start and stop
commands. If both commands arrive together, stop wins. During a run:

* L1As are produced.
* The per-channel counters count every captured input edge, vetoed ones included,
  so that they measure the input rate.
* A timer counts seconds (`TICKS_PER_S` clock cycles each). It restarts at each
  start and holds after stop.

The L1A counter counts triggers actually sent. All counters are 32 bits wide and
wrap. The clear command zeroes them. At several MHz per plane, a counter wraps
after some minutes, so the software must read it more often than that.

## Register map (`ipbus_regs`)

The bus is the usual IPbus slave bus, carried as two packed structs (`ipb_wbus_t`,
`ipb_rbus_t` in `tlu_pkg`).

* A transaction is acknowledged on the cycle after `ipb_strobe` rises. The master
  holds the strobe until it sees the acknowledge.
* `ipb_err` answers an unmapped address (including any address above 0xFF) and a
  write to a read-only register.

Addresses are 32-bit words:

| addr        | name        | access | meaning |
|-------------|-------------|--------|---------|
| 0x00        | CTRL        | W / R  | write: bit0 start run, bit1 stop run, bit2 clear counters; read: bit0 running |
| 0x01        | TRIG_MASK   | RW     | channels in the AND (reset: Scintillator, Plane 1, Plane 3, Plane 4 = 0b0110101) |
| 0x02        | OUT_MASK    | RW     | enabled SMA outputs (reset 0x3FF) |
| 0x03        | OUT_WIDTH   | RW     | L1A length, cycles (reset 39) |
| 0x04        | OUT_VETO    | RW     | max-rate veto, cycles (reset 16000) |
| 0x05        | VERSION     | R      | firmware version (2) |
| 0x06        | RUN_TIME    | R      | seconds in the current or last run |
| 0x07        | L1A_COUNT   | R      | L1As sent |
| 0x10 + ch   | IN_WIDTH    | RW     | stretch width of channel ch, cycles |
| 0x20 + ch   | IN_VETO     | RW     | veto window of channel ch, cycles |
| 0x30 + ch   | IN_COUNT    | R      | input edges of channel ch |

To convert a time in ns to cycles, multiply by 0.32 and round up.
`tlu_pkg::ns_to_cycles` does this for the reset values.

## Top level (`tlu_top`)

| port          | dir | width | meaning |
|---------------|-----|-------|---------|
| `clk`         | in  | 1     | 320 MHz. It comes from the FPGA's clock manager, which is not part of this code. |
| `rst_n`       | in  | 1     | Asynchronous active-low reset. |
| `fast_in`     | in  | 7     | Asynchronous fast signals from the SMA inputs. |
| `ipb_w` / `ipb_r` | in / out | struct | Slave side of the IPbus core, which is not part of this code. |
| `sma_out`     | out | 10    | L1A towards the plane readout boards and the devices under test. |
| `l1a`         | out | 1     | L1A before the output mask and register. |
| `trig_vetoed` | out | 1     | Pulse for each coincidence dropped by the max-rate veto. |

Parameters are `N_IN_P` (7), `N_OUT_P` (10) and `TICKS_PER_S` (320 000 000).

These parts of the system are not in the RTL:

* the Ethernet MAC/PHY and the IPbus transaction engine;
* the clock manager;
* the MALTA sensors and their readout boards, including the delayed recording of
  hit data on L1A;
* the scintillator and its delay cable;
* the SMA-to-FMC adapter cards.

## How far this follows the published description

These parts come from the published description of the telescope:

* the 320 MHz single clock;
* input capture into that clock;
* per-channel stretching to a programmable length with a veto window;
* ignoring hits during a stretched pulse;
* a 32-bit rate counter per input;
* an AND of the selected channels;
* an output stage with programmable length and a veto that sets the maximum
  trigger rate;
* a run state machine driven over IPbus;
* the seven input names, the ten SMA outputs, the firmware version 2, and the
  panel settings used as reset values.

These are this design's own choices, because the description does not give them:

* the toggle-and-synchronize capture circuit;
* counting the veto from the accepted edge;
* the extra register after the AND;
* two run states;
* gating the L1A and the counters with the run state;
* counting all edges rather than only accepted ones;
* counter wrap-around;
* the register map;
* a single clock for IPbus and logic. A real board would bring IPbus in on its
  own, slower clock and cross it into the 320 MHz domain.

There are two known differences from the published description.

1. **The scintillator's position in the logic.** The published block diagram draws
   the planes' AND first, then a width/veto stage, then a second AND with the
   delayed scintillator. The text describes a single AND of the selected channels,
   and the control panel gives the scintillator its own width and veto, like any
   other input. This design follows the text and the panel: the scintillator is a
   normal input of the single AND. Selecting it together with delay cabling gives
   the same trigger timing.
2. **The oscilloscope-accept firmware.** For one campaign, a modified firmware
   issued triggers only in the oscilloscope's "accept" state. It is not included.

## Simulation

Every module in `rtl/` has a testbench `tb/<module>_tb.sv`. Each testbench:

* compares the module with values computed independently;
* has a watchdog;
* prints `TB_RESULT checks=N failures=M`.

The testbenches need `--timing`, because they drive asynchronous pulses with
sub-nanosecond delays. For example:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
    -Irtl -y rtl rtl/tlu_pkg.sv tb/tlu_top_tb.sv --top-module tlu_top_tb
./obj_dir/Vtlu_top_tb
```

`tlu_top_tb` runs the whole TLU at its default parameters and reset settings. It
plays both the control PC and the detectors:

* particles whose plane pulses spread over 0–15 ns, with the scintillator arriving
  last;
* events with a plane missing;
* events whose spread is wider than the window;
* a double hit inside an input veto;
* two triggers 10 µs apart, so the second meets the max-rate veto;
* a change of trigger configuration (Plane 2 with the scintillator, shorter output,
  fewer SMA outputs);
* the trigger-time jitter: across all triggers, the L1A delay after the
  scintillator edge spans less than one 3.125 ns clock period;
* the 50 kHz limit at cycle level: with a 6400-cycle veto, a coincidence about
  18 µs after an L1A is dropped and one about 22 µs after it is taken;
* a run stop, and a counter clear.

For every event it checks the number of L1As, their length and latency, and the
SMA fan-out. It then checks the counters read back over IPbus. The testbench fails
if any of these mechanisms never occurred. It simulates about 4 ms of beam time in
under a second.

The unit testbenches cover the following:

| testbench | what it checks |
|-----------|----------------|
| `pulse_shaper_tb` | A cycle-by-cycle reference model over 20 000 random cycles. |
| `coincidence_logic_tb` | All 16 384 combinations of input levels and mask. |
| `input_capture_tb` | 200 pulses of 0.4–3 ns at random clock phases: each seen once, with bounded latency. |
| `rate_counter_tb` | A model of the counter, including wrap-around, using an 8-bit counter. |
| `input_channel_tb`, `output_processor_tb`, `run_control_tb`, `ipbus_regs_tb` | Directed sequences with hand-computed expectations. |

Verilator has two-state logic and starts variables at random values. The
testbenches therefore take `rst_n` high and then low at time zero, so that every
asynchronous reset sees an edge.
