# An optically powered, stateless retinal stimulator: RTL

A retinal prosthesis has to push current into the retina through hundreds of
electrodes. It must live on a chip with no wires through the eye wall. This
design powers the implant with light and talks to it with light. A pair of
glasses carries a near-infrared source. Photovoltaic cells on the implant turn
that light into a few milliwatts. The same light, switched on and off, carries
a 2 Mbit/s Manchester data stream to a photodiode on the chip.

Light reaches the implant only while the eye is open and pointed the right way.
Every blink or glance is therefore a power cut. For this reason the
stimulation logic keeps **no state worth losing**. Each frame from the glasses
describes one complete *time slot*:

- which electrodes fire and with what current;
- which electrode carries the return current;
- how long each phase lasts;
- which electrode to watch.

The implant simply executes the frame it has. After a power cut it picks up
with the next frame and needs no reprogramming. Charge balance comes from
*dynamic current copy*, which needs no stored calibration either. At the start
of every slot, each active driver measures its own sink current and copies it
into its source. The anodic and cathodic phases then carry the same charge.

A small uplink reports back to the glasses. Any electrode can be switched to
an 8-bit ADC, and its samples go out on a 2.4 GHz LC oscillator. The loop
antenna of that oscillator is its inductor.

This repository gives synthesizable RTL for the digital part:

- clocking;
- data recovery;
- frame reception;
- the stimulation controller;
- the monitor controller.

It also gives behavioural models of the analog blocks the digital part drives:

- the 288 electrode drivers;
- the monitor ADC;
- the RF oscillator.

Lastly, it has self-checking testbenches for each of these, plus one for the
whole implant at full size.

```
 rx_comp (photodiode comparator, 37.4 MHz-sampled)
    |
    v
 manchester_decoder --bits--> frame_receiver --frame+toggle--> stim_controller --mode/amp x288--> electrode_driver x288
    ^   (37.4 MHz domain)                                 (935 kHz domain)  |                           |
 clk_xtal --> clock_recovery (/40) ------------------ clk_sys ---------------+                      el_v_mv x288
                                                                             |                           |
                                                                     mon_en/mon_el --> monitor_ctrl <--> monitor_adc
                                                                                            |
                                                                                         tx_data --> rf_transmitter
```

## Clocks and the 10 µs tick

The implant has one crystal, at 37.4 MHz.

- `clock_recovery` divides it by 40 to make the 935 kHz system clock `clk_sys`.
  The divider flips its output every 20 cycles.
- The optical receiver (decoder and frame receiver) runs directly on the
  37.4 MHz clock, which oversamples each 2 Mbit/s bit 18.7 times.
- Everything else runs on `clk_sys`.

All pulse timing is in 10 µs steps. One step is 9.35 system cycles, which is
not a whole number. `stim_controller` therefore makes its tick with a
fractional accumulator: add 100 000 every cycle and wrap at 935 000. Ticks come
9 or 10 cycles apart in a fixed pattern. Every run of 20 ticks takes exactly
187 cycles (200 µs). A single phase can therefore be up to one system cycle
(1.07 µs) longer or shorter than its nominal length. The error does not build
up over a long pulse or over many slots.

## Recovering the optical data

The glasses send Manchester code. Each bit has a transition in its middle:

- low then high is a `1`;
- high then low is a `0`.

There is no PLL. `manchester_decoder` works as follows:

1. It synchronises the comparator output with two flops and finds its edges.
2. It treats as the next mid-bit transition any edge that comes at least ¾ of a
   bit (14 samples) after the previous mid-bit one. Edges on bit boundaries
   come only half a bit after the last mid-bit edge, so this window skips them.
3. The sign of that edge gives the bit. Each bit re-times the decoder, so
   drift between the crystal and the glasses' clock does not add up.
4. If no edge comes for 1¼ bit (23 samples), lock is lost. The next edge then
   starts a new lock.

The timeout has to be short. A long timeout lets an idle line plus one
boundary edge pass as valid data. Because any edge can start a lock, the
decoder can lock onto a boundary edge in the preamble. The preamble is there
to absorb this. It alternates 0 and 1, so its boundary edges disappear after
at most one bit, and the lock moves onto true mid-bit edges.

`frame_receiver` looks for the start-of-frame byte `0xD5` in the decoded bits.
It then shifts in exactly `FRAME_BITS` = 341 bits, publishes the frame, and
flips `frame_toggle_o`. If lock is lost inside a frame, the partial frame is
thrown away and `abort_cnt_o` counts it. Power cuts are frequent, so this case
is normal.

### Frame format

A frame on the wire looks like this:

1. A preamble of alternating bits (the testbenches use 16).
2. The start byte `0xD5`.
3. The 341 bits of the packed struct `stim_frame_t` from `retina_pkg`, most
   significant bit first.

| bits | field | meaning |
|---|---|---|
| 340 | `cathodic_first` | 0: anodic phase first (normal), 1: cathodic first |
| 339:332 | `cal_w` | calibration length in 10 µs ticks, ≥ 1 (30 µs = 3) |
| 331:315 | `phase_w` | width of each phase in ticks, 1..70 000 (10 µs .. 700 ms) |
| 314:307 | `ipg_w` | interphase gap in ticks, ≥ 1 (10 µs = 1) |
| 306:298 | `ret_el` | return electrode 0..287, or 511 for the external return |
| 297 | `mon_en` | run the electrode monitor during this slot |
| 296:288 | `mon_el` | electrode to monitor |
| 18k+17 | `entry[k].en` | entry k (k = 0..15) is used |
| 18k+16:18k+8 | `entry[k].el` | active electrode |
| 18k+7:18k | `entry[k].amp` | current in µA, 50..255 |

At 2 Mbit/s a frame plus its preamble and start byte takes 182.5 µs. That is
shorter than the shortest useful slot: 240 µs with 100 µs phases. The next
frame can therefore always arrive while the current slot is running.

## The stimulation slot sequencer

This is the core of the design, in `stim_controller`.

### Frame hand-over

The frame crosses from the 37.4 MHz domain to the 935 kHz domain as a level
plus a toggle:

- The receiver holds `frame_o` steady from before the toggle flips until the
  next frame is complete, about 180 µs later.
- The controller passes the toggle through synchronising flops.
- A change of the toggle captures the frame.

No bit of the frame is ever sampled while it changes.

### Checking

A frame is accepted only if it is safe to run. The `frame_ok` function in the
controller rejects a frame in these cases:

- any enabled entry has an amplitude below 50 µA, or an electrode outside
  0..287;
- two entries name the same electrode;
- the return electrode is also active, or is out of range;
- the monitor electrode is out of range;
- the phase width is 0 or above 70 000;
- the calibration or gap length is 0.

`rej_cnt_o` counts rejected frames. There is no checksum in the frame, so the
range checks are the only protection against corrupted bits.

### Buffer

One accepted frame can wait while a slot runs. A frame that arrives while that
buffer is still full is dropped, and `ovf_cnt_o` counts it. The glasses are
expected to send one frame per slot.

### Sequence

A slot starts on a tick. It then walks through four states, each lasting the
stated number of ticks:

```
IDLE --tick & frame waiting--> CAL (cal_w) -> PH1 (phase_w) -> IPG (ipg_w) -> PH2 (phase_w) --+
  ^                                                                                           |
  +------------------------ no frame waiting -------------------------------------------------+
                            frame waiting: straight to CAL with the new frame
```

If a frame is waiting when PH2 ends, the next slot's CAL starts on that same
tick. Back-to-back slots therefore leave no gap. One slot lasts
`cal_w + 2·phase_w + ipg_w` ticks, which is 2·PW + 40 µs with the usual
30 µs calibration and 10 µs gap. `slot_cnt_o` counts slots.

A slot that has started runs to its end from the stored frame, whatever
happens on the optical link. On the implant a reservoir capacitor keeps the
supply up long enough for this when a blink cuts the light. Losing the light
for longer removes power, and the logic then starts again from reset. With no
state to restore, the next frame that arrives runs as usual.

### Electrode modes

In each state every one of the 288 drivers gets a mode (`drv_mode_t`) and an
amplitude:

| state | active electrodes (the group) | return electrode | all others |
|---|---|---|---|
| CAL | `DRV_CAL`, own amplitude | off | off |
| PH1 | `DRV_ANODIC` (or `DRV_CATHODIC` if cathodic first) | `DRV_RETURN` | off |
| IPG | off | `DRV_RETURN` | off |
| PH2 | the opposite polarity | `DRV_RETURN` | off |

These outputs are registered, so they follow the state by one system clock.
All electrodes of the group run their phases at the same moment, each with its
own current.

### Why calibration comes first

The analog driver has a current sink, which carries the cathodic current, and
a current source, which carries the anodic current. Two separate transistors
never match exactly. During CAL the sink is set to the frame's amplitude, and
the source is adjusted until it carries the same current. The source then
keeps that setting on a gate capacitor. The anodic phase uses the stored copy,
and the cathodic phase uses the sink itself. Both phases therefore carry the
same charge. No trim value survives from one slot to the next, which is what
lets the design stay stateless.

In the model, the copy is a latch in `electrode_driver` that is transparent
during `DRV_CAL`. This latch is deliberate, and it is the only one in the
design.

### Monitor and assertions

The controller also passes `mon_en`/`mon_el` from the running frame to the
monitor. It has two assertions: while a slot runs, the running frame's phase width is
never 0, and the tick count left in the current state is never 0. Together
they show that no state can hang or wrap around to a very long duration.

## Electrode monitor uplink

`monitor_ctrl` runs while the current frame has `mon_en` set:

1. Every 11 system cycles (85 kHz) it starts `monitor_adc` on the chosen
   electrode.
2. It sends each 8-bit result on `tx_data` as a 10-bit word: a start bit `1`,
   eight data bits with the MSB first, and a stop bit `0`. The line idles at
   `0`, so a `1` on an idle line marks a word.
3. A word takes 10 cycles, shorter than the sample period. If a new result
   arrives while a word is still going out, it is counted in `ovr_cnt_o` and
   dropped. This cannot happen at the default pacing.

`monitor_adc` is a behavioural 8-bit ADC over ±2.7 V:
`code = round((v + 2700)·255 / 5400)`. It has the following timing:

- it samples the selected electrode on `start`;
- it raises `done` 9 cycles later;
- it ignores a `start` while it is busy.

## RF transmitter model

`rf_transmitter` describes the oscillator's frequency, on/off state and power.
It models no waveform. It computes the frequency as f = 1/(2π√(LC)):

- L = 12 nH;
- C = 310 fF + 130 fF·`cap_code`/127, which spans about 2.6 GHz down to 2.2 GHz.

It has two modes:

- **OOK:** the oscillator is on only while `tx_data` is 1.
- **FSK:** the oscillator stays on, and a 0 adds `fsk_dev` to the capacitor
  code, which lowers the frequency.

`pwr_code` selects 200, 300, 400 or 500 µW. The model uses `real` arithmetic,
so it simulates but does not synthesize.

## What is modelled and what is not

These parts are not modelled:

- the photovoltaic cells and the power recovery circuits;
- the photodiode with its transimpedance amplifier and comparator, which the
  top only sees as the digital input `rx_comp`;
- the crystal oscillator, which appears as `clk_xtal`;
- the diamond electrode array;
- the PCB that carries the antenna.

Their signals appear as top-level ports where they meet the logic.

The electrode driver model has these limits:

- it is combinational;
- it drives the signed current `el_i_ua`;
- its load is a plain 10 kΩ resistor, so `el_v_mv = i·10`, clipped to ±2.7 V;
- the return electrode's current is not modelled per electrode;
- it has no tissue capacitance, no electrode polarisation and no settling.

## Departures from the source design, and choices made here

- **Frame format:**
  - the bit layout above, the start byte, the group size of 16, the 511 code
    for the external return and the field widths are this design's choices;
  - the source gives only what a frame must configure;
  - there is no CRC, so corrupted data is caught only by range checks.
- **Interleaving:**
  - the source describes sequential stimulation across the array, one
    electrode or a small group at a time, limited by power;
  - here this is a series of slots, each firing a group of up to 16
    electrodes together;
  - the limit of 16 is this design's choice. It covers the 9 to 13
    electrodes that the power budget allows at once;
  - how many electrodes fire at once is up to the glasses.
- **Tick jitter:** each state can be one 1.07 µs cycle off from an exact
  multiple of 10 µs. The long-run average is exact.
- **Monitor rate:** it is 85 kHz, not the 90 kHz maximum. An integer divider of
  935 kHz gives either 93.5 or 85 kHz.
- **Monitor uplink word:** the 10-bit framing is this design's own.
- **Data recovery windows:** the ¾-bit and 1¼-bit windows, the lock rule and
  the 2-flop synchroniser are this design's own. The source gives only
  "oversampling, no PLL".
- **Buffering:**
  - one waiting frame;
  - a frame that finds the buffer full is dropped;
  - a frame that fails a check is dropped.
- **Analog models:**
  - electrode driver, ADC and oscillator follow the numbers the source gives
    (50–255 µA in 1 µA steps, ±2.7 V, 8 bits, 12 nH, 310–440 fF,
    0.2–0.5 mW);
  - the 10 kΩ load, the 9-cycle ADC latency, the 7-bit tuning code and the four
    power steps are assumptions.

## Files

| file | contents |
|---|---|
| `rtl/retina_pkg.sv` | sizes, frame and entry structs, driver modes, sequencer states |
| `rtl/clock_recovery.sv` | 37.4 MHz → 935 kHz divider |
| `rtl/reset_sync.sv` | reset synchroniser, asynchronous assert, synchronous release |
| `rtl/manchester_decoder.sv` | oversampling Manchester decoder with lock detection |
| `rtl/frame_receiver.sv` | start-byte hunt, frame shift register, abort on lock loss |
| `rtl/stim_controller.sv` | frame check, buffer, tick generator, slot sequencer |
| `rtl/electrode_driver.sv` | behavioural current driver with current-copy latch |
| `rtl/monitor_adc.sv` | behavioural 8-bit ADC with electrode multiplexer |
| `rtl/monitor_ctrl.sv` | monitor pacing and serial uplink |
| `rtl/rf_transmitter.sv` | behavioural 2.4 GHz OOK/FSK oscillator |
| `rtl/retina_implant_top.sv` | the whole implant, 288 electrodes |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_workloads.sv` | experiment protocol and maximum-rate runs through the top |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself. Each
one also has a watchdog that counts a failure if the run hangs. Build and run
any of them with Verilator 5 like this:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
    -Irtl -Itb -y rtl -y tb +libext+.sv rtl/retina_pkg.sv \
    tb/tb_retina_implant_top.sv --top-module tb_retina_implant_top -Mdir obj_top
./obj_top/Vtb_retina_implant_top +verilator+rand+reset+2
```

Replace the testbench name to run the others. `+verilator+rand+reset+2` starts
every flop at a random value. The testbenches drive a reset edge, so they pass
under it.

| testbench | what it shows | run time |
|---|---|---|
| `tb_clock_recovery` | ÷40 period and duty, reset | < 1 s |
| `tb_manchester_decoder` | every bit at a bit rate slightly off nominal, 18–19 clocks per bit, lock after the preamble, loss of lock on an idle line | < 1 s |
| `tb_frame_receiver` | start-byte hunt, whole frames, abort on lost lock | < 1 s |
| `tb_stim_controller` | every driver's mode and current in every state, durations in ticks and cycles, polarity, back-to-back slots, rejected and dropped frames | seconds |
| `tb_electrode_driver` | current copy, polarity, compliance clipping | < 1 s |
| `tb_monitor_adc` | codes against an independent quantiser, 9-cycle latency | < 1 s |
| `tb_monitor_ctrl` | 11-cycle pacing, selection held through a conversion, serial words, overrun | < 1 s |
| `tb_rf_transmitter` | frequency against 1/(2π√LC), OOK/FSK, power steps | < 1 s |
| `tb_retina_implant_top` | the full 288-electrode implant from the optical input: every electrode's current each cycle, phase lengths in real time, back-to-back and cathodic-first slots, a rejected and a dropped frame, a frame cut by lost light while a slot runs on, monitor words checked against the electrode voltage, RF keying | seconds |
| `tb_workloads` | a burst of 10 pulses 33 ms apart at 100–500 µs and 60–240 µA; 12 back-to-back slots at each phase width with 10–13 electrodes per slot, reaching about 42k, 29k, 20k and 12.5k pulses/s | ~20 s |

To change the design, use these parameters:

- the array size is `N_ELECTRODES` in `retina_pkg`;
- the group size is `MAX_GROUP`, which changes `FRAME_BITS`;
- the clock ratio is the top's divider;
- the tick is set by `SYS_HZ`/`TICK_HZ` on `stim_controller`.

Frame builders in the testbenches use the struct. They follow any change to
the field widths.
