# OffRAMPS FPGA: a machine-in-the-middle for 3D-printer control signals

A common hobby and lab 3D printer is driven by a two-board stack. An Arduino
Mega runs the Marlin firmware and turns g-code into control signals. A RAMPS 1.4
shield turns those signals into motor current, heater power and fan speed. The
OffRAMPS board separates the two boards and puts an FPGA (an Artix-7 on a
Digilent Cmod-A7) between them. Every control line from the firmware then
reaches the shield through the FPGA. Once the firmware has decoded the g-code,
the FPGA can do two things with the result:

* **modify** it: hardware Trojans that add, drop or override signals, to
  study attacks on printed parts and on the printer itself; and
* **record** it: count every step that each motor is commanded and stream the
  counts to a host. The host compares them with a known-good ("golden") run of
  the same job and so detects tampering that happened earlier in the chain
  (in the CAD model, the slicer, the bootloader or the firmware).

This directory holds synthesizable SystemVerilog for that FPGA design, with a
self-checking testbench for every module. The design follows the OffRAMPS
paper (Blocklove et al., "OffRAMPS: An FPGA-based Intermediary for Analysis and
Modification of Additive Manufacturing Control Systems"). The paper describes
its VHDL only at module level. Everything below it (widths, encodings,
handshakes, Trojan sizes) is this implementation's own choice, marked as such
in the text and in each file's header. The paper's FPGA code is not
reproduced here.

## The signals in the middle

All firmware-to-shield lines travel as one packed struct, `ctrl_t`, defined in
`offramps_pkg`:

| field        | bits | RAMPS signal | meaning                                  |
|--------------|------|--------------|------------------------------------------|
| `step[3:0]`  | 4    | `*_STEP`     | one pulse per (micro)step, X, Y, Z, E    |
| `dir[3:0]`   | 4    | `*_DIR`      | direction of each motor                  |
| `en[3:0]`    | 4    | `*_EN`       | driver enable, active low on the A4988   |
| `heat_bed`   | 1    | D8           | heated-bed MOSFET                        |
| `heat_end`   | 1    | D10          | hotend heater MOSFET                     |
| `fan`        | 1    | D9           | part-cooling fan                         |

Axis index 0..3 is X, Y, Z, E throughout. That is also the column order of the
capture stream. The endstops (X, Y, Z min) run the other way, from the shield
to the firmware. So does the display UART, in both directions. The FPGA passes
both through unchanged but listens to the endstops.

The thermistor inputs are analog. The board can reach them through the
Artix-7's XADC and an external DAC, but this design does not use them. Level
shifting (5 V to 3.3 V), the routing jumpers and the power selection are board
hardware with no logic.

## Block structure

```
 Arduino pins (ard) ─┬───────────────────────────────────────────┐ bypass
                     │                                           ▼
                     ├─► edge_detector ─► trojan_control ──► [ mux ] ─► RAMPS pins (ramps)
                     │   (2-FF sync,       (T1..T9, uses        ▲
                     │    rise/fall)        pulse_generator)    │ bypass
                     │        │                ▲ homed
                     │        ▼                │
 RAMPS endstops ─► edge_detector ─► homing_detector ──┐
   └──────────────────────────────► Arduino endstops  │ homed_pulse
                              │                       ▼
                              └──► axis_tracker ─► capture_controller ─► uart_txd
                                   (4 × 32-bit)     (uart_tx inside)
```

| module               | role                                                                 |
|----------------------|----------------------------------------------------------------------|
| `offramps_top`       | pins, reset synchroniser, bypass multiplexer, wiring of both paths   |
| `edge_detector`      | synchronises asynchronous inputs, flags rising and falling edges     |
| `homing_detector`    | state machine: endstops tripped X then Y then Z gives "homed"        |
| `trojan_control`     | the nine Trojans; registered output bundle                           |
| `pulse_generator`    | bursts of STEP pulses with set period, width and microstepping       |
| `axis_tracker`       | up/down step counters, cleared at homing                             |
| `capture_controller` | times the 0.1 s records and serialises them                          |
| `uart_tx`            | 8N1 transmitter to the Cmod-A7's USB-UART bridge                     |
| `offramps_pkg`       | constants, `ctrl_t`, axis and Trojan enumerations                    |

## Homing is the common time reference

A print job begins with homing: the firmware drives each axis into its min
endstop. `homing_detector` watches for the trips in the order X, Y, Z and
raises `homed` one cycle after the Z trip. It ignores trips that come out of
order, and the firmware's second "bump" into each endstop. Homing matters to
both paths:

* the print-time Trojans (T1–T5, T8, T9) stay idle until `homed`, so they act
  on the part and not on the homing moves. T6 and T7 act as soon as they are
  enabled, because the firmware heats the bed and hotend before it homes;
* `homed_pulse` zeroes the four step counters. Every later count is therefore
  an absolute position in steps from the home corner. The E count is the
  length of filament fed, in steps.

In the `homed` state, a new X trip starts the sequence again. The next job
re-homes, and its counters restart, without an FPGA reset. One consequence is
easy to miss: homing completes at the *first* Z trip. The firmware's Z back-off
and second bump after it are counted, so the Z count right after homing is
the net of those moves, usually a small positive number. A golden run and a
test run go through the same homing, so this cancels out in the comparison.

## The modification path

`trojan_control` receives the synchronised bundle and the STEP edges and
returns a bundle one register later. With no Trojan enabled, its output is
the input delayed by one cycle. Every Trojan has its own enable bit
(`trojan_en[i-1]` for Ti) and can be combined with the others. Per-signal
multiplexing between the original and the modified value happens inside the
module. In `offramps_top`, the `bypass` input picks between the raw Arduino
pins and the module's output.

| Trojan | effect on the print / printer           | rule built here (defaults)                                            |
|--------|-----------------------------------------|------------------------------------------------------------------------|
| T1     | layer shifts as from a loose belt       | every 10 s, 10 full steps (×16 microsteps) added to X and to Y (`T1_RANDOM=1`: to one of them at random) |
| T2     | under- or over-extrusion                | one extruder pulse of every 2 masked (flow halved); with `T2_OVER=1` followed by an extra pulse instead (+50 %) |
| T3     | wrong retraction/extrusion during Y moves | while Y has stepped in the last 1 ms, each E pulse is doubled (or masked, `T3_OVER=0`) |
| T4     | Z-wobble                                | on each Z step, with probability 1/64 (LFSR), 4 full steps added to X or to Y |
| T5     | delamination                            | once, after 4000 Z steps since homing, 40 full Z steps added          |
| T6     | heaters dead (denial of service)        | D8 and D10 forced low                                                  |
| T7     | thermal runaway (destructive)           | D8 and D10 forced high; wins over T6                                   |
| T8     | motors drop out                         | all EN lines forced high 0.5 s of every 2 s                            |
| T9     | part cooling reduced (or raised)        | fan line ANDed with a 50 % PWM at about 1.5 kHz; with `T9_OVER=1` ORed with it instead |

From the paper: the list of Trojans, T1's 10 s period, and T2 masking half the
extruder pulses. The step counts, windows, probability, duty cycles and
periods are parameters of this design with defaults of its own.

**How extra steps are added.** Adding motion takes more care than masking it.
A stepper driver counts rising edges. An added pulse that overlaps a firmware
pulse merges with it and is lost, and so is the firmware's pulse. Each axis
therefore has its own `pulse_generator`. A Trojan that wants extra steps adds
full steps to that axis's *pending* count. Whenever the generator is idle, it
takes the whole pending count as one burst of
`pending << USTEP_LOG2` pulses, each 2 µs wide and 100 µs apart. (T3 adds
single driver pulses instead.) The generator's `pause` input is tied to the
firmware's STEP line of the same axis, so a new added pulse starts only while
the firmware's pulse is low. The two pulse trains are ORed onto the output.
Added pulses take the firmware's current DIR. A shift therefore goes the
way the axis is already moving and fits into the gaps of the job, adding no
print time.

A burst can still begin a moment before a firmware pulse rises. In that case
the two pulses overlap and the driver sees one edge. This is rare at printer
step rates (below 20 kHz, with 1 µs pulses), but `pause` cannot rule it out,
because it cannot know that a firmware pulse is about to start.

## The monitoring path and the capture stream

`axis_tracker` counts STEP rising edges on the Arduino side: +1 when DIR is at
its positive level (high by default, `DIR_POS_LEVEL` per axis), −1
otherwise. The monitor taps the lines *before* `trojan_control`. It records
what the firmware commanded, which is what a golden comparison needs. (The
paper's authors did not use the FPGA to detect their own FPGA Trojans for the
same reason.)

`capture_controller` streams the counts:

1. `homed_pulse` stops the stream and clears its interval timer and its
   transaction counter (`txn_count`).
2. After homing, the first STEP edge on any axis starts the timer. Starting on
   real motion, not on homing itself, makes the sampling windows of two runs
   of the same job line up. Without it, the time spent heating and homing
   would shift every sample.
3. Every `CAPTURE_INTERVAL` cycles (10,000,000, i.e. 0.1 s at 100 MHz), all four
   counters are copied in the same cycle. The copy goes out as one 16-byte
   record:

   | bytes | 0–3 | 4–7 | 8–11 | 12–15 |
   |-------|-----|-----|------|-------|
   | value | X   | Y   | Z    | E     |

   Each value is a 32-bit two's-complement count, most significant byte
   first. The serial line runs 8N1 at 115200 baud (`CLKS_PER_BIT = 868`), LSB
   first within each byte. A record takes 1.39 ms, so there is ample slack
   in the 100 ms period. If a period ends while a record is still going out
   (possible only with a much shorter period or a slower baud rate), that
   sample is dropped and the sticky `overrun` flag is set.

The first record's start bit leaves `CAPTURE_INTERVAL + 2` cycles after the
cycle in which the synchronised first step edge is seen. The record holds
the counts as they stood in the last cycle of the interval. The record carries
no index: the host numbers records in order of arrival.

**Using the stream for detection.** The host stores the records of a verified
golden job. It then compares each new job record by record. A column that
differs from the golden value by more than a margin (5 % in the paper's
experiments) is a mismatch. The last record, after the job has ended, holds the
totals and must match exactly. Small drifts of a few steps appear even between
good runs, because the printer does not execute a command in exactly the same
time twice. The margin absorbs them; the exact final check catches a small but
systematic change such as 2 % less filament. `tb_flaw3d_detect` carries out
this procedure in simulation.

## Timing summary

| path                                   | latency                                            |
|----------------------------------------|----------------------------------------------------|
| Arduino pin → RAMPS pin, `bypass=1`    | combinational                                      |
| Arduino pin → RAMPS pin, `bypass=0`    | 3 cycles (2 synchroniser + 1 output register), 30 ns |
| endstop, display UART                  | combinational pass-through                         |
| endstop trip → `homed`                 | 3 cycles (2 synchroniser + state register)         |
| STEP edge → counter                    | 3 cycles                                           |

The paper reports firmware signals below 20 kHz with pulses of at least 1 µs,
and an FPGA propagation delay of about 13 ns for its capture design. The
30 ns of the Trojan path here is of the same order and negligible against a
1 µs pulse. A pulse must be high for at least 2 clock cycles to be counted
reliably.

Reset comes from a push button (`rst_btn`, active high) and is synchronised
in the top. Every module uses synchronous active-low reset. `led[0]` shows
`homed` and `led[1]` shows that the capture stream is running.

## Parameters

All defaults are the full-size values.

| parameter (top)          | default       | source |
|--------------------------|---------------|--------|
| clock (`offramps_pkg::CLK_HZ`) | 100 MHz | paper |
| `CAPTURE_INTERVAL`       | 10,000,000 (0.1 s) | paper |
| record size              | 16 bytes = 4 × 32 bit | paper gives 16 bytes for all motors; split into 4 × 32 bit here |
| `CLKS_PER_BIT`           | 868 (115200 baud) | own |
| `ENDSTOP_ACTIVE_HIGH`    | 1 | own |
| `T1_INTERVAL`            | 1,000,000,000 (10 s) | paper |
| `T1_STEPS`               | 10 full steps | own |
| `T1_RANDOM`              | 0 (both axes) | own |
| `T2_DROP_EVERY`, `T2_OVER` | 2 (half the pulses), 0 (mask) | paper |
| `T3_WINDOW`, `T3_OVER`   | 100,000 (1 ms), 1 | own (the paper shows the over-extrusion variant) |
| `T4_PROB_LOG2`, `T4_STEPS` | 6 (1/64), 4 | own |
| `T5_TRIGGER_ZSTEPS`, `T5_STEPS` | 4000, 40 | own |
| `T8_PERIOD`, `T8_OFF`    | 2 s, 0.5 s | own |
| `T9_DUTY`, `T9_OVER`     | 128 / 256, 0 (reduce) | own |
| `USTEP_LOG2`             | 4 (1/16 microstepping) | own (RAMPS jumper setting) |
| `INJ_PERIOD`, `INJ_WIDTH`| 10,000 (100 µs), 200 (2 µs) | own |

## Where this design departs from, or goes beyond, the paper

* The paper builds the Trojan design and the capture design as separate FPGA
  configurations. Here both are in one top. The Trojans are selected at run
  time by `trojan_en` and `bypass`, which would be tied to switches, buttons
  or a configuration register on a real board.
* T1: the paper's summary table describes random changes to X or to Y, while
  its prose describes a shift of both axes every ten seconds. The default
  follows the prose. With `T1_RANDOM=1` each 10 s tick shifts only one of the
  two axes, picked by the shared LFSR; the tick itself stays periodic.
* T2: the summary table allows both too much and too little extrusion, while
  the prose describes only masking half the pulses. Masking is the default;
  the over-extrusion variant (`T2_OVER=1`) adds one pulse where masking
  would remove one.
* T9: the table lists only a reduced fan speed; the text allows over- or
  under-cooling. Reducing is the default; `T9_OVER=1` turns the fan on for
  the PWM's share of the time even when the firmware has it off.
* Homing order X → Y → Z and the re-arming rule are assumptions (the
  firmware's default G28 order).
* The paper's Cmod-A7 also brings one spare pin out for debugging. It has no
  function in this design and is not modelled.
* The detection itself (golden comparison) is host software in the paper and
  is only modelled in a testbench here.

## Simulating

Every testbench is self-checking. Each ends with a line
`TB_RESULT checks=N failures=M` and has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl -y tb \
    rtl/offramps_pkg.sv tb/tb_offramps_top.sv --top-module tb_offramps_top
./obj_dir/Vtb_offramps_top
```

| testbench               | what it shows |
|-------------------------|---------------|
| `tb_edge_detector`      | random inputs against a reference pipeline, cycle exact |
| `tb_pulse_generator`    | pulse count, width, spacing, total burst time, `pause` |
| `tb_homing_detector`    | order, bumps, one-cycle `homed_pulse`, re-arming |
| `tb_axis_tracker`       | up/down counts against a model, clear, DIR polarity |
| `tb_uart_tx`            | bytes decoded by an independent receiver, bit and frame time |
| `tb_capture_controller` | record contents and exact sampling instants, start rule, overrun |
| `tb_trojan_control`     | each of T1–T9 against its rule, the pass-through when idle |
| `tb_offramps_top`       | end to end at shortened timers: bypass, homing, 3-cycle latency, exact capture, every Trojan alone and three together, re-homing |
| `tb_offramps_full`      | the top at its default parameters: homing, a job with T2, the first real 0.1 s record at 115200 baud, T9 over two PWM periods, T8 over 0.6 s, and a later record 0.1 s after the one before it (about 80 million cycles, under a minute) |
| `tb_flaw3d_detect`      | golden-model detection of the eight Flaw3D-style g-code Trojans (reduction 0.5/0.85/0.9/0.98, relocation every 5/10/20/100 moves) with a 5 % margin and an exact final check; a repeat of the golden job is not flagged |

The testbenches other than `tb_offramps_full` shorten the timers (10 s, 0.1 s,
2 s) through parameters, so that every mechanism fires within a
fraction of a second of simulated time. In `tb_flaw3d_detect` the job is a
synthetic one, 200 moves long. The relocation Trojan is modelled as a 400-step
X detour before a move's extrusion. Both choices are this testbench's own, so
it shows the detection method at work, not the paper's prints.

To change the design, the parameters listed above are the intended knobs. New
Trojans go into `trojan_control` as another enable bit
(extend `offramps_pkg::NUM_TROJANS` and `trojan_e`). A new source of added
steps adds to the pending count of its axis (`add_steps`).
