# Self-capacitance tactile skin with on-FPGA touch classification

This is synthesizable SystemVerilog for the FPGA side of a tactile sensing
system for a soft companion robot, following the architecture described in
"Self Capacitive Tactile Sensor System designed for Companion Robots" (Ali,
Sumioka, Ikemoto). The skin is a sheet of single-layer electrodes (conductive
fabric or FPC pads). Each one is tied through its own large resistor to Vcc and
wired straight to an FPGA pin. No amplifier, ADC or per-sensor
microcontroller is needed. The FPGA
measures every pad's capacitance by timing how long the pad takes to charge,
turns 100 such readings per frame into one "how much is being touched" signal,
cuts that signal into touch events, and labels each event as one of
**no touch, touch, slow tap, fast tap or hit**. Only the label, plus one
summary number, goes to the host over a 2 Mbaud UART. The host (a Raspberry
Pi in the original robot) never sees the 10,000 readings per second.

Default configuration: 100 pads, 12 MHz clock, 100 frames per second, 2 Mbaud.

```
 pads ──► sensing_fsm ──► sample_buffer ──► feature_extraction ──► decision_tree
 (RC)     discharge/charge   frame store +     sum of dC/C0,          5 classes
          cycle counting     baseline C0       event features            │
                                                                          ▼
                                          host ◄── uart_tx ◄── result_packetizer
```

## Measuring capacitance with a clock counter

Each pad is a capacitor C to ground. It is the pad's own parasitic
capacitance plus whatever a nearby finger adds. A resistor R (10 MΩ on the
reference board) joins the pad to Vcc, and the pad also connects to an FPGA
pin. When the pin lets go of the pad, the pad charges as

    Vc(t) = Vcc (1 - exp(-t / RC))

and the pin's digital input turns from 0 to 1 when Vc crosses the CMOS input
threshold, about 0.6 Vcc. That happens at t = RC·ln(1/0.4) ≈ 0.92 RC, so
**the number of clock cycles until the input reads 1 is proportional to C**.
With R = 10 MΩ and C ≈ 10 pF this is about 92 µs, or about 1100 cycles at
12 MHz. A finger that adds 40 % capacitance adds 40 % cycles.

`sensing_fsm` runs this measurement on all pads at once, once per frame:

| state     | pins                  | what happens                                                       |
|-----------|-----------------------|--------------------------------------------------------------------|
| IDLE      | released              | wait for the frame timer (CLK_HZ / SAMPLE_HZ = 120 000 cycles)      |
| DISCHARGE | all driven low        | DISCHARGE_CYCLES (1200, 100 µs) to empty every pad                 |
| CHARGE    | all released (hi-Z)   | one shared counter runs; each pad's count is latched at its first 1 |
| READY     | released              | the 100 counts are streamed out, one per clock                      |

A single counter serves every pad. Each channel only holds a 16-bit latch and a
"done" bit, which keeps 100 channels cheap. CHARGE ends when every pad has
risen or after CHARGE_TIMEOUT cycles. A pad that never rises, for example a
broken wire, reads CHARGE_TIMEOUT. Every input passes a two-flop synchronizer,
so every count is the true charge time plus 2. This constant offset cancels
almost completely in the relative change computed later.

**Pin polarity.** The pad is *discharged* by driving the pin low and
*charged* by releasing it to high impedance, so R pulls it up. The source
text labels the discharge state "high impedance". With the resistor to Vcc,
as the source's circuit drawing shows, a released pin can only charge the
pad, so this design drives it low to discharge. If your board puts the
resistor between the pin and the pad instead, you need a different driver
scheme.

The pin cells themselves (on an iCE40, `SB_IO` in tristate mode) are not in
the RTL. `tactile_top` exposes `pad_oe` (1 = drive the pad low, so tie the
cell's data output to 0) and `pad_in` (the cell's input). Instantiate the
I/O cells around the top for your device.

## From counts to "how much is touched"

`sample_buffer` writes each frame's counts into a frame memory. During the
first 2^BASE_LOG2 = 8 frames after reset it also sums them per pad. The mean
of those frames is that pad's untouched count, C0. Keep the skin untouched
for the first 80 ms after reset. No later baseline tracking is done, so
slow drift (temperature, humidity) appears as touch until the next reset.
Once `calibrated` is 1, every frame is played back as (count, C0) pairs on a
valid/ready stream.

`feature_extraction` computes, per pad,

    dC/C0 = (count - C0) / C0          (0 if count <= C0)

in unsigned fixed point with 8 fractional bits. A restoring divider
produces one quotient bit per clock, so a touched pad costs 24 + 2 clocks and
an untouched pad costs 1. The per-pad values are summed into `frame_sum`
(Q16.8), the relative change summed over the whole sheet. This is the signal
whose time course separates the touch types: a slow tap is a long pulse, a
fast tap a short one among neighbours, and a hit a short isolated one.

## Touch events and their features

A frame is *active* when `frame_sum` ≥ ON_THRESH (2.0). A run of active
frames is one **event**. When an event ends, the block reports three
features, all counted in frames (10 ms each at 100 Hz):

* **duration**: number of active frames;
* **peak**: the largest `frame_sum` during the event;
* **interval**: frames from the previous event's *start* to this event's
  start (4095 if there was none in the last 41 s).

While an event is running, `cur_dur` gives its length so far, so that a long
press can be reported before it ends.

Published measurements of this kind of sensor give an idea of the scales. Slow
taps last 280 ± 42 ms and come every 602 ± 52 ms. Fast taps last 32 ± 11 ms
and come every 160 ± 40 ms. The peak summed change hardly differs between the
two. So duration and interval carry the information, and amplitude matters
only for telling hits apart.

## The classifier

`decision_tree` is a fixed tree evaluated once per frame:

```
event just ended?
├─ yes: duration ≥ 1000 ms ─────────────► NO_TOUCH  (a long press released)
│       duration ≥  156 ms ─────────────► SLOW_TAP
│       interval <  381 ms ─────────────► FAST_TAP
│       peak     ≥  5.0    ─────────────► HIT       (short, isolated, strong)
│       otherwise ──────────────────────► TOUCH     (short, isolated, light)
├─ event running and ≥ 1000 ms ─────────► TOUCH
└─ nothing happening: keep the last tap label for 500 ms, then NO_TOUCH
```

The 156 ms and 381 ms splits are the midpoints between the slow- and
fast-tap means quoted above. The 1000 ms long-press limit, the 500 ms hold,
the 5.0 hit level and ON_THRESH are this design's choices, because the source
publishes neither its trained tree nor its thresholds. All of them are
parameters (`DUR_SPLIT_MS`, `IVL_SPLIT_MS`, `TOUCH_MS`, `HOLD_MS`, `HIT_PEAK`)
and are turned into frame counts from SAMPLE_HZ when the design is elaborated.
To deploy a tree trained on your own data, replace the `leaf` logic in
`decision_tree.sv`. Its inputs are exactly the three features.

The classifier is causal: it decides when an event ends. The first tap of a
fast series has no recent predecessor, so it is classed by amplitude (hit or
touch). The taps that follow are fast taps.

Class codes (`tactile_pkg::touch_class_e`): 0 no touch, 1 touch, 2 slow tap,
3 fast tap, 4 hit.

## Host link

Every frame, one cycle after the classification, `result_packetizer` sends
4 bytes through `uart_tx` (8N1, LSB first, idle high, 6 clocks per bit):

| byte | content                                                |
|------|--------------------------------------------------------|
| 0    | 0xA5 (sync)                                            |
| 1    | class code (bits 2:0)                                  |
| 2    | `frame_sum` integer part, Q8.8, saturating at 255.996  |
| 3    | `frame_sum` fractional part                            |

A packet takes 240 clocks (20 µs), so the link is almost idle at 100 Hz.
`pkt_dropped` counts packets that could not start because the previous one
was still being sent. `overrun` flags a frame that arrived before the
previous one had been processed. Neither happens at the default rates.

## Timing of one frame

The end-to-end simulation uses pads of 9.5–12 pF. In it, the packet for a
frame leaves at most about 3700 clocks (0.31 ms) after the frame's
discharge begins: 1200 discharge, about 1400 charge, 100 readout, and the
divisions for the touched pads. Together with the 10 ms frame this gives the
response time: a tap is labelled one frame after it ends. A long press is
labelled 1 s after it starts.

## Parameters

| parameter          | default    | where                         | meaning |
|--------------------|-----------:|-------------------------------|---------|
| N_SENSORS          | 100        | top, sensing_fsm, sample_buffer | pads |
| CLK_HZ             | 12 000 000 | top, sensing_fsm, uart_tx     | clock |
| SAMPLE_HZ          | 100        | top, sensing_fsm, decision_tree | frames per second |
| BAUD               | 2 000 000  | top, uart_tx                  | serial rate (CLK_HZ/BAUD must be an integer) |
| CNT_W              | 16         | top, sensing_fsm, sample_buffer, feature_extraction | count width |
| DISCHARGE_CYCLES   | 1200       | top, sensing_fsm              | discharge time |
| CHARGE_TIMEOUT     | 2^CNT_W-1  | top, sensing_fsm              | longest charge time |
| BASE_LOG2          | 3          | top, sample_buffer            | log2 of calibration frames |
| ON_THRESH          | 2.0        | feature_extraction            | event threshold on the summed change |
| DUR_SPLIT_MS, IVL_SPLIT_MS, TOUCH_MS, HOLD_MS, HIT_PEAK | 156, 381, 1000, 500, 5.0 | decision_tree | tree thresholds |

The source also shows 10 Hz and 1 kHz sampling. 10 Hz misses fast taps and
hits, as the source itself reports. For 1 kHz, set SAMPLE_HZ = 1000 and also
lower CHARGE_TIMEOUT below about 8000. Otherwise a pad that never charges
stretches the measurement past the 12 000-clock frame.

## Files

| file | contents |
|------|----------|
| `rtl/tactile_pkg.sv` | class enum, fixed-point widths, event feature struct, ms-to-frames helper |
| `rtl/sensing_fsm.sv` | frame timer, discharge/charge FSM, per-pad count latches |
| `rtl/sample_buffer.sv` | frame memory, baseline memory, playback stream |
| `rtl/feature_extraction.sv` | divider, summed dC/C0, event tracking |
| `rtl/decision_tree.sv` | classifier |
| `rtl/result_packetizer.sv` | 4-byte packet framing |
| `rtl/uart_tx.sv` | 8N1 transmitter |
| `rtl/tactile_top.sv` | the whole chain |
| `tb/pad_rc_model.sv` | behavioural RC pad model (charge time per pad, in clocks) |
| `tb/uart_rx_model.sv` | mid-bit sampling UART receiver for testbenches |
| `tb/tb_*.sv` | one self-checking testbench per module |

## Simulation

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself
(each has a watchdog). With Verilator 5, for example:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
  rtl/tactile_pkg.sv tb/tb_tactile_top.sv --top-module tb_tactile_top
./obj_dir/Vtb_tactile_top
```

The package goes first; `-y` lets Verilator find every other module by its
file name. What each test checks:

* `tb_sensing_fsm`: 8 pads with known charge times over 6 frames. Count =
  charge time + 2, a stuck pad reads the timeout, exact frame period and
  discharge length, stream order.
* `tb_sample_buffer`: no playback during calibration, the baseline is the
  exact mean, playback is correct under a randomly stalling consumer.
* `tb_feature_extraction`: the frame sum is checked against an integer
  reference (including pads below baseline and a timed-out pad). Also event
  duration, peak and start-to-start interval.
* `tb_decision_tree`: 120 random events checked frame by frame against a
  reference model. All five classes must occur.
* `tb_result_packetizer`: packet bytes, Q8.8 saturation, drop counting.
* `tb_uart_tx`: 200 bytes through a receiver model; back-to-back bytes
  exactly 60 clocks apart.
* `tb_tactile_top`: the whole design at its default parameters (100 pads,
  12 MHz, 100 Hz). About 450 frames (54 M clocks) run through the RC pad
  model: two slow taps, three fast taps, a hit and a 1.1 s press. The test
  checks the exact frame period, the summed change in every packet against a
  value computed from the pad model, that every packet leaves within its
  frame, and the class sequence no touch → slow tap → no touch → touch →
  fast tap → no touch → hit → no touch → touch → no touch. It also counts,
  through the hierarchy, how often each mechanism fired: the early end of the
  charge phase, divisions and skipped pads, classified events, expired tap
  labels and the long press. Each must fire. It takes about 1.5 minutes.
* `tb_sampling_rates`: the same sheet watched by three copies of the design
  at 10 Hz, 100 Hz and 1 kHz. The clock is scaled to 1.2 MHz to keep the run
  short. The script has five slow taps, five fast taps and five hits, with
  contacts timed independently of the frames. At 100 Hz and 1 kHz all 15
  contacts must be seen: 5 slow, 4 fast, 1 touch (the first fast tap) and
  5 hits. At 10 Hz fewer must be seen, and no fast tap or hit is recognised.
  The run sees 7 events at 10 Hz. One pad is disconnected, so every charge
  phase ends at the timeout and the timed-out pad must not disturb the
  result. About 75 seconds.

The stream handshakes also carry concurrent assertions: an offered item
stays offered and unchanged until it is taken, and no pad is driven while
counts are read out. They fire in simulation with `--assert`.

## How far to trust it, and where it departs from the source

Taken from the source: the charge-and-count measurement and its states, 100
channels, 12 MHz, 100 Hz frames, the block chain (I/O, sensing FSM, sample
buffer, feature extraction, decision tree, 2 Mbaud UART), the three features
and the five classes.

This design's own choices, because the source does not give them: how the pin
is driven during discharge (see above), parallel measurement with one shared
counter, discharge time and timeout, the baseline scheme, the fixed-point
format, the definition of an event and of the interval, the whole tree
structure and its thresholds, the packet format, and all handshakes between
blocks. The source's classifier was trained on recorded data and reports
about 90 % accuracy. This tree was not trained or checked against real
recordings. Its thresholds are starting points set from published means. The
simulations use an idealised RC model without noise. Real pads will need
ON_THRESH and HIT_PEAK tuned, and probably some filtering of `frame_sum`.

Not included: the I/O cells, the PLL (the design runs straight from the
12 MHz oscillator), and anything analog (electrodes, resistors, connectors).
