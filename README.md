# FPGA controller for a two-wheel mobile robot

A small differential-drive robot — two driven wheels on one axis and a free
front caster — measures the distance to an obstacle with a Sharp GP2D12
infrared sensor and sets its wheel speed from that reading. All decisions are
made in an FPGA: it runs an ADC0809 converter, shows the reading on two
seven-segment digits, and drives the motors through an L293D H-bridge with a
PWM signal whose duty is the 8-bit sensor reading. The controller is a pure
mapping from sensor input to actuator outputs, with no processor.

```
 GP2D12 ──analog──> ADC0809 ──adc_in[7:0], adc_eoc──> ┌──────────── mobile_robot ─────────────┐
                       ^                               │ adc_ctrl ──sample──┬──> pwm_generate ──┼──> pwm_out
                       └─ addr, adc_ale, adc_start, ───│                    │         │         │
                          adc_oe                       │                    │    motion_ctrl <──┼── motion_cmd
                                                       │                    │         └─────────┼──> l293 (ENA ENB 1A..4A)
                                                       │     distance_lut <─┤                   │
                                                       │          └──> mux ─┴─> 2 x seg7_decoder┼──> seg_grp1, seg_grp2
                                                       └───────────────────────────────────────┘
```

Everything runs on one clock, `glclk` (20 ns assumed), with an asynchronous
active-low reset `rst_n`.

## Running the converter: `adc_ctrl`

This is the only block with real sequencing. The ADC0809 is a successive-
approximation converter with its own clock (supplied on the board, not by this
design). Its handshake is:

* a rising ALE latches the 3-bit channel address,
* START resets the converter; its falling edge starts the conversion,
* EOC falls shortly after (up to 8 converter clocks + 2 µs) and rises again
  when the result is ready,
* the result is on the data pins only while OE is high.

`adc_ctrl` loops through four states:

| state | outputs | leaves when |
|---|---|---|
| `START_PULSE` | ALE = START = 1 | after `ceil(MIN_PULSE_NS / CLK_PERIOD_NS)` cycles (100 ns → 5 cycles) |
| `WAIT_BUSY` | all low | the synchronised EOC is low, or `EOC_TIMEOUT_NS` has passed |
| `WAIT_DONE` | all low | the synchronised EOC is high |
| `READ` | OE = 1 | after `OE_NS` (13 cycles); the data is latched on the last cycle and `sample_valid` pulses |

Points worth knowing:

* ALE and START are one signal in practice: both rise and fall together, and
  both are held for at least 100 ns, the minimum the converter needs.
* The address is the constant `CHANNEL` = 0: only one sensor is read.
* EOC is asynchronous to `glclk` and passes two flip-flops first, so the FSM
  reacts 2 cycles late; the cycle counts below include this.
* `WAIT_BUSY` has a timeout because a fast converter, or one already finished,
  may never show EOC low at a clock edge; without it the loop would wait on the
  wrong edge forever. The default 16 µs covers the slowest data-sheet case at
  a 640 kHz converter clock.
* `sample` changes only with a `sample_valid` pulse and is 0 after reset.

With the converter model used in the testbenches (EOC falls 200 ns after
START, conversion 2 µs) one loop takes about 130 cycles; a real ADC0809 at
640 kHz converts in about 100 µs, so the reading is refreshed about 10,000
times per second. Two assertions guard the handshake: START and OE are never
high together, and every START pulse lasts the full minimum width.

## Display: two hexadecimal digits

`seg7_decoder` turns a 4-bit value into segments `{dp, g, f, e, d, c, b, a}`
(bit 0 = segment a). It decodes all sixteen values (0–9, A, b, C, d, E, F).
Its `ACTIVE_LOW` parameter chooses the polarity. The default is 1, for a
common-anode display, and then the decimal point is inverted too. The top
uses two decoders with `ACTIVE_LOW = 0`. The upper nibble goes to `seg_grp1`
and the lower nibble to `seg_grp2`. The decimal point is not wired out. The
segment pins are registered.

`DISPLAY_DISTANCE` selects what the digits show:

* `0` (default): the raw reading in hexadecimal. A reading of 20 shows `14`
  (`seg_grp1` = 6, `seg_grp2` = 102), and 85 shows `55` (109, 109).
* `1`: the distance in centimetres from `distance_lut`, as two decimal digits.

## From voltage to distance: `distance_lut`

The GP2D12 output is not linear in distance. It is about 2.4 V at 10 cm,
1.35 V at 20 cm and 0.42 V at 80 cm. Closer than about 8 cm, the voltage
falls again. A fit of the form L = K / (V − V0) matches these points well,
with K = 24.8 V·cm and V0 = 0.11 V. The table has 256 entries, one per ADC
code. At power-up, entry `c` holds

```
V = c * 5 V / 256,   L = round(24.8 / (V - 0.11)),   clamped to 10..80 cm
```

Each entry is stored as two BCD digits `{tens, ones}`, so it can drive the
display directly. The table is computed during elaboration by a function in
the RTL, so no data file is needed. It is a RAM with one write port
(`cal_we`, `cal_addr`, `cal_data`): each sensor can be calibrated in
operation by overwriting entries with measured distances. A read takes one
clock, as in a block RAM. When `DISPLAY_DISTANCE = 0`, nothing reads the
table and synthesis removes it.

## Speed and direction: `pwm_generate`, `motion_ctrl`

`pwm_generate` compares a free-running 8-bit counter with the duty value.
`pwm_out` is high for `pwm_in` cycles out of every 256 (times `PRESCALE`).
So 0 means stopped and 255 means almost full speed. A new duty takes effect
at the next period boundary, so no pulse is ever cut short. At 50 MHz and
`PRESCALE = 1`, the PWM frequency is 195 kHz. That is far above what an L293D
switches well (a few kHz), so on real hardware set `PRESCALE` to about 64 or
more.

`motion_ctrl` outputs the L293D pins (ENA ENB 1A 2A 3A 4A) from a movement
command:

| command | ENA ENB 1A 2A 3A 4A |
|---|---|
| Forward | 1 1 1 0 1 0 |
| Reverse | 1 1 0 1 0 1 |
| Left    | 0 1 0 0 1 0 |
| Right   | 1 0 1 0 0 0 |

The enable bits are ANDed with `pwm_out`, so the PWM duty sets the speed of
each enabled bridge. The pins are registered and follow the command and
`pwm_out` one clock later. Turning is done by running one wheel only. There
is no stop command: duty 0 stops the robot. The command enters the top as
`motion_cmd` (`robot_pkg::motion_cmd_e`). No navigation logic is part of
this design.

## Where this RTL departs from, or adds to, the source design

The source design specifies the top-level pins, the 100 ns START/ALE minimum,
channel 0, the duty taken from the reading, the hexadecimal display values,
the L293 truth table and the idea of a calibratable lookup table. The
following are this implementation's own choices or departures:

* **Clock and reset.** A 20 ns clock and the `rst_n` input are assumed.
* **Added ports.** `adc_oe`, `motion_cmd`, `l293` and the calibration port are
  added; the source's top-level pin list has none of them.
* **Data latching.** The reading is latched once per conversion, while OE is
  high. The source's full-system waveform shows the display following the
  ADC data pins directly.
* **The converter sequence.** The FSM, the EOC synchroniser and the timeout
  are original. The source shows only a schematic of counters and
  flip-flops, without their function.
* **The distance table.** Its contents (the inverse-law fit), the BCD format
  and the 10–80 cm clamp are original. The source describes the display as
  showing distance in cm, but its full-system simulation shows the raw value.
  The default follows the simulation.
* **The PWM scheme.** The counter-compare scheme, its 256-cycle period and
  the prescaler are original. The source gives no period.
* **Not included.** The sensor, converter, driver chip, motors and display
  are off-chip. The optional wireless link is not designed.

## Files

| file | contents |
|---|---|
| `rtl/robot_pkg.sv` | movement command enum, L293 pin struct, truth-table constants, ns-to-cycles helper |
| `rtl/adc_ctrl.sv` | ADC0809 sequencer |
| `rtl/pwm_generate.sv` | PWM generator |
| `rtl/seg7_decoder.sv` | hexadecimal seven-segment decoder |
| `rtl/distance_lut.sv` | calibratable sensor-to-distance table |
| `rtl/motion_ctrl.sv` | L293D direction and enable logic |
| `rtl/mobile_robot.sv` | top level |
| `tb/adc0809_model.sv` | behavioural ADC0809 (not synthesizable) |
| `tb/tb_ref_pkg.sv` | reference functions for the system testbenches |
| `tb/tb_<block>.sv` | one self-checking testbench per block |
| `tb/tb_mobile_robot.sv` | end to end, raw and distance display side by side, timeout path, calibration, all movements |
| `tb/tb_mobile_robot_full.sv` | the top at default parameters, readings 0, 20, 85 |

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops by itself;
a watchdog ends it with a failure if it hangs. With Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb \
    rtl/robot_pkg.sv tb/tb_ref_pkg.sv tb/tb_mobile_robot.sv --top-module tb_mobile_robot
./obj_dir/Vtb_mobile_robot
```

For a single block, replace the last file and top with, for example,
`tb/tb_adc_ctrl.sv --top-module tb_adc_ctrl` (`tb_ref_pkg.sv` is needed only
by the two system testbenches). Every run takes a few seconds. The
simulator has only two states, so the testbenches reset or initialise
everything they read.

## How far it is verified

Every block is checked against values that the testbench computes on its own:

* segment patterns are written out as segment letters;
* the distance law is evaluated in floating point;
* the truth table is written as pin strings;
* PWM duty is counted over whole periods;
* the converter model counts START pulses that are too short and
  conversions that overlap.

The system testbench checks the L293 pins on every clock. It also counts
each mechanism and fails if one never occurs: normal and timed-out
conversions, both display modes, a duty change, enable gating, all four
movements and a calibration write. Each testbench has also been shown to
fail on a deliberately broken copy of its block. Nothing has been run on
hardware, and the converter model is simplified: it has no converter clock
and uses short conversion times.
