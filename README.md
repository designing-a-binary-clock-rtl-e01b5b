# A 24-hour binary clock from ripple counters and AND gates

This clock shows the time of day as three binary numbers on 17 LEDs.
Hours use 5 LEDs (16, 8, 4, 2, 1). Minutes and seconds use 6 LEDs each
(32, 16, 8, 4, 2, 1). The hardware it describes is a small breadboard
circuit:

- three 74HC393 dual 4-bit ripple counters,
- two 74HC08 quad AND gates,
- one 74HC14 hex Schmitt-trigger inverter,
- four diodes, a few resistors and capacitors, and two push buttons.

The 1 Hz input comes from an external generator.

The design has no system clock and no state machine. Each time field is a
ripple counter that clears itself when it reaches its limit. The carry from
one field to the next is simply the falling edge of the field's top bit.
The RTL here models this circuit at gate and flip-flop level. The debouncers
are analog and are modelled behaviourally. The RTL has been simulated over
more than a full day of clock time.

## Reading the display

Each field is plain binary, not BCD. To read a field, add the weights of the
lit LEDs. For example, 11:45:38 lights these LEDs:

- hours: 8, 2 and 1,
- minutes: 32, 8, 4 and 1,
- seconds: 32, 4 and 2.

The clock counts 00:00:00 to 23:59:59. At midnight every LED is off for one
second.

## The counting chain

Each field is a `clock_stage`. Inside it, one 74HC393 is wired as an 8-bit
ripple counter: the stage clock drives counter 2, and counter 2's last output
(2Q3) clocks counter 1. Counter 2 therefore holds bits 0–3 and counter 1
holds bits 4–7. Only the low 6 bits (5 for hours) are used.

A `reset_decoder` sits on the counter outputs. It is an AND of the count bits
that are 1 in the field's limit, and its output drives the counter's
asynchronous master reset:

| field   | width | limit | bits ANDed         | gates            |
|---------|-------|-------|--------------------|------------------|
| seconds | 6     | 60    | 32, 16, 8, 4       | three 2-input    |
| minutes | 6     | 60    | 32, 16, 8, 4       | three 2-input    |
| hours   | 5     | 24    | 16, 8              | one 2-input      |

A counting field passes through every smaller value first. None of those
values has all of the decoded bits set, so the reset fires exactly at the
limit. The limit value shows on the outputs only for as long as the reset
takes to act, so it is never seen.

**Carry.** Seconds and minutes pass their carry through bit 5, the "32"
output. That bit rises at 32 and stays HIGH until the field is cleared at
60. Its fall is one clean falling edge per wrap, and it clocks the next field
(the counters count on HIGH-to-LOW transitions). No carry logic is needed
beyond the wire. At 23:59:59 one falling edge of the 1 Hz input ripples
through all three fields:

1. seconds reach 60 and clear;
2. minutes reach 60 and clear;
3. hours reach 24 and clear.

## Self-clearing counters in a zero-delay model

This is the subtle part of the model. When a decoder clears its counter,
several outputs fall at once. In a ripple counter those outputs are the
clocks of the flip-flops after them, and the 8-bit cascade inside a stage
behaves the same way.

In the real part this is harmless. The master reset is still HIGH when those
edges arrive, because the AND gate has not yet seen the cleared count, and
the reset overrides the clock. A zero-delay simulation has no such window:

- the count clears;
- the decoder output falls in the same instant;
- the later flip-flops then see a falling clock edge with the reset already
  LOW, and count it.

An uncorrected model of this kind wraps seconds from 59 to 56 instead of 0.

`ripple_counter4` removes the race without adding delays. Each flip-flop's
clock is its predecessor's output (or the counter input) ANDed with the
inverted master reset. The gated clocks:

- fall when the reset rises, at which point the flip-flops take the reset
  branch;
- stay LOW while the reset is HIGH;
- do not fall again when the reset is released.

The gating is internal to the counter. The falling top bit of a field still
clocks the *next* field, because that field is not being reset. This
expresses "reset dominates the clock" for a part whose insides the original
design does not describe. It is this model's own choice.

The same mechanism makes power-up safe. A field that powers up at or above
its limit is cleared at once by its own decoder. There is no power-on reset
input, as in the original circuit; the time is set with the buttons.

## Setting the time with two buttons

There are two buttons, SET HRS and SET MINS. Each button drives two diode-OR
connections, modelled in `set_steering`:

- **Onto the clock of its own field.** There it joins the carry from the
  field below, which arrives through a 10 kΩ resistor. Holding the button
  keeps that clock HIGH. Releasing it makes the clock fall, so the field
  advances by one, exactly as it would for a carry.
- **Onto the master reset of the field below.** There it joins that field's
  own decoder, again through a 10 kΩ resistor. SET HRS clears the minutes and
  SET MINS clears the seconds, and the field below stays at zero while the
  button is held.

Holding the field below at zero matters when that field is already at 32 or
more (its "32" carry bit is HIGH, or "primed"). Clearing it drops the carry
bit while the button still holds the clock HIGH, so no edge is lost or added,
and the press advances the field exactly once. Without the clear, the carry
would fall on its own later and advance the field a second time.

Two consequences follow:

- Releasing SET MINS starts the seconds from exactly zero. To set the clock
  precisely, set it to the minute before the target time and release SET
  MINS on the reference signal.
- Advancing the minutes past 59 with SET MINS advances the hours through the
  normal carry.

Use SET HRS first, because it zeroes the minutes.

## Button conditioning

Each button is debounced by an RC network and a 74HC14 inverting Schmitt
trigger (`switch_debouncer`, a behavioural model):

- The supply feeds 4.7 kΩ to a node A, and 47 kΩ leads from A to the trigger
  input.
- A 100 nF capacitor sits on the trigger input.
- The button shorts node A to ground.

Pressing the button discharges the capacitor through 47 kΩ (τ = 4.7 ms).
Releasing it recharges the capacitor through 51.7 kΩ (τ = 5.17 ms). The
inverter output is HIGH while the capacitor is below its threshold, so a
pressed button gives a HIGH. The model works from events:

1. At each contact change it computes the capacitor voltage from the RC
   segment that just ended.
2. It schedules the exact threshold crossing, τ·ln((v0 − target)/(vt − target)).
3. A later contact change cancels a pending crossing.

With the assumed thresholds (VT+ = 2.6 V, VT− = 1.6 V):

- a clean press shows 5.36 ms after the contacts close;
- a clean release shows 3.80 ms after they open;
- bounces or glitches shorter than about a millisecond never reach the
  output.

Because of these `#` delays the top level simulates but does not synthesize
as a whole. Everything below the debouncers is synthesizable.

## Modules

| file | role |
|------|------|
| `rtl/binary_clock_pkg.sv` | field widths and limits (6/60, 6/60, 5/24), counter width 8 |
| `rtl/ripple_counter4.sv` | one 4-bit ripple counter: falling-edge clock, asynchronous clear |
| `rtl/hc393.sv` | 74HC393, two `ripple_counter4` with the part's pin names |
| `rtl/reset_decoder.sv` | AND of the bits set in `MATCH` (parameters `WIDTH`, `MATCH`) |
| `rtl/clock_stage.sv` | one field: `hc393` cascaded to 8 bits plus `reset_decoder` (parameters `WIDTH`, `MODULUS`) |
| `rtl/set_steering.sv` | diode ORs of one set button |
| `rtl/switch_debouncer.sv` | RC + Schmitt-trigger behavioural model (component values as parameters) |
| `rtl/binary_clock.sv` | top: two debouncers, three stages, two steering networks |

The top-level ports of `binary_clock` are:

- `clk_1hz`: counts on its falling edge;
- `set_hrs_contact` and `set_mins_contact`: raw button contacts, 1 while
  closed, bounce included;
- `hrs[4:0]`, `mins[5:0]` and `secs[5:0]`: the LED drive, bit *n* having
  weight 2^n.

The outputs change only after falling edges of `clk_1hz` or after a button
release.

## Simulating

Each testbench checks itself and ends with a line
`TB_RESULT checks=N failures=M`. With Verilator 5:

    verilator --binary --timing --assert --sched-zero-delay -y rtl \
        rtl/binary_clock_pkg.sv tb/tb_binary_clock.sv --top-module tb_binary_clock
    obj_dir/Vtb_binary_clock

To run another testbench, replace `tb_binary_clock` with `tb_hc393`,
`tb_reset_decoder`, `tb_clock_stage`, `tb_set_steering` or
`tb_switch_debouncer`. The time unit throughout is 1 µs.

What each testbench checks:

- **`tb_binary_clock`** runs the whole clock for a little over a day of
  simulated time, which takes well under a second. Its steps:
  1. It checks that the fields are in range after a random power-up.
  2. It sets 23:59 with bouncing button presses.
  3. It runs through midnight and a full 86 400 s day, comparing all 17
     outputs with its own time model every second.
  4. It checks the 11:45:38 LED pattern above.
  5. It exercises the setting corner cases: a press while the field below is
     primed, SET MINS past 59, and short contact glitches.

  It counts each of these mechanisms and fails if one never happened.
- **`tb_clock_stage`** runs free-running 60 and 24 stages. It checks the
  count, that the limit never stays visible, and that the carry falls exactly
  once per wrap. It also applies random external clears.
- **`tb_hc393`** drives random clocks and resets into both counters and
  checks each against a modulo-16 count.
- **`tb_reset_decoder`** checks every input value exhaustively.
- **`tb_set_steering`** checks the full truth table.
- **`tb_switch_debouncer`** checks the press and release delays to within
  50 µs of the RC formula, that bounces and glitches are rejected, and that
  one press gives one pulse.

## Where this model departs from, or adds to, the original circuit

- **Display format.** The original write-up contradicts itself about the
  display format: one passage adopts the BCD column layout. The schematic and
  the caption of its display figure use plain binary fields weighted 32 to 1,
  and this model follows them.
- **Counter internals.** Only the 74HC393's function (falling-edge count,
  active-high clear) comes from the original. The toggle-flip-flop chain and
  the reset-gated clocks are this model's own, as explained above.
- **Debouncer.** The component values and topology come from the schematic.
  The Schmitt thresholds are assumed typical 74HC14 values at 5 V, and the
  start state (capacitor charged, output LOW) is also assumed.
- **Resistors and diodes.** The 10 kΩ isolation resistors and 1N4148 diodes
  are modelled as ideal OR gates. The schematic shows four 10 kΩ resistors
  (two in the carry lines, two after the AND gates); the parts list counts
  three.
- **1 Hz source.** The original uses a microcontroller board as the 1 Hz
  source. It is not modelled; `clk_1hz` is a plain input.
- **LEDs.** The LEDs and their 330 Ω resistors are not modelled; the LED
  drive appears on the output ports.
- **Unused parts.** Counter bits 6 and 7 of each 74HC393 are left open, as in
  the schematic. The hours field's top bit drives only its LED.
