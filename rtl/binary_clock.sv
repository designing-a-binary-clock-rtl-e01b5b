// binary_clock: a 24-hour binary clock built from ripple counters and gates.
//
// Time is shown as three plain binary numbers on 17 LEDs: hours (16..1),
// minutes (32..1) and seconds (32..1). Each field is a clock_stage: a 74HC393
// wired as a ripple counter that an AND-gate decoder clears when it reaches
// 60 (seconds, minutes) or 24 (hours). There is no system clock: the 1 Hz
// input clocks the seconds field, and each field's "32" output clocks the
// next one. That bit rises at 32 and falls only when the field is cleared at
// 60, so its falling edge is the carry. At 23:59:59 the next falling edge of
// clk_1hz ripples through all three fields and leaves 00:00:00.
//
// Setting: two buttons, each cleaned by a switch_debouncer. SET HRS advances
// the hours by one when released and holds the minutes at zero while down;
// SET MINS does the same for minutes and seconds (set_steering). Releasing
// SET MINS therefore starts the seconds from zero; advancing the minutes past
// 59 this way also advances the hours, through the normal carry.
//
// Interface: clk_1hz (counts on its HIGH-to-LOW transition), the two raw
// button contacts (1 while pressed), and the three LED fields. There is no
// power-on reset; a field that powers up at or above its terminal count is
// cleared by its decoder, and the time is then set with the buttons.
//
// Everything here follows the original schematic: the stage sizes, the
// carry from the "32" outputs, the shared set/reset nets and the debouncers.
// The debouncers are behavioural models of RC networks and Schmitt
// triggers, so this top simulates but is not synthesizable as a whole;
// the counting logic below it is.
`timescale 1us / 1ns
module binary_clock
  import binary_clock_pkg::*;
(
  input  logic                clk_1hz,
  input  logic                set_hrs_contact,
  input  logic                set_mins_contact,
  output logic [HR_BITS-1:0]  hrs,
  output logic [MIN_BITS-1:0] mins,
  output logic [SEC_BITS-1:0] secs
);

  logic set_hrs, set_mins;          // debounced buttons, HIGH while pressed
  logic sec_mr,  sec_carry,  sec_terminal;
  logic min_cp,  min_mr,  min_carry,  min_terminal;
  logic hr_cp,   hr_terminal;

  // Button conditioning (74HC14 with RC networks).
  switch_debouncer u_debounce_hrs  (.contact_closed(set_hrs_contact),  .set_out(set_hrs));
  switch_debouncer u_debounce_mins (.contact_closed(set_mins_contact), .set_out(set_mins));

  // Seconds: clocked by the 1 Hz input, cleared at 60 or by SET MINS.
  clock_stage #(.WIDTH(SEC_BITS), .MODULUS(SEC_MODULUS)) u_secs (
    .cp_n     (clk_1hz),
    .mr       (sec_mr),
    .count    (secs),
    .carry    (sec_carry),
    .terminal (sec_terminal)
  );

  set_steering u_set_mins (
    .set_btn       (set_mins),
    .carry_in      (sec_carry),
    .prev_terminal (sec_terminal),
    .next_clk      (min_cp),
    .prev_mr       (sec_mr)
  );

  // Minutes: clocked by the seconds carry or SET MINS, cleared at 60 or by
  // SET HRS.
  clock_stage #(.WIDTH(MIN_BITS), .MODULUS(MIN_MODULUS)) u_mins (
    .cp_n     (min_cp),
    .mr       (min_mr),
    .count    (mins),
    .carry    (min_carry),
    .terminal (min_terminal)
  );

  set_steering u_set_hrs (
    .set_btn       (set_hrs),
    .carry_in      (min_carry),
    .prev_terminal (min_terminal),
    .next_clk      (hr_cp),
    .prev_mr       (min_mr)
  );

  // Hours: clocked by the minutes carry or SET HRS, cleared at 24. Its own
  // top bit (16) drives nothing beyond its LED.
  clock_stage #(.WIDTH(HR_BITS), .MODULUS(HR_MODULUS)) u_hrs (
    .cp_n     (hr_cp),
    .mr       (hr_terminal),
    .count    (hrs),
    .carry    (),          // the hours "16" bit clocks nothing
    .terminal (hr_terminal)
  );

endmodule
