// set_steering: the diode OR network of one set button.
//
// Pressing a set button must advance one field by exactly one and clear the
// field below it. The debounced button level set_btn is ORed, through one
// diode, onto the clock of the field being set, where it joins the carry
// from the field below (the "32" output, fed through a 10K resistor). While
// the button is held this clock line is HIGH; on release it falls and the
// field advances, exactly as it would for a carry.
//
// Through a second diode the same level is ORed onto the reset of the field
// below, where it joins that field's own reset decoder (also behind a 10K
// resistor). Holding the field below at zero during the press serves two
// ends: it starts that field from zero, and it stops the field's "32" output
// from falling while the button is down. Without it, a field below already
// past 32 would have its carry fall on its own later and advance the field
// being set a second time.
//
// Interface: set_btn, carry_in (bit 5 of the field below), prev_terminal
// (its reset decoder); next_clk (clock of the field being set), prev_mr
// (reset of the field below). Purely combinational.
//
// The two diode ORs and their nets are the original design's; the resistors
// and diodes themselves are modelled as logic OR gates.
`timescale 1us / 1ns
module set_steering (
  input  logic set_btn,
  input  logic carry_in,
  input  logic prev_terminal,
  output logic next_clk,
  output logic prev_mr
);

  assign next_clk = carry_in | set_btn;
  assign prev_mr  = prev_terminal | set_btn;

endmodule
