// clock_stage: one field of the clock (seconds, minutes or hours).
//
// One 74HC393 wired as an 8-bit ripple counter plus its reset decoder. The
// stage clock enters counter 2 (pin 13), whose last output 2Q3 (pin 8) clocks
// counter 1 (pin 1); counter 2 therefore holds bits 0..3 and counter 1 bits
// 4..7. Only the low WIDTH bits are used: the field is cleared at MODULUS,
// so the top two bits never rise for a 6-bit field.
//
// Carry to the next field: bit WIDTH-1 (the "32" output of a 6-bit field)
// rises halfway through the count and falls only when the count is cleared
// at MODULUS. That falling edge is what advances the next field, so no
// separate carry logic is needed.
//
// Interface: cp_n counts on its falling edge; mr clears both counter halves
// while HIGH. The decoder output leaves the stage as terminal rather than
// being wired to mr here, because in the full clock the reset net is shared
// with a set button (see set_steering). For a free-running stage connect mr
// to terminal. count is the field value shown on the LEDs; carry is
// count[WIDTH-1].
//
// The pin-level wiring and the MODULUS values follow the original
// schematic; leaving bits 6 and 7 unconnected matches it as well.
`timescale 1us / 1ns
module clock_stage #(
  parameter int unsigned WIDTH   = binary_clock_pkg::SEC_BITS,
  parameter int unsigned MODULUS = binary_clock_pkg::SEC_MODULUS
) (
  input  logic             cp_n,
  input  logic             mr,
  output logic [WIDTH-1:0] count,
  output logic             carry,
  output logic             terminal
);

  import binary_clock_pkg::COUNTER_BITS;

  logic [3:0]              low_nibble;   // counter 2: pins 11, 10, 9, 8
  logic [3:0]              high_nibble;  // counter 1: pins 3, 4, 5, 6
  logic [COUNTER_BITS-1:0] full_count;

  hc393 u_hc393 (
    .cp1_n (low_nibble[3]),
    .mr1   (mr),
    .q1    (high_nibble),
    .cp2_n (cp_n),
    .mr2   (mr),
    .q2    (low_nibble)
  );

  assign full_count = {high_nibble, low_nibble};
  assign count      = full_count[WIDTH-1:0];
  assign carry      = count[WIDTH-1];

  reset_decoder #(
    .WIDTH (WIDTH),
    .MATCH (MODULUS)
  ) u_reset_decoder (
    .count    (count),
    .terminal (terminal)
  );

  initial begin
    assert (WIDTH >= 1 && WIDTH <= COUNTER_BITS)
      else $error("clock_stage: WIDTH %0d outside 1..%0d", WIDTH, COUNTER_BITS);
  end

endmodule
