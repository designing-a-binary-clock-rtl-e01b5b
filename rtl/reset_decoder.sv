// reset_decoder: terminal-count detector built from AND gates (74HC08).
//
// A field must be cleared as soon as it reaches its terminal count MATCH
// (60 for seconds and minutes, 24 for hours), so that MATCH itself is never
// shown. The decoder ANDs together only the count bits that are 1 in MATCH:
// for 60 = 32+16+8+4 those are bits 5, 4, 3 and 2 (three 2-input gates in a
// tree); for 24 = 16+8 bits 4 and 3 (one gate). A counting field passes
// through every smaller value first, and none of them has all of these bits
// set, so terminal first rises exactly at MATCH.
//
// Interface: count (the field), terminal (HIGH at MATCH). Purely
// combinational; it drives the field's asynchronous master reset, so the
// count MATCH lasts only as long as the reset takes to act.
//
// Examining only the 1-bits of MATCH is the original design's; writing it
// as a loop over a bit mask, for any MATCH, is this design's.
`timescale 1us / 1ns
module reset_decoder #(
  parameter int unsigned WIDTH = 6,
  parameter int unsigned MATCH = 60
) (
  input  logic [WIDTH-1:0] count,
  output logic             terminal
);

  localparam logic [WIDTH-1:0] MASK = WIDTH'(MATCH);

  // AND of the selected bits; unselected bits are forced to 1.
  always_comb begin
    terminal = 1'b1;
    for (int unsigned i = 0; i < WIDTH; i++) begin
      if (MASK[i]) terminal = terminal & count[i];
    end
  end

  initial begin
    assert (MATCH > 0 && MATCH < (1 << WIDTH))
      else $error("reset_decoder: MATCH %0d does not fit in %0d bits", MATCH, WIDTH);
  end

endmodule
