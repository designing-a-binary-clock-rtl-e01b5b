// binary_clock_pkg: constants shared by the binary clock.
//
// The clock keeps 24-hour time as three plain binary fields. Seconds and
// minutes are 6-bit fields cleared when they reach 60; hours is a 5-bit field
// cleared when it reaches 24. These widths and terminal counts are those of
// the original breadboard design. Each field is held in one 74HC393 (two
// 4-bit ripple counters cascaded to 8 bits), so COUNTER_BITS is 8.
`timescale 1us / 1ns
package binary_clock_pkg;

  localparam int unsigned COUNTER_BITS = 8;

  localparam int unsigned SEC_BITS    = 6;
  localparam int unsigned SEC_MODULUS = 60;
  localparam int unsigned MIN_BITS    = 6;
  localparam int unsigned MIN_MODULUS = 60;
  localparam int unsigned HR_BITS     = 5;
  localparam int unsigned HR_MODULUS  = 24;

endpackage
