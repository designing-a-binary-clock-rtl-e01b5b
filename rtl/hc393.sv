// hc393: dual 4-bit binary ripple counter (74HC393).
//
// Two independent ripple counters in one package, each with its own
// falling-edge clock and its own asynchronous active-high master reset.
// Port names follow the pinout: counter 1 is 1CP (pin 1), 1MR (pin 2),
// 1Q0..1Q3 (pins 3..6); counter 2 is 2CP (pin 13), 2MR (pin 12), 2Q0..2Q3
// (pins 11..8). Cascading the two into one 8-bit counter is done outside,
// by wiring q2[3] to cp1_n, as the clock stages do.
//
// Timing: a count is taken on every HIGH-to-LOW transition of a clock input
// while its reset is LOW; while a reset is HIGH its four outputs are LOW.
`timescale 1us / 1ns
module hc393 (
  input  logic       cp1_n,
  input  logic       mr1,
  output logic [3:0] q1,
  input  logic       cp2_n,
  input  logic       mr2,
  output logic [3:0] q2
);

  ripple_counter4 u_counter1 (.cp_n(cp1_n), .mr(mr1), .q(q1));
  ripple_counter4 u_counter2 (.cp_n(cp2_n), .mr(mr2), .q(q2));

endmodule
