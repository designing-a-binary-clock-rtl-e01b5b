// tb_hc393: self-checking testbench for the dual 4-bit ripple counter.
//
// Drives the two counters with independent random pulse trains and random
// resets, and compares each 4-bit output with a count kept by the testbench
// (falling edges since the last reset, modulo 16). Also checks that a
// rising clock edge does not count, that a reset held HIGH blocks counting,
// and that each counter ignores the other's clock and reset.
`timescale 1us / 1ns
module tb_hc393;

  logic       cp1_n, mr1, cp2_n, mr2;
  logic [3:0] q1, q2;
  int         checks = 0, failures = 0;
  int unsigned exp1, exp2;

  hc393 dut (.cp1_n, .mr1, .q1, .cp2_n, .mr2, .q2);

  task automatic check(input string what, input logic [3:0] got, input int unsigned exp);
    checks++;
    if (got !== 4'(exp)) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d at %0t", what, got, exp, $time);
    end
  endtask

  // One clock pulse on counter 1 or 2: HIGH then LOW.
  task automatic pulse(input int which);
    if (which == 1) begin cp1_n = 1'b1; #1; check("q1 after rising edge", q1, exp1);
                          cp1_n = 1'b0; #1; if (!mr1) exp1 = (exp1 + 1) % 16; end
    else            begin cp2_n = 1'b1; #1; check("q2 after rising edge", q2, exp2);
                          cp2_n = 1'b0; #1; if (!mr2) exp2 = (exp2 + 1) % 16; end
    check("q1", q1, exp1);
    check("q2", q2, exp2);
  endtask

  initial begin : watchdog
    #100000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cp1_n = 1'b0; cp2_n = 1'b0;
    mr1 = 1'b0; mr2 = 1'b0;
    #1 mr1 = 1'b1; mr2 = 1'b1;
    #1 mr1 = 1'b0; mr2 = 1'b0;
    exp1 = 0; exp2 = 0;
    #1 check("q1 after reset", q1, 0);
    check("q2 after reset", q2, 0);

    // Full wrap of each counter, one at a time.
    repeat (20) pulse(1);
    repeat (37) pulse(2);

    // Reset held: clock pulses must not count.
    mr2 = 1'b1; #1; exp2 = 0;
    check("q2 held in reset", q2, 0);
    repeat (3) pulse(2);
    mr2 = 1'b0; #1;

    // Random mix of pulses and resets on both counters.
    repeat (2000) begin
      int r;
      r = int'($urandom_range(0, 19));
      if (r < 9) pulse(1);
      else if (r < 18) pulse(2);
      else if (r == 18) begin mr1 = 1'b1; #1; exp1 = 0; check("q1 reset", q1, 0); check("q2 kept", q2, exp2); mr1 = 1'b0; #1; end
      else begin mr2 = 1'b1; #1; exp2 = 0; check("q2 reset", q2, 0); check("q1 kept", q1, exp1); mr2 = 1'b0; #1; end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
