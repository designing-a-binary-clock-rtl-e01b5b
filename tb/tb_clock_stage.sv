// tb_clock_stage: self-checking testbench for one field of the clock.
//
// Two free-running stages, a 6-bit modulo-60 one (seconds/minutes) and a
// 5-bit modulo-24 one (hours), each with its reset decoder fed back to its
// reset as in the full clock, ORed with an external clear. The testbench
// counts clock pulses itself and checks after every pulse that the count is
// pulses modulo MODULUS, that the decoder output is LOW again (MODULUS never
// stays on the outputs), and that the carry bit falls exactly once per wrap,
// on the pulse that wraps. Random external clears check the reset path.
`timescale 1us / 1ns
module tb_clock_stage;

  logic       cp60, clr60, cp24, clr24;
  logic       mr60, mr24;
  logic [5:0] count60;
  logic [4:0] count24;
  logic       carry60, carry24, term60, term24;
  int         checks = 0, failures = 0;
  int         exp60, exp24, falls60, falls24, wraps60, wraps24;

  clock_stage #(.WIDTH(6), .MODULUS(60)) dut60 (
    .cp_n(cp60), .mr(mr60), .count(count60), .carry(carry60), .terminal(term60));
  clock_stage #(.WIDTH(5), .MODULUS(24)) dut24 (
    .cp_n(cp24), .mr(mr24), .count(count24), .carry(carry24), .terminal(term24));

  assign mr60 = term60 | clr60;
  assign mr24 = term24 | clr24;

  always @(negedge carry60) falls60++;
  always @(negedge carry24) falls24++;

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d at %0t", what, got, exp, $time);
    end
  endtask

  task automatic tick60();
    cp60 = 1'b1; #10; cp60 = 1'b0; #10;
    exp60++;
    if (exp60 == 60) begin exp60 = 0; wraps60++; end
    check("count mod 60", int'(count60), exp60);
    check("decoder low (60)", int'(term60), 0);
    check("carry = bit 5", int'(carry60), int'(exp60 >= 32));
    check("carry falls once per wrap (60)", falls60, wraps60);
  endtask

  task automatic tick24();
    cp24 = 1'b1; #10; cp24 = 1'b0; #10;
    exp24++;
    if (exp24 == 24) begin exp24 = 0; wraps24++; end
    check("count mod 24", int'(count24), exp24);
    check("decoder low (24)", int'(term24), 0);
    check("carry falls once per wrap (24)", falls24, wraps24);
  endtask

  initial begin : watchdog
    #2000000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cp60 = 1'b0; cp24 = 1'b0; clr60 = 1'b0; clr24 = 1'b0;
    #1 clr60 = 1'b1; clr24 = 1'b1;
    #10 clr60 = 1'b0; clr24 = 1'b0;
    #10;
    exp60 = 0; exp24 = 0; falls60 = 0; falls24 = 0; wraps60 = 0; wraps24 = 0;
    check("count60 after clear", int'(count60), 0);
    check("count24 after clear", int'(count24), 0);

    // Several full cycles of each stage.
    repeat (250) tick60();
    repeat (100) tick24();

    // Random clears in between pulses.
    repeat (400) begin
      if ($urandom_range(0, 29) == 0) begin
        clr60 = 1'b1; #5;
        check("count60 held clear", int'(count60), 0);
        // A clock pulse during the clear does not count.
        cp60 = 1'b1; #5; cp60 = 1'b0; #5;
        check("count60 still clear", int'(count60), 0);
        clr60 = 1'b0; #5;
        if (exp60 >= 32) wraps60++;  // clearing from 32 or more drops the carry
        exp60 = 0;
      end
      tick60();
      if ($urandom_range(0, 29) == 0) begin
        clr24 = 1'b1; #5; clr24 = 1'b0; #5;
        if (exp24 >= 16) wraps24++;
        exp24 = 0;
        check("count24 cleared", int'(count24), 0);
      end
      tick24();
    end

    check("60-stage wrapped", int'(wraps60 > 4), 1);
    check("24-stage wrapped", int'(wraps24 > 4), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
