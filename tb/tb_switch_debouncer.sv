// tb_switch_debouncer: checks the button conditioning model.
//
// Expected times are computed here from the RC values independently of the
// model's bookkeeping: with the default parts a clean press gives
// t = 47k*100n*ln(5/1.6) = 5.355 ms to the output's rise, a clean release
// t = 51.7k*100n*ln(5/2.4) = 3.795 ms to its fall. The test checks:
//   - the output rises once, within +-50 us of that time, after a press
//     that first bounces for 1 ms (the bounce only delays the rise by the
//     time the contact spent open; the window is taken from the last close);
//   - bounces on release do not make it rise again;
//   - short glitches (200 us closed) while released never reach the output;
//   - a 2 ms tap (shorter than the press delay) gives no output;
//   - the number of output rises equals the number of real presses.
`timescale 1us / 1ns
module tb_switch_debouncer;

  logic contact, set_out;
  int   checks = 0, failures = 0, rises = 0, presses = 0;
  realtime t_rise, t_fall;

  localparam real T_PRESS_US   = 47000.0 * 100.0e-9 * 1.0e6 * 1.1394343;   // ln(5/1.6)
  localparam real T_RELEASE_US = 51700.0 * 100.0e-9 * 1.0e6 * 0.7339692;   // ln(5/2.4)

  switch_debouncer dut (.contact_closed(contact), .set_out(set_out));

  always @(posedge set_out) begin rises++; t_rise = $realtime; end
  always @(negedge set_out) t_fall = $realtime;

  task automatic check(input string what, input bit ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $realtime);
    end
  endtask

  initial begin : watchdog
    #10000000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    realtime t_close;
    contact = 1'b0;
    #100000;
    check("idle output LOW", set_out == 1'b0);

    for (int n = 0; n < 6; n++) begin
      // Short glitches while released: never reach the output.
      repeat (3) begin
        contact = 1'b1; #200; contact = 1'b0; #20000;
        check("glitch rejected", set_out == 1'b0);
      end
      // A tap shorter than the press delay.
      contact = 1'b1; #2000; contact = 1'b0; #30000;
      check("short tap rejected", set_out == 1'b0 && rises == presses);

      // Clean press.
      contact = 1'b1; t_close = $realtime;
      #20000;
      presses++;
      check("clean press rises once", rises == presses && set_out == 1'b1);
      check("clean press delay", t_rise - t_close > T_PRESS_US - 50.0 &&
                                 t_rise - t_close < T_PRESS_US + 50.0);
      // Release bouncing: 5 bounces of 100 us within the first 1 ms.
      contact = 1'b0;
      repeat (5) begin #100; contact = 1'b1; #100; contact = 1'b0; end
      #20000;
      check("release without extra pulse", set_out == 1'b0 && rises == presses);

      // Press with 1 ms of bounce: contacts close for 100 us, open 100 us.
      repeat (5) begin contact = 1'b1; #100; contact = 1'b0; #100; end
      contact = 1'b1; t_close = $realtime;
      #30000;
      presses++;
      check("bouncing press rises once", rises == presses && set_out == 1'b1);
      check("bouncing press shortens delay only by charge already lost",
            t_rise - t_close > 0.5 * T_PRESS_US && t_rise - t_close < T_PRESS_US + 50.0);
      contact = 1'b0;
      #30000;
      check("release delay", t_fall - ($realtime - 30000.0) > T_RELEASE_US - 50.0 &&
                             t_fall - ($realtime - 30000.0) < T_RELEASE_US + 50.0);
      check("output LOW after release", set_out == 1'b0);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
