// tb_binary_clock: end-to-end test of the binary clock over more than a day.
//
// A 1 Hz square wave (HIGH for the first half of each second) drives the
// clock; two tasks press the SET HRS and SET MINS buttons the way a person
// would, with contact bounce on closing and opening. The testbench keeps its
// own hours/minutes/seconds model, advanced on every falling edge of the
// 1 Hz input and by every press, and compares all 17 LED outputs with it
// once per second, 300 ms after the rising edge (the fields change only on
// falling edges). Presses are made early in the HIGH half of a second so
// that they do not overlap a counting edge.
//
// Sequence: after power-up the fields must already be in range; the time is
// then set to 23:59 with the buttons, the clock runs through midnight and
// then through a full day (86 400 s) checked every second; finally the
// special cases of setting are exercised. Each mechanism is counted and a
// mechanism that never occurred is a failure:
//   seconds carry (59 -> 0 advancing minutes), minutes carry (advancing
//   hours), midnight (23:59:59 -> 00:00:00), SET HRS press, SET MINS press,
//   SET pressed while the field below is primed (its "32" bit HIGH), SET MINS
//   taking minutes past 59 (advancing hours), a bouncing press giving exactly
//   one step, a contact glitch rejected.
// The day run also checks the worked example of the original write-up: at
// 11:45:38 the lit LEDs are hours 8,2,1, minutes 32,8,4,1 and seconds
// 32,4,2, written below as bit patterns rather than numbers.
`timescale 1us / 1ns
module tb_binary_clock;

  import binary_clock_pkg::*;

  logic                clk_1hz;
  logic                set_hrs_contact, set_mins_contact;
  logic [HR_BITS-1:0]  hrs;
  logic [MIN_BITS-1:0] mins;
  logic [SEC_BITS-1:0] secs;

  int checks = 0, failures = 0;
  int h, m, s;                      // reference time
  int n_sec_carry = 0, n_min_carry = 0, n_midnight = 0;
  int n_set_hrs = 0, n_set_mins = 0, n_primed_hrs = 0, n_primed_mins = 0;
  int n_set_mins_wrap = 0, n_bounce_ok = 0, n_glitch_ok = 0, n_example = 0;
  bit model_ready = 0;

  binary_clock dut (
    .clk_1hz, .set_hrs_contact, .set_mins_contact, .hrs, .mins, .secs
  );

  // 1 Hz input: rising edges at whole seconds, falling edges half-way.
  initial begin
    clk_1hz = 1'b1;
    forever begin
      #500000 clk_1hz = 1'b0;
      #500000 clk_1hz = 1'b1;
    end
  end

  // Reference model: count on each falling edge of the 1 Hz input.
  always @(negedge clk_1hz) begin
    if (model_ready) begin
      s++;
      if (s == 60) begin
        s = 0; m++; n_sec_carry++;
        if (m == 60) begin
          m = 0; h++; n_min_carry++;
          if (h == 24) begin h = 0; n_midnight++; end
        end
      end
    end
  end

  initial begin : watchdog
    #90000000000.0;    // 90 000 s
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_time(input string when);
    checks++;
    if (int'(hrs) != h || int'(mins) != m || int'(secs) != s) begin
      failures++;
      if (failures < 20)
        $display("FAIL %s: shows %0d:%0d:%0d expected %0d:%0d:%0d at %0t",
                 when, hrs, mins, secs, h, m, s, $time);
    end
  endtask

  task automatic count_check(input string what, input bit ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // Wait for the next whole second plus offset_us.
  task automatic to_next_second(input int offset_us);
    @(posedge clk_1hz);
    #(offset_us);
  endtask

  // One press of a button: bouncing close, hold, bouncing open, settle.
  // Takes about 75 ms. which: 0 = SET HRS, 1 = SET MINS.
  task automatic press(input int which);
    for (int b = 0; b < 4; b++) begin
      if (which == 0) set_hrs_contact = 1'b1; else set_mins_contact = 1'b1;
      #(150 + 50 * b);
      if (which == 0) set_hrs_contact = 1'b0; else set_mins_contact = 1'b0;
      #150;
    end
    if (which == 0) set_hrs_contact = 1'b1; else set_mins_contact = 1'b1;
    #50000;
    for (int b = 0; b < 3; b++) begin
      if (which == 0) set_hrs_contact = 1'b0; else set_mins_contact = 1'b0;
      #200;
      if (which == 0) set_hrs_contact = 1'b1; else set_mins_contact = 1'b1;
      #100;
    end
    if (which == 0) set_hrs_contact = 1'b0; else set_mins_contact = 1'b0;
    #20000;
  endtask

  // Press a button at the start of a second and update the model.
  task automatic set_press(input int which);
    int h0, m0;
    to_next_second(20000);
    h0 = h; m0 = m;
    press(which);
    if (which == 0) begin
      n_set_hrs++;
      if (m >= 32) n_primed_hrs++;
      m = 0;
      h = (h + 1) % 24;
    end else begin
      n_set_mins++;
      if (s >= 32) n_primed_mins++;
      s = 0;
      m++;
      if (m == 60) begin m = 0; h = (h + 1) % 24; n_set_mins_wrap++; end
    end
    #(300000 - 20000 - 80000);
    check_time(which == 0 ? "after SET HRS" : "after SET MINS");
    // Exactly one step despite the bounce on both edges of the press.
    if (int'(hrs) == h && int'(mins) == m) n_bounce_ok++;
    if (h0 == h && m0 == m) $display("note: press changed nothing");
  endtask

  initial begin
    set_hrs_contact  = 1'b0;
    set_mins_contact = 1'b0;

    // Power-up: every field in range (a field at or above its terminal count
    // clears itself), then take the unknown starting time into the model.
    #300000;
    count_check("hours in range after power-up",   int'(hrs)  < 24);
    count_check("minutes in range after power-up", int'(mins) < 60);
    count_check("seconds in range after power-up", int'(secs) < 60);
    h = int'(hrs); m = int'(mins); s = int'(secs);
    model_ready = 1;

    // Set the clock to 23:59 with the buttons.
    set_press(0);                       // also zeroes the minutes
    while (h != 23) set_press(0);
    set_press(1);                       // also zeroes the seconds
    while (m != 59) set_press(1);

    // SET MINS while the seconds are primed (32 or more).
    if (n_primed_mins == 0) begin
      while (s < 33) begin to_next_second(300000); check_time("running"); end
      set_press(1);                     // 23:59 -> 00:00 through the hours carry
    end

    // Run through a full day, checking every second.
    repeat (86400 + 70) begin
      to_next_second(300000);
      check_time("running");
      if (h == 11 && m == 45 && s == 38) begin
        n_example++;
        checks++;
        if (hrs !== 5'b01011 || mins !== 6'b101101 || secs !== 6'b100110) begin
          failures++;
          $display("FAIL 11:45:38 LED pattern: %b %b %b", hrs, mins, secs);
        end
      end
    end

    // SET HRS while the minutes are primed.
    while (m < 33) begin to_next_second(300000); check_time("running"); end
    set_press(0);

    // SET MINS at 59 minutes advances the hours.
    if (n_set_mins_wrap == 0) begin
      while (m != 59) set_press(1);
      set_press(1);
    end

    // A 200 us contact glitch on each button must not change anything.
    for (int which = 0; which < 2; which++) begin
      to_next_second(20000);
      if (which == 0) set_hrs_contact = 1'b1; else set_mins_contact = 1'b1;
      #200;
      set_hrs_contact = 1'b0; set_mins_contact = 1'b0;
      #280000;
      check_time("after contact glitch");
      if (int'(hrs) == h && int'(mins) == m && int'(secs) == s) n_glitch_ok++;
    end

    $display("mechanisms: sec_carry=%0d min_carry=%0d midnight=%0d set_hrs=%0d set_mins=%0d",
             n_sec_carry, n_min_carry, n_midnight, n_set_hrs, n_set_mins);
    $display("            primed_hrs=%0d primed_mins=%0d set_mins_wrap=%0d bounce_ok=%0d glitch_ok=%0d example=%0d",
             n_primed_hrs, n_primed_mins, n_set_mins_wrap, n_bounce_ok, n_glitch_ok, n_example);
    count_check("seconds carry seen",            n_sec_carry > 0);
    count_check("minutes carry seen",            n_min_carry > 0);
    count_check("midnight rollover seen",        n_midnight > 0);
    count_check("SET HRS seen",                  n_set_hrs > 0);
    count_check("SET MINS seen",                 n_set_mins > 0);
    count_check("SET HRS while primed seen",     n_primed_hrs > 0);
    count_check("SET MINS while primed seen",    n_primed_mins > 0);
    count_check("SET MINS past 59 seen",         n_set_mins_wrap > 0);
    count_check("bouncing presses step once",    n_bounce_ok == n_set_hrs + n_set_mins);
    count_check("contact glitches rejected",     n_glitch_ok == 2);
    count_check("11:45:38 example seen",         n_example == 1);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
