// tb_set_steering: truth-table check of the set button's diode ORs.
//
// Applies all eight input combinations and checks that the clock of the
// field being set is HIGH when the button or the carry is HIGH, and that the
// reset of the field below is HIGH when the button or its decoder is HIGH.
`timescale 1us / 1ns
module tb_set_steering;

  logic set_btn, carry_in, prev_terminal, next_clk, prev_mr;
  int   checks = 0, failures = 0;

  set_steering dut (.set_btn, .carry_in, .prev_terminal, .next_clk, .prev_mr);

  initial begin : watchdog
    #10000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 8; v++) begin
      {set_btn, carry_in, prev_terminal} = 3'(v);
      #1;
      checks += 2;
      if (next_clk !== (v >= 4 || v == 2 || v == 3)) begin
        failures++;
        $display("FAIL next_clk for set=%0b carry=%0b term=%0b", set_btn, carry_in, prev_terminal);
      end
      if (prev_mr !== (v >= 4 || v == 1 || v == 3)) begin
        failures++;
        $display("FAIL prev_mr for set=%0b carry=%0b term=%0b", set_btn, carry_in, prev_terminal);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
