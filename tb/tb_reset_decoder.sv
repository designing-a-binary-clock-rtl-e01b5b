// tb_reset_decoder: exhaustive check of the terminal-count decoders.
//
// Instantiates the seconds/minutes decoder (6 bits, 60) and the hours
// decoder (5 bits, 24) and applies every input value. The expected output
// is worked out from the counting order instead of from the gate list: the
// values with bits 32, 16, 8 and 4 all set are exactly 60..63, and those
// with 16 and 8 set are exactly 24..31, so terminal must equal
// (count >= MATCH).
`timescale 1us / 1ns
module tb_reset_decoder;

  logic [5:0] count60;
  logic [4:0] count24;
  logic       term60, term24;
  int         checks = 0, failures = 0;

  reset_decoder #(.WIDTH(6), .MATCH(60)) dut60 (.count(count60), .terminal(term60));
  reset_decoder #(.WIDTH(5), .MATCH(24)) dut24 (.count(count24), .terminal(term24));

  initial begin : watchdog
    #10000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 64; v++) begin
      count60 = 6'(v);
      #1;
      checks++;
      if (term60 !== (v >= 60)) begin
        failures++;
        $display("FAIL 60-decoder at %0d: got %0b", v, term60);
      end
    end
    for (int v = 0; v < 32; v++) begin
      count24 = 5'(v);
      #1;
      checks++;
      if (term24 !== (v >= 24)) begin
        failures++;
        $display("FAIL 24-decoder at %0d: got %0b", v, term24);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
