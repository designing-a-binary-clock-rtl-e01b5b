// ripple_counter4: one 4-bit binary ripple counter, the half of a 74HC393.
//
// Four toggle flip-flops in a chain. The first toggles on each HIGH-to-LOW
// transition of cp_n; every later one toggles on the HIGH-to-LOW transition
// of the output before it, so a carry ripples through the chain one stage
// after another instead of all bits changing on one clock edge. mr is an
// asynchronous, active-high master reset that clears all four bits and holds
// them at zero for as long as it is HIGH; it overrides the clock.
//
// Reset dominance: every flip-flop's clock is gated LOW while mr is HIGH.
// Clearing the counter makes some outputs fall, and those outputs clock the
// next flip-flops; in the part these edges arrive while the reset is still
// active and are ignored. Gating the clocks gives the same result in a
// zero-delay model: the gated clocks fall when mr rises (while mr is HIGH,
// so the flip-flops take the reset branch), stay LOW during the reset, and do
// not fall again when mr is released. A falling edge of cp_n while mr is
// HIGH is likewise not counted.
//
// Interface: cp_n (count input, falling edge), mr (clear), q[3:0] (q[0] least
// significant). Timing: q changes after falling edges of cp_n with no delay
// modelled; the ripple shows in simulation as successive delta cycles.
// There is no power-on reset, as on the real part.
//
// The falling-edge clock and the active-high clear follow the part's
// description; the toggle-flip-flop chain is the textbook structure of a
// ripple counter, and the clock gating is this model's way of expressing
// that the reset dominates. Each flip-flop being clocked by the previous
// output is the intended ripple structure, not a clock-domain mistake.
`timescale 1us / 1ns
module ripple_counter4 (
  input  logic       cp_n,
  input  logic       mr,
  output logic [3:0] q
);

  logic [3:0] clk_n;   // clock of each flip-flop, gated by the reset

  assign clk_n = {q[2:0], cp_n} & ~{4{mr}};

  for (genvar i = 0; i < 4; i++) begin : g_bit
    logic t_q;   // the toggle flip-flop of bit i

    always_ff @(negedge clk_n[i] or posedge mr) begin
      if (mr) t_q <= 1'b0;
      else    t_q <= ~t_q;
    end

    assign q[i] = t_q;
  end

endmodule
