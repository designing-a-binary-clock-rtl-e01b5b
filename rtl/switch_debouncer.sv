// switch_debouncer: behavioural model (not synthesizable) of the RC filter
// and 74HC14 inverting Schmitt trigger that clean up one set push button.
//
// Circuit: VCC - R_PULLUP - node A - R_SERIES - node B, with C from node B to
// ground and node B driving the Schmitt inverter. The push button shorts
// node A to ground. Closing it discharges C through R_SERIES (time constant
// R_SERIES*C, 4.7 ms); opening it recharges C through both resistors
// (5.17 ms). The inverter output rises when the capacitor voltage falls
// below VT_NEG and falls when it rises above VT_POS. Contact bounce that is
// short against these time constants only nudges the capacitor voltage and
// never reaches the opposite threshold, so one press gives one clean HIGH
// level on set_out.
//
// Model: event-driven and exact for an ideal RC. On every change of the
// contact the present capacitor voltage is computed from the exponential of
// the segment that just ended, the new target (0 V or VCC) and time constant
// are taken, and, if the output is due to change, the threshold crossing
// time tau*ln((v0 - target)/(vt - target)) is scheduled. A later contact
// change cancels a pending crossing. Time unit: 1 us.
//
// Interface: contact_closed (1 while the button contacts touch, bouncing
// included); set_out (HIGH while the button is considered pressed). Timing
// with the defaults: a clean press shows on set_out after about 5.4 ms, a
// clean release after about 3.8 ms.
//
// Component values (4K7, 47K, 100 nF, 5 V) and the topology come from the
// original schematic. The thresholds are typical 74HC14 values at 5 V chosen
// by this model; the capacitor starts charged (button open, output LOW).
`timescale 1us / 1ns
module switch_debouncer #(
  parameter real R_PULLUP_OHM = 4700.0,
  parameter real R_SERIES_OHM = 47000.0,
  parameter real C_FARAD      = 100.0e-9,
  parameter real VCC          = 5.0,
  parameter real VT_POS       = 2.6,
  parameter real VT_NEG       = 1.6
) (
  input  logic contact_closed,
  output logic set_out
);

  localparam real TAU_DISCHARGE_US = R_SERIES_OHM * C_FARAD * 1.0e6;
  localparam real TAU_CHARGE_US    = (R_PULLUP_OHM + R_SERIES_OHM) * C_FARAD * 1.0e6;

  // State of the RC segment currently running.
  real         seg_v0;      // capacitor voltage at the start of the segment
  real         seg_target;  // voltage the capacitor is heading for
  real         seg_tau;     // time constant of the segment, us
  realtime     seg_t0;      // start time of the segment
  int unsigned seg_id;      // bumped on every contact change

  function automatic real cap_voltage(realtime now);
    return seg_target + (seg_v0 - seg_target) * $exp(-(now - seg_t0) / seg_tau);
  endfunction

  initial begin
    seg_v0     = VCC;
    seg_target = VCC;
    seg_tau    = TAU_CHARGE_US;
    seg_t0     = 0.0;
    seg_id     = 0;
    set_out    = 1'b0;
  end

  always @(contact_closed) begin
    real     v_now;
    real     vt;
    realtime delay_us;
    bit      due;

    v_now      = cap_voltage($realtime);
    seg_v0     = v_now;
    seg_t0     = $realtime;
    seg_target = contact_closed ? 0.0 : VCC;
    seg_tau    = contact_closed ? TAU_DISCHARGE_US : TAU_CHARGE_US;
    seg_id     = seg_id + 1;

    // The output only changes if the capacitor heads for the threshold
    // opposite to the present output state.
    vt  = contact_closed ? VT_NEG : VT_POS;
    due = contact_closed ? !set_out : set_out;
    if (due) begin
      if (contact_closed ? (v_now <= vt) : (v_now >= vt)) delay_us = 0.0;
      else delay_us = seg_tau * $ln((v_now - seg_target) / (vt - seg_target));
      fork
        begin : crossing
          automatic int unsigned my_id  = seg_id;
          automatic logic        my_out = contact_closed;
          #(delay_us);
          if (my_id == seg_id) set_out = my_out;
        end
      join_none
    end
  end

endmodule
