`timescale 1ps/1fs
// smu_input_clamp: behavioural model of the input clamping circuit of one
// spike modulation unit row (an analog transistor circuit, not synthesizable).
//
// While Event_flag_i is high the row line V_in is pulled to V_in,clamp; while
// it is low (Event_flag_i-bar high) V_in sits at V_clamp, the same voltage the
// column clamps hold RBL[1] at, so no current flows through the row's cells.
// The cells therefore see V_read = V_clamp - V_in,clamp only during the event.
//
// Interface: event_flag, event_flag_n from the event flip-flop; v_in, the row
// voltage in volts. Timing: ideal, v_in follows the flag in zero time.
// The two clamp voltages are the published ones; settling and the bias
// transistors are not modelled.
module smu_input_clamp #(
  parameter real V_IN_CLAMP = cim_pkg::V_IN_CLAMP,
  parameter real V_CLAMP    = cim_pkg::V_CLAMP
) (
  input  logic event_flag,
  input  logic event_flag_n,
  output real  v_in
);
  // N1 (gate Event_flag_i) pulls to V_in,clamp; N2 (gate Event_flag_i-bar)
  // pulls to V_clamp. Should both gates agree, event_flag decides.
  always_comb begin
    if (event_flag)        v_in = V_IN_CLAMP;
    else if (event_flag_n) v_in = V_CLAMP;
    else                   v_in = V_CLAMP;
  end
endmodule
