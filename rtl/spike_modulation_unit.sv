`timescale 1ps/1fs
// spike_modulation_unit: one row of the spike modulation unit (SMU).
//
// Converts a dual-spike input into a fixed read voltage lasting as long as the
// interval between the two spikes. It is the event flip-flop (toggled by each
// input spike) driving the input clamp (V_in = V_in,clamp during the event,
// V_clamp otherwise). Event_flag_i also leaves the row for the Ctrl Unit.
//
// Interface: in_spike (In_i), reset, event_flag (Event_flag_i), v_in (volts).
// Timing: the read voltage starts at the first spike's rising edge and ends at
// the second's. Behavioural because v_in is an analog quantity; the flip-flop
// inside is synthesizable. The two-part structure is the published one.
module spike_modulation_unit (
  input  logic in_spike,
  input  logic reset,
  output logic event_flag,
  output real  v_in
);
  logic event_flag_n;

  smu_event_dff u_dff (
    .in_spike     (in_spike),
    .reset        (reset),
    .event_flag   (event_flag),
    .event_flag_n (event_flag_n)
  );

  smu_input_clamp u_clamp (
    .event_flag   (event_flag),
    .event_flag_n (event_flag_n),
    .v_in         (v_in)
  );
endmodule
