`timescale 1ps/1fs
// output_spike_generator: one column of the output spike generator (OSG).
//
// Turns the column's MVM current into a pair of output spikes whose interval
// T_out is proportional to the column's result:
//  - vc_cm clamps the column line and integrates the mirrored column current
//    on C_rt while Event_flag is high;
//  - when Event_flag falls, Event_flag-bar rises and the first spike
//    generator fires the first output spike; at the same moment the reference
//    ramp on C_com starts;
//  - when V_com reaches V_charge the comparator output rises and the second
//    spike generator fires the second output spike.
// Both spikes leave on the column's one output line, like the input pairs:
//   T_out = (C_COM / C_RT) * K_MIRROR * V_READ * sum_i T_in,i * G_i / I_COM.
//
// Interface: reset, event_flag, event_flag_n, i_bl (amps) in; v_rbl1 (volts)
// to the crossbar, spike_out out. The three-part structure and the two
// trigger points are the published ones; merging the two spikes with an OR is
// this design's choice. If T_out is shorter than a spike width the pair merges
// into one wider pulse.
module output_spike_generator (
  input  logic reset,
  input  logic event_flag,
  input  logic event_flag_n,
  input  real  i_bl,
  output real  v_rbl1,
  output logic spike_out
);
  real  v_charge;
  logic cmp_out;
  logic spike_first, spike_second;

  vc_cm u_vccm (
    .reset      (reset),
    .event_flag (event_flag),
    .i_bl       (i_bl),
    .v_rbl1     (v_rbl1),
    .v_charge   (v_charge)
  );

  comparator_block u_cmp (
    .reset      (reset),
    .event_flag (event_flag),
    .v_charge   (v_charge),
    .cmp_out    (cmp_out)
  );

  spike_generator u_sg_first  (.trig(event_flag_n), .spike(spike_first));
  spike_generator u_sg_second (.trig(cmp_out),      .spike(spike_second));

  assign spike_out = spike_first | spike_second;
endmodule
