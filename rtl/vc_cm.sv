`timescale 1ps/1fs
// vc_cm: behavioural model of one column's voltage clamp and current mirror
// with the result capacitor C_rt (analog, not synthesizable).
//
// The clamp holds the column line RBL[1] at V_clamp, so every active cell of
// the column sees exactly V_read. The column current is mirrored, scaled by
// K_MIRROR, into C_rt while the global Event_flag is high. Charging a
// capacitor from a mirror instead of straight from the bit line keeps the
// cell voltages fixed and the charge linear in time:
//   V_charge = (K_MIRROR / C_RT) * integral(i_bl dt) over Event_flag high.
//
// The integral is evaluated event by event: on every change of i_bl,
// event_flag or reset the charge of the interval that just ended (previous
// current times elapsed time) is added. v_charge is therefore exact at each
// event and constant in between; since the current is piecewise constant
// (it changes only when a row event starts or ends) nothing is lost. After
// Event_flag falls, v_charge holds the final result.
//
// Interface: reset (discharges C_rt, active high), event_flag, i_bl (amps) in;
// v_rbl1 (volts), v_charge (volts) out.
// V_clamp and C_rt are published values; K_MIRROR = 1, discharge by the macro
// reset and the ideal, unclipped mirror are this design's choices.
module vc_cm #(
  parameter real V_CLAMP  = cim_pkg::V_CLAMP,
  parameter real K_MIRROR = cim_pkg::K_MIRROR,
  parameter real C_RT     = cim_pkg::C_RT
) (
  input  logic reset,
  input  logic event_flag,
  input  real  i_bl,
  output real  v_rbl1,
  output real  v_charge
);
  real  i_prev;      // mirrored current since t_prev
  real  t_prev;      // time of the last event, ps
  logic on_prev;     // charging enabled since t_prev

  initial begin
    v_charge = 0.0;
    i_prev   = 0.0;
    t_prev   = 0.0;
    on_prev  = 1'b0;
  end

  assign v_rbl1 = V_CLAMP;

  always @(i_bl or event_flag or reset) begin
    if (on_prev)
      v_charge = v_charge + K_MIRROR * i_prev * ($realtime - t_prev) * cim_pkg::PS / C_RT;
    if (reset) v_charge = 0.0;
    i_prev  = i_bl;
    t_prev  = $realtime;
    on_prev = event_flag && !reset;
  end
endmodule
