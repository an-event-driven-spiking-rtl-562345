`timescale 1ps/1fs
// comparator_block: behavioural model of one column's reference ramp and
// comparator (analog, not synthesizable).
//
// A reference capacitor C_com is held empty while Event_flag is high. When
// Event_flag falls (all input events of the operation are over) it starts
// charging at the constant current I_COM, so V_com = I_COM * t / C_COM. The
// comparator output rises when V_com reaches V_charge, i.e.
//   t_cross = V_charge * C_COM / I_COM  after the fall of Event_flag.
// The crossing is computed in closed form and scheduled; if V_charge changes
// after the ramp has started the crossing is recomputed.
// cmp_out stays high until the next rising edge of Event_flag or reset, which
// also discharge C_com. After reset the ramp waits for a falling Event_flag,
// so an idle macro never fires.
//
// Interface: reset (active high), event_flag, v_charge (volts) in; cmp_out
// out. C_com is the published value; I_COM = 5 uA and the ideal comparator
// (no offset, no delay) are this design's choices.
module comparator_block #(
  parameter real C_COM = cim_pkg::C_COM,
  parameter real I_COM = cim_pkg::I_COM
) (
  input  logic reset,
  input  logic event_flag,
  input  real  v_charge,
  output logic cmp_out
);
  logic        ramp_on;  // C_com charging
  real         t_start;  // start of the ramp, ps
  int unsigned gen;      // bumps on every reschedule, cancels stale crossings

  initial begin
    ramp_on = 1'b0;
    cmp_out = 1'b0;
    t_start = 0.0;
    gen     = 0;
  end

  always @(posedge event_flag or posedge reset) begin
    ramp_on = 1'b0;
    cmp_out = 1'b0;
  end

  always @(negedge event_flag) begin
    if (!reset) begin
      t_start = $realtime;
      ramp_on = 1'b1;
    end
  end

  always @(v_charge or ramp_on) begin
    gen = gen + 1;
    if (ramp_on) begin
      automatic int unsigned my_gen = gen;
      automatic real t_cross = t_start + v_charge * C_COM / I_COM / cim_pkg::PS;
      automatic real wait_ps = (t_cross > $realtime) ? t_cross - $realtime : 0.0;
      fork
        begin
          #(wait_ps);
          if (my_gen == gen && ramp_on) cmp_out = 1'b1;
        end
      join_none
    end
  end
endmodule
