`timescale 1ps/1fs
// spike_generator: behavioural model of the edge-to-spike circuit
// (a gate with a delay, which synthesis cannot preserve).
//
// The input and a delayed, inverted copy of it feed an AND gate: after a
// rising input edge both AND inputs are high until the inverter's output
// catches up, PW_PS later, so every rising edge produces one spike of width
// PW_PS (or the input's own width if shorter). Falling edges produce nothing.
//
// Interface: trig in, spike out. Timing: the spike starts with the rising
// edge of trig and lasts PW_PS picoseconds.
// Inverter plus AND is the published structure; the 50 ps delay is this
// design's choice. The delayed copy starts high so that no spike appears at
// power-up; input edges in the first two delays after power-up may be lost.
module spike_generator #(
  parameter real PW_PS = cim_pkg::SPIKE_PW_PS
) (
  input  logic trig,
  output logic spike
);
  logic trig_dly;

  logic settled;  // low for one delay after power-up

  // Power-up: the delayed copy starts high (no spike) and, once `settled`
  // rises, follows the input one delay later like every later input change.
  initial begin
    settled  = 1'b0;
    trig_dly = 1'b1;
    #(PW_PS);
    settled  = 1'b1;
  end

  always @(trig or settled) trig_dly <= #(PW_PS) trig;

  assign spike = trig & ~trig_dly;
endmodule
