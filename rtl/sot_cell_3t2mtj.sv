`timescale 1ps/1fs
// sot_cell_3t2mtj: behavioural read model of one 3T-2MTJ SOT-MRAM cell
// (a magnetic device, not synthesizable).
//
// In a read all three transistors are off and the cell is the two MTJs J1 and
// J2 in series between RBL[0] (the row input line) and RBL[1] (the column
// readout line). J2 is built with twice the resistance of J1, so the four
// combinations of the two magnetic states give four distinct series
// resistances and the cell stores two bits:
//   J1 = R_LRS or R_LRS*(1+TMR),  J2 = J2_RATIO times that.
// With 1 MOhm and 100 % TMR: code 00 -> 6 MOhm, 01 -> 5, 10 -> 4, 11 -> 3.
// The resistance values and the 2:1 ratio are the published ones; the bit
// assignment (bit 0 = J1, 1 = low resistance) is this design's choice.
//
// Interface: state, v_rbl0, v_rbl1 in; i_cell (amps, from RBL[1] into RBL[0])
// out. Timing: instantaneous, ideal ohmic devices.
module sot_cell_3t2mtj #(
  parameter real R_LRS    = cim_pkg::R_LRS,
  parameter real TMR      = cim_pkg::TMR,
  parameter real J2_RATIO = cim_pkg::J2_RATIO
) (
  input  cim_pkg::weight_t state,
  input  real              v_rbl0,
  input  real              v_rbl1,
  output real              i_cell
);
  real r_j1, r_j2, g_cell;

  always_comb begin
    r_j1   = state[0] ? R_LRS : R_LRS * (1.0 + TMR);
    r_j2   = J2_RATIO * (state[1] ? R_LRS : R_LRS * (1.0 + TMR));
    g_cell = 1.0 / (r_j1 + r_j2);
    i_cell = (v_rbl1 - v_rbl0) * g_cell;
  end
endmodule
