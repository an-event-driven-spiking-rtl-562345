`timescale 1ps/1fs
// ctrl_unit: global event flag of the macro.
//
// ORs every row's Event_flag_i into one Event_flag, which is high from the
// first input spike of an operation until the last row's event has ended.
// Event_flag gates the charging of the result capacitors; its complement
// starts the reference ramp and, on its rising edge, fires the first output
// spike of every column. No clock is involved: the macro's only control signal
// is derived from the input events themselves.
//
// Interface: event_flag_i[N_ROWS-1:0] in; event_flag, event_flag_n out.
// Timing: combinational.
// The OR aggregation is the published one; placing it in the Ctrl Unit and
// giving the unit nothing else to do is this design's reading of the block
// diagram.
module ctrl_unit #(
  parameter int N_ROWS = cim_pkg::N_ROWS
) (
  input  logic [N_ROWS-1:0] event_flag_i,
  output logic              event_flag,
  output logic              event_flag_n
);
  assign event_flag   = |event_flag_i;
  assign event_flag_n = ~event_flag;
endmodule
