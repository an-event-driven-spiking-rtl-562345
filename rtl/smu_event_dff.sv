`timescale 1ps/1fs
// smu_event_dff: the event flip-flop of one spike modulation unit row.
//
// The input spike line In_i clocks a D flip-flop whose D input is its own
// output inverted, so the flop toggles on every input spike. A dual-spike
// input therefore raises Event_flag_i on the first spike and drops it on the
// second: Event_flag_i is high for exactly the inter-spike interval that
// encodes the input value. There is no clock; the spike itself is the clock.
//
// Interface: in_spike (In_i, rising edge active), reset (asynchronous, active
// high, clears the flag), event_flag / event_flag_n (both polarities, as the
// flop's Q and Q-bar drive the clamp transistors).
// Timing: event_flag changes at the rising edge of each input spike.
//
// Follows the published schematic (DFF + feedback inverter). Rising-edge
// clocking and an active-high reset that clears the flag are this design's
// choices.
module smu_event_dff (
  input  logic in_spike,
  input  logic reset,
  output logic event_flag,
  output logic event_flag_n
);
  always_ff @(posedge in_spike or posedge reset) begin
    if (reset) event_flag <= 1'b0;
    else       event_flag <= ~event_flag;
  end

  assign event_flag_n = ~event_flag;
endmodule
