`timescale 1ps/1fs
// spiking_cim_macro: event-driven spiking compute-in-memory macro on a
// 128 x 128 array of 3T-2MTJ SOT-MRAM cells (32 Kb of 2-bit weights).
//
// Computes a matrix-vector product with time-coded data and no clock:
//  - every input value arrives as a pair of spikes on spike_in[i]; the
//    interval between them is the value (0.2 ns per LSB in the testbenches);
//  - the row's spike modulation unit applies the read voltage to the row for
//    exactly that interval, so row i injects V_read * G_ij * T_in,i of charge
//    into every column j;
//  - the Ctrl Unit ORs the row events into Event_flag, high from the first
//    input spike to the last;
//  - each column's output spike generator integrates its current on C_rt while
//    Event_flag is high and, once it falls, emits a spike pair whose interval
//    is proportional to the column's dot product.
// Weights are written one cell per clk edge through the row decoder, the
// column decoder and write driver.
//
// Interface: reset (active high, asynchronous: clears the row flip-flops and
// empties the capacitors; give it once before each operation), spike_in,
// spike_out, event_flag (observation), clk / we / wr_row / wr_col / wr_data
// (weight write port). Do not write while an operation is running; an
// assertion flags a write while Event_flag is high.
// Timing: the first output spike of every column comes at the fall of
// Event_flag, the second T_out later (see output_spike_generator).
//
// The block structure and all connections follow the published floor plan;
// the write port and the reset sequence are this design's choices.
module spiking_cim_macro #(
  parameter int N_ROWS = cim_pkg::N_ROWS,
  parameter int N_COLS = cim_pkg::N_COLS,
  localparam int RAW = $clog2(N_ROWS),
  localparam int CAW = $clog2(N_COLS)
) (
  input  logic              reset,
  input  logic [N_ROWS-1:0] spike_in,
  output logic [N_COLS-1:0] spike_out,
  output logic              event_flag,
  input  logic              clk,
  input  logic              we,
  input  logic [RAW-1:0]    wr_row,
  input  logic [CAW-1:0]    wr_col,
  input  logic [1:0]        wr_data
);
  logic [N_ROWS-1:0] event_flag_i;
  logic              event_flag_n;
  real               v_in   [N_ROWS];
  real               v_rbl1 [N_COLS];
  real               i_bl   [N_COLS];

  logic [N_ROWS-1:0] wwl;
  logic [N_COLS-1:0] col_sel;
  cim_pkg::weight_t  col_data;
  cim_pkg::weight_t  state [N_ROWS][N_COLS];

  // Spike modulation unit, one per row
  for (genvar r = 0; r < N_ROWS; r++) begin : g_smu
    spike_modulation_unit u_smu (
      .in_spike   (spike_in[r]),
      .reset      (reset),
      .event_flag (event_flag_i[r]),
      .v_in       (v_in[r])
    );
  end

  ctrl_unit #(.N_ROWS(N_ROWS)) u_ctrl (
    .event_flag_i (event_flag_i),
    .event_flag   (event_flag),
    .event_flag_n (event_flag_n)
  );

  // Write path
  row_decoder_wl_driver #(.N_ROWS(N_ROWS)) u_rowdec (
    .we       (we),
    .row_addr (wr_row),
    .wwl      (wwl)
  );

  col_decoder_write_driver #(.N_COLS(N_COLS)) u_coldec (
    .we       (we),
    .col_addr (wr_col),
    .wdata    (wr_data),
    .col_sel  (col_sel),
    .col_data (col_data)
  );

  mram_array #(.N_ROWS(N_ROWS), .N_COLS(N_COLS)) u_array (
    .clk      (clk),
    .wwl      (wwl),
    .col_sel  (col_sel),
    .col_data (col_data),
    .state    (state)
  );

  // Analog read of the crossbar
  crossbar_read #(.N_ROWS(N_ROWS), .N_COLS(N_COLS)) u_xbar (
    .state  (state),
    .v_in   (v_in),
    .v_rbl1 (v_rbl1),
    .i_bl   (i_bl)
  );

  // A write during an operation would change conductances in mid-sum.
  always @(posedge clk)
    assert (!(we && event_flag)) else $error("weight write during an operation");

  // Output spike generator, one per column
  for (genvar c = 0; c < N_COLS; c++) begin : g_osg
    output_spike_generator u_osg (
      .reset        (reset),
      .event_flag   (event_flag),
      .event_flag_n (event_flag_n),
      .i_bl         (i_bl[c]),
      .v_rbl1       (v_rbl1[c]),
      .spike_out    (spike_out[c])
    );
  end
endmodule
