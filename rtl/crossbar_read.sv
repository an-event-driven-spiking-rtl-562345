`timescale 1ps/1fs
// crossbar_read: behavioural model of the analog read of the SOT-MRAM
// crossbar (Ohm's and Kirchhoff's laws, not synthesizable).
//
// Every cell (i, j) sits between row line i, driven by that row's spike
// modulation unit to v_in[i], and column line j, clamped by the output spike
// generator to v_rbl1[j]. Cell currents follow Ohm's law; each column line
// sums its cells' currents. Because an idle row is held at the same voltage as
// the columns, only rows with an active input event contribute:
//   i_bl[j] = sum_i (v_rbl1[j] - v_in[i]) * G(state[i][j]).
//
// Interface: state from mram_array, v_in[N_ROWS] volts, v_rbl1[N_COLS] volts
// in; i_bl[N_COLS] amps out. Timing: instantaneous. Line resistance and
// sneak paths are not modelled.
module crossbar_read #(
  parameter int N_ROWS = cim_pkg::N_ROWS,
  parameter int N_COLS = cim_pkg::N_COLS
) (
  input  cim_pkg::weight_t state  [N_ROWS][N_COLS],
  input  real              v_in   [N_ROWS],
  input  real              v_rbl1 [N_COLS],
  output real              i_bl   [N_COLS]
);
  real i_cell [N_ROWS][N_COLS];

  for (genvar r = 0; r < N_ROWS; r++) begin : g_row
    for (genvar c = 0; c < N_COLS; c++) begin : g_col
      sot_cell_3t2mtj u_cell (
        .state  (state[r][c]),
        .v_rbl0 (v_in[r]),
        .v_rbl1 (v_rbl1[c]),
        .i_cell (i_cell[r][c])
      );
    end
  end

  for (genvar c = 0; c < N_COLS; c++) begin : g_sum
    always_comb begin
      i_bl[c] = 0.0;
      for (int r = 0; r < N_ROWS; r++) i_bl[c] += i_cell[r][c];
    end
  end
endmodule
