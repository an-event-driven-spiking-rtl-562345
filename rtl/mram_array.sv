`timescale 1ps/1fs
// mram_array: the stored state of the 32 Kb SOT-MRAM array.
//
// N_ROWS x N_COLS cells of two MTJs each (2 bits per cell, 32 Kb at 128 x
// 128). A cell is written when its row's write word line and its column select
// are both high at a rising clk edge; it then holds col_data. The state of
// every cell is presented at all times on `state`, which the analog read model
// turns into conductances: a read never disturbs the cells and needs no
// addressing, since the whole array computes at once.
//
// Interface: clk, wwl[N_ROWS-1:0], col_sel[N_COLS-1:0], col_data in;
// state[N_ROWS][N_COLS] out. Timing: the write takes effect one clk edge after
// the enables are set up. MTJs are non-volatile and have no reset; the
// array powers up holding whatever it held. Clocked writes are this design's
// choice; the write timing of the SOT devices is not modelled.
module mram_array #(
  parameter int N_ROWS = cim_pkg::N_ROWS,
  parameter int N_COLS = cim_pkg::N_COLS
) (
  input  logic              clk,
  input  logic [N_ROWS-1:0] wwl,
  input  logic [N_COLS-1:0] col_sel,
  input  cim_pkg::weight_t  col_data,
  output cim_pkg::weight_t  state [N_ROWS][N_COLS]
);
  for (genvar r = 0; r < N_ROWS; r++) begin : g_row
    for (genvar c = 0; c < N_COLS; c++) begin : g_col
      cim_pkg::weight_t cell_q;  // J2, J1 magnetisation of cell (r, c)

      always_ff @(posedge clk)
        if (wwl[r] && col_sel[c]) cell_q <= col_data;

      assign state[r][c] = cell_q;
    end
  end

endmodule
