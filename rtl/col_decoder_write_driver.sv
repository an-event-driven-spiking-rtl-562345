`timescale 1ps/1fs
// col_decoder_write_driver: write column decoder and write driver.
//
// Decodes a binary column address into a one-hot column select and drives the
// 2-bit weight onto the selected column: bit 0 sets J1, bit 1 sets J2 (1 =
// low-resistance state). The write-current direction that the real driver
// chooses per MTJ is abstracted into that one bit per MTJ.
//
// Interface: we, col_addr, wdata in; col_sel[N_COLS-1:0], col_data out.
// col_sel is all low when we is low. Timing: combinational.
// The block is named in the macro's floor plan only; the rest is this
// design's choice.
module col_decoder_write_driver #(
  parameter int N_COLS = cim_pkg::N_COLS,
  localparam int AW = $clog2(N_COLS)
) (
  input  logic              we,
  input  logic [AW-1:0]     col_addr,
  input  cim_pkg::weight_t  wdata,
  output logic [N_COLS-1:0] col_sel,
  output cim_pkg::weight_t  col_data
);
  always_comb begin
    col_sel = '0;
    if (we && int'(col_addr) < N_COLS) col_sel[col_addr] = 1'b1;
  end

  assign col_data = we ? wdata : '0;
endmodule
