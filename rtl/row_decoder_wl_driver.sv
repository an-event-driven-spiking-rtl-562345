`timescale 1ps/1fs
// row_decoder_wl_driver: write row decoder and word-line driver.
//
// Turns a binary row address into one-hot write word-line enables. During a
// write all three transistors of the selected cells conduct, so one enable per
// row stands for both write word lines of the row (WWL0[0] for J1, WWL0[1]
// for J2) and for the shared source-line transistor.
//
// Interface: we, row_addr in; wwl[N_ROWS-1:0] out, all low when we is low.
// Timing: combinational. The block is named in the macro's floor plan only;
// binary addressing and one row per write are this design's choices.
module row_decoder_wl_driver #(
  parameter int N_ROWS = cim_pkg::N_ROWS,
  localparam int AW = $clog2(N_ROWS)
) (
  input  logic              we,
  input  logic [AW-1:0]     row_addr,
  output logic [N_ROWS-1:0] wwl
);
  always_comb begin
    wwl = '0;
    if (we && int'(row_addr) < N_ROWS) wwl[row_addr] = 1'b1;
  end
endmodule
