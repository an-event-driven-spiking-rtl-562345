`timescale 1ps/1fs
// tb_col_decoder_write_driver: every column address and data value; the
// selected column alone is driven and carries the data.
module tb_col_decoder_write_driver;
  localparam int N = cim_pkg::N_COLS;
  logic                 we = 1'b0;
  logic [$clog2(N)-1:0] col_addr = '0;
  logic [1:0]           wdata = '0;
  logic [N-1:0]         col_sel;
  logic [1:0]           col_data;
  int                   checks = 0, failures = 0;

  col_decoder_write_driver dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < N; a++) begin
      col_addr = a[$clog2(N)-1:0];
      wdata = 2'(a + 1);
      we = 1'b1;
      #1;
      for (int c = 0; c < N; c++)
        check(col_sel[c] == (c == a), $sformatf("addr %0d column %0d", a, c));
      check(col_data == 2'(a + 1), "write data driven");
      we = 1'b0;
      #1;
      check(col_sel == '0, "no write, no column");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
