`timescale 1ps/1fs
// tb_row_decoder_wl_driver: every address with write enable gives exactly
// that word line; without write enable no word line is driven.
module tb_row_decoder_wl_driver;
  localparam int N = cim_pkg::N_ROWS;
  logic                 we = 1'b0;
  logic [$clog2(N)-1:0] row_addr = '0;
  logic [N-1:0]         wwl;
  int                   checks = 0, failures = 0;

  row_decoder_wl_driver dut (.*);

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
      row_addr = a[$clog2(N)-1:0];
      we = 1'b1;
      #1;
      for (int r = 0; r < N; r++)
        check(wwl[r] == (r == a), $sformatf("addr %0d line %0d", a, r));
      we = 1'b0;
      #1;
      check(wwl == '0, "no write, no word line");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
