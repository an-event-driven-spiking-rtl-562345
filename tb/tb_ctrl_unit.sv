`timescale 1ps/1fs
// tb_ctrl_unit: random and one-hot row-flag patterns; Event_flag must be high
// exactly when some row flag is high, and event_flag_n its complement.
module tb_ctrl_unit;
  localparam int N = cim_pkg::N_ROWS;
  logic [N-1:0] event_flag_i = '0;
  logic         event_flag, event_flag_n;
  int           checks = 0, failures = 0;
  bit           any;

  ctrl_unit dut (.*);

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
    #1;
    check(event_flag == 1'b0 && event_flag_n == 1'b1, "all idle");
    for (int r = 0; r < N; r++) begin
      event_flag_i = '0;
      event_flag_i[r] = 1'b1;
      #1;
      check(event_flag == 1'b1 && event_flag_n == 1'b0, $sformatf("row %0d alone", r));
    end
    for (int n = 0; n < 200; n++) begin
      for (int r = 0; r < N; r++) event_flag_i[r] = ($urandom % 64) == 0;
      #1;
      any = 1'b0;
      for (int r = 0; r < N; r++) any = any || event_flag_i[r];
      check(event_flag == any && event_flag_n == !any, "random pattern");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
