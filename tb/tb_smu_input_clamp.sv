`timescale 1ps/1fs
// tb_smu_input_clamp: the row voltage must be 0.3 V while the event flag is
// high and 0.4 V while it is low, giving a 0.1 V read voltage.
module tb_smu_input_clamp;
  logic event_flag = 1'b0, event_flag_n = 1'b1;
  real  v_in;
  int   checks = 0, failures = 0;

  smu_input_clamp dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic bit near(real a, real b);
    return (a - b) < 1.0e-9 && (b - a) < 1.0e-9;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 20; n++) begin
      event_flag = n[0]; event_flag_n = ~n[0];
      #10;
      check(near(v_in, n[0] ? 0.3 : 0.4), $sformatf("flag %0b: v_in %f", event_flag, v_in));
      check(near(0.4 - v_in, n[0] ? 0.1 : 0.0), "read voltage across an active cell");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
