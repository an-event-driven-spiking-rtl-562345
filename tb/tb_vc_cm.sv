`timescale 1ps/1fs
// tb_vc_cm: drives a piecewise-constant column current while Event_flag is
// high and checks that V_charge ends at k * sum(I * dt) / C_rt (k = 1,
// C_rt = 200 fF), that nothing is added while Event_flag is low, that reset
// empties the capacitor, and that the column line is clamped at 0.4 V.
module tb_vc_cm;
  logic reset = 1'b1, event_flag = 1'b0;
  real  i_bl = 0.0;
  real  v_rbl1, v_charge;
  int   checks = 0, failures = 0;
  real  q, i, err;
  int   dt;

  vc_cm dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100 reset = 1'b0;
    #100;
    check(v_rbl1 == 0.4, "RBL[1] clamped at V_clamp");
    for (int n = 0; n < 30; n++) begin
      reset = 1'b1; #10 reset = 1'b0; #10;
      check(v_charge == 0.0, "reset empties C_rt");
      q = 0.0;
      // current before the event must not count
      i_bl = 1.0e-7; #300;
      event_flag = 1'b1;
      for (int s = 0; s < 1 + $urandom % 8; s++) begin
        i = real'($urandom % 1000) * 1.0e-9;   // up to 1 uA
        dt = 1 + $urandom % 5000;
        i_bl = i;
        #(dt);
        q += i * real'(dt) * 1.0e-12;
      end
      event_flag = 1'b0;
      #10;
      i_bl = 5.0e-7;
      #1000;  // current after the event must not count either
      i_bl = 0.0;
      #1;
      err = v_charge - q / 200.0e-15;
      check(err < 1.0e-9 && err > -1.0e-9, $sformatf("V_charge %f V expected %f V", v_charge, q / 200.0e-15));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
