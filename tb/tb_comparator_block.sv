`timescale 1ps/1fs
// tb_comparator_block: for random V_charge the comparator must rise
// V_charge * C_com / I_com (200 fF, 5 uA: 40 ps per mV) after Event_flag
// falls, never while Event_flag is high, and be cleared by the next event or
// by reset. A V_charge update at the instant Event_flag falls must be used.
module tb_comparator_block;
  logic reset = 1'b1, event_flag = 1'b0;
  real  v_charge = 0.0;
  logic cmp_out;
  int   checks = 0, failures = 0;
  real  t_fall, t_rise, t_exp, v;

  comparator_block dut (.*);

  always @(posedge cmp_out) t_rise = $realtime;

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
    #1000;
    check(cmp_out == 1'b0, "idle after reset: no crossing");
    for (int n = 0; n < 40; n++) begin
      v = real'(1 + $urandom % 1000) * 1.0e-3;   // 1 mV .. 1 V
      event_flag = 1'b1;
      v_charge = v * 0.5;
      #2000;
      check(cmp_out == 1'b0, "no crossing while Event_flag is high");
      // V_charge reaches its final value in the same instant as the fall
      event_flag = 1'b0;
      v_charge = v;
      t_fall = $realtime;
      t_exp = v * 200.0e-15 / 5.0e-6 * 1.0e12;
      #(t_exp + 100.0);
      check(cmp_out == 1'b1, "comparator toggled");
      check(t_rise - t_fall - t_exp < 1.0 && t_rise - t_fall - t_exp > -1.0,
            $sformatf("crossing after %0.2f ps, expected %0.2f ps", t_rise - t_fall, t_exp));
      if (n % 2 == 0) begin
        reset = 1'b1; #10;
        check(cmp_out == 1'b0, "reset clears the comparator");
        reset = 1'b0;
      end else begin
        event_flag = 1'b1; #10;
        check(cmp_out == 1'b0, "next event clears the comparator");
        event_flag = 1'b0; reset = 1'b1; #10 reset = 1'b0;
      end
      v_charge = 0.0;
      #100;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
