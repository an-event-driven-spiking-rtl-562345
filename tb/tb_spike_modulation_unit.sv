`timescale 1ps/1fs
// tb_spike_modulation_unit: sends spike pairs with random intervals and checks
// that the flag and the 0.3 V read level last exactly from the first spike to
// the second, and that the row rests at 0.4 V otherwise.
module tb_spike_modulation_unit;
  logic in_spike = 1'b0, reset = 1'b1;
  logic event_flag;
  real  v_in;
  int   checks = 0, failures = 0;
  real  t_rise, t_fall;

  spike_modulation_unit dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge event_flag) t_rise = $realtime;
  always @(negedge event_flag) t_fall = $realtime;

  initial begin
    #10000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int x;
    real t0;
    #100 reset = 1'b0;
    #100;
    check(v_in > 0.399 && v_in < 0.401, "idle row at V_clamp");
    for (int n = 0; n < 50; n++) begin
      x = 1 + $urandom % 255;
      t0 = $realtime;
      in_spike = 1'b1; #50 in_spike = 1'b0;
      #(x * 200 - 100);
      check(event_flag && v_in > 0.299 && v_in < 0.301, "read level during the event");
      #50;
      in_spike = 1'b1; #50 in_spike = 1'b0;
      #10;
      check(!event_flag && v_in > 0.399 && v_in < 0.401, "back at V_clamp after the pair");
      check(t_fall - t_rise == real'(x * 200), $sformatf("event length %0.1f ps, expected %0d", t_fall - t_rise, x * 200));
      check(t_rise == t0, "event starts at the first spike");
      #500;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
