`timescale 1ps/1fs
// tb_output_spike_generator: one column of the output stage. A column current
// profile is applied while Event_flag is high; the output must carry one spike
// at the fall of Event_flag and a second one T_out later, with
// T_out = k * Q * C_com / (C_rt * I_com), Q the charge of the column current
// over the event (k = 1, 200 fF, 200 fF, 5 uA).
module tb_output_spike_generator;
  logic reset = 1'b1, event_flag = 1'b0, event_flag_n = 1'b1;
  real  i_bl = 0.0;
  real  v_rbl1;
  logic spike_out;
  int   checks = 0, failures = 0;
  real  t_sp [4];
  int   n_sp;
  real  q, i, t_fall, t_exp;
  int   dt;

  output_spike_generator dut (.*);

  always @(posedge spike_out) begin
    if (n_sp < 4) t_sp[n_sp] = $realtime;
    n_sp++;
  end

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
    for (int n = 0; n < 30; n++) begin
      reset = 1'b1; #10 reset = 1'b0; #100;
      n_sp = 0;
      q = 0.0;
      event_flag = 1'b1; event_flag_n = 1'b0;
      for (int s = 0; s < 1 + $urandom % 6; s++) begin
        i = real'(10 + $urandom % 1000) * 1.0e-9;
        dt = 200 + $urandom % 5000;
        i_bl = i;
        #(dt);
        q += i * real'(dt) * 1.0e-12;
      end
      event_flag = 1'b0; event_flag_n = 1'b1; i_bl = 0.0;
      t_fall = $realtime;
      t_exp = q / 200.0e-15 * 200.0e-15 / 5.0e-6 * 1.0e12;
      #(t_exp + 1000.0);
      check(n_sp == 2, $sformatf("%0d output spikes", n_sp));
      check(t_sp[0] == t_fall, "first spike at the fall of Event_flag");
      check(t_sp[1] - t_sp[0] - t_exp < 1.0 && t_sp[1] - t_sp[0] - t_exp > -1.0,
            $sformatf("T_out %0.2f ps expected %0.2f ps", t_sp[1] - t_sp[0], t_exp));
      check(v_rbl1 == 0.4, "column clamped");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
