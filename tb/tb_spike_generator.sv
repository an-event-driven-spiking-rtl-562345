`timescale 1ps/1fs
// tb_spike_generator: each rising edge of a long input level gives one 50 ps
// spike starting with the edge; falling edges give none; an input pulse
// shorter than 50 ps passes through at its own width; no spike at power-up
// with the input high.
module tb_spike_generator;
  logic trig = 1'b1;
  logic spike;
  int   checks = 0, failures = 0;
  int   n_spikes = 0;
  real  t_up, width;

  spike_generator dut (.*);

  always @(posedge spike) begin n_spikes++; t_up = $realtime; end
  always @(negedge spike) width = $realtime - t_up;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real t0;
    #500;
    check(n_spikes == 0, "no spike at power-up");
    trig = 1'b0;
    #500;
    check(n_spikes == 0, "falling edge gives no spike");
    for (int n = 0; n < 30; n++) begin
      t0 = $realtime;
      trig = 1'b1;
      #1;
      check(spike == 1'b1 && t_up == t0, "spike starts with the rising edge");
      #(100 + $urandom % 1000);
      check(n_spikes == n + 1, $sformatf("one spike per edge (%0d)", n_spikes));
      check(width == 50.0, $sformatf("spike width %0.1f ps", width));
      trig = 1'b0;
      #(100 + $urandom % 1000);
      check(n_spikes == n + 1, "falling edge gives no spike");
    end
    // short input pulse
    trig = 1'b1; #20 trig = 1'b0;
    #200;
    check(width == 20.0, $sformatf("short input: width %0.1f ps", width));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
