`timescale 1ps/1fs
// tb_smu_event_dff: checks the SMU event flip-flop against a reference toggle
// model: random spike trains with resets in between; after every spike or
// reset the flag must equal the number of spikes since reset, modulo 2, and
// event_flag_n must be its complement.
module tb_smu_event_dff;
  logic in_spike = 1'b0, reset = 1'b1;
  logic event_flag, event_flag_n;
  int   checks = 0, failures = 0;
  bit   expect_flag;

  smu_event_dff dut (.*);

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
    #100;
    check(event_flag == 1'b0 && event_flag_n == 1'b1, "flag low during reset");
    reset = 1'b0;
    expect_flag = 1'b0;
    for (int n = 0; n < 400; n++) begin
      if ($urandom % 23 == 0) begin
        reset = 1'b1; #20; reset = 1'b0; #20;
        expect_flag = 1'b0;
        check(event_flag == 1'b0, "reset clears the flag");
      end
      #(10 + $urandom % 200);
      in_spike = 1'b1;
      #1;
      expect_flag = ~expect_flag;
      check(event_flag == expect_flag, $sformatf("spike %0d: flag %0b expected %0b", n, event_flag, expect_flag));
      check(event_flag_n == ~event_flag, "complement output");
      #49;
      in_spike = 1'b0;
      #1;
      check(event_flag == expect_flag, "falling spike edge leaves the flag");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
