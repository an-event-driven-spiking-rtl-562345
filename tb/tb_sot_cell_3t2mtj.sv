`timescale 1ps/1fs
// tb_sot_cell_3t2mtj: the four codes must give 6, 5, 4 and 3 MOhm
// (J1 = 1 or 2 MOhm, J2 = 2 or 4 MOhm, in series); the current must follow
// Ohm's law for random voltages, and be zero with no voltage across the cell.
module tb_sot_cell_3t2mtj;
  logic [1:0] state = '0;
  real        v_rbl0 = 0.4, v_rbl1 = 0.4;
  real        i_cell;
  int         checks = 0, failures = 0;
  real        r_exp [4] = '{6.0e6, 5.0e6, 4.0e6, 3.0e6};
  real        v, err;

  sot_cell_3t2mtj dut (.*);

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
    for (int n = 0; n < 100; n++) begin
      state = 2'(n);
      v = real'($urandom % 1000) / 1000.0 * 0.2;
      v_rbl1 = 0.4; v_rbl0 = 0.4 - v;
      #1;
      err = i_cell - v / r_exp[state];
      check(err < 1.0e-15 && err > -1.0e-15,
            $sformatf("code %0d, %f V: %e A expected %e A", state, v, i_cell, v / r_exp[state]));
      v_rbl0 = 0.4;
      #1;
      check(i_cell == 0.0, "no voltage, no current");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
