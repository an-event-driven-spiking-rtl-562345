`timescale 1ps/1fs
// tb_crossbar_read: random weights and random active rows on a reduced 16 x 8
// crossbar; every column current must equal the sum over active rows of
// V_read / R(code), with R = 6, 5, 4, 3 MOhm for codes 0..3.
module tb_crossbar_read;
  localparam int NR = 16, NC = 8;
  logic [1:0] state  [NR][NC];
  real        v_in   [NR];
  real        v_rbl1 [NC];
  real        i_bl   [NC];
  int         checks = 0, failures = 0;
  real        r_exp [4] = '{6.0e6, 5.0e6, 4.0e6, 3.0e6};
  real        sum, err;

  crossbar_read #(.N_ROWS(NR), .N_COLS(NC)) dut (.*);

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
    foreach (v_rbl1[c]) v_rbl1[c] = 0.4;
    for (int n = 0; n < 50; n++) begin
      foreach (state[r, c]) state[r][c] = 2'($urandom);
      foreach (v_in[r]) v_in[r] = ($urandom % 3 == 0) ? 0.3 : 0.4;
      #1;
      for (int c = 0; c < NC; c++) begin
        sum = 0.0;
        for (int r = 0; r < NR; r++)
          if (v_in[r] < 0.35) sum += 0.1 / r_exp[state[r][c]];
        err = i_bl[c] - sum;
        check(err < 1.0e-15 && err > -1.0e-15, $sformatf("col %0d: %e A expected %e A", c, i_bl[c], sum));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
