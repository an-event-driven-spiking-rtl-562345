`timescale 1ps/1fs
// tb_spiking_cim_macro: end-to-end test of the whole macro at its default size
// (128 x 128).
//
// Writes a random 2-bit weight into every cell through the write port, then
// runs several matrix-vector operations. Each operation resets the macro and
// sends one spike pair per active row: the interval is x_i * 200 ps for an
// 8-bit input x_i, and the rows start at random offsets so that their events
// overlap in different ways. For every column the testbench measures the
// interval between the two output spikes and compares it with the value
// worked out here from the device values:
//   G(code) = 1 / (R_J1 + R_J2), R_J1 in {R, 2R}, R_J2 = 2 R_J1 ratio,
//   T_out   = (C_com / C_rt) * k * V_read * sum_i T_in,i * G_i / I_com.
// It also checks that the first output spike comes with the end of the last
// input event, and it counts how often each mechanism of the macro was
// exercised (idle rows, overlapping row events, first and second output
// spikes, weight rewrites, reset between operations).
module tb_spiking_cim_macro;
  import cim_pkg::*;

  localparam int  NR = N_ROWS;
  localparam int  NC = N_COLS;
  localparam real TOL_PS = 2.0;   // time rounding of the simulator plus margin
  localparam int  N_OPS = 5;

  logic              reset = 1'b1;
  logic [NR-1:0]     spike_in = '0;
  logic [NC-1:0]     spike_out;
  logic              event_flag;
  logic              clk = 1'b0;
  logic              we = 1'b0;
  logic [$clog2(NR)-1:0] wr_row = '0;
  logic [$clog2(NC)-1:0] wr_col = '0;
  logic [1:0]        wr_data = '0;

  spiking_cim_macro dut (.*);

  int checks = 0, failures = 0;

  // Mechanism counters
  int n_idle_rows = 0, n_overlap = 0, n_first = 0, n_second = 0;
  int n_writes = 0, n_rewrites = 0, n_resets = 0;

  logic [1:0] w [NR][NC];
  int         x [NR];
  real        t_first_in [NR];

  // Output spike timestamps per column
  real t_sp [NC][4];
  int  n_sp [NC];

  for (genvar c = 0; c < NC; c++) begin : g_mon
    always @(posedge spike_out[c]) begin
      if (n_sp[c] < 4) t_sp[c][n_sp[c]] = $realtime;
      n_sp[c]++;
    end
  end

  function automatic real cell_g(logic [1:0] code);
    real rj1 = code[0] ? R_LRS : 2.0 * R_LRS;      // TMR 100 %
    real rj2 = 2.0 * (code[1] ? R_LRS : 2.0 * R_LRS);
    return 1.0 / (rj1 + rj2);
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic write_cell(int r, int c, logic [1:0] d);
    @(negedge clk);
    we = 1'b1; wr_row = r[$clog2(NR)-1:0]; wr_col = c[$clog2(NC)-1:0]; wr_data = d;
    @(negedge clk);
    we = 1'b0;
  endtask

  always #500 clk = ~clk;

  // Send one spike pair on row r: first at `start` ps from now, then T_in later.
  task automatic send_pair(int r, real start, real t_in);
    #(start);
    spike_in[r] = 1'b1;
    #(SPIKE_PW_PS);
    spike_in[r] = 1'b0;
    #(t_in - SPIKE_PW_PS);
    spike_in[r] = 1'b1;
    #(SPIKE_PW_PS);
    spike_in[r] = 1'b0;
  endtask

  // mode 0: all rows random, 1: about half idle, 2: one row at full scale,
  // 3: all rows at full scale, 4: random after rewriting column 0
  task automatic run_op(int mode);
    real t_last_end, t_exp, t_meas, sum_tg, t_op, max_wait;
    int  n_active;
    real s [NR];
    real e [NR];
    n_active = 0;
    for (int r = 0; r < NR; r++) begin
      case (mode)
        0, 4:    x[r] = 1 + ($urandom % 255);
        1:       x[r] = ($urandom % 2) ? 1 + ($urandom % 255) : 0;
        2:       x[r] = (r == 5) ? 255 : 0;
        default: x[r] = 255;
      endcase
      if (x[r] == 0) n_idle_rows++;
      else n_active++;
    end
    // Reset, then wait before the operation
    reset = 1'b1;
    #1000;
    reset = 1'b0;
    n_resets++;
    #1000;
    foreach (n_sp[c]) n_sp[c] = 0;
    t_op = $realtime;
    t_last_end = 0.0;
    for (int r = 0; r < NR; r++) begin
      s[r] = real'($urandom % 3000);
      e[r] = s[r] + real'(x[r]) * T_BIT_PS;
      if (x[r] != 0 && e[r] > t_last_end) t_last_end = e[r];
    end
    // overlapping events: some pair of active rows overlapping in time
    for (int a = 0; a < NR; a++)
      if (x[a] != 0)
        for (int b = a + 1; b < NR; b++)
          if (x[b] != 0 && s[a] < e[b] && s[b] < e[a]) begin
            n_overlap++;
            a = NR;  // count once per operation
            break;
          end
    for (int r = 0; r < NR; r++)
      if (x[r] != 0) begin
        automatic int rr = r;
        automatic real ss = s[r];
        automatic real tt = real'(x[r]) * T_BIT_PS;
        fork send_pair(rr, ss, tt); join_none
      end
    // Longest possible T_out: 128 rows * 51 ns * (1/3 uS) -> about 44 ns
    max_wait = t_last_end + 60000.0;
    #(max_wait);
    for (int c = 0; c < NC; c++) begin
      sum_tg = 0.0;
      for (int r = 0; r < NR; r++)
        sum_tg += real'(x[r]) * T_BIT_PS * PS * cell_g(w[r][c]);
      t_exp = (C_COM / C_RT) * K_MIRROR * (V_CLAMP - V_IN_CLAMP) * sum_tg / I_COM / PS;
      check(n_sp[c] == 2, $sformatf("op %0d col %0d: %0d output spikes, expected 2", mode, c, n_sp[c]));
      if (n_sp[c] >= 1) begin
        check((t_sp[c][0] - t_op - t_last_end) <= TOL_PS && (t_sp[c][0] - t_op - t_last_end) >= -TOL_PS,
              $sformatf("op %0d col %0d: first spike at %0.1f ps, last input event ends at %0.1f ps",
                        mode, c, t_sp[c][0] - t_op, t_last_end));
        n_first++;
      end
      if (n_sp[c] >= 2) begin
        t_meas = t_sp[c][1] - t_sp[c][0];
        check((t_meas - t_exp) <= TOL_PS && (t_meas - t_exp) >= -TOL_PS,
              $sformatf("op %0d col %0d: T_out %0.2f ps, expected %0.2f ps", mode, c, t_meas, t_exp));
        n_second++;
      end
    end
    $display("op %0d: %0d active rows, last event ends at %0.1f ns, col0 T_out %0.3f ns",
             mode, n_active, t_last_end / 1000.0, (t_sp[0][1] - t_sp[0][0]) / 1000.0);
  endtask

  initial begin
    #(2.0e9);  // watchdog: 2 ms of simulated time
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000;
    for (int r = 0; r < NR; r++)
      for (int c = 0; c < NC; c++) begin
        w[r][c] = 2'($urandom);
        write_cell(r, c, w[r][c]);
        n_writes++;
      end
    for (int m = 0; m < N_OPS; m++) begin
      if (m == 4)
        for (int r = 0; r < NR; r++) begin
          w[r][0] = ~w[r][0];
          write_cell(r, 0, w[r][0]);
          n_rewrites++;
        end
      run_op(m);
    end
    // Each mechanism must have happened
    check(n_writes == NR * NC, "weight writes");
    check(n_rewrites > 0, "weight rewrite never exercised");
    check(n_idle_rows > 0, "idle rows never exercised");
    check(n_overlap > 0, "overlapping row events never exercised");
    check(n_first > 0, "first output spike never seen");
    check(n_second > 0, "second output spike never seen");
    check(n_resets > 1, "reset between operations never exercised");
    $display("mechanisms: writes=%0d rewrites=%0d idle_rows=%0d overlapping_ops=%0d first_spikes=%0d second_spikes=%0d resets=%0d",
             n_writes, n_rewrites, n_idle_rows, n_overlap, n_first, n_second, n_resets);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
