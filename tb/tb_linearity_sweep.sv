`timescale 1ps/1fs
// tb_linearity_sweep: the linearity experiment of the macro. Many operations
// with 8-bit inputs and 2-bit weights drawn uniformly from the whole
// input-weight space, with a random number of active rows so that the column
// results sweep the range from a few rows to all 128. For every column result
// the weighted sum S = sum_i T_in,i * G_i is worked out here and paired with
// the measured output interval T_out. A least-squares line through all pairs
// must have the slope alpha = k * V_read * C_com / (C_rt * I_com) = 2e4 / S
// (20 ns per 1e-12 s*S), an intercept near zero, and no point may lie more than
// 2 ps off it. Results under two spike widths (T_out < 100 ps) cannot be
// resolved: there the pair must merge into a single pulse. All 128 rows are kept; the top is narrowed to 8 columns to keep
// the build short.
module tb_linearity_sweep;
  import cim_pkg::*;

  localparam int NR = 128;
  localparam int NC = 8;
  localparam int N_OPS = 24;

  logic              reset = 1'b1;
  logic [NR-1:0]     spike_in = '0;
  logic [NC-1:0]     spike_out;
  logic              event_flag;
  logic              clk = 1'b0;
  logic              we = 1'b0;
  logic [6:0]        wr_row = '0;
  logic [2:0]        wr_col = '0;
  logic [1:0]        wr_data = '0;

  spiking_cim_macro #(.N_ROWS(NR), .N_COLS(NC)) dut (.*);

  int  checks = 0, failures = 0;
  logic [1:0] w [NR][NC];
  int  x [NR];
  real t_sp [NC][2];
  int  n_sp [NC];
  real xs [N_OPS * NC];
  real ys [N_OPS * NC];
  int  npts = 0;
  int  n_merged = 0;

  for (genvar c = 0; c < NC; c++) begin : g_mon
    always @(posedge spike_out[c]) begin
      if (n_sp[c] < 2) t_sp[c][n_sp[c]] = $realtime;
      n_sp[c]++;
    end
  end

  always #500 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic real cell_g(logic [1:0] code);
    real rj1 = code[0] ? 1.0e6 : 2.0e6;
    real rj2 = code[1] ? 2.0e6 : 4.0e6;
    return 1.0 / (rj1 + rj2);
  endfunction

  task automatic send_pair(int r, real t_in);
    spike_in[r] = 1'b1;
    #50;
    spike_in[r] = 1'b0;
    #(t_in - 50.0);
    spike_in[r] = 1'b1;
    #50;
    spike_in[r] = 1'b0;
  endtask

  initial begin
    #(1.0e9);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real sx, sy, sxx, sxy, slope, icpt, dev, maxdev, s;
    int  n_active;
    for (int r = 0; r < NR; r++)
      for (int c = 0; c < NC; c++) begin
        w[r][c] = 2'($urandom);
        @(negedge clk);
        we = 1'b1; wr_row = 7'(r); wr_col = 3'(c); wr_data = w[r][c];
        @(negedge clk);
        we = 1'b0;
      end
    for (int op = 0; op < N_OPS; op++) begin
      n_active = 1 + (op * NR) / N_OPS;
      for (int r = 0; r < NR; r++) x[r] = (r < n_active) ? 1 + ($urandom % 255) : 0;
      reset = 1'b1; #1000 reset = 1'b0; #1000;
      foreach (n_sp[c]) n_sp[c] = 0;
      for (int r = 0; r < NR; r++)
        if (x[r] != 0) begin
          automatic int rr = r;
          automatic real tt = real'(x[r]) * 200.0;
          fork send_pair(rr, tt); join_none
        end
      #(51000.0 + 60000.0);
      for (int c = 0; c < NC; c++) begin
        s = 0.0;
        for (int r = 0; r < NR; r++) s += real'(x[r]) * 200.0e-12 * cell_g(w[r][c]);
        if (s * 2.0e4 < 100.0e-12) begin
          // T_out under two spike widths: the pair merges into one pulse
          check(n_sp[c] == 1, $sformatf("op %0d col %0d: %0d spikes for a merged pair", op, c, n_sp[c]));
          n_merged++;
        end else begin
          check(n_sp[c] == 2, $sformatf("op %0d col %0d: %0d spikes", op, c, n_sp[c]));
          xs[npts] = s;
          ys[npts] = (t_sp[c][1] - t_sp[c][0]) * 1.0e-12;
          npts++;
        end
      end
    end
    sx = 0; sy = 0; sxx = 0; sxy = 0;
    for (int i = 0; i < npts; i++) begin
      sx += xs[i]; sy += ys[i]; sxx += xs[i] * xs[i]; sxy += xs[i] * ys[i];
    end
    slope = (npts * sxy - sx * sy) / (npts * sxx - sx * sx);
    icpt  = (sy - slope * sx) / npts;
    maxdev = 0.0;
    for (int i = 0; i < npts; i++) begin
      dev = ys[i] - (slope * xs[i] + icpt);
      if (dev < 0) dev = -dev;
      if (dev > maxdev) maxdev = dev;
    end
    $display("%0d results too small to resolve (pair merged)", n_merged);
    $display("linearity: %0d points, S from %e to %e s*S, slope %e /S, intercept %0.3f ps, max deviation %0.3f ps",
             npts, xs[0], xs[npts-1], slope, icpt * 1.0e12, maxdev * 1.0e12);
    check(slope > 2.0e4 * 0.9999 && slope < 2.0e4 * 1.0001, $sformatf("slope %e", slope));
    check(icpt * 1.0e12 < 2.0 && icpt * 1.0e12 > -2.0, "intercept near zero");
    check(maxdev * 1.0e12 < 2.0, "all points on the line");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
