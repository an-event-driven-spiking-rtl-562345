`timescale 1ps/1fs
// tb_mram_array: fills the full 128 x 128 array with random weights through
// word lines and column selects, then rewrites random cells, checking after
// each phase that every cell holds its own last value (no cell is disturbed
// by a write to another) and that nothing changes without a selected cell.
module tb_mram_array;
  localparam int NR = cim_pkg::N_ROWS, NC = cim_pkg::N_COLS;
  logic          clk = 1'b0;
  logic [NR-1:0] wwl = '0;
  logic [NC-1:0] col_sel = '0;
  logic [1:0]    col_data = '0;
  logic [1:0]    state [NR][NC];
  logic [1:0]    ref_w [NR][NC];
  int            checks = 0, failures = 0;

  mram_array dut (.*);

  always #500 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic write(int r, int c, logic [1:0] d);
    @(negedge clk);
    wwl = '0; col_sel = '0;
    wwl[r] = 1'b1; col_sel[c] = 1'b1; col_data = d;
    ref_w[r][c] = d;
    @(negedge clk);
    wwl = '0; col_sel = '0;
  endtask

  task automatic compare_all(string phase);
    int bad = 0;
    for (int r = 0; r < NR; r++)
      for (int c = 0; c < NC; c++)
        if (state[r][c] != ref_w[r][c]) bad++;
    check(bad == 0, $sformatf("%s: %0d cells differ", phase, bad));
  endtask

  initial begin
    #100000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < NR; r++)
      for (int c = 0; c < NC; c++) write(r, c, 2'($urandom));
    compare_all("after fill");
    for (int n = 0; n < 300; n++) begin
      write($urandom % NR, $urandom % NC, 2'($urandom));
      if (n % 30 == 0) compare_all("during rewrites");
    end
    compare_all("after rewrites");
    // word line without column select, and the reverse: no write
    @(negedge clk);
    wwl = '1; col_sel = '0; col_data = 2'b11;
    @(negedge clk);
    wwl = '0; col_sel = '1; col_data = 2'b00;
    @(negedge clk);
    col_sel = '0;
    compare_all("half-selected lines");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
