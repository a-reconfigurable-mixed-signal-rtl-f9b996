// Testbench for scan_enable_gen at its default size (30 x 7 neurons, 10
// clocks per time step). A reference position is kept by counting clocks
// since reset: step s = cycle / 10, column s mod 30, row (s / 30) mod 7.
// Every clock it checks the phase, the indices, the shift clocks and the
// scan-enable inputs against that position, and it checks the column shift
// rate (one column clock per 10 generator clocks, 33.3 MHz at 333 MHz) and
// the row shift rate (one per 30 steps).
module tb_scan_enable_gen;
  timeunit 1ns; timeprecision 1ps;
  import adc_pkg::*;
  localparam int unsigned NC = N_COL_DEF, NR = N_ROW_DEF, C = CLK_PER_STEP_DEF;
  localparam int unsigned HALF = C / 2;

  logic clk = 0, rst_n = 1;
  logic col_clk, col_sin, row_clk, row_sin;
  logic [$clog2(C)-1:0] phase;
  logic [$clog2(NC)-1:0] col_idx;
  logic [$clog2(NR)-1:0] row_idx;
  logic [$clog2(NC*NR)-1:0] nidx;
  int checks = 0, failures = 0;
  int col_edges = 0, row_edges = 0;

  scan_enable_gen dut (.*);

  always #1.5 clk = ~clk;   // 333 MHz

  task automatic expect_eq(string what, longint got, longint exp, int k);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL cycle %0d %s: got %0d expected %0d", k, what, got, exp);
    end
  endtask

  always @(posedge col_clk) col_edges++;
  always @(posedge row_clk) row_edges++;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int s, p, s1;
    #0.5 rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 3 * NC * NR * C; k++) begin
      @(negedge clk);
      s = k / C; p = k % C; s1 = s + 1;
      expect_eq("phase", phase, p, k);
      expect_eq("col_idx", col_idx, s % NC, k);
      expect_eq("row_idx", row_idx, (s / NC) % NR, k);
      expect_eq("nidx", nidx, s % (NC * NR), k);
      expect_eq("col_clk", col_clk, p < HALF, k);
      expect_eq("row_clk", row_clk, (p < HALF) && (s % NC == 0), k);
      if (p < HALF) begin
        expect_eq("col_sin", col_sin, s % NC == 0, k);
        expect_eq("row_sin", row_sin, (s % NC == 0) && ((s / NC) % NR == 0), k);
      end else begin
        expect_eq("col_sin", col_sin, s1 % NC == 0, k);
        expect_eq("row_sin", row_sin, (s1 % NC == 0) && ((s1 / NC) % NR == 0), k);
      end
    end
    // rates: one column shift per step, one row shift per column sweep
    expect_eq("column shifts", col_edges, 3 * NC * NR, -1);
    expect_eq("row shifts", row_edges, 3 * NR, -1);
    $display("INFO %0d column shifts in %0d clocks", col_edges, 3 * NC * NR * C);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
