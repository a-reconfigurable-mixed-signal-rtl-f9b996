// Scan enable generator: the part of the FPGA inhibition generator that
// drives the two scan chains of the analogue chip.
//
// A time step lasts CLK_PER_STEP generator clocks (10 at the published
// 333 MHz clock and 33.3 MHz column shift rate). `col_clk` rises on the
// first clock of every step and falls half-way through it; `col_sin` is
// set half-way through the last step of a column sweep, so the column chain
// takes in a new 1 exactly when column 0 is due. The row chain shifts once
// per column sweep: `row_clk` pulses together with the `col_clk` that
// starts column 0, and `row_sin` is set before the sweep of row 0. Neurons
// are thus selected one per time step in raster order, row by row.
// The generator also reports where the scan is (`phase` within the step,
// `col_idx`, `row_idx`, and the linear index `nidx` = row*N_COL + col),
// which the pulse width modulator needs; all outputs are registered and
// change on the clock edge that starts a step or the middle of it.
// The published design gives the two chains and the two rates; the clock
// waveforms and the raster order are this design's choices.
module scan_enable_gen
  import adc_pkg::*;
#(
  parameter int unsigned N_COL        = N_COL_DEF,
  parameter int unsigned N_ROW        = N_ROW_DEF,
  parameter int unsigned CLK_PER_STEP = CLK_PER_STEP_DEF,
  localparam int unsigned N  = N_COL * N_ROW,
  localparam int unsigned PW = (CLK_PER_STEP > 1) ? $clog2(CLK_PER_STEP) : 1,
  localparam int unsigned CW = (N_COL > 1) ? $clog2(N_COL) : 1,
  localparam int unsigned RW = (N_ROW > 1) ? $clog2(N_ROW) : 1,
  localparam int unsigned NW = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  output logic          col_clk,
  output logic          col_sin,
  output logic          row_clk,
  output logic          row_sin,
  output logic [PW-1:0] phase,
  output logic [CW-1:0] col_idx,
  output logic [RW-1:0] row_idx,
  output logic [NW-1:0] nidx
);
  timeunit 1ns; timeprecision 1ps;

  localparam int unsigned HALF = CLK_PER_STEP / 2;

  logic last_phase, last_col, last_row;
  assign last_phase = (phase   == PW'(CLK_PER_STEP - 1));
  assign last_col   = (col_idx == CW'(N_COL - 1));
  assign last_row   = (row_idx == RW'(N_ROW - 1));

  // Reset parks the scan on the last cycle of the last neuron, with both
  // scan-enable inputs set, so the first clock starts neuron 0.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase   <= PW'(CLK_PER_STEP - 1);
      col_idx <= CW'(N_COL - 1);
      row_idx <= RW'(N_ROW - 1);
      nidx    <= NW'(N - 1);
      col_clk <= 1'b0;
      row_clk <= 1'b0;
      col_sin <= 1'b1;
      row_sin <= 1'b1;
    end else if (last_phase) begin
      phase   <= '0;
      col_clk <= 1'b1;
      nidx    <= (nidx == NW'(N - 1)) ? '0 : nidx + 1'b1;
      if (last_col) begin
        col_idx <= '0;
        row_clk <= 1'b1;
        row_idx <= last_row ? '0 : row_idx + 1'b1;
      end else begin
        col_idx <= col_idx + 1'b1;
      end
    end else begin
      phase <= phase + 1'b1;
      if (phase == PW'(HALF - 1)) begin
        col_clk <= 1'b0;
        row_clk <= 1'b0;
        col_sin <= last_col;
        row_sin <= last_col && last_row;
      end
    end
  end

  initial begin
    assert (CLK_PER_STEP >= 4) else $error("CLK_PER_STEP must be at least 4");
  end
endmodule
