// Inhibition generator: the control module that runs on the FPGA.
//
// It contains the scan enable generator, which drives the column and row
// scan chains of the analogue chip, and the pulse width modulator, which
// drives the chip's shared inhibition line. The chip's shared spike output
// is both the ADC's output and the inhibition flag; it is brought into the
// clock domain with a two-flop synchroniser (this design's choice), so a
// spike that appears at the start of a time step is seen by the modulator
// in cycle 2 of the step, which is why DET_PHASE defaults to 2.
// Outputs towards the chip (`col_clk`, `col_sin`, `row_clk`, `row_sin`,
// `inh_en`) are registered on `clk`. The spike events (`spike_valid` with
// the neuron address `spike_idx`, `seq_start`, `spike_blocked`) are
// one-clock strobes for whatever collects the ADC output.
module inhibition_gen
  import adc_pkg::*;
#(
  parameter int unsigned N_COL        = N_COL_DEF,
  parameter int unsigned N_ROW        = N_ROW_DEF,
  parameter int unsigned CLK_PER_STEP = CLK_PER_STEP_DEF,
  parameter int unsigned DET_PHASE    = DET_PHASE_DEF,
  parameter int unsigned W_SPAN       = CLK_PER_STEP - DET_PHASE - 2,
  localparam int unsigned N  = N_COL * N_ROW,
  localparam int unsigned NW = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          spike_in,
  output logic          col_clk,
  output logic          col_sin,
  output logic          row_clk,
  output logic          row_sin,
  output logic          inh_en,
  output logic          spike_valid,
  output logic [NW-1:0] spike_idx,
  output logic          seq_start,
  output logic          spike_blocked
);
  timeunit 1ns; timeprecision 1ps;

  localparam int unsigned PW = (CLK_PER_STEP > 1) ? $clog2(CLK_PER_STEP) : 1;

  logic [1:0]    spike_sync;
  logic [PW-1:0] phase;
  logic [NW-1:0] nidx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) spike_sync <= '0;
    else        spike_sync <= {spike_sync[0], spike_in};
  end

  scan_enable_gen #(.N_COL(N_COL), .N_ROW(N_ROW), .CLK_PER_STEP(CLK_PER_STEP)) u_scan (
    .clk, .rst_n, .col_clk, .col_sin, .row_clk, .row_sin,
    .phase, .col_idx(), .row_idx(), .nidx
  );

  pulse_width_mod #(.N(N), .CLK_PER_STEP(CLK_PER_STEP), .DET_PHASE(DET_PHASE),
                    .W_SPAN(W_SPAN)) u_pwm (
    .clk, .rst_n, .phase, .nidx, .spike(spike_sync[1]),
    .inh_en, .seq_active(), .seq_pos(), .spike_valid, .spike_idx, .seq_start, .spike_blocked
  );
endmodule
