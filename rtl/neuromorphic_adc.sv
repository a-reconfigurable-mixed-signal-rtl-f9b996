// Neuromorphic ADC, top level: the FPGA inhibition generator wired to the
// analogue neuron chip. Behavioural model at this level, because the chip
// part is analogue; the FPGA part below `u_fpga` is synthesizable.
//
// The analogue input `i_in` (a current, in amperes) is integrated by every
// neuron. The inhibition generator scans the array one neuron per time step
// (CLK_PER_STEP clocks of `clk`; 10 clocks of 333 MHz give the published
// 33.3 MHz column rate). When the selected neuron is above threshold it
// drives the shared `spike_out` line, which is the converter's output and
// also the inhibition flag. The generator then sends a series of
// inhibition pulses, one per step, of decreasing width: the firing neuron
// is reset and the others are pushed down by less the further they are from
// it in scan order, so that the neurons stop firing in lock-step. The
// digital side reports every spike with the address of the neuron
// (`spike_valid`, `spike_idx`), and whether it started a series
// (`seq_start`) or came from a neuron already inhibited by another
// (`spike_blocked`). Those strobes come in cycle 3 of the spike's step.
// `i_lim_exc` and `i_lim_inh` are the bias currents behind V_lim_exc
// (comparator threshold, 800 nA in the published simulation) and
// V_lim_inh (discharge current, 4 uA).
module neuromorphic_adc
  import adc_pkg::*;
#(
  parameter int unsigned N_COL        = N_COL_DEF,
  parameter int unsigned N_ROW        = N_ROW_DEF,
  parameter int unsigned CLK_PER_STEP = CLK_PER_STEP_DEF,
  parameter int unsigned DET_PHASE    = DET_PHASE_DEF,
  parameter int unsigned W_SPAN       = CLK_PER_STEP - DET_PHASE - 2,
  parameter real         EXC_MISMATCH = 0.0,
  parameter real         INH_MISMATCH = 0.0,
  localparam int unsigned N  = N_COL * N_ROW,
  localparam int unsigned NW = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  real           i_in,
  input  real           i_lim_exc,
  input  real           i_lim_inh,
  output logic          spike_out,
  output logic          inh_en,
  output logic          spike_valid,
  output logic [NW-1:0] spike_idx,
  output logic          seq_start,
  output logic          spike_blocked
);
  timeunit 1ns; timeprecision 1ps;

  logic col_clk, col_sin, row_clk, row_sin;
  logic col_sout, row_sout;

  inhibition_gen #(.N_COL(N_COL), .N_ROW(N_ROW), .CLK_PER_STEP(CLK_PER_STEP),
                   .DET_PHASE(DET_PHASE), .W_SPAN(W_SPAN)) u_fpga (
    .clk, .rst_n, .spike_in(spike_out),
    .col_clk, .col_sin, .row_clk, .row_sin, .inh_en,
    .spike_valid, .spike_idx, .seq_start, .spike_blocked
  );

  adc_chip #(.N_COL(N_COL), .N_ROW(N_ROW),
             .EXC_MISMATCH(EXC_MISMATCH), .INH_MISMATCH(INH_MISMATCH)) u_chip (
    .exc_in(i_in), .i_lim_exc, .i_lim_inh, .rst_n,
    .col_clk, .col_sin, .row_clk, .row_sin, .inh_en,
    .spike_out, .col_sout, .row_sout
  );
endmodule
