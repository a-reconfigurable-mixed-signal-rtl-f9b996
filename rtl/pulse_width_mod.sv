// Pulse width modulator: the part of the FPGA inhibition generator that
// decides, time step by time step, how long the shared inhibition line
// `inh_en` is high.
//
// Once per step, in cycle DET_PHASE, it samples the (already synchronised)
// spike line, which doubles as the inhibition flag of the neuron selected in
// that step (`nidx`). A spike is always reported on `spike_valid` /
// `spike_idx`. If no pulse series is running and the neuron has not been
// inhibited by another neuron since its last spike, a series starts:
//   - position 0, the firing neuron itself: `inh_en` is high from the cycle
//     after sampling to the end of the step (CLK_PER_STEP-DET_PHASE-1
//     clocks, the longest pulse, meant to reset its membrane);
//   - positions 1..N-1, the following neurons in scan order, one per step:
//     `inh_en` is high for the first pulse_width(pos) clocks of the step,
//     ceil(W_SPAN*(N-pos)/N), so nearer neurons are pushed down more.
//     Widths are whole clocks, so with the default 10-clock step there
//     are only W_SPAN = 6 distinct widths and neighbours share them when
//     N > 7.
// Otherwise (the neuron carries an "inhibited" flag, or a series is
// running, so it is being inhibited right now) only the spike is passed
// on (`spike_blocked`) and the neuron's flag is cleared. A neuron's flag is
// set when it receives a non-zero pulse of another neuron's series.
// Check-before-inhibit, the longest first pulse and one pulse per neuron per
// step follow the published design; pulse positions inside a step, the
// width law and the flag lifetime are this design's choices.
// Timing: all outputs are registered; `seq_start`, `spike_valid` and
// `spike_blocked` are one-clock strobes in cycle DET_PHASE+1.
module pulse_width_mod
  import adc_pkg::*;
#(
  parameter int unsigned N            = N_COL_DEF * N_ROW_DEF,
  parameter int unsigned CLK_PER_STEP = CLK_PER_STEP_DEF,
  parameter int unsigned DET_PHASE    = DET_PHASE_DEF,
  parameter int unsigned W_SPAN       = CLK_PER_STEP - DET_PHASE - 2,
  localparam int unsigned PW = (CLK_PER_STEP > 1) ? $clog2(CLK_PER_STEP) : 1,
  localparam int unsigned NW = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned SW = $clog2(N + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [PW-1:0] phase,
  input  logic [NW-1:0] nidx,
  input  logic          spike,
  output logic          inh_en,
  output logic          seq_active,
  output logic [NW-1:0] seq_pos,
  output logic          spike_valid,
  output logic [NW-1:0] spike_idx,
  output logic          seq_start,
  output logic          spike_blocked
);
  timeunit 1ns; timeprecision 1ps;

  logic [N-1:0] inhibited;          // received a pulse from another neuron
  logic          step_end, det;
  logic [NW-1:0] nidx_next;
  logic [SW-1:0] pos_next;
  logic [PW:0]   w_cur, w_next;     // pulse widths, in clocks
  logic          inh_cont;          // inh_en for the next cycle of this step

  always_comb begin
    step_end  = (phase == PW'(CLK_PER_STEP - 1));
    det       = (phase == PW'(DET_PHASE));
    nidx_next = (nidx == NW'(N - 1)) ? '0 : nidx + 1'b1;
    pos_next  = SW'(seq_pos) + 1'b1;
    w_cur     = (PW+1)'(pulse_width(int'(seq_pos), N, W_SPAN));
    w_next    = (PW+1)'(pulse_width(int'(pos_next), N, W_SPAN));
    inh_cont  = seq_active && ((seq_pos == '0) || ((PW+1)'(phase) + 1'b1 < w_cur));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      inhibited     <= '0;
      seq_active    <= 1'b0;
      seq_pos       <= '0;
      inh_en        <= 1'b0;
      spike_valid   <= 1'b0;
      spike_idx     <= '0;
      seq_start     <= 1'b0;
      spike_blocked <= 1'b0;
    end else begin
      spike_valid   <= 1'b0;
      seq_start     <= 1'b0;
      spike_blocked <= 1'b0;
      if (step_end) begin
        // move the series on to the neuron of the next step
        if (seq_active && pos_next != SW'(N)) begin
          seq_pos <= NW'(pos_next);
          inh_en  <= (w_next != '0);
          if (w_next != '0) inhibited[nidx_next] <= 1'b1;
        end else begin
          seq_active <= 1'b0;
          seq_pos    <= '0;
          inh_en     <= 1'b0;
        end
      end else if (det && spike) begin
        spike_valid <= 1'b1;
        spike_idx   <= nidx;
        if (!seq_active && !inhibited[nidx]) begin
          seq_active <= 1'b1;
          seq_pos    <= '0;
          seq_start  <= 1'b1;
          inh_en     <= 1'b1;
        end else begin
          inhibited[nidx] <= 1'b0;
          spike_blocked   <= 1'b1;
          inh_en          <= inh_cont;
        end
      end else begin
        inh_en <= inh_cont;
      end
    end
  end

  // The inhibition line is only ever driven by a running series.
  a_inh_in_series: assert property (@(posedge clk)
                                    inh_en |-> seq_active);
  initial begin
    assert (DET_PHASE + 2 < CLK_PER_STEP) else $error("DET_PHASE too late in the step");
    assert (W_SPAN < CLK_PER_STEP - DET_PHASE - 1)
      else $error("W_SPAN must keep the firing neuron's pulse the longest");
  end
endmodule
