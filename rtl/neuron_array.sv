// Two-dimensional integrate-and-fire neuron array of the analogue chip:
// a behavioural model (it is built from the if_neuron model).
//
// N_ROW x N_COL neurons (7 x 30 on the published chip) all integrate the
// same input current. A neuron is selected when its column enable
// (`col_sel[c]`, from the column scan chain) and its row enable
// (`row_sel[r]`, from the row scan chain) are both high; only the selected
// neuron drives the shared output channel and is discharged by the shared
// inhibition line. The published schematic puts Col_sel on the discharge
// transistor and Row_sel on the output gate; here each neuron's Col_sel is
// the AND of its column and row enables, so that only one neuron is
// inhibited at a time (this design's reading). The shared output is the OR
// of the neuron outputs, all but the selected one being 0.
// EXC_MISMATCH and INH_MISMATCH give each neuron a fixed gain error, uniform
// in +-MISMATCH from a hash of its index, on the input mirror and on the
// discharge path; both are 0 by default (identical devices).
module neuron_array #(
  parameter int unsigned N_COL        = 30,
  parameter int unsigned N_ROW        = 7,
  parameter real         EXC_MISMATCH = 0.0,
  parameter real         INH_MISMATCH = 0.0
) (
  input  real              exc_in,
  input  real              i_lim_exc,
  input  real              i_lim_inh,
  input  logic [N_COL-1:0] col_sel,
  input  logic [N_ROW-1:0] row_sel,
  input  logic             inh_en,
  output logic             spike_out
);
  timeunit 1ns; timeprecision 1ps;

  // Fixed pseudo-random number in [-1, 1) for neuron k and stream s.
  function automatic real hash_unit(int unsigned k, int unsigned s);
    logic [31:0] h;
    h = 32'(k) * 32'h9E3779B1 + 32'(s) * 32'h85EBCA6B + 32'h27D4EB2F;
    h = h ^ (h >> 15);
    h = h * 32'h2C1B3C6D;
    h = h ^ (h >> 12);
    return (real'(h[31:8]) / 8388608.0) - 1.0;
  endfunction

  logic [N_ROW*N_COL-1:0] spikes;

  for (genvar r = 0; r < N_ROW; r++) begin : g_row
    for (genvar c = 0; c < N_COL; c++) begin : g_col
      localparam int unsigned K = r * N_COL + c;
      logic sel;
      assign sel = col_sel[c] & row_sel[r];
      if_neuron #(
        .EXC_GAIN(1.0 + EXC_MISMATCH * hash_unit(K, 1)),
        .INH_GAIN(1.0 + INH_MISMATCH * hash_unit(K, 2))
      ) u_neuron (
        .exc_in, .i_lim_exc, .i_lim_inh,
        .col_sel(sel), .col_sel_n(~sel), .row_sel(row_sel[r]),
        .inh_en, .spike_out(spikes[K])
      );
    end
  end

  assign spike_out = |spikes;
endmodule
