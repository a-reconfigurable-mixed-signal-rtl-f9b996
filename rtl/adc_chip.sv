// The analogue neuromorphic chip: a behavioural model made of the column
// scan chain, the row scan chain and the integrate-and-fire neuron array.
//
// The column chain (N_COL stages) is shifted once per time step by
// `col_clk`, the row chain (N_ROW stages) once per column sweep by
// `row_clk`; each carries the single scan-enable pulse that the FPGA
// injects at `col_sin` / `row_sin`. Where the two pulses meet, one neuron
// is selected: it alone drives `spike_out` and receives `inh_en`. There is
// no address decoder and no arbiter. `rst_n` clears both chains (an
// addition of this design). The chains are synthesizable; the array is not.
module adc_chip #(
  parameter int unsigned N_COL        = 30,
  parameter int unsigned N_ROW        = 7,
  parameter real         EXC_MISMATCH = 0.0,
  parameter real         INH_MISMATCH = 0.0
) (
  input  real  exc_in,
  input  real  i_lim_exc,
  input  real  i_lim_inh,
  input  logic rst_n,
  input  logic col_clk,
  input  logic col_sin,
  input  logic row_clk,
  input  logic row_sin,
  input  logic inh_en,
  output logic spike_out,
  output logic col_sout,
  output logic row_sout
);
  timeunit 1ns; timeprecision 1ps;

  logic [N_COL-1:0] col_sel;
  logic [N_ROW-1:0] row_sel;

  scan_chain #(.LEN(N_COL)) u_col_chain (
    .sclk(col_clk), .rst_n, .sin(col_sin), .q(col_sel), .sout(col_sout)
  );
  scan_chain #(.LEN(N_ROW)) u_row_chain (
    .sclk(row_clk), .rst_n, .sin(row_sin), .q(row_sel), .sout(row_sout)
  );

  neuron_array #(.N_COL(N_COL), .N_ROW(N_ROW),
                 .EXC_MISMATCH(EXC_MISMATCH), .INH_MISMATCH(INH_MISMATCH)) u_array (
    .exc_in, .i_lim_exc, .i_lim_inh, .col_sel, .row_sel, .inh_en, .spike_out
  );
endmodule
