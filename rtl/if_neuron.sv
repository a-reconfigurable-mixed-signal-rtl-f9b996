// Integrate-and-fire neuron of the analogue chip: a behavioural model, not
// synthesizable logic. It stands in for the 13-transistor circuit and keeps
// that circuit's terminals as ports.
//
// Circuit being modelled: the input current, mirrored onto Exc_en, charges
// the MOS capacitor C_mem through M1-M2 all the time. While the neuron's
// Col_sel (M4) and the shared Inh_en line (M5) are both high, C_mem is
// discharged through M3, whose current is set by V_lim_inh. A current
// comparator (M6-M8) compares the current that V_mem lets M8 sink with the
// current set by V_lim_exc; the result goes through a transmission gate and
// an inverter, and M13, gated by Row_sel, puts it on the shared output.
// The comparator only draws current while Col_sel_n is low.
//
// Model: V_mem is integrated with forward Euler every DT_NS nanoseconds,
// at instants offset by half a step from the integer-nanosecond clock grid
// so that logic edges are never sampled at the instant they change:
//     C_MEM dV/dt = EXC_GAIN*I_exc - G_LEAK*V - INH_GAIN*I_lim_inh*[Col_sel & Inh_en]
// clamped to [0, VDD]. The threshold is the gate voltage at which M8, in
// weak inversion, sinks the V_lim_exc current: (UT/KAPPA)*ln(I_lim_exc/I0),
// about 0.75 V for 800 nA. Spike_out is high while the neuron is selected
// (Col_sel high, Col_sel_n low, Row_sel high) and V_mem is above threshold,
// and 0 otherwise, standing in for the undriven shared line.
// The port list and the transistor roles follow the published schematic;
// every numerical constant below (capacitance, leak, VDD, device constants)
// is this model's own choice.
module if_neuron #(
  parameter real C_MEM    = 80e-15,  // membrane capacitance (F)
  parameter real G_LEAK   = 4e-9,    // leak conductance (S), tau = 20 us
  parameter real VDD      = 1.2,     // supply (V)
  parameter real KAPPA    = 0.7,     // M8 subthreshold slope factor
  parameter real UT       = 0.0256,  // thermal voltage (V)
  parameter real I0       = 1e-15,   // M8 leakage-current scale (A)
  parameter real EXC_GAIN = 1.0,     // input-mirror gain (mismatch)
  parameter real INH_GAIN = 1.0,     // discharge-path gain (mismatch)
  parameter real V_INIT   = 0.0,     // membrane voltage at time 0 (V)
  parameter real DT_NS    = 1.0      // integration step (ns)
) (
  input  real  exc_in,     // current mirrored onto Exc_en (A)
  input  real  i_lim_exc,  // bias current behind V_lim_exc (A)
  input  real  i_lim_inh,  // bias current behind V_lim_inh (A)
  input  logic col_sel,    // Col_sel
  input  logic col_sel_n,  // Col_sel_n
  input  logic row_sel,    // Row_sel
  input  logic inh_en,     // Inh_en
  output logic spike_out   // Spike_out
);
  timeunit 1ns; timeprecision 1ps;

  real v_mem;
  real v_th;
  real i_net;

  always_comb v_th = (UT / KAPPA) * $ln(((i_lim_exc > I0) ? i_lim_exc : 2.0 * I0) / I0);

  initial begin
    v_mem = V_INIT;
    #(DT_NS / 2.0);
    forever begin
      i_net = EXC_GAIN * exc_in - G_LEAK * v_mem;
      if (col_sel && inh_en) i_net = i_net - INH_GAIN * i_lim_inh;
      v_mem = v_mem + i_net * DT_NS * 1.0e-9 / C_MEM;
      if (v_mem < 0.0) v_mem = 0.0;
      if (v_mem > VDD) v_mem = VDD;
      #(DT_NS);
    end
  end

  always_comb spike_out = col_sel && !col_sel_n && row_sel && (v_mem > v_th);
endmodule
