// Workload testbench: the ten-neuron circuit experiment. One row of ten
// neurons, 333 MHz generator clock, 33.3 MHz column shift, V_lim_exc bias
// 800 nA, V_lim_inh bias 4 uA, and a triangular input current rising from
// 0 A to 100 nA in 25 us and falling back to 0 A at 50 us, two periods
// (100 us). It reports the average output spike rate (the published
// transistor-level simulation reports 6.6 spikes/us; this behavioural model
// has its own device constants, so the number is printed, not checked) and
// checks what must hold for any working converter:
//   - every spike event names the neuron selected in that step;
//   - the spike rate in the quarter-periods around the 100 nA peaks is well
//     above the rate around the 0 A valleys;
//   - the spikes are spread over all ten neurons (no neuron silent, none
//     taking more than a third of the spikes);
//   - series of inhibition pulses start, complete and block spikes.
module tb_sawtooth_1x10;
  timeunit 1ns; timeprecision 1ps;
  localparam int unsigned NC = 10, NR = 1, N = NC * NR, C = 10;
  localparam real T_END = 100000.0;   // ns

  logic clk = 0, rst_n = 1;
  real  i_in = 0.0, i_lim_exc = 800e-9, i_lim_inh = 4e-6;
  logic spike_out, inh_en, spike_valid, seq_start, spike_blocked;
  logic [$clog2(N)-1:0] spike_idx;
  int   checks = 0, failures = 0;

  neuromorphic_adc #(.N_COL(NC), .N_ROW(NR)) dut (.*);

  always #1.5 clk = ~clk;

  initial begin
    #(T_END + 5000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // triangle: 0 -> 100 nA in 25 us -> 0 at 50 us, repeated
  initial begin
    real ph;
    forever begin
      ph = $realtime - 50000.0 * $floor($realtime / 50000.0);
      i_in = (ph < 25000.0) ? 100e-9 * ph / 25000.0 : 100e-9 * (50000.0 - ph) / 25000.0;
      #5;
    end
  end

  int cycle = 0, n_spikes = 0, n_start = 0, n_block = 0, n_done = 0;
  int peak_spikes = 0, valley_spikes = 0, bad_idx = 0;
  int per_neuron [N];
  logic seq_active_d = 0;

  always @(posedge clk) if (rst_n) begin
    cycle <= cycle + 1;
    seq_active_d <= dut.u_fpga.u_pwm.seq_active;
    if (seq_active_d && !dut.u_fpga.u_pwm.seq_active) n_done++;
    if (spike_valid) begin
      real ph;
      n_spikes++;
      per_neuron[spike_idx]++;
      // spike reported in cycle DET+1 = 3 of step cycle/10
      if (int'(spike_idx) != ((cycle - 3) / C) % N) bad_idx++;
      ph = $realtime - 50000.0 * $floor($realtime / 50000.0);
      if (ph >= 12500.0 && ph < 37500.0) peak_spikes++; else valley_spikes++;
    end
    if (seq_start) n_start++;
    if (spike_blocked) n_block++;
  end

  initial begin
    int most;
    foreach (per_neuron[i]) per_neuron[i] = 0;
    #0.5 rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    #(T_END);
    $display("INFO %0d spikes in %0.0f us: %0.2f spikes/us (published circuit: 6.6)",
             n_spikes, T_END / 1000.0, real'(n_spikes) / (T_END / 1000.0));
    $display("INFO spikes near peaks %0d, near valleys %0d; series started %0d, completed %0d, blocked spikes %0d",
             peak_spikes, valley_spikes, n_start, n_done, n_block);
    most = 0;
    foreach (per_neuron[i]) begin
      $display("INFO neuron %0d: %0d spikes", i, per_neuron[i]);
      checks++; if (per_neuron[i] == 0) begin failures++; $display("FAIL neuron %0d silent", i); end
      if (per_neuron[i] > most) most = per_neuron[i];
    end
    checks++; if (bad_idx != 0) begin failures++; $display("FAIL %0d spikes with wrong address", bad_idx); end
    checks++; if (peak_spikes < 3 * valley_spikes) begin failures++; $display("FAIL rate does not follow the input"); end
    checks++; if (3 * most > n_spikes) begin failures++; $display("FAIL spikes concentrated on one neuron"); end
    checks++; if (n_start == 0 || n_done == 0 || n_block == 0) begin failures++; $display("FAIL a mechanism never happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
