// End-to-end testbench of the neuromorphic ADC at its default size: 30 x 7
// neurons, 333 MHz generator clock (3 ns), 10 clocks per time step. The
// input current ramps from 2 nA to 12 nA over about eight full scans of the
// array (one scan = 210 steps = 6.3 us).
//
// The testbench keeps its own reference of the scan (step s selects neuron
// s mod 210) and of the inhibition rule, fed only with the chip's output
// line as the generator's synchroniser sees it (sampled at the end of the
// first cycle of each step). For every step it checks:
//   - the spike event, its neuron address, and whether it started a series
//     or was blocked, in cycle 3 of the step;
//   - the membrane voltage of the selected neuron at the end of the step:
//     it must have dropped by the charge of the expected inhibition pulse,
//     (clocks * 3 ns * 4 uA) / 80 fF = 0.15 V per clock, down to 0 V at the
//     least, to within 10 mV (the input adds at most 5 mV in a step).
// It counts every mechanism of the design (column sweeps, full scans,
// spikes, series started and completed, spikes blocked by the flag and
// blocked during a series) and fails if one never happened. It also checks
// that the spike rate rises with the input.
module tb_neuromorphic_adc;
  timeunit 1ns; timeprecision 1ps;
  import adc_pkg::*;
  localparam int unsigned NC = N_COL_DEF, NR = N_ROW_DEF, N = NC * NR;
  localparam int unsigned C = CLK_PER_STEP_DEF, DET = DET_PHASE_DEF;
  localparam int unsigned SPAN = C - DET - 2;
  localparam real V_PER_CLK = 3e-9 * 4e-6 / 80e-15;
  localparam int unsigned STEPS = 8 * N + 50;

  logic clk = 0, rst_n = 1;
  real  i_in = 0.0, i_lim_exc = 800e-9, i_lim_inh = 4e-6;
  logic spike_out, inh_en, spike_valid, seq_start, spike_blocked;
  logic [$clog2(N)-1:0] spike_idx;
  int   checks = 0, failures = 0;
  real  v [N];

  neuromorphic_adc dut (.*);

  always #1.5 clk = ~clk;

  for (genvar r = 0; r < NR; r++) begin : g_r
    for (genvar c = 0; c < NC; c++) begin : g_c
      always @* v[r * NC + c] = dut.u_chip.u_array.g_row[r].g_col[c].u_neuron.v_mem;
    end
  end

  function automatic int width(int pos);
    return (pos == 0) ? 0 : int'($ceil(real'(SPAN) * real'(N - pos) / real'(N)));
  endfunction

  task automatic expect_eq(string what, longint got, longint exp, int s);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL step %0d %s: got %0d expected %0d", s, what, got, exp);
    end
  endtask

  initial begin
    #((STEPS + 20) * C * 3 + 1000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // input: 2 nA rising to 12 nA over the run
  initial begin
    forever begin
      i_in = 2e-9 + 10e-9 * $realtime / (real'(STEPS) * C * 3.0);
      #10;
    end
  end

  initial begin
    bit active = 0, sp, started, blocked;
    int pos = 0, n, clocks;
    bit flags [N];
    real vb, dv;
    int n_sweep = 0, n_scan = 0, n_spike = 0, n_start = 0, n_done = 0;
    int n_blk_flag = 0, n_blk_seq = 0, spikes_first = 0, spikes_second = 0;
    foreach (flags[i]) flags[i] = 0;
    #0.5 rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(posedge clk);                     // step 0 starts
    for (int s = 0; s < STEPS; s++) begin
      // here: just after the clock edge that starts step s
      n = s % N;
      if (n % NC == 0 && s > 0) n_sweep++;
      if (n == 0 && s > 0) n_scan++;
      if (active) begin
        pos++;
        if (pos == N) begin active = 0; n_done++; end
        else if (width(pos) > 0) flags[n] = 1;
      end
      started = 0; blocked = 0;
      vb = v[n];
      @(posedge clk);                   // end of cycle 0: synchroniser input
      sp = spike_out;
      if (sp) begin
        n_spike++;
        if (s < STEPS / 2) spikes_first++; else spikes_second++;
        if (!active && !flags[n]) begin active = 1; pos = 0; started = 1; n_start++; end
        else begin
          if (active) n_blk_seq++; else n_blk_flag++;
          flags[n] = 0; blocked = 1;
        end
      end
      repeat (DET) @(posedge clk);      // now in cycle DET+1
      #0.1;
      expect_eq("spike_valid", spike_valid, sp, s);
      expect_eq("seq_start", seq_start, started, s);
      expect_eq("spike_blocked", spike_blocked, blocked, s);
      if (sp) expect_eq("spike_idx", spike_idx, n, s);
      repeat (C - DET - 1) @(posedge clk); // edge that starts step s+1
      clocks = started ? (C - DET - 1) : (active && pos > 0) ? width(pos) : 0;
      dv = vb - clocks * V_PER_CLK;
      if (dv < 0.0) dv = 0.0;
      checks++;
      if (v[n] > dv + 0.01 || v[n] < dv - 0.01) begin
        failures++;
        if (failures < 10) $display("FAIL step %0d neuron %0d: V %g -> %g, expected %g (%0d clocks)",
                                    s, n, vb, v[n], dv, clocks);
      end
    end
    $display("INFO column sweeps %0d, full scans %0d, spikes %0d, series started %0d, completed %0d, blocked by flag %0d, during a series %0d",
             n_sweep, n_scan, n_spike, n_start, n_done, n_blk_flag, n_blk_seq);
    $display("INFO spikes in first half %0d, second half %0d", spikes_first, spikes_second);
    checks++; if (n_sweep == 0) begin failures++; $display("FAIL no column sweep"); end
    checks++; if (n_scan == 0) begin failures++; $display("FAIL no full scan"); end
    checks++; if (n_spike == 0) begin failures++; $display("FAIL no spike"); end
    checks++; if (n_start == 0) begin failures++; $display("FAIL no series started"); end
    checks++; if (n_done == 0) begin failures++; $display("FAIL no series completed"); end
    checks++; if (n_blk_flag == 0) begin failures++; $display("FAIL no spike blocked by flag"); end
    checks++; if (n_blk_seq == 0) begin failures++; $display("FAIL no spike during a series"); end
    checks++; if (spikes_second <= spikes_first) begin failures++; $display("FAIL spike rate did not rise with the input"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
