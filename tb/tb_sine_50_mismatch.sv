// Workload testbench: the 50-neuron experiment with device mismatch. Fifty
// neurons (here 10 columns x 5 rows, so that both scan chains work), 20 %
// gain spread on every neuron's input mirror and 30 % on its discharge
// path, and a sinusoidal input: three periods over 300 "time steps", a
// time step here being one full scan of the 50 neurons (1.5 us). The
// reference experiment used 2 uA +- 0.5 uA in a model with other device
// constants; this behavioural neuron (80 fF membrane) would saturate at
// that current, so the input is scaled by 1/100 to 20 nA +- 5 nA, keeping
// the same modulation depth.
// The testbench counts spikes per time step, low-pass filters the counts
// (moving average over 9 steps), fits input = a + b * filtered count by
// least squares, and reports the RMS error of that reconstruction relative
// to the mean input (the reference experiment reports 6 %, with a mean of
// 7.3 % over 30 mismatch draws). It checks that the reconstruction follows
// the input (correlation above 0.9, error below 10 %), that at least 90 %
// of the neurons fire (a neuron with a weak input mirror and a strong
// discharge path may stay silent), and that series of inhibition pulses
// start.
module tb_sine_50_mismatch;
  timeunit 1ns; timeprecision 1ps;
  localparam int unsigned NC = 10, NR = 5, N = NC * NR, C = 10;
  localparam int unsigned STEPS = 300;             // scans of the array
  localparam real T_SCAN = real'(N * C) * 3.0;     // ns per scan
  localparam real PI = 3.14159265358979;
  localparam int unsigned LP = 9;                  // moving-average length

  logic clk = 0, rst_n = 1;
  real  i_in = 0.0, i_lim_exc = 800e-9, i_lim_inh = 4e-6;
  logic spike_out, inh_en, spike_valid, seq_start, spike_blocked;
  logic [$clog2(N)-1:0] spike_idx;
  int   checks = 0, failures = 0;

  neuromorphic_adc #(.N_COL(NC), .N_ROW(NR), .EXC_MISMATCH(0.2), .INH_MISMATCH(0.3)) dut (.*);

  always #1.5 clk = ~clk;

  function automatic real input_at(real t_ns);
    return 20e-9 + 5e-9 * $sin(2.0 * PI * 3.0 * t_ns / (real'(STEPS) * T_SCAN));
  endfunction

  initial begin
    #(real'(STEPS + 10) * T_SCAN);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real t0 = 0.0;
  always begin
    i_in = input_at($realtime - t0);
    #5;
  end

  int counts [STEPS];
  int per_neuron [N];
  int n_start = 0;
  bit running = 0;

  always @(posedge clk) if (running) begin
    if (spike_valid) begin
      int k;
      k = int'($floor(($realtime - t0) / T_SCAN));
      if (k >= 0 && k < STEPS) counts[k]++;
      per_neuron[spike_idx]++;
    end
    if (seq_start) n_start++;
  end

  initial begin
    real filt [STEPS];
    real x, y, sx, sy, sxx, sxy, syy, a, b, err, mean_in, corr, nn;
    foreach (counts[i]) counts[i] = 0;
    foreach (per_neuron[i]) per_neuron[i] = 0;
    #0.5 rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(posedge clk);
    t0 = $realtime;
    running = 1;
    #(real'(STEPS) * T_SCAN);
    running = 0;
    // low-pass: centred moving average
    for (int k = 0; k < STEPS; k++) begin
      int lo, hi;
      lo = (k < LP / 2) ? 0 : k - LP / 2;
      hi = (k + LP / 2 >= STEPS) ? STEPS - 1 : k + LP / 2;
      filt[k] = 0.0;
      for (int j = lo; j <= hi; j++) filt[k] += counts[j];
      filt[k] /= real'(hi - lo + 1);
    end
    // least-squares fit of the input (at the middle of each step) on filt,
    // skipping the first two scans while the membranes charge up
    sx = 0; sy = 0; sxx = 0; sxy = 0; syy = 0; nn = 0;
    for (int k = 2; k < STEPS; k++) begin
      x = filt[k]; y = input_at((real'(k) + 0.5) * T_SCAN);
      sx += x; sy += y; sxx += x * x; sxy += x * y; syy += y * y; nn += 1.0;
    end
    b = (nn * sxy - sx * sy) / (nn * sxx - sx * sx);
    a = (sy - b * sx) / nn;
    corr = (nn * sxy - sx * sy) / $sqrt((nn * sxx - sx * sx) * (nn * syy - sy * sy));
    err = 0.0;
    for (int k = 2; k < STEPS; k++) begin
      y = input_at((real'(k) + 0.5) * T_SCAN);
      err += (a + b * filt[k] - y) ** 2;
    end
    mean_in = sy / nn;
    err = $sqrt(err / nn) / mean_in;
    $display("INFO spikes in the middle time step: %0d; series started %0d", counts[STEPS/2], n_start);
    $display("INFO reconstruction: correlation %0.3f, RMS error %0.2f %% of the mean input", corr, 100.0 * err);
    checks++; if (corr < 0.9) begin failures++; $display("FAIL reconstruction does not follow the input"); end
    checks++; if (err > 0.10) begin failures++; $display("FAIL reconstruction error above 10 %%"); end
    checks++; if (n_start == 0) begin failures++; $display("FAIL no inhibition series"); end
    begin
      int silent = 0;
      foreach (per_neuron[i]) if (per_neuron[i] == 0) silent++;
      $display("INFO neurons that never fired (weakest input mirrors): %0d of %0d", silent, N);
      checks++; if (silent > N / 10) begin failures++; $display("FAIL %0d neurons silent", silent); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
