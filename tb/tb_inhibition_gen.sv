// Testbench for inhibition_gen (scan enable generator + pulse width
// modulator + spike synchroniser) on a 4 x 2 array. The testbench drives
// the chip's spike line for whole time steps, as a selected neuron above
// threshold would, and checks: the column clock rate (one per 10 clocks);
// that a spike reaches the modulator through the two-flop synchroniser in
// time to be sampled in cycle 2, with the right neuron address; the full
// inhibition waveform of a series (firing neuron from cycle 3 to the end of
// its step, then ceil(6*(8-pos)/8) clocks at the start of each following
// step); that a neuron inhibited by that series only spikes; and that its
// next spike starts a new series; a spike that rises one cycle into
// its step is too late for the synchroniser and is ignored.
module tb_inhibition_gen;
  timeunit 1ns; timeprecision 1ps;
  localparam int unsigned NC = 4, NR = 2, N = NC * NR, C = 10, DET = 2;

  logic clk = 0, rst_n = 1, spike_in = 0;
  logic col_clk, col_sin, row_clk, row_sin, inh_en;
  logic spike_valid, seq_start, spike_blocked;
  logic [$clog2(N)-1:0] spike_idx;
  int checks = 0, failures = 0, col_edges = 0;

  inhibition_gen #(.N_COL(NC), .N_ROW(NR)) dut (.*);

  always #1.5 clk = ~clk;
  always @(posedge col_clk) col_edges++;

  task automatic expect_eq(string what, longint got, longint exp, int s, int p);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL step %0d cycle %0d %s: got %0d expected %0d", s, p, what, got, exp);
    end
  endtask

  // Runs one time step (step index s). `fire` drives the spike line from
  // the start of the step; expected inhibition is high in cycles
  // [inh_from, inh_to); ev is the expected event: 0 none, 1 start, 2 blocked.
  task automatic step(int s, bit fire, int inh_from, int inh_to, int ev, int fire_from = 0);
    for (int p = 0; p < C; p++) begin
      @(posedge clk);
      spike_in <= fire && (p >= fire_from);
      @(negedge clk);
      expect_eq("inh_en", inh_en, (p >= inh_from) && (p < inh_to), s, p);
      expect_eq("col_clk", col_clk, p < C / 2, s, p);
      expect_eq("spike_valid", spike_valid, (p == DET + 1) && ev != 0, s, p);
      expect_eq("seq_start", seq_start, (p == DET + 1) && ev == 1, s, p);
      expect_eq("spike_blocked", spike_blocked, (p == DET + 1) && ev == 2, s, p);
      if (p == DET + 1 && ev != 0) expect_eq("spike_idx", spike_idx, s % N, s, p);
    end
  endtask

  function automatic int width(int pos);
    return (6 * (N - pos) + N - 1) / N;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int s = 0;
    #0.5 rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // neuron 0 fires: a full series over all 8 neurons
    step(s++, 1, DET + 1, C, 1);
    for (int pos = 1; pos < N; pos++) step(s++, 0, 0, width(pos), 0);
    // quiet step, then neuron 1 (inhibited by that series) fires: spike only
    step(s++, 0, 0, 0, 0);                 // neuron 0
    step(s++, 1, 0, 0, 2);                 // neuron 1
    for (int k = 2; k < N; k++) step(s++, 0, 0, 0, 0);
    // neuron 0 fires again: its flag was never set, a new series starts
    step(s++, 1, DET + 1, C, 1);
    step(s++, 1, 0, width(1), 2);          // neuron 1 fires inside the series
    for (int pos = 2; pos < N; pos++) step(s++, 0, 0, width(pos), 0);
    // a spike that only appears in cycle 1 of its step reaches the
    // modulator after the sampling point (two-flop latency): ignored
    step(s++, 1, 0, 0, 0, 1);              // neuron 0
    step(s++, 1, DET + 1, C, 1);
    expect_eq("column shift count", col_edges, s, s, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
