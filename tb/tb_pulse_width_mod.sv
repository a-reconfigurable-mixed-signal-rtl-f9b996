// Testbench for pulse_width_mod. The testbench plays the scan enable
// generator (phase and neuron index counters, 10 clocks per step) and the
// chip (a spike level held for a whole step, random, about one step in
// six). A step-level reference model of the inhibition rule decides, for
// every step, whether a series starts, which series position the step
// carries and which neurons hold an "inhibited" flag; from that it derives
// the expected level of the inhibition line in every clock and the
// expected event strobes. Widths are recomputed here with real arithmetic:
// ceil(W_SPAN*(N-pos)/N). N is reduced to 12 so that many series complete.
module tb_pulse_width_mod;
  timeunit 1ns; timeprecision 1ps;
  localparam int unsigned N = 12, C = 10, DET = 2, SPAN = C - DET - 2;
  localparam int unsigned NW = $clog2(N);

  logic clk = 0, rst_n = 1;
  logic [$clog2(C)-1:0] phase;
  logic [NW-1:0] nidx;
  logic spike = 0;
  logic inh_en, seq_active, spike_valid, seq_start, spike_blocked;
  logic [NW-1:0] seq_pos, spike_idx;
  int checks = 0, failures = 0;
  int n_start = 0, n_block_flag = 0, n_block_active = 0, n_done = 0;

  pulse_width_mod #(.N(N), .CLK_PER_STEP(C), .DET_PHASE(DET)) dut (.*);

  always #1.5 clk = ~clk;

  function automatic int width(int pos);
    return int'($ceil(real'(SPAN) * real'(N - pos) / real'(N)));
  endfunction

  task automatic expect_eq(string what, longint got, longint exp, int s, int p);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL step %0d cycle %0d %s: got %0d expected %0d", s, p, what, got, exp);
    end
  endtask

  initial begin
    #500000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit active = 0, started, blocked;
    int pos = 0, n;
    bit flags [N];
    bit exp_inh;
    foreach (flags[i]) flags[i] = 0;
    phase = C - 1; nidx = N - 1;
    #0.5 rst_n = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < 3000; s++) begin
      n = s % N;
      // reference: the series moves on at the step boundary
      if (active) begin
        pos++;
        if (pos == N) begin active = 0; n_done++; end
        else if (width(pos) > 0) flags[n] = 1;
      end
      spike = ($urandom_range(0, 5) == 0);
      started = 0; blocked = 0;
      for (int p = 0; p < C; p++) begin
        @(posedge clk);
        phase <= p[$clog2(C)-1:0];
        nidx  <= n[NW-1:0];
        @(negedge clk);
        // inh_en seen in cycle p
        if (started) exp_inh = (p > DET);
        else if (active && pos > 0) exp_inh = (p < width(pos));
        else exp_inh = 0;
        expect_eq("inh_en", inh_en, exp_inh, s, p);
        expect_eq("spike_valid", spike_valid, (p == DET + 1) && spike, s, p);
        expect_eq("seq_start", seq_start, (p == DET + 1) && started, s, p);
        expect_eq("spike_blocked", spike_blocked, (p == DET + 1) && blocked, s, p);
        if (p == DET + 1 && spike) expect_eq("spike_idx", spike_idx, n, s, p);
        if (p == DET) begin
          // reference decision on the spike sampled at the end of this cycle
          if (spike) begin
            if (!active && !flags[n]) begin
              active = 1; pos = 0; started = 1; n_start++;
            end else begin
              if (active) n_block_active++; else n_block_flag++;
              flags[n] = 0; blocked = 1;
            end
          end
        end
      end
    end
    $display("INFO series started %0d, completed %0d, spikes blocked by flag %0d, during a series %0d",
             n_start, n_done, n_block_flag, n_block_active);
    checks++; if (n_start == 0 || n_done == 0) failures++;
    checks++; if (n_block_flag == 0 || n_block_active == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
