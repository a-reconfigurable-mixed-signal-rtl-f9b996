// Testbench for adc_chip on a 4 x 2 chip, driving the scan chains the way
// the FPGA does but with its own simple waveforms. It injects one row pulse
// and one column pulse, walks the column pulse across the array, and at
// every position inhibits the selected neuron for one step. It checks that
// each neuron is reset exactly when it is the selected one (row r, column c
// after c column shifts), that no other neuron loses charge, that the output
// channel shows the selected neuron's state, and that the pulses leave the
// chains after N_COL (N_ROW) shifts.
module tb_adc_chip;
  timeunit 1ns; timeprecision 1ps;
  localparam int unsigned NC = 4, NR = 2;

  real  exc_in = 0.0, i_lim_exc = 800e-9, i_lim_inh = 4e-6;
  logic rst_n = 1, col_clk = 0, col_sin = 0, row_clk = 0, row_sin = 0, inh_en = 0;
  logic spike_out, col_sout, row_sout;
  int   checks = 0, failures = 0;
  real  v [NR][NC];

  adc_chip #(.N_COL(NC), .N_ROW(NR)) dut (.*);

  for (genvar r = 0; r < NR; r++) begin : g_r
    for (genvar c = 0; c < NC; c++) begin : g_c
      always @* v[r][c] = dut.u_array.g_row[r].g_col[c].u_neuron.v_mem;
    end
  end

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic pulse_col(logic s);
    col_sin = s; #5 col_clk = 1; #10 col_clk = 0; #5;
  endtask

  task automatic pulse_row(logic s);
    row_sin = s; #5 row_clk = 1; #10 row_clk = 0; #5;
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real vb [NR][NC];
    #1 rst_n = 0;
    #4 rst_n = 1;
    exc_in = 100e-9;
    #700;                         // every neuron above threshold
    exc_in = 0.0;
    check("nothing selected after clear", spike_out == 0);
    for (int r = 0; r < NR; r++) begin
      pulse_row(r == 0);
      for (int c = 0; c < NC; c++) begin
        pulse_col(c == 0);
        check($sformatf("(%0d,%0d) selected, above threshold", r, c), spike_out == 1);
        vb = v;
        inh_en = 1; #30 inh_en = 0; #1;
        for (int rr = 0; rr < NR; rr++)
          for (int cc = 0; cc < NC; cc++)
            if (rr == r && cc == c) check($sformatf("(%0d,%0d) reset", rr, cc), v[rr][cc] == 0.0);
            else check($sformatf("(%0d,%0d) untouched while (%0d,%0d) selected", rr, cc, r, c),
                       v[rr][cc] >= 0.99 * vb[rr][cc]);
        check("output low after reset", spike_out == 0);
        check("column pulse still inside", col_sout == (c == NC - 1));
      end
      check("row pulse position", row_sout == (r == NR - 1));
    end
    pulse_col(1'b0);
    check("column pulse left the chain", col_sout == 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
