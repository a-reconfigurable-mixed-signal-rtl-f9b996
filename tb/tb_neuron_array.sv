// Testbench for neuron_array on a 4 x 3 array. All neurons integrate the
// same input, so without mismatch they all reach threshold together. The
// testbench then checks the shared channels: with no enable or with only a
// column or only a row enable the output stays low; with one column and one
// row enable the output follows that neuron alone; a pulse on the shared
// inhibition line resets only the selected neuron and leaves the others
// (including those in the same column or row) untouched. A second array
// with 20 % input mismatch must show distinct per-neuron gains, all within
// +-20 % of nominal.
module tb_neuron_array;
  timeunit 1ns; timeprecision 1ps;
  localparam int unsigned NC = 4, NR = 3;

  real  exc_in = 0.0, i_lim_exc = 800e-9, i_lim_inh = 4e-6;
  logic [NC-1:0] col_sel = '0;
  logic [NR-1:0] row_sel = '0;
  logic inh_en = 0, spike_out, spike_out_mm;
  int   checks = 0, failures = 0;
  real  v [NR][NC];
  real  vm [NR][NC];

  neuron_array #(.N_COL(NC), .N_ROW(NR)) dut (.*);
  neuron_array #(.N_COL(NC), .N_ROW(NR), .EXC_MISMATCH(0.2)) dut_mm (
    .exc_in, .i_lim_exc, .i_lim_inh, .col_sel, .row_sel, .inh_en, .spike_out(spike_out_mm));

  // membrane voltages, copied out of the generate hierarchy
  for (genvar r = 0; r < NR; r++) begin : g_r
    for (genvar c = 0; c < NC; c++) begin : g_c
      always @* v[r][c] = dut.g_row[r].g_col[c].u_neuron.v_mem;
      always @* vm[r][c] = dut_mm.g_row[r].g_col[c].u_neuron.v_mem;
    end
  end

  task automatic check_bit(string what, logic got, logic exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0b expected %0b", what, got, exp); end
  endtask

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real v_before [NR][NC];
    real vmin, vmax;
    exc_in = 100e-9;
    #700;                               // all neurons above threshold (~0.75 V)
    // mismatch: gains spread within +-20 %
    vmin = 10.0; vmax = 0.0;
    for (int r = 0; r < NR; r++)
      for (int c = 0; c < NC; c++) begin
        if (vm[r][c] < vmin) vmin = vm[r][c];
        if (vm[r][c] > vmax) vmax = vm[r][c];
      end
    check($sformatf("mismatch spread %g..%g V around %g V", vmin, vmax, v[0][0]),
          vmin >= 0.79 * v[0][0] && vmax <= 1.21 * v[0][0] && vmax - vmin > 0.05 * v[0][0]);
    check_bit("no selection", spike_out, 0);
    col_sel = 4'b0100; #2 check_bit("column only", spike_out, 0);
    col_sel = 4'b0000; row_sel = 3'b010; #2 check_bit("row only", spike_out, 0);
    col_sel = 4'b0100; #2 check_bit("neuron (1,2) selected", spike_out, 1);
    exc_in = 0.0;
    v_before = v;
    inh_en = 1; #30; inh_en = 0;        // 120 fC: more than the stored charge
    #2;
    for (int r = 0; r < NR; r++)
      for (int c = 0; c < NC; c++)
        if (r == 1 && c == 2) check($sformatf("selected neuron reset (%g V)", v[r][c]), v[r][c] == 0.0);
        else check($sformatf("neuron (%0d,%0d) untouched", r, c),
                   v[r][c] > 0.99 * v_before[r][c] && v[r][c] <= v_before[r][c]);
    check_bit("reset neuron stops spiking", spike_out, 0);
    col_sel = 4'b0001; row_sel = 3'b100; #2 check_bit("neuron (2,0) still above threshold", spike_out, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
