// Testbench for the if_neuron behavioural model. Expected values are worked
// out here from the circuit equations, not taken from the model:
//   - with a constant input I and leak G the membrane follows
//     V(t) = (I/G)(1 - exp(-t G/C)), so the first spike of a selected neuron
//     is expected at t = -(C/G) ln(1 - Vth G / I), Vth = (UT/kappa) ln(Ilim/I0);
//   - a selected neuron with Inh_en high for T loses about I_inh*T/C;
//   - an unselected neuron neither spikes nor is discharged;
//   - the membrane never goes below 0 V or above VDD.
// Times are checked to within 2 %, voltages to within 1 %.
module tb_if_neuron;
  timeunit 1ns; timeprecision 1ps;
  localparam real C = 80e-15, G = 4e-9, KAPPA = 0.7, UT = 0.0256, I0 = 1e-15, VDD = 1.2;

  real  exc_in = 0.0, i_lim_exc = 800e-9, i_lim_inh = 4e-6;
  logic col_sel = 0, col_sel_n = 1, row_sel = 0, inh_en = 0;
  logic spike_out;
  int   checks = 0, failures = 0;

  if_neuron dut (.*);

  task automatic check_close(string what, real got, real exp, real rel);
    checks++;
    if (got > exp * (1.0 + rel) + 1e-6 || got < exp * (1.0 - rel) - 1e-6) begin
      failures++;
      $display("FAIL %s: got %g expected %g", what, got, exp);
    end
  endtask

  task automatic check_bit(string what, logic got, logic exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0b expected %0b", what, got, exp); end
  endtask

  task automatic select(bit on);
    col_sel = on; col_sel_n = !on; row_sel = on;
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real vth, t_exp, t0, v0, v1;
    vth = (UT / KAPPA) * $ln(i_lim_exc / I0);
    // 1. integration to threshold of a selected neuron, 100 nA input
    #10;
    select(1);
    check_bit("no spike at rest", spike_out, 0);
    exc_in = 100e-9;
    t0 = $realtime;
    t_exp = -(C / G) * $ln(1.0 - vth * G / exc_in) * 1e9;
    wait (spike_out === 1'b1);
    check_close("time to threshold (ns)", $realtime - t0, t_exp, 0.02);
    check_close("membrane at spike (V)", dut.v_mem, vth, 0.01);
    // 2. selection gates the output
    col_sel = 0; col_sel_n = 1; #1 check_bit("output with Col_sel low", spike_out, 0);
    col_sel = 1; col_sel_n = 0; row_sel = 0; #1 check_bit("output with Row_sel low", spike_out, 0);
    row_sel = 1; col_sel_n = 1; #1 check_bit("output with Col_sel_n high", spike_out, 0);
    col_sel_n = 0; #1 check_bit("output when selected", spike_out, 1);
    // 3. inhibition only discharges a selected neuron
    exc_in = 0.0;
    col_sel = 0; col_sel_n = 1;
    v0 = dut.v_mem;
    inh_en = 1; #9; inh_en = 0;
    v1 = dut.v_mem;
    check_close("unselected neuron keeps its charge (V)", v1, v0 - G * v0 * 9e-9 / C, 0.01);
    select(1);
    v0 = dut.v_mem;
    inh_en = 1; #9; inh_en = 0;
    v1 = dut.v_mem;
    check_close("discharge in 9 ns (V)", v0 - v1, i_lim_inh * 9e-9 / C + G * v0 * 9e-9 / C, 0.01);
    #1 check_bit("below threshold after inhibition", spike_out, 0);
    // 4. long pulse resets to zero, not below
    inh_en = 1; #30; inh_en = 0;
    check_close("reset to zero (V)", dut.v_mem, 0.0, 0.0);
    // 5. saturation at VDD
    exc_in = 2e-6; #200;
    check_close("clamped at VDD (V)", dut.v_mem, VDD, 0.001);
    // 6. the threshold follows the V_lim_exc bias: 8 nA lowers it
    exc_in = 0.0; inh_en = 1; #30; inh_en = 0;
    i_lim_exc = 8e-9;
    vth = (UT / KAPPA) * $ln(i_lim_exc / I0);
    exc_in = 100e-9; t0 = $realtime;
    t_exp = -(C / G) * $ln(1.0 - vth * G / exc_in) * 1e9;
    wait (spike_out === 1'b1);
    check_close("time to lower threshold (ns)", $realtime - t0, t_exp, 0.02);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
