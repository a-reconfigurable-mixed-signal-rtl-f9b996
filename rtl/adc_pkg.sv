// Shared constants and helper functions of the neuromorphic ADC.
//
// The array size (30 columns x 7 rows) and the clock ratio (inhibition
// generator at 333 MHz, column shift at 33.3 MHz, so 10 clocks per time
// step) are the published numbers of the design. The inhibition pulse-width
// law in pulse_width() is this design's own choice: the published design
// only says that every neuron gets a different width and that the firing
// neuron's own pulse is the longest.
package adc_pkg;
  timeunit 1ns; timeprecision 1ps;

  localparam int unsigned N_COL_DEF        = 30;  // columns of the neuron array
  localparam int unsigned N_ROW_DEF        = 7;   // rows of the neuron array
  localparam int unsigned CLK_PER_STEP_DEF = 10;  // 333 MHz / 33.3 MHz
  localparam int unsigned DET_PHASE_DEF    = 2;   // cycle in which the spike is sampled

  // Width, in generator clocks, of the inhibition pulse sent to the neuron
  // that is `pos` time steps behind the firing neuron (pos >= 1), in a
  // network of n neurons: ceil(span * (n - pos) / n). Nearer neurons get
  // wider pulses, every neuron gets at least one clock, none more than span.
  function automatic int unsigned pulse_width(int unsigned pos, int unsigned n,
                                              int unsigned span);
    if (pos == 0 || pos >= n) return 0;
    return (span * (n - pos) + n - 1) / n;
  endfunction
endpackage
