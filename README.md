# A time-multiplexed neuromorphic ADC: FPGA inhibition generator and neuron-array model

This converter turns an analogue input current into spike trains, the way a
population of integrate-and-fire neurons would. The input current charges
every neuron of an array all the time. A neuron whose membrane is above
threshold emits a spike, so the spike rate follows the input. If all neurons
are identical and all start from the same voltage, they fire in lock-step
and the output carries little more information than one neuron would.
Lateral inhibition breaks that symmetry. When one neuron fires, every neuron
is discharged by an amount that shrinks with its distance from the firing
neuron in scan order. That spreads the neurons' next firing times.

Two ideas keep the hardware small:

* **Time multiplexing.** Only one neuron is *selected* at a time, one per
  time step. The selected neuron alone drives the shared output line, and
  it alone listens to the shared inhibition line. Selection uses two shift
  registers, a column scan chain and a row scan chain. Each carries a single
  "1", and a neuron is selected where the two meet. There is no address
  decoder and no arbiter.
* **Pulse-width-modulated inhibition.** There is one inhibition line, not a
  synapse from every neuron to every other. The strength of inhibition a
  neuron receives is the length of time the line is high while that neuron
  is selected.

The array is analogue and sits on a chip: 30 columns x 7 rows = 210 neurons,
plus the two scan chains. Everything that decides *when* to inhibit *whom*,
and for how long, is a digital controller, the **inhibition generator**. It
was meant to run on an FPGA so that the inhibition rule can be changed by
recompiling. This repository gives synthesizable RTL for the generator and
for the scan chains. The neurons are a behavioural (real-valued) model, so
the whole converter can be simulated closed-loop.

## Parts

| module | what it is | synthesizable |
|---|---|---|
| `neuromorphic_adc` | top: generator + chip, closed loop | no (contains the analogue model) |
| `inhibition_gen` | FPGA control module: scan enable generator, pulse width modulator, spike synchroniser | yes |
| `scan_enable_gen` | drives the two scan chains, tracks which neuron is selected | yes |
| `pulse_width_mod` | the inhibition rule: which neuron gets how many clocks of inhibition | yes |
| `adc_chip` | the chip: column chain, row chain, neuron array | chains yes, array no |
| `scan_chain` | one scan chain (shift register); 30 stages for columns, 7 for rows | yes |
| `neuron_array` | the neurons, with the shared input, output and inhibition lines | no |
| `if_neuron` | one integrate-and-fire neuron, modelled from its 13-transistor schematic | no |
| `adc_pkg` | default sizes and the pulse-width law | yes |

Signals between the two sides are those of the real board. From generator
to chip: `col_clk`, `col_sin`, `row_clk`, `row_sin` and `inh_en`. From chip
to generator: one line, `spike_out`. That line is the converter's output and
also the *inhibition flag* that tells the generator a neuron has fired.

## Time steps and scanning

The generator runs on one clock, 333 MHz in the reference set-up. A **time
step** is `CLK_PER_STEP` = 10 clocks, so the column chain shifts at
33.3 MHz. In each step exactly one neuron is selected. Neurons are visited in
raster order, all 30 columns of row 0, then row 1, and so on. A full scan of
the 210 neurons takes 210 steps, which is 6.3 us.

Cycle by cycle inside one step (cycle 0 is the first clock of the step):

| cycle | event |
|---|---|
| 0 | `col_clk` rises and the column chain shifts, so the next neuron is selected. On the first step of a row, `row_clk` rises too and the row chain shifts. If the step carries a pulse of a running series (positions 1..N-1, see below), `inh_en` rises here. |
| end of 0 | the chip's `spike_out` enters the two-flop synchroniser |
| end of 2 | the pulse width modulator samples the synchronised spike (`DET_PHASE` = 2) and decides |
| 3 | `spike_valid`, `spike_idx`, `seq_start` or `spike_blocked` are strobed for one clock. If a new series started, `inh_en` is high from here to the end of the step. |
| 5 | `col_clk` and `row_clk` fall. `col_sin` and `row_sin` are set for the next step, so a new "1" enters the column chain exactly when column 0 is due. |
| 9 | last cycle of the step |

A spike counts only if the neuron is above threshold when the step starts.
A neuron that crosses threshold later in the step waits for its next turn,
one full scan later. This follows from the synchroniser's latency, and the
inhibition-generator testbench checks it.

## The inhibition rule

This rule is the heart of the design. A **series** is a run of N
consecutive time steps, one per neuron, in which the inhibition line is
pulsed once per step:

* **Position 0** is the neuron that fired. Its pulse runs from cycle 3 to
  the end of the step, 7 clocks, and is the longest pulse of the series. It
  is meant to reset that neuron's membrane to 0 V.
* **Positions 1 .. N-1** are the neurons that follow in scan order, each in
  its own step. The neuron `pos` steps after the firing one gets a pulse of

      w(pos) = ceil( W_SPAN * (N - pos) / N )   clocks,   W_SPAN = 6 by default

  at the start of its step. Neurons just after the firing neuron get up to
  6 clocks. The last one gets 1 clock. Every width is shorter than the
  firing neuron's 7 clocks.

A three-neuron array (N = 3, so w(1) = 4 and w(2) = 2) in which neuron 1
fires in step T1 looks like this, one character per clock (`#` high,
`_` low):

    step            T1 (neuron 1)  T2 (neuron 2)  T3 (neuron 3)
    cycle           0123456789     0123456789     0123456789
    col_clk         #####_____     #####_____     #####_____
    inh_en          ___#######     ####______     ##________
    spike_valid     ___#______     __________     __________
    seq_start       ___#______     __________     __________

With the 4 uA discharge current and the 80 fF membrane of the neuron model,
one clock of inhibition removes 0.15 V, and the 7-clock reset pulse removes
1.05 V.

A spike does not always start a series. The generator keeps one
**"inhibited" flag per neuron**:

* The flag is set when the neuron receives a non-zero pulse in another
  neuron's series.
* When a neuron spikes, the generator checks it first:
  * If no series is running and the neuron's flag is clear, a new series
    starts (`seq_start`).
  * If the flag is set, or a series is running (which means this neuron is
    being inhibited at that very moment), no series starts. Only the spike
    is passed on (`spike_blocked`), and the neuron's flag is cleared.

So each flag says "has been inhibited by someone else since it last fired".
A neuron that spikes while its flag is set is not reset. It spikes again at
its next turn, and that time it starts a series of its own.

Only one series runs at a time, because there is only one inhibition line.

### What this rule does at full size

In the 10-neuron set-up a series lasts only 10 steps (0.3 us). Most spikes
start a series or fall just after one ends, and the spikes spread evenly
over the neurons. In the 210-neuron array a series lasts a full scan
(6.3 us), and while it runs every spike is blocked. The end-to-end run at
full size shows this: of 606 spikes, 4 started series, 16 were blocked by a
flag and 586 came during a series. That is how the rule behaves when taken
literally at that size; the published design does not describe a larger
configuration in operation. A different rule is a change to
`pulse_width_mod.sv` only. Making such a change easy was the reason for
putting the controller on an FPGA.

## The neuron model

`if_neuron` keeps the terminals of the transistor-level neuron: `exc_in`
(the current mirrored onto Exc_en), the two bias currents behind V_lim_exc
and V_lim_inh, Col_sel, Col_sel_n, Row_sel, Inh_en and Spike_out. It
integrates

    C_mem dV/dt = I_exc - G_leak V - I_lim_inh [Col_sel and Inh_en]

with V clamped to [0, VDD]. It takes a forward-Euler step every 1 ns, at
half-nanosecond offsets so that it never samples a logic edge at the instant
that edge changes.

* **Threshold.** This models the current comparator: the membrane drives an
  NMOS whose current is compared with the V_lim_exc bias. Here the threshold
  is the gate voltage at which a subthreshold device carries that current,
  (U_T/kappa) ln(I_lim_exc / I_0). For 800 nA this is about 0.75 V.
* **Output.** Spike_out is high only while the neuron is selected and above
  threshold, and 0 otherwise. On the chip an unselected neuron leaves the
  line undriven; a two-state simulation needs the 0 instead.

The model's constants are choices made for this model. The reference design
publishes none of them:

| constant | value |
|---|---|
| membrane capacitance | 80 fF |
| leak conductance | 4 nS (20 us time constant) |
| VDD | 1.2 V |
| kappa | 0.7 |
| U_T | 25.6 mV |
| I_0 | 1 fA |

Because the constants are invented, the model's spike rates are only
indicative.

In `neuron_array` a neuron is selected when its column enable and its row
enable are both high. The AND of the two drives the neuron's Col_sel
(discharge path and comparator), and the row enable drives Row_sel (output
gate). `EXC_MISMATCH` and `INH_MISMATCH` give each neuron a fixed gain error
on its input mirror and on its discharge path. The error is uniform in
+-MISMATCH and comes from a hash of the neuron's index. Both default to 0,
which means identical devices.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `N_COL` | 30 | columns; length of the column chain |
| `N_ROW` | 7 | rows; length of the row chain |
| `CLK_PER_STEP` | 10 | generator clocks per time step (333 MHz / 33.3 MHz) |
| `DET_PHASE` | 2 | cycle whose end samples the synchronised spike |
| `W_SPAN` | `CLK_PER_STEP - DET_PHASE - 2` = 6 | widest pulse for positions 1..N-1 |
| `EXC_MISMATCH`, `INH_MISMATCH` | 0.0 | per-neuron gain spread of the model |

The array size and the clock ratio are the published numbers. `DET_PHASE`,
`W_SPAN` and the width law are this design's choices. The generator's
assertions reject a `DET_PHASE` too late in the step, and a `W_SPAN` that
would make some pulse as long as the firing neuron's. One more assertion
checks that `inh_en` is never high outside a series.

## How far to trust it

The following parts follow the published design directly:

* the 30 x 7 array
* the two scan chains and the fact that a neuron is selected where both
  pulses meet
* one neuron per time step
* the shared input, output and inhibition lines
* the 333 MHz / 33.3 MHz clocking
* the spike doubling as the inhibition flag
* check-before-inhibit
* the firing neuron getting the longest pulse, and the other neurons
  shorter ones
* the neuron's terminals and the role of each transistor

This design fills in the following, because the published description
leaves it open:

* all clock waveforms and cycle positions inside a step, including where in
  the step each pulse sits
* the synchroniser
* the width law. Widths are whole clocks and a step has 10 of them, so
  there are only 6 distinct widths for positions 1..N-1. In the
  10-neuron set-up neighbours differ by at most one clock. In the
  210-neuron array runs of about 35 neurons share a width. The published
  aim that every neuron receive a different amount of inhibition cannot
  be met with whole-clock pulses at these two clock rates.
* how long an "inhibited" flag lives, and what a spike during a running
  series does
* reset of the chains and the generator (asynchronous, active low)
* the AND of column and row enables on each neuron's discharge path (the
  schematic shows only Col_sel there)
* every constant of the neuron model

The published work adds a random part to the pulse widths in its software
model; that part is not built. There is no host interface: reconfiguration
is by parameters and by editing the controller.

Not included:

* Turning spike counts back into a signal (low-pass filtering and an
  inverse "compensation" curve fitted to the measured transfer function)
  happens offline in software on recorded spikes.
* The analogue bias current mirrors are represented only by the two
  real-valued bias inputs of the top level.

## Verification

Every module has a self-checking testbench in `tb/`. Each compares the
module with expected values computed independently, in the testbench. Each
ends by printing `TB_RESULT checks=<n> failures=<n>`.

* `tb_scan_chain`: random streams and a single pulse against a reference
  shift register.
* `tb_scan_enable_gen`: every clock of three full scans at the default size
  against a position derived from a clock count. It also checks the column
  clock rate (one per 10 clocks) and the row clock rate (one per 30 steps).
* `tb_pulse_width_mod`: 3000 steps of random spikes on a 12-neuron
  configuration against a step-level reference model of the rule. It
  compares the `inh_en` level in every clock and every event strobe. In
  that run, 116 series started, 173 spikes were blocked by a flag and 225
  came during a series.
* `tb_inhibition_gen`: a scripted sequence on a 4 x 2 array. It covers a
  full series waveform, blocking by flag, blocking during a series, the
  flag being consumed, and a spike too late for the synchroniser.
* `tb_if_neuron`: time to threshold against the closed-form solution
  V(t) = (I/G)(1 - e^(-tG/C)), discharge per nanosecond, gating by Col_sel,
  Col_sel_n and Row_sel, clamping, and the threshold moving with the
  V_lim_exc bias.
* `tb_neuron_array`, `tb_adc_chip`: only the selected neuron drives the
  output and is discharged; the scan pulses walk the array and leave the
  chains; the mismatch spread stays within bounds.
* `tb_neuromorphic_adc`: the full 210-neuron converter, closed loop, for 8
  full scans (1730 steps, about 52 us simulated, about 15 s of simulation).
  It uses its own reference of scan position and inhibition rule, fed only
  with the chip's output line. For every step it checks the spike events
  and the membrane voltage of the selected neuron: it must have dropped by
  exactly the expected number of inhibition clocks x 0.15 V, to within
  10 mV. It also requires column sweeps, full scans, spikes, started and
  completed series, and both kinds of blocked spike to occur, and the spike
  rate to rise with the input.
* `tb_sawtooth_1x10`: the reference 10-neuron experiment. One row of 10
  neurons; a triangular input from 0 to 100 nA and back, 50 us period, two
  periods; biases 800 nA and 4 uA. The model gives 4.2 spikes/us on
  average, against 6.6 spikes/us for the transistor-level circuit. All ten
  neurons fire 38 to 51 times each, and the rate near the peaks is about
  five times the rate near the valleys.
* `tb_sine_50_mismatch`: the reference 50-neuron experiment with device
  mismatch, arranged as 10 x 5 neurons. The input mirrors have a 20 % gain
  spread and the discharge paths a 30 % spread. The input is a sinusoid,
  three periods over 300 scans. It is scaled to 20 nA +- 5 nA, because this
  neuron model saturates at the microampere currents of the original
  software model. The testbench rebuilds the input from the spike counts
  per scan, with a 9-scan moving average and a least-squares linear map.
  Measured: 5.0 % RMS error relative to the mean input (the reference
  reports 6 %) and a correlation of 0.96 with the input. Two of the 50
  neurons never fire: they are the ones with the weakest input mirrors.

## Simulating

Everything is plain SystemVerilog 2017 and runs on Verilator 5 (two-state,
with `--timing`). For example, from the directory that holds `rtl/` and
`tb/`:

    verilator --binary --timing --assert -Irtl rtl/adc_pkg.sv rtl/*.sv \
        tb/tb_neuromorphic_adc.sv --top-module tb_neuromorphic_adc
    ./obj_dir/Vtb_neuromorphic_adc

For another testbench, replace the last file name and the top module. The
package `adc_pkg.sv` must be read before the modules that import it.
Uninitialised state gets random values, so every testbench pulses the
asynchronous reset before it starts.

To move the controller to an FPGA, take `adc_pkg.sv`, `scan_enable_gen.sv`,
`pulse_width_mod.sv` and `inhibition_gen.sv`. The top of the FPGA design is
`inhibition_gen`; its five chip-side outputs and the `spike_in` input go to
pins.
