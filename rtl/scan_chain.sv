// Scan chain: the on-chip shift register that carries a scan-enable pulse
// across the columns (or rows) of the neuron array.
//
// Stage 0 captures `sin` on every rising edge of `sclk`, and every other
// stage takes the value of the stage before it, so a single 1 injected at
// `sin` walks one column (row) per shift clock and selects the neurons of
// that column (row) through `q`. `sout` is the last stage. The column chain
// is an instance with LEN = 30, the row chain one with LEN = 7. The
// asynchronous active-low clear is this design's addition; the published
// chip only names the two chains.
module scan_chain #(
  parameter int unsigned LEN = 30
) (
  input  logic           sclk,
  input  logic           rst_n,
  input  logic           sin,
  output logic [LEN-1:0] q,
  output logic           sout
);
  timeunit 1ns; timeprecision 1ps;

  always_ff @(posedge sclk or negedge rst_n) begin
    if (!rst_n) q <= '0;
    else        q <= (q << 1) | LEN'(sin);
  end

  assign sout = q[LEN-1];
endmodule
