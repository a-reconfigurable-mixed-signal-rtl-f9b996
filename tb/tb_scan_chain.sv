// Testbench for scan_chain: shifts a random bit stream, then a single
// scan-enable pulse, through a chain of default length and compares every
// stage with a reference shift register kept as a bit array. Also checks
// that the clear empties the chain and that one pulse takes LEN shifts to
// leave it.
module tb_scan_chain;
  timeunit 1ns; timeprecision 1ps;
  localparam int unsigned LEN = 30;

  logic sclk = 0, rst_n = 1, sin = 0;
  logic [LEN-1:0] q;
  logic sout;
  bit   ref_q [LEN];
  int   checks = 0, failures = 0;

  scan_chain dut (.sclk, .rst_n, .sin, .q, .sout);

  task automatic shift(input logic b);
    sin = b;
    #5 sclk = 1;
    for (int i = LEN - 1; i > 0; i--) ref_q[i] = ref_q[i-1];
    ref_q[0] = b;
    #5 sclk = 0;
  endtask

  task automatic compare(string what);
    for (int i = 0; i < LEN; i++) begin
      checks++;
      if (q[i] !== ref_q[i]) begin
        failures++;
        $display("FAIL %s stage %0d: got %0b expected %0b", what, i, q[i], ref_q[i]);
      end
    end
    checks++;
    if (sout !== ref_q[LEN-1]) begin failures++; $display("FAIL %s sout", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n;
    foreach (ref_q[i]) ref_q[i] = 0;
    #1 rst_n = 0;
    #2 compare("reset");
    rst_n = 1;
    #10;
    repeat (200) begin
      shift(1'($urandom_range(0, 1)));
      compare("random");
    end
    // clear in the middle of a stream
    rst_n = 0; #1;
    foreach (ref_q[i]) ref_q[i] = 0;
    compare("clear");
    rst_n = 1; #4;
    // a single pulse: one stage high at a time, then out after LEN shifts
    shift(1'b1);
    n = 1;
    while (q != 0 && n < 2 * LEN) begin
      compare("pulse");
      checks++;
      if (q != (LEN'(1) << (n - 1))) begin failures++; $display("FAIL not one-hot after %0d", n); end
      shift(1'b0);
      n++;
    end
    checks++;
    if (n != LEN + 1) begin failures++; $display("FAIL pulse left after %0d shifts", n - 1); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
