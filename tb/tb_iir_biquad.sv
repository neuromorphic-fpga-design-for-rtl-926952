// tb_iir_biquad: self-checking testbench for the Direct Form I biquad.
//
// A reference model holds its own two input and two output delays and the
// Butterworth coefficients (329, 658, 329, -25576, 10508 in Q2.14) and
// computes y[n] = (b0 x + b1 x1 + b2 x2 - a1 y1 - a2 y2) >>> 14, saturated to
// Q15. Stimulus: an impulse, a step (whose output must settle near the DC
// gain of 1.0), a large square wave that drives the output into saturation,
// and random samples with gaps. One-clock latency is checked every clock.
`timescale 1ns/1ps
module tb_iir_biquad;
  import nf_pkg::*;

  logic clk = 0, rst_n = 0;
  sample_t in = '0;
  logic in_valid = 0;
  sample_t out;
  logic out_valid;
  int checks = 0, failures = 0, sat_events = 0;

  iir_biquad dut (.*);

  always #5 clk = ~clk;

  longint x1 = 0, x2 = 0, y1 = 0, y2 = 0;
  logic   exp_valid = 0;
  longint exp_out   = 0;

  always @(posedge clk) if (rst_n) begin
    checks++;
    if (out_valid !== exp_valid) begin
      failures++;
      $display("FAIL t=%0t out_valid=%0d expected %0d", $time, out_valid, exp_valid);
    end else if (exp_valid) begin
      checks++;
      if (longint'(out) != exp_out) begin
        failures++;
        $display("FAIL t=%0t out=%0d expected %0d", $time, out, exp_out);
      end
    end
    exp_valid = in_valid;
    if (in_valid) begin
      longint s, y;
      s = 329 * longint'(in) + 658 * x1 + 329 * x2 + 25576 * y1 - 10508 * y2;
      y = s >>> 14;
      if (y > 32767) begin y = 32767; sat_events++; end
      if (y < -32768) begin y = -32768; sat_events++; end
      x2 = x1; x1 = longint'(in); y2 = y1; y1 = y;
      exp_out = y;
    end
  end

  task automatic push(input int v, input bit valid);
    @(negedge clk);
    in = sample_t'(v);
    in_valid = valid;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    push(16384, 1);
    for (int i = 0; i < 60; i++) push(0, 1);
    for (int i = 0; i < 120; i++) push(16384, 1);
    // step settles at DC gain 1.0 within a few LSB
    checks++;
    if (out < 16384 - 64 || out > 16384 + 64) begin
      failures++;
      $display("FAIL step settled at %0d", out);
    end
    for (int p = 0; p < 6; p++) begin
      for (int i = 0; i < 25; i++) push(32767, 1);
      for (int i = 0; i < 25; i++) push(-32768, 1);
    end
    for (int i = 0; i < 400; i++) push(int'($urandom_range(0, 65535)) - 32768, ($urandom_range(0, 3) != 0));
    push(0, 0);
    push(0, 0);
    checks++;
    if (sat_events == 0) begin
      failures++;
      $display("FAIL saturation never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
