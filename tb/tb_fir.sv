// tb_fir: self-checking testbench for the classical FIR.
//
// Drives an impulse, a full-scale step (which must saturate nowhere, since
// the DC gain is 1.0) and random samples with random gaps in in_valid. A
// reference model keeps its own sample history and binomial coefficients
// C(7,k) * 256 and computes each expected output with 64-bit integers. Every
// clock it checks that out_valid follows in_valid by exactly one clock and
// that out equals the model.
`timescale 1ns/1ps
module tb_fir;
  import nf_pkg::*;

  localparam int TAPS = 8;
  logic clk = 0, rst_n = 0;
  sample_t in = '0;
  logic in_valid = 0;
  sample_t out;
  logic out_valid;
  int checks = 0, failures = 0;

  fir dut (.*);

  always #5 clk = ~clk;

  longint hist [TAPS];
  longint coef [TAPS] = '{256, 1792, 5376, 8960, 8960, 5376, 1792, 256};
  logic   exp_valid = 0;
  longint exp_out   = 0;

  function automatic longint satq(input longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction

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
      longint s;
      for (int k = TAPS - 1; k > 0; k--) hist[k] = hist[k-1];
      hist[0] = longint'(in);
      s = 0;
      for (int k = 0; k < TAPS; k++) s += coef[k] * hist[k];
      exp_out = satq(s >>> 15);
    end
  end

  task automatic push(input int v, input bit valid);
    @(negedge clk);
    in = sample_t'(v);
    in_valid = valid;
  endtask

  initial begin
    foreach (hist[k]) hist[k] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // impulse of 0.5: outputs are the coefficients halved
    push(16384, 1);
    for (int i = 0; i < 10; i++) push(0, 1);
    // positive and negative full-scale steps
    for (int i = 0; i < 12; i++) push(32767, 1);
    for (int i = 0; i < 12; i++) push(-32768, 1);
    // random samples, random gaps
    for (int i = 0; i < 400; i++) push(int'($urandom_range(0, 65535)) - 32768, ($urandom_range(0, 3) != 0));
    push(0, 0);
    push(0, 0);
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
