// tb_neuromorphic_iir: self-checking testbench for the recurrent tanh neuron.
//
// A reference model holds its own input/output delays and five weights and
// computes u = (b0 x + b1 x1 + b2 x2 - a1 y1 - a2 y2) >>> 14, clipped to 24
// bits, then y = tanh of the centre of u's 1/128-wide table interval (taken
// from the simulator's $tanh and rounded to Q15), with the LMS step
// w += / -= (e * v) >>> 22 on every sample presented with train=1. Outputs are
// compared bit-exactly every clock, with the one-clock latency. Phases:
// default weights with train=0, weight loads, and training from zeroed
// feed-forward taps on a noisy sinusoid with desired = the output of a
// classical Butterworth biquad computed here; the squared error over the
// last 300 training samples must be below that of the first 300.
`timescale 1ns/1ps
module tb_neuromorphic_iir;
  import nf_pkg::*;

  logic clk = 0, rst_n = 0;
  sample_t in = '0, desired = '0;
  coef_t w_data = '0;
  logic in_valid = 0, train = 0, w_we = 0;
  logic [2:0] w_addr = '0;
  sample_t out;
  logic out_valid;
  int checks = 0, failures = 0;

  neuromorphic_iir dut (.*);

  always #5 clk = ~clk;

  function automatic longint clip(input longint v, input longint lo, input longint hi);
    return (v > hi) ? hi : (v < lo) ? lo : v;
  endfunction

  function automatic longint tanh_q(input longint u);
    longint idx;
    real v;
    idx = clip(u >>> 8, -512, 511);
    v = $tanh(($itor(idx) + 0.5) / 128.0) * 32768.0;
    v = (v < 0.0) ? v - 0.5 : v + 0.5;
    return clip(longint'($rtoi(v)), -32768, 32767);
  endfunction

  longint w [5];   // b0 b1 b2 a1 a2
  longint x1 = 0, x2 = 0, y1 = 0, y2 = 0;
  logic   exp_v = 0;
  longint exp_y = 0;
  real    sq_err = 0.0;

  always @(posedge clk) if (rst_n) begin
    checks++;
    if (out_valid !== exp_v) begin
      failures++;
      $display("FAIL t=%0t out_valid=%0d expected %0d", $time, out_valid, exp_v);
    end else if (exp_v) begin
      checks++;
      if (longint'(out) != exp_y) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0t out=%0d expected %0d", $time, out, exp_y);
      end
    end
    exp_v = in_valid;
    if (in_valid) begin
      longint acc, u, y, e, x0;
      x0  = longint'(in);
      acc = w[0] * x0 + w[1] * x1 + w[2] * x2 - w[3] * y1 - w[4] * y2;
      u   = clip(acc >>> 14, -(64'sd1 << 23), (64'sd1 << 23) - 1);
      y   = tanh_q(u);
      e   = longint'(desired) - y;
      if (train) begin
        sq_err += $itor(e) * $itor(e);
        w[0] = clip(w[0] + ((e * x0) >>> 22), -32768, 32767);
        w[1] = clip(w[1] + ((e * x1) >>> 22), -32768, 32767);
        w[2] = clip(w[2] + ((e * x2) >>> 22), -32768, 32767);
        w[3] = clip(w[3] - ((e * y1) >>> 22), -32768, 32767);
        w[4] = clip(w[4] - ((e * y2) >>> 22), -32768, 32767);
      end
      x2 = x1; x1 = x0; y2 = y1; y1 = y;
      exp_y = y;
    end
    if (w_we && w_addr < 5) w[w_addr] = longint'(w_data);
  end

  // classical biquad for the desired signal
  longint bx1 = 0, bx2 = 0, by1 = 0, by2 = 0;
  function automatic longint biquad_ref(input longint x);
    longint y;
    y = clip((329 * x + 658 * bx1 + 329 * bx2 + 25576 * by1 - 10508 * by2) >>> 14, -32768, 32767);
    bx2 = bx1; bx1 = x; by2 = by1; by1 = y;
    return y;
  endfunction

  function automatic int stim(input int n);
    real v;
    v = 0.6 * $sin(2.0 * 3.14159265358979 * $itor(n) / 80.0)
      + 0.05 * (2.0 * $itor($urandom_range(0, 999)) / 1000.0 - 1.0);
    return $rtoi(v * 32768.0);
  endfunction

  task automatic load(input int a, input int v);
    @(negedge clk);
    w_we = 1; w_addr = 3'(a); w_data = coef_t'(v); in_valid = 0;
    @(negedge clk);
    w_we = 0;
  endtask

  real mse_first, mse_last;
  initial begin
    w = '{329, 658, 329, -25576, 10508};
    repeat (3) @(negedge clk);
    rst_n = 1;
    // 1. defaults, including a large input that drives tanh into its flat part
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      in = sample_t'(int'($urandom_range(0, 65535)) - 32768);
      in_valid = ($urandom_range(0, 3) != 0);
    end
    for (int i = 0; i < 60; i++) begin @(negedge clk); in = 16'sd32767; in_valid = 1; end
    // 2. weight loads, then random traffic with the loaded weights
    load(0, 8192); load(1, -4096); load(2, 2048); load(3, -8000); load(4, 3000);
    load(5, 1234);    // no such weight: ignored
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      in = sample_t'(int'($urandom_range(0, 65535)) - 32768);
      in_valid = ($urandom_range(0, 3) != 0);
    end
    // 3. LMS training from zeroed feed-forward taps
    load(0, 0); load(1, 0); load(2, 0); load(3, -25576); load(4, 10508);
    sq_err = 0.0;
    for (int n = 0; n < 3000; n++) begin
      int x;
      x = stim(n);
      @(negedge clk);
      in = sample_t'(x); in_valid = 1; train = 1;
      desired = sample_t'(biquad_ref(longint'(x)));
      if (n == 300) mse_first = sq_err / 300.0;
      if (n == 2700) sq_err = 0.0;
    end
    @(negedge clk); in_valid = 0; train = 0;
    @(negedge clk);
    mse_last = sq_err / 300.0;
    checks++;
    $display("training MSE (LSB^2): first 300 %0.1f, last 300 %0.1f", mse_first, mse_last);
    if (!(mse_last < mse_first)) begin failures++; $display("FAIL LMS did not reduce the error"); end
    repeat (3) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
