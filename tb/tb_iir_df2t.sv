// tb_iir_df2t: self-checking testbench for the transposed Direct Form II IIR.
//
// Two instances run side by side on the same stimulus: the default
// second-order Butterworth filter and a third-order filter with
// b = (3277, 4915, 4915, 3277), a = (-8192, 4096, -1638) in Q2.14. Each is
// compared bit-exactly, with its one-clock latency, against a Direct Form I
// model written here (sum of b_k x[n-k] minus a_k y[n-k], >>> 14, saturated
// to Q15) - the two forms must agree exactly because the transposed form
// keeps its state at full precision. Stimulus: impulse, step, full-scale
// square wave (saturation) and random samples with gaps in in_valid.
`timescale 1ns/1ps
module tb_iir_df2t;
  import nf_pkg::*;

  logic clk = 0, rst_n = 0;
  sample_t in = '0;
  logic in_valid = 0;
  sample_t out2, out3;
  logic out2_valid, out3_valid;
  int checks = 0, failures = 0, sat_events = 0;

  iir_df2t dut2 (.clk, .rst_n, .in, .in_valid, .out(out2), .out_valid(out2_valid));
  iir_df2t #(
    .ORDER(3),
    .B(iir_vec_t'({16'sd3277, 16'sd4915, 16'sd4915, 16'sd3277})),
    .A(iir_vec_t'({-16'sd1638, 16'sd4096, -16'sd8192}))
  ) dut3 (.clk, .rst_n, .in, .in_valid, .out(out3), .out_valid(out3_valid));

  always #5 clk = ~clk;

  // Direct Form I models, coefficient k of b and a (a[0] unused)
  longint b2m [4] = '{329, 658, 329, 0};
  longint a2m [4] = '{0, -25576, 10508, 0};
  longint b3m [4] = '{3277, 4915, 4915, 3277};
  longint a3m [4] = '{0, -8192, 4096, -1638};
  longint xh [4];
  longint y2h [4];
  longint y3h [4];
  logic   exp_v = 0;
  longint e2 = 0, e3 = 0;

  function automatic longint df1(input longint b [4], input longint a [4], input longint x [4],
                                 input longint yh [4], input int order);
    longint s;
    s = 0;
    for (int k = 0; k <= order; k++) s += b[k] * x[k];
    for (int k = 1; k <= order; k++) s -= a[k] * yh[k];
    s = s >>> 14;
    if (s > 32767) begin s = 32767; sat_events++; end
    if (s < -32768) begin s = -32768; sat_events++; end
    return s;
  endfunction

  always @(posedge clk) if (rst_n) begin
    checks++;
    if (out2_valid !== exp_v || out3_valid !== exp_v) begin
      failures++;
      $display("FAIL t=%0t valid %0d %0d expected %0d", $time, out2_valid, out3_valid, exp_v);
    end else if (exp_v) begin
      checks += 2;
      if (longint'(out2) != e2) begin failures++; $display("FAIL t=%0t order2 %0d/%0d", $time, out2, e2); end
      if (longint'(out3) != e3) begin failures++; $display("FAIL t=%0t order3 %0d/%0d", $time, out3, e3); end
    end
    exp_v = in_valid;
    if (in_valid) begin
      for (int k = 3; k > 0; k--) xh[k] = xh[k-1];
      xh[0] = longint'(in);
      e2 = df1(b2m, a2m, xh, y2h, 2);
      e3 = df1(b3m, a3m, xh, y3h, 3);
      for (int k = 3; k > 1; k--) begin y2h[k] = y2h[k-1]; y3h[k] = y3h[k-1]; end
      y2h[1] = e2;
      y3h[1] = e3;
    end
  end

  task automatic push(input int v, input bit valid);
    @(negedge clk);
    in = sample_t'(v);
    in_valid = valid;
  endtask

  initial begin
    foreach (xh[k]) begin xh[k] = 0; y2h[k] = 0; y3h[k] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    push(16384, 1);
    for (int i = 0; i < 60; i++) push(0, 1);
    for (int i = 0; i < 100; i++) push(16384, 1);
    for (int p = 0; p < 5; p++) begin
      for (int i = 0; i < 25; i++) push(32767, 1);
      for (int i = 0; i < 25; i++) push(-32768, 1);
    end
    for (int i = 0; i < 400; i++) push(int'($urandom_range(0, 65535)) - 32768, ($urandom_range(0, 3) != 0));
    push(0, 0);
    push(0, 0);
    checks++;
    if (sat_events == 0) begin failures++; $display("FAIL saturation never exercised"); end
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
