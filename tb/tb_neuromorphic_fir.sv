// tb_neuromorphic_fir: self-checking testbench for the feed-forward network
// filter.
//
// A reference model holds its own tap history, weight arrays and two-stage
// pipeline (hidden layer on the accepting clock, output and LMS step on the
// next) and is compared with out/out_valid every clock. Phases:
//   1. default weights, train=0: random samples with gaps;
//   2. all weights loaded with random values through the write port;
//   3. output weights scrambled, then 2000 training samples of a noisy
//      sinusoid with desired = the classical binomial FIR output, computed
//      here. Besides bit-exact agreement, the mean squared error over the
//      last 300 samples must be below that of the first 300;
//   4. train=0 again: the learned weights must stay fixed.
`timescale 1ns/1ps
module tb_neuromorphic_fir;
  import nf_pkg::*;

  localparam int TAPS = 8, H = 4, NW = H * TAPS + H;
  logic clk = 0, rst_n = 0;
  sample_t in = '0, desired = '0, w_data = '0;
  logic in_valid = 0, train = 0, w_we = 0;
  logic [5:0] w_addr = '0;
  sample_t out;
  logic out_valid;
  int checks = 0, failures = 0;

  neuromorphic_fir dut (.*);

  always #5 clk = ~clk;

  function automatic longint satq(input longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction

  longint hist [TAPS];
  longint w1 [H][TAPS];
  longint w2 [H];
  longint s1_h [H];
  longint s1_d;
  logic   s1_v = 0, s1_t = 0;
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
    // stage 2
    exp_v = s1_v;
    if (s1_v) begin
      longint s, e;
      s = 0;
      for (int j = 0; j < H; j++) s += w2[j] * s1_h[j];
      exp_y = satq(s >>> 15);
      e = s1_d - exp_y;
      sq_err += $itor(e) * $itor(e);
      if (s1_t) for (int j = 0; j < H; j++) w2[j] = satq(w2[j] + ((e * s1_h[j]) >>> 21));
    end
    // stage 1
    s1_v = in_valid;
    if (in_valid) begin
      for (int k = TAPS - 1; k > 0; k--) hist[k] = hist[k-1];
      hist[0] = longint'(in);
      for (int j = 0; j < H; j++) begin
        longint s;
        s = 0;
        for (int k = 0; k < TAPS; k++) s += w1[j][k] * hist[k];
        s1_h[j] = satq(s >>> 15);
      end
      s1_d = longint'(desired);
      s1_t = train;
    end
    if (w_we) begin
      if (w_addr < H * TAPS) w1[w_addr / TAPS][w_addr % TAPS] = longint'(w_data);
      else if (w_addr < NW) w2[w_addr - H * TAPS] = longint'(w_data);
    end
  end

  // classical FIR used to make the desired signal
  longint fh [TAPS];
  longint fc [TAPS] = '{256, 1792, 5376, 8960, 8960, 5376, 1792, 256};
  function automatic longint fir_ref(input longint x);
    longint s;
    for (int k = TAPS - 1; k > 0; k--) fh[k] = fh[k-1];
    fh[0] = x;
    s = 0;
    for (int k = 0; k < TAPS; k++) s += fc[k] * fh[k];
    return satq(s >>> 15);
  endfunction

  function automatic int stim(input int n);
    real v;
    v = 0.6 * $sin(2.0 * 3.14159265358979 * $itor(n) / 40.0)
      + 0.05 * (2.0 * $itor($urandom_range(0, 999)) / 1000.0 - 1.0);
    return $rtoi(v * 32768.0);
  endfunction

  real mse_first, mse_last;
  initial begin
    foreach (hist[k]) hist[k] = 0;
    foreach (fh[k]) fh[k] = 0;
    for (int j = 0; j < H; j++) begin
      for (int k = 0; k < TAPS; k++) w1[j][k] = (k / 2 == j) ? 16384 : 0;
    end
    w2 = '{2048, 14336, 14336, 2048};
    repeat (3) @(negedge clk);
    rst_n = 1;
    // 1. defaults
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      in = sample_t'(int'($urandom_range(0, 65535)) - 32768);
      in_valid = ($urandom_range(0, 3) != 0);
    end
    // 2. random weights, loaded while samples keep flowing
    for (int a = 0; a < NW; a++) begin
      @(negedge clk);
      w_we = 1; w_addr = 6'(a); w_data = sample_t'(int'($urandom_range(0, 32767)) - 16384);
      in = sample_t'(int'($urandom_range(0, 65535)) - 32768);
      in_valid = 1;
    end
    @(negedge clk);
    w_we = 0;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      in = sample_t'(int'($urandom_range(0, 65535)) - 32768);
      in_valid = ($urandom_range(0, 3) != 0);
    end
    // 3. restore the averaging input layer, scramble the output layer, train
    for (int a = 0; a < NW; a++) begin
      @(negedge clk);
      w_we = 1; w_addr = 6'(a);
      if (a < H * TAPS) w_data = ((a % TAPS) / 2 == a / TAPS) ? 16'sd16384 : 16'sd0;
      else              w_data = sample_t'(int'($urandom_range(0, 16383)) - 8192);
      in_valid = 0;
    end
    @(negedge clk);
    w_we = 0;
    for (int n = 0; n < 2000; n++) begin
      int x;
      x = stim(n);
      @(negedge clk);
      in = sample_t'(x); in_valid = 1; train = 1;
      desired = sample_t'(fir_ref(longint'(x)));
      if (n == 300) begin mse_first = sq_err / 300.0; end
      if (n == 1700) sq_err = 0.0;
    end
    @(negedge clk); in_valid = 0; train = 0;
    @(negedge clk); @(negedge clk);
    mse_last = sq_err / 300.0;
    checks++;
    $display("training MSE (LSB^2): first 300 %0.1f, last 300 %0.1f", mse_first, mse_last);
    if (!(mse_last < mse_first)) begin failures++; $display("FAIL LMS did not reduce the error"); end
    // 4. frozen weights
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      in = sample_t'(stim(i)); in_valid = 1; desired = 16'sd12345;
    end
    @(negedge clk); in_valid = 0;
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
