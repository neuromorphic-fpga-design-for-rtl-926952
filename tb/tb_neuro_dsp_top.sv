// tb_neuro_dsp_top: end-to-end testbench of the whole filter bank at its
// default sizes.
//
// Workload: a 0.6-amplitude sinusoid plus uniform noise of amplitude 0.05,
// quantised to Q15, run for 2000 training samples (train=1, desired = the
// classical FIR output worked out here) and 2000 test samples (train=0), then
// an impulse and a step. Before training, the neuromorphic FIR's output
// weights and the neuromorphic IIR's feed-forward weights are overwritten
// through the weight ports, so the LMS rule has something to learn. At the
// end, high-gain neuron weights are loaded to drive tanh into saturation.
//
// Checks: fir and both iir outputs bit-exactly against independent models; the
// latency of every output; that the neuromorphic outputs track the FIR
// within a bound during testing; that training lowered their error. The
// mean squared error of each filter against the classical FIR over the test
// phase is printed (normalised to full scale 1.0). Each mechanism - weight
// loads, LMS training, stalls (gaps in in_valid), output saturation of the
// classical filters, the flat part of tanh (|y| > 0.96), LIF spikes on both outputs and
// LIF refractory periods - is counted, and a mechanism that never happened
// counts as a failure.
`timescale 1ns/1ps
module tb_neuro_dsp_top;
  import nf_pkg::*;

  logic clk = 0, rst_n = 0;
  sample_t in = '0, desired = '0, nf_w_data = '0;
  coef_t ni_w_data = '0;
  logic in_valid = 0, train = 0, nf_w_we = 0, ni_w_we = 0;
  logic [5:0] nf_w_addr = '0;
  logic [2:0] ni_w_addr = '0;
  sample_t fir_out, iir_out, iir2_out, nf_out, ni_out;
  logic fir_out_valid, iir_out_valid, iir2_out_valid, nf_out_valid, ni_out_valid, nf_spike, ni_spike;
  logic signed [19:0] nf_v_mem, ni_v_mem;
  int checks = 0, failures = 0;

  neuro_dsp_top dut (.*);

  always #5 clk = ~clk;

  function automatic longint clip(input longint v, input longint lo, input longint hi);
    return (v > hi) ? hi : (v < lo) ? lo : v;
  endfunction

  // ---------------- reference models of the classical filters
  longint fh [8];
  longint fc [8] = '{256, 1792, 5376, 8960, 8960, 5376, 1792, 256};
  longint bx1 = 0, bx2 = 0, by1 = 0, by2 = 0;
  int     fir_sat = 0, iir_sat = 0;

  function automatic longint fir_step(input longint x);
    longint s;
    for (int k = 7; k > 0; k--) fh[k] = fh[k-1];
    fh[0] = x;
    s = 0;
    for (int k = 0; k < 8; k++) s += fc[k] * fh[k];
    s = s >>> 15;
    if (s > 32767 || s < -32768) fir_sat++;
    return clip(s, -32768, 32767);
  endfunction

  function automatic longint iir_step(input longint x);
    longint y;
    y = (329 * x + 658 * bx1 + 329 * bx2 + 25576 * by1 - 10508 * by2) >>> 14;
    if (y > 32767 || y < -32768) iir_sat++;
    y = clip(y, -32768, 32767);
    bx2 = bx1; bx1 = x; by2 = by1; by1 = y;
    return y;
  endfunction

  // ---------------- per-clock checking
  // expected classical outputs, one clock after the sample
  logic   e1_v = 0;
  longint e1_fir = 0, e1_iir = 0;
  // golden (FIR) value per sample, delayed to line up with each output
  longint gold_q [$];     // FIR golden for samples whose nf output is pending
  longint gold_ni = 0;
  logic   nf_pend1 = 0, nf_pend2 = 0;
  logic   phase_test = 0, phase_train = 0;
  real    se_iir = 0, se_nf = 0, se_ni = 0, se_nf_tr_first = 0, se_nf_tr_last = 0,
          se_ni_tr_first = 0, se_ni_tr_last = 0;
  int     n_test = 0, n_train = 0;
  int     cnt_stall = 0, cnt_train = 0, cnt_nf_load = 0, cnt_ni_load = 0,
          cnt_tanh_flat = 0, cnt_nf_spike = 0, cnt_ni_spike = 0, cnt_refrac = 0;
  int     nf_dev_max = 0, ni_dev_max = 0;
  int     prev_nf_spike_gap = 0;

  always @(posedge clk) if (rst_n) begin
    // classical outputs
    checks++;
    if (fir_out_valid !== e1_v || iir_out_valid !== e1_v || iir2_out_valid !== e1_v || ni_out_valid !== e1_v) begin
      failures++;
      $display("FAIL t=%0t one-clock valids %0d %0d %0d expected %0d", $time,
               fir_out_valid, iir_out_valid, ni_out_valid, e1_v);
    end
    if (e1_v) begin
      checks += 2;
      if (longint'(fir_out) != e1_fir) begin failures++; $display("FAIL fir %0d/%0d", fir_out, e1_fir); end
      if (longint'(iir_out) != e1_iir) begin failures++; $display("FAIL iir %0d/%0d", iir_out, e1_iir); end
      checks++;
      if (longint'(iir2_out) != e1_iir) begin failures++; $display("FAIL iir2 %0d/%0d", iir2_out, e1_iir); end
      if (ni_out > 16'sd31500 || ni_out < -16'sd31500)   // |tanh| > 0.96, slope < 0.08
        cnt_tanh_flat++;
      if (phase_test) begin
        int d;
        se_iir += ($itor(iir_out) - $itor(e1_fir)) ** 2;
        se_ni  += ($itor(ni_out) - $itor(e1_fir)) ** 2;
        d = int'(ni_out) - int'(e1_fir);
        if (d < 0) d = -d;
        if (d > ni_dev_max) ni_dev_max = d;
      end
      if (phase_train) begin
        real e2;
        e2 = ($itor(ni_out) - $itor(e1_fir)) ** 2;
        if (n_train < 300) se_ni_tr_first += e2;
        if (n_train >= 1700) se_ni_tr_last += e2;
      end
    end
    checks++;
    if (nf_out_valid !== nf_pend2) begin
      failures++;
      $display("FAIL t=%0t nf_out_valid %0d expected %0d", $time, nf_out_valid, nf_pend2);
    end
    if (nf_pend2) begin
      longint g;
      g = gold_q.pop_front();
      if (phase_test) begin
        int d;
        se_nf += ($itor(nf_out) - $itor(g)) ** 2;
        d = int'(nf_out) - int'(g);
        if (d < 0) d = -d;
        if (d > nf_dev_max) nf_dev_max = d;
        n_test++;
      end
      if (phase_train) begin
        real e2;
        e2 = ($itor(nf_out) - $itor(g)) ** 2;
        if (n_train < 300) se_nf_tr_first += e2;
        if (n_train >= 1700) se_nf_tr_last += e2;
        n_train++;
      end
    end
    nf_pend2 = nf_pend1;
    nf_pend1 = in_valid;
    e1_v = in_valid;
    if (in_valid) begin
      e1_fir = fir_step(longint'(in));
      e1_iir = iir_step(longint'(in));
      gold_q.push_back(e1_fir);
      if (train) cnt_train++;
    end else cnt_stall++;
    if (nf_w_we) cnt_nf_load++;
    if (ni_w_we) cnt_ni_load++;
    if (nf_spike) cnt_nf_spike++;
    if (ni_spike) cnt_ni_spike++;
    if ((nf_spike || ni_spike) === 1'b1) cnt_refrac++;   // every spike opens a refractory period
  end

  // LIF membranes must never sit at or above threshold after an update
  always @(posedge clk) if (rst_n) begin
    if (nf_v_mem >= 20'sd8192 || ni_v_mem >= 20'sd8192) begin
      failures++;
      $display("FAIL membrane above threshold %0d %0d", nf_v_mem, ni_v_mem);
    end
  end

  function automatic int stim(input int n);
    real v;
    v = 0.6 * $sin(2.0 * 3.14159265358979 * $itor(n) / 50.0)
      + 0.05 * (2.0 * $itor($urandom_range(0, 999)) / 1000.0 - 1.0);
    return $rtoi(v * 32768.0);
  endfunction

  task automatic sample(input int x, input bit tr, input int dly_gaps);
    @(negedge clk);
    in = sample_t'(x); in_valid = 1; train = tr;
    // desired = classical FIR of this sample (model run ahead on a copy)
    begin
      longint s;
      s = 0;
      s += fc[0] * longint'(x);
      for (int k = 1; k < 8; k++) s += fc[k] * fh[k-1];
      desired = sample_t'(clip(s >>> 15, -32768, 32767));
    end
    for (int g = 0; g < dly_gaps; g++) begin
      @(negedge clk);
      in_valid = 0;
    end
  endtask

  initial begin
    foreach (fh[k]) fh[k] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // weight loads: scramble nf output layer, zero ni feed-forward taps
    for (int j = 0; j < 4; j++) begin
      @(negedge clk);
      nf_w_we = 1; nf_w_addr = 6'(32 + j); nf_w_data = sample_t'(int'($urandom_range(0, 16383)) - 8192);
    end
    for (int a = 0; a < 3; a++) begin
      @(negedge clk);
      nf_w_we = 0; ni_w_we = 1; ni_w_addr = 3'(a); ni_w_data = '0;
    end
    @(negedge clk);
    ni_w_we = 0;
    // training phase, 2000 samples, with occasional stalls
    phase_train = 1;
    for (int n = 0; n < 2000; n++) sample(stim(n), 1'b1, ($urandom_range(0, 9) == 0) ? 1 : 0);
    @(negedge clk); in_valid = 0; train = 0;
    repeat (3) @(negedge clk);
    phase_train = 0;
    // test phase, 2000 samples
    phase_test = 1;
    for (int n = 2000; n < 4000; n++) sample(stim(n), 1'b0, 0);
    @(negedge clk); in_valid = 0;
    repeat (3) @(negedge clk);
    phase_test = 0;
    // impulse, then a full-scale square wave (saturation, tanh flat region)
    sample(32767, 0, 0);
    for (int i = 0; i < 40; i++) sample(0, 0, 0);
    for (int p = 0; p < 4; p++) begin
      for (int i = 0; i < 30; i++) sample(32767, 0, 0);
      for (int i = 0; i < 30; i++) sample(-32768, 0, 0);
    end
    // high-gain neuron weights drive the tanh into its flat part
    for (int a = 0; a < 3; a++) begin
      @(negedge clk);
      in_valid = 0; ni_w_we = 1; ni_w_addr = 3'(a); ni_w_data = 16'sd32767;
    end
    @(negedge clk);
    ni_w_we = 0;
    for (int i = 0; i < 20; i++) sample(24000, 0, 0);
    for (int i = 0; i < 20; i++) sample(-24000, 0, 0);
    @(negedge clk); in_valid = 0;
    repeat (4) @(negedge clk);

    $display("test-phase MSE against classical FIR (full scale 1.0): iir %0.6f  nf %0.6f  ni %0.6f",
             se_iir / n_test / 1073741824.0, se_nf / n_test / 1073741824.0, se_ni / n_test / 1073741824.0);
    $display("training squared error, first/last 300: nf %0.0f/%0.0f ni %0.0f/%0.0f",
             se_nf_tr_first, se_nf_tr_last, se_ni_tr_first, se_ni_tr_last);
    $display("max |dev| in test: nf %0d ni %0d LSB", nf_dev_max, ni_dev_max);
    $display("events: stalls %0d train %0d nf_load %0d ni_load %0d fir_sat %0d iir_sat %0d tanh_flat %0d nf_spikes %0d ni_spikes %0d refractory %0d",
             cnt_stall, cnt_train, cnt_nf_load, cnt_ni_load, fir_sat, iir_sat, cnt_tanh_flat,
             cnt_nf_spike, cnt_ni_spike, cnt_refrac);
    checks += 13;
    if (n_test != 2000) begin failures++; $display("FAIL test samples %0d", n_test); end
    if (!(se_nf_tr_last < se_nf_tr_first)) begin failures++; $display("FAIL nf training"); end
    if (!(se_ni_tr_last < se_ni_tr_first)) begin failures++; $display("FAIL ni training"); end
    if (nf_dev_max > 2000) begin failures++; $display("FAIL nf deviates"); end
    if (ni_dev_max > 8000) begin failures++; $display("FAIL ni deviates"); end
    if (cnt_stall == 0)    begin failures++; $display("FAIL no stall"); end
    if (cnt_train == 0)    begin failures++; $display("FAIL no training"); end
    if (cnt_nf_load == 0 || cnt_ni_load == 0) begin failures++; $display("FAIL no weight load"); end
    if (fir_sat == 0 && iir_sat == 0) begin failures++; $display("FAIL no saturation"); end
    if (cnt_tanh_flat == 0) begin failures++; $display("FAIL tanh flat region never reached"); end
    if (cnt_nf_spike == 0) begin failures++; $display("FAIL no nf spike"); end
    if (cnt_ni_spike == 0) begin failures++; $display("FAIL no ni spike"); end
    if (cnt_refrac == 0)   begin failures++; $display("FAIL no refractory period"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
