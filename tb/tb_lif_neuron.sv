// tb_lif_neuron: self-checking testbench for the leaky integrate-and-fire
// neuron.
//
// A reference model applies V += (I - V) >>> 3 per input event, fires at
// V >= 8192 (0.25), resets to 0 and then ignores two events. The testbench
// checks spike and v_mem against it every clock, for sub-threshold, supra-
// threshold, negative and random input currents with random gaps in
// in_valid. It also checks that a sub-threshold constant current never
// fires, that a refractory period occurred, and that a larger constant
// current gives a higher firing rate.
`timescale 1ns/1ps
module tb_lif_neuron;
  import nf_pkg::*;

  logic clk = 0, rst_n = 0;
  sample_t i_in = '0;
  logic in_valid = 0;
  logic spike;
  logic signed [19:0] v_mem;
  int checks = 0, failures = 0;

  lif_neuron dut (.*);

  always #5 clk = ~clk;

  longint v = 0;
  int refr = 0;
  int spikes = 0, refrac_events = 0;
  logic exp_spike = 0;

  always @(posedge clk) if (rst_n) begin
    checks++;
    if (spike !== exp_spike || longint'(v_mem) != v) begin
      failures++;
      $display("FAIL t=%0t spike=%0d/%0d v=%0d/%0d", $time, spike, exp_spike, v_mem, v);
    end
    exp_spike = 0;
    if (in_valid) begin
      longint vn;
      vn = v + ((longint'(i_in) - v) >>> 3);
      if (refr > 0) begin
        refr--; v = 0; refrac_events++;
      end else if (vn >= 8192) begin
        exp_spike = 1; v = 0; refr = 2; spikes++;
      end else v = vn;
    end
  end

  task automatic run(input int cur, input int n, output int nspk);
    int s0;
    s0 = spikes;
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      i_in = sample_t'(cur);
      in_valid = 1;
    end
    @(negedge clk);
    in_valid = 0;
    @(negedge clk);
    nspk = spikes - s0;
  endtask

  int n_sub, n_lo, n_hi, n_neg;
  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(8000, 100, n_sub);     // steady state 8000 < 8192: never fires
    run(12000, 100, n_lo);
    run(30000, 100, n_hi);
    run(-20000, 50, n_neg);
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      i_in = sample_t'(int'($urandom_range(0, 65535)) - 32768);
      in_valid = ($urandom_range(0, 2) != 0);
    end
    @(negedge clk);
    in_valid = 0;
    @(negedge clk);
    checks += 4;
    if (n_sub != 0) begin failures++; $display("FAIL sub-threshold fired %0d", n_sub); end
    if (!(n_hi > n_lo && n_lo > 0)) begin failures++; $display("FAIL rate %0d %0d", n_lo, n_hi); end
    if (n_neg != 0) begin failures++; $display("FAIL negative current fired"); end
    if (refrac_events == 0) begin failures++; $display("FAIL no refractory period"); end
    $display("spikes: low %0d high %0d", n_lo, n_hi);
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
