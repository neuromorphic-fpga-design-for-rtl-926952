// tb_tanh_lut: self-checking testbench for the tanh look-up table.
//
// Sweeps the Q15 input from -6.0 to +6.0 in steps of 1/512 plus random
// points. For each input the expected output is worked out independently
// with the simulator's $tanh: the input is clipped to [-4, 4), quantised to
// the 1/128-wide interval that contains it, and tanh of the interval centre
// is rounded to Q15. Also checks odd symmetry of the table and that the
// output never decreases as the input grows.
`timescale 1ns/1ps
module tb_tanh_lut;
  import nf_pkg::*;

  logic signed [23:0] x;
  sample_t y;
  int checks = 0, failures = 0;

  tanh_lut dut (.x(x), .y(y));

  function automatic int expected(input int xv);
    int idx;
    real t, v;
    idx = xv >>> 8;                  // 2^15 / 2^8 = 128 intervals per unit
    if (idx > 511)  idx = 511;
    if (idx < -512) idx = -512;
    t = ($itor(idx) + 0.5) / 128.0;
    v = $tanh(t) * 32768.0;
    v = (v < 0.0) ? v - 0.5 : v + 0.5;
    if (v > 32767.0) return 32767;
    if (v < -32768.0) return -32768;
    return $rtoi(v);
  endfunction

  task automatic probe(input int xv);
    x = 24'(xv);
    #1;
    checks++;
    if (int'(y) != expected(xv)) begin
      failures++;
      if (failures < 10) $display("FAIL x=%0d y=%0d expected %0d", xv, y, expected(xv));
    end
  endtask

  int prev;
  initial begin
    prev = -40000;
    for (int xv = -6 * 32768; xv < 6 * 32768; xv += 64) begin
      probe(xv);
      checks++;
      if (int'(y) < prev) begin
        failures++;
        $display("FAIL not monotonic at x=%0d", xv);
      end
      prev = int'(y);
    end
    for (int i = 0; i < 2000; i++) probe(int'($urandom_range(0, 8 * 65536)) - 4 * 65536);
    // odd symmetry about the interval centres: y(x) = -y(-x - 1 LSB-interval)
    for (int a = 0; a < 512; a++) begin
      int yp;
      x = 24'(a * 256); #1; yp = int'(y);
      x = 24'(-(a + 1) * 256); #1;
      checks++;
      if (int'(y) != -yp) begin
        failures++;
        $display("FAIL symmetry a=%0d %0d %0d", a, yp, y);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
