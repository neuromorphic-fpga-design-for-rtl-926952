// fir: classical direct-form FIR low-pass filter, y(n) = sum_k h(k) x(n-k).
//
// A TAPS-deep shift register of Q15 samples (x(n-1) ... x(n-TAPS+1)) feeds
// TAPS parallel multipliers against fixed coefficients; the products are
// summed in a 48-bit accumulator, shifted right arithmetically by FRAC bits
// (truncation) and saturated to 16 bits. Everything happens in the clock
// cycle that accepts the sample, so out/out_valid appear one clock after
// in/in_valid, and one sample per clock is accepted.
//
// Interface (names as in the reference schematic): clk, active-low
// asynchronous reset rst_n, in/in_valid, out/out_valid. Registers are
// cleared by rst_n and only load when in_valid is high, as the schematic's
// clear/enable flip-flops suggest. Direct form, parameterised taps and the
// fixed-point word size follow the reference description; the tap count (8),
// the binomial coefficients, truncating rounding and output saturation are
// this design's own choices.
module fir
  import nf_pkg::*;
#(
  parameter int unsigned TAPS  = 8,
  parameter coef_vec_t   COEFS = fir_binomial(TAPS)
) (
  input  logic    clk,
  input  logic    rst_n,
  input  sample_t in,
  input  logic    in_valid,
  output sample_t out,
  output logic    out_valid
);

  // shift_reg[k] holds x(n-1-k) between samples.
  sample_t shift_reg [TAPS-1];
  sample_t taps_now  [TAPS];   // x(n) ... x(n-TAPS+1) for the current sample
  acc_t    acc;

  always_comb begin
    taps_now[0] = in;
    for (int k = 1; k < int'(TAPS); k++) taps_now[k] = shift_reg[k-1];
    acc = '0;
    for (int k = 0; k < int'(TAPS); k++)
      acc += acc_t'(taps_now[k]) * acc_t'(sample_t'(COEFS[k]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < int'(TAPS) - 1; k++) shift_reg[k] <= '0;
      out       <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        for (int k = 0; k < int'(TAPS) - 1; k++) shift_reg[k] <= taps_now[k];
        out <= sat(acc >>> FRAC);
      end
    end
  end

  initial assert (TAPS >= 2 && TAPS <= MAX_TAPS)
    else $error("fir: TAPS must be in 2..%0d", MAX_TAPS);

endmodule
