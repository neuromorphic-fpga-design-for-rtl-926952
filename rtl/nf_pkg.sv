// nf_pkg: shared fixed-point types, constants and helpers for the filter bank.
//
// All sample signals are signed two's-complement Q15 words (1 sign bit, 15
// fraction bits, range [-1, 1)), matching the 16-bit sample ports of the
// schematics and the Q15 test stimulus. Filter coefficients that must reach
// magnitudes up to 2 (biquad feedback taps) use a 16-bit Q2.14 format.
// Accumulators are 48 bits wide, the width of the wide product/shift node in
// the biquad schematic. The default coefficient sets below are this design's
// own choice: the reference text names low-pass filters but prints no values.
package nf_pkg;

  parameter int unsigned DATA_W = 16;  // sample width (Q15)
  parameter int unsigned FRAC   = 15;  // fraction bits of samples and Q15 weights
  parameter int unsigned COEF_W = 16;  // biquad coefficient width
  parameter int unsigned CFRAC  = 14;  // fraction bits of biquad coefficients (Q2.14)
  parameter int unsigned ACC_W  = 48;  // accumulator width

  typedef logic signed [DATA_W-1:0] sample_t;
  typedef logic signed [COEF_W-1:0] coef_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  localparam sample_t SAMPLE_MAX = sample_t'({1'b0, {(DATA_W-1){1'b1}}});
  localparam sample_t SAMPLE_MIN = sample_t'({1'b1, {(DATA_W-1){1'b0}}});

  // Saturate a wide value to the sample range.
  function automatic sample_t sat(input acc_t v);
    if (v > acc_t'(SAMPLE_MAX))      return SAMPLE_MAX;
    else if (v < acc_t'(SAMPLE_MIN)) return SAMPLE_MIN;
    else                             return sample_t'(v);
  endfunction

  // Default FIR coefficients: binomial low-pass, h(k) = C(TAPS-1, k) / 2^(TAPS-1),
  // rounded to Q15, so the DC gain is 1.0 (the taps of an 8-tap filter are
  // 256, 1792, 5376, 8960, 8960, 5376, 1792, 256). Up to MAX_TAPS taps.
  parameter int unsigned MAX_TAPS = 32;
  typedef logic signed [MAX_TAPS-1:0][DATA_W-1:0] coef_vec_t;

  function automatic coef_vec_t fir_binomial(input int unsigned taps);
    coef_vec_t   c;
    longint      binom;
    c = '0;
    binom = 1;
    for (int unsigned k = 0; k < taps; k++) begin
      c[k] = DATA_W'((((binom << FRAC) + (64'sd1 << (taps - 2))) >> (taps - 1)));
      binom = binom * (longint'(taps) - 64'sd1 - longint'(k)) / (longint'(k) + 64'sd1);
    end
    return c;
  endfunction

  // Default biquad: 2nd-order Butterworth low-pass, cut-off 0.05 of the
  // sample rate (bilinear transform), Q2.14. a1, a2 are the denominator taps
  // of 1 + a1 z^-1 + a2 z^-2.
  localparam coef_t BQ_B0 = 16'sd329;
  localparam coef_t BQ_B1 = 16'sd658;
  localparam coef_t BQ_B2 = 16'sd329;
  localparam coef_t BQ_A1 = -16'sd25576;
  localparam coef_t BQ_A2 = 16'sd10508;

  // Coefficient vectors of the transposed Direct Form II filter, up to
  // MAX_ORDER; element k of IIR_B is b_k, element k of IIR_A is a_(k+1).
  parameter int unsigned MAX_ORDER = 8;
  typedef logic [MAX_ORDER:0][COEF_W-1:0] iir_vec_t;
  localparam iir_vec_t IIR_B_DEFAULT = iir_vec_t'({BQ_B2, BQ_B1, BQ_B0});
  localparam iir_vec_t IIR_A_DEFAULT = iir_vec_t'({BQ_A2, BQ_A1});

endpackage
