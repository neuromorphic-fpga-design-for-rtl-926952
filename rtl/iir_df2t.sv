// iir_df2t: classical IIR filter of parameterised order, transposed Direct
// Form II.
//
//   y[n]   = b0 x[n] + s1[n-1]
//   s_k[n] = b_k x[n] - a_k y[n] + s_(k+1)[n-1],   k = 1 .. ORDER
//   (s_(ORDER+1) = 0), i.e. H(z) = sum b_k z^-k / (1 + sum a_k z^-k).
//
// Samples are Q15 and coefficients Q2.14, as in iir_biquad. The ORDER state
// registers are kept at full accumulator precision (48 bits, Q.29), and only
// the output is shifted right by CFRAC and saturated to Q15; the saturated
// output is what is fed back. Because nothing is rounded inside the state,
// this filter gives exactly the same output as iir_biquad for the same
// second-order coefficients, while its state is ORDER wide accumulators
// instead of 2*ORDER samples and its adder chain from x to y is a single
// product plus one register.
//
// Interface and timing as iir_biquad: clk, asynchronous active-low rst_n,
// in/in_valid, out/out_valid one clock later, one sample per clock.
// The transposed Direct Form II with parameterised order follows one of the
// reference's two descriptions of its classical IIR (the other, Direct Form
// I biquad, is iir_biquad). The default order and coefficients (the same
// Butterworth low-pass) and full-precision state are this design's own
// choices.
module iir_df2t
  import nf_pkg::*;
#(
  parameter int unsigned ORDER = 2,
  parameter iir_vec_t    B     = IIR_B_DEFAULT,  // b0 .. b_ORDER
  parameter iir_vec_t    A     = IIR_A_DEFAULT   // a1 .. a_ORDER in elements 0 .. ORDER-1
) (
  input  logic    clk,
  input  logic    rst_n,
  input  sample_t in,
  input  logic    in_valid,
  output sample_t out,
  output logic    out_valid
);

  acc_t    s      [ORDER];   // s[k-1] holds s_k
  acc_t    s_next [ORDER];
  sample_t y;

  always_comb begin
    y = sat((acc_t'(in) * acc_t'(coef_t'(B[0])) + s[0]) >>> CFRAC);
    for (int k = 1; k <= int'(ORDER); k++) begin
      s_next[k-1] = acc_t'(in) * acc_t'(coef_t'(B[k])) - acc_t'(y) * acc_t'(coef_t'(A[k-1]));
      if (k < int'(ORDER)) s_next[k-1] += s[k];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < int'(ORDER); k++) s[k] <= '0;
      out       <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        for (int k = 0; k < int'(ORDER); k++) s[k] <= s_next[k];
        out <= y;
      end
    end
  end

  initial assert (ORDER >= 1 && ORDER <= MAX_ORDER)
    else $error("iir_df2t: ORDER must be in 1..%0d", MAX_ORDER);

endmodule
