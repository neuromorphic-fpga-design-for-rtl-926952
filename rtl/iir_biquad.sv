// iir_biquad: classical second-order IIR low-pass filter, Direct Form I.
//
//   y[n] = b0 x[n] + b1 x[n-1] + b2 x[n-2] - a1 y[n-1] - a2 y[n-2]
//
// i.e. H(z) = (b0 + b1 z^-1 + b2 z^-2) / (1 + a1 z^-1 + a2 z^-2). Samples are
// Q15, coefficients Q2.14 (so |a1| may reach 2). The five products are summed
// in a 48-bit accumulator, shifted right arithmetically by CFRAC bits and
// saturated to 16 bits; the saturated output is what is fed back. The two
// input and two output delays form the Direct Form I state.
//
// Interface as in the reference schematic (clk, rst_n, in, in_valid, out,
// out_valid); asynchronous active-low clear, state loads only on in_valid.
// Latency one clock, one sample per clock. Following the paper's statement
// that the IIR "uses Direct Form I biquad"; its other sentence naming a
// transposed Direct Form II was not followed. The coefficient values (a
// Butterworth low-pass at 0.05 of the sample rate), truncation and
// saturation are this design's own choices.
module iir_biquad
  import nf_pkg::*;
#(
  parameter coef_t B0 = BQ_B0,
  parameter coef_t B1 = BQ_B1,
  parameter coef_t B2 = BQ_B2,
  parameter coef_t A1 = BQ_A1,
  parameter coef_t A2 = BQ_A2
) (
  input  logic    clk,
  input  logic    rst_n,
  input  sample_t in,
  input  logic    in_valid,
  output sample_t out,
  output logic    out_valid
);

  sample_t x1, x2, y1, y2;
  acc_t    acc;
  sample_t y;

  always_comb begin
    acc = acc_t'(in) * acc_t'(B0) + acc_t'(x1) * acc_t'(B1) + acc_t'(x2) * acc_t'(B2)
        - acc_t'(y1) * acc_t'(A1) - acc_t'(y2) * acc_t'(A2);
    y   = sat(acc >>> CFRAC);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x1 <= '0; x2 <= '0; y1 <= '0; y2 <= '0;
      out       <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        x1  <= in;
        x2  <= x1;
        y1  <= y;
        y2  <= y1;
        out <= y;
      end
    end
  end

endmodule
