// neuromorphic_iir: a recurrent (Elman-type) neuron that stands in for the
// biquad, with register weights and an on-line LMS rule for both its
// feed-forward and its feedback taps.
//
// The neuron sees the current and two past inputs and, as its recurrent
// context, its own two previous activations:
//   u[n] = b0 x[n] + b1 x[n-1] + b2 x[n-2] - a1 y[n-1] - a2 y[n-2]
//   y[n] = tanh(u[n])            (tanh from the tanh_lut table)
// Weights are Q2.14, samples Q15; u is formed in a 48-bit accumulator and
// rescaled to Q15 before the table. With the default weights (the biquad's
// Butterworth coefficients) the neuron is the classical biquad with a tanh
// compressing its output, which is exact for small signals.
//
// Learning: when a sample is presented with train=1 the five weights take
// one LMS step with the output error e = desired - y (step 2^-MU_SHIFT):
//   b_k += (e * x[n-k]) >> (2*FRAC - CFRAC + MU_SHIFT)   (Q30 product to Q2.14)
//   a_k -= (e * y[n-k]) >> (2*FRAC - CFRAC + MU_SHIFT)
// ignoring the tanh slope and the recurrence (equation-error LMS). A load
// through the write port (w_addr 0..4 = b0, b1, b2, a1, a2) takes priority.
//
// Timing: the whole update happens in the cycle that accepts the sample, so
// out/out_valid follow in/in_valid by one clock and one sample per clock is
// accepted; this keeps the recurrence within one sample period. rst_n is an
// asynchronous, active-low clear that restores the default weights.
//
// From the reference: Elman-type recurrent structure, tanh approximated by a
// LUT, LMS on feedback and feed-forward taps while train=1, weights in
// registers, port names clk/rst_n/in/in_valid/train and the b0/x1 naming of
// its schematic. This design's own choices: a single recurrent neuron of
// biquad order, the update equations, step size, desired and write ports.
module neuromorphic_iir
  import nf_pkg::*;
#(
  parameter int unsigned MU_SHIFT = 6,
  parameter coef_t B0 = BQ_B0,
  parameter coef_t B1 = BQ_B1,
  parameter coef_t B2 = BQ_B2,
  parameter coef_t A1 = BQ_A1,
  parameter coef_t A2 = BQ_A2
) (
  input  logic       clk,
  input  logic       rst_n,
  input  sample_t    in,
  input  logic       in_valid,
  input  logic       train,
  input  sample_t    desired,
  input  logic       w_we,
  input  logic [2:0] w_addr,
  input  coef_t      w_data,
  output sample_t    out,
  output logic       out_valid
);

  localparam int unsigned U_W = 24;                      // Q15 pre-activation width
  localparam int unsigned LMS_SHIFT = 2 * FRAC - CFRAC + MU_SHIFT;  // Q30 -> Q14, times mu

  coef_t   b0, b1, b2, a1, a2;
  sample_t x1, x2, y1, y2;
  acc_t    acc;
  logic signed [U_W-1:0] u;
  sample_t y;
  logic signed [DATA_W:0] err;

  function automatic coef_t wsat(input acc_t v);
    if (v > acc_t'(32767))       return 16'sd32767;
    else if (v < acc_t'(-32768)) return -16'sd32768;
    else                         return coef_t'(v);
  endfunction

  function automatic coef_t lms(input coef_t w, input logic signed [DATA_W:0] e,
                                input sample_t v, input logic neg);
    acc_t step;
    step = (acc_t'(e) * acc_t'(v)) >>> LMS_SHIFT;
    return neg ? wsat(acc_t'(w) - step) : wsat(acc_t'(w) + step);
  endfunction

  always_comb begin
    acc = acc_t'(in) * acc_t'(b0) + acc_t'(x1) * acc_t'(b1) + acc_t'(x2) * acc_t'(b2)
        - acc_t'(y1) * acc_t'(a1) - acc_t'(y2) * acc_t'(a2);
    // Q29 -> Q15, clipped to the width of the table input.
    if ((acc >>> CFRAC) > acc_t'((2 ** (U_W - 1)) - 1))  u = {1'b0, {(U_W-1){1'b1}}};
    else if ((acc >>> CFRAC) < -acc_t'(2 ** (U_W - 1))) u = {1'b1, {(U_W-1){1'b0}}};
    else                                               u = U_W'(acc >>> CFRAC);
    err = (DATA_W+1)'(desired) - (DATA_W+1)'(y);
  end

  tanh_lut #(.IN_W(U_W)) u_tanh (.x(u), .y(y));

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

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b0 <= B0; b1 <= B1; b2 <= B2; a1 <= A1; a2 <= A2;
    end else begin
      if (in_valid && train) begin
        b0 <= lms(b0, err, in, 1'b0);
        b1 <= lms(b1, err, x1, 1'b0);
        b2 <= lms(b2, err, x2, 1'b0);
        a1 <= lms(a1, err, y1, 1'b1);
        a2 <= lms(a2, err, y2, 1'b1);
      end
      if (w_we) begin
        unique case (w_addr)
          3'd0: b0 <= w_data;
          3'd1: b1 <= w_data;
          3'd2: b2 <= w_data;
          3'd3: a1 <= w_data;
          3'd4: a2 <= w_data;
          default: ;
        endcase
      end
    end
  end

endmodule
