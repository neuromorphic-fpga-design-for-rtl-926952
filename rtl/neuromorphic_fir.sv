// neuromorphic_fir: a small feed-forward neural network that stands in for the
// FIR convolution, with its synaptic weights held in registers (a logic
// emulation of a memristor weight array) and an on-line LMS rule.
//
// Structure: the same tap line as a direct-form FIR (x(n) ... x(n-TAPS+1))
// feeds HIDDEN neurons through input weights W1[j][k]; each neuron sums its
// weighted inputs and clips the sum to the Q15 range (a saturating-linear
// activation). The output neuron forms y = sum_j W2[j] h_j, saturated to Q15.
// All weights are Q15.
//
// Learning: when the sample was presented with train=1, the output-layer
// weights move along the LMS gradient once its output is known,
//   W2[j] += (e * h_j) >> (FRAC + MU_SHIFT),  e = desired - y,
// i.e. a step size mu = 2^-MU_SHIFT. The input layer is not trained.
// Weights can also be loaded at any time through the write port (w_we,
// w_addr, w_data): addresses 0 .. HIDDEN*TAPS-1 select W1 row by row, the
// next HIDDEN addresses select W2. A load wins over an LMS update of the same
// weight in the same cycle.
//
// Timing: two-stage pipeline. Stage 1 (on in_valid) shifts the tap line and
// registers the hidden activations together with desired and train; stage 2
// registers out and applies the LMS step. out_valid follows in_valid by two
// clocks; one sample per clock is accepted. rst_n is an asynchronous,
// active-low clear that also restores the default weights.
//
// From the reference: single hidden layer, approximating the linear FIR,
// weights in registers, LMS only while train=1 with a desired signal, the
// clk/rst_n/in/in_valid/train port names. This design's own choices: the
// sizes (8 taps, 4 hidden neurons), the clipping activation, training of the
// output layer only, the step size, the desired port, the weight write port
// and the default weights, which make each hidden neuron average two
// neighbouring taps and give W2 the summed binomial FIR taps of its pair, so
// that the untrained network already approximates the classical FIR.
module neuromorphic_fir
  import nf_pkg::*;
#(
  parameter int unsigned TAPS     = 8,
  parameter int unsigned HIDDEN   = 4,
  parameter int unsigned MU_SHIFT = 6,
  localparam int unsigned NW      = HIDDEN * TAPS + HIDDEN,
  localparam int unsigned AW      = $clog2(NW)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  sample_t       in,
  input  logic          in_valid,
  input  logic          train,
  input  sample_t       desired,
  input  logic          w_we,
  input  logic [AW-1:0] w_addr,
  input  sample_t       w_data,
  output sample_t       out,
  output logic          out_valid
);

  localparam int unsigned GROUP = TAPS / HIDDEN;   // taps per hidden neuron by default
  localparam coef_vec_t   FIRC  = fir_binomial(TAPS);

  function automatic sample_t w1_default(input int unsigned j, input int unsigned k);
    if (GROUP != 0 && k / GROUP == j) return sat(acc_t'((64'sd1 <<< FRAC) / 64'(GROUP)));
    return '0;
  endfunction

  function automatic sample_t w2_default(input int unsigned j);
    acc_t s;
    s = '0;
    for (int unsigned k = 0; k < TAPS; k++)
      if (GROUP != 0 && k / GROUP == j) s += acc_t'(sample_t'(FIRC[k]));
    return sat(s);
  endfunction

  sample_t x_reg [TAPS-1];        // x(n-1) ... x(n-TAPS+1)
  sample_t w1    [HIDDEN][TAPS];
  sample_t w2    [HIDDEN];
  sample_t h_reg [HIDDEN];
  sample_t d_reg;
  logic    tr_reg, v1;

  sample_t taps_now [TAPS];
  sample_t h_next   [HIDDEN];
  acc_t    y_acc;
  sample_t y;
  logic signed [DATA_W:0] err;

  always_comb begin
    taps_now[0] = in;
    for (int k = 1; k < int'(TAPS); k++) taps_now[k] = x_reg[k-1];
    for (int j = 0; j < int'(HIDDEN); j++) begin
      acc_t s;
      s = '0;
      for (int k = 0; k < int'(TAPS); k++) s += acc_t'(w1[j][k]) * acc_t'(taps_now[k]);
      h_next[j] = sat(s >>> FRAC);
    end
    y_acc = '0;
    for (int j = 0; j < int'(HIDDEN); j++) y_acc += acc_t'(w2[j]) * acc_t'(h_reg[j]);
    y   = sat(y_acc >>> FRAC);
    err = (DATA_W+1)'(d_reg) - (DATA_W+1)'(y);
  end

  // Tap line, hidden layer and output pipeline.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < int'(TAPS) - 1; k++) x_reg[k] <= '0;
      for (int j = 0; j < int'(HIDDEN); j++) h_reg[j] <= '0;
      d_reg     <= '0;
      tr_reg    <= 1'b0;
      v1        <= 1'b0;
      out       <= '0;
      out_valid <= 1'b0;
    end else begin
      v1        <= in_valid;
      out_valid <= v1;
      if (in_valid) begin
        for (int k = 0; k < int'(TAPS) - 1; k++) x_reg[k] <= taps_now[k];
        for (int j = 0; j < int'(HIDDEN); j++) h_reg[j] <= h_next[j];
        d_reg  <= desired;
        tr_reg <= train;
      end
      if (v1) out <= y;
    end
  end

  // Weight array: reset defaults, LMS on the output layer, write port.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < int'(HIDDEN); j++) begin
        for (int k = 0; k < int'(TAPS); k++) w1[j][k] <= w1_default(j, k);
        w2[j] <= w2_default(j);
      end
    end else begin
      if (v1 && tr_reg)
        for (int j = 0; j < int'(HIDDEN); j++)
          w2[j] <= sat(acc_t'(w2[j]) + ((acc_t'(err) * acc_t'(h_reg[j])) >>> (FRAC + MU_SHIFT)));
      if (w_we) begin
        if (int'(w_addr) < int'(HIDDEN * TAPS))
          w1[int'(w_addr) / int'(TAPS)][int'(w_addr) % int'(TAPS)] <= w_data;
        else if (int'(w_addr) < int'(NW))
          w2[int'(w_addr) - int'(HIDDEN * TAPS)] <= w_data;
      end
    end
  end

  initial assert (TAPS >= 2 && TAPS <= MAX_TAPS && HIDDEN >= 1)
    else $error("neuromorphic_fir: bad TAPS/HIDDEN");

endmodule
