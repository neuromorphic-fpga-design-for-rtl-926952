// neuro_dsp_top: classical and neuromorphic low-pass filters side by side.
//
// One Q15 sample stream (in/in_valid) drives five filters in parallel, so
// their outputs can be compared sample for sample:
//   fir              classical direct-form FIR (golden reference)
//   iir_biquad       classical Direct Form I biquad
//   iir_df2t         the same IIR in transposed Direct Form II (same output)
//   neuromorphic_fir feed-forward network approximating the FIR, LMS-trained
//   neuromorphic_iir recurrent tanh neuron approximating the biquad, LMS-trained
// The two neuromorphic filters share the train flag and the desired signal
// that accompanies each sample, and each has a weight write port through
// which weights trained elsewhere can be loaded (the role a memristor weight
// array would play). Each neuromorphic output also drives a leaky
// integrate-and-fire neuron, whose spikes are the event-coded form of that
// output.
//
// The reference describes its classical IIR in both forms, so both are
// provided; with the default coefficients they agree bit for bit.
//
// Latencies from in_valid: fir, both IIRs and neuromorphic_iir outputs one
// clock; neuromorphic_fir two clocks; the spike of a neuron one clock after
// the output event that caused it. All blocks share clk and the
// asynchronous active-low clear rst_n.
//
// The four filters on one input with clk, in, in_valid, rst_n and train in
// common follow the reference's top-level schematic; the LIF output stages
// follow its proposal to replace the output stage by an LIF neuron fed with
// the filter output; the shared desired input and the weight ports are this
// design's own additions, needed for the LMS rule and weight loading.
module neuro_dsp_top
  import nf_pkg::*;
#(
  parameter int unsigned FIR_TAPS   = 8,
  parameter int unsigned NF_HIDDEN  = 4,
  parameter int unsigned MU_SHIFT   = 6,
  localparam int unsigned NF_AW     = $clog2(NF_HIDDEN * FIR_TAPS + NF_HIDDEN)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  sample_t          in,
  input  logic             in_valid,
  input  logic             train,
  input  sample_t          desired,
  // weight load, neuromorphic FIR (W1 row-major, then W2)
  input  logic             nf_w_we,
  input  logic [NF_AW-1:0] nf_w_addr,
  input  sample_t          nf_w_data,
  // weight load, neuromorphic IIR (0..4 = b0 b1 b2 a1 a2)
  input  logic             ni_w_we,
  input  logic [2:0]       ni_w_addr,
  input  coef_t            ni_w_data,
  output sample_t          fir_out,
  output logic             fir_out_valid,
  output sample_t          iir_out,
  output logic             iir_out_valid,
  output sample_t          iir2_out,
  output logic             iir2_out_valid,
  output sample_t          nf_out,
  output logic             nf_out_valid,
  output sample_t          ni_out,
  output logic             ni_out_valid,
  output logic             nf_spike,
  output logic             ni_spike,
  output logic signed [19:0] nf_v_mem,
  output logic signed [19:0] ni_v_mem
);

  fir #(.TAPS(FIR_TAPS)) dut_fir (
    .clk, .rst_n, .in, .in_valid,
    .out(fir_out), .out_valid(fir_out_valid)
  );

  iir_biquad dut_iir (
    .clk, .rst_n, .in, .in_valid,
    .out(iir_out), .out_valid(iir_out_valid)
  );

  iir_df2t dut_iir2 (
    .clk, .rst_n, .in, .in_valid,
    .out(iir2_out), .out_valid(iir2_out_valid)
  );

  neuromorphic_fir #(.TAPS(FIR_TAPS), .HIDDEN(NF_HIDDEN), .MU_SHIFT(MU_SHIFT)) dut_nf (
    .clk, .rst_n, .in, .in_valid, .train, .desired,
    .w_we(nf_w_we), .w_addr(nf_w_addr), .w_data(nf_w_data),
    .out(nf_out), .out_valid(nf_out_valid)
  );

  neuromorphic_iir #(.MU_SHIFT(MU_SHIFT)) dut_ni (
    .clk, .rst_n, .in, .in_valid, .train, .desired,
    .w_we(ni_w_we), .w_addr(ni_w_addr), .w_data(ni_w_data),
    .out(ni_out), .out_valid(ni_out_valid)
  );

  lif_neuron #(.V_W(20)) u_lif_nf (
    .clk, .rst_n, .i_in(nf_out), .in_valid(nf_out_valid),
    .spike(nf_spike), .v_mem(nf_v_mem)
  );

  lif_neuron #(.V_W(20)) u_lif_ni (
    .clk, .rst_n, .i_in(ni_out), .in_valid(ni_out_valid),
    .spike(ni_spike), .v_mem(ni_v_mem)
  );

endmodule
