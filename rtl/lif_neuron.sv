// lif_neuron: leaky integrate-and-fire neuron used as a spiking output stage.
//
// The membrane equation tau dV/dt = -(V - V_rest) + R I is discretised with
// one Euler step per input event, with dt/tau = 2^-LEAK_SHIFT and R = 1:
//   V <= V + ((I - (V - V_REST)) >>> LEAK_SHIFT)
// so V relaxes towards V_REST + I with time constant 2^LEAK_SHIFT samples.
// When the updated V reaches THRESH the neuron emits a one-clock spike,
// V is reset to V_REST and the next REFRAC input events are ignored
// (absolute refractory period, V held at V_REST). The input current I is a
// Q15 sample, typically a filter output; V is kept in V_W bits with the same
// Q15 scaling.
//
// Event-driven: the state only changes on clocks with in_valid (no input,
// no computation). spike and v_mem are registered, so a spike appears one
// clock after the input event that caused it. rst_n is an asynchronous,
// active-low clear to V_REST.
//
// From the reference: the LIF equation and its Euler discretisation, firing
// at threshold, reset to the resting potential, an absolute refractory
// period, and the use of a filter output as the neuron's input current.
// This design's own choices: the power-of-two leak, R = 1, widths and the
// default threshold (0.25), time constant (8 samples) and refractory length.
module lif_neuron
  import nf_pkg::*;
#(
  parameter int unsigned V_W        = 20,
  parameter int unsigned LEAK_SHIFT = 3,
  parameter int          THRESH     = 8192,   // 0.25 in Q15
  parameter int          V_REST     = 0,
  parameter int unsigned REFRAC     = 2
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  sample_t               i_in,
  input  logic                  in_valid,
  output logic                  spike,
  output logic signed [V_W-1:0] v_mem
);

  localparam int unsigned RC_W = (REFRAC > 0) ? $clog2(REFRAC + 1) : 1;

  logic [RC_W-1:0]       refrac_cnt;
  logic signed [V_W-1:0] v_next;
  logic signed [V_W+1:0] drive;

  always_comb begin
    drive  = (V_W+2)'(i_in) - ((V_W+2)'(v_mem) - (V_W+2)'(V_REST));
    v_next = v_mem + V_W'(drive >>> LEAK_SHIFT);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_mem      <= V_W'(V_REST);
      spike      <= 1'b0;
      refrac_cnt <= '0;
    end else begin
      spike <= 1'b0;
      if (in_valid) begin
        if (refrac_cnt != '0) begin
          refrac_cnt <= refrac_cnt - 1'b1;
          v_mem      <= V_W'(V_REST);
        end else if (v_next >= V_W'(THRESH)) begin
          spike      <= 1'b1;
          v_mem      <= V_W'(V_REST);
          refrac_cnt <= RC_W'(REFRAC);
        end else begin
          v_mem <= v_next;
        end
      end
    end
  end

endmodule
