# Classical and neuromorphic low-pass filters in SystemVerilog

This design runs a sampled signal through two kinds of low-pass filter at the same time, so that they can be compared sample for sample:

- **Classical filters.** An FIR filter and an IIR filter compute the filter equations exactly, with fixed coefficients.
- **Neuromorphic filters.** Small neural networks approximate the same filters. Their synaptic weights sit in registers that can be rewritten, and a least-mean-squares (LMS) rule adapts them on-line. Each network's output can also be turned into spikes by a leaky integrate-and-fire (LIF) neuron.

The aim is to compare the two approaches on the same stream. The classical filters are exact but rigid. The neural ones can be reprogrammed and can learn, but they only approximate the filter. In a device built around memristors, the register weight arrays here would be memristor crossbars. This RTL emulates those crossbars in logic.

The structure follows the paper "Neuromorphic FPGA Design for Digital Signal Processing" (J. London). That paper gives the filter kinds, the network types, the learning rule, the port names and the number format of its Verilog models. It does not give their sizes, coefficients or internal details. Those were chosen for this RTL and are listed under "Where this RTL departs from, or adds to, the reference" at the end.

## Number format

Every sample is a signed 16-bit Q15 word: one sign bit and 15 fraction bits, covering [-1, 1).

- **FIR weights.** The FIR taps and the weights of the feed-forward network are Q15 as well.
- **Biquad and recurrent-neuron coefficients.** These use Q2.14, because the feedback tap a1 of a low-pass biquad is close to -1.6 and does not fit Q15.
- **Arithmetic.** Products are summed in a 48-bit accumulator and scaled back with an arithmetic right shift, which truncates. The result is saturated to the 16-bit range.

The package `nf_pkg` holds these widths, the `sample_t`/`coef_t`/`acc_t` types, the saturation function and the default coefficients.

## The filters

| module | what it computes | state | latency |
|---|---|---|---|
| `fir` | direct-form FIR, y(n) = Σ h(k) x(n−k), 8 taps | 7 past inputs | 1 clock |
| `iir_biquad` | Direct Form I biquad, y = b0x + b1x₁ + b2x₂ − a1y₁ − a2y₂ | 2 inputs, 2 outputs | 1 clock |
| `iir_df2t` | the same IIR in transposed Direct Form II, any order up to 8 | ORDER 48-bit partial sums | 1 clock |
| `neuromorphic_fir` | 8 inputs → 4 hidden neurons → 1 output, LMS on the output layer | 7 past inputs, 36 weights | 2 clocks |
| `neuromorphic_iir` | recurrent tanh neuron of biquad order, LMS on all five taps | 2 inputs, 2 activations, 5 weights | 1 clock |

All of them accept one sample per clock. A sample is presented with `in_valid` high, and a clock with `in_valid` low changes no state: there is no computation without an input event. Each output carries its own `out_valid`, which is `in_valid` delayed by the latency in the table. Reset (`rst_n`) is asynchronous and active-low. It clears the delay lines and restores the default weights.

**Default coefficients.**
- **FIR.** The 8-tap FIR uses the binomial low-pass [1 7 21 35 35 21 7 1]/128, whose DC gain is exactly 1. For another tap count, `nf_pkg::fir_binomial(TAPS)` computes C(TAPS−1, k)/2^(TAPS−1).
- **Biquad.** The biquad is a second-order Butterworth low-pass with its cut-off at 0.05 of the sample rate, from the bilinear transform: b = (329, 658, 329), a1 = −25576, a2 = 10508 in Q2.14.
- **Overriding.** Both sets are parameters and can be overridden.

**The two IIR forms.** `iir_df2t` keeps one partial sum per order, s_k = b_k x − a_k y + s_(k+1), rather than delayed samples. Its partial sums are held at the full 48-bit precision and only the output is truncated. At order 2 with the same coefficients it therefore produces exactly the output of `iir_biquad`, and the testbenches check this bit for bit. It is the form to use for higher orders. The Q2.14 coefficient format limits every |a_k| to below 2. A third-order Butterworth low-pass at 0.1 of the sample rate already needs a1 ≈ −2.28, so such filters need a wider coefficient format or a cascade of biquads.

## The feed-forward network filter

`neuromorphic_fir` keeps the same tap line as the FIR. Rather than one dot product, it computes two layers:

    h_j = clip( Σ_k W1[j][k] · x(n−k) )        j = 0..3   (stage 1)
    y   = clip( Σ_j W2[j] · h_j )                          (stage 2)

Here `clip` saturates to Q15, so each hidden neuron is linear until it saturates. A linear activation is what lets a network approximate a linear convolution. The reset weights make the network behave like the classical FIR from the start:
- each hidden neuron averages two neighbouring taps (W1 = 0.5 on its pair);
- W2[j] holds the sum of the two FIR coefficients of pair j.

What remains is the error of treating each pair of taps as one: with the noisy sinusoid below it is about 5·10⁻⁵ in MSE.

**Learning.** A sample presented with `train = 1` carries a `desired` value. When that sample's output is formed one clock later, the output-layer weights take one LMS step:

    e      = desired − y
    W2[j] += (e · h_j) >>> (15 + MU_SHIFT)          (step size 2^−MU_SHIFT, default 1/64)

The input layer is not adapted. The step is applied in the same clock that registers `out`, so the next sample already sees the new weights.

**Weight loading.** The write port `w_we/w_addr/w_data` loads any weight while samples keep flowing:
- addresses 0..31 are W1 row by row;
- addresses 32..35 are W2.

A write wins over an LMS step to the same weight in the same clock. The weights are intended to be trained elsewhere and loaded through this port.

## The recurrent neuron and its tanh table

`neuromorphic_iir` is one neuron of Elman type. Besides the current and two past inputs, it sees its own two previous activations as a recurrent context:

    u[n] = b0 x[n] + b1 x[n−1] + b2 x[n−2] − a1 y[n−1] − a2 y[n−2]
    y[n] = tanh(u[n])

With the default weights, which are the Butterworth coefficients, this is the classical biquad with a tanh on its output. It matches the biquad for small signals and compresses large ones. Because the neuron feeds back its *activation*, the tanh sits inside the loop. The whole update is done in the clock that accepts the sample, so the recurrence closes within one sample period.

**Learning.** With `train = 1`, all five weights take an LMS step per sample:

    b_k += (e · x[n−k]) >>> (2·15 − 14 + MU_SHIFT)
    a_k −= (e · y[n−k]) >>> (2·15 − 14 + MU_SHIFT)

The shift converts the Q30 product to Q2.14 and applies the step size. The rule is the equation-error form: it ignores the tanh slope and the dependence of past outputs on the weights. This makes it cheap but not an exact gradient. Weights saturate at the Q2.14 limits. Addresses 0..4 of the write port are b0, b1, b2, a1 and a2.

**The tanh table.** `tanh_lut` reads tanh from a 1024-entry Q15 table covering inputs [−4, 4) in steps of 1/128. Entry i holds tanh at the centre of its interval, so the table is exactly odd-symmetric. Inputs outside the window read the end entries, ±0.99933. The entries are computed during elaboration from tanh(t) = (e^{2t} − 1)/(e^{2t} + 1), with e^{2t} summed as a power series, so no data file is needed. The table is a combinational ROM. `ADDR_W` and `RANGE_LOG2` change its size and range.

## Spiking output stage

`lif_neuron` is a leaky integrate-and-fire neuron. It takes a filter output as its input current and turns it into spike events. The membrane equation τ dV/dt = −(V − V_rest) + R·I is stepped with Euler's method once per input event, with dt/τ = 2^−LEAK_SHIFT and R = 1:

    V ← V + ((I − (V − V_REST)) >>> LEAK_SHIFT)

**Firing.** V relaxes towards V_REST + I. A neuron therefore fires only when the current stays above the threshold (default 0.25) long enough, and a larger current fires it more often. On reaching the threshold the neuron:
- emits a one-clock `spike`;
- resets V to V_REST;
- ignores the next REFRAC input events (default 2), its absolute refractory period.

`v_mem` exposes the membrane potential.

## Top level and timing

`neuro_dsp_top` connects all five filters to one input stream (`in`, `in_valid`). The two network filters share `train` and `desired`. Each network has its own weight port, which is where a memristor weight array would attach. One LIF neuron sits on each network's output. A spike follows the output event that caused it by one clock, so the neuromorphic FIR spike comes 3 clocks after its input sample and the neuromorphic IIR spike 2 clocks after.

| top-level parameter | default | meaning |
|---|---|---|
| `FIR_TAPS` | 8 | taps of both FIR-type filters |
| `NF_HIDDEN` | 4 | hidden neurons of the network filter |
| `MU_SHIFT` | 6 | LMS step size 2^−MU_SHIFT |

Synthesised at the defaults, the top needs about 420 word-level cells and about 1100 flip-flops. Yosys keeps the tanh table as a 16 Kbit ROM.

## Verification

Every module has a self-checking testbench in `tb/`. Each one compares the module against a reference model written separately in the testbench, checks the latency on every clock, ends with a `TB_RESULT checks=… failures=…` line, and has a watchdog.

- `tb_fir`, `tb_iir_biquad` and `tb_iir_df2t` drive impulses, full-scale steps, square waves (which saturate the biquad) and random samples with gaps in `in_valid`. Their 64-bit integer models must match bit for bit. `tb_iir_df2t` also runs a third-order instance against a Direct Form I model.
- `tb_tanh_lut` sweeps the input over ±6 and checks every output against the simulator's `$tanh` at the interval centre. It also checks symmetry and monotonicity.
- `tb_neuromorphic_fir` and `tb_neuromorphic_iir` model the pipelines, the LMS steps and the weight writes exactly. Each also checks that training from deliberately wrong weights lowers the error.
- `tb_lif_neuron` checks the membrane value every clock. It also checks that a sub-threshold current never fires, that the refractory period occurs, and that a larger current fires more often.
- `tb_neuro_dsp_top` runs the whole design at its default parameters on the main workload:
  - a 0.6-amplitude sinusoid (period 50 samples) plus noise of amplitude 0.05, quantised to Q15;
  - 2000 training samples, with `desired` set to the classical FIR output, then 2000 test samples;
  - then an impulse and square waves.

  It checks the outputs of the FIR and both IIR forms bit for bit, and the latencies. It counts weight loads, training samples, stalls, saturation, the flat part of tanh, spikes and refractory periods, and fails if any of them never happened.

Test-phase mean squared error against the classical FIR, in units of full scale 1.0:

| filter | MSE |
|---|---|
| classical biquad | 0.0039 |
| neuromorphic FIR (after training) | 0.00006 |
| neuromorphic IIR (after training) | 0.0036 |

These numbers describe this RTL with its chosen coefficients and network sizes. They are not a reproduction of the reference's figures: it reports 0.137, 0.521 and 0.153 for models whose sizes and training it does not give.

To simulate a testbench with Verilator, from the directory that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert --top-module tb_neuro_dsp_top \
        -Irtl -y rtl -y tb +libext+.sv rtl/nf_pkg.sv tb/tb_neuro_dsp_top.sv
    ./obj_dir/Vtb_neuro_dsp_top

Replace the module name to run any other testbench. The end-to-end run takes well under a second.

## Where this RTL departs from, or adds to, the reference

- **Sample width.** The reference names a 24-bit default data width with about 16 fraction bits. Its evaluated models and schematics, however, use 16-bit Q15 samples. This RTL follows the 16-bit Q15 version; the widths are parameters of `nf_pkg`.
- **IIR form.** The reference describes its classical IIR both as a transposed Direct Form II of parameterised order and as a Direct Form I biquad. Both are provided, `iir_df2t` and `iir_biquad`, and at the default order they give the same output.
- **This design's own choices:**
  - the tap count and the coefficient values of both classical filters;
  - the network sizes;
  - the clipping activation of the feed-forward network;
  - adapting only that network's output layer;
  - the single-neuron form of the recurrent network;
  - the equation-error LMS and the step size;
  - the tanh table's size and range;
  - truncation and saturation;
  - all LIF constants.
- **Test noise.** The reference describes its test noise as drawn from a Gaussian generator taken modulo 1000. The testbench uses uniform noise of the same amplitude, and a sinusoid period of 50 samples, because the reference gives no sample rate for its 50 Hz tone.
- **Added ports.** The `desired` input and the weight write ports are needed for on-line learning and for loading trained weights, but the reference shows no such ports.
- **LIF placement.** The reference proposes an LIF output stage but does not place it. Here one neuron is fed by each neuromorphic output.
- **Not included.** The analog parts are outside this RTL: memristors and memristor crossbars, the time-domain (pulse-width) registers, amplifiers, adders and z⁻¹ circuits, and the op-amp filters. Dedicated DSP slices are left to synthesis, which maps the plain products in the RTL onto them.
