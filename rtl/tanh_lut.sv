// tanh_lut: tanh activation as a read-only look-up table.
//
// The input x is a signed fixed-point value with FRAC fraction bits (Q15
// scaling, extra integer bits above). It is clipped to [-2^RANGE_LOG2,
// 2^RANGE_LOG2) and its top ADDR_W bits in that window address a table of
// 2^ADDR_W Q15 entries; entry i holds tanh at the centre of its input
// interval, rounded and limited to the Q15 range. Inputs beyond the window
// return the table ends, which already sit at +/-tanh(4) ~ +/-0.9993.
// The table is combinational (an asynchronous ROM); the caller registers it.
//
// The reference text only says the activation is "tanh approximated by
// LUT"; table size (1024 entries over [-4, 4)), midpoint sampling and
// clipping are this design's own choices. The entries are computed at
// elaboration as tanh(t) = (e^2t - 1) / (e^2t + 1), with e^2t from its power
// series, so no table file is needed.
module tanh_lut
  import nf_pkg::*;
#(
  parameter int unsigned IN_W       = 24,
  parameter int unsigned ADDR_W     = 10,
  parameter int unsigned RANGE_LOG2 = 2
) (
  input  logic signed [IN_W-1:0] x,
  output sample_t                y
);

  localparam int unsigned DEPTH = 2 ** ADDR_W;
  localparam int          SHIFT = int'(FRAC) + int'(RANGE_LOG2) + 1 - int'(ADDR_W);
  localparam int          IDX_MAX = int'(DEPTH / 2) - 1;
  localparam int          IDX_MIN = -int'(DEPTH / 2);

  function automatic real exp_series(input real t);
    real term, sum;
    term = 1.0;
    sum  = 1.0;
    for (int n = 1; n < 80; n++) begin
      term = term * t / n;
      sum  = sum + term;
    end
    return sum;
  endfunction

  // Q15 tanh of the centre of the input interval addressed by signed index i.
  function automatic int tanh_entry(input int i);
    real t, e2, v;
    int  q;
    t  = ($itor(i) + 0.5) * $itor(2 ** (RANGE_LOG2 + 1)) / $itor(DEPTH);
    e2 = exp_series(2.0 * t);
    v  = (e2 - 1.0) / (e2 + 1.0);
    q  = $rtoi(v * 32768.0 + ((v < 0.0) ? -0.5 : 0.5));
    if (q > 32767)  q = 32767;
    if (q < -32768) q = -32768;
    return q;
  endfunction

  sample_t table_rom [DEPTH];

  for (genvar a = 0; a < int'(DEPTH); a++) begin : g_rom
    // Address a holds signed index a - DEPTH/2 (offset binary).
    localparam int Q = tanh_entry(a - int'(DEPTH / 2));
    assign table_rom[a] = sample_t'(Q);
  end

  logic signed [IN_W-1:0] idx;
  logic [ADDR_W-1:0]      addr;

  always_comb begin
    idx = x >>> SHIFT;
    if (idx > IN_W'(IDX_MAX))      addr = ADDR_W'(DEPTH - 1);
    else if (idx < IN_W'(IDX_MIN)) addr = '0;
    else                           addr = ADDR_W'(idx + IN_W'(DEPTH / 2));
    y = table_rom[addr];
  end

  initial assert (SHIFT >= 0) else $error("tanh_lut: ADDR_W too large for FRAC");

endmodule
