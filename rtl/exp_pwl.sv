// Exponential unit, e^d for d <= 0.
//
// e^d is rewritten as 2^t with t = d * log2(e). t is split into its integer
// part u (u <= 0) and its fraction v in [0,1): 2^u is a right shift by -u and
// 2^v comes from an eight-piece piecewise-linear table on [0,1) (segment
// j = top three bits of v, value POW2_C[j] + POW2_S[j] * (v - j/8)). This
// decomposition and the eight pieces follow the paper; uniform chord segments,
// the clamps below and the purely combinational form are this design's own.
//
// Clamps: d > 0 cannot occur in the softmax datapath and returns 1.0;
// d < -32 returns 0 (e^-32 is far below the 2^-16 resolution).
//
// Interface: d signed Q16.16 in, y unsigned Q16.16 out in [0, 1.0].
module exp_pwl
  import gelu_softmax_pkg::*;
(
  input  fx_t d,
  output fx_t y
);

  localparam fx_t D_MIN = -(32'sd32 <<< FX_FRAC);

  logic signed [63:0] prod;
  fx_t                t;        // d * log2(e), Q16.16, <= 0
  logic        [15:0] shamt;    // -u
  logic         [2:0] seg;
  logic        [12:0] rem;
  logic        [17:0] slope_term;
  logic        [17:0] frac_pow; // 2^v, Q1.16 in [1, 2)

  always_comb begin
    prod       = 64'(d) * 64'(LOG2E);
    t          = fx_t'(prod >>> FX_FRAC);
    shamt      = 16'(-(t >>> FX_FRAC));
    seg        = t[15:13];
    rem        = t[12:0];
    slope_term = 18'((32'(POW2_S[seg]) * 32'(rem)) >> FX_FRAC);
    frac_pow   = POW2_C[seg] + slope_term;
    if (d > 0)
      y = FX_ONE;
    else if (d < D_MIN || shamt > 16'd17)
      y = '0;
    else
      y = fx_t'(32'(frac_pow) >> shamt);
  end

endmodule
