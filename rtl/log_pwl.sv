// Natural-logarithm unit for the sum of exponentials.
//
// Works like a forward logarithmic converter: a leading-one detector finds
// the position p of the most significant 1 of the unsigned Q16.16 input s, so
// s = 2^(p-16) * (1 + m) with m in [0,1). The bits below the leading one are
// left-aligned into a 16-bit m, log2(1+m) comes from an eight-piece
// piecewise-linear table (LOG2_C/LOG2_S), and
//   ln s = ((p - 16) + log2(1 + m)) * ln 2.
// The paper reuses a published converter of this kind without giving its
// segment table; the eight uniform chord segments and the final ln 2 scaling
// are this design's choices. s = 0 cannot occur (the largest element of every
// group contributes e^0 = 1.0) and returns 0. Purely combinational.
//
// Interface: s unsigned Q16.16 in (carried in fx_t), y = ln s, signed Q16.16.
module log_pwl
  import gelu_softmax_pkg::*;
(
  input  fx_t s,
  output fx_t y
);

  logic [4:0]  lead;       // position of the leading one
  logic [31:0] norm;       // s shifted so the leading one sits at bit 31
  logic [15:0] mant;       // m, Q0.16
  logic [2:0]  seg;
  logic [12:0] rem;
  logic [17:0] slope_term;
  logic [17:0] frac_log;   // log2(1+m), Q0.16
  fx_t         log2_s;     // Q16.16

  always_comb begin
    lead = '0;
    for (int b = 0; b < 32; b++)
      if (s[b]) lead = 5'(b);
    norm       = 32'(s) << (5'd31 - lead);
    mant       = norm[30:15];
    seg        = mant[15:13];
    rem        = mant[12:0];
    slope_term = 18'((32'(LOG2_S[seg]) * 32'(rem)) >> FX_FRAC);
    frac_log   = LOG2_C[seg] + slope_term;
    log2_s     = ((fx_t'(lead) - fx_t'(FX_FRAC)) <<< FX_FRAC) + fx_t'(frac_log);
    y          = (s == '0) ? '0 : fx_mul(log2_s, LN2);
  end

endmodule
