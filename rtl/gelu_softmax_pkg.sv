// Shared number formats and constants of the combined GELU/softmax unit.
//
// Inputs z are 16-bit signed fixed point with five integer bits (sign
// included) and eleven fraction bits. Every internal value is a 32-bit signed
// fixed-point number with FX_FRAC = 16 fraction bits (Q16.16); products are
// formed at 64 bits and truncated back to 32. The 16-bit input with five
// integer bits and the 32-bit internal arithmetic follow the paper; the choice
// of 16 fraction bits for the internal word is this design's own.
//
// The piecewise-linear tables split [0,1) into eight equal segments of width
// 1/8 and join the exact function values at the segment ends (chords):
//   2^v        ~ POW2_C[j] + POW2_S[j] * (v - j/8)
//     POW2_C[j] = round(2^(j/8) * 2^16)
//     POW2_S[j] = round(8 * (2^((j+1)/8) - 2^(j/8)) * 2^16)
//   log2(1+m)  ~ LOG2_C[j] + LOG2_S[j] * (m - j/8)
//     LOG2_C[j] = round(log2(1 + j/8) * 2^16)
//     LOG2_S[j] = round(8 * (log2(1 + (j+1)/8) - log2(1 + j/8)) * 2^16)
// The eight pieces for 2^v follow the paper; the paper fits its breakpoints
// with a curve-fitting library and does not list them, so the uniform chord
// segments are this design's own choice, as is the eight-piece log table.
package gelu_softmax_pkg;

  localparam int IN_W    = 16;  // input word
  localparam int IN_FRAC = 11;  // five integer bits
  localparam int FX_W    = 32;  // internal word
  localparam int FX_FRAC = 16;  // fraction bits of the internal word

  typedef logic signed [IN_W-1:0] in_t;
  typedef logic signed [FX_W-1:0] fx_t;

  // Mode encoding as printed next to the muxes: 0 = GELU, 1 = normal.
  typedef enum logic {
    MODE_GELU   = 1'b0,
    MODE_NORMAL = 1'b1
  } mode_e;

  // Constants in Q16.16.
  localparam fx_t LOG2E   = 32'sd94548;  // log2(e)
  localparam fx_t LN2     = 32'sd45426;  // ln(2)
  localparam fx_t GELU_A  = 32'sd52290;  // sqrt(2/pi)
  localparam fx_t GELU_B  = 32'sd2930;   // 0.044715
  localparam fx_t FX_ONE  = 32'sd65536;

  localparam logic [17:0] POW2_C [8] = '{18'd65536, 18'd71468, 18'd77936, 18'd84990,
                                         18'd92682, 18'd101070, 18'd110218, 18'd120194};
  localparam logic [17:0] POW2_S [8] = '{18'd47452, 18'd51747, 18'd56430, 18'd61538,
                                         18'd67107, 18'd73181, 18'd79805, 18'd87028};
  localparam logic [17:0] LOG2_C [8] = '{18'd0, 18'd11136, 18'd21098, 18'd30109,
                                         18'd38336, 18'd45904, 18'd52911, 18'd59434};
  localparam logic [17:0] LOG2_S [8] = '{18'd89090, 18'd79693, 18'd72091, 18'd65814,
                                         18'd60543, 18'd56054, 18'd52185, 18'd48816};

  // Input word (Q5.11) widened to the internal word (Q16.16).
  function automatic fx_t widen(input in_t z);
    return fx_t'(z) <<< (FX_FRAC - IN_FRAC);
  endfunction

  // Fixed-point product of two Q16.16 numbers, truncated toward -inf.
  function automatic fx_t fx_mul(input fx_t a, input fx_t b);
    logic signed [2*FX_W-1:0] p;
    p = 64'(a) * 64'(b);
    return fx_t'(p >>> FX_FRAC);
  endfunction

endpackage
