// Dual-mode maximum tree.
//
// A binary tree of comparators finds the largest of the N inputs. Its first
// level compares neighbouring elements (x[2i], x[2i+1]), so the N/2 pair
// maxima come for free. A mux per element then selects which maximum that
// element will have subtracted from it: the maximum of its own pair in GELU
// mode (mode = 0) or the global maximum in normal mode (mode = 1). Tree,
// reuse of the first level and mux numbering follow the paper; the tree is
// purely combinational (no register), which is this design's choice.
//
// Interface: x[N] signed Q16.16 inputs, mode; max_sel[N] the maximum each
// element uses, pair_max[N/2] and gmax exported for inspection. N must be a
// power of two, at least 2.
module dm_max_tree
  import gelu_softmax_pkg::*;
#(
  parameter int N = 8
) (
  input  mode_e mode,
  input  fx_t   x        [N],
  output fx_t   max_sel  [N],
  output fx_t   pair_max [N/2],
  output fx_t   gmax
);

  localparam int LEVELS = $clog2(N);  // level 0 holds the pair maxima

  fx_t lvl [LEVELS][N/2];

  always_comb begin
    lvl = '{default: '0};
    for (int i = 0; i < N/2; i++)
      lvl[0][i] = (x[2*i] > x[2*i+1]) ? x[2*i] : x[2*i+1];
    for (int l = 1; l < LEVELS; l++)
      for (int i = 0; i < (N >> (l+1)); i++)
        lvl[l][i] = (lvl[l-1][2*i] > lvl[l-1][2*i+1]) ? lvl[l-1][2*i] : lvl[l-1][2*i+1];
  end

  assign gmax = lvl[LEVELS-1][0];

  always_comb begin
    for (int i = 0; i < N/2; i++) pair_max[i] = lvl[0][i];
    for (int i = 0; i < N; i++)
      max_sel[i] = (mode == MODE_NORMAL) ? gmax : lvl[0][i/2];
  end

endmodule
