// Dual-mode adder tree.
//
// Adds the N exponentials e^(x_i - max) with a binary tree. Its first level
// adds neighbouring elements (e[2i] + e[2i+1]); those N/2 pair sums are what
// GELU mode needs, and the root is the full sum normal mode needs. Both are
// brought out; no extra adder is used for the dual mode, as in the paper.
// Inputs are non-negative Q16.16 numbers of at most 1.0, so the full sum of N
// of them fits in 32 bits for any N up to 2^15. Purely combinational.
//
// Interface: e[N] Q16.16 exponentials; pair_sum[N/2] and total_sum.
module dm_adder_tree
  import gelu_softmax_pkg::*;
#(
  parameter int N = 8
) (
  input  fx_t e         [N],
  output fx_t pair_sum  [N/2],
  output fx_t total_sum
);

  localparam int LEVELS = $clog2(N);

  fx_t lvl [LEVELS][N/2];

  always_comb begin
    lvl = '{default: '0};
    for (int i = 0; i < N/2; i++)
      lvl[0][i] = e[2*i] + e[2*i+1];
    for (int l = 1; l < LEVELS; l++)
      for (int i = 0; i < (N >> (l+1)); i++)
        lvl[l][i] = lvl[l-1][2*i] + lvl[l-1][2*i+1];
    for (int i = 0; i < N/2; i++) pair_sum[i] = lvl[0][i];
  end

  assign total_sum = lvl[LEVELS-1][0];

endmodule
