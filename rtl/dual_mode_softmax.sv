// Dual-mode softmax unit.
//
// Computes softmax in the logarithm domain,
//   y_i = exp(x_i - max - ln(sum_j exp(x_j - max))),
// either over all N inputs (normal mode, mode = 1) or independently over the
// N/2 pairs (x[2i], x[2i+1]) (GELU mode, mode = 0). Stages, in order:
//   1. dm_max_tree: global maximum and pair maxima; per-element mux.
//   2. subtract: d_i = x_i - max_sel_i.
//   3. exp_pwl per element: e_i = exp(d_i).
//   4. dm_adder_tree: pair sums and total sum.
//   5. log_pwl: one unit on the total sum and N/2 units on the pair sums;
//      per-element mux picks the total (normal) or its own pair (GELU).
//   6. subtract and exp_pwl per element: y_i = exp(d_i - log_sel_i).
// The structure, the reuse of the first tree levels and the extra N/2
// logarithm units are the paper's. The unit is purely combinational; any
// pipeline registers are left to the enclosing design.
//
// Interface: x[N] signed Q16.16, mode; y[N] Q16.16 probabilities in [0, 1].
module dual_mode_softmax
  import gelu_softmax_pkg::*;
#(
  parameter int N = 8
) (
  input  mode_e mode,
  input  fx_t   x [N],
  output fx_t   y [N]
);

  fx_t max_sel  [N];
  fx_t pair_max [N/2];
  fx_t gmax;
  fx_t d1       [N];
  fx_t e        [N];
  fx_t pair_sum [N/2];
  fx_t total_sum;
  fx_t pair_log [N/2];
  fx_t total_log;
  fx_t log_sel  [N];
  fx_t d2       [N];

  dm_max_tree #(.N(N)) u_max (
    .mode     (mode),
    .x        (x),
    .max_sel  (max_sel),
    .pair_max (pair_max),
    .gmax     (gmax)
  );

  always_comb
    for (int i = 0; i < N; i++) d1[i] = x[i] - max_sel[i];

  for (genvar i = 0; i < N; i++) begin : g_exp1
    exp_pwl u_exp (.d(d1[i]), .y(e[i]));
  end

  dm_adder_tree #(.N(N)) u_sum (
    .e         (e),
    .pair_sum  (pair_sum),
    .total_sum (total_sum)
  );

  log_pwl u_log_total (.s(total_sum), .y(total_log));

  for (genvar p = 0; p < N/2; p++) begin : g_log_pair
    log_pwl u_log (.s(pair_sum[p]), .y(pair_log[p]));
  end

  always_comb
    for (int i = 0; i < N; i++) begin
      log_sel[i] = (mode == MODE_NORMAL) ? total_log : pair_log[i/2];
      d2[i]      = d1[i] - log_sel[i];
    end

  for (genvar i = 0; i < N; i++) begin : g_exp2
    exp_pwl u_exp (.d(d2[i]), .y(y[i]));
  end

endmodule
