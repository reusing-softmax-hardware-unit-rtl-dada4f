// Combined GELU / softmax unit.
//
// One shared dual-mode softmax serves two functions:
//   normal mode (mode = 1): y[i] = softmax over all N inputs z[i];
//   GELU mode   (mode = 0): N/2 GELUs in parallel, one per even lane 2p,
//     GELU(z) = z * softmax2_1([k, -k]),  k = sqrt(2/pi) * (z + 0.044715 z^3),
//     which is the tanh form of GELU rewritten with tanh(k) = 1 - 2/(e^2k + 1).
// In GELU mode lane 2p of the softmax gets k_p and lane 2p+1 gets -k_p (both
// from gelu_k_unit on z[2p]); inputs z[2p+1] are ignored. At the output, lane
// 2p returns z[2p] * y[2p]; odd lanes always return the raw softmax output
// (in GELU mode that is the unused second pair probability 1 - y[2p]).
// The muxes, the k datapath on the odd-numbered (1-based) inputs and the
// output multipliers follow the paper; lanes are numbered from 0 here.
//
// Timing (this design's choice; the paper gives no pipeline): inputs are
// registered, the datapath is combinational, outputs are registered, so a
// result appears two clock cycles after in_valid and one vector can be
// accepted every cycle, in either mode, with the mode free to change from one
// vector to the next. There is no back-pressure. Synchronous active-low reset
// clears the valid bits only.
//
// Interface: z[N] Q5.11 signed, mode, in_valid; y[N] Q16.16 signed,
// out_mode, out_valid.
module gelu_softmax_top
  import gelu_softmax_pkg::*;
#(
  parameter int N = 8
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  mode_e mode,
  input  in_t   z         [N],
  output logic  out_valid,
  output mode_e out_mode,
  output fx_t   y         [N]
);

  // ---------------- input register
  logic  v_q;
  mode_e mode_q;
  in_t   z_q [N];

  always_ff @(posedge clk) begin
    if (!rst_n) v_q <= 1'b0;
    else        v_q <= in_valid;
    if (in_valid) begin
      mode_q <= mode;
      z_q    <= z;
    end
  end

  // ---------------- k datapath and input muxes
  fx_t k     [N/2];
  fx_t k_neg [N/2];
  fx_t x     [N];

  for (genvar p = 0; p < N/2; p++) begin : g_k
    gelu_k_unit u_k (.z(z_q[2*p]), .k(k[p]), .k_neg(k_neg[p]));
  end

  always_comb
    for (int p = 0; p < N/2; p++) begin
      x[2*p]   = (mode_q == MODE_NORMAL) ? widen(z_q[2*p])   : k[p];
      x[2*p+1] = (mode_q == MODE_NORMAL) ? widen(z_q[2*p+1]) : k_neg[p];
    end

  // ---------------- shared softmax
  fx_t sm [N];

  dual_mode_softmax #(.N(N)) u_softmax (
    .mode (mode_q),
    .x    (x),
    .y    (sm)
  );

  // ---------------- output multipliers and muxes
  fx_t res [N];

  always_comb
    for (int p = 0; p < N/2; p++) begin
      res[2*p]   = (mode_q == MODE_NORMAL) ? sm[2*p] : fx_mul(widen(z_q[2*p]), sm[2*p]);
      res[2*p+1] = sm[2*p+1];
    end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= v_q;
    if (v_q) begin
      out_mode <= mode_q;
      y        <= res;
    end
  end

  // A result leaves exactly two cycles after its vector was accepted.
  property p_latency;
    @(posedge clk) disable iff (!rst_n) ($past(rst_n, 1) && $past(rst_n, 2)) |-> (out_valid == $past(in_valid, 2));
  endproperty
  a_latency: assert property (p_latency);

endmodule
