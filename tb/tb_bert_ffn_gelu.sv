// Workload testbench: the GELU of one token of a BERT-base feed-forward
// block. The intermediate layer of BERT-base has 3072 neurons per token; the
// 3072 pre-activation values are streamed through the combined unit at its
// default size (N = 8, four GELUs per vector) in GELU mode, back to back.
//
// Inputs follow a bell-shaped distribution (sum of four uniforms, standard
// deviation about 2), clipped to the Q5.11 range. Each GELU is checked
// against the tanh form (|err| <= 0.003|z| + 0.003); the mean absolute error
// is reported, also against the exact erf form of GELU (mean <= 0.002). The throughput is checked too: 768 vectors must leave in 768
// consecutive cycles, the first one two cycles after the first input.
module tb_bert_ffn_gelu;
  import gelu_softmax_pkg::*;
  import tb_ref_pkg::*;

  localparam int N       = 8;     // the unit's default size
  localparam int NEURONS = 3072;  // BERT-base intermediate size
  localparam int NVEC    = NEURONS / (N/2);

  logic  clk = 1'b0;
  logic  rst_n, in_valid, out_valid;
  mode_e mode, out_mode;
  in_t   z [N];
  fx_t   y [N];
  int    checks = 0, failures = 0;

  in_t    stim [NEURONS];
  longint cyc = 0, first_in = -1, first_out = -1, last_out = -1;
  int     received = 0;
  real    abs_sum = 0.0, worst = 0.0, erf_sum = 0.0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  gelu_softmax_top dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  always @(posedge clk)
    if (rst_n && in_valid && first_in < 0) first_in = cyc;

  // results
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      if (first_out < 0) first_out = cyc;
      last_out = cyc;
      for (int p = 0; p < N/2; p++) begin
        real zr, r, err;
        zr  = in2r(stim[received * (N/2) + p]);
        r   = gelu_tanh(zr);
        err = absr(fx2r(y[2*p]) - r);
        abs_sum += err;
        erf_sum += absr(fx2r(y[2*p]) - gelu_erf(zr));
        if (err > worst) worst = err;
        checks++;
        if (err > 0.003 * absr(zr) + 0.003) begin
          failures++;
          $display("neuron %0d: GELU(%f) = %f expected %f", received * (N/2) + p, zr, fx2r(y[2*p]), r);
        end
      end
      received++;
    end
  end

  initial begin
    int r;
    for (int i = 0; i < NEURONS; i++) begin
      r = 0;
      for (int u = 0; u < 4; u++) r += int'($urandom_range(4096, 0)) - 2048;
      r = r * 2;  // about 2048 * 2 = 2.0 standard deviation in Q5.11
      if (r > 32767) r = 32767;
      if (r < -32768) r = -32768;
      stim[i] = in_t'(r);
    end
    rst_n = 1'b0; in_valid = 1'b0; mode = MODE_GELU;
    for (int i = 0; i < N; i++) z[i] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int v = 0; v < NVEC; v++) begin
      in_valid <= 1'b1;
      mode     <= MODE_GELU;
      for (int p = 0; p < N/2; p++) begin
        z[2*p]   <= stim[v * (N/2) + p];
        z[2*p+1] <= in_t'($urandom);  // ignored in GELU mode
      end
      @(posedge clk);
    end
    in_valid <= 1'b0;
    repeat (5) @(posedge clk);
    checks += 3;
    if (received != NVEC) begin failures++; $display("received %0d of %0d", received, NVEC); end
    if (first_out - first_in != 2) begin failures++; $display("first result after %0d cycles", first_out - first_in); end
    if (last_out - first_out != longint'(NVEC) - 1) begin failures++; $display("results spread over %0d cycles", last_out - first_out + 1); end
    $display("BERT-base FFN GELU, %0d neurons in %0d cycles: mean abs error %f (worst %f) against the tanh form, %f against the erf form",
             NEURONS, last_out - first_in + 1, abs_sum / NEURONS, worst, erf_sum / NEURONS);
    checks++;
    if (erf_sum / NEURONS > 0.002) begin failures++; $display("mean error against erf GELU too large"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
