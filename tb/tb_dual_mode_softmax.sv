// Self-checking testbench for dual_mode_softmax. Random vectors in normal
// mode are compared with softmax over all N elements; random vectors in GELU
// mode with softmax over each pair (x[2i], x[2i+1]), including pairs of the
// form [k, -k]. The combined error of the three piecewise-linear stages is
// bounded by 0.006 per probability; the outputs of each group must also add
// up to 1 within 0.03.
module tb_dual_mode_softmax;
  import gelu_softmax_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 8;  // the module default

  logic  clk = 1'b0;
  mode_e mode;
  fx_t   x [N];
  fx_t   y [N];
  int    checks = 0, failures = 0;
  real   worst = 0.0;

  always #5 clk = ~clk;

  dual_mode_softmax dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_vec();
    real ref_y [N];
    real m, s, err, tot;
    int  g;
    @(posedge clk);
    g = (mode == MODE_NORMAL) ? N : 2;
    for (int b = 0; b < N; b += g) begin
      m = fx2r(x[b]);
      for (int i = b; i < b + g; i++) if (fx2r(x[i]) > m) m = fx2r(x[i]);
      s = 0.0;
      for (int i = b; i < b + g; i++) s += $exp(fx2r(x[i]) - m);
      tot = 0.0;
      for (int i = b; i < b + g; i++) begin
        ref_y[i] = $exp(fx2r(x[i]) - m) / s;
        err = absr(fx2r(y[i]) - ref_y[i]);
        tot += fx2r(y[i]);
        if (err > worst) worst = err;
        checks++;
        if (err > 0.006) begin
          failures++;
          $display("mode %0d lane %0d y %f expected %f", mode, i, fx2r(y[i]), ref_y[i]);
        end
      end
      checks++;
      if (absr(tot - 1.0) > 0.03) begin
        failures++;
        $display("mode %0d group %0d sums to %f", mode, b, tot);
      end
    end
  endtask

  initial begin
    real k;
    // normal mode, inputs in the Q5.11 range
    for (int t = 0; t < 1500; t++) begin
      mode = MODE_NORMAL;
      for (int i = 0; i < N; i++) x[i] = widen(tb_ref_pkg::rand_in(t % 3 == 0 ? 2 : 16));
      check_vec();
    end
    // GELU mode, arbitrary pairs
    for (int t = 0; t < 1500; t++) begin
      mode = MODE_GELU;
      for (int i = 0; i < N; i++) x[i] = widen(tb_ref_pkg::rand_in(t % 3 == 0 ? 2 : 16));
      check_vec();
    end
    // GELU mode, [k, -k] pairs
    for (int t = 0; t < 1500; t++) begin
      mode = MODE_GELU;
      for (int p = 0; p < N/2; p++) begin
        k = (real'($urandom_range(20000, 0)) - 10000.0) / 1000.0;
        x[2*p]   = fx_t'($rtoi(k * 65536.0));
        x[2*p+1] = -x[2*p];
      end
      check_vec();
    end
    $display("dual_mode_softmax worst abs error %f", worst);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
