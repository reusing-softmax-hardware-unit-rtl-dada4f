// Self-checking testbench for exp_pwl: sweeps d over [-40, 0] plus edge
// values and compares with the real exponential. The eight-piece chord
// approximation of 2^v has a worst-case error of about 0.2 %, so the bound is
// 0.003 absolute (outputs are at most 1.0).
module tb_exp_pwl;
  import gelu_softmax_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 1'b0;
  fx_t  d, y;
  int   checks = 0, failures = 0;
  real  worst = 0.0;

  always #5 clk = ~clk;

  exp_pwl dut (.d(d), .y(y));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input fx_t dv);
    real r, err;
    d = dv;
    @(posedge clk);
    r   = $exp(fx2r(dv));
    if (dv > 0) r = 1.0;
    err = absr(fx2r(y) - r);
    if (err > worst) worst = err;
    checks++;
    if (err > 0.003 || y < 0 || y > FX_ONE) begin
      failures++;
      $display("exp(%f) = %f, expected %f", fx2r(dv), fx2r(y), r);
    end
  endtask

  initial begin
    check('0);
    check(-fx_t'(1));
    check(fx_t'(32'sd65536));
    check(-(32'sd40 <<< 16));
    check(fx_t'(32'h8000_0000));
    for (int i = 0; i < 4096; i++) check(-fx_t'(i * 64));  // 0 .. -4 fine steps
    for (int i = 0; i < 3000; i++) check(-fx_t'($urandom_range(40 * 65536, 0)));
    $display("exp_pwl worst abs error %f", worst);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
