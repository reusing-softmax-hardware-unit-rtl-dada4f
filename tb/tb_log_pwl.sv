// Self-checking testbench for log_pwl: inputs from 1.0 to 32.0 (the range a
// sum of up to 32 exponentials takes) and a few below 1.0, compared with the
// real natural logarithm. Bound 0.003 (the eight-piece chord of log2(1+m)
// is off by at most about 0.0028 in log2, 0.002 in ln).
module tb_log_pwl;
  import gelu_softmax_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 1'b0;
  fx_t  s, y;
  int   checks = 0, failures = 0;
  real  worst = 0.0;

  always #5 clk = ~clk;

  log_pwl dut (.s(s), .y(y));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input fx_t sv);
    real r, err;
    s = sv;
    @(posedge clk);
    r   = $ln(fx2r(sv));
    err = absr(fx2r(y) - r);
    if (err > worst) worst = err;
    checks++;
    if (err > 0.003) begin
      failures++;
      $display("ln(%f) = %f, expected %f", fx2r(sv), fx2r(y), r);
    end
  endtask

  initial begin
    check(FX_ONE);
    check(32'sd2 <<< 16);
    check(32'sd32 <<< 16);
    for (int i = 0; i < 2048; i++) check(FX_ONE + fx_t'(i * 32));  // 1.0 .. 2.0 fine steps
    for (int i = 0; i < 3000; i++) check(fx_t'($urandom_range(32 * 65536, 65536)));
    for (int i = 0; i < 200; i++)  check(fx_t'($urandom_range(65535, 4096)));
    $display("log_pwl worst abs error %f", worst);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
