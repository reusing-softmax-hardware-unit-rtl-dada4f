// Self-checking testbench for gelu_k_unit: every 16th Q5.11 input over the
// whole range [-16, 16) plus random ones, compared with
// sqrt(2/pi) * (z + 0.044715 z^3) in real arithmetic. Truncation of the four
// products and the 16-bit constants give a relative error well under 0.1 %.
module tb_gelu_k_unit;
  import gelu_softmax_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 1'b0;
  in_t  z;
  fx_t  k, k_neg;
  int   checks = 0, failures = 0;

  always #5 clk = ~clk;

  gelu_k_unit dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input in_t zv);
    real r, err;
    z = zv;
    @(posedge clk);
    r   = gelu_k(in2r(zv));
    err = absr(fx2r(k) - r);
    checks++;
    if (err > 0.0005 + 0.001 * absr(r) || k_neg != -k) begin
      failures++;
      $display("k(%f) = %f / %f, expected %f", in2r(zv), fx2r(k), fx2r(k_neg), r);
    end
  endtask

  initial begin
    for (int i = -32768; i < 32768; i += 16) check(in_t'(i));
    check(in_t'(16'sh7fff));
    for (int i = 0; i < 2000; i++) check(in_t'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
