// End-to-end testbench of gelu_softmax_top at N = 32:
// 500 vectors in randomly mixed normal and GELU modes, streamed with random
// idle cycles, each result checked against real-valued softmax / GELU and
// against the two-cycle latency (see gelu_top_driver).
module tb_gelu_softmax_top_n32;
  import gelu_softmax_pkg::*;

  localparam int N = 32;  // the larger size the unit was evaluated at

  logic  clk = 1'b0;
  logic  rst_n, in_valid, out_valid, done;
  mode_e mode, out_mode;
  in_t   z [N];
  fx_t   y [N];
  int    checks, failures;

  always #5 clk = ~clk;

  gelu_softmax_top #(.N(N)) dut (.*);

  gelu_top_driver #(.N(N), .NVEC(500)) drv (.*);

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    wait (done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
