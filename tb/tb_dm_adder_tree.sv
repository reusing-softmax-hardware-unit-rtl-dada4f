// Self-checking testbench for dm_adder_tree: random non-negative inputs up to
// 1.0 (Q16.16), pair sums and the total compared with plain sums.
module tb_dm_adder_tree;
  import gelu_softmax_pkg::*;

  localparam int N = 8;  // the module default

  logic clk = 1'b0;
  fx_t  e [N];
  fx_t  pair_sum [N/2];
  fx_t  total_sum;
  int   checks = 0, failures = 0;

  always #5 clk = ~clk;

  dm_adder_tree dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint tot;
    for (int t = 0; t < 2000; t++) begin
      for (int i = 0; i < N; i++) e[i] = fx_t'($urandom_range(65536, 0));
      @(posedge clk);
      tot = 0;
      for (int i = 0; i < N; i++) tot += longint'(e[i]);
      checks++;
      if (longint'(total_sum) != tot) begin failures++; $display("total %0d exp %0d", total_sum, tot); end
      for (int p = 0; p < N/2; p++) begin
        checks++;
        if (longint'(pair_sum[p]) != longint'(e[2*p]) + longint'(e[2*p+1])) begin
          failures++;
          $display("pair %0d sum %0d", p, pair_sum[p]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
