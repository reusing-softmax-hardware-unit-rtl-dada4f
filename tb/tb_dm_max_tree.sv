// Self-checking testbench for dm_max_tree: random vectors in both modes,
// compared with a linear search for the global maximum and pair maxima.
module tb_dm_max_tree;
  import gelu_softmax_pkg::*;

  localparam int N = 8;  // the module default

  logic  clk = 1'b0;
  mode_e mode;
  fx_t   x [N];
  fx_t   max_sel [N];
  fx_t   pair_max [N/2];
  fx_t   gmax;
  int    checks = 0, failures = 0;

  always #5 clk = ~clk;

  dm_max_tree dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fx_t g, pm;
    for (int t = 0; t < 2000; t++) begin
      mode = (t % 2 == 0) ? MODE_NORMAL : MODE_GELU;
      for (int i = 0; i < N; i++) x[i] = fx_t'($urandom) >>> ($urandom_range(20, 0));
      if (t % 7 == 0) x[$urandom_range(N-1, 0)] = fx_t'(32'h8000_0000);
      @(posedge clk);
      g = x[0];
      for (int i = 1; i < N; i++) if (x[i] > g) g = x[i];
      checks++;
      if (gmax !== g) begin failures++; $display("gmax %0d exp %0d", gmax, g); end
      for (int i = 0; i < N; i++) begin
        pm = (x[i - i%2] > x[i - i%2 + 1]) ? x[i - i%2] : x[i - i%2 + 1];
        checks++;
        if (max_sel[i] !== ((mode == MODE_NORMAL) ? g : pm)) begin
          failures++;
          $display("t=%0d lane %0d max_sel %0d", t, i, max_sel[i]);
        end
        if (i % 2 == 0) begin
          checks++;
          if (pair_max[i/2] !== pm) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
