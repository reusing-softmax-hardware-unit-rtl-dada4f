// Stimulus and scoreboard for gelu_softmax_top, shared by the end-to-end
// testbenches (which instantiate the unit themselves, at whatever size).
//
// It streams NVEC vectors with a random mode per vector and random idle
// cycles, remembers each accepted vector with its cycle number, and checks
// every result against real-valued references:
//   normal mode: y[i] = softmax over the N inputs            (|err| <= 0.006)
//   GELU mode:   y[2p] = 0.5 z (1 + tanh(k(z)))              (|err| <= 0.003|z| + 0.003)
//                y[2p+1] = 1 - sigmoid(2k), the second pair output (|err| <= 0.006)
// It also checks that every result leaves exactly LATENCY cycles after its
// vector and that no result is missing or extra. Each mechanism of the unit
// is counted (normal vectors, GELU vectors, mode switches between
// back-to-back vectors, idle cycles, saturated GELU with |z| >= 4, negative-z
// GELU); one that never happened counts as a failure. done goes high when the
// run is over; checks and failures hold the totals.
module gelu_top_driver
  import gelu_softmax_pkg::*;
  import tb_ref_pkg::*;
#(
  parameter int N       = 8,
  parameter int NVEC    = 500,
  parameter int LATENCY = 2
) (
  input  logic  clk,
  output logic  rst_n,
  output logic  in_valid,
  output mode_e mode,
  output in_t   z [N],
  input  logic  out_valid,
  input  mode_e out_mode,
  input  fx_t   y [N],
  output logic  done,
  output int    checks,
  output int    failures
);

  typedef struct {
    mode_e mode;
    in_t   z [N];
    longint cycle;
  } item_t;

  item_t  pending [$];
  longint cyc = 0;
  int     n_normal = 0, n_gelu = 0, n_switch = 0, n_idle = 0, n_sat = 0, n_neg = 0;
  int     received = 0;
  real    worst_sm = 0.0, worst_gelu = 0.0;

  always @(posedge clk) cyc <= cyc + 1;

  // ---------------- scoreboard
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      item_t it;
      received++;
      checks++;
      if (pending.size() == 0) begin
        failures++;
        $display("unexpected output at cycle %0d", cyc);
      end else begin
        it = pending.pop_front();
        checks++;
        if (cyc - it.cycle != longint'(LATENCY)) begin
          failures++;
          $display("latency %0d, expected %0d", cyc - it.cycle, LATENCY);
        end
        checks++;
        if (out_mode != it.mode) failures++;
        check_result(it);
      end
    end
  end

  task automatic check_result(input item_t it);
    real m, s, r, err, zr;
    if (it.mode == MODE_NORMAL) begin
      m = in2r(it.z[0]);
      for (int i = 1; i < N; i++) if (in2r(it.z[i]) > m) m = in2r(it.z[i]);
      s = 0.0;
      for (int i = 0; i < N; i++) s += $exp(in2r(it.z[i]) - m);
      for (int i = 0; i < N; i++) begin
        r   = $exp(in2r(it.z[i]) - m) / s;
        err = absr(fx2r(y[i]) - r);
        if (err > worst_sm) worst_sm = err;
        checks++;
        if (err > 0.006) begin
          failures++;
          $display("softmax lane %0d: %f expected %f", i, fx2r(y[i]), r);
        end
      end
    end else begin
      for (int p = 0; p < N/2; p++) begin
        zr  = in2r(it.z[2*p]);
        r   = gelu_tanh(zr);
        err = absr(fx2r(y[2*p]) - r);
        if (err > worst_gelu) worst_gelu = err;
        checks++;
        if (err > 0.003 * absr(zr) + 0.003) begin
          failures++;
          $display("GELU(%f) = %f expected %f", zr, fx2r(y[2*p]), r);
        end
        r   = 1.0 / (1.0 + $exp(2.0 * gelu_k(zr)));
        err = absr(fx2r(y[2*p+1]) - r);
        checks++;
        if (err > 0.006) begin
          failures++;
          $display("pair %0d second output %f expected %f", p, fx2r(y[2*p+1]), r);
        end
      end
    end
  endtask

  // ---------------- stimulus
  initial begin
    mode_e last_mode;
    bit    last_valid;
    int    lim;
    checks = 0; failures = 0; done = 1'b0;
    rst_n = 1'b0; in_valid = 1'b0; mode = MODE_NORMAL;
    for (int i = 0; i < N; i++) z[i] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    last_valid = 1'b0;
    last_mode  = MODE_NORMAL;
    for (int v = 0; v < NVEC; ) begin
      if ($urandom_range(3, 0) == 0) begin
        in_valid <= 1'b0;
        n_idle++;
        last_valid = 1'b0;
      end else begin
        item_t it;
        it.mode = ($urandom_range(1, 0) == 1) ? MODE_NORMAL : MODE_GELU;
        lim = (v % 4 == 0) ? 2 : (v % 4 == 1) ? 6 : 16;
        for (int i = 0; i < N; i++) it.z[i] = rand_in(lim);
        it.cycle = cyc;
        if (it.mode == MODE_NORMAL) n_normal++;
        else begin
          n_gelu++;
          for (int p = 0; p < N/2; p++) begin
            if (absr(in2r(it.z[2*p])) >= 4.0) n_sat++;
            if (it.z[2*p] < 0) n_neg++;
          end
        end
        if (last_valid && last_mode != it.mode) n_switch++;
        pending.push_back(it);
        in_valid <= 1'b1;
        mode     <= it.mode;
        z        <= it.z;
        last_valid = 1'b1;
        last_mode  = it.mode;
        v++;
      end
      @(posedge clk);
      #1 ;
    end
    in_valid <= 1'b0;
    repeat (LATENCY + 3) @(posedge clk);
    checks++;
    if (received != NVEC || pending.size() != 0) begin
      failures++;
      $display("received %0d of %0d results", received, NVEC);
    end
    $display("mechanisms: normal=%0d gelu=%0d mode_switch=%0d idle=%0d gelu_saturated=%0d gelu_negative=%0d",
             n_normal, n_gelu, n_switch, n_idle, n_sat, n_neg);
    $display("worst error: softmax %f, GELU %f", worst_sm, worst_gelu);
    checks += 6;
    if (n_normal == 0) failures++;
    if (n_gelu   == 0) failures++;
    if (n_switch == 0) failures++;
    if (n_idle   == 0) failures++;
    if (n_sat    == 0) failures++;
    if (n_neg    == 0) failures++;
    done = 1'b1;
  end

endmodule
