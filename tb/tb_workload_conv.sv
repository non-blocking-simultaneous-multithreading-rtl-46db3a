// tb_workload_conv -- one output tile of a ResNet-18 3x3 convolution layer
// (64 input channels, so K = 64*3*3 = 576 terms per output) on the NB-SMT
// core, with synthetic data shaped like a quantised CNN layer: ReLU
// activations that are zero with probability 0.5 and otherwise mostly small
// (4-bit) values, and bell-shaped signed weights.
//
//   core A: the default core (16 x 16, 2 threads)
//   core B: a 16 x 16 4-thread core, weights 40% pruned to zero
//   core A again, with weights reduced on collisions (reduce_w_i = 1), on a
//   ResNet-50 1x1 bottleneck tile (256 input channels, K = 256)
//
// Checks, for every run:
//   * every output equals the reference model of the PE arithmetic;
//   * the outputs differ from those of the other collision policy;
//   * the tile takes K/THREADS input cycles (288, 144, 128 instead of K) and
//     completes in PE (15, 15) exactly 30 + K/THREADS edges after it starts;
//   * the measured PE utilisation gain of a T-thread core over one thread
//     matches the analytical (1 - (1-r)^T) / r within 5%, r being the
//     measured probability that a thread needs the multiplier (for two
//     threads this is 1 + s, s = 1 - r the sparsity).
// It also reports the relative RMS error against exact products.
module tb_workload_conv;
  import nbsmt_pkg::*;
  import nbsmt_ref_pkg::*;
  localparam int N = 16, K = 576;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  act_t [N-1:0][1:0] xa;  wgt_t [N-1:0][1:0] wa;  beat_t ba;
  acc_t [N-1:0][N-1:0] pa;  ctrl_stat_t [N-1:0][N-1:0] sa;
  act_t [N-1:0][3:0] xb;  wgt_t [N-1:0][3:0] wb;  beat_t bb;
  acc_t [N-1:0][N-1:0] pb;  ctrl_stat_t [N-1:0][N-1:0] sb;

  logic rw_a = 1'b0;
  sysmt_core dut_a (.clk, .rst_n, .reduce_w_i(rw_a), .x_i(xa), .w_i(wa), .beat_i(ba), .psum_o(pa), .stat_o(sa));
  sysmt_core #(.THREADS(4)) dut_b (
    .clk, .rst_n, .reduce_w_i(1'b0), .x_i(xb), .w_i(wb), .beat_i(bb), .psum_o(pb), .stat_o(sb));

  int X[N][K], W[N][K];

  function automatic int gen_act();
    if ($urandom_range(0, 1) == 0) return 0;
    if ($urandom_range(0, 9) < 7) return int'($urandom_range(1, 15));
    return int'($urandom_range(16, 255));
  endfunction
  function automatic int gen_wgt();
    // Sum of three uniforms: a bell-shaped value in [-120, 120].
    return int'($urandom_range(0, 80)) + int'($urandom_range(0, 80)) + int'($urandom_range(0, 80)) - 120;
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // Runs one tile on the core selected by T and checks it.
  task automatic run(int T, int KK, bit rw);
    int L = KK / T, n_policy = 0, e_other, n0, e, e_part, ex, xs[4], ws[4], util_pe = 0, beats = 0, act_thr = 0, thr = 0;
    longint err2 = 0, ref2 = 0;
    real r, gain, model;
    @(posedge clk);
    #1;
    n0 = 0;
    for (int k = 0; k < L; k++) begin
      for (int i = 0; i < N; i++)
        for (int t = 0; t < T; t++) begin
          if (T == 2) begin xa[i][t] = 8'(X[i][t*L+k]); wa[i][t] = 8'(W[i][t*L+k]); end
          else        begin xb[i][t] = 8'(X[i][t*L+k]); wb[i][t] = 8'(W[i][t*L+k]); end
        end
      if (T == 2) begin ba.valid = 1; ba.first = (k == 0); end
      else        begin bb.valid = 1; bb.first = (k == 0); end
      @(posedge clk);
      n0++;
      #1;
      for (int r2 = 0; r2 < N; r2++)
        for (int c = 0; c < N; c++) begin
          ctrl_stat_t s = (T == 2) ? sa[r2][c] : sb[r2][c];
          // stat_o describes the beat PE (r2, c) multiplied last cycle; count valid ones.
          if (k >= r2 + c) begin
            beats++;
            if (s.n_active != 0) util_pe++;
          end
        end
    end
    xa = '0; wa = '0; ba = '0; xb = '0; wb = '0; bb = '0;
    // The last step reaches PE (N-1, N-1) after 2N-2 more edges, plus 2 stages.
    repeat (2 * N - 2) @(posedge clk);
    #1;
    for (int r2 = 0; r2 < N; r2++)
      for (int c = 0; c < N; c++) begin
        e = 0; ex = 0;
        for (int k = 0; k < L; k++) begin
          for (int t = 0; t < 4; t++) begin
            xs[t] = (t < T) ? X[r2][t*L+k] : 0;
            ws[t] = (t < T) ? W[c][t*L+k] : 0;
            if (t < T) begin thr++; if (xs[t] != 0 && ws[t] != 0) act_thr++; end
          end
          e  += (T == 2) ? pe2(xs[0], ws[0], xs[1], ws[1], rw) : pe4(xs, ws, rw);
        end
        for (int k = 0; k < KK; k++) ex += X[r2][k] * W[c][k];
        err2 += (longint'(e) - longint'(ex)) ** 2;
        ref2 += longint'(ex) ** 2;
        if (r2 == N - 1 && c == N - 1) begin
          // One edge before completion the last PE still lacks its last step.
          e_part = e - ((T == 2) ? pe2(xs[0], ws[0], xs[1], ws[1], rw) : pe4(xs, ws, rw));
          check(int'((T == 2) ? pa[r2][c] : pb[r2][c]) == e_part, $sformatf("%0dT completion timing", T));
        end
      end
    @(posedge clk);
    #1;
    for (int r2 = 0; r2 < N; r2++)
      for (int c = 0; c < N; c++) begin
        e = 0; e_other = 0;
        for (int k = 0; k < L; k++) begin
          for (int t = 0; t < 4; t++) begin
            xs[t] = (t < T) ? X[r2][t*L+k] : 0;
            ws[t] = (t < T) ? W[c][t*L+k] : 0;
          end
          e += (T == 2) ? pe2(xs[0], ws[0], xs[1], ws[1], rw) : pe4(xs, ws, rw);
          e_other += (T == 2) ? pe2(xs[0], ws[0], xs[1], ws[1], !rw) : pe4(xs, ws, !rw);
        end
        if (e != e_other) n_policy++;
        check(int'((T == 2) ? pa[r2][c] : pb[r2][c]) == e,
              $sformatf("%0dT output (%0d,%0d): %0d exp %0d", T, r2, c, (T == 2) ? pa[r2][c] : pb[r2][c], e));
      end
    // The other collision policy must give different results on this data.
    check(n_policy > 0, $sformatf("%0dT collision policy has no effect", T));
    check(n0 == KK / T, $sformatf("%0dT input cycles %0d, expected %0d", T, n0, KK / T));
    r     = real'(act_thr) / real'(thr);
    gain  = (real'(util_pe) / real'(beats)) / r;
    model = (1.0 - (1.0 - r) ** T) / r;
    $display("%0dT: %0d input cycles for K=%0d, thread activity r=%0.3f, PE utilisation %0.3f, gain over 1 thread %0.3f (model %0.3f), relative RMS error %0.4f",
             T, n0, KK, r, real'(util_pe) / real'(beats), gain, model, $sqrt(real'(err2) / real'(ref2)));
    check(gain > 0.95 * model && gain < 1.05 * model, "utilisation gain matches the analytical model");
  endtask

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    xa = '0; wa = '0; ba = '0; xb = '0; wb = '0; bb = '0;
    for (int i = 0; i < N; i++)
      for (int k = 0; k < K; k++) begin
        X[i][k] = gen_act();
        W[i][k] = gen_wgt();
      end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    run(2, K, 1'b0);
    // 40% unstructured pruning for the 4-thread run.
    for (int i = 0; i < N; i++)
      for (int k = 0; k < K; k++)
        if ($urandom_range(0, 9) < 4) W[i][k] = 0;
    run(4, K, 1'b0);
    // ResNet-50 1x1 tile with weight reduction on the 2-thread core; fresh data.
    for (int i = 0; i < N; i++)
      for (int k = 0; k < 256; k++) begin
        X[i][k] = gen_act();
        W[i][k] = gen_wgt();
      end
    rw_a = 1'b1;
    run(2, 256, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
