// tb_workload_reorder -- effect of statistical channel reordering on the
// default NB-SMT core (16 x 16, 2 threads).
//
// Thread t of a 2-thread core carries K-slice t, so input channel k of
// thread 0 always shares the multiplier with channel k + K/2 of thread 1.
// Which channels meet is therefore fixed by the order in which the feeder
// sends them. The reordering is done offline and by software; the core is
// unchanged. This testbench plays both parts:
//   * Channels come in three kinds: "wide" (rarely zero, mostly 8-bit
//     values), "sparse" (zero 90% of the time) and "narrow" (4-bit values,
//     zero 30% of the time). Each channel is, at random, wide with
//     probability 1/4, sparse with 1/4 and narrow with 1/2.
//   * Per-channel statistics (probability of an 8-bit value and of a zero)
//     are measured on a separate calibration sample of 256 activation rows.
//   * The channels are sorted by P(8-bit) - P(zero), and channel i of the
//     sorted list is paired with channel K-1-i. Thread 0 then gets the wide
//     channels, paired with the sparse ones of thread 1, and narrow channels
//     meet narrow ones. The weight rows are permuted the same way.
//   * The same tile (K = 256) runs once in natural order and once reordered.
// Checks: every output equals the reference model in both orders, both take
// K/2 = 128 input cycles, and reordering at least halves the lossy beats
// (collisions whose precision reduction changed an operand, counted from
// the core's stat_o) and lowers the RMS error against exact products.
module tb_workload_reorder;
  import nbsmt_pkg::*;
  import nbsmt_ref_pkg::*;
  localparam int N = 16, K = 256, L = K / 2, CAL = 256;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  act_t [N-1:0][1:0] x;  wgt_t [N-1:0][1:0] w;  beat_t bt;
  acc_t [N-1:0][N-1:0] psum;  ctrl_stat_t [N-1:0][N-1:0] st;

  sysmt_core dut (.clk, .rst_n, .reduce_w_i(1'b0), .x_i(x), .w_i(w), .beat_i(bt), .psum_o(psum), .stat_o(st));

  int kind[K];         // 0 wide, 1 sparse, 2 narrow
  int X[N][K], W[N][K];
  int perm[K];         // perm[j]: channel sent in position j
  int lossy_beats[2];
  real rms[2];

  function automatic int gen_act(int kd);
    case (kd)
      0:       return ($urandom_range(0, 9) == 0) ? 0 : int'($urandom_range(16, 255));
      1:       return ($urandom_range(0, 9) != 0) ? 0 : int'($urandom_range(1, 15));
      default: return ($urandom_range(0, 9) < 3)  ? 0 : int'($urandom_range(1, 15));
    endcase
  endfunction
  function automatic int gen_wgt();
    return int'($urandom_range(0, 80)) + int'($urandom_range(0, 80)) + int'($urandom_range(0, 80)) - 120;
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // Builds perm from a calibration sample: sort by P(8-bit) - P(zero),
  // then thread 0 position j gets sorted[j], thread 1 gets sorted[K-1-j].
  task automatic calibrate();
    int score[K], sorted[K], a, tmp;
    for (int k = 0; k < K; k++) begin
      score[k] = 0;
      for (int s = 0; s < CAL; s++) begin
        a = gen_act(kind[k]);
        if (a > 15) score[k]++;
        if (a == 0) score[k]--;
      end
      sorted[k] = k;
    end
    for (int i = 0; i < K; i++)          // selection sort, descending score
      for (int j = i + 1; j < K; j++)
        if (score[sorted[j]] > score[sorted[i]]) begin
          tmp = sorted[i]; sorted[i] = sorted[j]; sorted[j] = tmp;
        end
    for (int j = 0; j < L; j++) begin
      perm[j]     = sorted[j];
      perm[L + j] = sorted[K - 1 - j];
    end
  endtask

  // Runs the tile with channel order ord (0 natural, 1 reordered).
  task automatic run(int ord);
    int n0 = 0, e, ex, ch0, ch1, lossy = 0;
    longint err2 = 0, ref2 = 0;
    @(posedge clk);
    #1;
    for (int k = 0; k < L; k++) begin
      ch0 = (ord != 0) ? perm[k] : k;
      ch1 = (ord != 0) ? perm[L + k] : L + k;
      for (int i = 0; i < N; i++) begin
        x[i][0] = 8'(X[i][ch0]); x[i][1] = 8'(X[i][ch1]);
        w[i][0] = 8'(W[i][ch0]); w[i][1] = 8'(W[i][ch1]);
      end
      bt.valid = 1; bt.first = (k == 0);
      @(posedge clk);
      n0++;
      #1;
      for (int r = 0; r < N; r++)
        for (int c = 0; c < N; c++)
          if (k >= r + c && st[r][c].lossy) lossy++;
    end
    x = '0; w = '0; bt = '0;
    // stat_o of the beats still in flight when the inputs stop: after drain
    // edge d, PE (r, c) shows a beat of this tile while r + c > d.
    for (int d = 0; d < 2 * N - 2; d++) begin
      @(posedge clk);
      #1;
      for (int r = 0; r < N; r++)
        for (int c = 0; c < N; c++)
          if (r + c > d && st[r][c].lossy) lossy++;
    end
    @(posedge clk);
    #1;
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++) begin
        e = 0; ex = 0;
        for (int k = 0; k < L; k++) begin
          ch0 = (ord != 0) ? perm[k] : k;
          ch1 = (ord != 0) ? perm[L + k] : L + k;
          e += pe2(X[r][ch0], W[c][ch0], X[r][ch1], W[c][ch1], 1'b0);
        end
        for (int k = 0; k < K; k++) ex += X[r][k] * W[c][k];
        err2 += (longint'(e) - longint'(ex)) ** 2;
        ref2 += longint'(ex) ** 2;
        check(int'(psum[r][c]) == e, $sformatf("order %0d output (%0d,%0d): %0d exp %0d", ord, r, c, psum[r][c], e));
      end
    check(n0 == L, $sformatf("order %0d input cycles %0d, expected %0d", ord, n0, L));
    lossy_beats[ord] = lossy;
    rms[ord] = $sqrt(real'(err2) / real'(ref2));
    $display("%s order: %0d input cycles, %0d lossy beats of %0d, relative RMS error %0.4f",
             (ord != 0) ? "reordered" : "natural", n0, lossy, N * N * L, rms[ord]);
  endtask

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    x = '0; w = '0; bt = '0;
    for (int k = 0; k < K; k++) begin
      kind[k] = int'($urandom_range(0, 3));
      if (kind[k] == 3) kind[k] = 2;
    end
    for (int i = 0; i < N; i++)
      for (int k = 0; k < K; k++) begin
        X[i][k] = gen_act(kind[k]);
        W[i][k] = gen_wgt();
      end
    calibrate();
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    run(0);
    run(1);
    check(lossy_beats[0] > 0, "natural order has lossy collisions");
    check(2 * lossy_beats[1] <= lossy_beats[0], "reordering at least halves the lossy beats");
    check(rms[1] < rms[0], "reordering lowers the error");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
