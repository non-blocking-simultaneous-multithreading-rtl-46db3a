// nbsmt_ref_pkg -- integer reference model of NB-SMT arithmetic, used by
// the testbenches to predict the hardware's results.
//
// The model works on plain integers, not on bit fields: a reduced operand
// is the value the hardware effectively multiplies by, e.g. 178 -> 176.
//   qa(x): activation reduction. x if x < 16, else round(x / 16) * 16,
//          ties up, capped at 240.
//   qw(w): weight reduction. w if -8 <= w <= 7, else round(w / 16) * 16,
//          ties up, clamped to [-128, 112].
//   pe2/pe4: the product one PE adds to its psum for one beat.
package nbsmt_ref_pkg;

  function automatic int qa(int x);
    int q;
    if (x < 16) return x;
    q = (x + 8) / 16;
    if (q > 15) q = 15;
    return q * 16;
  endfunction

  function automatic int floordiv16(int v);
    if (v >= 0) return v / 16;
    return -((-v + 15) / 16);
  endfunction

  function automatic int qw(int w);
    int q;
    if (w >= -8 && w <= 7) return w;
    q = floordiv16(w + 8);
    if (q > 7)  q = 7;
    if (q < -8) q = -8;
    return q * 16;
  endfunction

  // Two threads; rw selects weight reduction on a collision.
  function automatic int pe2(int x0, int w0, int x1, int w1, bit rw);
    bit a0 = (x0 != 0) && (w0 != 0);
    bit a1 = (x1 != 0) && (w1 != 0);
    if (a0 && a1) begin
      if (rw) return x0 * qw(w0) + x1 * qw(w1);
      return qa(x0) * w0 + qa(x1) * w1;
    end
    return x0 * w0 + x1 * w1;   // at most one term is nonzero
  endfunction

  function automatic int pe4(int x[4], int w[4], bit rw);
    int n = 0, s = 0;
    int idx[4];
    for (int i = 0; i < 4; i++)
      if (x[i] != 0 && w[i] != 0) begin idx[n] = i; n++; end
    if (n <= 1) begin
      for (int i = 0; i < 4; i++) s += x[i] * w[i];
      return s;
    end
    if (n == 2) return pe2(x[idx[0]], w[idx[0]], x[idx[1]], w[idx[1]], rw);
    for (int k = 0; k < n; k++) s += qa(x[idx[k]]) * qw(w[idx[k]]);
    return s;
  endfunction

  // Number of threads that need the multiplier.
  function automatic int n_active(int x[], int w[]);
    int n = 0;
    foreach (x[i]) if (x[i] != 0 && w[i] != 0) n++;
    return n;
  endfunction

endpackage
