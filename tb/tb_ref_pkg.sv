// tb_ref_pkg: double-precision reference of one pass of the PE core and of
// the scheduler's next-step rule, written from the algorithm (shifted QR on
// a Hessenberg matrix with Givens rotations), plus polynomial helpers.
package tb_ref_pkg;
  import hqr_pkg::*;
  import tb_util_pkg::*;

  typedef rc_t rmat_t [N][N];
  typedef rc_t rvec_t [N];

  typedef struct {
    int    m, row, iter, mode;   // mode 0 = left, 1 = right
    rc_t   shift;
    rvec_t gc, gs;
    rmat_t a;
  } rtask_t;

  function automatic rtask_t from_task(task_t t);
    rtask_t r;
    r.m = int'(t.m); r.row = int'(t.row); r.iter = int'(t.iter); r.mode = int'(t.mode);
    r.shift = c2r(t.shift);
    for (int k = 0; k < N; k++) begin
      r.gc[k] = (k < N - 1) ? c2r(t.gc[k]) : rc(0, 0);
      r.gs[k] = (k < N - 1) ? c2r(t.gs[k]) : rc(0, 0);
    end
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) r.a[i][j] = c2r(t.a[i][j]);
    return r;
  endfunction

  // one pass: shift-subtract, rotation, shift-add as the state asks
  function automatic rtask_t ref_pass(rtask_t t);
    int r, m;
    r = t.row; m = t.m;
    if (t.mode == 0 && r == 1) begin
      t.shift = t.a[m-1][m-1];
      for (int k = 0; k < m; k++) t.a[k][k] = rsub(t.a[k][k], t.shift);
    end
    if (t.mode == 0) begin
      rc_t a, b;
      real nrm;
      a = t.a[r-1][r-1]; b = t.a[r][r-1];
      nrm = $sqrt(rabs(a) * rabs(a) + rabs(b) * rabs(b));
      if (nrm == 0.0) begin t.gc[r-1] = rc(1, 0); t.gs[r-1] = rc(0, 0); end
      else begin t.gc[r-1] = rc(a.re / nrm, -a.im / nrm); t.gs[r-1] = rc(b.re / nrm, -b.im / nrm); end
      for (int j = 0; j < m; j++) begin
        rc_t x, y;
        x = t.a[r-1][j]; y = t.a[r][j];
        t.a[r-1][j] = radd(rmul(t.gc[r-1], x), rmul(t.gs[r-1], y));
        t.a[r][j]   = radd(rmul(rneg(rconj(t.gs[r-1])), x), rmul(rconj(t.gc[r-1]), y));
      end
    end else begin
      for (int j = 0; j < m; j++) begin
        rc_t x, y;
        x = t.a[j][r-1]; y = t.a[j][r];
        t.a[j][r-1] = radd(rmul(rconj(t.gc[r-1]), x), rmul(rconj(t.gs[r-1]), y));
        t.a[j][r]   = radd(rmul(rneg(t.gs[r-1]), x), rmul(t.gc[r-1], y));
      end
      if (r == m - 1) for (int k = 0; k < m; k++) t.a[k][k] = radd(t.a[k][k], t.shift);
    end
    return t;
  endfunction

  // coefficients c[0..d-1] of prod (z - root_k), monic, degree d
  function automatic rvec_t poly_from_roots(rvec_t roots, int d);
    rc_t p [N+1];
    rvec_t c;
    for (int k = 0; k <= N; k++) p[k] = rc(0, 0);
    p[0] = rc(1, 0);
    for (int k = 0; k < d; k++) begin
      for (int j = k + 1; j >= 1; j--) p[j] = rsub(p[j-1], rmul(roots[k], p[j]));
      p[0] = rneg(rmul(roots[k], p[0]));
    end
    // p[j] is the coefficient of z^j
    for (int k = 0; k < N; k++) c[k] = (k < d) ? p[k] : rc(0, 0);
    return c;
  endfunction

  // largest distance from a computed root to the nearest true root, and
  // back (both directions, so every true root must be found)
  function automatic real root_match_err(rvec_t got, rvec_t want, int d);
    real worst;
    worst = 0.0;
    for (int i = 0; i < d; i++) begin
      real best1, best2;
      best1 = 1.0e30; best2 = 1.0e30;
      for (int j = 0; j < d; j++) begin
        if (rabs(rsub(got[i], want[j])) < best1) best1 = rabs(rsub(got[i], want[j]));
        if (rabs(rsub(want[i], got[j])) < best2) best2 = rabs(rsub(want[i], got[j]));
      end
      if (best1 > worst) worst = best1;
      if (best2 > worst) worst = best2;
    end
    return worst;
  endfunction

  // random well-separated roots inside the disc of radius 0.9
  function automatic rvec_t random_roots(int d);
    rvec_t r;
    for (int k = 0; k < N; k++) begin
      bit ok;
      do begin
        ok = 1'b1;
        r[k] = crand(0.9);
        if (rabs(r[k]) > 0.9) ok = 1'b0;
        for (int j = 0; j < k; j++) if (rabs(rsub(r[k], r[j])) < 0.15) ok = 1'b0;
      end while (!ok);
    end
    return r;
  endfunction

  // the whole algorithm in double precision: companion matrix of the monic
  // polynomial with the given roots, T iterations per order, diagonal out
  function automatic rvec_t ref_solve(rvec_t roots, int d, int T);
    rvec_t  c, got;
    rtask_t t;
    c = poly_from_roots(roots, d);
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) t.a[i][j] = rc(0, 0);
    for (int j = 0; j < d; j++) t.a[0][j] = rneg(c[d-1-j]);
    for (int i = 1; i < d; i++) t.a[i][i-1] = rc(1, 0);
    for (int m = d; m >= 2; m--)
      for (int it = 0; it < T; it++)
        for (int md = 0; md < 2; md++)
          for (int row = 1; row < m; row++) begin
            t.m = m; t.row = row; t.mode = md;
            t = ref_pass(t);
          end
    for (int k = 0; k < N; k++) got[k] = t.a[k][k];
    return got;
  endfunction

  // T fixed iterations per order do not always converge (about 1 in 70
  // random degree-6 cases even in double precision); test polynomials are
  // drawn among those for which the algorithm itself converges
  function automatic bit converges(rvec_t roots, int d, int T);
    return root_match_err(ref_solve(roots, d, T), roots, d) < 1e-5;
  endfunction

endpackage
