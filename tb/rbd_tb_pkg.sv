// rbd_tb_pkg: reference arithmetic and reference detectors for the
// testbenches. The arithmetic is an independent re-implementation of the
// number format documented in rbd_pkg (Q15.16 parts, products shifted right by
// FRAC, sums wrapping at 32 bits, division n*conj(d)/|d|^2 truncated toward
// zero, zero divisor -> 0), written on 64/128-bit integers rather than by
// reusing the design's functions. The reference MINRES and CR routines follow
// the algorithm statements operation by operation, so a correct design
// matches them bit for bit. A floating-point residual norm and a
// floating-point solver (the exact MMSE solution) serve accuracy checks.
package rbd_tb_pkg;

  import rbd_pkg::*;

  localparam int MAXM = 16;
  localparam int FB   = 16;  // fractional bits, kept apart from rbd_pkg

  typedef struct {
    longint re;
    longint im;
  } rc_t;

  typedef rc_t rvec_t [MAXM];
  typedef rc_t rmat_t [MAXM][MAXM];

  function automatic longint wrap32(longint v);
    return longint'(int'(v[31:0]));
  endfunction

  function automatic rc_t mk(longint re, longint im);
    rc_t r;
    r.re = wrap32(re);
    r.im = wrap32(im);
    return r;
  endfunction

  function automatic rc_t to_rc(cplx_t c);
    return mk(longint'(c.re), longint'(c.im));
  endfunction

  function automatic cplx_t to_cx(rc_t r);
    cplx_t c;
    c.re = 32'(r.re);
    c.im = 32'(r.im);
    return c;
  endfunction

  function automatic rc_t radd(rc_t a, rc_t b);
    return mk(a.re + b.re, a.im + b.im);
  endfunction

  function automatic rc_t rsub(rc_t a, rc_t b);
    return mk(a.re - b.re, a.im - b.im);
  endfunction

  function automatic rc_t rconj(rc_t a);
    return mk(a.re, -a.im);
  endfunction

  function automatic rc_t rmul(rc_t a, rc_t b);
    longint pr, pi;
    pr = (a.re * b.re - a.im * b.im) >>> FB;
    pi = (a.re * b.im + a.im * b.re) >>> FB;
    return mk(pr, pi);
  endfunction

  function automatic rc_t rdiv(rc_t n, rc_t d);
    logic signed [127:0] nr, ni, mag;
    nr  = 128'(n.re) * 128'(d.re) + 128'(n.im) * 128'(d.im);
    ni  = 128'(n.im) * 128'(d.re) - 128'(n.re) * 128'(d.im);
    mag = 128'(d.re) * 128'(d.re) + 128'(d.im) * 128'(d.im);
    if (mag == 0) return mk(0, 0);
    nr = (nr <<< FB) / mag;
    ni = (ni <<< FB) / mag;
    return mk(longint'(nr[63:0]), longint'(ni[63:0]));
  endfunction

  // inner product x^H y accumulated lane by lane, as the hardware sums
  function automatic rc_t rdot(int m, rvec_t x, rvec_t y);
    rc_t acc = mk(0, 0);
    for (int i = 0; i < m; i++) acc = radd(acc, rmul(rconj(x[i]), y[i]));
    return acc;
  endfunction

  // A*v accumulated column by column
  function automatic rvec_t rmatvec(int m, rmat_t a, rvec_t v);
    rvec_t y;
    for (int i = 0; i < MAXM; i++) y[i] = mk(0, 0);
    for (int j = 0; j < m; j++)
      for (int i = 0; i < m; i++) y[i] = radd(y[i], rmul(a[i][j], v[j]));
    return y;
  endfunction

  // Conjugate residual, s_0 = 0, iters updates of s.
  function automatic rvec_t ref_cr(int m, int iters, rmat_t a, rvec_t ye);
    rvec_t s, r, p, e, mm, r_old, m_old;
    rc_t alpha, beta;
    for (int i = 0; i < MAXM; i++) begin
      s[i] = mk(0, 0); r[i] = ye[i]; p[i] = ye[i];
    end
    mm = rmatvec(m, a, r);
    e  = mm;
    for (int k = 1; k <= iters; k++) begin
      alpha = rdiv(rdot(m, r, mm), rdot(m, e, e));
      r_old = r; m_old = mm;
      for (int i = 0; i < m; i++) begin
        s[i] = radd(s[i], rmul(alpha, p[i]));
        r[i] = rsub(r[i], rmul(alpha, e[i]));
      end
      if (k == iters) break;
      mm   = rmatvec(m, a, r);
      beta = rdiv(rdot(m, r, mm), rdot(m, r_old, m_old));
      for (int i = 0; i < m; i++) begin
        p[i] = radd(r[i], rmul(beta, p[i]));
        e[i] = radd(mm[i], rmul(beta, e[i]));
      end
    end
    return s;
  endfunction

  // Minimal residual, s_0 = 0, iters updates of s.
  function automatic rvec_t ref_minres(int m, int iters, rmat_t a, rvec_t ye);
    rvec_t s, r, mm;
    rc_t alpha;
    for (int i = 0; i < MAXM; i++) s[i] = mk(0, 0);
    for (int k = 0; k < iters; k++) begin
      for (int i = 0; i < MAXM; i++) r[i] = ye[i];
      for (int j = 0; j < m; j++)
        for (int i = 0; i < m; i++) r[i] = rsub(r[i], rmul(a[i][j], s[j]));
      mm    = rmatvec(m, a, r);
      alpha = rdiv(rdot(m, r, mm), rdot(m, mm, mm));
      for (int i = 0; i < m; i++) s[i] = radd(s[i], rmul(alpha, r[i]));
    end
    return s;
  endfunction

  // Squared residual norm ||ye - A s||^2 in floating point.
  function automatic real resid2(int m, rmat_t a, rvec_t ye, rvec_t s);
    real acc = 0.0;
    real sc  = real'(longint'(1) << FB);
    for (int i = 0; i < m; i++) begin
      real tr, ti;
      tr = real'(ye[i].re) / sc;
      ti = real'(ye[i].im) / sc;
      for (int j = 0; j < m; j++) begin
        real ar = real'(a[i][j].re) / sc, ai = real'(a[i][j].im) / sc;
        real sr = real'(s[j].re) / sc,    si = real'(s[j].im) / sc;
        tr -= ar * sr - ai * si;
        ti -= ar * si + ai * sr;
      end
      acc += tr * tr + ti * ti;
    end
    return acc;
  endfunction

  // Exact solution of A s = ye in floating point (Gaussian elimination with
  // partial pivoting on the m x m complex system), the MMSE estimate that
  // the iterative detectors approximate.
  function automatic void solve_exact(int m, rmat_t a, rvec_t ye,
                                      output real sr [MAXM], output real si [MAXM]);
    real ar [MAXM][MAXM+1], ai [MAXM][MAXM+1];
    real sc = real'(longint'(1) << FB);
    for (int i = 0; i < MAXM; i++) begin
      sr[i] = 0.0;
      si[i] = 0.0;
    end
    for (int i = 0; i < m; i++) begin
      for (int j = 0; j < m; j++) begin
        ar[i][j] = real'(a[i][j].re) / sc;
        ai[i][j] = real'(a[i][j].im) / sc;
      end
      ar[i][m] = real'(ye[i].re) / sc;
      ai[i][m] = real'(ye[i].im) / sc;
    end
    for (int c = 0; c < m; c++) begin
      int  piv;
      real best, dr, di, d2;
      piv  = c;
      best = -1.0;
      for (int i = c; i < m; i++)
        if (ar[i][c] * ar[i][c] + ai[i][c] * ai[i][c] > best) begin
          best = ar[i][c] * ar[i][c] + ai[i][c] * ai[i][c];
          piv  = i;
        end
      for (int j = 0; j <= m; j++) begin
        real tr, ti;
        tr = ar[c][j]; ti = ai[c][j];
        ar[c][j] = ar[piv][j]; ai[c][j] = ai[piv][j];
        ar[piv][j] = tr; ai[piv][j] = ti;
      end
      dr = ar[c][c]; di = ai[c][c]; d2 = dr * dr + di * di;
      for (int i = c + 1; i < m; i++) begin
        real fr, fi;
        fr = (ar[i][c] * dr + ai[i][c] * di) / d2;   // f = a[i][c] / a[c][c]
        fi = (ai[i][c] * dr - ar[i][c] * di) / d2;
        for (int j = c; j <= m; j++) begin
          ar[i][j] -= fr * ar[c][j] - fi * ai[c][j];
          ai[i][j] -= fr * ai[c][j] + fi * ar[c][j];
        end
      end
    end
    for (int i = m - 1; i >= 0; i--) begin
      real tr, ti, dr, di, d2;
      tr = ar[i][m]; ti = ai[i][m];
      for (int j = i + 1; j < m; j++) begin
        tr -= ar[i][j] * sr[j] - ai[i][j] * si[j];
        ti -= ar[i][j] * si[j] + ai[i][j] * sr[j];
      end
      dr = ar[i][i]; di = ai[i][i]; d2 = dr * dr + di * di;
      sr[i] = (tr * dr + ti * di) / d2;
      si[i] = (ti * dr - tr * di) / d2;
    end
  endfunction

  // Small random complex value, uniform in (-amp, amp) per part, Q16 LSBs.
  function automatic rc_t rnd(int amp);
    return mk(longint'($urandom_range(2 * amp, 0)) - amp,
              longint'($urandom_range(2 * amp, 0)) - amp);
  endfunction

endpackage
