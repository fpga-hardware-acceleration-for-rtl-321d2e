// oltae_ref_pkg: reference models for the OLTAE testbenches.
//
// Two independent models of the core's computation:
//  * a bit-exact model of the fixed-point arithmetic (Q15.16 products by
//    full-width multiply and arithmetic shift right 16, wrapping 32-bit
//    sums, Cramer's-rule inverse with truncating, saturating division), used
//    to check the RTL word for word; and
//  * a real-valued generator of synthetic point-cloud measurements from a
//    known rotation (Gibbs vector) and translation, used to check that the
//    core recovers the true attitude to within fixed-point accuracy.
package oltae_ref_pkg;

  localparam int MAXN = 64;

  typedef int    ivec_t [3];
  typedef int    imat_t [3][3];
  typedef real   rvec_t [3];
  typedef real   rmat_t [3][3];

  function automatic int rmul(int a, int b);
    longint p;
    p = longint'(a) * longint'(b);
    return int'(p >>> 16);
  endfunction

  function automatic int rdiv(int num, int den);
    longint n, q;
    longint maxmag;
    maxmag = 64'sd2147483647;
    n = longint'(num) <<< 16;
    if (den == 0) return (num < 0) ? -int'(maxmag) : int'(maxmag);
    q = n / longint'(den);
    if (q > maxmag)  return int'(maxmag);
    if (q < -maxmag) return -int'(maxmag);
    return int'(q);
  endfunction

  function automatic int to_fx(real x);
    return int'(x * 65536.0);
  endfunction

  function automatic real from_fx(int x);
    return real'(x) / 65536.0;
  endfunction

  // Per-measurement matrix s^T s I - s s^T, bit-exact.
  function automatic imat_t ref_term_m(ivec_t s);
    imat_t m;
    int ip;
    ip = rmul(s[0], s[0]) + rmul(s[1], s[1]) + rmul(s[2], s[2]);
    for (int r = 0; r < 3; r++)
      for (int c = 0; c < 3; c++)
        m[r][c] = ((r == c) ? ip : 0) + (-rmul(s[r], s[c]));
    return m;
  endfunction

  function automatic ivec_t ref_cross(ivec_t s, ivec_t y);
    ivec_t o;
    o[0] = rmul(s[1], y[2]) - rmul(s[2], y[1]);
    o[1] = rmul(s[2], y[0]) - rmul(s[0], y[2]);
    o[2] = rmul(s[0], y[1]) - rmul(s[1], y[0]);
    return o;
  endfunction

  // Cramer's rule inverse, bit-exact. det is returned too.
  function automatic imat_t ref_inverse(imat_t m, output int det);
    imat_t cof, inv;
    for (int r = 0; r < 3; r++)
      for (int c = 0; c < 3; c++)
        cof[r][c] = rmul(m[(r+1)%3][(c+1)%3], m[(r+2)%3][(c+2)%3])
                  - rmul(m[(r+1)%3][(c+2)%3], m[(r+2)%3][(c+1)%3]);
    det = rmul(m[0][0], cof[0][0]) + rmul(m[0][1], cof[0][1]) + rmul(m[0][2], cof[0][2]);
    for (int r = 0; r < 3; r++)
      for (int c = 0; c < 3; c++)
        inv[r][c] = rdiv(cof[c][r], det);
    return inv;
  endfunction

  function automatic ivec_t ref_matvec(imat_t m, ivec_t x);
    ivec_t y;
    for (int i = 0; i < 3; i++)
      y[i] = rmul(m[i][0], x[0]) + rmul(m[i][1], x[1]) + rmul(m[i][2], x[2]);
    return y;
  endfunction

  // Whole core: q' from n measurement pairs.
  function automatic ivec_t ref_oltae(int n, int s[MAXN][3], int y[MAXN][3]);
    imat_t macc, t, inv;
    ivec_t vacc, sv, yv, cp;
    int det;
    for (int r = 0; r < 3; r++) begin
      vacc[r] = 0;
      for (int c = 0; c < 3; c++) macc[r][c] = 0;
    end
    for (int j = 0; j < n; j++) begin
      for (int i = 0; i < 3; i++) begin sv[i] = s[j][i]; yv[i] = y[j][i]; end
      t  = ref_term_m(sv);
      cp = ref_cross(sv, yv);
      for (int r = 0; r < 3; r++) begin
        vacc[r] = vacc[r] - cp[r];
        for (int c = 0; c < 3; c++) macc[r][c] = macc[r][c] + t[r][c];
      end
    end
    inv = ref_inverse(macc, det);
    return ref_matvec(inv, vacc);
  endfunction

  // Uniform real in [lo, hi).
  function automatic real urand(real lo, real hi);
    return lo + (hi - lo) * (real'($urandom % 1000000) / 1000000.0);
  endfunction

  // Rotation matrix from a Gibbs vector (Cayley transform (I+Q)^-1 (I-Q)):
  // R = ((1 - q.q) I + 2 q q^T - 2 [q x]) / (1 + q.q).
  function automatic rmat_t crp_to_r(rvec_t q);
    rmat_t R, qx;
    real qq;
    qq = q[0]*q[0] + q[1]*q[1] + q[2]*q[2];
    qx[0][0] = 0;     qx[0][1] = -q[2]; qx[0][2] = q[1];
    qx[1][0] = q[2];  qx[1][1] = 0;     qx[1][2] = -q[0];
    qx[2][0] = -q[1]; qx[2][1] = q[0];  qx[2][2] = 0;
    for (int r = 0; r < 3; r++)
      for (int c = 0; c < 3; c++)
        R[r][c] = (((r == c) ? (1.0 - qq) : 0.0) + 2.0*q[r]*q[c] - 2.0*qx[r][c]) / (1.0 + qq);
    return R;
  endfunction

  // Synthetic measurements: n points a_i drawn in a terrain-like slab,
  // b_i = R a_i + t, centroids removed, s = db + da, y = db - da, each pair
  // multiplied by w_i = 1/sigma_i (sigma_i drawn in [1, 2)). The host-side
  // scaling then picks alpha so that sum |alpha s_i|^2 = 8 (the trace of the
  // accumulated matrix is then 16, which keeps its cofactors and determinant
  // well inside Q15.16) and beta = 2 alpha; s' = alpha s and y' = beta y
  // are rounded to Q15.16. The core then returns q' = (beta/alpha) q, and
  // ab_ratio = alpha/beta recovers q.
  function automatic void make_meas(rvec_t q, rvec_t t, int n,
                                    output int s[MAXN][3], output int y[MAXN][3],
                                    output real ab_ratio);
    rmat_t R;
    real a[MAXN][3], b[MAXN][3], rs[MAXN][3], ry[MAXN][3];
    rvec_t abar, bbar;
    real w, ss, alpha, beta;
    R = crp_to_r(q);
    for (int i = 0; i < 3; i++) begin abar[i] = 0; bbar[i] = 0; end
    for (int j = 0; j < n; j++) begin
      a[j][0] = urand(-1.0, 1.0);
      a[j][1] = urand(-1.0, 1.0);
      a[j][2] = urand(-1.2, -0.8);
      for (int r = 0; r < 3; r++)
        b[j][r] = R[r][0]*a[j][0] + R[r][1]*a[j][1] + R[r][2]*a[j][2] + t[r];
      for (int i = 0; i < 3; i++) begin
        abar[i] += a[j][i] / n;
        bbar[i] += b[j][i] / n;
      end
    end
    ss = 0;
    for (int j = 0; j < n; j++) begin
      w = 1.0 / urand(1.0, 2.0);
      for (int i = 0; i < 3; i++) begin
        rs[j][i] = w * ((b[j][i] - bbar[i]) + (a[j][i] - abar[i]));
        ry[j][i] = w * ((b[j][i] - bbar[i]) - (a[j][i] - abar[i]));
        ss += rs[j][i] * rs[j][i];
      end
    end
    alpha = $sqrt(8.0 / ss);
    beta  = 2.0 * alpha;
    ab_ratio = alpha / beta;
    for (int j = 0; j < MAXN; j++)
      for (int i = 0; i < 3; i++) begin
        s[j][i] = (j < n) ? to_fx(alpha * rs[j][i]) : 0;
        y[j][i] = (j < n) ? to_fx(beta * ry[j][i]) : 0;
      end
  endfunction

endpackage
