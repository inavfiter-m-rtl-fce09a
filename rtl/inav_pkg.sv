// inav_pkg -- number format, vector types and constant-matrix generators shared by
// every block of the Chebyshev functional-iteration navigation engine.
//
// Number format: all navigation quantities are signed two's-complement fixed point,
// FIX_W bits wide with FIX_F fraction bits (default 96/64: integer range +-2^31, one
// LSB = 5.4e-20). The published algorithm runs in double precision; a wide fixed
// point was chosen here instead of floating point so that every operator is a plain
// integer multiply-add. Products are truncated (arithmetic shift right by FIX_F).
//
// Constant matrices: the Chebyshev matrices F (Chebyshev polynomials at the
// Chebyshev-root points), Cs = U*D*Z*F^T and Cd = U*D are fixed once the maximum
// degree M is chosen, so they are computed here at elaboration time from real
// arithmetic and turned into fixed-point localparam tables inside each block.
// The interval length t_N is folded into the tables (e.g. t_N/(2(M+1))*Cs), so the
// datapath never multiplies by t_N at run time.
//
// The sensor fit uses angular and velocity increments over N equal sub-intervals of
// [-1, 1]. With n_w = n_f = N-1 the least-squares problem is square, so the fit is
// the unique degree-N polynomial through the cumulative increments; its derivative
// at each Chebyshev root is a fixed linear combination of the N increments
// (fit_weight below, Lagrange-derivative weights).
package inav_pkg;

  // ---------------- number format ----------------
  localparam int FIX_W = 96;
  localparam int FIX_F = 64;
  typedef logic signed [FIX_W-1:0]   fix_t;
  typedef logic signed [2*FIX_W-1:0] wide_t;   // full product / sum of squares

  typedef struct packed { fix_t x; fix_t y; fix_t z; } vec3_t;
  typedef struct packed { fix_t s; fix_t x; fix_t y; fix_t z; } quat_t;

  // ---------------- algorithm sizes (defaults) ----------------
  localparam int    N_SAMP   = 8;             // samples per interval
  localparam int    M_DEG    = N_SAMP + 1;    // m_q = m_v = m_p
  localparam int    N_PTS    = M_DEG + 1;     // Chebyshev-root points
  localparam int    MAX_ITER = N_SAMP + 1;    // iteration cap per process
  localparam real   T_N_DEF  = 0.08;          // interval length in seconds
  localparam real   RMS_THR  = 1.0e-16;       // accuracy criterion
  localparam real   OMEGA_IE = 7.292115e-5;   // Earth rotation rate, rad/s (WGS-84)
  localparam real   PI       = 3.14159265358979323846;

  // ---------------- fixed-point arithmetic ----------------
  function automatic fix_t fmul(fix_t a, fix_t b);
    wide_t p;
    p = wide_t'(a) * wide_t'(b);
    return fix_t'(p >>> FIX_F);
  endfunction

  function automatic wide_t fsq(fix_t a);
    return wide_t'(a) * wide_t'(a);            // 2*FIX_F fraction bits
  endfunction

  // Hamilton product a o b: s = s1 s2 - e1.e2, e = s1 e2 + s2 e1 + e1 x e2.
  function automatic quat_t qmul(quat_t a, quat_t b);
    quat_t r;
    r.s = fmul(a.s, b.s) - fmul(a.x, b.x) - fmul(a.y, b.y) - fmul(a.z, b.z);
    r.x = fmul(a.s, b.x) + fmul(a.x, b.s) + fmul(a.y, b.z) - fmul(a.z, b.y);
    r.y = fmul(a.s, b.y) + fmul(a.y, b.s) + fmul(a.z, b.x) - fmul(a.x, b.z);
    r.z = fmul(a.s, b.z) + fmul(a.z, b.s) + fmul(a.x, b.y) - fmul(a.y, b.x);
    return r;
  endfunction

  function automatic quat_t qconj(quat_t a);
    quat_t r;
    r.s = a.s; r.x = -a.x; r.y = -a.y; r.z = -a.z;
    return r;
  endfunction

  function automatic quat_t vec2quat(vec3_t v);
    quat_t r;
    r.s = '0; r.x = v.x; r.y = v.y; r.z = v.z;
    return r;
  endfunction

  function automatic vec3_t quat2vec(quat_t q);
    vec3_t r;
    r.x = q.x; r.y = q.y; r.z = q.z;
    return r;
  endfunction

  // ---------------- elaboration-time real arithmetic ----------------
  function automatic real rcos(real x);
    real t, s, y;
    int  n;
    // reduce to [-pi, pi] then Taylor series
    y = x;
    while (y >  PI) y = y - 2.0 * PI;
    while (y < -PI) y = y + 2.0 * PI;
    t = 1.0; s = 1.0;
    for (n = 1; n < 40; n++) begin
      t = -t * y * y / ((2.0 * n - 1.0) * (2.0 * n));
      s = s + t;
    end
    return s;
  endfunction

  // real -> fixed, keeping as many of the 53 mantissa bits as fit in 64 bits
  function automatic fix_t to_fix(real r);
    longint v;
    int     sh;
    real    a;
    sh = 0;
    a  = (r < 0.0) ? -r : r;
    while (sh < FIX_W - 64 && a * (2.0 ** (FIX_F - sh)) >= 4.0e18) sh++;
    v = longint'(r * (2.0 ** (FIX_F - sh)));
    return fix_t'(v) <<< sh;
  endfunction

  // Stopping threshold as a sum of squares: thr^2 * npts, scaled by 2^(2*FIX_F),
  // i.e. in the units of fsq(). RMS <= thr  <=>  sum of squares <= thr^2 * npts.
  function automatic wide_t thr_sumsq(real thr, int npts);
    longint v;
    int     sh;
    real    a;
    a  = thr * thr * npts;
    sh = 0;
    while (sh < 2 * FIX_W - 66 && a * (2.0 ** (2 * FIX_F - sh)) >= 4.0e18) sh++;
    v = longint'(a * (2.0 ** (2 * FIX_F - sh)));
    return wide_t'(v) <<< sh;
  endfunction

  // Chebyshev-root point sigma_k = cos((k+1/2) pi / (M+1))
  function automatic real cheb_sigma(int k, int m);
    return rcos((k + 0.5) * PI / (m + 1));
  endfunction

  // F[k][i] = F_i(sigma_k) = cos(i (k+1/2) pi / (M+1))
  function automatic real cheb_f(int k, int i, int m);
    return rcos(i * (k + 0.5) * PI / (m + 1));
  endfunction

  // U = diag(1, 1/2, 1/4, ..., 1/(2M))
  function automatic real mat_u(int r);
    return (r == 0) ? 1.0 : 1.0 / (2.0 * r);
  endfunction

  // D: first row 1, -1/4, (-1)^(i+1)/(i^2-1); row 1: 2 at col 0, -1 at col 2;
  // row r: 1 at col r-1, -1 at col r+1 (col r+1 absent in the last row)
  function automatic real mat_d(int r, int i, int m);
    real v;
    v = 0.0;
    if (r == 0) begin
      if (i == 0)      v = 1.0;
      else if (i == 1) v = -0.25;
      else             v = ((i % 2 == 1) ? 1.0 : -1.0) / (i * i - 1.0);
    end else if (r == 1) begin
      if (i == 0)      v = 2.0;
      else if (i == 2) v = -1.0;
    end else begin
      if (i == r - 1)                 v = 1.0;
      else if (i == r + 1 && r < m)   v = -1.0;
    end
    return v;
  endfunction

  // Cs[r][k] = sum_i U[r] D[r][i] Z[i] F_i(sigma_k),  Z = diag(1/2, 1, ..., 1)
  function automatic real mat_cs(int r, int k, int m);
    real acc;
    acc = 0.0;
    for (int i = 0; i <= m; i++)
      acc = acc + mat_d(r, i, m) * ((i == 0) ? 0.5 : 1.0) * cheb_f(k, i, m);
    return mat_u(r) * acc;
  endfunction

  // Cd[r][i] = U[r] D[r][i]
  function automatic real mat_cd(int r, int i, int m);
    return mat_u(r) * mat_d(r, i, m);
  endfunction

  // Sub-interval boundaries of the N samples on [-1, 1]: x_k = -1 + 2k/N
  function automatic real fit_node(int k, int n);
    return -1.0 + 2.0 * k / n;
  endfunction

  // Derivative of the k-th Lagrange basis polynomial on nodes x_0..x_N, at x.
  function automatic real lagr_deriv(int k, real x, int n);
    real sum, prod, xk;
    xk  = fit_node(k, n);
    sum = 0.0;
    for (int m = 0; m <= n; m++) begin
      if (m != k) begin
        prod = 1.0 / (xk - fit_node(m, n));
        for (int i = 0; i <= n; i++)
          if (i != k && i != m) prod = prod * (x - fit_node(i, n)) / (xk - fit_node(i, n));
        sum = sum + prod;
      end
    end
    return sum;
  endfunction

  // Weight of increment n (1..N) in the fitted rate at sigma_j, per unit tau.
  // The cumulative increment Theta_k = sum_{n<=k} dtheta_n is interpolated by a
  // degree-N polynomial; its tau-derivative at sigma_j is sum_k Theta_k l_k'(sigma_j).
  function automatic real fit_weight(int j, int n, int nsamp, int m);
    real acc, x;
    x   = cheb_sigma(j, m);
    acc = 0.0;
    for (int k = n; k <= nsamp; k++) acc = acc + lagr_deriv(k, x, nsamp);
    return acc;
  endfunction

endpackage
