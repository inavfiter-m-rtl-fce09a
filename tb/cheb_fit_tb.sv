// cheb_fit_tb -- self-checking test of the Chebyshev sensor fit.
//
// Case 1: increments of quadratic rate/force profiles; the fitted values at every
// Chebyshev root must equal the profile there. Case 2: random increments; the
// reference solves the N x N least-squares (here square) system A c = (2/t_N) dtheta
// with A[n][i] = integral of F_i over sub-interval n (closed-form Chebyshev
// antiderivatives) by Gaussian elimination in double precision, then evaluates
// sum_i c_i F_i(sigma_k). Also checks the (M+1)*N-cycle latency.
module cheb_fit_tb;
  import inav_pkg::*;
  import inav_ref_pkg::*;

  localparam int  N  = N_SAMP;
  localparam int  M  = M_DEG;
  localparam int  NP = M + 1;
  localparam real TN = T_N_DEF;

  logic  clk = 1'b0;
  logic  rst_n = 1'b0;
  logic  start = 1'b0;
  vec3_t dth [N];
  vec3_t dv  [N];
  logic  busy, done;
  vec3_t w_pts [NP];
  vec3_t f_pts [NP];

  int checks = 0, failures = 0;

  cheb_fit dut (.clk, .rst_n, .start, .dth, .dv, .busy, .done, .w_pts, .f_pts);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic real cheb_t(int i, real x);
    real t0, t1, t2;
    if (i == 0) return 1.0;
    t0 = 1.0; t1 = x;
    for (int j = 2; j <= i; j++) begin
      t2 = 2.0 * x * t1 - t0; t0 = t1; t1 = t2;
    end
    return t1;
  endfunction

  // antiderivative of F_i (Eq. 12 form)
  function automatic real cheb_int(int i, real x);
    if (i == 1) return x * x / 2.0;
    return i * cheb_t(i + 1, x) / (i * i - 1.0) - x * cheb_t(i, x) / (i - 1.0);
  endfunction

  // least-squares (square) fit of one axis, value at sigma_k
  function automatic real ls_fit_at(real inc [N], int k);
    real a [N][N+1];
    real c [N];
    real piv, fct, s;
    for (int n = 0; n < N; n++) begin
      for (int i = 0; i < N; i++)
        a[n][i] = cheb_int(i, -1.0 + 2.0*(n+1)/N) - cheb_int(i, -1.0 + 2.0*n/N);
      a[n][N] = inc[n] * 2.0 / TN;
    end
    for (int col = 0; col < N; col++) begin
      int best;
      best = col;
      for (int r = col + 1; r < N; r++) if (a[r][col]*a[r][col] > a[best][col]*a[best][col]) best = r;
      for (int j = 0; j <= N; j++) begin
        piv = a[col][j]; a[col][j] = a[best][j]; a[best][j] = piv;
      end
      for (int r = 0; r < N; r++) if (r != col) begin
        fct = a[r][col] / a[col][col];
        for (int j = col; j <= N; j++) a[r][j] = a[r][j] - fct * a[col][j];
      end
    end
    for (int i = 0; i < N; i++) c[i] = a[i][N] / a[i][i];
    s = 0.0;
    for (int i = 0; i < N; i++) s = s + c[i] * cheb_t(i, sigma_r(k, M));
    return s;
  endfunction

  task automatic run_fit(output int cyc);
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    cyc = 1;
    while (!done) begin
      @(negedge clk);
      cyc++;
    end
  endtask

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    prof_t wp, fp;
    int    cyc;
    real   maxe;
    real   ix [N], iy [N], iz [N];
    rv_t   got, exp_v;
    for (int n = 0; n < N; n++) begin dth[n] = '0; dv[n] = '0; end
    wp.c0 = '{0.3, -1.1, 0.7};  wp.c1 = '{0.9, 0.2, -0.4};  wp.c2 = '{-0.6, 0.5, 0.25};
    fp.c0 = '{1.5, 9.81, -0.2}; fp.c1 = '{-3.0, 0.4, 2.2}; fp.c2 = '{0.7, -1.9, 0.05};
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // case 1: polynomial profiles are reproduced exactly
    for (int n = 0; n < N; n++) begin
      dth[n] = rv2fix(prof_inc(wp, -1.0 + 2.0*n/N, -1.0 + 2.0*(n+1)/N, TN));
      dv[n]  = rv2fix(prof_inc(fp, -1.0 + 2.0*n/N, -1.0 + 2.0*(n+1)/N, TN));
    end
    run_fit(cyc);
    check(cyc == NP * N + 1, "latency");
    maxe = 0.0;
    for (int k = 0; k < NP; k++) begin
      real ew, ef;
      ew = rvdist(fix2rv(w_pts[k]), prof_at(wp, sigma_r(k, M)));
      ef = rvdist(fix2rv(f_pts[k]), prof_at(fp, sigma_r(k, M)));
      check(ew < 1.0e-11, $sformatf("rate at root %0d (err %e)", k, ew));
      check(ef < 1.0e-11, $sformatf("force at root %0d (err %e)", k, ef));
      if (ew > maxe) maxe = ew;
    end
    $display("polynomial case: max rate error %e, cycles %0d", maxe, cyc);
    // case 2: random increments against an explicit least-squares solve
    for (int n = 0; n < N; n++) begin
      ix[n] = ($urandom % 20001 - 10000) * 1.0e-6;
      iy[n] = ($urandom % 20001 - 10000) * 1.0e-6;
      iz[n] = ($urandom % 20001 - 10000) * 1.0e-6;
      dth[n] = rv2fix('{ix[n], iy[n], iz[n]});
      dv[n]  = rv2fix('{iz[n] * 50.0, ix[n] * 50.0, iy[n] * 50.0});
    end
    run_fit(cyc);
    maxe = 0.0;
    for (int k = 0; k < NP; k++) begin
      real e1, e2;
      got   = fix2rv(w_pts[k]);
      exp_v = '{ls_fit_at(ix, k), ls_fit_at(iy, k), ls_fit_at(iz, k)};
      e1 = rvdist(got, exp_v) / (1.0 + rvdist(exp_v, '{0.0, 0.0, 0.0}));
      got   = fix2rv(f_pts[k]);
      exp_v = '{ls_fit_at(iz, k) * 50.0, ls_fit_at(ix, k) * 50.0, ls_fit_at(iy, k) * 50.0};
      e2 = rvdist(got, exp_v) / (1.0 + rvdist(exp_v, '{0.0, 0.0, 0.0}));
      check(e1 < 1.0e-10 && e2 < 1.0e-10, $sformatf("least-squares match at root %0d (%e %e)", k, e1, e2));
      if (e1 > maxe) maxe = e1;
    end
    $display("random case: max relative rate error %e", maxe);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
