// vp_iter_tb -- self-checking test of the velocity/position iteration engine.
//
// The attitude at the Chebyshev roots and the specific force there are taken from
// quadratic test profiles (attitude by Runge-Kutta in double precision); gravity is
// served by the behavioural WGS-84 model. The end-of-interval velocity and position
// and one interior root value are compared with a fourth-order Runge-Kutta solution
// of the full navigation equations. Checks the number of gravity requests
// (N_PTS per iteration), the convergence flag and the cycle count. The position
// tolerance (1e-7 m) is set by the rounding of the double-precision reference at
// ECEF magnitudes (one ulp of 6.4e6 m is about 1e-9 m, summed over 2000 steps).
module vp_iter_tb;
  import inav_pkg::*;
  import inav_ref_pkg::*;

  localparam int  M   = M_DEG;
  localparam int  NP  = M + 1;
  localparam real TN  = T_N_DEF;
  localparam int  LAT = 2;

  logic  clk = 1'b0;
  logic  rst_n = 1'b0;
  logic  start = 1'b0;
  vec3_t v0, p0;
  quat_t q_pts [NP];
  vec3_t f_pts [NP];
  logic  g_req, g_ack;
  vec3_t g_pos, g_val;
  logic [$clog2(M+2)-1:0] g_idx;
  logic  busy, done, converged;
  vec3_t v_pts [NP];
  vec3_t p_pts [NP];
  vec3_t v_end, p_end;
  logic [7:0] iters;
  int    served;

  int checks = 0, failures = 0;

  vp_iter dut (.clk, .rst_n, .start, .v0, .p0, .q_pts, .f_pts, .g_req, .g_pos, .g_idx,
               .g_ack, .g_val, .busy, .done, .v_pts, .p_pts, .v_end, .p_end, .iters,
               .converged);
  grav_model #(.LAT(LAT)) grav (.clk, .rst_n, .g_req, .g_pos, .g_ack, .g_val, .served);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic rv_t lla2ecef(real lat, real lon, real h);
    real a, e2, n;
    rv_t r;
    a  = 6378137.0;
    e2 = (1.0 / 298.257223563) * (2.0 - 1.0 / 298.257223563);
    n  = a / $sqrt(1.0 - e2 * $sin(lat) * $sin(lat));
    r.x = (n + h) * $cos(lat) * $cos(lon);
    r.y = (n + h) * $cos(lat) * $sin(lon);
    r.z = (n * (1.0 - e2) + h) * $sin(lat);
    return r;
  endfunction

  task automatic run_case(prof_t wp, prof_t fp, nav_t x0, real tolv, real tolp, string name);
    nav_t xr;
    int   cyc, srv0;
    real  ev, ep, ek;
    v0 = rv2fix(x0.v);
    p0 = rv2fix(x0.p);
    for (int k = 0; k < NP; k++) begin
      q_pts[k] = rq2fix(nav_rk4(x0, wp, fp, TN, OMEGA_IE, 400, 1'b0, sigma_r(k, M)).q);
      f_pts[k] = rv2fix(prof_at(fp, sigma_r(k, M)));
    end
    srv0 = served;
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    cyc = 1;
    while (!done) begin
      @(negedge clk);
      cyc++;
    end
    xr = nav_rk4(x0, wp, fp, TN, OMEGA_IE, 2000, 1'b1, 1.0);
    ev = rvdist(fix2rv(v_end), xr.v);
    ep = rvdist(fix2rv(p_end), xr.p);
    $display("%s: iters=%0d converged=%0d cycles=%0d |dv|=%e |dp|=%e", name, iters,
             converged, cyc, ev, ep);
    check(ev < tolv, {name, ": end velocity"});
    check(ep < tolp, {name, ": end position"});
    xr = nav_rk4(x0, wp, fp, TN, OMEGA_IE, 2000, 1'b1, sigma_r(6, M));
    ek = rvdist(fix2rv(v_pts[6]), xr.v);
    check(ek < tolv, {name, ": root-point velocity"});
    check(served - srv0 == int'(iters) * NP, {name, ": one gravity request per point and iteration"});
    // rotated force: N_PTS; per iteration: gravity N_PTS*(LAT+2), Y N_PTS, three
    // matrix products 3*N_PTS^2, check 1
    check(cyc == 1 + NP + int'(iters) * (NP*(LAT+2) + NP + 3*NP*NP + 1), {name, ": cycle count"});
  endtask

  initial begin : watchdog
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    prof_t wp, fp, wq, fq;
    nav_t  x0;
    for (int k = 0; k < NP; k++) begin q_pts[k] = '0; f_pts[k] = '0; end
    v0 = '0; p0 = '0;
    // gentle motion
    wq.c0 = '{0.01, 0.02, -0.01}; wq.c1 = '{0.0, 0.0, 0.0}; wq.c2 = '{0.0, 0.0, 0.0};
    fq.c0 = '{0.1, 9.8, 0.05};    fq.c1 = '{0.0, 0.0, 0.0}; fq.c2 = '{0.0, 0.0, 0.0};
    // manoeuvre
    wp.c0 = '{0.5, -0.3, 0.8};    wp.c1 = '{0.4, 0.6, -0.2}; wp.c2 = '{-0.3, 0.1, 0.5};
    fp.c0 = '{3.0, 12.0, -2.0};   fp.c1 = '{-5.0, 2.0, 4.0}; fp.c2 = '{1.0, -3.0, 2.5};
    x0.q = '{0.9238795325112867, 0.0, 0.3826834323650898, 0.0};
    x0.v = '{120.0, -45.0, 30.0};
    x0.p = lla2ecef(34.0 * 3.14159265358979 / 180.0, 108.0 * 3.14159265358979 / 180.0, 400.0);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);
    run_case(wq, fq, x0, 1.0e-9, 1.0e-7, "gentle");
    run_case(wp, fp, x0, 1.0e-9, 1.0e-7, "manoeuvre");
    check(!busy, "idle after done");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
