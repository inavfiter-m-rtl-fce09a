// att_iter_tb -- self-checking test of the attitude iteration engine.
//
// Drives the body rate at the Chebyshev-root points from quadratic test profiles
// and compares the engine's end-of-interval quaternion and its root-point
// quaternions with a fourth-order Runge-Kutta solution of q' = (q o w - w^e o q)/2
// computed in double precision (inav_ref_pkg). Three cases: a slow rotation that
// must meet the RMS criterion before the iteration cap, a fast coning-like rotation
// that runs to the cap of 9 iterations, and a back-to-back restart. The cycle count
// from start to done is checked against 211 cycles per iteration.
module att_iter_tb;
  import inav_pkg::*;
  import inav_ref_pkg::*;

  localparam int  M   = M_DEG;
  localparam int  NP  = M + 1;
  localparam real TN  = T_N_DEF;

  logic  clk = 1'b0;
  logic  rst_n = 1'b0;
  logic  start = 1'b0;
  quat_t q0;
  vec3_t w_pts [NP];
  logic  busy, done, converged;
  quat_t q_pts [NP];
  quat_t coef  [NP];
  quat_t q_end;
  logic [7:0] iters;

  int checks = 0, failures = 0;

  att_iter dut (.clk, .rst_n, .start, .q0, .w_pts, .busy, .done, .q_pts, .coef,
                .q_end, .iters, .converged);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic run_case(prof_t wp, rq_t q0r, real tol, int exp_conv, string name);
    nav_t x0, xr;
    rq_t  qe, qk;
    int   cyc;
    real  err, errk;
    q0 = rq2fix(q0r);
    for (int k = 0; k < NP; k++) w_pts[k] = rv2fix(prof_at(wp, sigma_r(k, M)));
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    cyc = 1;
    while (!done) begin
      @(negedge clk);
      cyc++;
    end
    x0.q = q0r; x0.v = '{0.0, 0.0, 0.0}; x0.p = '{0.0, 0.0, 0.0};
    xr = nav_rk4(x0, wp, wp, TN, OMEGA_IE, 2000, 1'b0, 1.0);
    qe = fix2rq(q_end);
    err = rqdist(qe, xr.q);
    $display("%s: iters=%0d converged=%0d cycles=%0d |q_end - rk4|=%e", name, iters,
             converged, cyc, err);
    check(err < tol, {name, ": end quaternion"});
    // one interior root point (sigma_3) against the reference
    xr = nav_rk4(x0, wp, wp, TN, OMEGA_IE, 2000, 1'b0, sigma_r(3, M));
    qk = fix2rq(q_pts[3]);
    errk = rqdist(qk, xr.q);
    check(errk < tol, {name, ": root-point quaternion"});
    if (exp_conv >= 0) check(converged == 1'(exp_conv), {name, ": converged flag"});
    if (exp_conv == 1) check(iters < 8'(MAX_ITER), {name, ": stopped early"});
    if (exp_conv == 0) check(iters == 8'(MAX_ITER), {name, ": iteration cap"});
    check(cyc == int'(iters) * (NP + 2*NP*NP + 1) + 1, {name, ": cycle count"});
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    prof_t slow, fast, vfast;
    rq_t   qa, qb;
    for (int k = 0; k < NP; k++) w_pts[k] = '0;
    q0 = '0;
    slow.c0 = '{0.01, -0.02, 0.005}; slow.c1 = '{0.0, 0.0, 0.0}; slow.c2 = '{0.0, 0.0, 0.0};
    fast.c0 = '{1.0, 0.5, -0.3};     fast.c1 = '{0.8, -1.2, 0.4}; fast.c2 = '{-0.5, 0.3, 0.9};
    vfast.c0 = '{4.0, 2.0, -1.2};    vfast.c1 = '{1.6, -2.4, 0.8}; vfast.c2 = '{-1.0, 0.6, 1.8};
    qa = '{1.0, 0.0, 0.0, 0.0};
    qb = '{0.5, 0.5, -0.5, 0.5};
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);
    run_case(slow, qa, 1.0e-15, 1, "slow");
    run_case(fast, qb, 1.0e-11, -1, "fast");
    run_case(vfast, qa, 1.0e-9, 0, "capped");
    run_case(fast, qa, 1.0e-11, -1, "restart");
    check(!busy, "idle after done");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
