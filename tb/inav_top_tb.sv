// inav_top_tb -- end-to-end test of the navigation engine at its default sizes.
//
// Loads an initial state (ECEF position at 34 deg N, 108 deg E, 400 m), then
// streams the gyro and accelerometer increments of several 0.08 s intervals with
// different motion (gentle, very fast rotation, manoeuvre) as fast as the engine
// accepts them, so the sample buffer back-pressures while an interval is being
// computed. Every interval result is compared with a double-precision fourth-order
// Runge-Kutta solution chained from the same initial state. Counts and requires
// each mechanism at least once: attitude stopped by the RMS criterion, attitude
// stopped by the iteration cap, velocity/position stopped by the criterion and by
// the cap, input back-pressure, gravity requests. Real gravity makes the
// velocity/position iteration contract so fast that it always meets the criterion,
// so the last interval stiffens the gravity field of the test model (and of the
// reference) to reach the cap. Also checks that an interval is computed well
// within one interval of samples at 1000 Hz and an assumed 10 MHz clock.
module inav_top_tb;
  import inav_pkg::*;
  import inav_ref_pkg::*;

  localparam int  N   = N_SAMP;
  localparam int  NP  = M_DEG + 1;
  localparam real TN  = T_N_DEF;
  localparam int  NI  = 5;                 // intervals simulated
  localparam int  RT_CYCLES = 80000;       // 8 ms at 10 MHz

  logic  clk = 1'b0;
  logic  rst_n = 1'b0;
  logic  init_valid = 1'b0;
  quat_t init_q;
  vec3_t init_v, init_p;
  logic  in_valid = 1'b0;
  logic  in_ready;
  vec3_t in_dth, in_dv;
  logic  g_req, g_ack;
  vec3_t g_pos, g_val;
  logic [$clog2(M_DEG+2)-1:0] g_idx;
  logic  out_valid, out_att_conv, out_vp_conv, ready_for_init;
  quat_t out_q;
  vec3_t out_v, out_p;
  logic [7:0] out_att_iters, out_vp_iters;
  int    served;

  int checks = 0, failures = 0;
  int n_att_conv = 0, n_att_cap = 0, n_vp_conv = 0, n_vp_cap = 0, n_backpressure = 0;

  inav_top dut (.clk, .rst_n, .init_valid, .init_q, .init_v, .init_p, .in_valid,
                .in_ready, .in_dth, .in_dv, .g_req, .g_pos, .g_idx, .g_ack, .g_val,
                .out_valid, .out_q, .out_v, .out_p, .out_att_iters, .out_vp_iters,
                .out_att_conv, .out_vp_conv, .ready_for_init);
  grav_model #(.LAT(3)) grav (.clk, .rst_n, .g_req, .g_pos, .g_ack, .g_val, .served);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  prof_t wprof [NI];
  prof_t fprof [NI];

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

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && in_valid && !in_ready) n_backpressure++;

  // sample stream: all intervals back to back
  initial begin : stream
    wait (rst_n && ready_for_init && !init_valid && dut.cs == dut.C_IDLE);
    for (int i = 0; i < NI; i++)
      for (int n = 0; n < N; n++) begin
        in_dth   = rv2fix(prof_inc(wprof[i], -1.0 + 2.0*n/N, -1.0 + 2.0*(n+1)/N, TN));
        in_dv    = rv2fix(prof_inc(fprof[i], -1.0 + 2.0*n/N, -1.0 + 2.0*(n+1)/N, TN));
        in_valid = 1'b1;
        @(posedge clk);
        while (!in_ready) @(posedge clk);
        #1 in_valid = 1'b0;
      end
  end

  initial begin
    nav_t x, xr;
    real  eq, ev, ep;
    int   t_last, t_now;
    in_dth = '0; in_dv = '0;
    // gentle, very fast rotation, manoeuvre, gentle
    wprof[0].c0 = '{0.01, 0.02, -0.01}; wprof[0].c1 = '{0.0, 0.0, 0.0};  wprof[0].c2 = '{0.0, 0.0, 0.0};
    fprof[0].c0 = '{0.1, 9.8, 0.05};    fprof[0].c1 = '{0.0, 0.0, 0.0};  fprof[0].c2 = '{0.0, 0.0, 0.0};
    wprof[1].c0 = '{4.0, 2.0, -1.2};    wprof[1].c1 = '{1.6, -2.4, 0.8}; wprof[1].c2 = '{-1.0, 0.6, 1.8};
    fprof[1].c0 = '{0.5, 9.5, 1.0};     fprof[1].c1 = '{0.2, 0.1, -0.3}; fprof[1].c2 = '{0.0, 0.0, 0.0};
    wprof[2].c0 = '{0.5, -0.3, 0.8};    wprof[2].c1 = '{0.4, 0.6, -0.2}; wprof[2].c2 = '{-0.3, 0.1, 0.5};
    fprof[2].c0 = '{3.0, 12.0, -2.0};   fprof[2].c1 = '{-5.0, 2.0, 4.0}; fprof[2].c2 = '{1.0, -3.0, 2.5};
    wprof[3] = wprof[0];
    fprof[3] = fprof[0];
    wprof[4] = wprof[2];
    fprof[4] = fprof[2];
    x.q = '{0.9238795325112867, 0.0, 0.3826834323650898, 0.0};
    x.v = '{120.0, -45.0, 30.0};
    x.p = lla2ecef(34.0 * 3.14159265358979 / 180.0, 108.0 * 3.14159265358979 / 180.0, 400.0);
    init_q = rq2fix(x.q); init_v = rv2fix(x.v); init_p = rv2fix(x.p);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(ready_for_init, "ready for initial state after reset");
    init_valid = 1'b1;
    @(negedge clk);
    init_valid = 1'b0;
    t_last = 0;
    for (int i = 0; i < NI; i++) begin
      t_now = 0;
      // last interval: stiffened gravity field so that the velocity/position
      // iteration runs into its cap (applied to both the model and the reference)
      if (i == NI - 1) begin
        grav_stiff  = 400.0;
        grav_anchor = rvadd(x.p, '{1.0, -0.7, 0.5}, 1.0);
      end
      while (!out_valid) begin
        @(negedge clk);
        t_now++;
      end
      xr = nav_rk4(x, wprof[i], fprof[i], TN, OMEGA_IE, 2000, 1'b1, 1.0);
      eq = rqdist(fix2rq(out_q), xr.q);
      ev = rvdist(fix2rv(out_v), xr.v);
      ep = rvdist(fix2rv(out_p), xr.p);
      $display("interval %0d: att iters=%0d conv=%0d, vp iters=%0d conv=%0d, |dq|=%e |dv|=%e |dp|=%e, %0d cycles",
               i, out_att_iters, out_att_conv, out_vp_iters, out_vp_conv, eq, ev, ep, t_now);
      check(eq < 1.0e-9, $sformatf("interval %0d attitude", i));
      // in the stiffened last interval the velocity swings by hundreds of m/s within
      // the interval; the Chebyshev solution then agrees to about 1e-9 relative
      check(ev < ((i == NI - 1) ? 1.0e-5 : 1.0e-7), $sformatf("interval %0d velocity", i));
      check(ep < 1.0e-6, $sformatf("interval %0d position", i));
      check(t_now < RT_CYCLES, $sformatf("interval %0d real-time budget", i));
      if (out_att_conv) n_att_conv++; else n_att_cap++;
      if (out_vp_conv)  n_vp_conv++;  else n_vp_cap++;
      x = xr;
      @(negedge clk);
    end
    $display("mechanisms: att criterion %0d, att cap %0d, vp criterion %0d, vp cap %0d, back-pressure cycles %0d, gravity requests %0d",
             n_att_conv, n_att_cap, n_vp_conv, n_vp_cap, n_backpressure, served);
    check(n_att_conv > 0, "attitude stopped by the RMS criterion");
    check(n_att_cap > 0, "attitude stopped by the iteration cap");
    check(n_vp_conv > 0, "velocity/position stopped by the RMS criterion");
    check(n_vp_cap > 0, "velocity/position stopped by the iteration cap");
    check(n_backpressure > 0, "input back-pressure");
    check(served > 0, "gravity requests");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
