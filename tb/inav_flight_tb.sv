// inav_flight_tb -- multi-interval run of the navigation engine on a continuous
// coning and sculling motion, at the default sizes (N = 8 samples of 100 Hz data
// per 0.08 s interval, series degree 9, at most 9 iterations).
//
// The body rate is a classic coning input, w = [A cos(Wt), A sin(Wt), 0], and the
// specific force a sculling one, f = [B sin(Wt), B cos(Wt), 9.8] (W = 2 Hz). Over
// each interval both are expanded to second order about the interval centre, which
// gives the analytic increments streamed into the engine and the rate profile used
// by the reference. The reference is a double-precision fourth-order Runge-Kutta
// integration chained on its own from the initial state, independently of the
// engine's outputs, so the comparison shows how the error of the engine grows over
// NI consecutive intervals. Also checks that every interval is computed within
// one interval of 1000 Hz samples at an assumed 10 MHz clock and that every
// interval ends by the RMS criterion rather than the iteration cap.
module inav_flight_tb;
  import inav_pkg::*;
  import inav_ref_pkg::*;

  localparam int  N   = N_SAMP;
  localparam real TN  = T_N_DEF;
  localparam int  NI  = 500;               // 40 s of navigation
  localparam int  RT_CYCLES = 80000;       // 8 ms at 10 MHz
  localparam real W   = 2.0 * 3.14159265358979 * 2.0;
  localparam real A   = 0.5;
  localparam real B   = 2.0;

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

  inav_top dut (.clk, .rst_n, .init_valid, .init_q, .init_v, .init_p, .in_valid,
                .in_ready, .in_dth, .in_dv, .g_req, .g_pos, .g_idx, .g_ack, .g_val,
                .out_valid, .out_q, .out_v, .out_p, .out_att_iters, .out_vp_iters,
                .out_att_conv, .out_vp_conv, .ready_for_init);
  grav_model #(.LAT(2)) grav (.clk, .rst_n, .g_req, .g_pos, .g_ack, .g_val, .served);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // second-order expansion of the coning rate / sculling force about t = tc,
  // in the interval variable tau (t = tc + tau * TN / 2)
  function automatic prof_t coning(real tc);
    prof_t p;
    real h = TN / 2.0;
    p.c0 = '{A * $cos(W*tc),                    A * $sin(W*tc),                    0.0};
    p.c1 = '{-A * W * $sin(W*tc) * h,           A * W * $cos(W*tc) * h,            0.0};
    p.c2 = '{-0.5 * A * W * W * $cos(W*tc) * h * h, -0.5 * A * W * W * $sin(W*tc) * h * h, 0.0};
    return p;
  endfunction

  function automatic prof_t sculling(real tc);
    prof_t p;
    real h = TN / 2.0;
    p.c0 = '{B * $sin(W*tc),                    B * $cos(W*tc),                    9.8};
    p.c1 = '{B * W * $cos(W*tc) * h,            -B * W * $sin(W*tc) * h,           0.0};
    p.c2 = '{-0.5 * B * W * W * $sin(W*tc) * h * h, -0.5 * B * W * W * $cos(W*tc) * h * h, 0.0};
    return p;
  endfunction

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
    repeat (NI * 8000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : stream
    prof_t wp, fp;
    wait (rst_n && ready_for_init && !init_valid && dut.cs == dut.C_IDLE);
    for (int i = 0; i < NI; i++) begin
      wp = coning((i + 0.5) * TN);
      fp = sculling((i + 0.5) * TN);
      for (int n = 0; n < N; n++) begin
        in_dth   = rv2fix(prof_inc(wp, -1.0 + 2.0*n/N, -1.0 + 2.0*(n+1)/N, TN));
        in_dv    = rv2fix(prof_inc(fp, -1.0 + 2.0*n/N, -1.0 + 2.0*(n+1)/N, TN));
        in_valid = 1'b1;
        @(posedge clk);
        while (!in_ready) @(posedge clk);
        #1 in_valid = 1'b0;
      end
    end
  end

  initial begin
    nav_t xr;
    real  eq, ev, ep, eq_max, ev_max, ep_max;
    int   t_now, n_conv;
    in_dth = '0; in_dv = '0;
    eq_max = 0.0; ev_max = 0.0; ep_max = 0.0; n_conv = 0;
    xr.q = '{1.0, 0.0, 0.0, 0.0};
    xr.v = '{0.0, 0.0, 0.0};
    xr.p = lla2ecef(34.0 * 3.14159265358979 / 180.0, 108.0 * 3.14159265358979 / 180.0, 400.0);
    init_q = rq2fix(xr.q); init_v = rv2fix(xr.v); init_p = rv2fix(xr.p);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    init_valid = 1'b1;
    @(negedge clk);
    init_valid = 1'b0;
    for (int i = 0; i < NI; i++) begin
      t_now = 0;
      while (!out_valid) begin
        @(negedge clk);
        t_now++;
      end
      xr = nav_rk4(xr, coning((i + 0.5) * TN), sculling((i + 0.5) * TN), TN, OMEGA_IE,
                   400, 1'b1, 1.0);
      eq = rqdist(fix2rq(out_q), xr.q);
      ev = rvdist(fix2rv(out_v), xr.v);
      ep = rvdist(fix2rv(out_p), xr.p);
      if (eq > eq_max) eq_max = eq;
      if (ev > ev_max) ev_max = ev;
      if (ep > ep_max) ep_max = ep;
      if (out_att_conv && out_vp_conv) n_conv++;
      if (i % 50 == 49)
        $display("t = %0.2f s: att iters=%0d, vp iters=%0d, |dq|=%e |dv|=%e |dp|=%e, %0d cycles",
                 (i + 1) * TN, out_att_iters, out_vp_iters, eq, ev, ep, t_now);
      check(t_now < RT_CYCLES, $sformatf("interval %0d real-time budget", i));
      @(negedge clk);
    end
    $display("max errors over %0d intervals: |dq|=%e |dv|=%e |dp|=%e; %0d intervals met both criteria",
             NI, eq_max, ev_max, ep_max, n_conv);
    check(eq_max < 1.0e-10, "attitude error over the run");
    check(ev_max < 1.0e-7, "velocity error over the run");
    // the double-precision reference itself rounds at ~1e-9 m per step at ECEF
    // magnitudes, and its own position drift dominates this bound
    check(ep_max < 5.0e-6, "position error over the run");
    check(n_conv == NI, "every interval met the RMS criterion");
    check(served > 0, "gravity requests");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
