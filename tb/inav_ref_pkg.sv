// inav_ref_pkg -- double-precision reference models used by the testbenches.
//
// Everything here is independent of the RTL datapath: quaternion algebra in real
// arithmetic, the WGS-84 normal-gravity model in the ECEF frame, and a classical
// fourth-order Runge-Kutta integrator of the navigation equations
//   q' = (q o w^b - w^e o q)/2,   v' = C_b^e f^b - 2 w^e x v + g^e(p),   p' = v
// which the testbenches use as ground truth. Test motion profiles are quadratic
// polynomials in normalised time tau in [-1, 1] over one interval, so they are
// reproduced exactly by a degree-7 Chebyshev fit and their increments have closed
// forms.
package inav_ref_pkg;
  import inav_pkg::*;

  typedef struct { real s; real x; real y; real z; } rq_t;
  typedef struct { real x; real y; real z; } rv_t;

  // quadratic profile per axis: value(tau) = c0 + c1 tau + c2 tau^2
  typedef struct { rv_t c0; rv_t c1; rv_t c2; } prof_t;

  // ---------- conversions ----------
  function automatic real fix2real(fix_t a);
    longint hi;
    logic [31:0] lo;
    hi = longint'(a >>> 32);
    lo = a[31:0];
    return real'(hi) * (2.0 ** (32 - FIX_F)) + real'(lo) * (2.0 ** (-FIX_F));
  endfunction

  function automatic vec3_t rv2fix(rv_t v);
    vec3_t r;
    r.x = to_fix(v.x); r.y = to_fix(v.y); r.z = to_fix(v.z);
    return r;
  endfunction

  function automatic quat_t rq2fix(rq_t q);
    quat_t r;
    r.s = to_fix(q.s); r.x = to_fix(q.x); r.y = to_fix(q.y); r.z = to_fix(q.z);
    return r;
  endfunction

  function automatic rv_t fix2rv(vec3_t v);
    rv_t r;
    r.x = fix2real(v.x); r.y = fix2real(v.y); r.z = fix2real(v.z);
    return r;
  endfunction

  function automatic rq_t fix2rq(quat_t q);
    rq_t r;
    r.s = fix2real(q.s); r.x = fix2real(q.x); r.y = fix2real(q.y); r.z = fix2real(q.z);
    return r;
  endfunction

  // ---------- real vector / quaternion algebra ----------
  function automatic rq_t rqmul(rq_t a, rq_t b);
    rq_t r;
    r.s = a.s*b.s - a.x*b.x - a.y*b.y - a.z*b.z;
    r.x = a.s*b.x + a.x*b.s + a.y*b.z - a.z*b.y;
    r.y = a.s*b.y + a.y*b.s + a.z*b.x - a.x*b.z;
    r.z = a.s*b.z + a.z*b.s + a.x*b.y - a.y*b.x;
    return r;
  endfunction

  function automatic rq_t rqv(rv_t v);
    rq_t r;
    r.s = 0.0; r.x = v.x; r.y = v.y; r.z = v.z;
    return r;
  endfunction

  function automatic rq_t rqconj(rq_t a);
    rq_t r;
    r.s = a.s; r.x = -a.x; r.y = -a.y; r.z = -a.z;
    return r;
  endfunction

  function automatic rq_t rqadd(rq_t a, rq_t b, real k);
    rq_t r;
    r.s = a.s + k*b.s; r.x = a.x + k*b.x; r.y = a.y + k*b.y; r.z = a.z + k*b.z;
    return r;
  endfunction

  function automatic rv_t rvadd(rv_t a, rv_t b, real k);
    rv_t r;
    r.x = a.x + k*b.x; r.y = a.y + k*b.y; r.z = a.z + k*b.z;
    return r;
  endfunction

  function automatic real rqdist(rq_t a, rq_t b);
    return $sqrt((a.s-b.s)**2 + (a.x-b.x)**2 + (a.y-b.y)**2 + (a.z-b.z)**2);
  endfunction

  function automatic real rvdist(rv_t a, rv_t b);
    return $sqrt((a.x-b.x)**2 + (a.y-b.y)**2 + (a.z-b.z)**2);
  endfunction

  // rotate body vector into ECEF: q o f o q*
  function automatic rv_t rqrot(rq_t q, rv_t f);
    rq_t t;
    rv_t r;
    t = rqmul(rqmul(q, rqv(f)), rqconj(q));
    r.x = t.x; r.y = t.y; r.z = t.z;
    return r;
  endfunction

  // ---------- motion profiles ----------
  function automatic rv_t prof_at(prof_t p, real tau);
    rv_t r;
    r.x = p.c0.x + p.c1.x*tau + p.c2.x*tau*tau;
    r.y = p.c0.y + p.c1.y*tau + p.c2.y*tau*tau;
    r.z = p.c0.z + p.c1.z*tau + p.c2.z*tau*tau;
    return r;
  endfunction

  // integral of the profile over tau in [ta, tb], times t_N/2 (i.e. over time)
  function automatic rv_t prof_inc(prof_t p, real ta, real tb, real tn);
    rv_t r;
    real d1, d2, d3;
    d1 = tb - ta;
    d2 = (tb*tb - ta*ta) / 2.0;
    d3 = (tb*tb*tb - ta*ta*ta) / 3.0;
    r.x = (p.c0.x*d1 + p.c1.x*d2 + p.c2.x*d3) * tn / 2.0;
    r.y = (p.c0.y*d1 + p.c1.y*d2 + p.c2.y*d3) * tn / 2.0;
    r.z = (p.c0.z*d1 + p.c1.z*d2 + p.c2.z*d3) * tn / 2.0;
    return r;
  endfunction

  function automatic real sigma_r(int k, int m);
    return $cos((k + 0.5) * 3.14159265358979323846 / (m + 1));
  endfunction

  // Optional test stiffening of the gravity field: adds -grav_stiff * (p - grav_anchor).
  // Zero (off) by default; a large value makes the velocity/position iteration
  // converge slowly enough to reach its iteration cap.
  real grav_stiff = 0.0;
  rv_t grav_anchor = '{0.0, 0.0, 0.0};

  // ---------- WGS-84 gravity in ECEF ----------
  // ECEF -> geodetic latitude and height by fixed-point iteration, then the
  // Somigliana normal gravity with the second-order height correction, pointing
  // down along the ellipsoid normal: g^e = -g [cosL cos(lon), cosL sin(lon), sinL].
  function automatic rv_t grav_ecef(rv_t p);
    real a, f, e2, b, rho, lat, h, n, s, g, lon, m;
    rv_t r;
    a   = 6378137.0;
    f   = 1.0 / 298.257223563;
    e2  = f * (2.0 - f);
    b   = a * (1.0 - f);
    m   = 0.00344978650684;
    lon = $atan2(p.y, p.x);
    rho = $sqrt(p.x*p.x + p.y*p.y);
    lat = $atan2(p.z, rho * (1.0 - e2));
    h   = 0.0;
    for (int i = 0; i < 8; i++) begin
      s   = $sin(lat);
      n   = a / $sqrt(1.0 - e2*s*s);
      h   = rho / $cos(lat) - n;
      lat = $atan2(p.z, rho * (1.0 - e2 * n / (n + h)));
    end
    s = $sin(lat);
    g = 9.7803253359 * (1.0 + 0.00193185265241*s*s) / $sqrt(1.0 - e2*s*s);
    g = g * (1.0 - 2.0/a * (1.0 + f + m - 2.0*f*s*s) * h + 3.0*h*h/(a*a));
    r.x = -g * $cos(lat) * $cos(lon);
    r.y = -g * $cos(lat) * $sin(lon);
    r.z = -g * s;
    r.x = r.x - grav_stiff * (p.x - grav_anchor.x);
    r.y = r.y - grav_stiff * (p.y - grav_anchor.y);
    r.z = r.z - grav_stiff * (p.z - grav_anchor.z);
    return r;
  endfunction

  // ---------- ground-truth integrators ----------
  function automatic rq_t att_deriv(rq_t q, rv_t w, real om);
    rq_t we, a, b, r;
    we.s = 0.0; we.x = 0.0; we.y = 0.0; we.z = om;
    a = rqmul(q, rqv(w));
    b = rqmul(we, q);
    r.s = (a.s - b.s) / 2.0; r.x = (a.x - b.x) / 2.0;
    r.y = (a.y - b.y) / 2.0; r.z = (a.z - b.z) / 2.0;
    return r;
  endfunction

  typedef struct { rq_t q; rv_t v; rv_t p; } nav_t;

  function automatic nav_t nav_deriv(nav_t x, rv_t w, rv_t f, real om, logic with_vp);
    nav_t d;
    rv_t  cf, g;
    d.q = att_deriv(x.q, w, om);
    if (with_vp) begin
      cf = rqrot(x.q, f);
      g  = grav_ecef(x.p);
      d.v.x = cf.x + 2.0*om*x.v.y + g.x;
      d.v.y = cf.y - 2.0*om*x.v.x + g.y;
      d.v.z = cf.z + g.z;
      d.p   = x.v;
    end else begin
      d.v = '{0.0, 0.0, 0.0};
      d.p = '{0.0, 0.0, 0.0};
    end
    return d;
  endfunction

  function automatic nav_t nav_step(nav_t x, nav_t d, real h);
    nav_t r;
    r.q = rqadd(x.q, d.q, h);
    r.v = rvadd(x.v, d.v, h);
    r.p = rvadd(x.p, d.p, h);
    return r;
  endfunction

  // Integrate from tau = -1 to tau = tau_end (interval length tn) with RK4.
  function automatic nav_t nav_rk4(nav_t x0, prof_t wp, prof_t fp, real tn, real om,
                                   int steps, logic with_vp, real tau_end);
    nav_t x, k1, k2, k3, k4;
    real  h, dtau, tau;
    x    = x0;
    dtau = (tau_end + 1.0) / steps;
    h    = dtau * tn / 2.0;
    for (int i = 0; i < steps; i++) begin
      tau = -1.0 + i * dtau;
      k1 = nav_deriv(x, prof_at(wp, tau), prof_at(fp, tau), om, with_vp);
      k2 = nav_deriv(nav_step(x, k1, h/2), prof_at(wp, tau + dtau/2), prof_at(fp, tau + dtau/2), om, with_vp);
      k3 = nav_deriv(nav_step(x, k2, h/2), prof_at(wp, tau + dtau/2), prof_at(fp, tau + dtau/2), om, with_vp);
      k4 = nav_deriv(nav_step(x, k3, h), prof_at(wp, tau + dtau), prof_at(fp, tau + dtau), om, with_vp);
      x.q = rqadd(x.q, k1.q, h/6); x.q = rqadd(x.q, k2.q, h/3);
      x.q = rqadd(x.q, k3.q, h/3); x.q = rqadd(x.q, k4.q, h/6);
      x.v = rvadd(x.v, k1.v, h/6); x.v = rvadd(x.v, k2.v, h/3);
      x.v = rvadd(x.v, k3.v, h/3); x.v = rvadd(x.v, k4.v, h/6);
      x.p = rvadd(x.p, k1.p, h/6); x.p = rvadd(x.p, k2.p, h/3);
      x.p = rvadd(x.p, k3.p, h/3); x.p = rvadd(x.p, k4.p, h/6);
    end
    return x;
  endfunction

endpackage
