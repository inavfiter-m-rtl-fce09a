// cheb_fit -- Chebyshev fit of the inertial increments, evaluated at the roots.
//
// Takes the N gyro angle increments and N accelerometer velocity increments of one
// computing interval and returns the fitted angular rate w^b and specific force f^b
// at the M+1 Chebyshev-root points sigma_k, which is all the iteration engines need.
// The published method fits Chebyshev polynomials of degree n_w = n_f = N-1 to the
// increments by least squares; with N increments and N coefficients that problem is
// square, so its solution is the unique polynomial whose integral over every
// sub-interval equals the measured increment. Its value at sigma_k is therefore a
// fixed linear combination of the increments,
//   w^b(sigma_k) = sum_n E[k][n] * dtheta_n,  E[k][n] = (2/t_N) * fit_weight(k, n),
// with fit_weight from inav_pkg (derivative of the polynomial that interpolates the
// cumulative increments). E is computed at elaboration, so the run-time work is one
// (M+1) x N matrix-vector product per sensor.
//
// Implementation: six multiply-accumulate lanes (three axes of w and of f) walk the
// N increments of one point per cycle: (M+1)*N cycles (80 at the defaults), `done`
// one cycle after the last product. Pulse `start` with dth/dv valid; they must hold
// until `done`. Outputs hold until the next start. Units: rad and m/s in, rad/s
// and m/s^2 out, fixed point (inav_pkg).
module cheb_fit
  import inav_pkg::*;
#(
  parameter int  N   = N_SAMP,
  parameter int  M   = M_DEG,
  parameter real T_N = T_N_DEF
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  vec3_t dth   [N],
  input  vec3_t dv    [N],
  output logic  busy,
  output logic  done,
  output vec3_t w_pts [M+1],
  output vec3_t f_pts [M+1]
);
  localparam int NP = M + 1;
  localparam int KW = $clog2(NP + 1);
  localparam int NW = (N > 1) ? $clog2(N) : 1;
  typedef fix_t tab_t [NP*N];

  function automatic tab_t mk_e();
    tab_t t;
    for (int k = 0; k < NP; k++)
      for (int n = 0; n < N; n++)
        t[k*N+n] = to_fix(2.0 / T_N * fit_weight(k, n + 1, N, M));
    return t;
  endfunction

  localparam tab_t E_T = mk_e();

  logic          run;
  logic [KW-1:0] pt;
  logic [NW-1:0] smp;
  vec3_t         acc_w, acc_f;
  vec3_t         nxt_w, nxt_f;
  fix_t          e;

  always_comb begin
    e = E_T[int'(pt)*N + int'(smp)];
    nxt_w.x = acc_w.x + fmul(e, dth[smp].x);
    nxt_w.y = acc_w.y + fmul(e, dth[smp].y);
    nxt_w.z = acc_w.z + fmul(e, dth[smp].z);
    nxt_f.x = acc_f.x + fmul(e, dv[smp].x);
    nxt_f.y = acc_f.y + fmul(e, dv[smp].y);
    nxt_f.z = acc_f.z + fmul(e, dv[smp].z);
  end

  assign busy = run;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run   <= 1'b0;
      done  <= 1'b0;
      pt    <= '0;
      smp   <= '0;
      acc_w <= '0;
      acc_f <= '0;
      for (int k = 0; k < NP; k++) begin
        w_pts[k] <= '0;
        f_pts[k] <= '0;
      end
    end else begin
      done <= 1'b0;
      if (!run) begin
        if (start) begin
          run   <= 1'b1;
          pt    <= '0;
          smp   <= '0;
          acc_w <= '0;
          acc_f <= '0;
        end
      end else if (smp == NW'(N-1)) begin
        w_pts[pt] <= nxt_w;
        f_pts[pt] <= nxt_f;
        acc_w <= '0;
        acc_f <= '0;
        smp   <= '0;
        if (pt == KW'(NP-1)) begin
          run  <= 1'b0;
          done <= 1'b1;
        end else pt <= pt + 1'b1;
      end else begin
        acc_w <= nxt_w;
        acc_f <= nxt_f;
        smp   <= smp + 1'b1;
      end
    end
  end

endmodule
