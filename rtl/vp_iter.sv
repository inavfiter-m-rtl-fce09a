// vp_iter -- velocity/position functional iteration in matrix form.
//
// Solves v' = C_b^e f^b - 2 w^e x v + g^e(p), p' = v over one computing interval,
// after the attitude iteration has fixed q(sigma_k) at the M+1 Chebyshev roots.
// Once per interval it forms the rotated specific force a_k = q o f^b o q* at every
// root. Then each iteration l -> l+1 does:
//   g_k     = g^e(p_l(sigma_k))                    (external gravity unit, see below)
//   Y[k]    = a_k - 2 w^e x v_l(sigma_k) + g_k
//   s_{l+1} = eta_0 + t_N/(M+1) * Cs * Y,    eta_0 = [v(0), 0, ..., 0]
//   rho_{l+1} = varsigma_0 + t_N/2 * Cd * s_{l+1},  varsigma_0 = [p(0), 0, ..., 0]
//   V_{l+1} = F s_{l+1},  P_{l+1} = F rho_{l+1}
// and stops when both RMS coefficient changes (velocity and position) are at most
// THR, or after MAX_IT iterations. Start guess: v_0(t) = v(0), p_0(t) = p(0). The
// equations, the use of the previous iteration's positions for gravity and the
// default sizes follow the published method; Cd = U D and Cs = U D Z F^T.
//
// Where the published text is inconsistent (Eq. 78 writes the constant term of
// the position coefficients with s_l, Eqs. 75/77/79 with s_{l+1}), this block
// follows Eq. 79 and uses the freshly computed s_{l+1}.
//
// Gravity: the geodetic conversion and the WGS-84 normal-gravity model are taken by
// the method from the literature and are not part of this block. For each root
// point the block raises g_req with g_pos = p_l(sigma_k) and g_idx = k, holds them
// until the cycle g_ack is high, and takes g_val on that cycle (g^e in m/s^2, ECEF).
//
// Timing: N_PTS cycles for the rotated force, then per iteration
// N_PTS*(gravity latency + 1) + N_PTS + 3*N_PTS^2 + 1 cycles (one MAC element per
// clock: three lanes for Cs*Y, three for Cd*s, six for F*s and F*rho).
// Interface as in att_iter: pulse `start`; q_pts/f_pts must hold until `done`.
module vp_iter
  import inav_pkg::*;
#(
  parameter int  M      = M_DEG,
  parameter int  MAX_IT = MAX_ITER,
  parameter real T_N    = T_N_DEF,
  parameter real THR    = RMS_THR,
  parameter real OMEGA  = OMEGA_IE
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  vec3_t v0,
  input  vec3_t p0,
  input  quat_t q_pts [M+1],
  input  vec3_t f_pts [M+1],
  // gravity unit
  output logic  g_req,
  output vec3_t g_pos,
  output logic [$clog2(M+2)-1:0] g_idx,
  input  logic  g_ack,
  input  vec3_t g_val,
  // results
  output logic  busy,
  output logic  done,
  output vec3_t v_pts [M+1],
  output vec3_t p_pts [M+1],
  output vec3_t v_end,
  output vec3_t p_end,
  output logic [7:0] iters,
  output logic  converged
);
  localparam int NP = M + 1;
  localparam int IW = $clog2(NP + 1);
  typedef fix_t tab_t [NP*NP];

  function automatic tab_t mk_cs();
    tab_t t;
    for (int r = 0; r < NP; r++)
      for (int k = 0; k < NP; k++)
        t[r*NP+k] = to_fix(T_N / NP * mat_cs(r, k, M));
    return t;
  endfunction

  function automatic tab_t mk_cd();
    tab_t t;
    for (int r = 0; r < NP; r++)
      for (int i = 0; i < NP; i++)
        t[r*NP+i] = to_fix(T_N / 2.0 * mat_cd(r, i, M));
    return t;
  endfunction

  function automatic tab_t mk_f();
    tab_t t;
    for (int k = 0; k < NP; k++)
      for (int i = 0; i < NP; i++)
        t[k*NP+i] = to_fix(cheb_f(k, i, M));
    return t;
  endfunction

  localparam tab_t  CS_T   = mk_cs();
  localparam tab_t  CD_T   = mk_cd();
  localparam tab_t  F_T    = mk_f();
  localparam wide_t THR_SQ = thr_sumsq(THR, NP);
  localparam fix_t  OM2    = to_fix(2.0 * OMEGA);

  typedef enum logic [2:0] {S_IDLE, S_A, S_G, S_Y, S_CS, S_CD, S_FV, S_CHK} state_t;
  state_t state;

  logic [IW-1:0] row, col;
  vec3_t   av  [NP];           // rotated specific force q o f o q*
  vec3_t   gv  [NP];           // gravity at p_l(sigma_k)
  vec3_t   yv  [NP];           // integrand samples Y
  vec3_t   sc  [NP];           // velocity coefficients s
  vec3_t   pc  [NP];           // position coefficients rho
  vec3_t   acc1, acc2;
  vec3_t   v0_r, p0_r;
  wide_t   sumsq_v, sumsq_p;
  vec3_t   vend_acc, pend_acc;

  // ---------------- per-point combinational work ----------------
  vec3_t a_k, y_k;
  always_comb begin
    a_k = quat2vec(qmul(qmul(q_pts[col], vec2quat(f_pts[col])), qconj(q_pts[col])));
    // w^e = [0 0 Omega]: 2 w^e x v = [-2 Omega v_y, 2 Omega v_x, 0]
    y_k.x = av[col].x + fmul(OM2, v_pts[col].y) + gv[col].x;
    y_k.y = av[col].y - fmul(OM2, v_pts[col].x) + gv[col].y;
    y_k.z = av[col].z + gv[col].z;
  end

  // ---------------- shared multiply-accumulate ----------------
  fix_t  cm;
  vec3_t m1, m2, nxt1, nxt2, new1;
  always_comb begin
    unique case (state)
      S_CS:    begin cm = CS_T[int'(row)*NP + int'(col)]; m1 = yv[col]; m2 = '0;      end
      S_CD:    begin cm = CD_T[int'(row)*NP + int'(col)]; m1 = sc[col]; m2 = '0;      end
      default: begin cm = F_T[int'(row)*NP + int'(col)];  m1 = sc[col]; m2 = pc[col]; end
    endcase
    nxt1.x = acc1.x + fmul(cm, m1.x);
    nxt1.y = acc1.y + fmul(cm, m1.y);
    nxt1.z = acc1.z + fmul(cm, m1.z);
    nxt2.x = acc2.x + fmul(cm, m2.x);
    nxt2.y = acc2.y + fmul(cm, m2.y);
    nxt2.z = acc2.z + fmul(cm, m2.z);
    new1 = nxt1;
    if (row == '0) begin
      if (state == S_CS) begin
        new1.x = nxt1.x + v0_r.x; new1.y = nxt1.y + v0_r.y; new1.z = nxt1.z + v0_r.z;
      end else begin
        new1.x = nxt1.x + p0_r.x; new1.y = nxt1.y + p0_r.y; new1.z = nxt1.z + p0_r.z;
      end
    end
  end

  function automatic wide_t dsq(vec3_t a, vec3_t b);
    return fsq(a.x - b.x) + fsq(a.y - b.y) + fsq(a.z - b.z);
  endfunction

  function automatic vec3_t vadd(vec3_t a, vec3_t b);
    vec3_t r;
    r.x = a.x + b.x; r.y = a.y + b.y; r.z = a.z + b.z;
    return r;
  endfunction

  assign busy  = (state != S_IDLE);
  assign g_pos = p_pts[col];
  assign g_idx = col;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      row       <= '0;
      col       <= '0;
      acc1      <= '0;
      acc2      <= '0;
      v0_r      <= '0;
      p0_r      <= '0;
      sumsq_v   <= '0;
      sumsq_p   <= '0;
      vend_acc  <= '0;
      pend_acc  <= '0;
      g_req     <= 1'b0;
      done      <= 1'b0;
      iters     <= '0;
      converged <= 1'b0;
      v_end     <= '0;
      p_end     <= '0;
      for (int k = 0; k < NP; k++) begin
        av[k] <= '0; gv[k] <= '0; yv[k] <= '0; sc[k] <= '0; pc[k] <= '0;
        v_pts[k] <= '0; p_pts[k] <= '0;
      end
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          v0_r      <= v0;
          p0_r      <= p0;
          iters     <= '0;
          converged <= 1'b0;
          for (int k = 0; k < NP; k++) begin
            v_pts[k] <= v0;                          // v_0(t) = v(0)
            p_pts[k] <= p0;                          // p_0(t) = p(0)
            sc[k]    <= (k == 0) ? v0 : '0;
            pc[k]    <= (k == 0) ? p0 : '0;
          end
          col   <= '0;
          state <= S_A;
        end
        S_A: begin
          av[col] <= a_k;
          if (col == IW'(NP-1)) begin
            col   <= '0;
            g_req <= 1'b1;
            state <= S_G;
          end else col <= col + 1'b1;
        end
        S_G: if (g_ack) begin
          gv[col] <= g_val;
          if (col == IW'(NP-1)) begin
            g_req <= 1'b0;
            col   <= '0;
            state <= S_Y;
          end else col <= col + 1'b1;
        end
        S_Y: begin
          yv[col] <= y_k;
          if (col == IW'(NP-1)) begin
            col      <= '0;
            row      <= '0;
            acc1     <= '0;
            acc2     <= '0;
            sumsq_v  <= '0;
            sumsq_p  <= '0;
            vend_acc <= '0;
            pend_acc <= '0;
            state    <= S_CS;
          end else col <= col + 1'b1;
        end
        S_CS, S_CD: begin
          if (col == IW'(NP-1)) begin
            if (state == S_CS) begin
              sc[row]  <= new1;
              sumsq_v  <= sumsq_v + dsq(new1, sc[row]);
              vend_acc <= vadd(vend_acc, new1);
            end else begin
              pc[row]  <= new1;
              sumsq_p  <= sumsq_p + dsq(new1, pc[row]);
              pend_acc <= vadd(pend_acc, new1);
            end
            acc1 <= '0;
            col  <= '0;
            if (row == IW'(NP-1)) begin
              row   <= '0;
              state <= (state == S_CS) ? S_CD : S_FV;
            end else row <= row + 1'b1;
          end else begin
            acc1 <= nxt1;
            col  <= col + 1'b1;
          end
        end
        S_FV: begin
          if (col == IW'(NP-1)) begin
            v_pts[row] <= nxt1;
            p_pts[row] <= nxt2;
            acc1 <= '0;
            acc2 <= '0;
            col  <= '0;
            if (row == IW'(NP-1)) begin
              row   <= '0;
              state <= S_CHK;
            end else row <= row + 1'b1;
          end else begin
            acc1 <= nxt1;
            acc2 <= nxt2;
            col  <= col + 1'b1;
          end
        end
        S_CHK: begin
          iters <= iters + 1'b1;
          v_end <= vend_acc;
          p_end <= pend_acc;
          if ((sumsq_v <= THR_SQ && sumsq_p <= THR_SQ) || int'(iters) + 1 >= MAX_IT) begin
            converged <= (sumsq_v <= THR_SQ && sumsq_p <= THR_SQ);
            done      <= 1'b1;
            state     <= S_IDLE;
          end else begin
            col   <= '0;
            g_req <= 1'b1;
            state <= S_G;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> state == S_IDLE);
  a_ack_needs_req: assert property (@(posedge clk) disable iff (!rst_n) g_ack |-> g_req);
  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                 g_req && !g_ack |=> g_req && $stable(g_idx) && $stable(g_pos));

endmodule
