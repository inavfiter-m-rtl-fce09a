// att_iter -- attitude functional iteration in matrix form.
//
// Solves q' = (q o w^b - w^e o q)/2 over one computing interval by Picard iteration
// on Chebyshev coefficients. Each iteration l -> l+1 does, on the M+1 Chebyshev-root
// points sigma_k:
//   R[k]    = ([w^b(sigma_k)]^- - [w^e]^+) q_l(sigma_k)        (integrand samples)
//   b_{l+1} = chi_0 + t_N/(2(M+1)) * Cs * R,  chi_0 = [q(0), 0, ..., 0]
//   Q_{l+1} = F * b_{l+1}                                        (new root values)
// and stops when the RMS change of the coefficients is at most THR or after MAX_IT
// iterations. The start guess is q_0(t) = q(0) at every point. These equations, the
// matrices Cs = U D Z F^T and F, the stopping rule and the default sizes (M = 9,
// 9 iterations, threshold 1e-16, t_N = 0.08 s) follow the published method.
//
// Implementation choices: one point or one matrix element per clock. The R phase
// evaluates two quaternion products per clock (N_PTS cycles); the Cs*R and F*b
// phases run a 4-lane multiply-accumulate over the (row, column) pairs (N_PTS^2
// cycles each). t_N/(2(M+1)) is folded into the Cs table at elaboration. The
// coefficient vector b is updated in place; the squared change is summed as each
// new coefficient is written. Cycles per iteration: N_PTS + 2*N_PTS^2 + 1
// (211 at the defaults), plus one cycle to load the start values.
//
// Interface: pulse `start` with q0 and w_pts valid; w_pts must stay valid until
// `done`. `done` pulses for one cycle; q_pts (q at each sigma_k), coef (b), q_end
// (q at the interval end, tau = 1, i.e. the sum of the coefficients), iters and
// converged then hold until the next start. Quantities are fixed point (inav_pkg),
// rates in rad/s.
module att_iter
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
  input  quat_t q0,
  input  vec3_t w_pts [M+1],
  output logic  busy,
  output logic  done,
  output quat_t q_pts [M+1],
  output quat_t coef  [M+1],
  output quat_t q_end,
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
        t[r*NP+k] = to_fix(T_N / (2.0 * NP) * mat_cs(r, k, M));
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
  localparam tab_t  F_T    = mk_f();
  localparam wide_t THR_SQ = thr_sumsq(THR, NP);
  localparam fix_t  OM_FIX = to_fix(OMEGA);

  typedef enum logic [2:0] {S_IDLE, S_R, S_CS, S_FQ, S_CHK} state_t;
  state_t state;

  logic [IW-1:0] row, col;
  quat_t   rv  [NP];          // integrand samples R
  quat_t   acc;
  quat_t   q0_r;
  wide_t   sumsq;
  quat_t   qend_acc;

  quat_t   we_q;
  assign we_q = '{s: '0, x: '0, y: '0, z: OM_FIX};

  // multiply-accumulate operands for the two matrix phases
  fix_t  coef_m;
  quat_t vec_m, acc_next, b_new;
  always_comb begin
    if (state == S_CS) begin
      coef_m = CS_T[int'(row)*NP + int'(col)];
      vec_m  = rv[col];
    end else begin
      coef_m = F_T[int'(row)*NP + int'(col)];
      vec_m  = coef[col];
    end
    acc_next.s = acc.s + fmul(coef_m, vec_m.s);
    acc_next.x = acc.x + fmul(coef_m, vec_m.x);
    acc_next.y = acc.y + fmul(coef_m, vec_m.y);
    acc_next.z = acc.z + fmul(coef_m, vec_m.z);
    b_new = acc_next;
    if (row == '0) begin
      b_new.s = acc_next.s + q0_r.s;
      b_new.x = acc_next.x + q0_r.x;
      b_new.y = acc_next.y + q0_r.y;
      b_new.z = acc_next.z + q0_r.z;
    end
  end

  quat_t r_k;
  always_comb begin
    quat_t a, b;
    a = qmul(q_pts[col], vec2quat(w_pts[col]));
    b = qmul(we_q, q_pts[col]);
    r_k.s = a.s - b.s; r_k.x = a.x - b.x; r_k.y = a.y - b.y; r_k.z = a.z - b.z;
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      row       <= '0;
      col       <= '0;
      acc       <= '0;
      q0_r      <= '0;
      sumsq     <= '0;
      qend_acc  <= '0;
      done      <= 1'b0;
      iters     <= '0;
      converged <= 1'b0;
      q_end     <= '0;
      for (int k = 0; k < NP; k++) begin
        q_pts[k] <= '0;
        coef[k]  <= '0;
        rv[k]    <= '0;
      end
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          q0_r      <= q0;
          iters     <= '0;
          converged <= 1'b0;
          for (int k = 0; k < NP; k++) begin
            q_pts[k] <= q0;                       // q_0(t) = q(0)
            coef[k]  <= (k == 0) ? q0 : '0;
          end
          col   <= '0;
          state <= S_R;
        end
        S_R: begin
          rv[col] <= r_k;
          if (col == IW'(NP-1)) begin
            col      <= '0;
            row      <= '0;
            acc      <= '0;
            sumsq    <= '0;
            qend_acc <= '0;
            state    <= S_CS;
          end else col <= col + 1'b1;
        end
        S_CS: begin
          if (col == IW'(NP-1)) begin
            coef[row] <= b_new;
            sumsq     <= sumsq + fsq(b_new.s - coef[row].s) + fsq(b_new.x - coef[row].x)
                               + fsq(b_new.y - coef[row].y) + fsq(b_new.z - coef[row].z);
            qend_acc  <= '{s: qend_acc.s + b_new.s, x: qend_acc.x + b_new.x,
                           y: qend_acc.y + b_new.y, z: qend_acc.z + b_new.z};
            acc <= '0;
            col <= '0;
            if (row == IW'(NP-1)) begin
              row   <= '0;
              state <= S_FQ;
            end else row <= row + 1'b1;
          end else begin
            acc <= acc_next;
            col <= col + 1'b1;
          end
        end
        S_FQ: begin
          if (col == IW'(NP-1)) begin
            q_pts[row] <= acc_next;
            acc <= '0;
            col <= '0;
            if (row == IW'(NP-1)) begin
              row   <= '0;
              state <= S_CHK;
            end else row <= row + 1'b1;
          end else begin
            acc <= acc_next;
            col <= col + 1'b1;
          end
        end
        S_CHK: begin
          iters <= iters + 1'b1;
          q_end <= qend_acc;
          if (sumsq <= THR_SQ || int'(iters) + 1 >= MAX_IT) begin
            converged <= (sumsq <= THR_SQ);
            done      <= 1'b1;
            state     <= S_IDLE;
          end else begin
            col   <= '0;
            state <= S_R;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // start is only honoured when idle
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> state == S_IDLE);

endmodule
