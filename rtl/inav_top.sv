// inav_top -- Chebyshev functional-iteration inertial navigation engine (ECEF frame).
//
// Per computing interval of N sensor samples the engine runs the three stages of
// the method in order: (1) fit the gyro and accelerometer increments with Chebyshev
// polynomials and evaluate rate and specific force at the Chebyshev roots
// (cheb_fit); (2) iterate the attitude quaternion to convergence (att_iter);
// (3) only then iterate velocity and position together (vp_iter), using the final
// attitude at the roots. The end-of-interval attitude, velocity and position are
// output and become the start values of the next interval. Samples of the next
// interval are collected (imu_buffer) while the current one is computed.
//
// Interface:
//   init_*      load q(0), v(0), p(0) (ECEF) while the engine is idle; required once
//               before the first interval is processed.
//   in_*        sample stream (valid/ready): angle increment [rad], velocity
//               increment [m/s], body frame, one per sensor period.
//   g_*         request port to the external gravity unit (see vp_iter).
//   out_*       one-cycle out_valid per interval with q, v, p at the interval end,
//               the iteration counts and whether each process met the criterion.
// The stage order and the per-interval output follow the published method and its
// FPGA set-up; the valid/ready handshake, the init port and the single-cycle output
// strobe are this design's choices. The host link (ethernet in the published set-up)
// and the gravity model are outside this block.
//
// Timing at the defaults (N = 8, M = 9): fit 81 cycles, attitude 1 + 211 per
// iteration, velocity/position 11 + (10*(gravity latency+2) + 311) per iteration,
// plus 4 cycles of sequencing: under 6,000 cycles per interval, against 80,000 cycles
// per 8 ms interval at 1000 Hz sampling and a 10 MHz clock.
module inav_top
  import inav_pkg::*;
#(
  parameter int  N      = N_SAMP,
  parameter int  M      = M_DEG,
  parameter int  MAX_IT = MAX_ITER,
  parameter real T_N    = T_N_DEF,
  parameter real THR    = RMS_THR,
  parameter real OMEGA  = OMEGA_IE
) (
  input  logic  clk,
  input  logic  rst_n,
  // initial navigation state
  input  logic  init_valid,
  input  quat_t init_q,
  input  vec3_t init_v,
  input  vec3_t init_p,
  // inertial sample stream
  input  logic  in_valid,
  output logic  in_ready,
  input  vec3_t in_dth,
  input  vec3_t in_dv,
  // gravity unit
  output logic  g_req,
  output vec3_t g_pos,
  output logic [$clog2(M+2)-1:0] g_idx,
  input  logic  g_ack,
  input  vec3_t g_val,
  // per-interval result
  output logic  out_valid,
  output quat_t out_q,
  output vec3_t out_v,
  output vec3_t out_p,
  output logic [7:0] out_att_iters,
  output logic [7:0] out_vp_iters,
  output logic  out_att_conv,
  output logic  out_vp_conv,
  output logic  ready_for_init
);
  localparam int NP = M + 1;

  // ---------------- stages ----------------
  logic  blk_valid, blk_take;
  vec3_t dth [N];
  vec3_t dv  [N];

  imu_buffer #(.N(N)) u_buf (
    .clk, .rst_n, .in_valid, .in_ready, .in_dth, .in_dv,
    .blk_valid, .blk_take, .dth, .dv);

  logic  fit_start, fit_busy, fit_done;
  vec3_t w_pts [NP];
  vec3_t f_pts [NP];

  cheb_fit #(.N(N), .M(M), .T_N(T_N)) u_fit (
    .clk, .rst_n, .start(fit_start), .dth, .dv, .busy(fit_busy), .done(fit_done),
    .w_pts, .f_pts);

  logic  att_start, att_busy, att_done, att_conv;
  quat_t q_pts [NP];
  quat_t q_end;
  logic [7:0] att_iters;
  quat_t st_q;

  att_iter #(.M(M), .MAX_IT(MAX_IT), .T_N(T_N), .THR(THR), .OMEGA(OMEGA)) u_att (
    .clk, .rst_n, .start(att_start), .q0(st_q), .w_pts, .busy(att_busy),
    .done(att_done), .q_pts, .coef(), .q_end, .iters(att_iters),
    .converged(att_conv));

  logic  vp_start, vp_busy, vp_done, vp_conv;
  vec3_t v_end, p_end;
  logic [7:0] vp_iters;
  vec3_t st_v, st_p;

  vp_iter #(.M(M), .MAX_IT(MAX_IT), .T_N(T_N), .THR(THR), .OMEGA(OMEGA)) u_vp (
    .clk, .rst_n, .start(vp_start), .v0(st_v), .p0(st_p), .q_pts, .f_pts,
    .g_req, .g_pos, .g_idx, .g_ack, .g_val, .busy(vp_busy), .done(vp_done),
    .v_pts(), .p_pts(), .v_end, .p_end, .iters(vp_iters), .converged(vp_conv));

  // ---------------- interval sequencer ----------------
  typedef enum logic [2:0] {C_NOINIT, C_IDLE, C_FIT, C_ATT, C_VP} cstate_t;
  cstate_t cs;

  assign ready_for_init = (cs == C_NOINIT) || (cs == C_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cs            <= C_NOINIT;
      fit_start     <= 1'b0;
      att_start     <= 1'b0;
      vp_start      <= 1'b0;
      blk_take      <= 1'b0;
      st_q          <= '0;
      st_v          <= '0;
      st_p          <= '0;
      out_valid     <= 1'b0;
      out_q         <= '0;
      out_v         <= '0;
      out_p         <= '0;
      out_att_iters <= '0;
      out_vp_iters  <= '0;
      out_att_conv  <= 1'b0;
      out_vp_conv   <= 1'b0;
    end else begin
      fit_start <= 1'b0;
      att_start <= 1'b0;
      vp_start  <= 1'b0;
      blk_take  <= 1'b0;
      out_valid <= 1'b0;
      unique case (cs)
        C_NOINIT, C_IDLE: begin
          if (init_valid) begin
            st_q <= init_q;
            st_v <= init_v;
            st_p <= init_p;
            cs   <= C_IDLE;
          end else if (cs == C_IDLE && blk_valid) begin
            fit_start <= 1'b1;
            cs        <= C_FIT;
          end
        end
        C_FIT: if (fit_done) begin
          blk_take  <= 1'b1;                 // increments are now in w_pts / f_pts
          att_start <= 1'b1;
          cs        <= C_ATT;
        end
        C_ATT: if (att_done) begin
          vp_start <= 1'b1;                  // velocity/position only after attitude
          cs       <= C_VP;
        end
        C_VP: if (vp_done) begin
          st_q          <= q_end;
          st_v          <= v_end;
          st_p          <= p_end;
          out_q         <= q_end;
          out_v         <= v_end;
          out_p         <= p_end;
          out_att_iters <= att_iters;
          out_vp_iters  <= vp_iters;
          out_att_conv  <= att_conv;
          out_vp_conv   <= vp_conv;
          out_valid     <= 1'b1;
          cs            <= C_IDLE;
        end
        default: cs <= C_IDLE;
      endcase
    end
  end

  a_one_stage: assert property (@(posedge clk) disable iff (!rst_n)
                                $onehot0({fit_busy, att_busy, vp_busy}));

endmodule
