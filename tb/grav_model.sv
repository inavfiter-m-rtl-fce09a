// grav_model -- behavioural model of the gravity unit (not synthesizable logic).
//
// Stands in for the ECEF -> geodetic conversion and WGS-84 normal-gravity model
// that the navigation method takes from the literature. It answers the request
// port of vp_iter: on seeing g_req while idle it captures g_pos, waits LAT cycles,
// then raises g_ack for one cycle with g_val = g^e(g_pos) computed in double
// precision (inav_ref_pkg::grav_ecef), and stays idle for one cycle after the ack
// so the requester can move on to its next point. It counts the requests served.
module grav_model
  import inav_pkg::*;
  import inav_ref_pkg::*;
#(
  parameter int LAT = 2
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  g_req,
  input  vec3_t g_pos,
  output logic  g_ack,
  output vec3_t g_val,
  output int    served
);
  typedef enum logic [1:0] {G_IDLE, G_BUSY, G_ACK} gstate_t;
  gstate_t st;
  int      cnt;
  rv_t     pos_r;

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st     <= G_IDLE;
      cnt    <= 0;
      g_ack  <= 1'b0;
      g_val  <= '0;
      served <= 0;
    end else begin
      g_ack <= 1'b0;
      case (st)
        G_IDLE: if (g_req) begin
          pos_r = fix2rv(g_pos);
          cnt <= 0;
          st  <= G_BUSY;
        end
        G_BUSY: if (cnt >= LAT - 1) begin
          g_val  <= rv2fix(grav_ecef(pos_r));
          g_ack  <= 1'b1;
          served <= served + 1;
          st     <= G_ACK;
        end else cnt <= cnt + 1;
        G_ACK:   st <= G_IDLE;
        default: st <= G_IDLE;
      endcase
    end
  end
endmodule
