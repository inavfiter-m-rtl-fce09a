// imu_buffer -- collects the inertial increments of one computing interval.
//
// The navigation engine works on intervals of N sensor samples (N = 8 at 100 Hz
// gives the 0.08 s interval). Samples arrive one at a time as a gyro angle
// increment and an accelerometer velocity increment; this buffer stores N of them
// and then presents the whole interval as one block (`blk_valid`), which the
// consumer releases with a one-cycle `blk_take` once it has copied or used it.
//
// Handshake: a sample is accepted on a cycle where in_valid && in_ready. in_ready is
// low while a full block waits to be taken; the cycle blk_take is seen, the buffer
// empties and in_ready rises again on the next cycle. A single buffer is enough
// because the fit stage copies the block into its result in (M+1)*N cycles, far
// below one sample period; the depth and the back-pressure are this design's
// choice, the sample count N follows the published configuration.
module imu_buffer
  import inav_pkg::*;
#(
  parameter int N = N_SAMP
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  vec3_t in_dth,
  input  vec3_t in_dv,
  output logic  blk_valid,
  input  logic  blk_take,
  output vec3_t dth [N],
  output vec3_t dv  [N]
);
  localparam int CW = $clog2(N + 1);
  localparam int AW = (N > 1) ? $clog2(N) : 1;
  logic [CW-1:0] cnt;
  logic [AW-1:0] wr_idx;

  assign wr_idx = AW'(cnt);

  assign blk_valid = (cnt == CW'(N));
  assign in_ready  = !blk_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0;
      for (int n = 0; n < N; n++) begin
        dth[n] <= '0;
        dv[n]  <= '0;
      end
    end else if (blk_valid) begin
      if (blk_take) cnt <= '0;
    end else if (in_valid) begin
      dth[wr_idx] <= in_dth;
      dv[wr_idx]  <= in_dv;
      cnt      <= cnt + 1'b1;
    end
  end

  a_take_when_full: assert property (@(posedge clk) disable iff (!rst_n) blk_take |-> blk_valid);

endmodule
