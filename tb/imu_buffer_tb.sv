// imu_buffer_tb -- self-checking test of the interval sample buffer.
//
// Streams three intervals of random increments with random gaps in in_valid,
// checks that the block becomes valid exactly after N accepted samples, that it
// holds the samples in arrival order, that in_ready stays low (nothing is accepted)
// while a full block waits, and that blk_take frees the buffer for the next block.
module imu_buffer_tb;
  import inav_pkg::*;

  localparam int N = N_SAMP;

  logic  clk = 1'b0;
  logic  rst_n = 1'b0;
  logic  in_valid = 1'b0;
  logic  in_ready;
  vec3_t in_dth, in_dv;
  logic  blk_valid;
  logic  blk_take = 1'b0;
  vec3_t dth [N];
  vec3_t dv  [N];

  int checks = 0, failures = 0;

  imu_buffer dut (.clk, .rst_n, .in_valid, .in_ready, .in_dth, .in_dv, .blk_valid,
                  .blk_take, .dth, .dv);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic vec3_t rnd_vec();
    vec3_t v;
    v.x = {$urandom, $urandom, $urandom};
    v.y = {$urandom, $urandom, $urandom};
    v.z = {$urandom, $urandom, $urandom};
    return v;
  endfunction

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    vec3_t exp_th [N];
    vec3_t exp_v  [N];
    int    n;
    in_dth = '0; in_dv = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int b = 0; b < 3; b++) begin
      n = 0;
      while (n < N) begin
        check(!blk_valid && in_ready, "ready while filling");
        in_valid = ($urandom % 3) != 0;
        in_dth   = rnd_vec();
        in_dv    = rnd_vec();
        if (in_valid) begin
          exp_th[n] = in_dth;
          exp_v[n]  = in_dv;
          n++;
        end
        @(negedge clk);
      end
      // offer more samples while full: they must be refused
      in_valid = 1'b1;
      in_dth   = rnd_vec();
      in_dv    = rnd_vec();
      repeat (4) begin
        check(blk_valid && !in_ready, "full block blocks input");
        @(negedge clk);
      end
      in_valid = 1'b0;
      for (int i = 0; i < N; i++) begin
        check(dth[i] == exp_th[i], $sformatf("block %0d angle sample %0d", b, i));
        check(dv[i] == exp_v[i], $sformatf("block %0d velocity sample %0d", b, i));
      end
      blk_take = 1'b1;
      @(negedge clk);
      blk_take = 1'b0;
      check(!blk_valid && in_ready, "take frees the buffer");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
