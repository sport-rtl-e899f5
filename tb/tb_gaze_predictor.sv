// tb_gaze_predictor: self-checking test of the gaze predictor.
//
// Drives sequences of IMU samples and compares the prediction with a
// reference computed here in real arithmetic:
//   pred = now + (now - prev) * 9.33, latitude clipped to +-pi/2,
// longitude taken modulo 2*pi. Covers slow and fast motion, both signs,
// longitude wrap-around at +-pi, clipping at both poles, and the first sample
// after reset (zero velocity). Also checks the one-clock latency, well inside
// the paper's 0.01 ms (1,000 clocks at 100 MHz) prediction budget.
module tb_gaze_predictor;
  import sport_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic imu_valid = 1'b0;
  angle_t theta_now = '0, phi_now = '0;
  logic pred_valid, clip_hit;
  angle_t theta_pred, phi_pred;
  logic signed [31:0] omega_theta, omega_phi;
  int checks = 0, failures = 0;

  gaze_predictor dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  angle_t prev_t, prev_p;
  logic   have_prev = 1'b0;

  task automatic sample(input angle_t th, input angle_t ph);
    real    dt, dp, et, ep;
    longint e_t, e_p, got, tol_t, tol_p;
    logic   e_clip;
    int     lat;
    @(negedge clk);
    theta_now = th; phi_now = ph; imu_valid = 1'b1;
    @(negedge clk);
    imu_valid = 1'b0;
    lat = 1;
    while (!pred_valid && lat < 1000) begin @(negedge clk); lat++; end
    checks++;
    if (!pred_valid || lat != 1) begin
      failures++; $display("latency %0d", lat);
    end
    dt = have_prev ? real'(signed'(th - prev_t)) : 0.0;
    dp = have_prev ? real'(signed'(ph - prev_p)) : 0.0;
    et = real'(signed'(th)) + dt * 9.33;
    ep = real'(signed'(ph)) + dp * 9.33;
    e_clip = 1'b0;
    if (ep > 1073741824.0)  begin ep = 1073741824.0;  e_clip = 1'b1; end
    if (ep < -1073741824.0) begin ep = -1073741824.0; e_clip = 1'b1; end
    e_t = longint'(et);
    e_p = longint'(ep);
    // longitude compared modulo 2^32
    // tolerance: rounding plus the Q16 quantisation of 9.33 (2e-6 relative)
    tol_t = 4 + longint'((dt < 0 ? -dt : dt) * 2.0e-5);
    tol_p = 4 + longint'((dp < 0 ? -dp : dp) * 2.0e-5);
    got = longint'(signed'(theta_pred - 32'(e_t)));
    checks++;
    if (got > tol_t || got < -tol_t) begin
      failures++; $display("theta mismatch th=%h pred=%h exp=%h", th, theta_pred, 32'(e_t));
    end
    got = longint'(signed'(phi_pred)) - e_p;
    checks++;
    if (got > tol_p || got < -tol_p) begin
      failures++; $display("phi mismatch ph=%h pred=%h exp=%0d", ph, phi_pred, e_p);
    end
    checks++;
    if (clip_hit != e_clip) begin failures++; $display("clip flag %b exp %b", clip_hit, e_clip); end
    checks++;
    if (omega_theta != 32'(longint'(dt)) || omega_phi != 32'(longint'(dp))) begin
      failures++; $display("omega mismatch");
    end
    prev_t = th; prev_p = ph; have_prev = 1'b1;
  endtask

  localparam angle_t DEG = 32'd11930465;  // 2^32 / 360

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // first sample: no velocity
    sample(32'd100 * DEG, 32'd10 * DEG);
    // 30 deg/s head turn: 0.03 deg per 1 ms sample
    for (int k = 1; k <= 20; k++)
      sample(32'd100 * DEG + angle_t'(k) * (DEG * 3 / 100), 32'd10 * DEG);
    // random motion, both directions
    for (int k = 0; k < 300; k++) begin
      angle_t th, ph;
      th = prev_t + angle_t'(signed'($urandom_range(0, 2000000)) - 1000000);
      ph = angle_t'(signed'($urandom_range(0, 1600000000)) - 800000000);
      if (k % 2 == 1) ph = prev_p + angle_t'(signed'($urandom_range(0, 200000)) - 100000);
      sample(th, ph);
    end
    // longitude wrap across +-pi
    sample(32'h7FF0_0000, 32'd0);
    sample(32'h8010_0000, 32'd0);
    sample(32'h8030_0000, 32'd0);
    // clipping at the north pole
    sample(32'd0, 32'd88 * DEG);
    sample(32'd0, 32'd89 * DEG);
    // and at the south pole
    sample(32'd0, -(32'd88 * DEG));
    sample(32'd0, -(32'd89 * DEG));
    // reset clears the history
    rst_n = 1'b0; @(negedge clk); rst_n = 1'b1; have_prev = 1'b0;
    sample(32'd5 * DEG, 32'd5 * DEG);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
