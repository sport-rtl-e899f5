// gaze_predictor: head-velocity estimate and linear gaze extrapolation.
//
// Each IMU sample (theta_now = longitude, phi_now = latitude, binary angles)
// is differenced against the previous one to give the angular velocity per
// sample period (first-order difference, as in the paper). The gaze at display
// time is then extrapolated linearly over the whole motion-to-photon latency:
//   theta_pred = theta_now + omega_theta * T_total
//   phi_pred   = clip(phi_now + omega_phi * T_total, -pi/2, +pi/2)
// with T_total = 9.33 ms and a 1 ms sample period (1 kHz IMU), both from the
// paper. The paper computes this with six floating-point operations; here the
// ratio T_total / dt is a Q16 constant fixed at elaboration, so the work is
// one subtract, one constant multiply and one add per axis. Longitude wraps
// modulo 2*pi (binary angles), which the paper does not discuss.
//
// Interface: imu_valid qualifies theta_now/phi_now. pred_valid rises one
// clock later with theta_pred/phi_pred and the velocities omega_*
// (binary-angle units per sample period). The first sample after reset has no
// predecessor and is given zero velocity (this design's choice).
// clip_hit reports that the latitude was clipped at a pole.
module gaze_predictor
  import sport_pkg::*;
#(
  parameter int unsigned T_TOTAL_US = 9330,  // motion-to-photon latency, us
  parameter int unsigned DT_US      = 1000   // IMU sample period, us
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          imu_valid,
  input  angle_t        theta_now,
  input  angle_t        phi_now,
  output logic          pred_valid,
  output angle_t        theta_pred,
  output angle_t        phi_pred,
  output logic signed [31:0] omega_theta,
  output logic signed [31:0] omega_phi,
  output logic          clip_hit
);

  // T_total / dt in Q16, rounded.
  localparam longint unsigned K_Q16 =
    ((64'(T_TOTAL_US) << 16) + 64'(DT_US / 2)) / 64'(DT_US);
  localparam logic signed [63:0] PHI_MAX = 64'sd1073741824;   // +pi/2
  localparam logic signed [63:0] PHI_MIN = -64'sd1073741824;  // -pi/2

  angle_t theta_prev, phi_prev;
  logic   have_prev;

  logic signed [31:0] d_theta, d_phi;
  logic signed [63:0] ext_theta, ext_phi, phi_sum;
  logic signed [63:0] phi_clipped;
  logic               clip_c;

  always_comb begin
    d_theta   = have_prev ? signed'(theta_now - theta_prev) : 32'sd0;
    d_phi     = have_prev ? signed'(phi_now - phi_prev)     : 32'sd0;
    ext_theta = (64'(d_theta) * signed'(K_Q16) + 64'sd32768) >>> 16;
    ext_phi   = (64'(d_phi)   * signed'(K_Q16) + 64'sd32768) >>> 16;
    phi_sum   = 64'(signed'(phi_now)) + ext_phi;
    clip_c    = 1'b0;
    if (phi_sum > PHI_MAX) begin
      phi_clipped = PHI_MAX;
      clip_c      = 1'b1;
    end else if (phi_sum < PHI_MIN) begin
      phi_clipped = PHI_MIN;
      clip_c      = 1'b1;
    end else begin
      phi_clipped = phi_sum;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      theta_prev  <= '0;
      phi_prev    <= '0;
      have_prev   <= 1'b0;
      pred_valid  <= 1'b0;
      theta_pred  <= '0;
      phi_pred    <= '0;
      omega_theta <= '0;
      omega_phi   <= '0;
      clip_hit    <= 1'b0;
    end else begin
      pred_valid <= imu_valid;
      if (imu_valid) begin
        theta_prev  <= theta_now;
        phi_prev    <= phi_now;
        have_prev   <= 1'b1;
        theta_pred  <= theta_now + ext_theta[31:0];
        phi_pred    <= phi_clipped[31:0];
        omega_theta <= d_theta;
        omega_phi   <= d_phi;
        clip_hit    <= clip_c;
      end
    end
  end

endmodule
