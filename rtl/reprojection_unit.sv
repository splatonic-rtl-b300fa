// reprojection_unit -- carries a Gaussian's accumulated gradient back to world space.
//
// For a Gaussian with world mean m and accumulated 2D-mean gradient (gx, gy):
//   p          = R m + t                               (camera-space mean)
//   dL/dp      = (fx gx / z, fy gy / z, -(fx x gx + fy y gy) / z^2)
//   dL/dm      = R^T dL/dp                              (world-space mean gradient)
// and, for tracking, the camera-pose gradient is accumulated over all Gaussians:
//   dL/dt     += dL/dp,      dL/dR[i][j] += dL/dp[i] * m[j].
// Only the mean path is carried; the color, opacity and conic gradients are passed
// through unchanged in grad_out. The paper describes this stage only as the
// transformation from camera to world coordinates; the formulas are the standard
// chain rule through the pinhole projection, chosen here. clear zeroes the pose
// accumulators. One Gaussian per cycle, result registered (latency 1).
module reprojection_unit
  import splatonic_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     clear,
  input  logic     in_valid,
  input  gauss3d_t g3,
  input  grad_t    acc,
  input  pose_t    pose,
  output logic     out_valid,
  output gid_t     out_gid,
  output fx_t      dmean_w [3],
  output grad_t    grad_out,
  output fx_t      dl_dr [3][3],
  output fx_t      dl_dt [3]
);
  fx_t R [3][3];
  fx_t m [3];
  fx_t p [3];
  fx_t dp [3];
  fx_t dmw [3];
  fx_t invz, gx, gy;

  always_comb begin
    R[0][0] = pose.r00; R[0][1] = pose.r01; R[0][2] = pose.r02;
    R[1][0] = pose.r10; R[1][1] = pose.r11; R[1][2] = pose.r12;
    R[2][0] = pose.r20; R[2][1] = pose.r21; R[2][2] = pose.r22;
    m[0] = g3.mx; m[1] = g3.my; m[2] = g3.mz;
    p[0] = fx_mul(R[0][0], m[0]) + fx_mul(R[0][1], m[1]) + fx_mul(R[0][2], m[2]) + pose.tx;
    p[1] = fx_mul(R[1][0], m[0]) + fx_mul(R[1][1], m[1]) + fx_mul(R[1][2], m[2]) + pose.ty;
    p[2] = fx_mul(R[2][0], m[0]) + fx_mul(R[2][1], m[1]) + fx_mul(R[2][2], m[2]) + pose.tz;
    invz = fx_div(FX_ONE, p[2]);
    gx = fx_t'(acc[G_MX]);
    gy = fx_t'(acc[G_MY]);
    dp[0] = fx_mul(fx_mul(pose.fx, gx), invz);
    dp[1] = fx_mul(fx_mul(pose.fy, gy), invz);
    dp[2] = -fx_mul(fx_mul(fx_mul(pose.fx, fx_mul(p[0], gx)) + fx_mul(pose.fy, fx_mul(p[1], gy)), invz), invz);
    for (int j = 0; j < 3; j++)
      dmw[j] = fx_mul(R[0][j], dp[0]) + fx_mul(R[1][j], dp[1]) + fx_mul(R[2][j], dp[2]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_gid <= '0; grad_out <= '0;
      for (int i = 0; i < 3; i++) begin
        dmean_w[i] <= '0; dl_dt[i] <= '0;
        for (int j = 0; j < 3; j++) dl_dr[i][j] <= '0;
      end
    end else begin
      out_valid <= in_valid && !clear;
      if (clear) begin
        for (int i = 0; i < 3; i++) begin
          dl_dt[i] <= '0;
          for (int j = 0; j < 3; j++) dl_dr[i][j] <= '0;
        end
      end else if (in_valid) begin
        out_gid  <= g3.gid;
        grad_out <= acc;
        dmean_w  <= dmw;
        for (int i = 0; i < 3; i++) begin
          dl_dt[i] <= dl_dt[i] + dp[i];
          for (int j = 0; j < 3; j++) dl_dr[i][j] <= dl_dr[i][j] + fx_mul(dp[i], m[j]);
        end
      end
    end
  end
endmodule
