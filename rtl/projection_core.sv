// projection_core -- "Projection, Culling & Conversion" of one 3D Gaussian.
//
// Follows the standard 3DGS (EWA splatting) projection, which the accelerator inherits
// from its forward-only base design:
//   p      = R m + t                         camera-space mean, depth = p.z
//   culled if p.z < NEAR, if the 2D covariance is not positive definite, or if the
//          bounding box misses the image
//   (u, v) = (fx p.x / p.z + cx, fy p.y / p.z + cy)
//   J      = [fx/z 0 -fx x/z^2; 0 fy/z -fy y/z^2]
//   cov2D  = J R Sigma R^T J^T + 0.3 I       (0.3 px^2 low-pass, as in 3DGS)
//   conic  = cov2D^-1 (a, b, c)
//   bbox   = mean +- 3 sqrt(diag(cov2D)), clipped to the image (axis-aligned 3-sigma box)
// The box shape and all number formats are this design's choices; the paper only names
// the block. Purely combinational; the projection unit registers its output.
module projection_core
  import splatonic_pkg::*;
#(
  parameter fx_t NEAR = fx_t'((64'sd1 <<< FX_F) / 100)     // 0.01
) (
  input  gauss3d_t g3,
  input  pose_t    pose,
  input  coord_t   img_w,
  input  coord_t   img_h,
  output gauss2d_t g2,
  output logic     culled
);
  localparam fx_t LOWPASS = fx_t'(((64'sd1 <<< FX_F) * 3) / 10);
  localparam fx_t THREE   = fx_t'(64'sd3 <<< FX_F);

  fx_t R [3][3];
  fx_t S [3][3];
  fx_t M [3][3];
  fx_t C [3][3];
  fx_t T [2][3];
  fx_t p [3];
  fx_t invz, j00, j02, j11, j12;
  fx_t a, b, c, det, rx, ry;
  logic signed [FX_W-FX_F-1:0] x0, x1, y0, y1;   // integer box before clipping

  always_comb begin
    R[0][0] = pose.r00; R[0][1] = pose.r01; R[0][2] = pose.r02;
    R[1][0] = pose.r10; R[1][1] = pose.r11; R[1][2] = pose.r12;
    R[2][0] = pose.r20; R[2][1] = pose.r21; R[2][2] = pose.r22;
    S[0][0] = g3.s00; S[0][1] = g3.s01; S[0][2] = g3.s02;
    S[1][0] = g3.s01; S[1][1] = g3.s11; S[1][2] = g3.s12;
    S[2][0] = g3.s02; S[2][1] = g3.s12; S[2][2] = g3.s22;

    p[0] = fx_mul(R[0][0], g3.mx) + fx_mul(R[0][1], g3.my) + fx_mul(R[0][2], g3.mz) + pose.tx;
    p[1] = fx_mul(R[1][0], g3.mx) + fx_mul(R[1][1], g3.my) + fx_mul(R[1][2], g3.mz) + pose.ty;
    p[2] = fx_mul(R[2][0], g3.mx) + fx_mul(R[2][1], g3.my) + fx_mul(R[2][2], g3.mz) + pose.tz;

    invz = fx_div(FX_ONE, p[2]);
    j00  = fx_mul(pose.fx, invz);
    j11  = fx_mul(pose.fy, invz);
    j02  = -fx_mul(fx_mul(j00, p[0]), invz);
    j12  = -fx_mul(fx_mul(j11, p[1]), invz);

    // M = R S, C = M R^T
    for (int i = 0; i < 3; i++)
      for (int k = 0; k < 3; k++)
        M[i][k] = fx_mul(R[i][0], S[0][k]) + fx_mul(R[i][1], S[1][k]) + fx_mul(R[i][2], S[2][k]);
    for (int i = 0; i < 3; i++)
      for (int k = 0; k < 3; k++)
        C[i][k] = fx_mul(M[i][0], R[k][0]) + fx_mul(M[i][1], R[k][1]) + fx_mul(M[i][2], R[k][2]);
    // T = J C
    for (int k = 0; k < 3; k++) begin
      T[0][k] = fx_mul(j00, C[0][k]) + fx_mul(j02, C[2][k]);
      T[1][k] = fx_mul(j11, C[1][k]) + fx_mul(j12, C[2][k]);
    end
    a = fx_mul(T[0][0], j00) + fx_mul(T[0][2], j02) + LOWPASS;
    b = fx_mul(T[0][1], j11) + fx_mul(T[0][2], j12);
    c = fx_mul(T[1][1], j11) + fx_mul(T[1][2], j12) + LOWPASS;
    det = fx_mul(a, c) - fx_mul(b, b);

    g2.gid   = g3.gid;
    g2.u     = fx_mul(j00, p[0]) + pose.cx;
    g2.v     = fx_mul(j11, p[1]) + pose.cy;
    g2.depth = p[2];
    g2.ca    = fx_div(c, det);
    g2.cb    = -fx_div(b, det);
    g2.cc    = fx_div(a, det);
    g2.opa   = g3.opa;
    g2.cr    = g3.cr;
    g2.cg    = g3.cg;
    g2.cb_   = g3.cb;

    rx = fx_mul(THREE, fx_sqrt(a));
    ry = fx_mul(THREE, fx_sqrt(c));
    x0 = (FX_W-FX_F)'((g2.u - rx) >>> FX_F);
    x1 = (FX_W-FX_F)'((g2.u + rx) >>> FX_F) + 1'b1;
    y0 = (FX_W-FX_F)'((g2.v - ry) >>> FX_F);
    y1 = (FX_W-FX_F)'((g2.v + ry) >>> FX_F) + 1'b1;
    g2.xmin = (x0 < 0) ? '0 : (x0 >= $signed({1'b0, img_w})) ? img_w - 1'b1 : coord_t'(x0);
    g2.xmax = (x1 < 0) ? '0 : (x1 >= $signed({1'b0, img_w})) ? img_w - 1'b1 : coord_t'(x1);
    g2.ymin = (y0 < 0) ? '0 : (y0 >= $signed({1'b0, img_h})) ? img_h - 1'b1 : coord_t'(y0);
    g2.ymax = (y1 < 0) ? '0 : (y1 >= $signed({1'b0, img_h})) ? img_h - 1'b1 : coord_t'(y1);

    culled = (p[2] < NEAR) || (det <= 0) ||
             (x1 < 0) || (y1 < 0) ||
             (x0 >= $signed({1'b0, img_w})) || (y0 >= $signed({1'b0, img_h}));
  end
endmodule
