// tb_projection_core -- random Gaussians seen by a rotated, translated pinhole camera.
// The EWA projection (camera transform, perspective, J R S R^T J^T + 0.3 I, conic,
// 3-sigma box, culling) is recomputed in real arithmetic and compared with tolerances
// sized to the fixed-point format.
module tb_projection_core;
  import splatonic_pkg::*;
  int checks = 0, failures = 0, n_culled = 0, n_vis = 0;
  gauss3d_t g3; pose_t pose; gauss2d_t g2; logic culled;
  coord_t W = 320, H = 240;
  projection_core dut (.g3(g3), .pose(pose), .img_w(W), .img_h(H), .g2(g2), .culled(culled));
  function automatic fx_t r2fx(real r); return fx_t'(longint'(r * (2.0 ** FX_F))); endfunction
  function automatic real fx2r(fx_t f); return real'(longint'(f)) / (2.0 ** FX_F); endfunction
  function automatic real rnd(real lo, real hi); return lo + (hi - lo) * $itor($urandom_range(0, 1000000)) / 1000000.0; endfunction
  task automatic near(string w, real got, real exp, real rel);
    real tol; tol = rel * ((exp < 0 ? -exp : exp) + 1.0);
    checks++;
    if (got - exp > tol || exp - got > tol) begin failures++; $display("FAIL %s got %f exp %f", w, got, exp); end
  endtask
  real R [3][3], S [3][3], C [3][3], M [3][3], p [3], t [3];
  initial begin
    real th, fxv, fyv, cxv, cyv;
    th = 0.2; fxv = 300.0; fyv = 300.0; cxv = 160.0; cyv = 120.0;
    R[0][0] = $cos(th); R[0][1] = 0; R[0][2] = $sin(th);
    R[1][0] = 0;        R[1][1] = 1; R[1][2] = 0;
    R[2][0] = -$sin(th); R[2][1] = 0; R[2][2] = $cos(th);
    t[0] = 0.1; t[1] = -0.05; t[2] = 0.3;
    pose = '0;
    pose.r00 = r2fx(R[0][0]); pose.r01 = r2fx(R[0][1]); pose.r02 = r2fx(R[0][2]);
    pose.r10 = r2fx(R[1][0]); pose.r11 = r2fx(R[1][1]); pose.r12 = r2fx(R[1][2]);
    pose.r20 = r2fx(R[2][0]); pose.r21 = r2fx(R[2][1]); pose.r22 = r2fx(R[2][2]);
    pose.tx = r2fx(t[0]); pose.ty = r2fx(t[1]); pose.tz = r2fx(t[2]);
    pose.fx = r2fx(fxv); pose.fy = r2fx(fyv); pose.cx = r2fx(cxv); pose.cy = r2fx(cyv);
    for (int n = 0; n < 1000; n++) begin
      real m [3], sx, sy, sz, j00, j02, j11, j12, a, b, c, det, u, v, T0 [3], T1 [3];
      logic ecull;
      m[0] = rnd(-1.5, 1.5); m[1] = rnd(-1.0, 1.0); m[2] = rnd(-0.5, 4.0);
      sx = rnd(0.005, 0.05); sy = rnd(0.005, 0.05); sz = rnd(0.005, 0.05);
      S[0][0] = sx*sx; S[1][1] = sy*sy; S[2][2] = sz*sz;
      S[0][1] = 0.3*sx*sy; S[0][2] = -0.2*sx*sz; S[1][2] = 0.1*sy*sz;
      S[1][0] = S[0][1]; S[2][0] = S[0][2]; S[2][1] = S[1][2];
      g3 = '0; g3.gid = gid_t'(n);
      g3.mx = r2fx(m[0]); g3.my = r2fx(m[1]); g3.mz = r2fx(m[2]);
      g3.s00 = r2fx(S[0][0]); g3.s01 = r2fx(S[0][1]); g3.s02 = r2fx(S[0][2]);
      g3.s11 = r2fx(S[1][1]); g3.s12 = r2fx(S[1][2]); g3.s22 = r2fx(S[2][2]);
      g3.opa = r2fx(0.7);
      #1;
      for (int i = 0; i < 3; i++) p[i] = R[i][0]*m[0] + R[i][1]*m[1] + R[i][2]*m[2] + t[i];
      for (int i = 0; i < 3; i++) for (int k = 0; k < 3; k++) M[i][k] = R[i][0]*S[0][k] + R[i][1]*S[1][k] + R[i][2]*S[2][k];
      for (int i = 0; i < 3; i++) for (int k = 0; k < 3; k++) C[i][k] = M[i][0]*R[k][0] + M[i][1]*R[k][1] + M[i][2]*R[k][2];
      ecull = p[2] < 0.01;
      if (!ecull && p[2] < 0.2) begin
        // close to the near plane the image-space values overflow the format: not judged
      end else if (!ecull) begin
        j00 = fxv / p[2]; j11 = fyv / p[2]; j02 = -fxv * p[0] / (p[2]*p[2]); j12 = -fyv * p[1] / (p[2]*p[2]);
        for (int k = 0; k < 3; k++) begin T0[k] = j00*C[0][k] + j02*C[2][k]; T1[k] = j11*C[1][k] + j12*C[2][k]; end
        a = T0[0]*j00 + T0[2]*j02 + 0.3; b = T0[1]*j11 + T0[2]*j12; c = T1[1]*j11 + T1[2]*j12 + 0.3;
        det = a*c - b*b;
        u = fxv * p[0] / p[2] + cxv; v = fyv * p[1] / p[2] + cyv;
        ecull = (u + 3*$sqrt(a) < -0.5) || (v + 3*$sqrt(c) < -0.5) || (u - 3*$sqrt(a) > $itor(W) + 0.5) || (v - 3*$sqrt(c) > $itor(H) + 0.5);
        // judge only clear-cut culling cases
        if ((u + 3*$sqrt(a) > 1.0 || u + 3*$sqrt(a) < -2.0) && (v + 3*$sqrt(c) > 1.0 || v + 3*$sqrt(c) < -2.0) &&
            (u - 3*$sqrt(a) < $itor(W) - 2.0 || u - 3*$sqrt(a) > $itor(W) + 1.0) &&
            (v - 3*$sqrt(c) < $itor(H) - 2.0 || v - 3*$sqrt(c) > $itor(H) + 1.0)) begin
          checks++;
          if (culled !== ecull) begin failures++; $display("FAIL cull got %0d exp %0d u=%f v=%f", culled, ecull, u, v); end
        end
        if (!culled && !ecull) begin
          n_vis++;
          near("u", fx2r(g2.u), u, 1e-4); near("v", fx2r(g2.v), v, 1e-4);
          near("depth", fx2r(g2.depth), p[2], 1e-5);
          near("ca", fx2r(g2.ca), c / det, 1e-2); near("cb", fx2r(g2.cb), -b / det, 1e-2);
          near("cc", fx2r(g2.cc), a / det, 1e-2);
          checks++;
          if ($itor(g2.xmin) > (u - 3*$sqrt(a) < 0 ? 0 : u - 3*$sqrt(a)) + 0.01 ||
              $itor(g2.xmax) < (u + 3*$sqrt(a) > $itor(W) - 1 ? $itor(W) - 1 : u + 3*$sqrt(a)) - 0.01 ||
              $itor(g2.ymin) > (v - 3*$sqrt(c) < 0 ? 0 : v - 3*$sqrt(c)) + 0.01 ||
              $itor(g2.ymax) < (v + 3*$sqrt(c) > $itor(H) - 1 ? $itor(H) - 1 : v + 3*$sqrt(c)) - 0.01 ||
              g2.xmax - g2.xmin > coord_t'($rtoi(6*$sqrt(a)) + 3)) begin
            failures++; $display("FAIL box %0d..%0d u=%f r=%f", g2.xmin, g2.xmax, u, 3*$sqrt(a));
          end
        end
      end else begin
        checks++;
        if (!culled) begin failures++; $display("FAIL near-plane cull"); end
      end
      if (culled) n_culled++;
    end
    if (n_culled < 10 || n_vis < 100) begin failures++; $display("FAIL coverage culled=%0d visible=%0d", n_culled, n_vis); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
