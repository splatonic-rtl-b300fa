// tb_reprojection_unit -- streams random Gaussians with random accumulated 2D mean
// gradients through the unit and checks, against a real-number model of the pinhole
// projection's Jacobian, the per-Gaussian world-space mean gradient (one cycle after
// the input) and the pose gradients accumulated over the stream (dL/dt = sum dL/dp,
// dL/dR = sum dL/dp * m^T). Also checks that clear zeroes the accumulators.
module tb_reprojection_unit;
  import splatonic_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clear = 0, iv = 0, ov;
  gauss3d_t g3; grad_t acc; pose_t pose; gid_t og; fx_t dmw [3]; grad_t go; fx_t dr [3][3]; fx_t dt [3];
  reprojection_unit dut (.clk, .rst_n, .clear, .in_valid(iv), .g3, .acc, .pose, .out_valid(ov), .out_gid(og),
    .dmean_w(dmw), .grad_out(go), .dl_dr(dr), .dl_dt(dt));
  always #5 clk = ~clk;
  function automatic fx_t r2fx(real x); return fx_t'(longint'(x * (2.0 ** FX_F))); endfunction
  function automatic real fx2r(fx_t f); return real'(longint'(f)) / (2.0 ** FX_F); endfunction
  function automatic real rnd(real lo, real hi); return lo + (hi - lo) * $itor($urandom_range(0, 1000000)) / 1000000.0; endfunction
  task automatic near(string w, real got, real exp, real rel);
    real tol; tol = rel * ((exp < 0 ? -exp : exp) + 0.05);
    checks++;
    if (got - exp > tol || exp - got > tol) begin failures++; $display("FAIL %s got %f exp %f", w, got, exp); end
  endtask
  initial begin
    real R [3][3], t [3], fx, fy;
    g3 = '0; acc = '0; pose = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int run = 0; run < 5; run++) begin
      real sdt [3], sdr [3][3];
      for (int i = 0; i < 3; i++) begin
        t[i] = rnd(-0.5, 0.5); sdt[i] = 0;
        for (int j = 0; j < 3; j++) begin R[i][j] = (i == j ? 1.0 : 0.0) + rnd(-0.2, 0.2); sdr[i][j] = 0; end
      end
      t[2] = rnd(2, 3); fx = rnd(300, 600); fy = rnd(300, 600);
      pose.r00 = r2fx(R[0][0]); pose.r01 = r2fx(R[0][1]); pose.r02 = r2fx(R[0][2]);
      pose.r10 = r2fx(R[1][0]); pose.r11 = r2fx(R[1][1]); pose.r12 = r2fx(R[1][2]);
      pose.r20 = r2fx(R[2][0]); pose.r21 = r2fx(R[2][1]); pose.r22 = r2fx(R[2][2]);
      pose.tx = r2fx(t[0]); pose.ty = r2fx(t[1]); pose.tz = r2fx(t[2]); pose.fx = r2fx(fx); pose.fy = r2fx(fy);
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      for (int n = 0; n < 50; n++) begin
        real m [3], p [3], gx, gy, dp [3], e;
        for (int i = 0; i < 3; i++) m[i] = rnd(-1, 1);
        gx = rnd(-0.01, 0.01); gy = rnd(-0.01, 0.01);
        for (int i = 0; i < 3; i++) p[i] = R[i][0] * m[0] + R[i][1] * m[1] + R[i][2] * m[2] + t[i];
        dp[0] = fx * gx / p[2]; dp[1] = fy * gy / p[2];
        dp[2] = -(fx * p[0] * gx + fy * p[1] * gy) / (p[2] * p[2]);
        for (int i = 0; i < 3; i++) begin sdt[i] += dp[i]; for (int j = 0; j < 3; j++) sdr[i][j] += dp[i] * m[j]; end
        g3 = '0; g3.gid = gid_t'(n + 7); g3.mx = r2fx(m[0]); g3.my = r2fx(m[1]); g3.mz = r2fx(m[2]);
        acc = '0; acc[G_MX] = r2fx(gx); acc[G_MY] = r2fx(gy); acc[G_R] = r2fx(0.25);
        iv = 1;
        @(negedge clk);
        checks++; if (!ov || og != gid_t'(n + 7) || fx_t'(go[G_R]) != r2fx(0.25)) begin failures++; $display("FAIL pass-through"); end
        for (int j = 0; j < 3; j++) begin
          e = R[0][j] * dp[0] + R[1][j] * dp[1] + R[2][j] * dp[2];
          near("dmean", fx2r(dmw[j]), e, 2e-3);
        end
        iv = 0;
        if ($urandom_range(0, 1)) @(negedge clk);
      end
      for (int i = 0; i < 3; i++) begin
        near("dl_dt", fx2r(dt[i]), sdt[i], 2e-3);
        for (int j = 0; j < 3; j++) near("dl_dr", fx2r(dr[i][j]), sdr[i][j], 2e-3);
      end
    end
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    checks++; if (dt[0] != 0 || dr[1][2] != 0) begin failures++; $display("FAIL clear"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
