// tb_raster_engine -- one pixel per run: a random depth-ordered list of pixel-Gaussian
// entries is rendered and back-propagated. The expected color, final transmittance,
// L1 loss and every per-Gaussian gradient tuple come from a real-number model of the
// blending equation and its chain rule. The gradient stream is drained with random
// back-pressure. With g_ready held high, start-to-done latency must be
// ceil(k/4) forward + 1 loss + ceil(k/4) backward + k output cycles + 2 (start capture
// and the registered done); an empty list still spends one cycle in each pass.
module tb_raster_engine;
  import splatonic_pkg::*;
  localparam int K = 64;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0, busy, done, gv, gr = 1;
  isect_t list [K]; logic [$clog2(K+1)-1:0] count; fx_t refc [3];
  gtuple_t gd; fx_t color [3], gfin, loss;
  raster_engine #(.MAX_K(K)) dut (.clk, .rst_n, .start, .busy, .done, .list, .count, .ref_c(refc),
    .g_valid(gv), .g_ready(gr), .g_data(gd), .color, .gamma_final(gfin), .loss);
  always #5 clk = ~clk;
  function automatic fx_t r2fx(real x); return fx_t'(longint'(x * (2.0 ** FX_F))); endfunction
  function automatic real fx2r(fx_t f); return real'(longint'(f)) / (2.0 ** FX_F); endfunction
  function automatic real rnd(real lo, real hi); return lo + (hi - lo) * $itor($urandom_range(0, 1000000)) / 1000000.0; endfunction
  task automatic near(string w, real got, real exp, real rel);
    real tol; tol = rel * ((exp < 0 ? -exp : exp) + 0.05);
    checks++;
    if (got - exp > tol || exp - got > tol) begin failures++; $display("FAIL %s got %f exp %f", w, got, exp); end
  endtask
  gtuple_t outq [$];
  always @(posedge clk) if (gv && gr) outq.push_back(gd);
  initial begin
    int ks [10] = '{0, 1, 3, 4, 5, 8, 17, 40, 63, 64};
    for (int i = 0; i < K; i++) list[i] = '0;
    count = '0; for (int ch = 0; ch < 3; ch++) refc[ch] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      int k, cyc; real a [K], ge [K], col [K][3], dx [K], dy [K], ca [K], cb [K], cc [K];
      real T [K], Ci [K][3], Cf [3], rc [3], d [3], L, Tf;
      logic bp;
      k = ks[t % 10]; bp = (t >= 20);
      @(negedge clk);
      Tf = 1.0; for (int ch = 0; ch < 3; ch++) Cf[ch] = 0;
      for (int i = 0; i < k; i++) begin
        ge[i] = rnd(0.05, 1.0); a[i] = ge[i] * rnd(0.05, 0.6);
        dx[i] = rnd(-3, 3); dy[i] = rnd(-3, 3); ca[i] = rnd(0.1, 1.0); cc[i] = rnd(0.1, 1.0); cb[i] = rnd(-0.3, 0.3);
        list[i] = '0; list[i].gid = gid_t'(1000 + i); list[i].depth = fx_t'(i);
        list[i].alpha = r2fx(a[i]); list[i].gexp = r2fx(ge[i]); list[i].dx = r2fx(dx[i]); list[i].dy = r2fx(dy[i]);
        list[i].ca = r2fx(ca[i]); list[i].cb = r2fx(cb[i]); list[i].cc = r2fx(cc[i]);
        for (int ch = 0; ch < 3; ch++) col[i][ch] = rnd(0, 1);
        list[i].cr = r2fx(col[i][0]); list[i].cg = r2fx(col[i][1]); list[i].cb_ = r2fx(col[i][2]);
        T[i] = Tf;
        for (int ch = 0; ch < 3; ch++) begin Cf[ch] += Tf * a[i] * col[i][ch]; Ci[i][ch] = Cf[ch]; end
        Tf = Tf * (1.0 - a[i]);
      end
      L = 0;
      for (int ch = 0; ch < 3; ch++) begin
        rc[ch] = rnd(0, 1); refc[ch] = r2fx(rc[ch]);
        d[ch] = (Cf[ch] > rc[ch]) ? 1.0 : -1.0;
        L += (Cf[ch] > rc[ch]) ? Cf[ch] - rc[ch] : rc[ch] - Cf[ch];
      end
      count = 7'(k);
      outq.delete();
      start = 1; @(negedge clk); start = 0; cyc = 1;
      while (!done) begin
        gr = bp ? 1'($urandom_range(0, 1)) : 1'b1;
        @(negedge clk); cyc++;
        if (cyc > 2000) break;
      end
      gr = 1;
      if (!bp) begin
        int expc; expc = 2 * ((k == 0) ? 1 : (k + 3) / 4) + 1 + k + 2;
        checks++; if (cyc != expc) begin failures++; $display("FAIL latency k=%0d %0d exp %0d", k, cyc, expc); end
      end
      for (int ch = 0; ch < 3; ch++) near("color", fx2r(color[ch]), Cf[ch], 1e-3);
      near("gamma", fx2r(gfin), Tf, 1e-3);
      near("loss", fx2r(loss), L, 1e-3);
      checks++;
      if (outq.size() != k) begin failures++; $display("FAIL tuples %0d exp %0d", outq.size(), k); end
      else for (int i = 0; i < k; i++) begin
        real dlda, dp;
        checks++; if (outq[i].gid != gid_t'(1000 + i)) begin failures++; $display("FAIL gid order"); end
        dlda = 0;
        for (int ch = 0; ch < 3; ch++) dlda += d[ch] * (T[i] * col[i][ch] - (Cf[ch] - Ci[i][ch]) / (1.0 - a[i]));
        dp = dlda * a[i];
        for (int ch = 0; ch < 3; ch++) near("dc", fx2r(fx_t'(outq[i].grad[G_R + ch])), T[i] * a[i] * d[ch], 2e-3);
        near("dopa", fx2r(fx_t'(outq[i].grad[G_OPA])), dlda * ge[i], 2e-3);
        near("dmx", fx2r(fx_t'(outq[i].grad[G_MX])), dp * (ca[i] * dx[i] + cb[i] * dy[i]), 2e-3);
        near("dmy", fx2r(fx_t'(outq[i].grad[G_MY])), dp * (cb[i] * dx[i] + cc[i] * dy[i]), 2e-3);
        near("dca", fx2r(fx_t'(outq[i].grad[G_CA])), -0.5 * dp * dx[i] * dx[i], 2e-3);
        near("dcb", fx2r(fx_t'(outq[i].grad[G_CB])), -dp * dx[i] * dy[i], 2e-3);
        near("dcc", fx2r(fx_t'(outq[i].grad[G_CC])), -0.5 * dp * dy[i] * dy[i], 2e-3);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
