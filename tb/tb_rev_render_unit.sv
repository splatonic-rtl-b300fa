// tb_rev_render_unit -- random pixel-Gaussian pairs with random cached Gamma_i, prefix
// color, final color and dL/dC; the nine partial gradients are recomputed from the
// chain rule of the blending equation in real arithmetic (relative tolerance 1e-3).
module tb_rev_render_unit;
  import splatonic_pkg::*;
  int checks = 0, failures = 0;
  logic valid; isect_t e; fx_t gi, ci [3], cf [3], dl [3]; grad_t gr;
  rev_render_unit dut (.valid(valid), .e(e), .gamma_i(gi), .c_i(ci), .c_final(cf), .dldc(dl), .grad(gr));
  function automatic fx_t r2fx(real x); return fx_t'(longint'(x * (2.0 ** FX_F))); endfunction
  function automatic real fx2r(fx_t f); return real'(longint'(f)) / (2.0 ** FX_F); endfunction
  function automatic real rnd(real lo, real hi); return lo + (hi - lo) * $itor($urandom_range(0, 1000000)) / 1000000.0; endfunction
  task automatic near(string w, real got, real exp);
    real tol; tol = 1e-3 * ((exp < 0 ? -exp : exp) + 0.1);
    checks++;
    if (got - exp > tol || exp - got > tol) begin failures++; $display("FAIL %s got %f exp %f", w, got, exp); end
  endtask
  initial begin
    for (int t = 0; t < 1000; t++) begin
      real a, ge, g, col [3], c_i [3], c_f [3], d [3], dx, dy, ca, cb, cc, dlda, dp;
      ge = rnd(0.05, 1.0); a = ge * rnd(0.05, 0.99); g = rnd(0.01, 1.0);
      dx = rnd(-3, 3); dy = rnd(-3, 3); ca = rnd(0.1, 1.0); cc = rnd(0.1, 1.0); cb = rnd(-0.3, 0.3);
      e = '0; e.alpha = r2fx(a); e.gexp = r2fx(ge); e.dx = r2fx(dx); e.dy = r2fx(dy);
      e.ca = r2fx(ca); e.cb = r2fx(cb); e.cc = r2fx(cc);
      for (int ch = 0; ch < 3; ch++) begin
        col[ch] = rnd(0, 1); c_i[ch] = rnd(0, 0.5); c_f[ch] = c_i[ch] + rnd(0, 0.5); d[ch] = (t % 2) ? 1.0 : -1.0;
        if (ch == 1) d[ch] = 0.0;
        ci[ch] = r2fx(c_i[ch]); cf[ch] = r2fx(c_f[ch]); dl[ch] = r2fx(d[ch]);
      end
      e.cr = r2fx(col[0]); e.cg = r2fx(col[1]); e.cb_ = r2fx(col[2]);
      gi = r2fx(g);
      valid = (t % 10 != 0);
      #1;
      if (!valid) begin
        checks++; if (gr != '0) begin failures++; $display("FAIL invalid lane"); end
      end else begin
        dlda = 0;
        for (int ch = 0; ch < 3; ch++) dlda += d[ch] * (g * col[ch] - (c_f[ch] - c_i[ch]) / (1.0 - a));
        dp = dlda * a;
        for (int ch = 0; ch < 3; ch++) near("dc", fx2r(fx_t'(gr[G_R + ch])), g * a * d[ch]);
        near("dopa", fx2r(fx_t'(gr[G_OPA])), dlda * ge);
        near("dmx", fx2r(fx_t'(gr[G_MX])), dp * (ca * dx + cb * dy));
        near("dmy", fx2r(fx_t'(gr[G_MY])), dp * (cb * dx + cc * dy));
        near("dca", fx2r(fx_t'(gr[G_CA])), -0.5 * dp * dx * dx);
        near("dcb", fx2r(fx_t'(gr[G_CB])), -dp * dx * dy);
        near("dcc", fx2r(fx_t'(gr[G_CC])), -0.5 * dp * dy * dy);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
