// tb_alpha_filter_unit -- random projected Gaussians and pixels. The expected bounding-box
// test, exponent, table-approximated alpha (exp at the middle of each 1/8 step, 0 below
// -8, clamp 0.99) and keep/drop decision (alpha >= 1/255) are computed in real arithmetic
// and compared with the unit's hit flag and entry fields. Cases within rounding distance
// of a table step or of the threshold are not judged.
module tb_alpha_filter_unit;
  import splatonic_pkg::*;
  int checks = 0, failures = 0, hits = 0;
  gauss2d_t g;
  pixel_t   pix;
  logic     hit, in_rect;
  isect_t   e;
  alpha_filter_unit dut (.g(g), .pix(pix), .pix_valid(1'b1), .hit(hit), .in_rect(in_rect), .entry(e));
  function automatic fx_t r2fx(real r); return fx_t'(longint'(r * (2.0 ** FX_F))); endfunction
  function automatic real fx2r(fx_t f); return real'(longint'(f)) / (2.0 ** FX_F); endfunction
  function automatic real rnd(real lo, real hi); return lo + (hi - lo) * $itor($urandom_range(0, 1000000)) / 1000000.0; endfunction
  initial begin
    for (int t = 0; t < 4000; t++) begin
      real u, v, a, b, c, o, dx, dy, pw, ge, al, s;
      logic er, eh;
      int k;
      u = rnd(10, 100); v = rnd(10, 100);
      a = rnd(0.01, 1.0); c = rnd(0.01, 1.0); b = rnd(-0.9, 0.9) * $sqrt(a * c);
      o = rnd(0.0, 1.0);
      g = '0;
      g.gid = gid_t'(t); g.u = r2fx(u); g.v = r2fx(v); g.ca = r2fx(a); g.cb = r2fx(b); g.cc = r2fx(c);
      g.opa = r2fx(o); g.depth = r2fx(2.5); g.cr = r2fx(0.25); g.cg = r2fx(0.5); g.cb_ = r2fx(0.75);
      g.xmin = coord_t'($rtoi(u) - 6); g.xmax = coord_t'($rtoi(u) + 6);
      g.ymin = coord_t'($rtoi(v) - 6); g.ymax = coord_t'($rtoi(v) + 6);
      pix.x = coord_t'($rtoi(u) + $urandom_range(0, 18) - 9);
      pix.y = coord_t'($rtoi(v) + $urandom_range(0, 18) - 9);
      #1;
      dx = $itor(pix.x) - fx2r(g.u); dy = $itor(pix.y) - fx2r(g.v);
      pw = -0.5 * (fx2r(g.ca) * dx * dx + fx2r(g.cc) * dy * dy) - fx2r(g.cb) * dx * dy;
      k  = $rtoi($floor(-pw * 8.0));
      ge = (k >= 64) ? 0.0 : $exp(-($itor(k) + 0.5) / 8.0);
      al = fx2r(g.opa) * ge; if (al > 0.99) al = 0.99;
      er = pix.x >= g.xmin && pix.x <= g.xmax && pix.y >= g.ymin && pix.y <= g.ymax;
      eh = er && al >= 1.0 / 255.0;
      s  = -pw * 8.0 - $floor(-pw * 8.0);
      checks++;
      if (in_rect !== er) begin failures++; $display("FAIL rect"); end
      if (s > 1e-3 && s < 1.0 - 1e-3 && (al - 1.0/255.0 > 1e-4 || 1.0/255.0 - al > 1e-4)) begin
        checks++;
        if (hit !== eh) begin failures++; $display("FAIL hit got %0d exp %0d al=%f", hit, eh, al); end
        if (hit && eh) begin
          hits++;
          checks += 4;
          if (fx2r(e.alpha) - al > 1e-4 || al - fx2r(e.alpha) > 1e-4) begin failures++; $display("FAIL alpha %f %f", fx2r(e.alpha), al); end
          if (fx2r(e.dx) != dx || fx2r(e.dy) != dy) begin failures++; $display("FAIL d"); end
          if (e.gid !== g.gid || e.depth !== g.depth) begin failures++; $display("FAIL concat"); end
          if (e.cr !== g.cr || e.cc !== g.cc) begin failures++; $display("FAIL concat2"); end
        end
      end
    end
    if (hits < 100) begin failures++; $display("FAIL too few hits %0d", hits); end
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
