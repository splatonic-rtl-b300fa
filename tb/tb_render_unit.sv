// tb_render_unit -- random alpha and color; checks 1-alpha and alpha*c against real
// arithmetic, and the neutral outputs (1, 0) of an invalid lane.
module tb_render_unit;
  import splatonic_pkg::*;
  int checks = 0, failures = 0;
  logic valid; isect_t e; fx_t om; fx_t pc [3];
  render_unit dut (.valid(valid), .e(e), .one_m_alpha(om), .pc(pc));
  function automatic fx_t r2fx(real r); return fx_t'(longint'(r * (2.0 ** FX_F))); endfunction
  function automatic real fx2r(fx_t f); return real'(longint'(f)) / (2.0 ** FX_F); endfunction
  task automatic near(string w, real got, real exp);
    checks++;
    if (got - exp > 1e-6 || exp - got > 1e-6) begin failures++; $display("FAIL %s got %f exp %f", w, got, exp); end
  endtask
  initial begin
    for (int t = 0; t < 1000; t++) begin
      real a, c [3];
      a = $itor($urandom_range(4, 990)) / 1000.0;
      for (int k = 0; k < 3; k++) c[k] = $itor($urandom_range(0, 1000)) / 1000.0;
      e = '0; e.alpha = r2fx(a); e.cr = r2fx(c[0]); e.cg = r2fx(c[1]); e.cb_ = r2fx(c[2]);
      valid = (t % 7 != 0);
      #1;
      if (valid) begin
        near("1-a", fx2r(om), 1.0 - fx2r(e.alpha));
        near("pr", fx2r(pc[0]), fx2r(e.alpha) * fx2r(e.cr));
        near("pg", fx2r(pc[1]), fx2r(e.alpha) * fx2r(e.cg));
        near("pb", fx2r(pc[2]), fx2r(e.alpha) * fx2r(e.cb_));
      end else begin
        near("inv 1-a", fx2r(om), 1.0);
        near("inv pc", fx2r(pc[0]) + fx2r(pc[1]) + fx2r(pc[2]), 0.0);
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
