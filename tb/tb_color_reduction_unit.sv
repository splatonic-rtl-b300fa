// tb_color_reduction_unit -- random groups of four (alpha, color) pairs after a random
// running state; Gamma_i, the prefix colors and the running outputs are recomputed by the
// front-to-back blending sum in real arithmetic.
module tb_color_reduction_unit;
  import splatonic_pkg::*;
  int checks = 0, failures = 0;
  fx_t gin, cin [3], om [4], pc [4][3], gl [4], cl [4][3], gout, cout [3];
  color_reduction_unit #(.N(4)) dut (.gamma_in(gin), .c_in(cin), .one_m_alpha(om), .pc(pc),
    .gamma_lane(gl), .c_lane(cl), .gamma_out(gout), .c_out(cout));
  function automatic fx_t r2fx(real r); return fx_t'(longint'(r * (2.0 ** FX_F))); endfunction
  function automatic real fx2r(fx_t f); return real'(longint'(f)) / (2.0 ** FX_F); endfunction
  task automatic near(string w, real got, real exp);
    checks++;
    if (got - exp > 1e-5 || exp - got > 1e-5) begin failures++; $display("FAIL %s got %f exp %f", w, got, exp); end
  endtask
  initial begin
    for (int t = 0; t < 500; t++) begin
      real g, c [3], a [4], col [4][3];
      g = $itor($urandom_range(1, 1000)) / 1000.0;
      gin = r2fx(g);
      for (int ch = 0; ch < 3; ch++) begin c[ch] = $itor($urandom_range(0, 500)) / 1000.0; cin[ch] = r2fx(c[ch]); end
      for (int i = 0; i < 4; i++) begin
        a[i] = $itor($urandom_range(4, 990)) / 1000.0;
        om[i] = r2fx(1.0 - a[i]);
        for (int ch = 0; ch < 3; ch++) begin col[i][ch] = $itor($urandom_range(0, 1000)) / 1000.0; pc[i][ch] = r2fx(a[i] * col[i][ch]); end
      end
      #1;
      for (int i = 0; i < 4; i++) begin
        near("gamma_i", fx2r(gl[i]), g);
        for (int ch = 0; ch < 3; ch++) begin
          c[ch] = c[ch] + g * a[i] * col[i][ch];
          near("C_i", fx2r(cl[i][ch]), c[ch]);
        end
        g = g * (1.0 - a[i]);
      end
      near("gamma_out", fx2r(gout), g);
      for (int ch = 0; ch < 3; ch++) near("c_out", fx2r(cout[ch]), c[ch]);
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
