// tb_splatonic_pkg -- checks the fixed-point helpers of splatonic_pkg (multiply, divide,
// square root, absolute value) against real arithmetic on random operands.
module tb_splatonic_pkg;
  import splatonic_pkg::*;
  int checks = 0, failures = 0;
  function automatic fx_t r2fx(real r); return fx_t'(longint'(r * (2.0 ** FX_F))); endfunction
  function automatic real fx2r(fx_t f); return real'(longint'(f)) / (2.0 ** FX_F); endfunction
  task automatic chk(string what, real got, real exp, real tol);
    checks++;
    if (!(got - exp <= tol && exp - got <= tol)) begin
      failures++; $display("FAIL %s got %f exp %f", what, got, exp);
    end
  endtask
  initial begin
    for (int i = 0; i < 2000; i++) begin
      real a, b;
      a = ($itor($urandom_range(0, 2000000)) - 1000000.0) / 1000.0;
      b = ($itor($urandom_range(0, 2000000)) - 1000000.0) / 10000.0;
      chk("mul", fx2r(fx_mul(r2fx(a), r2fx(b))), a * b, 1e-4 + (a < 0 ? -a : a) * 1e-7 + (b < 0 ? -b : b) * 1e-5);
      if (b > 0.01 || b < -0.01)
        chk("div", fx2r(fx_div(r2fx(a), r2fx(b))), a / b, 1e-3 * (1.0 + (a / b < 0 ? -a / b : a / b)) * 0.01 + 1e-4);
      if (a >= 0) chk("sqrt", fx2r(fx_sqrt(r2fx(a))), $sqrt(a), 1e-5);
      chk("abs", fx2r(fx_abs(r2fx(a))), a < 0 ? -a : a, 1e-6);
    end
    chk("div0", fx2r(fx_div(r2fx(3.0), '0)), 0.0, 0.0);
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
