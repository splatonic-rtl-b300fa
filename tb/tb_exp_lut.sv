// tb_exp_lut -- sweeps the exponent over (-9, 0] and compares every table output with
// exp() at the midpoint of its 1/8 step, computed in real arithmetic; exponents at or
// below -8 must give 0. Combinational block: one check per settled input.
module tb_exp_lut;
  import splatonic_pkg::*;
  int checks = 0, failures = 0;
  fx_t power, value;
  exp_lut dut (.power(power), .value(value));
  function automatic real fx2r(fx_t f); return real'(longint'(f)) / (2.0 ** FX_F); endfunction
  initial begin
    for (int i = 0; i <= 3000; i++) begin
      real p, e;
      int k;
      p = -$itor(i) * 0.003;
      power = fx_t'(longint'(p * (2.0 ** FX_F)));
      #1;
      k = $rtoi($floor(-fx2r(power) * 8.0));
      e = (k >= 64) ? 0.0 : $exp(-($itor(k) + 0.5) / 8.0);
      checks++;
      if (fx2r(value) - e > 1e-6 || e - fx2r(value) > 1e-6) begin
        failures++;
        if (failures < 10) $display("FAIL p=%f got %f exp %f", p, fx2r(value), e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
