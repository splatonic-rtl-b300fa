// tb_loss_unit -- random rendered and reference colors (including equal channels);
// checks the L1 loss and the sign gradient against real arithmetic.
module tb_loss_unit;
  import splatonic_pkg::*;
  int checks = 0, failures = 0;
  fx_t c [3], r [3], loss, d [3];
  loss_unit dut (.c(c), .r(r), .loss(loss), .dldc(d));
  function automatic fx_t r2fx(real x); return fx_t'(longint'(x * (2.0 ** FX_F))); endfunction
  function automatic real fx2r(fx_t f); return real'(longint'(f)) / (2.0 ** FX_F); endfunction
  initial begin
    for (int t = 0; t < 1000; t++) begin
      real cr [3], rr [3], l;
      l = 0;
      for (int ch = 0; ch < 3; ch++) begin
        cr[ch] = $itor($urandom_range(0, 20)) / 20.0; rr[ch] = $itor($urandom_range(0, 20)) / 20.0;
        c[ch] = r2fx(cr[ch]); r[ch] = r2fx(rr[ch]);
      end
      #1;
      for (int ch = 0; ch < 3; ch++) begin
        real dd; dd = fx2r(c[ch]) > fx2r(r[ch]) ? 1.0 : fx2r(c[ch]) < fx2r(r[ch]) ? -1.0 : 0.0;
        l += (fx2r(c[ch]) > fx2r(r[ch])) ? fx2r(c[ch]) - fx2r(r[ch]) : fx2r(r[ch]) - fx2r(c[ch]);
        checks++;
        if (fx2r(d[ch]) != dd) begin failures++; $display("FAIL grad"); end
      end
      checks++;
      if (fx2r(loss) - l > 1e-6 || l - fx2r(loss) > 1e-6) begin failures++; $display("FAIL loss %f %f", fx2r(loss), l); end
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
