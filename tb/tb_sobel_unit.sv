// tb_sobel_unit -- random 3x3 windows; Gx, Gy and Gx^2+Gy^2 are recomputed in real
// arithmetic from the Sobel kernels and compared with the unit's outputs.
module tb_sobel_unit;
  import splatonic_pkg::*;
  int checks = 0, failures = 0;
  fx_t win [3][3];
  fx_t gx, gy, mag2;
  real w [3][3];
  sobel_unit dut (.win(win), .gx(gx), .gy(gy), .mag2(mag2));
  function automatic real fx2r(fx_t f); return real'(longint'(f)) / (2.0 ** FX_F); endfunction
  initial begin
    for (int t = 0; t < 500; t++) begin
      real ex, ey;
      for (int r = 0; r < 3; r++) for (int c = 0; c < 3; c++) begin
        w[r][c] = $itor($urandom_range(0, 255)) / 256.0;
        win[r][c] = fx_t'(longint'(w[r][c] * (2.0 ** FX_F)));
      end
      #1;
      ex = (w[0][2] + 2*w[1][2] + w[2][2]) - (w[0][0] + 2*w[1][0] + w[2][0]);
      ey = (w[2][0] + 2*w[2][1] + w[2][2]) - (w[0][0] + 2*w[0][1] + w[0][2]);
      checks += 3;
      if (fx2r(gx) != ex) begin failures++; $display("FAIL gx %f %f", fx2r(gx), ex); end
      if (fx2r(gy) != ey) begin failures++; $display("FAIL gy %f %f", fx2r(gy), ey); end
      if (fx2r(mag2) - (ex*ex + ey*ey) > 1e-6 || (ex*ex + ey*ey) - fx2r(mag2) > 1e-6) begin
        failures++; $display("FAIL mag2 %f %f", fx2r(mag2), ex*ex + ey*ey);
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
