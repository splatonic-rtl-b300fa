// sobel_unit -- Sobel gradients of a 3x3 luminance window for texture-weighted sampling.
//
// Mapping samples texture-rich pixels with probability proportional to the gradient
// magnitude w_R = sqrt(Gx^2 + Gy^2), where Gx and Gy are Sobel responses. This unit
// computes Gx, Gy with the standard 3x3 kernels and mag2 = Gx^2 + Gy^2 (the square is
// kept: the sampler only compares magnitudes, so the square root is unnecessary).
// win[r][c] is row r (top to bottom), column c (left to right). The window is
// supplied by the feeder; line buffering is outside this unit. Purely combinational.
module sobel_unit
  import splatonic_pkg::*;
(
  input  fx_t win [3][3],
  output fx_t gx,
  output fx_t gy,
  output fx_t mag2          // Gx^2 + Gy^2 in the same Q format
);
  always_comb begin
    gx = (win[0][2] + 2*win[1][2] + win[2][2]) - (win[0][0] + 2*win[1][0] + win[2][0]);
    gy = (win[2][0] + 2*win[2][1] + win[2][2]) - (win[0][0] + 2*win[0][1] + win[0][2]);
    mag2 = fx_mul(gx, gx) + fx_mul(gy, gy);
  end
endmodule
