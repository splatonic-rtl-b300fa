// rev_render_unit -- backward pass of one pixel-Gaussian pair, without reductions.
//
// Uses the transmittance Gamma_i and prefix color C_i cached by the forward pass, so it
// needs no cross-unit reduction and every pair is independent:
//   "Inv. alpha"   inv    = 1 / (1 - alpha_i)
//   "Comp. dL/da"  dL/dalpha = sum_ch dL/dC_ch (Gamma_i c_ch - (C_final,ch - C_i,ch) inv)
//   "Comp. dL/dG"  dL/dc_ch  = Gamma_i alpha_i dL/dC_ch
//                  dL/dopacity = dL/dalpha * exp(power)
//                  g = dL/dalpha * alpha (= dL/dpower)
//                  dL/dmean_x = g (a dx + b dy),  dL/dmean_y = g (b dx + c dy)
//                  dL/dconic  = g (-dx^2/2, -dx dy, -dy^2/2)
// with d = pixel - mean and conic (a, b, c). These are the standard 3DGS gradients;
// the paper names the three steps. Gradients through the 0.99 alpha clamp are not
// zeroed (this design's simplification). Purely combinational.
module rev_render_unit
  import splatonic_pkg::*;
(
  input  logic   valid,
  input  isect_t e,
  input  fx_t    gamma_i,
  input  fx_t    c_i [3],
  input  fx_t    c_final [3],
  input  fx_t    dldc [3],
  output grad_t  grad
);
  fx_t inv, dlda, g, col [3];

  always_comb begin
    col[0] = e.cr; col[1] = e.cg; col[2] = e.cb_;
    inv  = fx_div(FX_ONE, FX_ONE - e.alpha);
    dlda = '0;
    for (int ch = 0; ch < 3; ch++)
      dlda = dlda + fx_mul(dldc[ch], fx_mul(gamma_i, col[ch]) - fx_mul(c_final[ch] - c_i[ch], inv));
    g = fx_mul(dlda, e.alpha);
    for (int ch = 0; ch < 3; ch++)
      grad[G_R + ch] = fx_mul(fx_mul(gamma_i, e.alpha), dldc[ch]);
    grad[G_OPA] = fx_mul(dlda, e.gexp);
    grad[G_MX]  = fx_mul(g, fx_mul(e.ca, e.dx) + fx_mul(e.cb, e.dy));
    grad[G_MY]  = fx_mul(g, fx_mul(e.cb, e.dx) + fx_mul(e.cc, e.dy));
    grad[G_CA]  = -fx_mul(g, fx_mul(FX_HALF, fx_mul(e.dx, e.dx)));
    grad[G_CB]  = -fx_mul(g, fx_mul(e.dx, e.dy));
    grad[G_CC]  = -fx_mul(g, fx_mul(FX_HALF, fx_mul(e.dy, e.dy)));
    if (!valid)
      for (int k = 0; k < N_GRAD; k++) grad[k] = '0;
  end
endmodule
