// render_unit -- forward rendering of one pixel-Gaussian pair.
//
// Because alpha was already checked (and computed) during projection, the render unit
// carries no alpha-check logic: it only forms the transmittance factor (1 - alpha)
// ("T-Comp.") and the partial color alpha * c ("Partial Color") that the color
// reduction unit accumulates. Invalid lanes (past the end of a list) output the
// neutral values 1 and 0. Purely combinational.
module render_unit
  import splatonic_pkg::*;
(
  input  logic   valid,
  input  isect_t e,
  output fx_t    one_m_alpha,
  output fx_t    pc [3]
);
  always_comb begin
    one_m_alpha = valid ? FX_ONE - e.alpha : FX_ONE;
    pc[0] = valid ? fx_mul(e.alpha, e.cr)  : '0;
    pc[1] = valid ? fx_mul(e.alpha, e.cg)  : '0;
    pc[2] = valid ? fx_mul(e.alpha, e.cb_) : '0;
  end
endmodule
