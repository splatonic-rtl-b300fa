// loss_unit -- per-pixel photometric loss and its gradient with respect to the color.
//
// L1 loss L = sum_ch |C_ch - R_ch| (the loss of SplaTAM-style tracking; the paper only
// says a per-pixel loss is computed, so the form is this design's choice) and
// dL/dC_ch = sign(C_ch - R_ch) (0 when equal). Purely combinational.
module loss_unit
  import splatonic_pkg::*;
(
  input  fx_t c [3],       // rendered color
  input  fx_t r [3],       // reference color
  output fx_t loss,
  output fx_t dldc [3]
);
  always_comb begin
    loss = '0;
    for (int ch = 0; ch < 3; ch++) begin
      loss = loss + fx_abs(c[ch] - r[ch]);
      dldc[ch] = (c[ch] > r[ch]) ? FX_ONE : (c[ch] < r[ch]) ? -FX_ONE : '0;
    end
  end
endmodule
