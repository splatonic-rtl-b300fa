// alpha_filter_unit -- preemptive alpha-check of one projected Gaussian at one pixel.
//
// Part of the projection unit. Three steps, as drawn in the published block diagram:
//  1. "Rect. include?": is the pixel inside the Gaussian's bounding box?
//  2. "alpha-check": power = -(a dx^2 + c dy^2)/2 - b dx dy with d = pixel - mean,
//     alpha = opacity * exp(power) through the 64-entry table, kept if alpha >= 1/255.
//  3. "Concat" or "None": a surviving pair leaves as a pixel-Gaussian entry carrying
//     depth, alpha, exp(power), d and the Gaussian's conic and color, so later stages
//     never repeat the check; otherwise hit is low.
// alpha is clamped to 0.99 and the threshold is 1/255, as in the original 3DGS; the
// paper names the threshold alpha* without a value. Purely combinational.
module alpha_filter_unit
  import splatonic_pkg::*;
(
  input  gauss2d_t g,
  input  pixel_t   pix,
  input  logic     pix_valid,
  output logic     hit,        // entry is valid (not "None")
  output logic     in_rect,    // bounding-box test result, for statistics
  output isect_t   entry
);
  fx_t dx, dy, power, gexp, alpha_raw, alpha;

  always_comb begin
    in_rect = pix_valid && pix.x >= g.xmin && pix.x <= g.xmax &&
              pix.y >= g.ymin && pix.y <= g.ymax;
    // pixel centre convention: integer coordinate
    dx = (fx_t'(pix.x) <<< FX_F) - g.u;
    dy = (fx_t'(pix.y) <<< FX_F) - g.v;
    power = -(fx_mul(FX_HALF, fx_mul(g.ca, fx_mul(dx, dx)) + fx_mul(g.cc, fx_mul(dy, dy))))
            - fx_mul(g.cb, fx_mul(dx, dy));
  end

  exp_lut u_exp (.power(power), .value(gexp));

  always_comb begin
    alpha_raw = fx_mul(g.opa, gexp);
    alpha     = (alpha_raw > ALPHA_MAX) ? ALPHA_MAX : alpha_raw;
    hit       = in_rect && (power <= 0) && (alpha >= ALPHA_MIN);
    entry.gid   = g.gid;
    entry.depth = g.depth;
    entry.alpha = alpha;
    entry.gexp  = gexp;
    entry.dx    = dx;
    entry.dy    = dy;
    entry.ca    = g.ca;
    entry.cb    = g.cb;
    entry.cc    = g.cc;
    entry.cr    = g.cr;
    entry.cg    = g.cg;
    entry.cb_   = g.cb_;
  end
endmodule
