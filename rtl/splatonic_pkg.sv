// splatonic_pkg -- types and constants shared by the sparse 3DGS-SLAM accelerator.
//
// Every datapath value is a signed fixed-point number of FX_W bits with FX_F fraction
// bits (Q23.24). SLAM Gaussians are centimetre-sized, so variances of 1e-4 m^2 must
// keep several significant bits; 24 fraction bits give that while 23 integer bits hold
// pixel coordinates and squared pixel distances. The number format is this design's
// choice. The unit counts (8 projection units, 4 alpha-filter units each, 4 sorting
// units and rasterization engines, 2x2 render and reverse render units per engine,
// 4 aggregation channels), the 64-entry exponential table and the 16x16 tracking /
// 4x4 mapping tile sizes follow the published configuration.
package splatonic_pkg;

  localparam int FX_W = 48;            // fixed-point word
  localparam int FX_F = 24;            // fraction bits
  localparam int GID_W = 20;           // Gaussian id (up to 1M Gaussians)
  localparam int COORD_W = 16;         // pixel coordinate
  localparam int N_GRAD = 9;           // r,g,b, opacity, mean x,y, conic a,b,c

  localparam int N_PROJ   = 8;         // projection units
  localparam int N_AFILT  = 4;         // alpha-filter units per projection unit
  localparam int N_ENGINE = 4;         // sorting units = rasterization engines
  localparam int N_RU     = 4;         // 2x2 render units (and reverse render units)
  localparam int AGG_CH   = 4;         // aggregation channels
  localparam int EXP_LUT_N = 64;       // exponential lookup table entries
  localparam int W_T = 16;             // tracking tile edge
  localparam int W_M = 4;              // mapping tile edge

  typedef logic signed [FX_W-1:0] fx_t;
  typedef logic [GID_W-1:0]        gid_t;
  typedef logic [COORD_W-1:0]      coord_t;

  localparam fx_t FX_ONE  = fx_t'(1) <<< FX_F;
  localparam fx_t FX_HALF = fx_t'(1) <<< (FX_F-1);
  // alpha threshold alpha* = 1/255 and alpha clamp 0.99, as in the original 3DGS
  localparam fx_t ALPHA_MIN = fx_t'((64'sd1 <<< FX_F) / 255);
  localparam fx_t ALPHA_MAX = fx_t'(((64'sd1 <<< FX_F) * 99) / 100);

  // index of each gradient in a grad_t
  localparam int G_R = 0, G_G = 1, G_B = 2, G_OPA = 3, G_MX = 4, G_MY = 5,
                 G_CA = 6, G_CB = 7, G_CC = 8;

  // gradient vector, element k is a signed fx_t (cast with fx_t'() before arithmetic)
  typedef logic [N_GRAD-1:0][FX_W-1:0] grad_t;

  // 3D Gaussian as stored in DRAM
  typedef struct packed {
    gid_t gid;
    fx_t  mx, my, mz;                        // world-space mean
    fx_t  s00, s01, s02, s11, s12, s22;      // 3D covariance (upper triangle)
    fx_t  opa;                               // opacity in [0,1]
    fx_t  cr, cg, cb;                        // color
  } gauss3d_t;

  // camera: world-to-camera rotation (row major), translation and intrinsics
  typedef struct packed {
    fx_t r00, r01, r02, r10, r11, r12, r20, r21, r22;
    fx_t tx, ty, tz;
    fx_t fx, fy, cx, cy;
  } pose_t;

  // projected (2D) Gaussian
  typedef struct packed {
    gid_t gid;
    fx_t  u, v;                              // image-space mean
    fx_t  depth;
    fx_t  ca, cb, cc;                        // conic = inverse 2D covariance
    fx_t  opa;
    fx_t  cr, cg, cb_;                       // color
    coord_t xmin, xmax, ymin, ymax;          // bounding box, inclusive, clipped
  } gauss2d_t;

  // one pixel-Gaussian pair after the alpha-check: the Gaussian's data that the
  // render and reverse render units need travel with the entry
  typedef struct packed {
    gid_t gid;
    fx_t  depth;
    fx_t  alpha;                             // opacity * exp(power), clamped
    fx_t  gexp;                              // exp(power)
    fx_t  dx, dy;                            // pixel - mean
    fx_t  ca, cb, cc;
    fx_t  cr, cg, cb_;
  } isect_t;

  typedef struct packed {
    coord_t x, y;
  } pixel_t;

  // one entry of a pixel's partial gradient list: (Gaussian id, partial gradient)
  typedef struct packed {
    gid_t  gid;
    grad_t grad;
  } gtuple_t;

  // fixed-point multiply (truncating toward -inf)
  function automatic fx_t fx_mul(fx_t a, fx_t b);
    logic signed [2*FX_W-1:0] p;
    p = a * b;
    return fx_t'(p >>> FX_F);
  endfunction

  // fixed-point divide; divide by zero returns 0
  function automatic fx_t fx_div(fx_t a, fx_t b);
    logic signed [2*FX_W-1:0] n;
    if (b == '0) return '0;
    n = (2*FX_W)'(a) <<< FX_F;
    return fx_t'(n / (2*FX_W)'(b));
  endfunction

  function automatic fx_t fx_abs(fx_t a);
    return a[FX_W-1] ? -a : a;
  endfunction

  // integer square root of an unsigned value (bitwise restoring method)
  function automatic logic [FX_W-1:0] isqrt(logic [2*FX_W-1:0] x);
    logic [2*FX_W-1:0] rem, root, trial;
    rem = x; root = '0;
    for (int i = FX_W-1; i >= 0; i--) begin
      trial = root + ((2*FX_W)'(1) << (2*i));
      if (rem >= trial) begin
        rem  = rem - trial;
        root = (root >> 1) + ((2*FX_W)'(1) << (2*i));
      end else begin
        root = root >> 1;
      end
    end
    return root[FX_W-1:0];
  endfunction

  // fixed-point square root of a non-negative value
  function automatic fx_t fx_sqrt(fx_t a);
    if (a[FX_W-1]) return '0;
    return fx_t'(isqrt((2*FX_W)'(a) << FX_F));
  endfunction

endpackage
