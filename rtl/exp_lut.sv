// exp_lut -- 64-entry lookup table for exp(x), x <= 0, used by the alpha-check.
//
// The exponential in alpha = opacity * exp(power) is the expensive part of the
// alpha-check; the design replaces it by a small table, as published (64 entries).
// The table covers (-EXP_LUT_N/STEPS_PER_UNIT, 0] = (-8, 0] with a step of 1/8: an
// exponent x selects entry k = floor(-x * 8) and gets exp(-(k + 1/2)/8), the value at
// the middle of its step. Exponents at or below -8 give 0 (exp(-8) * 1 < 1/255, so
// such a Gaussian fails the alpha-check anyway). The range, spacing and midpoint
// rounding are this design's choices. The entries are computed at elaboration by an
// integer constant function: entry k = exp(-1/16) * exp(-1/8)^k.
// Purely combinational: value follows power in the same cycle.
module exp_lut
  import splatonic_pkg::*;
#(
  parameter int N = EXP_LUT_N,
  parameter int STEPS_PER_UNIT = 8
) (
  input  fx_t power,     // exponent, expected <= 0
  output fx_t value      // approximation of exp(power)
);
  // exp(-1/8) and exp(-1/16) in Q.24, rounded
  localparam longint E_STEP = 64'd14805841;   // round(exp(-1/8) * 2^24)
  localparam longint E_HALF = 64'd15760736;   // round(exp(-1/16) * 2^24)

  typedef fx_t table_t [N];

  function automatic table_t build_table();
    table_t t;
    longint acc;
    acc = E_HALF;
    for (int k = 0; k < N; k++) begin
      t[k] = fx_t'(acc <<< (FX_F - 24));
      acc  = (acc * E_STEP + (64'd1 << 23)) >>> 24;
    end
    return t;
  endfunction

  localparam table_t TABLE = build_table();

  // k = floor(-power * STEPS_PER_UNIT)
  fx_t   neg_scaled;
  logic  out_of_range;
  logic [$clog2(N)-1:0] idx;

  always_comb begin
    neg_scaled   = (-power) * STEPS_PER_UNIT;
    out_of_range = (neg_scaled >>> FX_F) >= N;
    idx          = out_of_range ? '0 : neg_scaled[FX_F +: $clog2(N)];
    if (power > 0)          value = FX_ONE;      // not expected; saturate at 1
    else if (out_of_range)  value = '0;
    else                    value = TABLE[idx];
  end
endmodule
