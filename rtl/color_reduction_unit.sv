// color_reduction_unit -- depth-ordered accumulation of N render units' outputs.
//
// Implements the color integration C = sum_i Gamma_i alpha_i c_i with
// Gamma_i = prod_{j<i} (1 - alpha_j) for a group of N consecutive Gaussians of the
// sorted list, starting from the running values gamma_in, c_in left by the previous
// group. For each lane it returns Gamma_i (transmittance in front of the Gaussian) and
// the prefix color C_i (contributions of Gaussians 1..i inclusive); these are the
// values the rasterization engine caches for the backward pass. gamma_out/c_out are
// the running values after the group. The chain is evaluated in one cycle (purely
// combinational); the published design does not describe this unit's insides.
module color_reduction_unit
  import splatonic_pkg::*;
#(
  parameter int N = N_RU
) (
  input  fx_t gamma_in,
  input  fx_t c_in [3],
  input  fx_t one_m_alpha [N],
  input  fx_t pc [N][3],
  output fx_t gamma_lane [N],
  output fx_t c_lane [N][3],
  output fx_t gamma_out,
  output fx_t c_out [3]
);
  always_comb begin
    automatic fx_t g = gamma_in;
    automatic fx_t c [3] = c_in;
    for (int i = 0; i < N; i++) begin
      gamma_lane[i] = g;
      for (int ch = 0; ch < 3; ch++) begin
        c[ch] = c[ch] + fx_mul(g, pc[i][ch]);
        c_lane[i][ch] = c[ch];
      end
      g = fx_mul(g, one_m_alpha[i]);
    end
    gamma_out = g;
    c_out = c;
  end
endmodule
