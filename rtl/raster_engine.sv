// raster_engine -- forward and backward rendering of one sampled pixel.
//
// A rasterization engine owns N_RU render units, one color reduction unit and N_RU
// reverse render units (2x2 each in the published configuration) and renders one
// pixel at a time from its depth-sorted Gaussian list (list, count):
//   FWD   N_RU Gaussians per cycle: render units -> color reduction. Gamma_i and the
//         prefix color C_i of every Gaussian go into the on-chip forward cache
//         ("T values", "Prefix Colors"), so the backward pass needs no reduction.
//   LOSS  one cycle: final color, loss and dL/dC against the reference color ref_c.
//   BWD   N_RU Gaussians per cycle: reverse render units read the cache and write the
//         pixel's partial gradient list (gid, gradient).
//   OUT   the list streams out one tuple per cycle on g_valid/g_ready to the
//         aggregation channel of this engine.
// Timing for k Gaussians: ceil(k/N_RU) FWD cycles + 1 LOSS + ceil(k/N_RU) BWD cycles
// + k OUT cycles (without back-pressure), then done pulses; start is taken in IDLE.
// From the start cycle to done that is 2*ceil(k/N_RU) + k + 3 cycles; an empty list
// still spends one cycle in FWD and one in BWD. The cache holds MAX_K Gaussians of one pixel.
// Following the paper: the cache of Gamma_i and C_i, render units without alpha-check,
// reverse units without reduction. This design's choices: forward and backward of a
// pixel run back to back (the published double buffer that overlaps the next pixel's
// forward pass with this one's backward pass is not modelled), and the one-tuple-per-
// cycle output.
module raster_engine
  import splatonic_pkg::*;
#(
  parameter int MAX_K = 256,
  parameter int N     = N_RU
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  output logic   busy,
  output logic   done,
  input  isect_t list [MAX_K],
  input  logic [$clog2(MAX_K+1)-1:0] count,
  input  fx_t    ref_c [3],
  // partial gradient list output
  output logic    g_valid,
  input  logic    g_ready,
  output gtuple_t g_data,
  // results of the pixel, valid from done until the next start
  output fx_t    color [3],
  output fx_t    gamma_final,
  output fx_t    loss
);
  localparam int KW = $clog2(MAX_K+1);
  typedef enum logic [2:0] {S_IDLE, S_FWD, S_LOSS, S_BWD, S_OUT} state_t;
  state_t st;

  logic [KW-1:0] n, i;
  fx_t  gam_run, c_run [3];
  fx_t  refq [3], dldc_q [3];
  fx_t  t_buf [MAX_K];            // Gamma_i
  fx_t  c_buf [MAX_K][3];         // C_i
  gtuple_t gbuf [MAX_K];          // partial gradient list

  // ---------------- forward lanes ----------------
  logic   lv [N];
  isect_t le [N];
  fx_t    om [N];
  fx_t    pc [N][3];
  fx_t    gl [N];
  fx_t    cl [N][3];
  fx_t    g_next, c_next [3];
  grad_t  rg [N];

  always_comb
    for (int l = 0; l < N; l++) begin
      lv[l] = (32'(i) + l < 32'(n));
      le[l] = list[(32'(i) + l) % MAX_K];
    end

  for (genvar l = 0; l < N; l++) begin : g_ru
    render_unit u_ru (.valid(lv[l]), .e(le[l]), .one_m_alpha(om[l]), .pc(pc[l]));
    rev_render_unit u_rr (.valid(lv[l]), .e(le[l]),
                          .gamma_i(t_buf[(32'(i) + l) % MAX_K]),
                          .c_i(c_buf[(32'(i) + l) % MAX_K]),
                          .c_final(color), .dldc(dldc_q), .grad(rg[l]));
  end

  color_reduction_unit #(.N(N)) u_cr (.gamma_in(gam_run), .c_in(c_run), .one_m_alpha(om),
      .pc(pc), .gamma_lane(gl), .c_lane(cl), .gamma_out(g_next), .c_out(c_next));

  fx_t loss_c, dldc_c [3];
  loss_unit u_loss (.c(c_run), .r(refq), .loss(loss_c), .dldc(dldc_c));

  assign busy    = (st != S_IDLE);
  assign g_valid = (st == S_OUT) && (i < n);
  assign g_data  = gbuf[i[$clog2(MAX_K)-1:0]];

  always_ff @(posedge clk) begin
    if (st == S_FWD)
      for (int l = 0; l < N; l++)
        if (lv[l]) begin
          t_buf[(32'(i) + l) % MAX_K] <= gl[l];
          c_buf[(32'(i) + l) % MAX_K] <= cl[l];
        end
    if (st == S_BWD)
      for (int l = 0; l < N; l++)
        if (lv[l]) begin
          gbuf[(32'(i) + l) % MAX_K].gid  <= le[l].gid;
          gbuf[(32'(i) + l) % MAX_K].grad <= rg[l];
        end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; n <= '0; i <= '0; gam_run <= FX_ONE; done <= 1'b0;
      for (int ch = 0; ch < 3; ch++) begin
        c_run[ch] <= '0; refq[ch] <= '0; dldc_q[ch] <= '0; color[ch] <= '0;
      end
      gamma_final <= FX_ONE; loss <= '0;
    end else begin
      done <= 1'b0;
      case (st)
        S_IDLE: if (start) begin
          n <= count; i <= '0; gam_run <= FX_ONE; refq <= ref_c;
          for (int ch = 0; ch < 3; ch++) c_run[ch] <= '0;
          st <= S_FWD;
        end
        S_FWD: begin
          if (i < n) begin
            gam_run <= g_next; c_run <= c_next;
            i <= KW'(32'(i) + N);
          end
          if (32'(i) + N >= 32'(n)) st <= S_LOSS;
        end
        S_LOSS: begin
          color <= c_run; gamma_final <= gam_run; loss <= loss_c; dldc_q <= dldc_c;
          i <= '0; st <= S_BWD;
        end
        S_BWD: begin
          if (32'(i) + N >= 32'(n)) begin i <= '0; st <= S_OUT; end
          else i <= KW'(32'(i) + N);
        end
        S_OUT: begin
          if (i >= n) begin st <= S_IDLE; done <= 1'b1; end
          else if (g_ready) i <= i + 1'b1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
