// sampling_unit -- adaptive sparse pixel sampling for one batch of tiles.
//
// Tracking (mode = 0): one pixel is drawn uniformly at random inside each W_T x W_T
// tile, one tile per cycle, so a batch of n_tiles tiles takes n_tiles cycles.
// Mapping (mode = 1): the unit consumes, over map_valid/map_ready, one record per
// pixel in tile-major order (W_M*W_M pixels of a tile, row by row, then the next
// tile). Each record carries the squared Sobel magnitude w_R^2 and the transmittance
// Gamma_final left after the mapping pre-pass. Per tile it keeps the pixel with the
// largest w_R^2 * r^2, r a fresh random fraction per pixel; this is the same choice
// as the largest w_R * r, the published weighting. Independently every pixel with
// Gamma_final > 0.5 ("unseen") is appended to a separate unseen list.
// The tile walk is row-major over the tile grid, starting at (start_tx, start_ty).
// Pixels outside the image are clamped to its last row/column.
// Random numbers: 32-bit xorshift generator (this design's choice), seeded at start.
// Outputs write the sampled-pixel list (pix_we/pix_idx/pix) and the unseen list
// (un_we/un_idx/un_pix); done pulses one cycle after the last write.
module sampling_unit
  import splatonic_pkg::*;
#(
  parameter int MAX_PIX    = 16,
  parameter int MAX_UNSEEN = 16,
  parameter int WT = W_T,
  parameter int WM = W_M
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  logic   mode,            // 0 tracking, 1 mapping
  input  logic [31:0] seed,
  input  coord_t start_tx, start_ty,
  input  coord_t tiles_x,         // tiles per image row
  input  coord_t img_w, img_h,
  input  logic [$clog2(MAX_PIX+1)-1:0] n_tiles,
  // mapping pixel stream
  input  logic   map_valid,
  output logic   map_ready,
  input  fx_t    map_mag2,
  input  fx_t    map_gamma,
  // sampled-pixel list writes
  output logic   pix_we,
  output logic [$clog2(MAX_PIX)-1:0] pix_idx,
  output pixel_t pix,
  // unseen list writes
  output logic   un_we,
  output logic [$clog2(MAX_UNSEEN)-1:0] un_idx,
  output pixel_t un_pix,
  output logic [$clog2(MAX_UNSEEN+1)-1:0] n_unseen,
  output logic [15:0] unseen_dropped,
  output logic   busy,
  output logic   done
);
  localparam int LWT = $clog2(WT);
  localparam int LWM = $clog2(WM);
  localparam int NPT = WM*WM;

  logic [31:0] rng, rng_n;
  logic        run, mode_q;
  coord_t      tx, ty;
  logic [$clog2(MAX_PIX+1)-1:0] tcnt, ntiles_q;
  logic [$clog2(NPT)-1:0] j;          // pixel within mapping tile
  fx_t         best_score;
  pixel_t      best_pix;

  function automatic logic [31:0] xorshift(logic [31:0] s);
    logic [31:0] x;
    x = s;
    x = x ^ (x << 13);
    x = x ^ (x >> 17);
    x = x ^ (x << 5);
    return x;
  endfunction

  function automatic coord_t clampc(logic [31:0] v, coord_t lim);
    return (v >= 32'(lim)) ? lim - 1'b1 : coord_t'(v);
  endfunction

  assign rng_n = xorshift(rng);
  assign busy  = run;

  // current mapping pixel coordinate and score
  pixel_t cur_pix;
  fx_t    r_fx, score;
  always_comb begin
    cur_pix.x = clampc(32'(tx) * WM + 32'(j[LWM-1:0]), img_w);
    cur_pix.y = clampc(32'(ty) * WM + 32'(j >> LWM), img_h);
    r_fx  = fx_t'(rng[31:16]) <<< (FX_F - 16);          // r in [0,1)
    score = fx_mul(map_mag2, fx_mul(r_fx, r_fx));
  end

  logic tile_last_pix;
  assign tile_last_pix = (j == NPT-1);
  assign map_ready = run && mode_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rng <= 32'h1; run <= 1'b0; mode_q <= 1'b0; tx <= '0; ty <= '0; tcnt <= '0;
      ntiles_q <= '0; j <= '0; best_score <= '0; best_pix <= '0;
      pix_we <= 1'b0; pix_idx <= '0; pix <= '0; un_we <= 1'b0; un_idx <= '0; un_pix <= '0;
      n_unseen <= '0; unseen_dropped <= '0; done <= 1'b0;
    end else begin
      pix_we <= 1'b0; un_we <= 1'b0; done <= 1'b0;
      if (start && !run) begin
        run <= (n_tiles != 0); done <= (n_tiles == 0);
        mode_q <= mode; rng <= (seed == 0) ? 32'h2545F491 : seed;
        tx <= start_tx; ty <= start_ty; tcnt <= '0; ntiles_q <= n_tiles; j <= '0;
        best_score <= -FX_ONE; n_unseen <= '0; unseen_dropped <= '0;
      end else if (run) begin
        if (!mode_q) begin
          // tracking: uniform random pixel in the tile
          rng <= rng_n;
          pix_we  <= 1'b1;
          pix_idx <= tcnt[$clog2(MAX_PIX)-1:0];
          pix.x   <= clampc(32'(tx) * WT + 32'(rng[LWT-1:0]), img_w);
          pix.y   <= clampc(32'(ty) * WT + 32'(rng[16 +: LWT]), img_h);
          tcnt <= tcnt + 1'b1;
          if (tx == tiles_x - 1'b1) begin tx <= '0; ty <= ty + 1'b1; end
          else tx <= tx + 1'b1;
          if (tcnt + 1'b1 == ntiles_q) begin run <= 1'b0; done <= 1'b1; end
        end else if (map_valid) begin
          // mapping: weighted choice plus unseen detection
          rng <= rng_n;
          if (map_gamma > FX_HALF) begin
            if (32'(n_unseen) < MAX_UNSEEN) begin
              un_we <= 1'b1; un_idx <= n_unseen[$clog2(MAX_UNSEEN)-1:0]; un_pix <= cur_pix;
              n_unseen <= n_unseen + 1'b1;
            end else begin
              unseen_dropped <= unseen_dropped + 1'b1;
            end
          end
          if (tile_last_pix) begin
            pix_we  <= 1'b1;
            pix_idx <= tcnt[$clog2(MAX_PIX)-1:0];
            pix     <= (score > best_score) ? cur_pix : best_pix;
            best_score <= -FX_ONE;
            j <= '0;
            tcnt <= tcnt + 1'b1;
            if (tx == tiles_x - 1'b1) begin tx <= '0; ty <= ty + 1'b1; end
            else tx <= tx + 1'b1;
            if (tcnt + 1'b1 == ntiles_q) begin run <= 1'b0; done <= 1'b1; end
          end else begin
            j <= j + 1'b1;
            if (score > best_score) begin best_score <= score; best_pix <= cur_pix; end
          end
        end
      end
    end
  end
endmodule
