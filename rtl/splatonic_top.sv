// splatonic_top -- sparse-pixel 3DGS-SLAM training accelerator, one batch of tiles per run.
//
// One run (start .. done) performs a full training iteration for a batch of n_tiles
// image tiles: the forward pass renders one sampled pixel per tile (plus, in mapping,
// the unseen pixels of those tiles), the backward pass produces per-Gaussian gradients
// and the camera-pose gradient. The phases run in order:
//   SAMPLE  sampling_unit fills the sampled-pixel list (tracking: random pixel per 16x16
//           tile; mapping: texture-weighted pixel per 4x4 tile from the map_* stream,
//           through sobel_unit, plus a separate unseen-pixel list).
//   PROJ    n_gauss Gaussians arrive on g_* and are dealt to N_PROJ projection units
//           (the first free one takes the next Gaussian). Each projects, indexes the
//           sampled pixels under its bounding box and alpha-checks them; surviving
//           pixel-Gaussian entries are appended, one per cycle through a round-robin
//           arbiter, to the intersection table.
//   RAST    N_ENG lanes, each a sorting unit plus a rasterization engine, take table
//           rows l, l+N_ENG, ...: the row is sorted by depth, rendered forward, its loss
//           taken against the reference color (ref_pix -> ref_rgb), rendered backward,
//           and its partial gradients streamed into aggregation channel l.
//   FLUSH   the aggregation unit writes its cache back to DRAM (mem_wr_*).
//   REPROJ  the host streams the same n_gauss Gaussians again on g_*; for each one the
//           accumulated gradient is read from DRAM (mem_rd_*) and the re-projection unit
//           emits the world-space gradient (gw_*) and accumulates the pose gradient.
// The block structure (projection units with alpha-filter units, sorting units,
// rasterization engines with render / color reduction / reverse render units and the
// forward cache, aggregation unit, re-projection unit) and all unit counts follow the
// published architecture. Running the phases one after another for one batch, rather
// than as a stage pipeline, is this design's simplification, as are the batch size and
// the host-side replay of the Gaussian stream. DRAM is outside: the mem_* port reads and
// writes accumulated gradients by Gaussian id; a read is answered on mem_rsp_* later.
module splatonic_top
  import splatonic_pkg::*;
#(
  parameter int MAX_PIX    = 16,
  parameter int MAX_UNSEEN = 16,
  parameter int MAX_K      = 256,
  parameter int NP         = N_PROJ,
  parameter int NE         = N_ENGINE
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  logic   mode,              // 0 tracking, 1 mapping
  input  logic [31:0] seed,
  input  pose_t  pose,
  input  coord_t img_w, img_h,
  input  coord_t start_tx, start_ty, tiles_x,
  input  logic [$clog2(MAX_PIX+1)-1:0] n_tiles,
  input  logic [31:0] n_gauss,
  output logic   busy,
  output logic   done,
  // Gaussian stream (twice per run: projection and re-projection)
  input  logic     g_valid,
  output logic     g_ready,
  input  gauss3d_t g_in,
  // mapping pre-pass stream: 3x3 luminance window and Gamma_final per pixel
  input  logic   map_valid,
  output logic   map_ready,
  input  fx_t    map_win [3][3],
  input  fx_t    map_gamma,
  // reference image lookup, one per lane, answered combinationally
  output pixel_t ref_pix [NE],
  input  fx_t    ref_rgb [NE][3],
  // per-pixel results
  output logic   res_valid [NE],
  output pixel_t res_pix   [NE],
  output fx_t    res_color [NE][3],
  output fx_t    res_gamma [NE],
  output fx_t    res_loss  [NE],
  // DRAM port for accumulated gradients
  output logic   mem_rd_valid,
  input  logic   mem_rd_ready,
  output gid_t   mem_rd_gid,
  input  logic   mem_rsp_valid,
  input  grad_t  mem_rsp_data,
  output logic   mem_wr_valid,
  input  logic   mem_wr_ready,
  output gid_t   mem_wr_gid,
  output grad_t  mem_wr_data,
  // world-space gradients and pose gradient
  output logic   gw_valid,
  output gid_t   gw_gid,
  output fx_t    gw_dmean [3],
  output grad_t  gw_grad,
  output fx_t    dl_dr [3][3],
  output fx_t    dl_dt [3],
  // statistics
  output logic [31:0] st_culled,
  output logic [31:0] st_checked,
  output logic [31:0] st_rejected,
  output logic [31:0] st_entries,
  output logic [31:0] st_arb_wait,
  output logic [31:0] st_overflow,
  output logic [15:0] st_unseen_dropped,
  output logic [$clog2(MAX_UNSEEN+1)-1:0] st_unseen,
  output logic [31:0] st_merged,
  output logic [31:0] st_sb_hit,
  output logic [31:0] st_fills,
  output logic [31:0] st_writebacks,
  output logic [31:0] st_agg_stall
);
  localparam int ROWS = MAX_PIX + MAX_UNSEEN;
  localparam int RW   = $clog2(ROWS);
  localparam int KW   = $clog2(MAX_K+1);

  typedef enum logic [2:0] {P_IDLE, P_SAMPLE, P_PROJ, P_RAST, P_FLUSH, P_REPROJ, P_DONE} phase_t;
  phase_t ph;
  logic   mode_q;
  logic   s_started;
  logic [31:0] g_cnt;

  // ---------------- sampling ----------------
  fx_t    mag2, sgx, sgy;
  logic   s_start, s_pix_we, s_un_we, s_done;
  logic [$clog2(MAX_PIX)-1:0]    s_pix_idx;
  logic [$clog2(MAX_UNSEEN)-1:0] s_un_idx;
  pixel_t s_pix, s_un;
  logic [$clog2(MAX_UNSEEN+1)-1:0] n_unseen;
  logic   s_busy;
  pixel_t pix_buf [MAX_PIX];
  pixel_t un_buf  [MAX_UNSEEN];
  logic [$clog2(MAX_PIX+1)-1:0] n_pix_q;

  sobel_unit u_sobel (.win(map_win), .gx(sgx), .gy(sgy), .mag2(mag2));

  sampling_unit #(.MAX_PIX(MAX_PIX), .MAX_UNSEEN(MAX_UNSEEN)) u_samp (
    .clk, .rst_n, .start(s_start), .mode(mode_q), .seed, .start_tx, .start_ty, .tiles_x,
    .img_w, .img_h, .n_tiles, .map_valid, .map_ready, .map_mag2(mag2), .map_gamma,
    .pix_we(s_pix_we), .pix_idx(s_pix_idx), .pix(s_pix), .un_we(s_un_we), .un_idx(s_un_idx),
    .un_pix(s_un), .n_unseen, .unseen_dropped(st_unseen_dropped), .busy(s_busy), .done(s_done));
  assign st_unseen = n_unseen;

  always_ff @(posedge clk) begin
    if (s_pix_we) pix_buf[s_pix_idx] <= s_pix;
    if (s_un_we)  un_buf[s_un_idx]   <= s_un;
  end

  // ---------------- projection ----------------
  logic   pu_gv [NP], pu_gr [NP], pu_ev [NP], pu_er [NP], pu_idle [NP];
  logic [RW-1:0] pu_row [NP];
  isect_t pu_ent [NP];
  logic [$clog2(MAX_PIX)-1:0]    pu_praddr [NP][N_AFILT];
  pixel_t                        pu_prdata [NP][N_AFILT];
  logic [$clog2(MAX_UNSEEN)-1:0] pu_uraddr [NP][N_AFILT];
  pixel_t                        pu_urdata [NP][N_AFILT];
  logic [31:0] pu_culled [NP], pu_checked [NP], pu_rejected [NP];
  logic [3:0]  tile_shift;
  logic        proj_sel_ok;
  int          proj_sel;

  assign tile_shift = mode_q ? 4'($clog2(W_M)) : 4'($clog2(W_T));

  always_comb begin
    proj_sel_ok = 1'b0; proj_sel = 0;
    for (int u = NP - 1; u >= 0; u--)
      if (pu_gr[u]) begin proj_sel_ok = 1'b1; proj_sel = u; end
  end

  for (genvar u = 0; u < NP; u++) begin : g_pu
    assign pu_gv[u] = (ph == P_PROJ) && g_valid && (g_cnt < n_gauss) && proj_sel_ok && (proj_sel == u);
    always_comb
      for (int l = 0; l < N_AFILT; l++) begin
        pu_prdata[u][l] = pix_buf[pu_praddr[u][l]];
        pu_urdata[u][l] = un_buf[pu_uraddr[u][l]];
      end
    projection_unit #(.MAX_PIX(MAX_PIX), .MAX_UNSEEN(MAX_UNSEEN)) u_pu (
      .clk, .rst_n, .pose, .img_w, .img_h, .tile_shift, .start_tx, .start_ty, .tiles_x,
      .n_pix(n_pix_q), .n_unseen, .g_valid(pu_gv[u]), .g_ready(pu_gr[u]), .g_in,
      .pix_raddr(pu_praddr[u]), .pix_rdata(pu_prdata[u]),
      .un_raddr(pu_uraddr[u]), .un_rdata(pu_urdata[u]),
      .e_valid(pu_ev[u]), .e_ready(pu_er[u]), .e_row(pu_row[u]), .e_data(pu_ent[u]),
      .idle(pu_idle[u]), .cnt_culled(pu_culled[u]), .cnt_checked(pu_checked[u]),
      .cnt_rejected(pu_rejected[u]));
  end

  // round-robin arbiter into the table's single write port
  logic [$clog2(NP)-1:0] rr;
  logic   arb_ok;
  int     arb_sel;
  int     n_req;
  always_comb begin
    arb_ok = 1'b0; arb_sel = 0; n_req = 0;
    for (int k = NP - 1; k >= 0; k--) begin
      automatic int u = (32'(rr) + k) % NP;
      if (pu_ev[u]) begin arb_ok = 1'b1; arb_sel = u; n_req++; end
    end
    for (int u = 0; u < NP; u++) pu_er[u] = arb_ok && (arb_sel == u);
  end

  // ---------------- intersection table ----------------
  logic [RW-1:0]          t_rrow [NE];
  logic [$clog2(MAX_K)-1:0] t_ridx [NE];
  isect_t                 t_rdata [NE];
  logic [KW-1:0]          t_rcnt [NE];
  logic                   t_clear;

  isect_table #(.ROWS(ROWS), .MAX_K(MAX_K), .N_RD(NE)) u_tab (
    .clk, .rst_n, .clear(t_clear), .we(arb_ok), .wrow(pu_row[arb_sel]), .wdata(pu_ent[arb_sel]),
    .rrow(t_rrow), .ridx(t_ridx), .rdata(t_rdata), .rcnt(t_rcnt), .overflow(st_overflow));

  // ---------------- lanes: sorting unit + rasterization engine ----------------
  typedef enum logic [2:0] {L_IDLE, L_LOAD, L_START, L_RUN, L_DONE} lstate_t;
  lstate_t ls [NE];
  logic [RW:0]   lk [NE];              // logical row
  logic [KW-1:0] lidx [NE];
  logic          so_clear [NE], so_valid [NE];
  isect_t        so_list [NE][MAX_K];
  logic [KW-1:0] so_cnt [NE];
  logic          re_start [NE], re_busy [NE], re_done [NE];
  logic          ag_v [NE];
  gtuple_t       ag_d [NE];
  logic          ag_ready;
  logic [RW:0]   n_rows;
  logic          lanes_done;

  assign n_rows = (RW+1)'(n_pix_q) + (RW+1)'(n_unseen);

  function automatic logic [RW-1:0] phys_row(logic [RW:0] k, logic [$clog2(MAX_PIX+1)-1:0] np);
    return (32'(k) < 32'(np)) ? RW'(k) : RW'(MAX_PIX + 32'(k) - 32'(np));
  endfunction

  for (genvar l = 0; l < NE; l++) begin : g_lane
    assign t_rrow[l] = phys_row(lk[l], n_pix_q);
    assign t_ridx[l] = lidx[l][$clog2(MAX_K)-1:0];
    assign so_valid[l] = (ls[l] == L_LOAD) && (lidx[l] < t_rcnt[l]);
    assign re_start[l] = (ls[l] == L_START);
    assign ref_pix[l] = (32'(lk[l]) < 32'(n_pix_q)) ? pix_buf[lk[l][$clog2(MAX_PIX)-1:0]]
                                                    : un_buf[$clog2(MAX_UNSEEN)'(32'(lk[l]) - 32'(n_pix_q))];

    sorting_unit #(.MAX_K(MAX_K)) u_sort (.clk, .rst_n, .clear(so_clear[l]), .in_valid(so_valid[l]),
      .in_data(t_rdata[l]), .list(so_list[l]), .count(so_cnt[l]));

    raster_engine #(.MAX_K(MAX_K)) u_eng (.clk, .rst_n, .start(re_start[l]), .busy(re_busy[l]),
      .done(re_done[l]), .list(so_list[l]), .count(so_cnt[l]), .ref_c(ref_rgb[l]),
      .g_valid(ag_v[l]), .g_ready(ag_ready), .g_data(ag_d[l]),
      .color(res_color[l]), .gamma_final(res_gamma[l]), .loss(res_loss[l]));

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        ls[l] <= L_IDLE; lk[l] <= '0; lidx[l] <= '0; so_clear[l] <= 1'b1;
        res_valid[l] <= 1'b0; res_pix[l] <= '0;
      end else begin
        so_clear[l]  <= 1'b0;
        res_valid[l] <= 1'b0;
        case (ls[l])
          L_IDLE: if (ph == P_RAST) begin
            lk[l] <= (RW+1)'(l);
            if (l < 32'(n_rows)) begin
              lidx[l] <= '0; so_clear[l] <= 1'b1; ls[l] <= L_LOAD;
            end else ls[l] <= L_DONE;
          end
          L_LOAD: if (!so_clear[l]) begin
            if (lidx[l] < t_rcnt[l]) lidx[l] <= lidx[l] + 1'b1;
            else ls[l] <= L_START;
          end
          L_START: ls[l] <= L_RUN;
          L_RUN: if (re_done[l]) begin
            res_valid[l] <= 1'b1; res_pix[l] <= ref_pix[l];
            if (32'(lk[l]) + NE < 32'(n_rows)) begin
              lk[l] <= (RW+1)'(32'(lk[l]) + NE);
              lidx[l] <= '0; so_clear[l] <= 1'b1; ls[l] <= L_LOAD;
            end else ls[l] <= L_DONE;
          end
          L_DONE: if (ph != P_RAST) ls[l] <= L_IDLE;
          default: ls[l] <= L_IDLE;
        endcase
      end
    end
  end

  always_comb begin
    lanes_done = 1'b1;
    for (int l = 0; l < NE; l++) if (ls[l] != L_DONE) lanes_done = 1'b0;
  end

  // ---------------- aggregation ----------------
  logic  ag_flush, ag_flush_done, ag_idle;
  logic  ag_rd_valid, ag_rd_ready, ag_rsp_valid;
  gid_t  ag_rd_gid;

  aggregation_unit u_agg (.clk, .rst_n, .t_valid(ag_v), .t_data(ag_d), .t_ready(ag_ready),
    .mem_rd_valid(ag_rd_valid), .mem_rd_ready(ag_rd_ready), .mem_rd_gid(ag_rd_gid),
    .mem_rsp_valid(ag_rsp_valid), .mem_rsp_data, .mem_wr_valid, .mem_wr_ready, .mem_wr_gid,
    .mem_wr_data, .flush(ag_flush), .flush_done(ag_flush_done), .idle(ag_idle),
    .cnt_merged(st_merged), .cnt_sb_hit(st_sb_hit), .cnt_fills(st_fills),
    .cnt_writebacks(st_writebacks), .cnt_stall(st_agg_stall));

  // ---------------- re-projection ----------------
  typedef enum logic [1:0] {R_TAKE, R_REQ, R_WAIT} rstate_t;
  rstate_t  rs;
  gauss3d_t rg;
  logic     rp_valid, rp_clear;

  reprojection_unit u_rp (.clk, .rst_n, .clear(rp_clear), .in_valid(rp_valid), .g3(rg),
    .acc(mem_rsp_data), .pose, .out_valid(gw_valid), .out_gid(gw_gid), .dmean_w(gw_dmean),
    .grad_out(gw_grad), .dl_dr, .dl_dt);

  assign rp_valid     = (ph == P_REPROJ) && (rs == R_WAIT) && mem_rsp_valid;
  assign rp_clear     = (ph == P_IDLE) && start;
  assign ag_flush     = (ph == P_FLUSH);
  assign mem_rd_valid = (ph == P_REPROJ) ? (rs == R_REQ) : ag_rd_valid;
  assign mem_rd_gid   = (ph == P_REPROJ) ? rg.gid : ag_rd_gid;
  assign ag_rd_ready  = (ph != P_REPROJ) && mem_rd_ready;
  assign ag_rsp_valid = (ph != P_REPROJ) && mem_rsp_valid;

  // ---------------- phase control ----------------
  logic proj_idle;
  always_comb begin
    proj_idle = 1'b1;
    for (int u = 0; u < NP; u++) if (!pu_idle[u]) proj_idle = 1'b0;
  end

  assign g_ready = ((ph == P_PROJ) && (g_cnt < n_gauss) && proj_sel_ok) ||
                   ((ph == P_REPROJ) && (rs == R_TAKE) && (g_cnt < n_gauss));
  assign s_start = (ph == P_SAMPLE) && !s_started;
  assign t_clear = (ph == P_IDLE) && start;
  assign busy    = (ph != P_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph <= P_IDLE; mode_q <= 1'b0; g_cnt <= '0; n_pix_q <= '0; done <= 1'b0; rs <= R_TAKE;
      rg <= '0; rr <= '0; s_started <= 1'b0;
      st_culled <= '0; st_checked <= '0; st_rejected <= '0; st_entries <= '0; st_arb_wait <= '0;
    end else begin
      done <= 1'b0;
      if (arb_ok) begin
        rr <= $clog2(NP)'((arb_sel + 1) % NP);
        st_entries <= st_entries + 1;
        st_arb_wait <= st_arb_wait + 32'(n_req - 1);
      end
      case (ph)
        P_IDLE: if (start) begin
          ph <= P_SAMPLE; mode_q <= mode; g_cnt <= '0; n_pix_q <= '0; s_started <= 1'b0;
          st_entries <= '0; st_arb_wait <= '0;
        end
        P_SAMPLE: begin
          if (s_start) s_started <= 1'b1;
          if (s_done && s_started) begin n_pix_q <= n_tiles; ph <= P_PROJ; end
        end
        P_PROJ: begin
          if (g_valid && g_ready) g_cnt <= g_cnt + 1;
          if (g_cnt == n_gauss && proj_idle) ph <= P_RAST;
        end
        P_RAST: if (lanes_done && ag_idle) ph <= P_FLUSH;
        P_FLUSH: if (ag_flush_done) begin ph <= P_REPROJ; g_cnt <= '0; rs <= R_TAKE; end
        P_REPROJ: begin
          case (rs)
            R_TAKE: if (g_cnt == n_gauss) ph <= P_DONE;
                    else if (g_valid) begin rg <= g_in; g_cnt <= g_cnt + 1; rs <= R_REQ; end
            R_REQ:  if (mem_rd_ready) rs <= R_WAIT;
            R_WAIT: if (mem_rsp_valid) rs <= R_TAKE;
            default: rs <= R_TAKE;
          endcase
        end
        P_DONE: begin ph <= P_IDLE; done <= 1'b1; end
        default: ph <= P_IDLE;
      endcase
      // statistics over all projection units (sampled every cycle)
      begin
        automatic logic [31:0] a = '0, b = '0, c = '0;
        for (int u = 0; u < NP; u++) begin a += pu_culled[u]; b += pu_checked[u]; c += pu_rejected[u]; end
        st_culled <= a; st_checked <= b; st_rejected <= c;
      end
    end
  end
endmodule
