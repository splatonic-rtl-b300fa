// tb_splatonic_top -- end-to-end test of the accelerator at its default sizes.
//
// Three runs (training iterations on one batch of 16 tiles):
//   1. tracking (16x16 tiles, random pixel per tile), 80 Gaussians;
//   2. mapping (4x4 tiles, texture-weighted pixel per tile from a random luminance and
//      transmittance stream, plus the unseen-pixel list), 80 Gaussians -- a mode switch;
//   3. tracking with 300 large Gaussians covering the whole batch, so that intersection
//      table rows overflow.
// For runs 1 and 2 every per-pixel result is checked against a real-number model: the
// Gaussians that cover the pixel are found with the stand-alone projection and
// alpha-filter datapaths, sorted by depth and alpha-blended; the L1 loss and the chain
// rule of the blending give each Gaussian's nine screen-space gradients, summed over all
// pixels. After the run the behavioural DRAM must hold those sums (it starts at zero),
// each re-projection output must carry the DRAM value of its Gaussian, and the pose
// translation gradient must equal the sum of the projected mean gradients.
// The DRAM model answers one read at a time after 3..12 cycles and applies random
// ready back-pressure on reads and writes; the Gaussian stream has random gaps.
// Mechanisms counted (each must occur at least once): culling, alpha rejection,
// table-arbiter wait, table overflow, unseen pixels, unseen-list overflow, same-cycle
// merge and scoreboard hit in aggregation, gradient fill and write-back, aggregation
// stall, DRAM back-pressure, Gaussian-input stall, tracking->mapping and
// mapping->tracking mode switches.
module tb_splatonic_top;
  import splatonic_pkg::*;
  localparam int NE = N_ENGINE, MP = 16, MU = 16, NGMAX = 300;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0, mode = 0, busy, done;
  logic [31:0] seed; pose_t pose; coord_t W, H, stx, sty, tiles_x; logic [4:0] n_tiles; logic [31:0] n_gauss;
  logic gv = 0, gr; gauss3d_t gin;
  logic mv = 0, mr; fx_t mwin [3][3]; fx_t mgam;
  pixel_t ref_pix [NE]; fx_t ref_rgb [NE][3];
  logic res_valid [NE]; pixel_t res_pix [NE]; fx_t res_color [NE][3], res_gamma [NE], res_loss [NE];
  logic rdv, rdr, rspv, wrv, wrr; gid_t rdg, wrg; grad_t rspd, wrd;
  logic gwv; gid_t gwg; fx_t gwm [3]; grad_t gwgr; fx_t dlr [3][3], dlt [3];
  logic [31:0] s_cul, s_chk, s_rej, s_ent, s_arb, s_ovf, s_mrg, s_hit, s_fil, s_wb, s_stl;
  logic [15:0] s_udrop; logic [4:0] s_un;
  splatonic_top dut (.clk, .rst_n, .start, .mode, .seed, .pose, .img_w(W), .img_h(H), .start_tx(stx),
    .start_ty(sty), .tiles_x, .n_tiles, .n_gauss, .busy, .done, .g_valid(gv), .g_ready(gr), .g_in(gin),
    .map_valid(mv), .map_ready(mr), .map_win(mwin), .map_gamma(mgam), .ref_pix, .ref_rgb, .res_valid,
    .res_pix, .res_color, .res_gamma, .res_loss, .mem_rd_valid(rdv), .mem_rd_ready(rdr), .mem_rd_gid(rdg),
    .mem_rsp_valid(rspv), .mem_rsp_data(rspd), .mem_wr_valid(wrv), .mem_wr_ready(wrr), .mem_wr_gid(wrg),
    .mem_wr_data(wrd), .gw_valid(gwv), .gw_gid(gwg), .gw_dmean(gwm), .gw_grad(gwgr), .dl_dr(dlr), .dl_dt(dlt),
    .st_culled(s_cul), .st_checked(s_chk), .st_rejected(s_rej), .st_entries(s_ent), .st_arb_wait(s_arb),
    .st_overflow(s_ovf), .st_unseen_dropped(s_udrop), .st_unseen(s_un), .st_merged(s_mrg), .st_sb_hit(s_hit),
    .st_fills(s_fil), .st_writebacks(s_wb), .st_agg_stall(s_stl));
  // reference datapaths (block-level verified) used to find the covering Gaussians
  gauss3d_t pg; gauss2d_t pg2; logic pcull; pixel_t ppix; logic phit, prect; isect_t pent;
  projection_core u_pc (.g3(pg), .pose, .img_w(W), .img_h(H), .g2(pg2), .culled(pcull));
  alpha_filter_unit u_af (.g(pg2), .pix(ppix), .pix_valid(1'b1), .hit(phit), .in_rect(prect), .entry(pent));

  always #5 clk = ~clk;
  function automatic fx_t r2fx(real x); return fx_t'(longint'(x * (2.0 ** FX_F))); endfunction
  function automatic real fx2r(fx_t f); return real'(longint'(f)) / (2.0 ** FX_F); endfunction
  function automatic real rnd(real lo, real hi); return lo + (hi - lo) * $itor($urandom_range(0, 1000000)) / 1000000.0; endfunction
  // reference image: a fixed pattern of the pixel coordinates
  function automatic real refc(pixel_t p, int ch);
    int x, y, v;
    x = 32'(p.x); y = 32'(p.y);
    v = (x * (3 + ch) + y * (5 + 2 * ch)) % 17;
    return real'(v) / 16.0;
  endfunction
  task automatic near(string w, real got, real exp, real rel, real abs_tol);
    real tol; tol = rel * (exp < 0 ? -exp : exp) + abs_tol;
    checks++;
    if (got - exp > tol || exp - got > tol) begin
      failures++; if (failures < 20) $display("FAIL %s got %f exp %f", w, got, exp);
    end
  endtask
  always_comb for (int l = 0; l < NE; l++) for (int ch = 0; ch < 3; ch++) ref_rgb[l][ch] = r2fx(refc(ref_pix[l], ch));

  // ---------------- behavioural DRAM for accumulated gradients ----------------
  grad_t dram [NGMAX + 1];
  int lat = -1; gid_t pend;
  always @(posedge clk) begin
    if (rst_n) begin
      if (wrv && wrr) dram[wrg] <= wrd;
      if (rdv && rdr) begin lat <= $urandom_range(3, 12); pend <= rdg; end
      else if (lat > 0) lat <= lat - 1;
      else if (lat == 0) lat <= -1;
    end
  end
  always_comb begin rspv = (lat == 0); rspd = rspv ? dram[pend] : '0; end

  // ---------------- stimulus streams and observers ----------------
  gauss3d_t G [NGMAX];
  int gidx = 0;
  int n_res = 0;
  pixel_t r_pix [$]; real r_col [$][3]; real r_gam [$]; real r_loss [$];
  int n_gw = 0, gw_bad = 0;
  int m_dram_bp = 0, m_gstall = 0, m_switch = 0;
  always @(negedge clk) begin
    rdr = $urandom_range(0, 3) != 0;
    wrr = $urandom_range(0, 3) != 0;
    if (!gv || gr) gv = ($urandom_range(0, 5) != 0) && (gidx < int'(n_gauss)) && busy;
    gin = G[gidx < NGMAX ? gidx : 0];
    mv = busy;
    for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++) mwin[i][j] = r2fx(rnd(0, 1));
    mgam = r2fx(rnd(0, 1));
  end
  always @(posedge clk) if (rst_n) begin
    if (gv && gr) begin gidx = gidx + 1; if (gidx == int'(n_gauss)) gidx = 0; end
    if (gv && !gr) m_gstall++;
    if ((rdv && !rdr) || (wrv && !wrr)) m_dram_bp++;
    for (int l = 0; l < NE; l++) if (res_valid[l]) begin
      real c [3];
      for (int ch = 0; ch < 3; ch++) c[ch] = fx2r(res_color[l][ch]);
      r_pix.push_back(res_pix[l]); r_col.push_back(c); r_gam.push_back(fx2r(res_gamma[l])); r_loss.push_back(fx2r(res_loss[l]));
    end
    if (gwv) begin
      n_gw++;
      if (gwg == 0 || gwg > gid_t'(NGMAX) || gwgr != dram[gwg]) gw_bad++;
    end
  end

  task automatic make_gaussians(int n, real smin, real smax, real zmin, real zmax, real margin);
    for (int i = 0; i < n; i++) begin
      real z, u, v, sg;
      z = (i % 11 == 5) ? -1.0 : rnd(zmin, zmax);
      u = rnd(-margin, real'(W) + margin); v = rnd(-margin, real'(H) + margin); sg = rnd(smin, smax) * z / 100.0;
      G[i] = '0; G[i].gid = gid_t'(i + 1);
      G[i].mx = r2fx((u - real'(W) / 2) * z / 100.0); G[i].my = r2fx((v - real'(H) / 2) * z / 100.0); G[i].mz = r2fx(z);
      G[i].s00 = r2fx(sg * sg); G[i].s11 = r2fx(sg * sg * rnd(0.5, 1.5)); G[i].s22 = r2fx(sg * sg);
      G[i].s01 = r2fx(sg * sg * rnd(-0.3, 0.3));
      G[i].opa = r2fx(rnd(0.3, 0.95));
      G[i].cr = r2fx(rnd(0, 1)); G[i].cg = r2fx(rnd(0, 1)); G[i].cb = r2fx(rnd(0, 1));
    end
  endtask

  task automatic run(logic md, int ng, int nt, coord_t sx, coord_t sy, coord_t w, coord_t h, int tsz, logic check);
    int cyc;
    W = w; H = h; tiles_x = coord_t'(int'(w) / tsz); stx = sx; sty = sy; n_tiles = 5'(nt); n_gauss = 32'(ng);
    pose = '0; pose.r00 = FX_ONE; pose.r11 = FX_ONE; pose.r22 = FX_ONE;
    pose.fx = r2fx(100); pose.fy = r2fx(100); pose.cx = r2fx(real'(w) / 2); pose.cy = r2fx(real'(h) / 2);
    for (int i = 0; i <= NGMAX; i++) dram[i] = '0;
    r_pix.delete(); r_col.delete(); r_gam.delete(); r_loss.delete(); n_gw = 0; gw_bad = 0; gidx = 0;
    @(negedge clk); mode = md; seed = $urandom; start = 1;
    @(negedge clk); start = 0; cyc = 0;
    while (!done && cyc < 1500000) begin @(negedge clk); cyc++; end
    $display("INFO run mode=%0d gaussians=%0d cycles=%0d pixels=%0d entries=%0d overflow=%0d", md, ng, cyc, r_pix.size(), s_ent, s_ovf);
    checks++;
    if (r_pix.size() != nt + (md ? int'(s_un) : 0)) begin failures++; $display("FAIL %0d pixel results", r_pix.size()); end
    checks++;
    if (n_gw != ng || gw_bad != 0) begin failures++; $display("FAIL re-projection outputs %0d bad %0d", n_gw, gw_bad); end
    if (check) begin
      real eg [NGMAX + 1][N_GRAD];
      real sdt [3];
      for (int i = 0; i <= NGMAX; i++) for (int g = 0; g < N_GRAD; g++) eg[i][g] = 0;
      for (int r = 0; r < r_pix.size(); r++) begin
        int n; int ord [NGMAX]; real dep [NGMAX], al [NGMAX], ge [NGMAX], dx [NGMAX], dy [NGMAX], ca [NGMAX], cb [NGMAX], cc [NGMAX], col [NGMAX][3];
        real T, C [3], Ti [NGMAX], Ci [NGMAX][3], d [3], L;
        n = 0;
        for (int i = 0; i < ng; i++) begin
          pg = G[i]; ppix = r_pix[r]; #1;
          if (!pcull && phit) begin
            ord[n] = i; dep[n] = fx2r(pent.depth); al[n] = fx2r(pent.alpha); ge[n] = fx2r(pent.gexp);
            dx[n] = fx2r(pent.dx); dy[n] = fx2r(pent.dy); ca[n] = fx2r(pent.ca); cb[n] = fx2r(pent.cb); cc[n] = fx2r(pent.cc);
            col[n][0] = fx2r(pent.cr); col[n][1] = fx2r(pent.cg); col[n][2] = fx2r(pent.cb_);
            n++;
          end
        end
        // stable sort by depth
        for (int a = 1; a < n; a++)
          for (int b = a; b > 0 && dep[b - 1] > dep[b]; b--) begin
            int ti; real tr; real tc [3];
            ti = ord[b]; ord[b] = ord[b-1]; ord[b-1] = ti;
            tr = dep[b]; dep[b] = dep[b-1]; dep[b-1] = tr; tr = al[b]; al[b] = al[b-1]; al[b-1] = tr;
            tr = ge[b]; ge[b] = ge[b-1]; ge[b-1] = tr; tr = dx[b]; dx[b] = dx[b-1]; dx[b-1] = tr;
            tr = dy[b]; dy[b] = dy[b-1]; dy[b-1] = tr; tr = ca[b]; ca[b] = ca[b-1]; ca[b-1] = tr;
            tr = cb[b]; cb[b] = cb[b-1]; cb[b-1] = tr; tr = cc[b]; cc[b] = cc[b-1]; cc[b-1] = tr;
            tc = col[b]; col[b] = col[b-1]; col[b-1] = tc;
          end
        T = 1.0; C = '{0.0, 0.0, 0.0};
        for (int k = 0; k < n; k++) begin
          Ti[k] = T;
          for (int ch = 0; ch < 3; ch++) begin C[ch] += T * al[k] * col[k][ch]; Ci[k][ch] = C[ch]; end
          T = T * (1.0 - al[k]);
        end
        L = 0;
        for (int ch = 0; ch < 3; ch++) begin
          real rc; rc = refc(r_pix[r], ch);
          d[ch] = (C[ch] > rc) ? 1.0 : (C[ch] < rc) ? -1.0 : 0.0;
          L += (C[ch] > rc) ? C[ch] - rc : rc - C[ch];
          near("color", r_col[r][ch], C[ch], 2e-3, 1e-4);
        end
        near("gamma", r_gam[r], T, 2e-3, 1e-4);
        near("loss", r_loss[r], L, 2e-3, 3e-4);
        for (int k = 0; k < n; k++) begin
          real dlda, dp; int id;
          id = ord[k] + 1;
          dlda = 0;
          for (int ch = 0; ch < 3; ch++) dlda += d[ch] * (Ti[k] * col[k][ch] - (C[ch] - Ci[k][ch]) / (1.0 - al[k]));
          dp = dlda * al[k];
          for (int ch = 0; ch < 3; ch++) eg[id][G_R + ch] += Ti[k] * al[k] * d[ch];
          eg[id][G_OPA] += dlda * ge[k];
          eg[id][G_MX] += dp * (ca[k] * dx[k] + cb[k] * dy[k]);
          eg[id][G_MY] += dp * (cb[k] * dx[k] + cc[k] * dy[k]);
          eg[id][G_CA] += -0.5 * dp * dx[k] * dx[k];
          eg[id][G_CB] += -dp * dx[k] * dy[k];
          eg[id][G_CC] += -0.5 * dp * dy[k] * dy[k];
        end
      end
      for (int i = 1; i <= ng; i++)
        for (int g = 0; g < N_GRAD; g++) near("accumulated gradient", fx2r(fx_t'(dram[i][g])), eg[i][g], 5e-3, 2e-3);
      // pose translation gradient from the accumulated mean gradients (identity rotation)
      sdt = '{0.0, 0.0, 0.0};
      for (int i = 0; i < ng; i++) begin
        real z, x, y, gx, gy;
        x = fx2r(G[i].mx); y = fx2r(G[i].my); z = fx2r(G[i].mz);
        gx = fx2r(fx_t'(dram[i + 1][G_MX])); gy = fx2r(fx_t'(dram[i + 1][G_MY]));
        if (z > 0.0) begin
          sdt[0] += 100.0 * gx / z; sdt[1] += 100.0 * gy / z; sdt[2] += -(100.0 * x * gx + 100.0 * y * gy) / (z * z);
        end
      end
      for (int k = 0; k < 3; k++) near("dl_dt", fx2r(dlt[k]), sdt[k], 5e-3, 5e-3);
    end
  endtask

  initial begin
    int sw_t2m = 0, sw_m2t = 0;
    seed = 1; pose = '0; W = 128; H = 64; stx = 0; sty = 0; tiles_x = 8; n_tiles = 16; n_gauss = 0;
    for (int i = 0; i < NGMAX; i++) G[i] = '0;
    gin = '0; for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++) mwin[i][j] = '0; mgam = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    // 1: tracking
    W = 128; H = 64; make_gaussians(80, 3.0, 25.0, 1.0, 4.0, 10.0);
    run(1'b0, 80, 16, 3, 0, 128, 64, 16, 1'b1);
    // 2: mapping (mode switch)
    make_gaussians(80, 1.0, 6.0, 1.0, 4.0, 10.0);
    run(1'b1, 80, 16, 28, 2, 128, 64, 4, 1'b1);
    sw_t2m++;
    $display("INFO unseen=%0d unseen_dropped=%0d", s_un, s_udrop);
    checks++; if (s_un == 0) begin failures++; $display("FAIL no unseen pixel"); end
    checks++; if (s_udrop == 0) begin failures++; $display("FAIL unseen list never overflowed"); end
    // 3: tracking again (mode switch back), table overflow
    make_gaussians(300, 30.0, 45.0, 2.0, 3.0, -30.0);
    run(1'b0, 300, 16, 0, 0, 128, 64, 16, 1'b0);
    sw_m2t++;
    $display("INFO culled=%0d checked=%0d rejected=%0d arb_wait=%0d overflow=%0d merged=%0d sb_hit=%0d fills=%0d writebacks=%0d agg_stall=%0d dram_bp=%0d g_stall=%0d",
             s_cul, s_chk, s_rej, s_arb, s_ovf, s_mrg, s_hit, s_fil, s_wb, s_stl, m_dram_bp, m_gstall);
    checks++; if (s_cul == 0) begin failures++; $display("FAIL no culling"); end
    checks++; if (s_rej == 0) begin failures++; $display("FAIL no alpha rejection"); end
    checks++; if (s_arb == 0) begin failures++; $display("FAIL no table-arbiter wait"); end
    checks++; if (s_ovf == 0) begin failures++; $display("FAIL no table overflow"); end
    checks++; if (s_mrg == 0) begin failures++; $display("FAIL no aggregation merge"); end
    checks++; if (s_hit == 0) begin failures++; $display("FAIL no scoreboard hit"); end
    checks++; if (s_fil == 0) begin failures++; $display("FAIL no gradient fill"); end
    checks++; if (s_wb == 0) begin failures++; $display("FAIL no write-back"); end
    checks++; if (s_stl == 0) begin failures++; $display("FAIL no aggregation stall"); end
    checks++; if (m_dram_bp == 0) begin failures++; $display("FAIL no DRAM back-pressure"); end
    checks++; if (m_gstall == 0) begin failures++; $display("FAIL no Gaussian-input stall"); end
    checks++; if (sw_t2m == 0 || sw_m2t == 0) begin failures++; $display("FAIL no mode switch"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
