// tb_projection_unit -- a batch of 16 tiles (16x16 px, starting mid-row so that the
// batch wraps onto the next tile row) with one random pixel per tile, plus an unseen
// list, and a stream of random Gaussians (some behind the camera). The expected
// entries are found by brute force: every Gaussian is projected and tested against
// every listed pixel with the stand-alone projection and alpha-filter datapaths. The
// unit's entries (collected under random back-pressure) must be exactly that set, each
// tagged with the right table row and carrying the same alpha. With e_ready held high,
// each Gaussian that yields at most N_AF entries (so the FIFO never stalls) must take
// 2 + box_rows * ceil(box_cols / 4) + max(1, ceil(n_unseen / 4)) cycles (2 if culled):
// four alpha checks per cycle.
module tb_projection_unit;
  import splatonic_pkg::*;
  localparam int MP = 16, MU = 8, NAF = 4, NG = 150;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  pose_t pose; coord_t W = 160, H = 96, stx = 3, sty = 1, tiles_x = 10;
  logic [4:0] n_pix = 16; logic [3:0] n_un;
  logic gv = 0, gr, ev, er = 1, idle;
  gauss3d_t gin;
  logic [3:0] praddr [NAF]; pixel_t prdata [NAF]; logic [2:0] uraddr [NAF]; pixel_t urdata [NAF];
  logic [4:0] erow; isect_t edata;
  logic [31:0] c_cull, c_chk, c_rej;
  projection_unit #(.MAX_PIX(MP), .MAX_UNSEEN(MU), .N_AF(NAF)) dut (.clk, .rst_n, .pose, .img_w(W), .img_h(H),
    .tile_shift(4'd4), .start_tx(stx), .start_ty(sty), .tiles_x, .n_pix, .n_unseen(n_un), .g_valid(gv), .g_ready(gr),
    .g_in(gin), .pix_raddr(praddr), .pix_rdata(prdata), .un_raddr(uraddr), .un_rdata(urdata), .e_valid(ev),
    .e_ready(er), .e_row(erow), .e_data(edata), .idle, .cnt_culled(c_cull), .cnt_checked(c_chk), .cnt_rejected(c_rej));
  // reference datapaths
  gauss3d_t pg; gauss2d_t pg2; logic pcull; pixel_t ppix; logic phit, prect; isect_t pent;
  projection_core u_pc (.g3(pg), .pose, .img_w(W), .img_h(H), .g2(pg2), .culled(pcull));
  alpha_filter_unit u_af (.g(pg2), .pix(ppix), .pix_valid(1'b1), .hit(phit), .in_rect(prect), .entry(pent));
  always #5 clk = ~clk;
  function automatic fx_t r2fx(real x); return fx_t'(longint'(x * (2.0 ** FX_F))); endfunction
  function automatic real rnd(real lo, real hi); return lo + (hi - lo) * $itor($urandom_range(0, 1000000)) / 1000000.0; endfunction
  pixel_t pl [MP], ul [MU];
  always_comb for (int l = 0; l < NAF; l++) begin prdata[l] = pl[praddr[l]]; urdata[l] = ul[uraddr[l]]; end
  gauss3d_t G [NG];
  fx_t expect_a [int];
  fx_t got_a [int];
  int exp_cyc [NG], nhit [NG];
  int cyc = 0, acc_cyc [NG];
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && ev && er) begin
      int key; key = int'(edata.gid) * 64 + int'(erow);
      checks++;
      if (got_a.exists(key)) begin failures++; $display("FAIL duplicate entry gid %0d row %0d", edata.gid, erow); end
      got_a[key] = edata.alpha;
    end
  end
  initial begin
    pose = '0; pose.r00 = FX_ONE; pose.r11 = FX_ONE; pose.r22 = FX_ONE;
    pose.fx = r2fx(150); pose.fy = r2fx(150); pose.cx = r2fx(80); pose.cy = r2fx(48);
    gin = '0;
    for (int run = 0; run < 4; run++) begin
      int k, gi;
      logic bp;
      n_un = (run % 2) ? 4'd5 : 4'd0; bp = (run < 2);
      for (int j = 0; j < MP; j++) begin
        int t; t = int'(sty) * int'(tiles_x) + int'(stx) + j;
        pl[j].x = coord_t'((t % int'(tiles_x)) * 16 + $urandom_range(0, 15));
        pl[j].y = coord_t'((t / int'(tiles_x)) * 16 + $urandom_range(0, 15));
      end
      for (int j = 0; j < MU; j++) begin ul[j].x = coord_t'($urandom_range(0, 159)); ul[j].y = coord_t'($urandom_range(0, 95)); end
      expect_a.delete(); got_a.delete();
      for (int i = 0; i < NG; i++) begin
        real z, u, v, sg;
        z = ($urandom_range(0, 9) == 0) ? -1.0 : rnd(1.0, 4.0);
        u = rnd(-20, 180); v = rnd(-10, 70); sg = rnd(0.5, (i % 3 == 0) ? 12.0 : 3.0) * z / 150.0;
        G[i] = '0; G[i].gid = gid_t'(i + 1);
        G[i].mx = r2fx((u - 80) * z / 150.0); G[i].my = r2fx((v - 48) * z / 150.0); G[i].mz = r2fx(z);
        G[i].s00 = r2fx(sg * sg); G[i].s11 = r2fx(sg * sg * rnd(0.5, 1.5)); G[i].s22 = r2fx(sg * sg);
        G[i].s01 = r2fx(sg * sg * rnd(-0.3, 0.3));
        G[i].opa = r2fx(rnd(0.05, 0.99)); G[i].cr = r2fx(0.5);
        pg = G[i]; #1;
        nhit[i] = 0;
        if (pcull) exp_cyc[i] = 2;
        else exp_cyc[i] = 2 + (int'(pg2.ymax >> 4) - int'(pg2.ymin >> 4) + 1) *
                               ((int'(pg2.xmax >> 4) - int'(pg2.xmin >> 4) + 1 + 3) / 4) +
                               ((n_un == 0) ? 1 : (int'(n_un) + 3) / 4);
        if (!pcull) begin
          for (int j = 0; j < MP; j++) begin
            ppix = pl[j]; #1;
            if (phit) begin expect_a[(i + 1) * 64 + j] = pent.alpha; nhit[i]++; end
          end
          for (int j = 0; j < int'(n_un); j++) begin
            ppix = ul[j]; #1;
            if (phit) begin expect_a[(i + 1) * 64 + MP + j] = pent.alpha; nhit[i]++; end
          end
        end
      end
      if (run == 0) begin repeat (2) @(posedge clk); rst_n = 1; end
      // stream the Gaussians, back to back
      gi = 0;
      while (gi < NG) begin
        @(negedge clk);
        er = bp ? 1'($urandom_range(0, 2) != 0) : 1'b1;
        gv = 1; gin = G[gi];
        #1;
        if (gr) begin acc_cyc[gi] = cyc; gi++; end
      end
      @(negedge clk); gv = 0;
      while (!idle) begin @(negedge clk); er = 1; end
      @(negedge clk);
      checks++;
      if (got_a.size() != expect_a.size()) begin failures++; $display("FAIL run %0d entries %0d exp %0d", run, got_a.size(), expect_a.size()); end
      foreach (got_a[key]) if (!expect_a.exists(key)) $display("FAIL extra entry gid %0d row %0d", key / 64, key % 64);
      foreach (expect_a[key]) begin
        checks++;
        if (!got_a.exists(key) || got_a[key] != expect_a[key]) begin
          failures++; if (failures < 10) $display("FAIL missing/wrong entry gid %0d row %0d", key / 64, key % 64);
        end
      end
      if (!bp) for (int i = 0; i + 1 < NG; i++)
        if (nhit[i] <= NAF) begin
          checks++;
          if (acc_cyc[i + 1] - acc_cyc[i] != exp_cyc[i]) begin
            failures++; $display("FAIL cycles gaussian %0d: %0d exp %0d", i, acc_cyc[i + 1] - acc_cyc[i], exp_cyc[i]);
          end
        end
    end
    $display("INFO culled=%0d checked=%0d rejected=%0d", c_cull, c_chk, c_rej);
    checks++; if (c_cull == 0 || c_rej == 0) begin failures++; $display("FAIL statistics"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
