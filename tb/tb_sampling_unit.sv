// tb_sampling_unit -- tracking: a batch of tiles must give one pixel inside each tile, in
// row-major tile order, one per cycle, with pixels spread over the tile (every offset
// seen across batches). Mapping: random Sobel magnitudes and transmittances are streamed
// tile by tile; the expected winner of each tile (largest w^2 r^2, with r from the same
// xorshift sequence, which is the documented random source) and the unseen list
// (Gamma > 0.5) are computed here and compared.
module tb_sampling_unit;
  import splatonic_pkg::*;
  localparam int MP = 16, MU = 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0, mode = 0, mv = 0, mr;
  logic [31:0] seed;
  coord_t stx, sty, tx_n, W, H;
  logic [4:0] nt;
  fx_t mag2, gam;
  logic pwe, uwe, busy, done;
  logic [3:0] pidx; logic [2:0] uidx; pixel_t pix, upix;
  logic [3:0] nun; logic [15:0] udrop;
  sampling_unit #(.MAX_PIX(MP), .MAX_UNSEEN(MU)) dut (.clk, .rst_n, .start, .mode, .seed,
    .start_tx(stx), .start_ty(sty), .tiles_x(tx_n), .img_w(W), .img_h(H), .n_tiles(nt),
    .map_valid(mv), .map_ready(mr), .map_mag2(mag2), .map_gamma(gam), .pix_we(pwe), .pix_idx(pidx),
    .pix(pix), .un_we(uwe), .un_idx(uidx), .un_pix(upix), .n_unseen(nun), .unseen_dropped(udrop),
    .busy(busy), .done(done));
  always #5 clk = ~clk;
  function automatic fx_t r2fx(real x); return fx_t'(longint'(x * (2.0 ** FX_F))); endfunction
  function automatic logic [31:0] xs(logic [31:0] s);
    s = s ^ (s << 13); s = s ^ (s >> 17); s = s ^ (s << 5); return s;
  endfunction
  pixel_t got [MP]; pixel_t ugot [$];
  always @(posedge clk) begin
    if (pwe) got[pidx] <= pix;
    if (uwe) ugot.push_back(upix);
  end
  int seen_off [16];
  initial begin
    W = 100; H = 70; tx_n = 7;
    repeat (2) @(posedge clk); rst_n = 1;
    // ---- tracking ----
    for (int b = 0; b < 20; b++) begin
      int cyc;
      @(negedge clk); mode = 0; stx = 2; sty = 1; nt = 5'(MP); seed = 32'(b * 7919 + 1); start = 1;
      @(negedge clk); start = 0; cyc = 0;
      while (!done) begin @(negedge clk); cyc++; end
      @(negedge clk);
      checks++; if (cyc != MP) begin failures++; $display("FAIL tracking cycles %0d", cyc); end
      for (int i = 0; i < MP; i++) begin
        int tx, ty;
        tx = (2 + i) % 7; ty = 1 + (2 + i) / 7;
        checks++;
        if (got[i].x / 16 != tx || got[i].y / 16 != ty || got[i].x >= W || got[i].y >= H) begin
          failures++; $display("FAIL tile %0d pix %0d,%0d", i, got[i].x, got[i].y);
        end
        if (got[i].x / 16 < 6) seen_off[got[i].x % 16] = 1;
      end
    end
    for (int k = 0; k < 16; k++) begin checks++; if (!seen_off[k]) begin failures++; $display("FAIL offset %0d unused", k); end end
    // ---- mapping ----
    for (int b = 0; b < 5; b++) begin
      logic [31:0] s;
      int nunseen = 0;
      pixel_t best [MP];
      ugot.delete();
      @(negedge clk); mode = 1; stx = 0; sty = 0; nt = 5'(10); seed = 32'(1234 + b); start = 1;
      s = 32'(1234 + b);
      @(negedge clk); start = 0;
      for (int tl = 0; tl < 10; tl++) begin
        real bs; bs = -1.0;
        for (int j = 0; j < 16; j++) begin
          real m, r, sc, gm;
          pixel_t p;
          m = $itor($urandom_range(0, 100)) / 10.0;
          gm = $itor($urandom_range(0, 100)) / 100.0;
          r = $itor(s[31:16]) / 65536.0;
          sc = m * r * r;
          p.x = coord_t'((tl % 7) * 4 + j % 4); p.y = coord_t'((tl / 7) * 4 + j / 4);
          if (sc > bs + 1e-6) begin bs = sc; best[tl] = p; end
          if (gm > 0.5 && nunseen < MU) begin nunseen++; end
          mv = 1; mag2 = r2fx(m); gam = r2fx(gm);
          @(posedge clk); #1;
          s = xs(s);
        end
        @(negedge clk);
      end
      mv = 0;
      repeat (3) @(negedge clk);
      for (int tl = 0; tl < 10; tl++) begin
        checks++;
        if (got[tl] !== best[tl]) begin failures++; $display("FAIL map tile %0d got %0d,%0d exp %0d,%0d", tl, got[tl].x, got[tl].y, best[tl].x, best[tl].y); end
      end
      checks++;
      if (32'(nun) != nunseen || ugot.size() != nunseen) begin failures++; $display("FAIL unseen %0d %0d", nun, nunseen); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
