// projection_unit -- projection plus preemptive alpha-checking of one Gaussian at a time.
//
// A Gaussian accepted on g_valid/g_ready is registered, projected by projection_core
// and registered again (2 cycles). A culled Gaussian ends there. Otherwise the unit
// uses direct indexing: sampling keeps exactly one pixel per tile and lists the
// batch's tiles in row-major order, so the tiles under the bounding box map straight
// to list positions  idx = (ty - start_ty) * tiles_x + (tx - start_tx).
// The unit walks the box's tiles row by row, N_AF tiles per cycle, reads those
// sampled pixels and checks them in N_AF alpha-filter units (four in the published
// configuration). Positions outside [0, n_pix) are not in this batch and are skipped.
// The unseen pixels of mapping live in a separate list that is scanned linearly,
// N_AF per cycle, after the tiles. Entries that pass leave through a FIFO of FIFO_D
// entries, one per cycle, tagged with their table row (sampled index, or MAX_PIX +
// unseen index). A scan cycle is issued only when the FIFO has room for N_AF entries,
// so the unit stalls rather than drops. The FIFO and the stall rule are this design's
// choices. Pixel reads are asynchronous (pix_raddr -> pix_rdata in the same cycle).
module projection_unit
  import splatonic_pkg::*;
#(
  parameter int MAX_PIX    = 16,
  parameter int MAX_UNSEEN = 16,
  parameter int N_AF       = N_AFILT,
  parameter int FIFO_D     = 8
) (
  input  logic     clk,
  input  logic     rst_n,
  // configuration, stable during a batch
  input  pose_t    pose,
  input  coord_t   img_w, img_h,
  input  logic [3:0] tile_shift,      // log2 of the tile edge
  input  coord_t   start_tx, start_ty, tiles_x,
  input  logic [$clog2(MAX_PIX+1)-1:0]    n_pix,
  input  logic [$clog2(MAX_UNSEEN+1)-1:0] n_unseen,
  // Gaussian input
  input  logic     g_valid,
  output logic     g_ready,
  input  gauss3d_t g_in,
  // sampled-pixel list reads
  output logic [$clog2(MAX_PIX)-1:0]    pix_raddr [N_AF],
  input  pixel_t                        pix_rdata [N_AF],
  output logic [$clog2(MAX_UNSEEN)-1:0] un_raddr  [N_AF],
  input  pixel_t                        un_rdata  [N_AF],
  // intersection entries
  output logic     e_valid,
  input  logic     e_ready,
  output logic [$clog2(MAX_PIX+MAX_UNSEEN)-1:0] e_row,
  output isect_t   e_data,
  output logic     idle,
  // statistics
  output logic [31:0] cnt_culled,
  output logic [31:0] cnt_checked,
  output logic [31:0] cnt_rejected
);
  localparam int ROW_W = $clog2(MAX_PIX+MAX_UNSEEN);
  typedef enum logic [2:0] {S_IDLE, S_PROJ, S_TILES, S_UNSEEN} state_t;
  state_t st;

  gauss3d_t g3_q;
  gauss2d_t g2, g2_q;
  logic     culled;
  coord_t   tx, ty, tx_lo, tx_hi, ty_hi;
  logic [$clog2(MAX_UNSEEN+1)-1:0] uidx;

  projection_core u_core (.g3(g3_q), .pose(pose), .img_w(img_w), .img_h(img_h),
                          .g2(g2), .culled(culled));

  // ---------------- scan lanes ----------------
  logic   lane_ok  [N_AF];
  pixel_t lane_pix [N_AF];
  logic [ROW_W-1:0] lane_row [N_AF];
  logic   lane_hit [N_AF];
  logic   lane_rect[N_AF];
  isect_t lane_ent [N_AF];
  logic signed [31:0] lin;

  always_comb begin
    for (int l = 0; l < N_AF; l++) begin
      lane_ok[l] = 1'b0; lane_row[l] = '0;
      pix_raddr[l] = '0; un_raddr[l] = '0; lane_pix[l] = '0;
      lin = '0;
      if (st == S_TILES) begin
        lin = (32'(ty) - 32'(start_ty)) * 32'(tiles_x) + (32'(tx) + l - 32'(start_tx));
        lane_ok[l] = (32'(tx) + l <= 32'(tx_hi)) && (lin >= 0) && (lin < 32'(n_pix)) &&
                     (32'(tx) + l < 32'(tiles_x));
        pix_raddr[l] = lin[$clog2(MAX_PIX)-1:0];
        lane_pix[l]  = pix_rdata[l];
        lane_row[l]  = ROW_W'(lin);
      end else if (st == S_UNSEEN) begin
        lane_ok[l]  = (32'(uidx) + l < 32'(n_unseen));
        un_raddr[l] = $clog2(MAX_UNSEEN)'(32'(uidx) + l);
        lane_pix[l] = un_rdata[l];
        lane_row[l] = ROW_W'(MAX_PIX + 32'(uidx) + l);
      end
    end
  end

  for (genvar l = 0; l < N_AF; l++) begin : g_af
    alpha_filter_unit u_af (.g(g2_q), .pix(lane_pix[l]), .pix_valid(lane_ok[l]),
                            .hit(lane_hit[l]), .in_rect(lane_rect[l]), .entry(lane_ent[l]));
  end

  // ---------------- output FIFO ----------------
  isect_t             f_data [FIFO_D];
  logic [ROW_W-1:0]   f_row  [FIFO_D];
  logic [$clog2(FIFO_D)-1:0] f_rd, f_wr;
  logic [$clog2(FIFO_D+1)-1:0] f_cnt;
  logic scan_go, pop;
  int   n_push;

  assign scan_go = (st == S_TILES || st == S_UNSEEN) && (32'(f_cnt) + N_AF <= FIFO_D);
  assign e_valid = (f_cnt != 0);
  assign e_data  = f_data[f_rd];
  assign e_row   = f_row[f_rd];
  assign pop     = e_valid && e_ready;
  assign g_ready = (st == S_IDLE);
  assign idle    = (st == S_IDLE) && (f_cnt == 0);

  always_comb begin
    n_push = 0;
    if (scan_go)
      for (int l = 0; l < N_AF; l++) if (lane_hit[l]) n_push++;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; g3_q <= '0; g2_q <= '0; tx <= '0; ty <= '0; tx_lo <= '0; tx_hi <= '0;
      ty_hi <= '0; uidx <= '0; f_rd <= '0; f_wr <= '0; f_cnt <= '0;
      cnt_culled <= '0; cnt_checked <= '0; cnt_rejected <= '0;
    end else begin
      // FIFO bookkeeping
      begin
        automatic int w = 0;
        if (scan_go)
          for (int l = 0; l < N_AF; l++)
            if (lane_hit[l]) begin
              f_data[(32'(f_wr) + w) % FIFO_D] <= lane_ent[l];
              f_row [(32'(f_wr) + w) % FIFO_D] <= lane_row[l];
              w++;
            end
        f_wr  <= $clog2(FIFO_D)'((32'(f_wr) + n_push) % FIFO_D);
        f_rd  <= pop ? $clog2(FIFO_D)'((32'(f_rd) + 1) % FIFO_D) : f_rd;
        f_cnt <= $clog2(FIFO_D+1)'(32'(f_cnt) + n_push - (pop ? 1 : 0));
      end
      if (scan_go) begin
        automatic int nchk = 0, nrej = 0;
        for (int l = 0; l < N_AF; l++) begin
          if (lane_ok[l]) nchk++;
          if (lane_ok[l] && !lane_hit[l]) nrej++;
        end
        cnt_checked  <= cnt_checked + 32'(nchk);
        cnt_rejected <= cnt_rejected + 32'(nrej);
      end
      case (st)
        S_IDLE: if (g_valid) begin g3_q <= g_in; st <= S_PROJ; end
        S_PROJ: begin
          g2_q <= g2;
          if (culled) begin
            cnt_culled <= cnt_culled + 1; st <= S_IDLE;
          end else begin
            tx_lo <= g2.xmin >> tile_shift; tx <= g2.xmin >> tile_shift;
            tx_hi <= g2.xmax >> tile_shift;
            ty    <= g2.ymin >> tile_shift; ty_hi <= g2.ymax >> tile_shift;
            uidx  <= '0;
            st    <= S_TILES;
          end
        end
        S_TILES: if (scan_go) begin
          if (32'(tx) + N_AF > 32'(tx_hi)) begin
            tx <= tx_lo;
            if (ty == ty_hi) st <= S_UNSEEN;
            else ty <= ty + 1'b1;
          end else begin
            tx <= coord_t'(32'(tx) + N_AF);
          end
        end
        S_UNSEEN: if (scan_go) begin
          if (32'(uidx) + N_AF >= 32'(n_unseen)) st <= S_IDLE;
          else uidx <= $clog2(MAX_UNSEEN+1)'(32'(uidx) + N_AF);
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
