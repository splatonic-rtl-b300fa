// isect_table -- on-chip pixel-Gaussian intersection table for one batch of pixels.
//
// One row per pixel of the batch (sampled pixels, then unseen pixels), each row a list
// of up to MAX_K entries in arrival order plus a count. The projection units append
// through one write port (one entry per cycle); the sorting units read rows through
// N_RD asynchronous read ports. clear empties every row in one cycle. An append to a
// full row is dropped and counted in overflow. This table stands in for the published
// 64 KB global buffer; its row organisation, capacity and single write port are this
// design's choices (the paper does not describe the buffer's organisation).
module isect_table
  import splatonic_pkg::*;
#(
  parameter int ROWS  = 32,
  parameter int MAX_K = 256,
  parameter int N_RD  = N_ENGINE
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   clear,
  input  logic   we,
  input  logic [$clog2(ROWS)-1:0]  wrow,
  input  isect_t wdata,
  input  logic [$clog2(ROWS)-1:0]  rrow [N_RD],
  input  logic [$clog2(MAX_K)-1:0] ridx [N_RD],
  output isect_t rdata [N_RD],
  output logic [$clog2(MAX_K+1)-1:0] rcnt [N_RD],
  output logic [31:0] overflow
);
  isect_t mem [ROWS][MAX_K];
  logic [$clog2(MAX_K+1)-1:0] cnt [ROWS];

  always_ff @(posedge clk) begin
    if (we && !clear && 32'(cnt[wrow]) < MAX_K)
      mem[wrow][cnt[wrow][$clog2(MAX_K)-1:0]] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < ROWS; r++) cnt[r] <= '0;
      overflow <= '0;
    end else if (clear) begin
      for (int r = 0; r < ROWS; r++) cnt[r] <= '0;
      overflow <= '0;
    end else if (we) begin
      if (32'(cnt[wrow]) < MAX_K) cnt[wrow] <= cnt[wrow] + 1'b1;
      else                        overflow <= overflow + 1;
    end
  end

  always_comb
    for (int p = 0; p < N_RD; p++) begin
      rdata[p] = mem[rrow[p]][ridx[p]];
      rcnt[p]  = cnt[rrow[p]];
    end
endmodule
