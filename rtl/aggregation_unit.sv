// aggregation_unit -- accumulates per-pixel partial gradients into per-Gaussian gradients.
//
// The N_CH channels each carry one pixel's partial gradient list, one (gid, gradient)
// tuple per cycle. The unit takes one tuple from every valid channel in the same cycle
// (all or none) and:
//  * Merge unit: tuples of the cycle with equal IDs are summed into one (intra-batch
//    reduction).
//  * Scoreboard (SB_N entries of ID, valid, delta-gradient): a merged tuple whose ID is
//    already in the scoreboard is added to that entry; otherwise a free entry is taken.
//    "valid" means the Gaussian's partial accumulated gradient is in the Gaussian cache.
//  * Find union / address generation: only an ID that is new to the scoreboard and
//    absent from the cache queues a fill, so each distinct ID is fetched once. Fills are
//    served one at a time: the line's old content is written back if dirty, then the
//    accumulated gradient is read from DRAM (mem_rd_*) into the line.
//  * Accumulation unit: every cycle one valid scoreboard entry is added into its cache
//    line (read-modify-write) and freed, so updates of cached Gaussians proceed while a
//    fill waits for DRAM, which hides the DRAM latency.
//  * Gaussian cache: CACHE_LINES direct-mapped lines of (ID, gradient), line = gid mod
//    CACHE_LINES, in CACHE_BANKS banks selected by the low line bits (4 as drawn).
// Input stalls (t_ready low) when fewer than N_CH scoreboard entries or fill-queue slots
// are free. flush, once the scoreboard and fills are empty, writes every dirty line back
// and invalidates the cache; flush_done pulses at the end.
// Structure and names follow the published aggregation unit; cache organisation and
// replacement, scoreboard size, the one-fill-at-a-time policy and the DRAM handshake are
// this design's choices. A line is not evicted while a scoreboard entry or an incoming
// tuple still needs it.
module aggregation_unit
  import splatonic_pkg::*;
#(
  parameter int N_CH        = AGG_CH,
  parameter int SB_N        = 128,
  parameter int CACHE_LINES = 512,
  parameter int CACHE_BANKS = 4
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    t_valid [N_CH],
  input  gtuple_t t_data  [N_CH],
  output logic    t_ready,
  // DRAM: accumulated-gradient reads and writes, addressed by Gaussian id
  output logic    mem_rd_valid,
  input  logic    mem_rd_ready,
  output gid_t    mem_rd_gid,
  input  logic    mem_rsp_valid,
  input  grad_t   mem_rsp_data,
  output logic    mem_wr_valid,
  input  logic    mem_wr_ready,
  output gid_t    mem_wr_gid,
  output grad_t   mem_wr_data,
  input  logic    flush,
  output logic    flush_done,
  output logic    idle,
  // statistics
  output logic [31:0] cnt_merged,     // tuples folded into another tuple of the same cycle
  output logic [31:0] cnt_sb_hit,     // tuples added to an existing scoreboard entry
  output logic [31:0] cnt_fills,      // DRAM reads of accumulated gradients
  output logic [31:0] cnt_writebacks, // DRAM writes (evictions and flush)
  output logic [31:0] cnt_stall       // cycles with a valid input not taken
);
  localparam int LW  = $clog2(CACHE_LINES);
  localparam int SW  = $clog2(SB_N);
  localparam int QW  = $clog2(SB_N);

  // ---------------- storage ----------------
  logic  sb_used [SB_N];
  gid_t  sb_id   [SB_N];
  grad_t sb_dg   [SB_N];
  logic  c_valid [CACHE_LINES];
  logic  c_dirty [CACHE_LINES];
  gid_t  c_id    [CACHE_LINES];
  grad_t c_grad  [CACHE_LINES];
  gid_t  fq [SB_N];                       // fill queue
  logic [QW-1:0] fq_rd, fq_wr;
  logic [QW:0]   fq_cnt;

  function automatic logic [LW-1:0] line_of(gid_t g);
    return g[LW-1:0];
  endfunction

  function automatic grad_t gadd(grad_t a, grad_t b);
    grad_t r;
    for (int k = 0; k < N_GRAD; k++) r[k] = a[k] + b[k];
    return r;
  endfunction

  // ---------------- merge unit ----------------
  logic  m_first [N_CH];
  grad_t m_sum   [N_CH];
  int    n_merged;
  always_comb begin
    n_merged = 0;
    for (int k = 0; k < N_CH; k++) begin
      m_first[k] = t_valid[k];
      m_sum[k]   = t_data[k].grad;
      for (int j = 0; j < k; j++)
        if (t_valid[j] && t_data[j].gid == t_data[k].gid) m_first[k] = 1'b0;
      for (int j = k + 1; j < N_CH; j++)
        if (t_valid[j] && t_data[j].gid == t_data[k].gid) m_sum[k] = gadd(m_sum[k], t_data[j].grad);
      if (t_valid[k] && !m_first[k]) n_merged++;
    end
  end

  // ---------------- scoreboard lookup ----------------
  logic          m_hit   [N_CH];
  logic [SW-1:0] m_entry [N_CH];
  logic          sb_ready [SB_N];
  int            n_free;
  logic [SW-1:0] free_idx [N_CH];
  logic          any_valid;
  logic          take;
  always_comb begin
    any_valid = 1'b0;
    for (int k = 0; k < N_CH; k++) begin
      any_valid = any_valid | t_valid[k];
      m_hit[k] = 1'b0; m_entry[k] = '0;
      for (int e = 0; e < SB_N; e++)
        if (sb_used[e] && sb_id[e] == t_data[k].gid) begin m_hit[k] = 1'b1; m_entry[k] = SW'(e); end
    end
    n_free = 0;
    for (int k = 0; k < N_CH; k++) free_idx[k] = '0;
    for (int e = 0; e < SB_N; e++)
      if (!sb_used[e]) begin
        if (n_free < N_CH) free_idx[n_free] = SW'(e);
        n_free++;
      end
    for (int e = 0; e < SB_N; e++)
      sb_ready[e] = sb_used[e] && c_valid[line_of(sb_id[e])] && c_id[line_of(sb_id[e])] == sb_id[e];
  end

  assign t_ready = (n_free >= N_CH) && (32'(fq_cnt) + N_CH <= SB_N) && !flush;
  assign take = t_ready && any_valid;

  // ---------------- accumulation unit: pick one ready entry ----------------
  logic          acc_go;
  logic [SW-1:0] acc_e;
  always_comb begin
    acc_go = 1'b0; acc_e = '0;
    for (int e = SB_N - 1; e >= 0; e--) begin
      automatic logic touched = 1'b0;
      for (int k = 0; k < N_CH; k++)
        if (take && m_first[k] && m_hit[k] && m_entry[k] == SW'(e)) touched = 1'b1;
      if (sb_ready[e] && !touched) begin acc_go = 1'b1; acc_e = SW'(e); end
    end
  end

  // ---------------- fill engine (address generation) ----------------
  typedef enum logic [2:0] {F_IDLE, F_WB, F_RD, F_WAIT, F_FLUSH, F_FLUSH_WB} fstate_t;
  fstate_t fst;
  gid_t          f_gid;
  logic [LW-1:0] f_line;
  gid_t          wb_gid;
  grad_t         wb_data;
  logic [LW:0]   fl_idx;

  gid_t          head;
  logic [LW-1:0] hline;
  logic          head_present, line_busy;
  always_comb begin
    head  = fq[fq_rd];
    hline = line_of(head);
    head_present = c_valid[hline] && c_id[hline] == head;
    line_busy = 1'b0;
    for (int e = 0; e < SB_N; e++)
      if (sb_used[e] && c_valid[hline] && sb_id[e] == c_id[hline]) line_busy = 1'b1;
    // only tuples accepted this cycle protect the line; tuples held while t_ready is low
    // must not, or a full scoreboard could wait forever on this eviction
    for (int k = 0; k < N_CH; k++)
      if (take && t_valid[k] && c_valid[hline] && t_data[k].gid == c_id[hline]) line_busy = 1'b1;
  end

  logic sb_empty;
  always_comb begin
    sb_empty = 1'b1;
    for (int e = 0; e < SB_N; e++) if (sb_used[e]) sb_empty = 1'b0;
  end

  assign mem_rd_valid = (fst == F_RD);
  assign mem_rd_gid   = f_gid;
  assign mem_wr_valid = (fst == F_WB) || (fst == F_FLUSH_WB);
  assign mem_wr_gid   = wb_gid;
  assign mem_wr_data  = wb_data;
  assign idle         = sb_empty && (fq_cnt == 0) && (fst == F_IDLE);

  // ---------------- sequential ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < SB_N; e++) sb_used[e] <= 1'b0;
      for (int l = 0; l < CACHE_LINES; l++) begin c_valid[l] <= 1'b0; c_dirty[l] <= 1'b0; end
      fq_rd <= '0; fq_wr <= '0; fq_cnt <= '0;
      fst <= F_IDLE; f_gid <= '0; f_line <= '0; wb_gid <= '0; wb_data <= '0; fl_idx <= '0;
      flush_done <= 1'b0;
      cnt_merged <= '0; cnt_sb_hit <= '0; cnt_fills <= '0; cnt_writebacks <= '0; cnt_stall <= '0;
    end else begin
      automatic int nq = 0;      // fill-queue pushes
      automatic int np = 0;      // fill-queue pops
      automatic int nf = 0;
      automatic int nhit = 0;
      flush_done <= 1'b0;
      if (any_valid && !t_ready) cnt_stall <= cnt_stall + 1;

      // accumulation unit (read-modify-write of one cache line)
      if (acc_go) begin
        c_grad[line_of(sb_id[acc_e])]  <= gadd(c_grad[line_of(sb_id[acc_e])], sb_dg[acc_e]);
        c_dirty[line_of(sb_id[acc_e])] <= 1'b1;
        sb_used[acc_e] <= 1'b0;
      end

      // scoreboard insertion
      if (take) begin
        for (int k = 0; k < N_CH; k++)
          if (m_first[k]) begin
            if (m_hit[k]) begin
              sb_dg[m_entry[k]] <= gadd(sb_dg[m_entry[k]], m_sum[k]);
              nhit++;
            end else begin
              sb_used[free_idx[nf]] <= 1'b1;
              sb_id[free_idx[nf]]   <= t_data[k].gid;
              sb_dg[free_idx[nf]]   <= m_sum[k];
              nf++;
              if (!(c_valid[line_of(t_data[k].gid)] && c_id[line_of(t_data[k].gid)] == t_data[k].gid)) begin
                fq[QW'(32'(fq_wr) + nq)] <= t_data[k].gid;
                nq++;
              end
            end
          end
        cnt_merged <= cnt_merged + 32'(n_merged);
        cnt_sb_hit <= cnt_sb_hit + 32'(nhit);
      end

      // fill engine
      case (fst)
        F_IDLE: begin
          if (fq_cnt != 0) begin
            if (head_present) begin
              fq_rd <= fq_rd + 1'b1; np = 1;
            end else if (!line_busy) begin
              f_gid <= head; f_line <= hline;
              fq_rd <= fq_rd + 1'b1; np = 1;
              c_valid[hline] <= 1'b0;
              if (c_valid[hline] && c_dirty[hline]) begin
                wb_gid <= c_id[hline]; wb_data <= c_grad[hline]; fst <= F_WB;
              end else begin
                fst <= F_RD;
              end
            end
          end else if (flush && sb_empty) begin
            fl_idx <= '0; fst <= F_FLUSH;
          end
        end
        F_WB:   if (mem_wr_ready) begin cnt_writebacks <= cnt_writebacks + 1; fst <= F_RD; end
        F_RD:   if (mem_rd_ready) begin cnt_fills <= cnt_fills + 1; fst <= F_WAIT; end
        F_WAIT: if (mem_rsp_valid) begin
          c_valid[f_line] <= 1'b1; c_dirty[f_line] <= 1'b0;
          c_id[f_line] <= f_gid;   c_grad[f_line] <= mem_rsp_data;
          fst <= F_IDLE;
        end
        F_FLUSH: begin
          if (32'(fl_idx) == CACHE_LINES) begin
            fst <= F_IDLE; flush_done <= 1'b1;
          end else begin
            c_valid[fl_idx[LW-1:0]] <= 1'b0;
            if (c_valid[fl_idx[LW-1:0]] && c_dirty[fl_idx[LW-1:0]]) begin
              wb_gid <= c_id[fl_idx[LW-1:0]]; wb_data <= c_grad[fl_idx[LW-1:0]];
              fst <= F_FLUSH_WB;
            end
            c_dirty[fl_idx[LW-1:0]] <= 1'b0;
            fl_idx <= fl_idx + 1'b1;
          end
        end
        F_FLUSH_WB: if (mem_wr_ready) begin cnt_writebacks <= cnt_writebacks + 1; fst <= F_FLUSH; end
        default: fst <= F_IDLE;
      endcase
      fq_wr  <= QW'(32'(fq_wr) + nq);
      fq_cnt <= (QW+1)'(32'(fq_cnt) + nq - np);
    end
  end
endmodule
