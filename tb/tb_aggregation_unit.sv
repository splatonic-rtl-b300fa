// tb_aggregation_unit -- four channels of random (Gaussian id, gradient) tuples, drawn
// from a small id pool so that same-cycle merges and scoreboard hits are frequent, are
// pushed into an aggregation unit with a small scoreboard and cache so that evictions
// happen. A behavioural DRAM (random ready, random read latency) holds the accumulated
// gradients. After the stream, flush is held until flush_done; every id's DRAM value must
// equal the exact sum of all its tuples (integer-valued gradients keep sums exact).
// Each mechanism counter (merge, hit, fill, write-back, stall) must have fired.
module tb_aggregation_unit;
  import splatonic_pkg::*;
  localparam int NCH = 4, NID = 48;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic tv [NCH]; gtuple_t td [NCH]; logic tr;
  logic rdv, rdr, rspv, wrv, wrr, flush = 0, fdone, idle;
  gid_t rdg, wrg; grad_t rspd, wrd;
  logic [31:0] c_m, c_h, c_f, c_w, c_s;
  aggregation_unit #(.N_CH(NCH), .SB_N(8), .CACHE_LINES(8)) dut (.clk, .rst_n, .t_valid(tv), .t_data(td), .t_ready(tr),
    .mem_rd_valid(rdv), .mem_rd_ready(rdr), .mem_rd_gid(rdg), .mem_rsp_valid(rspv), .mem_rsp_data(rspd),
    .mem_wr_valid(wrv), .mem_wr_ready(wrr), .mem_wr_gid(wrg), .mem_wr_data(wrd), .flush, .flush_done(fdone), .idle,
    .cnt_merged(c_m), .cnt_sb_hit(c_h), .cnt_fills(c_f), .cnt_writebacks(c_w), .cnt_stall(c_s));
  always #5 clk = ~clk;
  grad_t dram [NID];
  longint expsum [NID][N_GRAD];
  // DRAM model: one read in flight, response after 3..12 cycles
  int lat = -1; gid_t pend;
  always @(posedge clk) begin
    if (rst_n) begin
      if (wrv && wrr) dram[wrg] <= wrd;
      if (rdv && rdr) begin lat <= $urandom_range(3, 12); pend <= rdg; end
      else if (lat > 0) lat <= lat - 1;
      else if (lat == 0) lat <= -1;
    end
  end
  always_comb begin
    rspv = (lat == 0);
    rspd = rspv ? dram[pend] : '0;
  end
  always @(negedge clk) begin
    rdr = $urandom_range(0, 3) != 0;
    wrr = $urandom_range(0, 3) != 0;
  end
  initial begin
    int sent = 0, cyc = 0;
    for (int i = 0; i < NID; i++) begin
      dram[i] = '0;
      for (int g = 0; g < N_GRAD; g++) begin
        dram[i][g] = fx_t'(longint'(i * 3 + g) <<< FX_F);     // pre-existing accumulated value
        expsum[i][g] = longint'(i * 3 + g);
      end
    end
    for (int c = 0; c < NCH; c++) begin tv[c] = 0; td[c] = '0; end
    repeat (2) @(posedge clk); rst_n = 1;
    // t_ready does not depend on t_valid, so the value seen before the edge decides
    // acceptance; an unaccepted set of tuples is held unchanged.
    while (sent < 3000) begin
      @(negedge clk);
      if (cyc == 0) begin
        for (int c = 0; c < NCH; c++) begin
          tv[c] = ($urandom_range(0, 4) != 0) && ($urandom_range(0, 7) != 0 || c != 0);
          td[c].gid = gid_t'((c == 1 && $urandom_range(0, 1)) ? td[0].gid : $urandom_range(0, NID - 1));
          for (int g = 0; g < N_GRAD; g++) td[c].grad[g] = fx_t'(longint'($urandom_range(0, 20)) - 10) <<< FX_F;
        end
        if ($urandom_range(0, 7) == 0) for (int c = 0; c < NCH; c++) tv[c] = 0;
      end
      #1;
      if (tr) begin
        cyc = 0;
        for (int c = 0; c < NCH; c++) if (tv[c]) begin
          sent++;
          for (int g = 0; g < N_GRAD; g++) expsum[td[c].gid][g] += longint'(fx_t'(td[c].grad[g])) >>> FX_F;
        end
      end else cyc = 1;
    end
    @(negedge clk); for (int c = 0; c < NCH; c++) tv[c] = 0;
    flush = 1;
    while (!fdone) @(negedge clk);
    flush = 0;
    repeat (3) @(negedge clk);
    for (int i = 0; i < NID; i++)
      for (int g = 0; g < N_GRAD; g++) begin
        checks++;
        if (longint'(fx_t'(dram[i][g])) >>> FX_F != expsum[i][g]) begin
          failures++; if (failures < 10) $display("FAIL id %0d g %0d got %0d exp %0d", i, g, longint'(fx_t'(dram[i][g])) >>> FX_F, expsum[i][g]);
        end
      end
    checks++; if (!idle) begin failures++; $display("FAIL not idle after flush"); end
    $display("INFO merged=%0d sb_hit=%0d fills=%0d writebacks=%0d stall=%0d", c_m, c_h, c_f, c_w, c_s);
    checks++; if (c_m == 0) begin failures++; $display("FAIL no merge"); end
    checks++; if (c_h == 0) begin failures++; $display("FAIL no scoreboard hit"); end
    checks++; if (c_f == 0) begin failures++; $display("FAIL no fill"); end
    checks++; if (c_w <= NID / 8) begin failures++; $display("FAIL no eviction write-back"); end
    checks++; if (c_s == 0) begin failures++; $display("FAIL no stall"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (400000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
