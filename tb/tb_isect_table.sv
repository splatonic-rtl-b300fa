// tb_isect_table -- appends random entries to random rows, more than a row holds for one
// row; checks every stored entry through all read ports, the row counts, the overflow
// count and that clear empties the table.
module tb_isect_table;
  import splatonic_pkg::*;
  localparam int ROWS = 8, K = 16, NR = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clear = 0, we = 0;
  logic [2:0] wrow; isect_t wdata;
  logic [2:0] rrow [NR]; logic [3:0] ridx [NR]; isect_t rdata [NR]; logic [4:0] rcnt [NR];
  logic [31:0] ovf;
  isect_table #(.ROWS(ROWS), .MAX_K(K), .N_RD(NR)) dut (.clk, .rst_n, .clear, .we, .wrow, .wdata,
    .rrow, .ridx, .rdata, .rcnt, .overflow(ovf));
  always #5 clk = ~clk;
  gid_t model [ROWS][$];
  initial begin
    int eovf = 0;
    for (int p = 0; p < NR; p++) begin rrow[p] = '0; ridx[p] = '0; end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 120; i++) begin
      int r; r = (i < 20) ? 5 : $urandom_range(0, ROWS - 1);
      @(negedge clk); we = 1; wrow = 3'(r); wdata = '0; wdata.gid = gid_t'(i); wdata.depth = fx_t'(i);
      if (model[r].size() < K) model[r].push_back(gid_t'(i)); else eovf++;
    end
    @(negedge clk); we = 0;
    for (int r = 0; r < ROWS; r++)
      for (int k = 0; k < model[r].size(); k++) begin
        int p; p = (r + k) % NR;
        rrow[p] = 3'(r); ridx[p] = 4'(k); #1;
        checks++;
        if (rdata[p].gid !== model[r][k]) begin failures++; $display("FAIL r%0d k%0d", r, k); end
        checks++;
        if (32'(rcnt[p]) != model[r].size()) begin failures++; $display("FAIL cnt r%0d", r); end
      end
    checks++;
    if (ovf != 32'(eovf) || eovf == 0) begin failures++; $display("FAIL overflow %0d %0d", ovf, eovf); end
    @(negedge clk); clear = 1; @(negedge clk); clear = 0; #1;
    for (int p = 0; p < NR; p++) begin
      checks++; if (rcnt[p] != 0) begin failures++; $display("FAIL clear"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
