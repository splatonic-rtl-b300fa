// tb_sorting_unit -- feeds lists of random depths (with repeats) one entry per cycle and
// checks that the held list is the stable ascending sort of the input, computed by a
// reference insertion into a queue. Also checks the count and the one-cycle latency.
module tb_sorting_unit;
  import splatonic_pkg::*;
  localparam int K = 32;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clear = 0, iv = 0;
  isect_t din;
  isect_t list [K];
  logic [$clog2(K+1)-1:0] count;
  sorting_unit #(.MAX_K(K)) dut (.clk, .rst_n, .clear, .in_valid(iv), .in_data(din), .list(list), .count(count));
  always #5 clk = ~clk;
  initial begin
    isect_t ref_q [$];
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      int n;
      n = (t == 0) ? 0 : $urandom_range(1, K);
      @(posedge clk); clear <= 1;
      @(posedge clk); clear <= 0;
      ref_q.delete();
      for (int i = 0; i < n; i++) begin
        int pos;
        @(negedge clk);
        din = '0; din.gid = gid_t'(i); din.depth = fx_t'($urandom_range(0, 15)) <<< 20;
        iv = 1;
        pos = ref_q.size();
        for (int j = ref_q.size() - 1; j >= 0; j--) if (ref_q[j].depth > din.depth) pos = j;
        ref_q.insert(pos, din);
      end
      @(negedge clk);
      iv = 0;
      #1;
      checks++;
      if (32'(count) != n) begin failures++; $display("FAIL count %0d %0d", count, n); end
      for (int i = 0; i < n; i++) begin
        checks++;
        if (list[i].gid !== ref_q[i].gid || list[i].depth !== ref_q[i].depth) begin
          failures++; $display("FAIL pos %0d gid %0d exp %0d", i, list[i].gid, ref_q[i].gid);
        end
      end
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
