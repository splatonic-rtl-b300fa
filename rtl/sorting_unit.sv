// sorting_unit -- sorts one pixel's intersected Gaussians by depth, nearest first.
//
// Insertion sorter: each accepted entry is compared against the whole held list in
// parallel and inserted at its place, the larger entries shifting up by one; one entry
// per cycle, so a list of k entries is sorted k cycles after its last entry arrives
// (it is ready in the cycle after in_last). Equal depths keep arrival order. The
// sorted list is held until clear and read through the list/count outputs.
// The published design uses "hierarchical sorting units" from its base accelerator
// without describing them; this single-level insertion sorter is this design's
// simplest stand-in with the same function.
module sorting_unit
  import splatonic_pkg::*;
#(
  parameter int MAX_K = 256
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   clear,
  input  logic   in_valid,
  input  isect_t in_data,
  output isect_t list [MAX_K],
  output logic [$clog2(MAX_K+1)-1:0] count
);
  logic gt [MAX_K];

  always_comb
    for (int i = 0; i < MAX_K; i++)
      gt[i] = (32'(i) < 32'(count)) && (list[i].depth > in_data.depth);

  always_ff @(posedge clk) begin
    if (in_valid && !clear && 32'(count) < MAX_K) begin
      for (int i = 0; i < MAX_K; i++) begin
        if (gt[i]) begin
          if (i + 1 < MAX_K) list[i+1] <= list[i];
        end
        // the first position whose entry is larger, or the end of the list
        if ((gt[i] && (i == 0 || !gt[i-1])) || (!gt[i] && 32'(i) == 32'(count) &&
            (i == 0 || !gt[i-1])))
          list[i] <= in_data;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                     count <= '0;
    else if (clear)                                 count <= '0;
    else if (in_valid && 32'(count) < MAX_K)        count <= count + 1'b1;
  end
endmodule
