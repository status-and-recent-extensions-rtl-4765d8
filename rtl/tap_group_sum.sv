`timescale 1ps/1fs
// tap_group_sum: merges a tap snapshot into per-group ones counts.
//
// The taps are cut into N_GROUPS consecutive groups of GROUP_SIZE (72 groups
// of 7 in the prototype) and the ones in each group are counted, shrinking
// the 504-bit snapshot to 72 3-bit sums (216 bits). A clean step inside group
// g gives a sum between 1 and 6 there and 0 or 7 elsewhere, so the edge
// position is kept to one tap; only the order of taps inside a group is lost,
// which also absorbs "bubbles" (out-of-order taps) within the group.
// Grouping and sizes are the paper's; registering the result is this design's.
//
// Interface: sums_o[SUM_W*g +: SUM_W] is the count of group g, where group 0
// holds taps 0..GROUP_SIZE-1. Latency: one clock cycle.
module tap_group_sum #(
  parameter int unsigned N_GROUPS   = tdc_pkg::N_GROUPS,
  parameter int unsigned GROUP_SIZE = tdc_pkg::GROUP_SIZE,
  parameter int unsigned SUM_W      = $clog2(GROUP_SIZE + 1)
) (
  input  logic                           clk,
  input  logic [N_GROUPS*GROUP_SIZE-1:0] sample_i,
  output logic [N_GROUPS*SUM_W-1:0]      sums_o
);
  logic [N_GROUPS*SUM_W-1:0] sums_d;

  always_comb begin
    for (int g = 0; g < N_GROUPS; g++) begin
      logic [SUM_W-1:0] acc;
      acc = '0;
      for (int t = 0; t < GROUP_SIZE; t++)
        acc = acc + SUM_W'(sample_i[g*GROUP_SIZE + t]);
      sums_d[g*SUM_W +: SUM_W] = acc;
    end
  end

  always_ff @(posedge clk) sums_o <= sums_d;
endmodule
