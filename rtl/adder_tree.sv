// adder_tree: the programmable adder tree over the eight accumulators of one
// group (#0..#7). Each adder weights its left input, the higher-numbered
// accumulator, by 2, 4 and 16 at levels 1, 2 and 3, and all three levels
// are outputs, so the tree combines the partial sums of 2, 4 or 8 weight bits:
//   l1[i] = 2*acc[2i+1] + acc[2i]          (i = 0..3)
//   l2[i] = 4*l1[2i+1]  + l1[2i]           (i = 0..1)
//   l3    = 16*l2[1]    + l2[0]
// The level-1 and level-2 weights are the paper's. Its tree diagram marks the
// level-3 adder x8, but combining two 4-bit halves of an 8-bit weight needs
// x16, so x16 is used here. The widths are this design's. Combinational.
module adder_tree
  import capram_pkg::*;
#(
  parameter int unsigned IN_W  = ACC_W,
  parameter int unsigned OUT_W = TREE_W
) (
  input  logic signed [7:0][IN_W-1:0]  acc,
  output logic signed [3:0][OUT_W-1:0] l1,
  output logic signed [1:0][OUT_W-1:0] l2,
  output logic signed [OUT_W-1:0]      l3
);
  always_comb begin
    for (int i = 0; i < 4; i++)
      l1[i] = (OUT_W'(signed'(acc[2*i+1])) <<< 1) + OUT_W'(signed'(acc[2*i]));
    for (int i = 0; i < 2; i++)
      l2[i] = (l1[2*i+1] <<< 2) + l1[2*i];
    l3 = (l2[1] <<< 4) + l2[0];
  end
endmodule
