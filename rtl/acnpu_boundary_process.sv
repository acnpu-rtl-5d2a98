// acnpu_boundary_process: completes outputs that straddle a boundary.
//
// A convolution whose window crosses the edge of the block a cluster holds
// leaves partial sums at that edge.  The part computed earlier is kept (in
// the boundary SRAM for the vertical 3x1 layers, in the boundary buffer for
// the horizontal 1x3 layers) and this unit adds it to the part computed now.
// It is N independent FP13 adders with a per-lane enable: when use_stored is
// low the stored value is ignored (zero padding at an image or tile edge).
// Combinational.  The design names this block and its function; the adder
// structure is this design's own.
module acnpu_boundary_process
  import acnpu_pkg::*;
#(
  parameter int unsigned N = 8
) (
  input  logic              use_stored,
  input  fp13_t             cur    [N],
  input  fp13_t             stored [N],
  output fp13_t             sum    [N]
);
  always_comb begin
    for (int i = 0; i < int'(N); i++)
      sum[i] = use_stored ? fp_add(stored[i], cur[i]) : cur[i];
  end
endmodule
