// acnpu_pe: one processing element (PE) of a cluster.
//
// Eight 13-bit features are multiplied by eight 10-bit weights, the eight
// products are summed by a three-level adder tree ((0+1)+(2+3))+((4+5)+(6+7)),
// and a partial sum coming from another PE is added last, as in the PE
// drawing of the design.  The PE has a single mode.  It is purely
// combinational; the cluster holds its inputs in the feature and weight
// buffers and registers what it keeps, so a result is available in the cycle
// its operands are presented.
//
// Ports: feat (8 x FP13, 104 bits), wgt (8 x FP10), psum (FP13) in;
// result (FP13) out.  The figure draws the weight bus as 104 bits while the
// text gives 10-bit weights; this design carries 8 x 10 = 80 bits.
module acnpu_pe
  import acnpu_pkg::*;
(
  input  fvec_t feat,
  input  wvec_t wgt,
  input  fp13_t psum,
  output fp13_t result
);
  fp13_t prod [LANES];
  fp13_t l1 [4];
  fp13_t l2 [2];
  fp13_t tree;

  always_comb begin
    for (int i = 0; i < int'(LANES); i++) prod[i] = fp_mul(feat[i], wgt[i]);
    for (int i = 0; i < 4; i++) l1[i] = fp_add(prod[2*i], prod[2*i+1]);
    for (int i = 0; i < 2; i++) l2[i] = fp_add(l1[2*i], l1[2*i+1]);
    tree   = fp_add(l2[0], l2[1]);
    result = fp_add(tree, psum);
  end
endmodule
