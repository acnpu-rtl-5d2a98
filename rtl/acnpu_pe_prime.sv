// acnpu_pe_prime: the PE' element of a cluster, a PE with a second mode.
//
// Tree mode (acc_mode = 0) behaves exactly as a PE: eight products, adder
// tree, plus the incoming partial sum; the sum is on lane 0 of result and is
// combinational.  Accumulate mode (acc_mode = 1) turns the element into eight
// independent multiply-accumulate lanes: the scalar arriving on psum (the
// output of the 1x3 convolution in the PE column before it) is multiplied by
// each of the eight weights (eight 1x1 output channels) and added to that
// lane's accumulator.  The accumulators are registered; en adds one term,
// clr (together with en) restarts the sum from the current term.  result
// shows the accumulators in this mode.  Both modes follow the design's PE'
// description; the use of the psum port for the scalar input is this design's
// choice.
//
// Ports: feat 8 x FP13, wgt 8 x FP10, psum FP13, result 8 x FP13 (104 bits).
module acnpu_pe_prime
  import acnpu_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  acc_mode,
  input  logic  en,
  input  logic  clr,
  input  fvec_t feat,
  input  wvec_t wgt,
  input  fp13_t psum,
  output fvec_t result
);
  fvec_t acc_q;
  fvec_t acc_d;
  fp13_t tree_sum;

  acnpu_pe u_tree (.feat(feat), .wgt(wgt), .psum(psum), .result(tree_sum));

  always_comb begin
    for (int i = 0; i < int'(LANES); i++)
      acc_d[i] = fp_add(clr ? fp13_t'(0) : acc_q[i], fp_mul(psum, wgt[i]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                acc_q <= '0;
    else if (acc_mode && en)   acc_q <= acc_d;
  end

  always_comb begin
    if (acc_mode) result = acc_q;
    else begin
      result    = '0;
      result[0] = tree_sum;
    end
  end
endmodule
