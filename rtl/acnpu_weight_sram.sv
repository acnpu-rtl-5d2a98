// acnpu_weight_sram: on-chip weight memory.
//
// ACNet has about 17K weights, small enough to be kept on chip for the whole
// frame.  One word is what the clusters need in one cycle: four columns of
// eight FP10 weights (W0, W1, W2 for the three PE columns and W3 for the PE'
// column), 320 bits.  640 words are 25,600 bytes, the design's 25 KB.  Two
// registered read ports serve the two halves of the clusters (clusters 0-2
// and 3-5), which need different weights when the two CBB branches run side
// by side; in the other modes both ports read the same word.  One write port
// fills the memory from the input buffer before a frame.  The word layout
// and the two ports are this design's choices.
module acnpu_weight_sram
  import acnpu_pkg::*;
#(
  parameter int unsigned DEPTH = 640,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr_a,
  input  logic [AW-1:0] rd_addr_b,
  output wvec_t         rd_data_a [4],
  output wvec_t         rd_data_b [4],
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  wvec_t         wr_data [4]
);
  wvec_t mem [DEPTH][4];

  always_ff @(posedge clk) begin
    if (rd_en) begin
      rd_data_a <= mem[rd_addr_a];
      rd_data_b <= mem[rd_addr_b];
    end
    if (wr_en) mem[wr_addr] <= wr_data;
  end
endmodule
