// acnpu_boundary_sram: partial sums across the horizontal tile border.
//
// A 3x1 (vertical) layer applied to a 3-row tile cannot finish the output
// row just below the tile, nor the row just above it.  Instead of fetching
// neighbouring rows, the clusters store two partial sums per column and
// channel here (the sums for the next tile row's first rows) and add back,
// through the boundary process, the two sums stored by the tile row above.
// One word covers the twelve columns the six clusters process at once for
// one output channel: 6 clusters x 2 columns x 2 partial sums x 13 bits =
// 312 bits (the 52-bit path drawn per cluster, six times).  The address is
// (3x1 layer, 12-column step across the image width, output channel).  The
// read is registered; the write of the same address comes one cycle later,
// after the old value has been read, which replaces the design's ping-pong
// pair of buffers by a read-before-write of each word.  Depth for a 960-pixel
// wide input (1080p at x2): 3 x 80 x 32 = 7,680 words, 299,520 bytes, which
// is more than the 142 KB the design quotes (see the documentation).
module acnpu_boundary_sram
  import acnpu_pkg::*;
#(
  parameter int unsigned IMG_W_MAX = 960,
  localparam int unsigned DEPTH    = 3 * (IMG_W_MAX / 12) * NCH,
  localparam int unsigned AW       = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output fp13_t         rd_data [NCLUSTERS][2][2],
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  fp13_t         wr_data [NCLUSTERS][2][2]
);
  fp13_t mem [DEPTH][NCLUSTERS][2][2];

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
    if (wr_en) mem[wr_addr] <= wr_data;
  end
endmodule
