// acnpu_feature_sram: on-chip feature memory holding one tile.
//
// The memory holds the 32-channel feature maps of one 3-row x TILE_W-pixel
// tile (3 x 192 x 32 x 13 bits = 29,952 bytes, the design's 30 KB) and is
// rewritten in place by every layer, which is what lets the whole network run
// on a tile without sending intermediate feature maps off chip.  It is built
// as three row banks; one word is a segment of six pixels x 32 channels, so
// one read returns the 3 x 6 x 32 block that feeds a triple of clusters.
// Reads are registered (data the cycle after rd_en).  Writes take a mask per
// row, pixel and 8-channel group so that layers that produce only some
// channels (the CBB branches) or some pixels (segment edges) leave the rest
// untouched.  One read port and one write port (a read and a write of the
// same word in one cycle returns the old data).  The row-bank organisation
// and the port widths are this design's choices.
module acnpu_feature_sram
  import acnpu_pkg::*;
#(
  parameter int unsigned TILE_W = 192,
  localparam int unsigned SEGS  = TILE_W / SEG_PX,
  localparam int unsigned AW    = $clog2(SEGS)
) (
  input  logic                  clk,
  input  logic                  rd_en,
  input  logic [AW-1:0]         rd_seg,
  output pix_t                  rd_data [3][SEG_PX],
  input  logic                  wr_en,
  input  logic [AW-1:0]         wr_seg,
  input  logic [NGRP-1:0]       wr_mask [3][SEG_PX],
  input  pix_t                  wr_data [3][SEG_PX]
);
  pix_t mem [3][SEGS][SEG_PX];

  always_ff @(posedge clk) begin
    if (rd_en) begin
      for (int r = 0; r < 3; r++)
        for (int p = 0; p < int'(SEG_PX); p++) rd_data[r][p] <= mem[r][rd_seg][p];
    end
    if (wr_en) begin
      for (int r = 0; r < 3; r++)
        for (int p = 0; p < int'(SEG_PX); p++)
          for (int g = 0; g < int'(NGRP); g++)
            if (wr_mask[r][p][g]) mem[r][wr_seg][p][8*g +: 8] <= wr_data[r][p][8*g +: 8];
    end
  end
endmodule
