// acnpu_pixel_shuffle: sub-pixel rearrangement of the last layer.
//
// The last 3x1 layer produces S*S channels per low-resolution pixel (4 for
// x2, 16 for x4).  Pixel shuffle places channel i*S + j of pixel (y, x) at
// high-resolution pixel (S*y + i, S*x + j).  This unit takes the block one
// cluster finishes, 3 rows x 2 columns of low-resolution pixels, and outputs
// the 3S x 2S high-resolution block with its top-left coordinate, registered
// (one cycle).  For x2 only the top-left 6 x 4 part of the 12 x 8 output is
// used; hr_rows/hr_cols give the valid size.  The channel order is the usual
// pixel-shuffle convention, an assumption of this design.
module acnpu_pixel_shuffle
  import acnpu_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic        scale_x4,
  input  logic [10:0] lr_row,
  input  logic [10:0] lr_col,
  input  fp13_t       lr_blk [3][2][16],
  output logic        out_valid,
  output logic [12:0] hr_row,
  output logic [12:0] hr_col,
  output logic [3:0]  hr_rows,
  output logic [3:0]  hr_cols,
  output fp13_t       hr_blk [12][8]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; hr_row <= '0; hr_col <= '0; hr_rows <= '0; hr_cols <= '0;
      for (int y = 0; y < 12; y++)
        for (int x = 0; x < 8; x++) hr_blk[y][x] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        hr_row  <= scale_x4 ? {lr_row, 2'b00} : {1'b0, lr_row, 1'b0};
        hr_col  <= scale_x4 ? {lr_col, 2'b00} : {1'b0, lr_col, 1'b0};
        hr_rows <= scale_x4 ? 4'd12 : 4'd6;
        hr_cols <= scale_x4 ? 4'd8 : 4'd4;
        for (int y = 0; y < 12; y++)
          for (int x = 0; x < 8; x++) begin
            if (scale_x4)
              hr_blk[y][x] <= lr_blk[y / 4][x / 4][(y % 4) * 4 + (x % 4)];
            else if (y < 6 && x < 4)
              hr_blk[y][x] <= lr_blk[y / 2][x / 2][(y % 2) * 2 + (x % 2)];
            else
              hr_blk[y][x] <= '0;
          end
      end
    end
  end
endmodule
