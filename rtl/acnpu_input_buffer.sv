// acnpu_input_buffer: entry point of off-chip data.
//
// Two jobs, both fed from the off-chip bus.  (1) Image input for the first
// layer: the controller requests a 3 x 6 block of low-resolution pixels
// (three rows of one tile, six columns); the block returned by the off-chip
// memory is registered here with the rows that lie below the bottom of the
// image replaced by zero, which is the vertical zero padding of the first
// 3x1 layer and the input of the final flush tile row.  Data reach the
// clusters the cycle after the request, like the on-chip SRAMs.  (2) Weight
// loading: a stream of 40-bit beats (four FP10 weights) is packed into
// 320-bit weight SRAM words, eight beats per word, written to consecutive
// addresses from zero after wl_first.  The block is named in the design
// (between off-chip memory and the SRAMs); how it works is this design's.
module acnpu_input_buffer
  import acnpu_pkg::*;
#(
  parameter int unsigned WDEPTH = 640,
  localparam int unsigned WAW   = $clog2(WDEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  // image block path
  input  logic          px_req,
  input  logic [10:0]   px_row,      // first of the three rows
  input  logic [10:0]   img_h,
  input  fp13_t         ext_px [3][SEG_PX],
  output fp13_t         blk [3][SEG_PX],
  // weight path
  input  logic          wl_valid,
  input  logic          wl_first,
  input  logic [39:0]   wl_data,
  output logic          wt_we,
  output logic [WAW-1:0] wt_addr,
  output wvec_t         wt_wdata [4]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < 3; r++)
        for (int p = 0; p < int'(SEG_PX); p++) blk[r][p] <= '0;
    end else if (px_req) begin
      for (int r = 0; r < 3; r++)
        for (int p = 0; p < int'(SEG_PX); p++)
          blk[r][p] <= ((px_row + 11'(r)) < img_h) ? ext_px[r][p] : fp13_t'(0);
    end
  end

  logic [2:0]     beat;
  logic [WAW-1:0] waddr;
  logic [9:0]     pack [32];

  // beat and address of the incoming beat: wl_first restarts both
  logic [2:0]     b;
  logic [WAW-1:0] a;
  assign b = wl_first ? 3'd0 : beat;
  assign a = wl_first ? '0 : waddr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      beat <= '0; waddr <= '0; wt_we <= 1'b0; wt_addr <= '0;
      for (int i = 0; i < 32; i++) pack[i] <= '0;
    end else begin
      wt_we <= 1'b0;
      if (wl_valid) begin
        for (int i = 0; i < 4; i++) pack[4*b + i] <= wl_data[10*i +: 10];
        beat <= b + 3'd1;
        if (b == 3'd7) begin
          wt_we   <= 1'b1;
          wt_addr <= a;
          waddr   <= a + 1'b1;
        end else begin
          waddr   <= a;
        end
      end
    end
  end

  always_comb begin
    for (int c = 0; c < 4; c++)
      for (int l = 0; l < int'(LANES); l++) wt_wdata[c][l] = pack[8*c + l];
  end
endmodule
