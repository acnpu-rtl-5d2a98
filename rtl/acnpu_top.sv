// acnpu_top: the ACNPU super-resolution accelerator.
//
// Six processing clusters (18 PE + 8 PE' each, 1,248 multipliers in all),
// three on-chip memories (feature, weight and boundary SRAM), the input
// buffer, the controller (cluster and SRAM control) and the pixel shuffle on
// the output path.  The whole ACNet runs on one 3 x 192 tile of the
// low-resolution frame before the next tile starts, so the only off-chip
// traffic is the input image, the weights (once) and the output image.
//
// Interfaces (all synchronous to clk, active-low asynchronous reset):
//  * configuration: scale_x4 (x2 or x4), n_cbb (1..8 channel bypass blocks),
//    img_w (multiple of 12) and img_h (multiple of 3) of the low-resolution
//    frame; start pulses a frame, busy/done report it.
//  * weight load, before start: wl_valid/wl_first/wl_data, 40-bit beats of
//    four FP10 weights, eight beats per weight SRAM word.
//  * image read from off-chip memory: px_req with px_row/px_col asks for the
//    3 x 6 block of pixels whose top-left pixel is (px_row, px_col); the
//    memory answers on px_data in the same cycle (the input buffer registers
//    it).  Rows at or below img_h are zeroed by the input buffer.
//  * image write to off-chip memory: out_valid with a block of high
//    resolution pixels out_blk (12 x 8, valid part out_rows x out_cols) whose
//    top-left pixel is (out_row, out_col).
// The block diagram (clusters, SRAMs, input buffer, controller) is the
// design's; the port protocols are this design's own.
module acnpu_top
  import acnpu_pkg::*;
#(
  parameter int unsigned TILE_W    = 192,
  parameter int unsigned IMG_W_MAX = 960,
  parameter int unsigned WDEPTH    = 640,
  localparam int unsigned SAW      = $clog2(TILE_W / SEG_PX),
  localparam int unsigned WAW      = $clog2(WDEPTH),
  localparam int unsigned BAW      = $clog2(3 * (IMG_W_MAX / 12) * NCH)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        scale_x4,
  input  logic [3:0]  n_cbb,
  input  logic [10:0] img_w,
  input  logic [10:0] img_h,
  output logic        busy,
  output logic        done,
  input  logic        wl_valid,
  input  logic        wl_first,
  input  logic [39:0] wl_data,
  output logic        px_req,
  output logic [10:0] px_row,
  output logic [10:0] px_col,
  input  fp13_t       px_data [3][SEG_PX],
  output logic        out_valid,
  output logic [12:0] out_row,
  output logic [12:0] out_col,
  output logic [3:0]  out_rows,
  output logic [3:0]  out_cols,
  output fp13_t       out_blk [12][8]
);
  // input buffer
  fp13_t      px_blk [3][SEG_PX];
  logic       wt_we;
  logic [WAW-1:0] wt_addr;
  wvec_t      wt_wdata [4];

  acnpu_input_buffer #(.WDEPTH(WDEPTH)) u_inbuf (
    .clk, .rst_n, .px_req, .px_row, .img_h, .ext_px(px_data), .blk(px_blk),
    .wl_valid, .wl_first, .wl_data, .wt_we, .wt_addr, .wt_wdata);

  // feature SRAM
  logic           fs_rd_en, fs_wr_en;
  logic [SAW-1:0] fs_rd_seg, fs_wr_seg;
  pix_t           fs_rd_data [3][SEG_PX];
  logic [NGRP-1:0] fs_wr_mask [3][SEG_PX];
  pix_t           fs_wr_data [3][SEG_PX];

  acnpu_feature_sram #(.TILE_W(TILE_W)) u_fsram (
    .clk, .rd_en(fs_rd_en), .rd_seg(fs_rd_seg), .rd_data(fs_rd_data),
    .wr_en(fs_wr_en), .wr_seg(fs_wr_seg), .wr_mask(fs_wr_mask), .wr_data(fs_wr_data));

  // weight SRAM
  logic           ws_rd_en;
  logic [WAW-1:0] ws_addr_a, ws_addr_b;
  wvec_t          ws_data_a [4], ws_data_b [4];

  acnpu_weight_sram #(.DEPTH(WDEPTH)) u_wsram (
    .clk, .rd_en(ws_rd_en), .rd_addr_a(ws_addr_a), .rd_addr_b(ws_addr_b),
    .rd_data_a(ws_data_a), .rd_data_b(ws_data_b),
    .wr_en(wt_we), .wr_addr(wt_addr), .wr_data(wt_wdata));

  // boundary SRAM
  logic           bs_rd_en, bs_wr_en;
  logic [BAW-1:0] bs_rd_addr, bs_wr_addr;
  fp13_t          bs_rd_data [NCLUSTERS][2][2];
  fp13_t          bs_wr_data [NCLUSTERS][2][2];

  acnpu_boundary_sram #(.IMG_W_MAX(IMG_W_MAX)) u_bsram (
    .clk, .rd_en(bs_rd_en), .rd_addr(bs_rd_addr), .rd_data(bs_rd_data),
    .wr_en(bs_wr_en), .wr_addr(bs_wr_addr), .wr_data(bs_wr_data));

  // controller
  mode_e      cl_mode;
  logic       cl_ld [NCLUSTERS];
  pix_t       cl_feat [NCLUSTERS][NPE_ROWS];
  logic       cl_w_ld, cl_first, cl_last, cl_act, cl_seg_first, cl_use_bnd;
  logic [4:0] cl_ch;
  logic [1:0] cl_grp [NCLUSTERS];
  logic       cl_bnd_we [NCLUSTERS];
  pix_t       cl_obuf [NCLUSTERS][NPE_ROWS];
  fvec_t      cl_hz [NCLUSTERS][7];
  logic       cl_hz_valid [NCLUSTERS];
  logic       ps_valid, cfg_x4;
  logic [10:0] ps_row, ps_col;
  fp13_t      ps_blk [3][2][16];

  acnpu_ctrl #(.TILE_W(TILE_W), .IMG_W_MAX(IMG_W_MAX), .WDEPTH(WDEPTH)) u_ctrl (
    .clk, .rst_n, .start, .scale_x4, .n_cbb, .img_w, .img_h, .busy, .done,
    .px_req, .px_row, .px_col, .px_blk,
    .fs_rd_en, .fs_rd_seg, .fs_rd_data, .fs_wr_en, .fs_wr_seg, .fs_wr_mask, .fs_wr_data,
    .ws_rd_en, .ws_addr_a, .ws_addr_b,
    .bs_rd_en, .bs_rd_addr, .bs_wr_en, .bs_wr_addr,
    .cl_mode, .cl_ld, .cl_feat, .cl_w_ld, .cl_ch, .cl_grp, .cl_first, .cl_last,
    .cl_act, .cl_seg_first, .cl_use_bnd, .cl_bnd_we(cl_bnd_we[0]), .cl_obuf, .cl_hz,
    .ps_valid, .ps_row, .ps_col, .ps_blk, .cfg_x4);

  // six clusters: 0-2 take weight port A, 3-5 port B
  wvec_t cl_w [NCLUSTERS][4];
  always_comb begin
    for (int c = 0; c < int'(NCLUSTERS); c++) cl_w[c] = (c < 3) ? ws_data_a : ws_data_b;
  end

  for (genvar c = 0; c < int'(NCLUSTERS); c++) begin : g_cl
    acnpu_cluster u_cl (
      .clk, .rst_n, .mode(cl_mode),
      .ld(cl_ld[c]), .feat_in(cl_feat[c]),
      .w_ld(cl_w_ld), .w_in(cl_w[c]),
      .ch_in(cl_ch), .grp_in(cl_grp[c]), .first_in(cl_first), .last_in(cl_last),
      .act_in(cl_act), .seg_first_in(cl_seg_first), .use_bnd_in(cl_use_bnd),
      .bnd_in(bs_rd_data[c]), .bnd_out(bs_wr_data[c]), .bnd_we(cl_bnd_we[c]),
      .obuf_out(cl_obuf[c]), .hz_out(cl_hz[c]), .hz_valid(cl_hz_valid[c]));
  end

  // output path
  acnpu_pixel_shuffle u_ps (
    .clk, .rst_n, .in_valid(ps_valid), .scale_x4(cfg_x4), .lr_row(ps_row), .lr_col(ps_col),
    .lr_blk(ps_blk), .out_valid, .hr_row(out_row), .hr_col(out_col),
    .hr_rows(out_rows), .hr_cols(out_cols), .hr_blk(out_blk));

  // the six clusters run in lock step (checked outside reset; lint notes
  // that rst_n is used both as an asynchronous reset and in this check)
  for (genvar c = 1; c < int'(NCLUSTERS); c++) begin : g_lockstep
    a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
      cl_bnd_we[c] == cl_bnd_we[0] && cl_hz_valid[c] == cl_hz_valid[0]);
  end
endmodule
