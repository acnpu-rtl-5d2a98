// acnpu_ctrl: cluster control and SRAM control of the ACNPU.
//
// The controller runs the whole ACNet on one tile of the low-resolution
// image (3 rows x up to TILE_W columns) before moving to the next tile
// (holistic model fusion).  Tiles go left to right, then down; one extra tile
// row of zero input at the bottom flushes the rows still held back by the
// vertical layers.  Per tile, the layer list is
//     conv 3x1 (1->32)                         mode M1
//     n_cbb x { 1x3+1x1 of both branches       mode M2
//               1x1 32->32                     mode M3 }
//     conv 3x1 group 4 (32->32) + LeakyReLU    mode M4
//     conv 3x1 group 4 (32->4 or 32->16)       mode M4, to the pixel shuffle
// Every layer is cut into steps.  In M1, M3 and M4 a step covers two
// six-pixel segments (twelve columns): clusters 0-2 take the first segment,
// clusters 3-5 the second.  In M2 a step covers one segment, clusters 0-2
// running branch A (channels 0-7) and clusters 3-5 branch B (channels 8-15)
// of the same three rows.  A step of K compute cycles (one output channel,
// or one 1x3 channel in M2, per cycle) takes K+3 cycles:
//   pc 0        read first segment (feature SRAM, or input buffer in M1)
//   pc 1        read second segment, load clusters 0-2, issue channel 0
//   pc 2        load clusters 3-5, issue channel 1
//   pc 1..K     issue channel pc-1: weight SRAM read
//   +1          weight word in the clusters' weight buffer, boundary SRAM read
//   +2          compute, boundary SRAM write, output buffer write
// so the features stay stationary in the clusters for the K cycles of the
// step.  Results are written back to the feature SRAM in pc 1 and 2 of the
// next step, or in a short tail after the last step of a layer.  In the
// last layer the results go to the pixel shuffle instead, one cluster per
// cycle in a 7-cycle tail after every step.
//
// Rows: a 3x1 layer on tile row t outputs rows one higher than its input, so
// the first, second and third 3x1 layer produce rows 3t-1.., 3t-2.., 3t-3..;
// rows outside the image are written as zero, which gives the zero padding of
// the next vertical layer.  Stored boundary sums are ignored on tile row 0.
// 1x3 layers are zero padded at the left and right edge of each tile.
//
// The four modes, the two cluster triples, the read pattern (two reads per
// step, features held for 32, 16 or 8 cycles) and the tile size follow the
// design; the cycle-level schedule, the row-delay bookkeeping, the weight
// word layout and the tile order are this design's own.
module acnpu_ctrl
  import acnpu_pkg::*;
#(
  parameter int unsigned TILE_W    = 192,
  parameter int unsigned IMG_W_MAX = 960,
  parameter int unsigned WDEPTH    = 640,
  localparam int unsigned SEGS     = TILE_W / SEG_PX,
  localparam int unsigned SAW      = $clog2(SEGS),
  localparam int unsigned WAW      = $clog2(WDEPTH),
  localparam int unsigned BDEPTH   = 3 * (IMG_W_MAX / 12) * NCH,
  localparam int unsigned BAW      = $clog2(BDEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  // configuration and status
  input  logic          start,
  input  logic          scale_x4,
  input  logic [3:0]    n_cbb,       // 1..8 channel bypass blocks
  input  logic [10:0]   img_w,       // multiple of 12, <= IMG_W_MAX
  input  logic [10:0]   img_h,       // multiple of 3
  output logic          busy,
  output logic          done,
  // input buffer
  output logic          px_req,
  output logic [10:0]   px_row,
  output logic [10:0]   px_col,
  input  fp13_t         px_blk [3][SEG_PX],
  // feature SRAM
  output logic          fs_rd_en,
  output logic [SAW-1:0] fs_rd_seg,
  input  pix_t          fs_rd_data [3][SEG_PX],
  output logic          fs_wr_en,
  output logic [SAW-1:0] fs_wr_seg,
  output logic [NGRP-1:0] fs_wr_mask [3][SEG_PX],
  output pix_t          fs_wr_data [3][SEG_PX],
  // weight SRAM
  output logic          ws_rd_en,
  output logic [WAW-1:0] ws_addr_a,
  output logic [WAW-1:0] ws_addr_b,
  // boundary SRAM
  output logic          bs_rd_en,
  output logic [BAW-1:0] bs_rd_addr,
  output logic          bs_wr_en,
  output logic [BAW-1:0] bs_wr_addr,
  // clusters
  output mode_e         cl_mode,
  output logic          cl_ld [NCLUSTERS],
  output pix_t          cl_feat [NCLUSTERS][NPE_ROWS],
  output logic          cl_w_ld,
  output logic [4:0]    cl_ch,
  output logic [1:0]    cl_grp [NCLUSTERS],
  output logic          cl_first,
  output logic          cl_last,
  output logic          cl_act,
  output logic          cl_seg_first,
  output logic          cl_use_bnd,
  input  logic          cl_bnd_we,
  input  pix_t          cl_obuf [NCLUSTERS][NPE_ROWS],
  input  fvec_t         cl_hz [NCLUSTERS][7],
  // to the pixel shuffle
  output logic          ps_valid,
  output logic [10:0]   ps_row,
  output logic [10:0]   ps_col,
  output fp13_t         ps_blk [3][2][16],
  output logic          cfg_x4
);
  // weight SRAM word map
  localparam int unsigned WB_CONV1 = 0;
  localparam int unsigned WB_CBB   = 32;    // 64 words per CBB
  localparam int unsigned WB_CONV2 = 32 + 8 * 64;
  localparam int unsigned WB_CONV3 = WB_CONV2 + 32;

  typedef enum logic [1:0] {S_IDLE, S_STEP, S_TAIL} state_e;
  state_e state;

  logic [3:0]  cfg_ncbb;
  logic [10:0] cfg_w, cfg_h;
  logic [8:0]  trow;       // tile row
  logic [3:0]  tcol;       // tile column
  logic [4:0]  li;         // layer index
  logic [5:0]  n;          // step in layer
  logic [5:0]  pc;         // cycle in step / tail
  logic        wb_pend;    // previous step waits for write-back
  logic [5:0]  wb_n;       // step being written back

  // ---------------- layer decode ----------------
  mode_e       l_mode;
  logic        l_vert, l_act, l_final;
  logic [1:0]  l_lv;          // which 3x1 layer (boundary SRAM region)
  logic [5:0]  l_k;           // compute cycles per step
  logic [WAW-1:0] l_wa, l_wb; // weight base addresses
  logic [2:0]  l_gsh;         // log2(output channels per group) in M4
  logic [4:0]  nlayers;
  logic [10:0] tile_x0, tw;
  logic [5:0]  nsteps;

  always_comb begin
    logic [3:0] b;
    nlayers = 5'(2 * cfg_ncbb + 3);
    b       = 4'((li - 5'd1) >> 1);
    l_mode  = M1_CONV3X1; l_vert = 1'b1; l_act = 1'b0; l_final = 1'b0; l_lv = 2'd0;
    l_k     = 6'd32; l_gsh = 3'd3;
    l_wa    = WAW'(WB_CONV1); l_wb = WAW'(WB_CONV1);
    if (li == 5'd0) begin
      l_mode = M1_CONV3X1;
    end else if (li <= 5'(2 * cfg_ncbb)) begin
      l_vert = 1'b0;
      if (li[0]) begin
        l_mode = M2_CONV1X3; l_k = 6'd16;
        l_wa = WAW'(WB_CBB + 64 * b); l_wb = WAW'(WB_CBB + 64 * b + 16);
      end else begin
        l_mode = M3_CONV1X1;
        l_wa = WAW'(WB_CBB + 64 * b + 32); l_wb = l_wa;
      end
    end else if (li == 5'(2 * cfg_ncbb + 1)) begin
      l_mode = M4_GCONV3X1; l_act = 1'b1; l_lv = 2'd1;
      l_wa = WAW'(WB_CONV2); l_wb = l_wa;
    end else begin
      l_mode = M4_GCONV3X1; l_final = 1'b1; l_lv = 2'd2;
      l_k    = cfg_x4 ? 6'd16 : 6'd4;
      l_gsh  = cfg_x4 ? 3'd2 : 3'd0;
      l_wa = WAW'(WB_CONV3); l_wb = l_wa;
    end
    tile_x0 = 11'(tcol * TILE_W);
    tw      = ((cfg_w - tile_x0) > 11'(TILE_W)) ? 11'(TILE_W) : (cfg_w - tile_x0);
    nsteps  = (l_mode == M2_CONV1X3) ? 6'(tw / 6) : 6'(tw / 12);
  end

  wire two_reads = (l_mode != M2_CONV1X3);
  wire [5:0] step_len = l_k + 6'd3;
  wire [5:0] tail_len = l_final ? 6'd7 : 6'd3;

  // ---------------- state machine ----------------
  wire step_end = (state == S_STEP) && (pc == step_len - 6'd1);
  wire last_step = (n == nsteps - 6'd1);
  wire tail_end = (state == S_TAIL) && (pc == tail_len - 6'd1);
  wire last_layer = (li == nlayers - 5'd1);
  wire last_tcol = (11'(tile_x0 + tw) >= cfg_w);
  wire last_trow = (11'(trow) * 11'd3 >= cfg_h);   // the flush tile row

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; busy <= 1'b0; done <= 1'b0;
      cfg_x4 <= 1'b0; cfg_ncbb <= 4'd1; cfg_w <= '0; cfg_h <= '0;
      trow <= '0; tcol <= '0; li <= '0; n <= '0; pc <= '0;
      wb_pend <= 1'b0; wb_n <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          state <= S_STEP; busy <= 1'b1;
          cfg_x4 <= scale_x4; cfg_ncbb <= n_cbb; cfg_w <= img_w; cfg_h <= img_h;
          trow <= '0; tcol <= '0; li <= '0; n <= '0; pc <= '0; wb_pend <= 1'b0;
        end
        S_STEP: begin
          if (pc == 6'd2) wb_pend <= 1'b0;        // previous step written back
          if (step_end) begin
            pc <= '0;
            wb_n <= n;
            if (last_step || l_final) begin
              state <= S_TAIL;
            end else begin
              n <= n + 6'd1;
              wb_pend <= 1'b1;
            end
          end else begin
            pc <= pc + 6'd1;
          end
        end
        S_TAIL: begin
          if (tail_end) begin
            pc <= '0;
            state <= S_STEP;
            if (!last_step) begin
              n <= n + 6'd1;                        // final layer: next step
            end else begin
              n <= '0;
              if (!last_layer) li <= li + 5'd1;
              else begin
                li <= '0;
                if (!last_tcol) tcol <= tcol + 4'd1;
                else begin
                  tcol <= '0;
                  if (!last_trow) trow <= trow + 9'd1;
                  else begin
                    state <= S_IDLE; busy <= 1'b0; done <= 1'b1;
                  end
                end
              end
            end
          end else begin
            pc <= pc + 6'd1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------- loads ----------------
  wire in_step = (state == S_STEP);
  wire rd0 = in_step && (pc == 6'd0);
  wire rd1 = in_step && (pc == 6'd1) && two_reads;
  logic [SAW-1:0] seg_a, seg_b;
  assign seg_a = two_reads ? SAW'(2 * n) : SAW'(n);
  assign seg_b = SAW'(2 * n + 1);

  assign fs_rd_en  = (rd0 || rd1) && (l_mode != M1_CONV3X1);
  assign fs_rd_seg = rd1 ? seg_b : seg_a;
  assign px_req    = (rd0 || rd1) && (l_mode == M1_CONV3X1);
  assign px_row    = 11'(trow * 3);
  assign px_col    = 11'(tile_x0 + 11'(SEG_PX) * 11'(rd1 ? seg_b : seg_a));

  always_comb begin
    for (int c = 0; c < int'(NCLUSTERS); c++) begin
      if (l_mode == M2_CONV1X3) cl_ld[c] = in_step && (pc == 6'd1);
      else if (c < 3)           cl_ld[c] = in_step && (pc == 6'd1);
      else                      cl_ld[c] = in_step && (pc == 6'd2);
      for (int i = 0; i < int'(NPE_ROWS); i++) begin
        cl_feat[c][i] = '0;
        if (l_mode == M1_CONV3X1)
          cl_feat[c][i][0] = px_blk[i % 3][2 * (c % 3) + i / 3];
        else if (l_vert)
          cl_feat[c][i] = fs_rd_data[i % 3][2 * (c % 3) + i / 3];
        else
          cl_feat[c][i] = fs_rd_data[c % 3][i];
      end
    end
  end

  // ---------------- weight issue pipeline ----------------
  wire        iss = in_step && (pc >= 6'd1) && (pc <= l_k);
  wire [5:0]  k0  = pc - 6'd1;
  logic       iss1, iss2;
  logic [5:0] k1;
  logic [BAW-1:0] baddr1;

  assign ws_rd_en  = iss;
  assign ws_addr_a = l_wa + WAW'(k0);
  assign ws_addr_b = l_wb + WAW'(k0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      iss1 <= 1'b0; iss2 <= 1'b0; k1 <= '0; baddr1 <= '0;
    end else begin
      iss1 <= iss; iss2 <= iss1;
      k1 <= k0;
      baddr1 <= bs_rd_addr;
    end
  end

  // cluster controls travel with the weight word (w_ld one cycle after issue)
  assign cl_mode      = l_mode;
  assign cl_w_ld      = iss1;
  assign cl_ch        = k1[4:0];
  assign cl_first     = (k1 == 6'd0);
  assign cl_last      = (k1 == l_k - 6'd1);
  assign cl_act       = l_act;
  assign cl_seg_first = (n == 6'd0);
  assign cl_use_bnd   = (trow != 9'd0);
  always_comb begin
    for (int c = 0; c < int'(NCLUSTERS); c++) begin
      if (l_mode == M2_CONV1X3)       cl_grp[c] = (c < 3) ? 2'd0 : 2'd1;
      else if (l_mode == M4_GCONV3X1) cl_grp[c] = 2'(k1 >> l_gsh);
      else                            cl_grp[c] = 2'd0;
    end
  end

  // boundary SRAM: read with the weight word, write one cycle later
  wire [10:0] gstep = 11'(tile_x0 / 12) + 11'(n);
  assign bs_rd_en   = iss1 && l_vert;
  assign bs_rd_addr = BAW'((int'(l_lv) * int'(IMG_W_MAX / 12) + int'(gstep)) * int'(NCH) + int'(k1[4:0]));
  assign bs_wr_en   = iss2 && cl_bnd_we;
  assign bs_wr_addr = baddr1;

  // ---------------- write-back ----------------
  // active in pc 1 and 2 of the next step of the same layer, or in the tail
  logic wb0, wb1;
  always_comb begin
    wb0 = ((state == S_STEP) && wb_pend && pc == 6'd1) || ((state == S_TAIL) && pc == 6'd1);
    wb1 = ((state == S_STEP) && wb_pend && pc == 6'd2) || ((state == S_TAIL) && pc == 6'd2);
    if (l_final) begin wb0 = 1'b0; wb1 = 1'b0; end
  end

  logic [2:0] rowok;   // output rows of this 3x1 layer inside the image
  always_comb begin
    for (int r = 0; r < 3; r++) begin
      int row;
      row = 3 * int'(trow) - 1 - int'(l_lv) + r;
      rowok[r] = (row >= 0) && (row < int'(cfg_h));
    end
  end

  wire wb_last = (wb_n == nsteps - 6'd1);

  always_comb begin
    int t;
    t = wb1 ? 3 : 0;      // cluster triple written in this cycle
    fs_wr_en  = (wb0 || wb1) && !(l_mode == M2_CONV1X3 && wb1 && wb_n == 6'd0);
    fs_wr_seg = '0;
    for (int r = 0; r < 3; r++)
      for (int p = 0; p < int'(SEG_PX); p++) begin
        fs_wr_mask[r][p] = '0;
        fs_wr_data[r][p] = '0;
      end
    if (l_mode == M2_CONV1X3) begin
      fs_wr_seg = wb1 ? SAW'(wb_n - 6'd1) : SAW'(wb_n);
      for (int r = 0; r < 3; r++)
        for (int p = 0; p < int'(SEG_PX); p++) begin
          if (wb0 && (p < 5 || wb_last)) begin
            fs_wr_mask[r][p] = 4'b0011;
            fs_wr_data[r][p][0 +: 8] = cl_hz[r][p + 1];
            fs_wr_data[r][p][8 +: 8] = cl_hz[r + 3][p + 1];
          end
          if (wb1 && p == 5) begin
            fs_wr_mask[r][p] = 4'b0011;
            fs_wr_data[r][p][0 +: 8] = cl_hz[r][0];
            fs_wr_data[r][p][8 +: 8] = cl_hz[r + 3][0];
          end
        end
    end else begin
      fs_wr_seg = SAW'(2 * wb_n + (wb1 ? 1 : 0));
      for (int r = 0; r < 3; r++)
        for (int p = 0; p < int'(SEG_PX); p++) begin
          fs_wr_mask[r][p] = 4'b1111;
          if (l_vert)
            fs_wr_data[r][p] = rowok[r] ? cl_obuf[t + p / 2][3 * (p % 2) + r] : pix_t'(0);
          else
            fs_wr_data[r][p] = cl_obuf[t + r][p];
        end
    end
  end

  // ---------------- final layer output ----------------
  always_comb begin
    int c;
    c = int'(pc) - 1;
    if (c < 0 || c > 5) c = 0;
    ps_valid = (state == S_TAIL) && l_final && (pc >= 6'd1) && (pc <= 6'd6) && (trow != 9'd0);
    ps_row   = 11'(3 * (int'(trow) - 1));
    ps_col   = 11'(int'(tile_x0) + (2 * int'(wb_n) + c / 3) * int'(SEG_PX) + 2 * (c % 3));
    for (int r = 0; r < 3; r++)
      for (int g = 0; g < 2; g++)
        for (int ch = 0; ch < 16; ch++) ps_blk[r][g][ch] = cl_obuf[c][3 * g + r][ch];
  end

endmodule
