// acnpu_cluster: one processing cluster of the ACNPU (18 PE + 8 PE').
//
// The cluster holds up to six pixels of 32 channels stationary in its
// feature buffer and, every cycle, receives one word of weights for its four
// PE columns (W0..W2 for the three PE columns, W3 for the PE' column).  The
// same PE grid runs all layers of ACNet by choosing where each PE takes its
// features and its incoming partial sum from:
//
//  * Vertical modes (M1 first 3x1 layer, M4 3x1 group layers).  The six
//    buffered pixels are two columns of three rows (pixel 3g+r = row r of
//    column g).  PE(i,j) multiplies pixel i by tap j; partial sums run down
//    the diagonals (PE(i-1,j-1) -> PE(i,j)) and are cut with zero at the
//    border between the two columns.  Per column this gives five sums: rows
//    -1 and 0 are completed by the boundary process with the two partial sums
//    stored in the boundary SRAM by the tile row above, row 1 is complete, and
//    the partial sums for rows 2 and 3 leave on bnd_out for the tile row
//    below.  Outputs therefore come one row higher than the inputs: a tile's
//    three output rows are its inputs' rows -1, 0 and 1.
//  * M2: CBB 1x3 convolution cascaded into the 1x1 (16->8) convolution.
//    The six pixels are consecutive pixels of one row.  The diagonals are not
//    cut, giving eight sums for output positions -1..6; positions -1..4 come
//    from PE column 2 into PE' 0..5 and positions 5 and 6 from the bottom row
//    into PE' 6 and 7.  The PE's run in accumulate mode: every cycle one 1x3
//    output channel k arrives and is multiplied by the eight 1x1 weights of
//    that channel, so after the 16 channels each PE' holds eight 1x1 outputs.
//    Since no activation sits between the two convolutions, positions -1, 0,
//    5 and 6 can be completed after the 1x1: PE' 6 and 7 are kept in the
//    boundary buffer (2 x 8 x FP13 = 208 bits) for the next segment, and the
//    boundary process adds them in.  LeakyReLU follows.
//  * M3: 1x1 32->32 fusion layer.  Each PE of a row gets its own eight input
//    channels (0:7, 8:15, 16:23 on the PEs, 24:31 on the PE'), partial sums
//    run along the row and the PE' in tree mode delivers output channel k of
//    the row's pixel.
//
// Timing: the weight word and the per-cycle controls are registered in the
// weight buffer when w_ld is high (one channel per cycle) and used in the
// next cycle, when the boundary SRAM data bnd_in must be present and
// bnd_out/bnd_we are produced.  Per-cycle outputs are written into the
// output buffer at channel ch_in, read through obuf_out.  In M2 the cycle
// after the last channel (first_in/last_in mark the 16 channels) latches the
// seven completed pixels into hz_out: hz_out[0] is the previous segment's
// pixel 5, hz_out[1..6] are pixels 0..5 of this segment (pixel 5 valid only
// for the last segment of a tile row, where the right neighbour is zero).
//
// The PE/PE' grid, the diagonal and row-wise accumulation, the boundary
// buffer and boundary process follow the design's cluster drawings; the
// exact sum order, the register timing and the buffer organisation are this
// design's own.
module acnpu_cluster
  import acnpu_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  mode_e  mode,
  // feature buffer load
  input  logic   ld,
  input  pix_t   feat_in [NPE_ROWS],
  // per-cycle weight word and controls
  input  logic   w_ld,
  input  wvec_t  w_in [4],
  input  logic [4:0] ch_in,     // output channel written into the output buffer
  input  logic [1:0] grp_in,    // input channel group used by M1/M2/M4
  input  logic   first_in,      // M2: first 1x3 channel of a segment
  input  logic   last_in,       // M2: last 1x3 channel of a segment
  input  logic   act_in,        // LeakyReLU on per-cycle outputs (M4)
  input  logic   seg_first_in,  // M2: first segment of a tile row
  input  logic   use_bnd_in,    // vertical: stored boundary sums are valid
  // boundary SRAM side (vertical modes), [column][0: row -1, 1: row 0 / row 2, row 3]
  input  fp13_t  bnd_in  [2][2],
  output fp13_t  bnd_out [2][2],
  output logic   bnd_we,
  // results
  output pix_t   obuf_out [NPE_ROWS],
  output fvec_t  hz_out [7],
  output logic   hz_valid
);
  // ---------------- feature buffer and weight buffer ----------------
  pix_t        fb [NPE_ROWS];
  wvec_t       wb [4];
  logic        v_q, first_q, last_q, act_q, segf_q, useb_q, fin_q;
  logic [4:0]  ch_q;
  logic [1:0]  grp_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(NPE_ROWS); i++) fb[i] <= '0;
    end else if (ld) begin
      fb <= feat_in;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < 4; j++) wb[j] <= '0;
      v_q <= 1'b0; first_q <= 1'b0; last_q <= 1'b0; act_q <= 1'b0;
      segf_q <= 1'b0; useb_q <= 1'b0; ch_q <= '0; grp_q <= '0;
    end else begin
      v_q <= w_ld;
      if (w_ld) begin
        wb <= w_in;
        ch_q <= ch_in; grp_q <= grp_in; first_q <= first_in; last_q <= last_in;
        act_q <= act_in; segf_q <= seg_first_in; useb_q <= use_bnd_in;
      end
    end
  end

  wire vert = (mode == M1_CONV3X1) || (mode == M4_GCONV3X1);

  // ---------------- PE grid ----------------
  fp13_t pe_res [NPE_ROWS][NPE_COLS];

  for (genvar i = 0; i < int'(NPE_ROWS); i++) begin : g_row
    for (genvar j = 0; j < int'(NPE_COLS); j++) begin : g_col
      fvec_t ft;
      fp13_t ps, res;
      // input reconfiguration: own channel group in M3, row broadcast otherwise
      assign ft = (mode == M3_CONV1X1) ? fb[i][8*j +: 8] : fb[i][8*grp_q +: 8];
      // partial-sum source: along the row in M3, down the diagonal otherwise,
      // cut with zero between the two pixel columns of the vertical modes
      if (j == 0) begin : g_p0
        assign ps = '0;
      end else if (i == 0) begin : g_p1
        assign ps = (mode == M3_CONV1X1) ? g_row[i].g_col[j-1].res : fp13_t'(0);
      end else begin : g_p2
        assign ps = (mode == M3_CONV1X1)       ? g_row[i].g_col[j-1].res :
                    (vert && (i % 3) == 0)     ? fp13_t'(0) :
                                                 g_row[i-1].g_col[j-1].res;
      end
      acnpu_pe u_pe (.feat(ft), .wgt(wb[j]), .psum(ps), .result(res));
      assign pe_res[i][j] = res;
    end
  end

  // ---------------- PE' column (6) and the two bottom PE' ----------------
  fvec_t pp_feat [8];
  fp13_t pp_psum [8];
  fvec_t pp_res  [8];
  wire   pp_acc = (mode == M2_CONV1X3);

  always_comb begin
    for (int i = 0; i < 8; i++) begin
      pp_feat[i] = (i < int'(NPE_ROWS) && mode == M3_CONV1X1) ? fb[i % NPE_ROWS][24 +: 8] : '0;
      if (i < int'(NPE_ROWS)) pp_psum[i] = pe_res[i % NPE_ROWS][2];
      else if (i == 6)        pp_psum[i] = pe_res[5][1];
      else                    pp_psum[i] = pe_res[5][0];
    end
  end

  for (genvar i = 0; i < 8; i++) begin : g_pp
    acnpu_pe_prime u_pp (
      .clk(clk), .rst_n(rst_n), .acc_mode(pp_acc), .en(v_q), .clr(first_q),
      .feat(pp_feat[i]), .wgt(wb[3]), .psum(pp_psum[i]), .result(pp_res[i]));
  end

  // ---------------- vertical modes: boundary process ----------------
  fp13_t vb_cur [4], vb_sto [4], vb_sum [4];
  always_comb begin
    for (int g = 0; g < 2; g++) begin
      vb_cur[2*g]   = pe_res[3*g][2];
      vb_cur[2*g+1] = pe_res[3*g+1][2];
      vb_sto[2*g]   = bnd_in[g][0];
      vb_sto[2*g+1] = bnd_in[g][1];
    end
  end
  acnpu_boundary_process #(.N(4)) u_vbp (.use_stored(useb_q), .cur(vb_cur), .stored(vb_sto), .sum(vb_sum));

  fp13_t y [NPE_ROWS];
  always_comb begin
    for (int g = 0; g < 2; g++) begin
      bnd_out[g][0] = pe_res[3*g+2][1];   // row 2 partial (taps 0,1)
      bnd_out[g][1] = pe_res[3*g+2][0];   // row 3 partial (tap 0)
    end
    for (int i = 0; i < int'(NPE_ROWS); i++) begin
      if (mode == M3_CONV1X1)  y[i] = pp_res[i][0];
      else if ((i % 3) == 2)   y[i] = pe_res[i][2];
      else                     y[i] = vb_sum[2*(i/3) + (i%3)];
      if (act_q) y[i] = leaky_relu(y[i]);
    end
  end
  assign bnd_we = v_q && vert;

  // ---------------- act & output buffer ----------------
  pix_t obuf [NPE_ROWS];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(NPE_ROWS); i++) obuf[i] <= '0;
    end else if (v_q && mode != M2_CONV1X3) begin
      for (int i = 0; i < int'(NPE_ROWS); i++) obuf[i][ch_q] <= y[i];
    end
  end
  assign obuf_out = obuf;

  // ---------------- M2: boundary buffer and completion ----------------
  fvec_t bbuf5, bbuf6;         // PE' 6 and 7 of the previous segment
  fp13_t hb_cur [16], hb_sto [16], hb_sum [16];
  always_comb begin
    for (int l = 0; l < int'(LANES); l++) begin
      hb_cur[l]     = pp_res[0][l];  hb_sto[l]     = bbuf5[l];   // previous pixel 5
      hb_cur[8 + l] = pp_res[1][l];  hb_sto[8 + l] = bbuf6[l];   // pixel 0
    end
  end
  acnpu_boundary_process #(.N(16)) u_hbp (.use_stored(!segf_q), .cur(hb_cur), .stored(hb_sto), .sum(hb_sum));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) fin_q <= 1'b0;
    else        fin_q <= v_q && last_q && (mode == M2_CONV1X3);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bbuf5 <= '0; bbuf6 <= '0;
      for (int p = 0; p < 7; p++) hz_out[p] <= '0;
      hz_valid <= 1'b0;
    end else begin
      hz_valid <= fin_q;
      if (fin_q) begin
        bbuf5 <= pp_res[6];
        bbuf6 <= pp_res[7];
        for (int l = 0; l < int'(LANES); l++) begin
          hz_out[0][l] <= leaky_relu(hb_sum[l]);
          hz_out[1][l] <= leaky_relu(hb_sum[8 + l]);
          for (int p = 2; p < 6; p++) hz_out[p][l] <= leaky_relu(pp_res[p][l]);
          hz_out[6][l] <= leaky_relu(pp_res[6][l]);
        end
      end
    end
  end
endmodule
