// tb_acnpu_ctrl: checks the schedule the controller produces, independently
// of the datapath, at a reduced tile width of 24 columns.
// The testbench builds the expected list of weight issues of a whole frame
// (tile rows including the flush row, tiles, layers, steps, channels) with
// their mode, weight SRAM addresses of both ports and boundary SRAM use, and
// compares every cycle in which the weight SRAM is read.  It also checks the
// number of idle cycles between steps (3, or 3 + 7 in the last layer), the
// number of image requests, feature SRAM reads and writes and pixel shuffle
// blocks, the frame time and the done pulse, for x2 and x4 frames with
// different CBB counts.
module tb_acnpu_ctrl;
  import acnpu_pkg::*;
  localparam int unsigned TILE_W = 24, IMG_W_MAX = 96;
  logic clk = 0, rst_n = 0;
  logic start, scale_x4, busy, done;
  logic [3:0] n_cbb;
  logic [10:0] img_w, img_h;
  logic px_req;
  logic [10:0] px_row, px_col;
  fp13_t px_blk [3][SEG_PX];
  logic fs_rd_en, fs_wr_en;
  logic [$clog2(TILE_W/SEG_PX)-1:0] fs_rd_seg, fs_wr_seg;
  pix_t fs_rd_data [3][SEG_PX], fs_wr_data [3][SEG_PX];
  logic [NGRP-1:0] fs_wr_mask [3][SEG_PX];
  logic ws_rd_en;
  logic [9:0] ws_addr_a, ws_addr_b;
  logic bs_rd_en, bs_wr_en;
  logic [$clog2(3*(IMG_W_MAX/12)*NCH)-1:0] bs_rd_addr, bs_wr_addr;
  mode_e cl_mode;
  logic cl_ld [NCLUSTERS];
  pix_t cl_feat [NCLUSTERS][NPE_ROWS];
  logic cl_w_ld, cl_first, cl_last, cl_act, cl_seg_first, cl_use_bnd;
  logic [4:0] cl_ch;
  logic [1:0] cl_grp [NCLUSTERS];
  logic cl_bnd_we = 1'b0;
  pix_t cl_obuf [NCLUSTERS][NPE_ROWS];
  fvec_t cl_hz [NCLUSTERS][7];
  logic ps_valid, cfg_x4;
  logic [10:0] ps_row, ps_col;
  fp13_t ps_blk [3][2][16];

  acnpu_ctrl #(.TILE_W(TILE_W), .IMG_W_MAX(IMG_W_MAX)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // the datapath side: a cluster offers boundary sums in the cycle after a
  // weight load in the vertical modes
  always_ff @(posedge clk) cl_bnd_we <= rst_n && (cl_mode == M1_CONV3X1 || cl_mode == M4_GCONV3X1) && cl_w_ld;
  initial begin
    for (int r = 0; r < 3; r++) for (int p = 0; p < SEG_PX; p++) begin px_blk[r][p] = '0; fs_rd_data[r][p] = '0; end
    for (int c = 0; c < NCLUSTERS; c++) begin
      for (int i = 0; i < NPE_ROWS; i++) cl_obuf[c][i] = '0;
      for (int i = 0; i < 7; i++) cl_hz[c][i] = '0;
    end
  end

  // expected issue list
  typedef struct { mode_e m; int wa, wb; bit vert; int gap; } iss_t;
  iss_t q [$];
  int n_px, n_fsrd, n_fswr, n_ps;

  task automatic build(int W, int H, bit x4, int nb);
    q.delete();
    n_px = 0; n_fsrd = 0; n_fswr = 0; n_ps = 0;
    for (int tr = 0; tr <= H / 3; tr++)
      for (int x0 = 0; x0 < W; x0 += TILE_W) begin
        int tw, ns;
        tw = (W - x0 < TILE_W) ? W - x0 : TILE_W;
        ns = tw / 12;
        for (int li = 0; li < 2 * nb + 3; li++) begin
          mode_e m; int k, wa, wb, steps, gap;
          bit fin;
          fin = (li == 2 * nb + 2);
          if (li == 0) begin m = M1_CONV3X1; k = 32; wa = 0; wb = 0; end
          else if (li <= 2 * nb) begin
            if (li % 2 == 1) begin m = M2_CONV1X3; k = 16; wa = 32 + 64 * ((li - 1) / 2); wb = wa + 16; end
            else begin m = M3_CONV1X1; k = 32; wa = 32 + 64 * ((li - 1) / 2) + 32; wb = wa; end
          end else if (!fin) begin m = M4_GCONV3X1; k = 32; wa = 544; wb = 544; end
          else begin m = M4_GCONV3X1; k = x4 ? 16 : 4; wa = 576; wb = 576; end
          steps = (m == M2_CONV1X3) ? tw / 6 : ns;
          for (int s = 0; s < steps; s++)
            for (int c = 0; c < k; c++) begin
              // idle cycles before this issue
              if (c != 0) gap = 0;
              else if (s != 0) gap = fin ? 3 + 7 : 3;
              else gap = -1;                     // first of a layer: not checked
              q.push_back('{m, wa + c, wb + c, (m == M1_CONV3X1 || m == M4_GCONV3X1), gap});
            end
          if (m == M1_CONV3X1) n_px += 2 * steps;
          else n_fsrd += (m == M2_CONV1X3) ? steps : 2 * steps;
          if (!fin) n_fswr += (m == M2_CONV1X3) ? 2 * steps - 1 : 2 * steps;
          else if (tr != 0) n_ps += 6 * steps;
        end
      end
  endtask

  int idle, c_px, c_fsrd, c_fswr, c_ps, c_bw;
  bit running;
  always @(negedge clk) if (running) begin
    if (px_req) c_px++;
    if (fs_rd_en) c_fsrd++;
    if (fs_wr_en) c_fswr++;
    if (ps_valid) c_ps++;
    if (bs_wr_en) c_bw++;
    if (ws_rd_en) begin
      if (q.size() == 0) chk(0, "issue beyond the expected list");
      else begin
        iss_t e;
        e = q.pop_front();
        chk(dut.l_mode == e.m, $sformatf("mode %0d expected %0d", dut.l_mode, e.m));
        chk(int'(ws_addr_a) == e.wa && int'(ws_addr_b) == e.wb,
            $sformatf("weight addresses %0d/%0d expected %0d/%0d", ws_addr_a, ws_addr_b, e.wa, e.wb));
        if (e.gap >= 0) chk(idle == e.gap, $sformatf("%0d idle cycles before issue, expected %0d", idle, e.gap));
      end
      idle = 0;
    end else idle++;
  end

  task automatic run(int W, int H, bit x4, int nb);
    int t0, nexp, nbw;
    build(W, H, x4, nb);
    nexp = q.size();
    nbw = 0;
    foreach (q[i]) if (q[i].vert) nbw++;
    c_px = 0; c_fsrd = 0; c_fswr = 0; c_ps = 0; c_bw = 0; idle = 0;
    @(negedge clk);
    img_w = 11'(W); img_h = 11'(H); scale_x4 = x4; n_cbb = 4'(nb); start = 1;
    running = 1;
    t0 = cyc;
    @(negedge clk);
    start = 0;
    chk(busy, "busy after start");
    while (!done) begin
      @(negedge clk);
      if (cyc - t0 > 200000) break;
    end
    repeat (3) @(negedge clk);
    running = 0;
    chk(q.size() == 0, $sformatf("%0d of %0d issues missing", q.size(), nexp));
    chk(c_px == n_px, $sformatf("image requests %0d expected %0d", c_px, n_px));
    chk(c_fsrd == n_fsrd, $sformatf("feature SRAM reads %0d expected %0d", c_fsrd, n_fsrd));
    chk(c_fswr == n_fswr, $sformatf("feature SRAM writes %0d expected %0d", c_fswr, n_fswr));
    chk(c_ps == n_ps, $sformatf("pixel shuffle blocks %0d expected %0d", c_ps, n_ps));
    chk(c_bw == nbw, $sformatf("boundary SRAM writes %0d expected %0d", c_bw, nbw));
    chk(!busy, "busy after done");
    $display("frame %0dx%0d x%0d n_cbb=%0d: %0d issues, %0d cycles", W, H, x4 ? 4 : 2, nb, nexp, cyc - t0 - 3);
  endtask

  int cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    start = 0; scale_x4 = 0; n_cbb = 1; img_w = 0; img_h = 0; running = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(36, 6, 0, 2);
    run(48, 3, 1, 1);
    run(24, 9, 0, 8);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
