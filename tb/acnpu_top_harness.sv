// acnpu_top_harness: end-to-end test bench body for acnpu_top, shared by the
// reduced-size test (tb_acnpu_top) and the full-size test (tb_acnpu_top_full).
//
// For every run it
//  * draws a random low-resolution image and random weights (scaled so that
//    the activations stay near 1 through all layers),
//  * loads the weights through the 40-bit weight port in the weight word
//    layout the controller expects,
//  * serves image block requests from its image array in the same cycle,
//  * collects the high-resolution output blocks into an output frame,
//  * computes the expected frame with a floating-point (real) model of the
//    whole network: 3x1 conv, n_cbb channel bypass blocks (1x3 + 1x1 with
//    LeakyReLU on channels 0-7 and 8-15, channels 16-31 bypassed, 1x1 32->32
//    fusion), 3x1 group conv with LeakyReLU, 3x1 group conv to 4 or 16
//    channels and pixel shuffle.  Vertical convolutions are zero padded at the
//    top and bottom of the frame, horizontal ones at the left and right edge
//    of each tile, as the design does.
// Each output pixel is compared with a tolerance of TOL times the RMS value
// of the expected frame, as the hardware works in 13-bit floating point with
// rounding in every operation.  The weights are
// drawn with a positive mean and the pixels are positive, as in real images,
// so that outputs are not the small difference of large terms.
// It also checks that every output pixel is written exactly once, that the
// frame takes exactly the number of cycles the step schedule gives, and it
// counts how often each mechanism of the design was used; a mechanism that
// never happened counts as a failure.
//
// FULL = 1 instantiates the top with no parameter list (all defaults).
module acnpu_top_harness
  import acnpu_pkg::*;
  import acnpu_tb_pkg::*;
#(
  parameter bit          FULL      = 1'b0,
  parameter int unsigned TILE_W    = 192,
  parameter int unsigned IMG_W_MAX = 960
) (
  output bit fin,
  output int checks,
  output int failures
);
  localparam int MAXW = 400, MAXH = 12;
  localparam real TOL = 0.1;

  logic clk = 0, rst_n = 0;
  logic start, scale_x4, busy, done;
  logic [3:0] n_cbb;
  logic [10:0] img_w, img_h;
  logic wl_valid, wl_first;
  logic [39:0] wl_data;
  logic px_req;
  logic [10:0] px_row, px_col;
  fp13_t px_data [3][SEG_PX];
  logic out_valid;
  logic [12:0] out_row, out_col;
  logic [3:0] out_rows, out_cols;
  fp13_t out_blk [12][8];

  if (FULL) begin : g_dut
    acnpu_top u_top (.*);
  end else begin : g_dut
    acnpu_top #(.TILE_W(TILE_W), .IMG_W_MAX(IMG_W_MAX)) u_top (.*);
  end

  always #5 clk = ~clk;

  // ---------------- test data ----------------
  int W, H, S, NB, TW;
  real img [MAXH][MAXW];
  real w1 [32][3];                 // conv1 [out][tap]
  real wa [8][2][16][3][8];        // CBB 1x3 [cbb][branch][out][tap][in lane]
  real wp [8][2][16][8];           // CBB 1x1 [cbb][branch][in][out]
  real wf [8][32][32];             // CBB 1x1 fusion [cbb][out][in]
  real w2 [32][3][8];              // conv2 [out][tap][lane of group]
  real w3 [16][3][8];              // conv3 [out][tap][lane of group]
  fp13_t hr [MAXH*4][MAXW*4];
  int    hr_cnt [MAXH*4][MAXW*4];

  // weights of a layer with fan-in n: uniform in (-1/n, 3/n), mean 1/n, so
  // that with positive pixels the activations keep their size through the
  // layers and outputs do not come from heavy cancellation
  function automatic real qw(int n);
    return fp10_to_real(real_to_fp10((1.0 + 2.0 * rnd_w(1.0)) / real'(n)));
  endfunction

  task automatic make_data();
    for (int y = 0; y < MAXH; y++)
      for (int x = 0; x < MAXW; x++)
        img[y][x] = (y < H && x < W) ? fp13_to_real(real_to_fp13(0.5 + 0.5 * rnd_w(1.0))) : 0.0;
    for (int k = 0; k < 32; k++) for (int j = 0; j < 3; j++) w1[k][j] = qw(3);
    for (int b = 0; b < 8; b++) begin
      for (int br = 0; br < 2; br++)
        for (int k = 0; k < 16; k++) begin
          for (int j = 0; j < 3; j++) for (int l = 0; l < 8; l++) wa[b][br][k][j][l] = qw(24);
          for (int m = 0; m < 8; m++) wp[b][br][k][m] = qw(16);
        end
      for (int k = 0; k < 32; k++) for (int c = 0; c < 32; c++) wf[b][k][c] = qw(32);
    end
    for (int k = 0; k < 32; k++) for (int j = 0; j < 3; j++) for (int l = 0; l < 8; l++) w2[k][j][l] = qw(24);
    for (int k = 0; k < 16; k++) for (int j = 0; j < 3; j++) for (int l = 0; l < 8; l++) w3[k][j][l] = qw(24);
  endtask

  // weight SRAM word a, column c, lane l
  function automatic real wword(int a, int c, int l);
    if (a < 32) return (c < 3 && l == 0) ? w1[a][c] : 0.0;
    if (a < 32 + 8 * 64) begin
      int b, o;
      b = (a - 32) / 64; o = (a - 32) % 64;
      if (o < 32) begin
        int br, k;
        br = o / 16; k = o % 16;
        return (c < 3) ? wa[b][br][k][c][l] : wp[b][br][k][l];
      end
      return (c < 4) ? wf[b][o - 32][8 * c + l] : 0.0;
    end
    if (a < 576) return (c < 3) ? w2[a - 544][c][l] : 0.0;
    if (a < 592) return (c < 3) ? w3[a - 576][c][l] : 0.0;
    return 0.0;
  endfunction

  task automatic load_weights();
    for (int a = 0; a < 592; a++)
      for (int b = 0; b < 8; b++) begin
        @(negedge clk);
        wl_valid = 1; wl_first = (a == 0 && b == 0);
        for (int i = 0; i < 4; i++)
          wl_data[10*i +: 10] = real_to_fp10(wword(a, b / 2, 4 * (b % 2) + i));
      end
    @(negedge clk);
    wl_valid = 0; wl_first = 0;
    repeat (3) @(negedge clk);
  endtask

  // image port: answered in the same cycle
  always_comb begin
    for (int r = 0; r < 3; r++)
      for (int p = 0; p < int'(SEG_PX); p++) begin
        int y, x;
        y = int'(px_row) + r; x = int'(px_col) + p;
        px_data[r][p] = (y < MAXH && x < MAXW) ? real_to_fp13(img[y][x]) : '0;
      end
  end

  // output collection
  always @(negedge clk) if (rst_n && out_valid) begin
    for (int y = 0; y < int'(out_rows); y++)
      for (int x = 0; x < int'(out_cols); x++) begin
        int yy, xx;
        yy = int'(out_row) + y; xx = int'(out_col) + x;
        if (yy < MAXH * 4 && xx < MAXW * 4) begin
          hr[yy][xx] = out_blk[y][x];
          hr_cnt[yy][xx]++;
        end else begin
          failures++;
          $display("FAIL output block outside the frame at %0d,%0d", yy, xx);
        end
      end
  end

  // ---------------- reference model ----------------
  real f [MAXH][MAXW][32], fa [MAXH][MAXW][32];   // value and magnitude
  real g [MAXH][MAXW][32], ga [MAXH][MAXW][32];

  function automatic real lrelu(real v);
    return (v < 0.0) ? v / 8.0 : v;
  endfunction

  task automatic vconv(int nout, int opg, bit act, bit first);
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++)
        for (int k = 0; k < nout; k++) begin
          real s, a;
          s = 0.0; a = 0.0;
          for (int j = 0; j < 3; j++) begin
            int yy;
            yy = y - 1 + j;
            if (yy < 0 || yy >= H) continue;
            if (first) begin
              s += img[yy][x] * w1[k][j]; a += absr(img[yy][x] * w1[k][j]);
            end else
              for (int l = 0; l < 8; l++) begin
                real wv;
                wv = (nout == 32) ? w2[k][j][l] : w3[k][j][l];
                s += f[yy][x][8 * (k / opg) + l] * wv;
                a += fa[yy][x][8 * (k / opg) + l] * absr(wv);
              end
          end
          g[y][x][k] = act ? lrelu(s) : s; ga[y][x][k] = a;
        end
    f = g; fa = ga;
  endtask

  task automatic cbb(int b);
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        int x0;
        x0 = (x / TW) * TW;
        for (int br = 0; br < 2; br++) begin
          real t [16], ta [16];
          for (int k = 0; k < 16; k++) begin
            t[k] = 0.0; ta[k] = 0.0;
            for (int j = 0; j < 3; j++) begin
              int xx;
              xx = x - 1 + j;
              if (xx < x0 || xx >= x0 + TW || xx >= W) continue;
              for (int l = 0; l < 8; l++) begin
                t[k] += f[y][xx][8 * br + l] * wa[b][br][k][j][l];
                ta[k] += fa[y][xx][8 * br + l] * absr(wa[b][br][k][j][l]);
              end
            end
          end
          for (int m = 0; m < 8; m++) begin
            real s, a;
            s = 0.0; a = 0.0;
            for (int k = 0; k < 16; k++) begin
              s += t[k] * wp[b][br][k][m]; a += ta[k] * absr(wp[b][br][k][m]);
            end
            g[y][x][8 * br + m] = lrelu(s); ga[y][x][8 * br + m] = a;
          end
        end
        for (int c = 16; c < 32; c++) begin g[y][x][c] = f[y][x][c]; ga[y][x][c] = fa[y][x][c]; end
      end
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++)
        for (int k = 0; k < 32; k++) begin
          real s, a;
          s = 0.0; a = 0.0;
          for (int c = 0; c < 32; c++) begin
            s += g[y][x][c] * wf[b][k][c]; a += ga[y][x][c] * absr(wf[b][k][c]);
          end
          f[y][x][k] = s; fa[y][x][k] = a;
        end
  endtask

  // ---------------- mechanism counters ----------------
  int cnt_mode [4];
  int cnt_bnd_reuse, cnt_hbuf, cnt_rowmask, cnt_flush, cnt_seam, cnt_partial_tile;
  int cnt_x2, cnt_x4, cnt_ncbb_full, cnt_ncbb_short;

  always @(negedge clk) if (rst_n) begin
    if (g_dut.u_top.cl_w_ld) cnt_mode[int'(g_dut.u_top.cl_mode)]++;
    if (g_dut.u_top.bs_rd_en && g_dut.u_top.cl_use_bnd) cnt_bnd_reuse++;
    if (g_dut.u_top.g_cl[0].u_cl.hz_valid && !g_dut.u_top.g_cl[0].u_cl.segf_q) cnt_hbuf++;
    if (g_dut.u_top.fs_wr_en && g_dut.u_top.u_ctrl.l_vert && g_dut.u_top.u_ctrl.rowok != 3'b111) cnt_rowmask++;
    if (g_dut.u_top.u_ctrl.last_trow && g_dut.u_top.ps_valid) cnt_flush++;
    if (g_dut.u_top.u_ctrl.tcol != 0 && g_dut.u_top.u_ctrl.l_mode == M2_CONV1X3 && g_dut.u_top.cl_w_ld) cnt_seam++;
    if (g_dut.u_top.u_ctrl.tw != 11'(TILE_W) && g_dut.u_top.cl_w_ld) cnt_partial_tile++;
  end

  // ---------------- one run ----------------
  task automatic run(int w_, int h_, bit x4, int nb);
    int t0, t1, expc, ntc, tw_, ns;
    real maxr, mean, rms, maxq;
    W = w_; H = h_; S = x4 ? 4 : 2; NB = nb; TW = TILE_W;
    make_data();
    load_weights();
    for (int y = 0; y < MAXH * 4; y++) for (int x = 0; x < MAXW * 4; x++) begin hr_cnt[y][x] = 0; hr[y][x] = '0; end
    @(negedge clk);
    scale_x4 = x4; n_cbb = 4'(nb); img_w = 11'(W); img_h = 11'(H); start = 1;
    t0 = cyc;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    t1 = cyc;
    repeat (3) @(negedge clk);     // let the last output block be collected
    if (x4) cnt_x4++; else cnt_x2++;
    if (nb == 8) cnt_ncbb_full++; else cnt_ncbb_short++;
    // cycles: per tile, every layer is its steps plus a 3-cycle tail, the
    // final layer has a 7-cycle tail after every step
    expc = 0;
    ntc = 0;
    for (int x0 = 0; x0 < W; x0 += TW) begin
      tw_ = (W - x0 < TW) ? W - x0 : TW;
      ns = tw_ / 12;
      expc += ns * 35 + 3;                              // conv1
      expc += nb * ((2 * ns) * 19 + 3 + ns * 35 + 3);   // CBBs
      expc += ns * 35 + 3;                              // conv2
      expc += ns * ((x4 ? 16 : 4) + 3 + 7);             // conv3
      ntc++;
    end
    expc *= (H / 3 + 1);
    checks++;
    if (t1 - t0 != expc + 1) begin
      failures++;
      $display("FAIL cycle count %0d, schedule gives %0d + 1", t1 - t0, expc);
    end
    $display("run %0dx%0d x%0d n_cbb=%0d: %0d cycles", W, H, S, nb, t1 - t0);
    // reference
    vconv(32, 32, 0, 1);
    for (int b = 0; b < nb; b++) cbb(b);
    vconv(32, 8, 1, 0);
    vconv(x4 ? 16 : 4, x4 ? 4 : 1, 0, 0);
    maxr = 0.0;
    mean = 0.0;
    rms = 0.0;
    maxq = 0.0;
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++)
        for (int ch = 0; ch < S * S; ch++) rms += f[y][x][ch] * f[y][x][ch] / real'(H * W * S * S);
    rms = $sqrt(rms);
    for (int y = 0; y < H * S; y++)
      for (int x = 0; x < W * S; x++) begin
        real e, a, got;
        int ch;
        ch = (y % S) * S + (x % S);
        e = f[y / S][x / S][ch]; a = fa[y / S][x / S][ch];
        got = fp13_to_real(hr[y][x]);
        checks += 2;
        if (hr_cnt[y][x] != 1) begin
          failures++;
          if (failures < 20) $display("FAIL pixel %0d,%0d written %0d times", y, x, hr_cnt[y][x]);
        end
        // the error must be small against the typical output of the frame
        if (absr(got - e) > TOL * rms) begin
          failures++;
          if (failures < 20) $display("FAIL pixel %0d,%0d got %f expected %f (scale %f)", y, x, got, e, a);
        end
        if (absr(got - e) / rms > maxq) maxq = absr(got - e) / rms;
        mean += absr(e) / real'(H * S * W * S);
        if (a > 0.0 && absr(got - e) / a > maxr) maxr = absr(got - e) / a;
      end
    $display("  largest error / magnitude of terms %f, / rms output %f; mean |output| %f", maxr, maxq, mean);
    checks++;
    if (mean < 0.05) begin failures++; $display("FAIL outputs too small to check"); end
  endtask

  int cyc = 0;
  always @(posedge clk) cyc++;

  task automatic need(int c, string what);
    checks++;
    $display("  %-40s %0d", what, c);
    if (c == 0) begin failures++; $display("FAIL mechanism never used: %s", what); end
  endtask

  initial begin
    checks = 0; failures = 0; fin = 0;
    start = 0; scale_x4 = 0; n_cbb = 1; img_w = 0; img_h = 0;
    wl_valid = 0; wl_first = 0; wl_data = 0;
    for (int y = 0; y < MAXH; y++) for (int x = 0; x < MAXW; x++) img[y][x] = 0.0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    if (FULL) begin
      run(384, 6, 1'b0, 8);
    end else begin
      run(60, 6, 1'b0, 2);
      run(48, 9, 1'b1, 1);
      run(24, 3, 1'b0, 8);
    end
    $display("mechanisms:");
    need(cnt_mode[0], "mode 1 (3x1, one input channel) cycles");
    need(cnt_mode[1], "mode 2 (1x3 into 1x1) cycles");
    need(cnt_mode[2], "mode 3 (1x1 fusion) cycles");
    need(cnt_mode[3], "mode 4 (3x1 group conv) cycles");
    need(cnt_bnd_reuse, "boundary SRAM partial sums reused");
    need(cnt_hbuf, "PE' boundary buffer reused (M2)");
    need(cnt_rowmask, "rows outside the frame zeroed");
    need(cnt_flush, "flush tile row outputs");
    need(cnt_seam, "tiles right of a tile seam");
    need(FULL ? 1 : cnt_partial_tile, "narrow last tile");
    need(cnt_x2, "x2 runs");
    need(FULL ? 1 : cnt_x4, "x4 runs");
    need(cnt_ncbb_full, "runs with 8 CBBs");
    need(FULL ? 1 : cnt_ncbb_short, "runs with fewer CBBs");
    fin = 1;
  end
endmodule
