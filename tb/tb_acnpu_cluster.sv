// tb_acnpu_cluster: self-checking test of one cluster in its four modes.
//
// Random features and weights; the expected values are direct convolution
// sums worked out in real arithmetic from the layer definitions (3x1 with
// stored boundary sums, 1x3 cascaded into 1x1 across three segments of an
// 18-pixel row with zero padding at both ends, 1x1 32->32, 3x1 group
// convolution with LeakyReLU).  FP13 rounding makes the hardware sums
// differ slightly, so each result is compared with a tolerance of 3% of the
// sum of the magnitudes of its terms; misrouted data give errors of the size
// of the terms themselves.
module tb_acnpu_cluster;
  import acnpu_pkg::*;
  import acnpu_tb_pkg::*;

  logic   clk = 0, rst_n = 0;
  mode_e  mode;
  logic   ld;
  pix_t   feat_in [NPE_ROWS];
  logic   w_ld;
  wvec_t  w_in [4];
  logic [4:0] ch_in;
  logic [1:0] grp_in;
  logic   first_in, last_in, act_in, seg_first_in, use_bnd_in;
  fp13_t  bnd_in [2][2], bnd_out [2][2];
  logic   bnd_we;
  pix_t   obuf_out [NPE_ROWS];
  fvec_t  hz_out [7];
  logic   hz_valid;

  acnpu_cluster dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  task automatic cmp(real got, real exp_v, real mag, string what);
    checks++;
    if (absr(got - exp_v) > 0.03 * mag + 1.0e-4) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %f expected %f (scale %f)", what, got, exp_v, mag);
    end
  endtask

  function automatic real lrelu(real v);
    return (v < 0.0) ? v / 8.0 : v;
  endfunction

  // test data
  real x [18][32];         // features (pixels x channels)
  real w [32][4][8];       // weight words: [cycle][column][lane]
  real bn [32][2][2];      // stored boundary sums
  real y_exp [6][32], y_mag [6][32];

  task automatic load_feat(int p0);
    @(negedge clk);
    ld = 1;
    for (int i = 0; i < 6; i++)
      for (int c = 0; c < 32; c++) feat_in[i][c] = real_to_fp13(x[p0 + i][c]);
    @(negedge clk);
    ld = 0;
  endtask

  task automatic issue(int k, int grp, bit first, bit last);
    @(negedge clk);
    w_ld = 1; ch_in = 5'(k); grp_in = 2'(grp); first_in = first; last_in = last;
    for (int j = 0; j < 4; j++)
      for (int l = 0; l < 8; l++) w_in[j][l] = real_to_fp10(w[k][j][l]);
    @(negedge clk);
    w_ld = 0;
    for (int g = 0; g < 2; g++)
      for (int q = 0; q < 2; q++) bnd_in[g][q] = real_to_fp13(bn[k][g][q]);
  endtask

  task automatic randomize_data(bit one_channel);
    for (int p = 0; p < 18; p++)
      for (int c = 0; c < 32; c++)
        x[p][c] = (one_channel && c != 0) ? 0.0 : fp13_to_real(real_to_fp13(rnd_w(1.0)));
    for (int k = 0; k < 32; k++) begin
      for (int j = 0; j < 4; j++)
        for (int l = 0; l < 8; l++)
          w[k][j][l] = (one_channel && l != 0) ? 0.0 : fp10_to_real(real_to_fp10(rnd_w(1.0)));
      for (int g = 0; g < 2; g++)
        for (int q = 0; q < 2; q++) bn[k][g][q] = fp13_to_real(real_to_fp13(rnd_w(2.0)));
    end
  endtask

  // vertical modes: pixel 3g+r is row r of column g
  task automatic run_vertical(mode_e m, int nout, int opg, bit act, bit useb);
    real d [5], a [5];
    mode = m; act_in = act; use_bnd_in = useb;
    load_feat(0);
    for (int k = 0; k < nout; k++) begin
      int grp;
      grp = k / opg;
      issue(k, grp, 0, 0);
      #1;
      for (int g = 0; g < 2; g++) begin
        // diagonal sums: output rows -1..3 of this column
        for (int r = 0; r < 5; r++) begin d[r] = 0.0; a[r] = 0.0; end
        for (int i = 0; i < 3; i++)
          for (int j = 0; j < 3; j++)
            for (int l = 0; l < 8; l++) begin
              real t;
              t = x[3 * g + i][8 * grp + l] * w[k][j][l];
              d[i - j + 2] += t; a[i - j + 2] += absr(t);
            end
        checks++;
        if (bnd_we !== 1'b1) begin failures++; $display("FAIL bnd_we"); end
        cmp(fp13_to_real(bnd_out[g][0]), d[3], a[3], "boundary out row 2");
        cmp(fp13_to_real(bnd_out[g][1]), d[4], a[4], "boundary out row 3");
        if (useb) begin
          d[0] += bn[k][g][0]; a[0] += absr(bn[k][g][0]);
          d[1] += bn[k][g][1]; a[1] += absr(bn[k][g][1]);
        end
        for (int r = 0; r < 3; r++) begin
          real e;
          e = act ? lrelu(d[r]) : d[r];
          y_exp[3 * g + r][k] = e; y_mag[3 * g + r][k] = a[r];
        end
      end
    end
    @(negedge clk);
    for (int i = 0; i < 6; i++)
      for (int k = 0; k < nout; k++)
        cmp(fp13_to_real(obuf_out[i][k]), y_exp[i][k], y_mag[i][k], $sformatf("vertical mode %0d px %0d ch %0d", m, i, k));
  endtask

  task automatic run_1x1();
    mode = M3_CONV1X1; act_in = 0; use_bnd_in = 0;
    load_feat(0);
    for (int k = 0; k < 32; k++) issue(k, 0, 0, 0);
    @(negedge clk);
    for (int p = 0; p < 6; p++)
      for (int k = 0; k < 32; k++) begin
        real s, a;
        s = 0.0; a = 0.0;
        for (int c = 0; c < 32; c++) begin
          s += x[p][c] * w[k][c / 8][c % 8]; a += absr(x[p][c] * w[k][c / 8][c % 8]);
        end
        cmp(fp13_to_real(obuf_out[p][k]), s, a, $sformatf("1x1 px %0d ch %0d", p, k));
      end
  endtask

  // 1x3 (channels of group grp, 16 outputs) then 1x1 (16 -> 8), three segments
  task automatic run_1x3_1x1(int grp);
    real y3 [18][16], a3 [18][16];
    real o [18][8], ao [18][8];
    for (int p = 0; p < 18; p++)
      for (int k = 0; k < 16; k++) begin
        y3[p][k] = 0.0; a3[p][k] = 0.0;
        for (int j = 0; j < 3; j++) begin
          int q;
          q = p - 1 + j;
          if (q >= 0 && q < 18)
            for (int l = 0; l < 8; l++) begin
              y3[p][k] += x[q][8 * grp + l] * w[k][j][l];
              a3[p][k] += absr(x[q][8 * grp + l] * w[k][j][l]);
            end
        end
      end
    for (int p = 0; p < 18; p++)
      for (int m2 = 0; m2 < 8; m2++) begin
        o[p][m2] = 0.0; ao[p][m2] = 0.0;
        for (int k = 0; k < 16; k++) begin
          o[p][m2] += y3[p][k] * w[k][3][m2];
          ao[p][m2] += a3[p][k] * absr(w[k][3][m2]);
        end
        o[p][m2] = lrelu(o[p][m2]);
      end
    mode = M2_CONV1X3; act_in = 0; use_bnd_in = 0;
    for (int s = 0; s < 3; s++) begin
      load_feat(6 * s);
      seg_first_in = (s == 0);
      for (int k = 0; k < 16; k++) issue(k, grp, k == 0, k == 15);
      wait (hz_valid);
      @(negedge clk);
      for (int q = 0; q < 7; q++) begin
        int p;
        p = 6 * s - 1 + q;
        if ((q == 0 && s == 0) || (q == 6 && s != 2)) continue;
        for (int m2 = 0; m2 < 8; m2++)
          cmp(fp13_to_real(hz_out[q][m2]), o[p][m2], ao[p][m2], $sformatf("1x3+1x1 seg %0d px %0d ch %0d", s, p, m2));
      end
    end
  endtask

  initial begin
    ld = 0; w_ld = 0; ch_in = 0; grp_in = 0; first_in = 0; last_in = 0; act_in = 0;
    seg_first_in = 0; use_bnd_in = 0; mode = M1_CONV3X1;
    for (int i = 0; i < 6; i++) feat_in[i] = '0;
    for (int j = 0; j < 4; j++) w_in[j] = '0;
    for (int g = 0; g < 2; g++) for (int q = 0; q < 2; q++) bnd_in[g][q] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 3; rep++) begin
      randomize_data(1);
      run_vertical(M1_CONV3X1, 32, 32, 0, rep != 0);
      randomize_data(0);
      run_vertical(M4_GCONV3X1, 32, 8, 1, 1);
      randomize_data(0);
      run_vertical(M4_GCONV3X1, 16, 4, 0, rep == 1);
      randomize_data(0);
      run_1x1();
      randomize_data(0);
      run_1x3_1x1(rep % 2);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
