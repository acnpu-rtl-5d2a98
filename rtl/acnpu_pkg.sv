// acnpu_pkg: number formats, sizes and arithmetic shared by the ACNPU blocks.
//
// Features are 13-bit floating point, S1E5M7, and weights are 10-bit
// floating point, S1E5M4, both as the design specifies.  The exponent bias
// (15), the handling of the extremes and the rounding are this design's own
// choices: a zero exponent field means zero (no subnormals, results that
// underflow are flushed to zero), the all-ones exponent is an ordinary
// exponent (no infinity or NaN, results that overflow saturate to the largest
// magnitude), and every result is rounded to nearest, ties to even (plain
// truncation, or ties away from zero, biases every operation in one
// direction, which adds up to 10-20 percent over the 27 layers of the
// network).
//
// fp_mul multiplies a feature by a weight and returns a feature.  fp_add adds
// two features with three guard bits.  leaky_relu scales negative values by
// 2^-LRELU_SHIFT by lowering the exponent; the slope is this design's choice.
package acnpu_pkg;

  typedef logic [12:0] fp13_t;   // S1 E5 M7
  typedef logic [9:0]  fp10_t;   // S1 E5 M4

  localparam int unsigned EBIAS       = 15;
  localparam int unsigned LANES       = 8;    // multipliers per PE
  localparam int unsigned NPE_ROWS    = 6;    // PE rows in a cluster
  localparam int unsigned NPE_COLS    = 3;    // PE columns in a cluster
  localparam int unsigned NCLUSTERS   = 6;
  localparam int unsigned NCH         = 32;   // feature channels of ACNet
  localparam int unsigned NGRP        = 4;    // 8-channel groups in 32 channels
  localparam int unsigned SEG_PX      = 6;    // pixels in one feature SRAM word
  localparam int unsigned LRELU_SHIFT = 3;    // negative slope 1/8

  // Operating modes of a cluster (Section "operating modes").
  typedef enum logic [1:0] {
    M1_CONV3X1   = 2'd0,   // first 3x1 layer, one input channel
    M2_CONV1X3   = 2'd1,   // CBB: 1x3 on the PEs cascaded into 1x1 on the PE's
    M3_CONV1X1   = 2'd2,   // CBB: 32->32 1x1 fusion layer
    M4_GCONV3X1  = 2'd3    // last two 3x1 group convolutions
  } mode_e;

  typedef logic [LANES-1:0][12:0] fvec_t;   // one pixel, eight channels
  typedef logic [LANES-1:0][9:0]  wvec_t;   // eight weights

  typedef logic [NCH-1:0][12:0]   pix_t;    // one pixel, all 32 channels

  localparam fp13_t FP13_MAX = 13'h0FFF;

  function automatic logic fp_is_zero(fp13_t a);
    return a[11:7] == 5'd0;
  endfunction

  // pack sign, exponent and 7-bit mantissa, rounding with the first dropped
  // bit r and the OR of the bits below it st (ties to even)
  function automatic fp13_t fp_pack(logic s, int e, logic [6:0] m, logic r, logic st);
    logic [7:0] mr;
    mr = {1'b0, m} + 8'(r && (st || m[0]));
    if (mr[7]) e = e + 1;                // mantissa overflowed to 1.0
    if (e <= 0) return '0;
    if (e > 31) return {s, FP13_MAX[11:0]};
    return {s, 5'(e), mr[6:0]};
  endfunction

  function automatic fp13_t fp_mul(fp13_t a, fp10_t w);
    logic        s;
    logic [7:0]  ma;
    logic [4:0]  mw;
    logic [12:0] p;
    logic [6:0]  m;
    int          e;
    s  = a[12] ^ w[9];
    if (a[11:7] == 5'd0 || w[8:4] == 5'd0) return '0;
    ma = {1'b1, a[6:0]};
    mw = {1'b1, w[3:0]};
    p  = 13'(ma) * 13'(mw);
    e  = int'(a[11:7]) + int'(w[8:4]) - int'(EBIAS);
    if (p[12]) begin
      m = p[11:5];
      e = e + 1;
      return fp_pack(s, e, m, p[4], |p[3:0]);
    end
    m = p[10:4];
    return fp_pack(s, e, m, p[3], |p[2:0]);
  endfunction

  function automatic fp13_t fp_add(fp13_t a, fp13_t b);
    fp13_t       big, sml;
    logic [10:0] mb, ms;
    logic [11:0] sum;
    logic [10:0] dif;
    int          d, e, lz;
    if (a[11:7] == 5'd0) return (b[11:7] == 5'd0) ? fp13_t'(0) : b;
    if (b[11:7] == 5'd0) return a;
    if (a[11:0] >= b[11:0]) begin
      big = a; sml = b;
    end else begin
      big = b; sml = a;
    end
    d  = int'(big[11:7]) - int'(sml[11:7]);
    mb = {1'b1, big[6:0], 3'b000};
    ms = (d > 10) ? 11'd0 : ({1'b1, sml[6:0], 3'b000} >> d);
    e  = int'(big[11:7]);
    if (big[12] == sml[12]) begin
      sum = {1'b0, mb} + {1'b0, ms};
      if (sum[11]) return fp_pack(big[12], e + 1, sum[10:4], sum[3], |sum[2:0]);
      return fp_pack(big[12], e, sum[9:3], sum[2], |sum[1:0]);
    end
    dif = mb - ms;
    if (dif == 11'd0) return '0;
    lz = 0;
    for (int i = 10; i >= 0; i--) begin
      if (dif[i]) break;
      lz++;
    end
    dif = dif << lz;
    e   = e - lz;
    return fp_pack(big[12], e, dif[9:3], dif[2], |dif[1:0]);
  endfunction

  function automatic fp13_t leaky_relu(fp13_t a);
    if (!a[12] || a[11:7] == 5'd0) return a;
    if (a[11:7] <= 5'(LRELU_SHIFT)) return '0;
    return {1'b1, a[11:7] - 5'(LRELU_SHIFT), a[6:0]};
  endfunction

endpackage
