// tb_acnpu_pe: self-checking test of one PE.
// Integer-valued operands keep every partial sum exact in FP13, so the result
// must equal the integer dot product plus the partial sum exactly.  A few
// directed cases check zero handling, saturation and fractional values.
module tb_acnpu_pe;
  import acnpu_pkg::*;
  import acnpu_tb_pkg::*;

  fvec_t feat;
  wvec_t wgt;
  fp13_t psum, result;
  int checks = 0, failures = 0;

  acnpu_pe dut (.feat(feat), .wgt(wgt), .psum(psum), .result(result));

  task automatic check(real exp_v, string what);
    checks++;
    if (result !== real_to_fp13(exp_v)) begin
      failures++;
      $display("FAIL %s: got %h (%f) expected %f", what, result, fp13_to_real(result), exp_v);
    end
  endtask

  initial begin
    real acc;
    int  x, w, ps;
    for (int t = 0; t < 2000; t++) begin
      acc = 0.0;
      for (int l = 0; l < 8; l++) begin
        x = rnd_int(7); w = rnd_int(3);
        feat[l] = real_to_fp13(real'(x));
        wgt[l]  = real_to_fp10(real'(w));
        acc += real'(x * w);
      end
      ps = rnd_int(63);
      psum = real_to_fp13(real'(ps));
      acc += real'(ps);
      #1 check(acc, "random integer dot product");
    end
    // fractional values: 0.5 * 0.25 terms
    for (int l = 0; l < 8; l++) begin
      feat[l] = real_to_fp13(0.5 * (l + 1));
      wgt[l]  = real_to_fp10(0.25);
    end
    psum = real_to_fp13(-1.0);
    #1 check(0.125 * 36.0 - 1.0, "fractional");
    // zero features
    feat = '0; psum = real_to_fp13(3.0);
    #1 check(3.0, "zero features pass psum");
    // saturation
    for (int l = 0; l < 8; l++) begin
      feat[l] = real_to_fp13(60000.0);
      wgt[l]  = real_to_fp10(31.0);
    end
    psum = '0;
    #1 begin checks++; if (result !== 13'h0FFF) begin failures++; $display("FAIL saturation %h", result); end end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
