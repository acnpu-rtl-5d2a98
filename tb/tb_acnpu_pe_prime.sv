// tb_acnpu_pe_prime: self-checking test of the PE' in both modes.
// Tree mode must match the integer dot product plus partial sum.  Accumulate
// mode is run for 16 cycles with integer scalars and weights; each of the
// eight lanes must hold the integer sum of scalar x weight, and a clr must
// restart the sums.
module tb_acnpu_pe_prime;
  import acnpu_pkg::*;
  import acnpu_tb_pkg::*;

  logic  clk = 0, rst_n = 0;
  logic  acc_mode, en, clr;
  fvec_t feat, result;
  wvec_t wgt;
  fp13_t psum;
  int checks = 0, failures = 0;

  acnpu_pe_prime dut (.*);
  always #5 clk = ~clk;

  initial begin
    real acc;
    int  x, w, ps;
    real lane [8];
    acc_mode = 0; en = 0; clr = 0; feat = '0; wgt = '0; psum = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // tree mode
    for (int t = 0; t < 500; t++) begin
      acc = 0.0;
      for (int l = 0; l < 8; l++) begin
        x = rnd_int(7); w = rnd_int(3);
        feat[l] = real_to_fp13(real'(x)); wgt[l] = real_to_fp10(real'(w));
        acc += real'(x * w);
      end
      ps = rnd_int(63); psum = real_to_fp13(real'(ps)); acc += real'(ps);
      #1; checks++;
      if (result[0] !== real_to_fp13(acc) || result[7:1] !== '0) begin
        failures++; $display("FAIL tree: got %h exp %f", result[0], acc);
      end
    end
    // accumulate mode, two rounds of 16 cycles
    acc_mode = 1;
    for (int r = 0; r < 2; r++) begin
      for (int l = 0; l < 8; l++) lane[l] = 0.0;
      for (int k = 0; k < 16; k++) begin
        @(negedge clk);
        en = 1; clr = (k == 0);
        x = rnd_int(5); psum = real_to_fp13(real'(x));
        for (int l = 0; l < 8; l++) begin
          w = rnd_int(3); wgt[l] = real_to_fp10(real'(w)); lane[l] += real'(x * w);
        end
        feat = '1;  // ignored in accumulate mode
      end
      @(negedge clk); en = 0;
      for (int l = 0; l < 8; l++) begin
        checks++;
        if (result[l] !== real_to_fp13(lane[l])) begin
          failures++; $display("FAIL acc round %0d lane %0d: got %f exp %f", r, l, fp13_to_real(result[l]), lane[l]);
        end
      end
      // holding en low keeps the sums
      @(negedge clk);
      checks++;
      if (result[0] !== real_to_fp13(lane[0])) begin failures++; $display("FAIL hold"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
