// tb_acnpu_boundary_process: checks that stored and current partial sums are
// added lane by lane, and that the stored values are ignored when use_stored
// is low (zero padding at an edge).
module tb_acnpu_boundary_process;
  import acnpu_pkg::*;
  import acnpu_tb_pkg::*;

  localparam int N = 8;
  logic  use_stored;
  fp13_t cur [N], stored [N], sum [N];
  int checks = 0, failures = 0;

  acnpu_boundary_process #(.N(N)) dut (.*);

  initial begin
    int a [N], b [N];
    for (int t = 0; t < 300; t++) begin
      use_stored = (t % 3) != 0;
      for (int i = 0; i < N; i++) begin
        a[i] = rnd_int(100); b[i] = rnd_int(100);
        cur[i] = real_to_fp13(real'(a[i])); stored[i] = real_to_fp13(real'(b[i]));
      end
      #1;
      for (int i = 0; i < N; i++) begin
        checks++;
        if (sum[i] !== real_to_fp13(real'(a[i] + (use_stored ? b[i] : 0)))) begin
          failures++; $display("FAIL lane %0d: %f + %f -> %f", i, real'(a[i]), real'(b[i]), fp13_to_real(sum[i]));
        end
      end
    end
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
