// tb_acnpu_top_full: end-to-end test of the accelerator with every parameter
// at its default (192-column tiles): a 384 x 6 frame, two tiles wide, x2,
// all eight CBBs.  The checking is in acnpu_top_harness.
module tb_acnpu_top_full;
  bit fin;
  int checks, failures;
  acnpu_top_harness #(.FULL(1'b1)) u_h (.fin, .checks, .failures);

  initial begin
    wait (fin);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge u_h.clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
