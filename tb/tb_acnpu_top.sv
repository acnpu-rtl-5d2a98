// tb_acnpu_top: end-to-end test of the accelerator at a reduced tile width
// (24 columns, frames up to 96 columns wide) so that several tiles, a narrow
// last tile, both scales and short and full CBB counts run in little time.
// The checking is in acnpu_top_harness.
module tb_acnpu_top;
  bit fin;
  int checks, failures;
  acnpu_top_harness #(.FULL(1'b0), .TILE_W(24), .IMG_W_MAX(96)) u_h (.fin, .checks, .failures);

  initial begin
    wait (fin);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (400000) @(posedge u_h.clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
