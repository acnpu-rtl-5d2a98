// tb_acnpu_pixel_shuffle: random low-resolution blocks (3 rows x 2 pixels x
// 16 channels) through the pixel shuffle in both scales.  The expected
// high-resolution pixel (y, x) is channel (y mod S)*S + (x mod S) of the
// low-resolution pixel (y/S, x/S); the block position scales by S and the
// block appears one cycle after in_valid.
module tb_acnpu_pixel_shuffle;
  import acnpu_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid, scale_x4, out_valid;
  logic [10:0] lr_row, lr_col;
  fp13_t lr_blk [3][2][16];
  logic [12:0] hr_row, hr_col;
  logic [3:0] hr_rows, hr_cols;
  fp13_t hr_blk [12][8];
  acnpu_pixel_shuffle dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    in_valid = 0; scale_x4 = 0; lr_row = 0; lr_col = 0;
    for (int r = 0; r < 3; r++) for (int g = 0; g < 2; g++) for (int c = 0; c < 16; c++) lr_blk[r][g][c] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 400; it++) begin
      int s;
      @(negedge clk);
      in_valid = 1; scale_x4 = it[0]; s = scale_x4 ? 4 : 2;
      lr_row = 11'($urandom_range(1079)); lr_col = 11'($urandom_range(1919));
      for (int r = 0; r < 3; r++) for (int g = 0; g < 2; g++) for (int c = 0; c < 16; c++) lr_blk[r][g][c] = 13'($urandom);
      @(negedge clk);
      in_valid = 0;
      chk(out_valid, "out_valid");
      chk(int'(hr_row) == s * int'(lr_row) && int'(hr_col) == s * int'(lr_col), "position");
      chk(int'(hr_rows) == 3 * s && int'(hr_cols) == 2 * s, "size");
      for (int y = 0; y < 3 * s; y++) for (int x = 0; x < 2 * s; x++)
        chk(hr_blk[y][x] === lr_blk[y / s][x / s][(y % s) * s + (x % s)], $sformatf("pixel %0d,%0d x%0d", y, x, s));
      @(negedge clk);
      chk(!out_valid, "out_valid low");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
