// tb_acnpu_feature_sram: random writes with per-group masks and random reads
// of the feature SRAM, checked against a model array kept by the testbench.
// A read returns its data one cycle after rd_en.  Reads and writes never hit
// the same segment in the same cycle, which the controller also never does.
module tb_acnpu_feature_sram;
  import acnpu_pkg::*;
  localparam int unsigned TILE_W = 192, SEGS = TILE_W / SEG_PX;
  logic clk = 0;
  logic rd_en, wr_en;
  logic [$clog2(SEGS)-1:0] rd_seg, wr_seg;
  pix_t rd_data [3][SEG_PX], wr_data [3][SEG_PX];
  logic [NGRP-1:0] wr_mask [3][SEG_PX];
  acnpu_feature_sram #(.TILE_W(TILE_W)) dut (.*);
  always #5 clk = ~clk;

  pix_t model [SEGS][3][SEG_PX];
  int checks = 0, failures = 0;

  initial begin
    rd_en = 0; wr_en = 0; rd_seg = 0; wr_seg = 0;
    for (int r = 0; r < 3; r++) for (int p = 0; p < SEG_PX; p++) begin wr_data[r][p] = '0; wr_mask[r][p] = '0; end
    // fill every segment completely
    for (int s = 0; s < SEGS; s++) begin
      @(negedge clk);
      wr_en = 1; wr_seg = s[$clog2(SEGS)-1:0];
      for (int r = 0; r < 3; r++) for (int p = 0; p < SEG_PX; p++) begin
        for (int c = 0; c < NCH; c++) wr_data[r][p][c] = 13'($urandom);
        wr_mask[r][p] = '1; model[s][r][p] = wr_data[r][p];
      end
    end
    for (int it = 0; it < 3000; it++) begin
      int rs, ws;
      pix_t exp_d [3][SEG_PX];
      bit do_rd;
      @(negedge clk);
      rs = $urandom_range(SEGS - 1);
      ws = (rs + 1 + $urandom_range(SEGS - 2)) % SEGS;
      do_rd = $urandom_range(3) != 0;
      rd_en = do_rd; rd_seg = rs[$clog2(SEGS)-1:0];
      exp_d = model[rs];
      wr_en = $urandom_range(1); wr_seg = ws[$clog2(SEGS)-1:0];
      for (int r = 0; r < 3; r++) for (int p = 0; p < SEG_PX; p++) begin
        for (int c = 0; c < NCH; c++) wr_data[r][p][c] = 13'($urandom);
        wr_mask[r][p] = 4'($urandom);
        if (wr_en) for (int g = 0; g < NGRP; g++)
          if (wr_mask[r][p][g]) model[ws][r][p][8*g +: 8] = wr_data[r][p][8*g +: 8];
      end
      if (do_rd) begin
        @(negedge clk);
        rd_en = 0; wr_en = 0;
        for (int r = 0; r < 3; r++) for (int p = 0; p < SEG_PX; p++) begin
          checks++;
          if (rd_data[r][p] !== exp_d[r][p]) begin
            failures++;
            if (failures < 10) $display("FAIL seg %0d row %0d px %0d", rs, r, p);
          end
        end
      end
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
