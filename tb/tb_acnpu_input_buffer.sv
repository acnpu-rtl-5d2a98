// tb_acnpu_input_buffer: checks both paths of the input buffer.
//  * image blocks: a 3 x 6 block requested at a random row is registered,
//    with the rows at or below the image height replaced by zero;
//  * weights: random 40-bit beats (four FP10 weights) are packed eight at a
//    time into 320-bit weight SRAM words written at consecutive addresses
//    from 0, restarting at 0 on wl_first.  One write per eight beats.
module tb_acnpu_input_buffer;
  import acnpu_pkg::*;
  localparam int unsigned WDEPTH = 640;
  logic clk = 0, rst_n = 0;
  logic px_req;
  logic [10:0] px_row, img_h;
  fp13_t ext_px [3][SEG_PX], blk [3][SEG_PX];
  logic wl_valid, wl_first;
  logic [39:0] wl_data;
  logic wt_we;
  logic [$clog2(WDEPTH)-1:0] wt_addr;
  wvec_t wt_wdata [4];
  acnpu_input_buffer #(.WDEPTH(WDEPTH)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int writes = 0;
  logic [9:0] sent [int];
  int nsent = 0;
  int exp_addr = 0;

  // weight SRAM write monitor (outputs are sampled between clock edges)
  always @(negedge clk) if (rst_n && wt_we) begin
    writes++;
    checks++;
    if (int'(wt_addr) != exp_addr) begin failures++; $display("FAIL addr %0d exp %0d", wt_addr, exp_addr); end
    for (int c = 0; c < 4; c++) for (int l = 0; l < LANES; l++) begin
      checks++;
      if (wt_wdata[c][l] !== sent[32 * writes - 32 + 8 * c + l]) begin failures++; if (failures < 10) $display("FAIL weight c%0d l%0d got %h exp %h size %0d t %0t", c, l, wt_wdata[c][l], sent[32 * writes - 32 + 8 * c + l], nsent, $time); end
    end
    exp_addr++;
  end

  initial begin
    px_req = 0; px_row = 0; img_h = 0; wl_valid = 0; wl_first = 0; wl_data = 0;
    for (int r = 0; r < 3; r++) for (int p = 0; p < SEG_PX; p++) ext_px[r][p] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // image blocks
    for (int it = 0; it < 500; it++) begin
      fp13_t e [3][SEG_PX];
      @(negedge clk);
      px_req = 1; img_h = 11'($urandom_range(3, 1080)); px_row = 11'($urandom_range(img_h + 2));
      for (int r = 0; r < 3; r++) for (int p = 0; p < SEG_PX; p++) begin
        ext_px[r][p] = 13'($urandom);
        e[r][p] = (int'(px_row) + r < int'(img_h)) ? ext_px[r][p] : '0;
      end
      @(negedge clk);
      px_req = 0;
      for (int r = 0; r < 3; r++) for (int p = 0; p < SEG_PX; p++) begin
        checks++;
        if (blk[r][p] !== e[r][p]) begin failures++; if (failures < 10) $display("FAIL px row %0d r %0d", px_row, r); end
      end
    end
    // weights: two loads (the second restarts at address 0), with gaps
    for (int ld = 0; ld < 2; ld++) begin
      exp_addr = 0; nsent = 0; writes = 0;
      for (int b = 0; b < 8 * (ld == 0 ? 40 : 13); b++) begin
        @(negedge clk);
        wl_valid = 0;
        if ($urandom_range(3) == 0) begin @(negedge clk); end
        wl_valid = 1; wl_first = (b == 0); wl_data = {$urandom, $urandom};
        for (int i = 0; i < 4; i++) begin sent[nsent] = wl_data[10*i +: 10]; nsent++; end
      end
      @(negedge clk);
      wl_valid = 0; wl_first = 0;
      repeat (3) @(negedge clk);
    end
    checks++;
    if (writes != 13 || nsent != 13 * 32) begin failures++; $display("FAIL %0d writes", writes); end
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
