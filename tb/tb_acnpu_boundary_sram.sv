// tb_acnpu_boundary_sram: writes random partial-sum words to random
// addresses of the boundary SRAM and reads them back one cycle after rd_en,
// comparing with a sparse model kept in an associative array.
module tb_acnpu_boundary_sram;
  import acnpu_pkg::*;
  localparam int unsigned IMG_W_MAX = 960, DEPTH = 3 * (IMG_W_MAX / 12) * NCH;
  localparam int unsigned AW = $clog2(DEPTH);
  logic clk = 0;
  logic rd_en, wr_en;
  logic [AW-1:0] rd_addr, wr_addr;
  fp13_t rd_data [NCLUSTERS][2][2], wr_data [NCLUSTERS][2][2];
  acnpu_boundary_sram #(.IMG_W_MAX(IMG_W_MAX)) dut (.*);
  always #5 clk = ~clk;

  typedef fp13_t word_t [NCLUSTERS][2][2];
  word_t model [int];
  int used [$];
  int checks = 0, failures = 0;

  initial begin
    rd_en = 0; wr_en = 0; rd_addr = 0; wr_addr = 0;
    for (int c = 0; c < NCLUSTERS; c++) for (int g = 0; g < 2; g++) for (int q = 0; q < 2; q++) wr_data[c][g][q] = '0;
    for (int it = 0; it < 4000; it++) begin
      @(negedge clk);
      rd_en = 0; wr_en = 0;
      if (used.size() == 0 || $urandom_range(1)) begin
        int a;
        a = (it < 10) ? ((it == 0) ? 0 : int'(DEPTH) - it) : $urandom_range(DEPTH - 1);
        wr_en = 1; wr_addr = a[AW-1:0];
        for (int c = 0; c < NCLUSTERS; c++) for (int g = 0; g < 2; g++) for (int q = 0; q < 2; q++)
          wr_data[c][g][q] = 13'($urandom);
        model[a] = wr_data;
        used.push_back(a);
      end else begin
        int a;
        word_t e;
        a = used[$urandom_range(used.size() - 1)];
        e = model[a];
        rd_en = 1; rd_addr = a[AW-1:0];
        @(negedge clk);
        rd_en = 0;
        for (int c = 0; c < NCLUSTERS; c++) for (int g = 0; g < 2; g++) for (int q = 0; q < 2; q++) begin
          checks++;
          if (rd_data[c][g][q] !== e[c][g][q]) begin failures++; if (failures < 10) $display("FAIL addr %0d", a); end
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
