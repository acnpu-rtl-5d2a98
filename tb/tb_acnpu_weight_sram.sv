// tb_acnpu_weight_sram: fills the weight SRAM with random words and reads
// them back on both ports at random addresses, one cycle of read latency.
module tb_acnpu_weight_sram;
  import acnpu_pkg::*;
  localparam int unsigned DEPTH = 640;
  logic clk = 0;
  logic rd_en, wr_en;
  logic [$clog2(DEPTH)-1:0] rd_addr_a, rd_addr_b, wr_addr;
  wvec_t rd_data_a [4], rd_data_b [4], wr_data [4];
  acnpu_weight_sram #(.DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  wvec_t model [DEPTH][4];
  int checks = 0, failures = 0;

  initial begin
    rd_en = 0; wr_en = 0; rd_addr_a = 0; rd_addr_b = 0; wr_addr = 0;
    for (int j = 0; j < 4; j++) wr_data[j] = '0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = a[$clog2(DEPTH)-1:0];
      for (int j = 0; j < 4; j++) begin
        for (int l = 0; l < LANES; l++) wr_data[j][l] = 10'($urandom);
        model[a][j] = wr_data[j];
      end
    end
    @(negedge clk);
    wr_en = 0;
    for (int it = 0; it < 2000; it++) begin
      int aa, ab;
      aa = $urandom_range(DEPTH - 1); ab = $urandom_range(DEPTH - 1);
      @(negedge clk);
      rd_en = 1; rd_addr_a = aa[$clog2(DEPTH)-1:0]; rd_addr_b = ab[$clog2(DEPTH)-1:0];
      @(negedge clk);
      rd_en = 0;
      for (int j = 0; j < 4; j++) begin
        checks += 2;
        if (rd_data_a[j] !== model[aa][j]) begin failures++; if (failures < 10) $display("FAIL A %0d", aa); end
        if (rd_data_b[j] !== model[ab][j]) begin failures++; if (failures < 10) $display("FAIL B %0d", ab); end
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
