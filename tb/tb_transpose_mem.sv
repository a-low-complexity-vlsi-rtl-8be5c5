// tb_transpose_mem: writes random 8x8 blocks row by row, reads them back
// column by column and checks the transpose and the one-clock read latency.
module tb_transpose_mem;
  import fusion_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  logic       wr_en = 0, rd_en = 0;
  logic [2:0] wr_idx = 0, rd_idx = 0;
  coef_vec_t  wr_vec, rd_vec;
  coef_t      m [8][8];

  transpose_mem dut (.*);

  int checks = 0, failures = 0;

  initial begin
    for (int blk = 0; blk < 20; blk++) begin
      for (int r = 0; r < 8; r++)
        for (int c = 0; c < 8; c++) m[r][c] = coef_t'({$urandom, $urandom});
      // rows in a random order
      for (int i = 0; i < 8; i++) begin
        @(negedge clk);
        wr_en = 1; wr_idx = 3'(i ^ (blk % 8));
        for (int c = 0; c < 8; c++) wr_vec[c] = m[i ^ (blk % 8)][c];
      end
      @(negedge clk);
      wr_en = 0;
      for (int c = 0; c < 8; c++) begin
        rd_en = 1; rd_idx = 3'(c);
        @(negedge clk);
        rd_en = 0;
        for (int r = 0; r < 8; r++) begin
          checks++;
          if (rd_vec[r] !== m[r][c]) begin
            failures++;
            if (failures < 10) $display("FAIL blk %0d col %0d row %0d", blk, c, r);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
