// tb_idct2d: feeds the floating-point DCT of random pixel blocks, rounded
// to Q10.24, column by column into the IDCT and checks that the original
// 8-bit pixels come back row by row, including out-of-range blocks that
// must clamp to 0 and 255, and the delay to the first row.
module tb_idct2d;
  import fusion_pkg::*;
  import tb_ref_pkg::*;

  typedef int pix_blk_t [8][8];

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       in_valid = 0, out_valid;
  coef_vec_t  in_vec;
  logic [2:0] out_row;
  pix_vec_t   out_pix;

  idct2d dut (.*);

  int checks = 0, failures = 0, cyc = 0, nrows = 0;
  pix_blk_t exp_q [64];
  int       q_rd = 0, q_wr = 0;
  int       last_t [$];
  pix_blk_t cur;

  always @(posedge clk) cyc++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  always @(negedge clk) if (rst_n && out_valid) begin
    if (out_row == 3'd0) begin
      cur = exp_q[q_rd]; q_rd++;
      check(cyc - last_t.pop_front() == 6, "latency");
    end
    for (int n = 0; n < 8; n++)
      check(int'(out_pix[n]) == cur[out_row][n],
            $sformatf("row %0d col %0d: %0d vs %0d", out_row, n, out_pix[n], cur[out_row][n]));
    nrows++;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < 24; b++) begin
      blk_t x, d;
      pix_blk_t e;
      for (int r = 0; r < 8; r++)
        for (int n = 0; n < 8; n++) begin
          int v;
          v = int'($urandom % 256);
          if (b == 3) v = ((r + n) % 2) ? 260 : 0;   // above white: clamps to 255
          if (b == 4) v = ((r + n) % 2) ? -5 : 255;  // below black: clamps to 0
          x[r][n] = real'(v) - 128.0;
          e[r][n] = v < 0 ? 0 : v > 255 ? 255 : v;
        end
      d = dct8x8(x);
      exp_q[q_wr] = e; q_wr++;
      for (int k = 0; k < 8; k++) begin
        @(negedge clk);
        in_valid = 1;
        for (int l = 0; l < 8; l++) in_vec[l] = r2q(d[l][k]);
        if (k == 7) last_t.push_back(cyc + 1);
      end
    end
    @(negedge clk);
    in_valid = 0;
    repeat (20) @(posedge clk);
    check(nrows == 24 * 8, "row count");
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
