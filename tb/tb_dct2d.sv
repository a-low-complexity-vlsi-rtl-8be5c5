// tb_dct2d: streams pixel blocks (level-shifted, random plus the two
// extreme flat blocks) into the 2-D DCT, back to back and with idle clocks
// between rows, and checks every coefficient against a floating-point 8x8
// DCT, the output order (vector k = column k) and the 6-clock delay from
// the last input row of a block to its first output vector.
module tb_dct2d;
  import fusion_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       in_valid = 0, out_valid;
  coef_vec_t  in_vec, out_vec;
  logic [2:0] out_idx;

  dct2d #(.INVERSE(1'b0)) dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  blk_t ref_q [64];
  int   q_rd = 0, q_wr = 0;
  int   last_t [$];
  blk_t cur;
  int   nout = 0;

  always @(posedge clk) cyc++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  always @(negedge clk) if (rst_n && out_valid) begin
    real e;
    if (out_idx == 3'd0) begin
      check(q_wr > q_rd, "output without block");
      if (q_wr > q_rd) begin
        cur = ref_q[q_rd]; q_rd++;
        check(cyc - last_t.pop_front() == 5, "latency last row -> first column");
      end
    end
    check(out_idx == 3'(nout % 8), "output index");
    for (int l = 0; l < 8; l++) begin
      e = q2r(out_vec[l]) - cur[l][out_idx];
      check(e < 5.0e-4 && e > -5.0e-4, $sformatf("D(%0d,%0d) %f vs %f", l, out_idx,
                                                 q2r(out_vec[l]), cur[l][out_idx]));
    end
    nout++;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < 30; b++) begin
      blk_t x;
      for (int r = 0; r < 8; r++)
        for (int n = 0; n < 8; n++)
          x[r][n] = (b == 0) ? 127.0 : (b == 1) ? -128.0 : real'($urandom % 256) - 128.0;
      ref_q[q_wr] = dct8x8(x); q_wr++;
      for (int r = 0; r < 8; r++) begin
        if (b >= 20 && ($urandom % 3) == 0) begin
          @(negedge clk);
          in_valid = 0;                         // idle clock before this row
        end
        @(negedge clk);
        in_valid = 1;
        for (int n = 0; n < 8; n++) in_vec[n] = coef_t'(longint'(x[r][n])) <<< FRAC_W;
        if (r == 7) last_t.push_back(cyc + 1);
      end
    end
    @(negedge clk);
    in_valid = 0;
    repeat (20) @(posedge clk);
    check(nout == 30 * 8, $sformatf("%0d output vectors", nout));
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
