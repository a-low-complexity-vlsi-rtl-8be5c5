// tb_data_select: drives data select with a stream of block decisions
// (filtered and raw, cv_en on and off) and two FIFOs pre-filled with
// numbered coefficient vectors; checks that each output block is the eight
// vectors of A or B that the applied decision names, in order, that blocks
// leave back to back (8 clocks per block) and that dec_ready throttles.
module tb_data_select;
  import fusion_pkg::*;

  localparam int NB = 40;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       cv_en = 1, dec_valid = 0, dec_cv = 0, dec_raw = 0, dec_ready;
  logic       fifo_rd, out_valid, out_dec;
  coef_vec_t  fifo_a, fifo_b, out_vec;
  logic [2:0] out_idx;
  logic       fa_full, fa_empty, fb_full, fb_empty;
  logic [9:0] fa_cnt, fb_cnt;
  logic       fill = 0;
  coef_vec_t  fill_a, fill_b;

  coef_fifo #(.DEPTH(512)) u_fa (.clk, .rst_n, .wr_en(fill), .wr_vec(fill_a), .rd_en(fifo_rd),
    .rd_vec(fifo_a), .count(fa_cnt), .full(fa_full), .empty(fa_empty));
  coef_fifo #(.DEPTH(512)) u_fb (.clk, .rst_n, .wr_en(fill), .wr_vec(fill_b), .rd_en(fifo_rd),
    .rd_vec(fifo_b), .count(fb_cnt), .full(fb_full), .empty(fb_empty));

  data_select dut (.*);

  int checks = 0, failures = 0, nvec = 0, n_a = 0, n_b = 0, n_gap = 0, n_wait = 0;
  bit sel [NB];
  int last_out = -1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  // vector v of block b in image i: element l = (i, b, v, l) packed
  function automatic coef_t tag(int i, int b, int v, int l);
    return coef_t'(i * 1000000 + b * 1000 + v * 10 + l);
  endfunction

  int cyc = 0;
  always @(posedge clk) cyc++;

  always @(posedge clk) if (rst_n && out_valid) begin
    int b;
    b = nvec / 8;
    check(out_idx == 3'(nvec % 8), "index");
    check(out_dec == sel[b], "decision");
    for (int l = 0; l < 8; l++)
      check(out_vec[l] == tag(sel[b] ? 0 : 1, b, nvec % 8, l), $sformatf("block %0d vec %0d", b, nvec % 8));
    if (last_out >= 0 && cyc - last_out > 1) n_gap++;
    last_out = cyc;
    if (sel[b]) n_a++; else n_b++;
    nvec++;
  end

  always @(posedge clk) if (rst_n && !dec_ready) n_wait++;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < NB; b++)
      for (int v = 0; v < 8; v++) begin
        @(negedge clk);
        fill = 1;
        for (int l = 0; l < 8; l++) begin fill_a[l] = tag(0, b, v, l); fill_b[l] = tag(1, b, v, l); end
      end
    @(negedge clk);
    fill = 0;
    for (int b = 0; b < NB; b++) begin
      bit c, r;
      while (!dec_ready) @(negedge clk);
      c = $urandom % 2; r = $urandom % 2;
      if (b == NB / 2) cv_en = 0;            // mode switch half way
      dec_valid = 1; dec_cv = c; dec_raw = r;
      sel[b] = cv_en ? c : r;
      @(negedge clk);
      dec_valid = 0;
    end
    repeat (30) @(posedge clk);
    check(nvec == NB * 8, $sformatf("%0d vectors", nvec));
    check(n_gap == 0, "blocks leave back to back");
    check(n_a > 0 && n_b > 0 && n_wait > 0, "both images and throttling seen");
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
