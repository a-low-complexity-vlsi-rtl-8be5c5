// tb_fusion_full: one complete 3840x2160 frame through the fusion datapath
// at its default parameters, with consistency verification on. Both
// images are written through the host ports (one 8-pixel word per clock),
// then fused; every fused coefficient vector is compared with a
// floating-point DCT of the block a reference decision selects, and every
// IDCT output row with the selected source pixels. The frame time is
// checked against 8 clocks per block plus the majority filter's one-row
// wait: at 200 MHz it gives the frame rate reported at the end.
module tb_fusion_full;
  import fusion_pkg::*;
  import tb_ref_pkg::*;

  localparam int WBM = 480, HBM = 270;
  localparam int AW  = $clog2(WBM * HBM * 8);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic          wr_en_a = 0, wr_en_b = 0, wr_ready;
  logic [AW-1:0] wr_addr_a = '0, wr_addr_b = '0;
  pix_vec_t      wr_data_a, wr_data_b;
  logic [8:0]    cfg_wb = 9'd1;
  logic [8:0]    cfg_hb = 9'd1;
  logic          cv_en = 1, start = 0, busy, done;
  logic          coef_valid, coef_dec, pix_valid;
  logic [2:0]    coef_idx, pix_row;
  coef_vec_t     coef_vec;
  pix_vec_t      pix_vec;

  fusion_top dut (.*);

  int checks = 0, failures = 0;
  int n_cv_frames = 0, n_nocv_frames = 0, n_blk_a = 0, n_blk_b = 0;
  int n_overrides = 0, n_border = 0, n_refused = 0, n_back2back = 0;

  // reference state of the frame in flight
  int  cur_wb = 1, cur_hb = 1, cur_seed = 0;
  bit  cur_cv;
  bit  ref_raw [270][480];
  bit  ref_sel [270][480];
  int  coef_blk = 0, pix_blk = 0;
  blk_t ref_d;
  real max_err = 0.0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic load_frame(int wb, int hb, int seed);
    for (int y = 0; y < hb * 8; y++)
      for (int xw = 0; xw < wb; xw++) begin
        @(negedge clk);
        wr_en_a = 1; wr_en_b = 1;
        wr_addr_a = AW'(y * wb + xw); wr_addr_b = AW'(y * wb + xw);
        for (int i = 0; i < 8; i++) begin
          wr_data_a[i] = gen_pix(0, xw*8 + i, y, wb, seed);
          wr_data_b[i] = gen_pix(1, xw*8 + i, y, wb, seed);
        end
      end
    @(negedge clk);
    wr_en_a = 0; wr_en_b = 0;
  endtask

  task automatic build_ref(int wb, int hb, int seed, bit cv);
    for (int by = 0; by < hb; by++)
      for (int bx = 0; bx < wb; bx++)
        ref_raw[by][bx] = ac_abs_sum(dct8x8(block_of(0, bx, by, wb, seed))) >
                          ac_abs_sum(dct8x8(block_of(1, bx, by, wb, seed)));
    for (int by = 0; by < hb; by++)
      for (int bx = 0; bx < wb; bx++) begin
        int ones;
        ones = 0;
        for (int dy = -1; dy <= 1; dy++)
          for (int dx = -1; dx <= 1; dx++) begin
            int yy, xx;
            yy = by + dy; xx = bx + dx;
            if (yy < 0 || yy >= hb || xx < 0 || xx >= wb) ones += int'(ref_raw[by][bx]);
            else ones += int'(ref_raw[yy][xx]);
          end
        ref_sel[by][bx] = cv ? (ones >= 5) : ref_raw[by][bx];
        if (cv && ref_sel[by][bx] != ref_raw[by][bx]) n_overrides++;
        if (cv && (bx == 0 || by == 0 || bx == wb-1 || by == hb-1)) n_border++;
      end
    cur_wb = wb; cur_hb = hb; cur_seed = seed; cur_cv = cv;
    coef_blk = 0; pix_blk = 0;
  endtask

  // fused coefficient monitor
  always @(posedge clk) if (rst_n && coef_valid) begin
    int bx, by;
    bit s;
    real e;
    bx = coef_blk % cur_wb; by = coef_blk / cur_wb;
    s  = ref_sel[by][bx];
    if (coef_idx == 3'd0) begin
      ref_d = dct8x8(block_of(s ? 0 : 1, bx, by, cur_wb, cur_seed));
      if (s) n_blk_a++; else n_blk_b++;
    end
    check(coef_dec == s, $sformatf("decision of block (%0d,%0d)", bx, by));
    for (int l = 0; l < 8; l++) begin
      e = q2r(coef_vec[l]) - ref_d[l][coef_idx];
      if (e < 0) e = -e;
      if (e > max_err) max_err = e;
      check(e < 1.0e-4, $sformatf("coef (%0d,%0d) of block (%0d,%0d)", l, coef_idx, bx, by));
    end
    if (coef_idx == 3'd7) coef_blk++;
  end

  // fused pixel monitor: IDCT of the selected block gives back its pixels
  always @(posedge clk) if (rst_n && pix_valid) begin
    int bx, by, img;
    bx = pix_blk % cur_wb; by = pix_blk / cur_wb;
    img = ref_sel[by][bx] ? 0 : 1;
    for (int n = 0; n < 8; n++)
      check(pix_vec[n] == gen_pix(img, bx*8 + n, by*8 + int'(pix_row), cur_wb, cur_seed),
            $sformatf("pixel (%0d,%0d) of block (%0d,%0d)", pix_row, n, bx, by));
    if (pix_row == 3'd7) pix_blk++;
  end

  task automatic run_frame(int wb, int hb, int seed, bit cv, bit reload);
    longint t0, t_first, t_done;
    int limit;
    if (reload) load_frame(wb, hb, seed);
    build_ref(wb, hb, seed, cv);
    @(negedge clk);
    cfg_wb = 9'(wb); cfg_hb = 9'(hb); cv_en = cv; start = 1;
    @(negedge clk);
    start = 0;
    t0 = $time / 10; t_first = -1;
    check(busy && !wr_ready, "busy after start");
    if (!wr_ready) n_refused++;
    while (!done) begin
      @(posedge clk);
      if (coef_valid && t_first < 0) t_first = $time / 10;
    end
    t_done = $time / 10;
    // last IDCT rows drain after done
    repeat (24) @(posedge clk);
    check(coef_blk == wb * hb, "all fused blocks delivered");
    check(pix_blk == wb * hb, "all fused pixel blocks delivered");
    limit = 8 * wb * hb + 8 * (wb + 3) + 40;
    check(t_done - t0 <= limit, $sformatf("frame cycles %0d > %0d", t_done - t0, limit));
    $display("frame %0dx%0d blocks cv=%0d: first coefficient after %0d clocks, frame %0d clocks",
             wb, hb, cv, t_first - t0, t_done - t0);
    $display("at 200 MHz: %0.1f frames/s (fusion only, memories already loaded)",
             200.0e6 / real'(t_done - t0));
    if (cv) n_cv_frames++; else n_nocv_frames++;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_frame(480, 270, 7, 1'b1, 1'b1);
    $display("max |coef error| = %g", max_err);
    $display("mechanisms: cv frames %0d, bypass frames %0d, blocks from A %0d, from B %0d, filter overrides %0d, border windows %0d, writes refused %0d, back-to-back %0d",
             n_cv_frames, n_nocv_frames, n_blk_a, n_blk_b, n_overrides, n_border, n_refused, n_back2back);
    check(n_cv_frames > 0, "cv mode used");
    check(n_blk_a > 0 && n_blk_b > 0, "both sources selected");
    check(n_overrides > 0, "majority filter changed a decision");
    check(n_border > 0, "border windows");
    check(n_refused > 0, "host refused while busy");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
