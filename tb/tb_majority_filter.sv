// tb_majority_filter: random block decision maps of several sizes are fed
// in raster order with random spacing while out_ready toggles; every
// filtered decision is compared in order with a software 3x3 majority
// (neighbours outside the image replaced by the centre), out_raw with the
// input map, and done must pulse with the last block.
module tb_majority_filter;
  import fusion_pkg::*;

  localparam int WBM = 20, HBM = 12;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       start = 0, in_valid = 0, in_dec = 0, out_ready = 1;
  logic [4:0] cfg_wb = 5'd1;
  logic [3:0] cfg_hb = 4'd1;
  logic       out_valid, out_dec, out_raw, done;

  majority_filter #(.WB_MAX(WBM), .HB_MAX(HBM)) dut (.*);

  int checks = 0, failures = 0;
  bit map [HBM][WBM];
  int wb_c = 1, hb_c = 1, nout = 0, n_flip = 0, n_done = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  function automatic bit ref_major(int x, int y);
    int ones;
    ones = 0;
    for (int dy = -1; dy <= 1; dy++)
      for (int dx = -1; dx <= 1; dx++)
        if (y+dy < 0 || y+dy >= hb_c || x+dx < 0 || x+dx >= wb_c) ones += int'(map[y][x]);
        else ones += int'(map[y+dy][x+dx]);
    return ones >= 5;
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (out_valid) begin
      int x, y;
      x = nout % wb_c; y = nout / wb_c;
      check(out_dec == ref_major(x, y), $sformatf("filtered (%0d,%0d)", x, y));
      check(out_raw == map[y][x], $sformatf("raw (%0d,%0d)", x, y));
      if (out_dec != out_raw) n_flip++;
      check(done == 1'b0 || nout + 1 == wb_c * hb_c, "done early");
      nout++;
    end
    if (done) begin
      n_done++;
      check(nout == wb_c * hb_c, "done with last block");
    end
  end

  always @(negedge clk) out_ready = ($urandom % 3) != 0;

  task automatic run(int wb, int hb, int density);
    for (int y = 0; y < hb; y++)
      for (int x = 0; x < wb; x++) map[y][x] = ($urandom % 100) < density;
    wb_c = wb; hb_c = hb; nout = 0;
    @(negedge clk);
    cfg_wb = 5'(wb); cfg_hb = 4'(hb); start = 1;
    @(negedge clk);
    start = 0;
    for (int y = 0; y < hb; y++)
      for (int x = 0; x < wb; x++) begin
        repeat (1 + $urandom % 8) @(negedge clk);
        in_valid = 1; in_dec = map[y][x];
        @(negedge clk);
        in_valid = 0;
      end
    repeat (4 * wb + 40) @(negedge clk);
    check(nout == wb * hb, $sformatf("%0d of %0d outputs", nout, wb * hb));
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(7, 5, 50);
    run(1, 1, 50);
    run(20, 12, 40);
    run(1, 6, 60);
    run(9, 1, 50);
    run(13, 9, 70);
    check(n_flip > 0, "filter changed decisions");
    check(n_done == 6, "one done per frame");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
