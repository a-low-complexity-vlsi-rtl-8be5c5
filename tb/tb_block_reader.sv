// tb_block_reader: checks the read address sequence of several image
// sizes against block order (block by block in raster order, eight rows
// per block, address = (8*by + r)*wb + bx), the frame length of exactly
// 8*wb*hb clocks with no gaps, pix_valid one clock after each read, and
// that start is ignored while busy.
module tb_block_reader;
  import fusion_pkg::*;

  localparam int WBM = 16, HBM = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       start = 0, busy, rd_en, pix_valid;
  logic [4:0] cfg_wb = 5'd1;
  logic [3:0] cfg_hb = 4'd1;
  logic [9:0] addr;

  block_reader #(.WB_MAX(WBM), .HB_MAX(HBM)) dut (.*);

  int checks = 0, failures = 0;
  int exp_addr [$];
  int nread = 0;
  bit prev_rd = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  always @(posedge clk) if (rst_n) begin
    check(pix_valid == prev_rd, "pix_valid follows rd_en");
    prev_rd = rd_en;
    if (rd_en) begin
      check(exp_addr.size() > 0, "extra read");
      if (exp_addr.size() > 0) check(int'(addr) == exp_addr.pop_front(), "address");
      nread++;
    end
  end

  task automatic run(int wb, int hb);
    int t;
    for (int by = 0; by < hb; by++)
      for (int bx = 0; bx < wb; bx++)
        for (int r = 0; r < 8; r++) exp_addr.push_back((8*by + r) * wb + bx);
    nread = 0;
    @(negedge clk);
    cfg_wb = 5'(wb); cfg_hb = 4'(hb); start = 1;
    @(negedge clk);
    start = 0;
    t = 0;
    while (busy) begin
      if (t == 3) begin cfg_wb = 5'd1; start = 1; end   // ignored while busy
      else start = 0;
      @(negedge clk);
      t++;
    end
    check(t == 8 * wb * hb, $sformatf("frame took %0d clocks", t));
    check(nread == 8 * wb * hb && exp_addr.size() == 0, "all reads");
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(3, 2);
    run(1, 1);
    run(16, 8);
    run(5, 7);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
