// tb_coef_fifo: random simultaneous writes and reads against a queue
// model; checks order and data, count, full and empty, and the one-clock
// read latency, filling the FIFO to full and draining it to empty.
module tb_coef_fifo;
  import fusion_pkg::*;

  localparam int D = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic      wr_en = 0, rd_en = 0;
  coef_vec_t wr_vec, rd_vec;
  logic [4:0] count;
  logic      full, empty;

  coef_fifo #(.DEPTH(D)) dut (.*);

  int checks = 0, failures = 0, n_full = 0, n_empty = 0;
  coef_vec_t model [4096];   // queue model: entries head..tail-1
  int        head = 0, tail = 0;
  coef_vec_t expect_v;
  bit        expect_now = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      int bias;
      @(negedge clk);
      // outputs after the last clock edge
      if (expect_now)
        for (int i = 0; i < 8; i++) check(rd_vec[i] == expect_v[i], "read data");
      check(int'(count) == (tail - head), "count");
      check(full == ((tail - head) == D), "full");
      check(empty == ((tail - head) == 0), "empty");
      if (full) n_full++;
      if (empty) n_empty++;
      // next request, applied by the model as the next edge will
      bias = ((t / 200) % 2) != 0 ? 30 : 70;  // phases of filling and draining
      wr_en = (($urandom % 100) < bias) && ((tail - head) < D);
      rd_en = (($urandom % 100) < 100 - bias) && ((tail - head) > 0);
      for (int i = 0; i < 8; i++) wr_vec[i] = coef_t'({$urandom, $urandom});
      expect_now = rd_en;
      if (rd_en) begin expect_v = model[head]; head++; end
      if (wr_en) begin model[tail] = wr_vec; tail++; end
    end
    @(negedge clk);
    wr_en = 0; rd_en = 0;
    repeat (3) @(posedge clk);
    check(n_full > 0 && n_empty > 0, "reached full and empty");
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
