// tb_image_mem: writes random 8-pixel words to random addresses of a
// small image memory, reads them back (one clock read latency) and checks
// that each of the eight banks returns its own pixel and that a write
// cycle leaves the read data unchanged.
module tb_image_mem;
  import fusion_pkg::*;

  localparam int D = 256;

  logic clk = 0;
  always #5 clk = ~clk;

  logic       en = 0, we = 0;
  logic [7:0] addr = 0;
  pix_vec_t   wdata, rdata, held;
  pix_vec_t   model [D];

  image_mem #(.DEPTH(D)) dut (.*);

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      en = 1; we = 1; addr = 8'(a);
      for (int i = 0; i < 8; i++) begin wdata[i] = 8'($urandom); model[a][i] = wdata[i]; end
    end
    for (int t = 0; t < 600; t++) begin
      int a;
      a = $urandom % D;
      @(negedge clk);
      en = 1; we = 0; addr = 8'(a);
      @(negedge clk);
      for (int i = 0; i < 8; i++) check(rdata[i] == model[a][i], $sformatf("addr %0d bank %0d", a, i));
      held = rdata;
      // a write: stored, read data holds
      a = $urandom % D;
      en = 1; we = 1; addr = 8'(a);
      for (int i = 0; i < 8; i++) begin wdata[i] = 8'($urandom); model[a][i] = wdata[i]; end
      @(negedge clk);
      for (int i = 0; i < 8; i++) check(rdata[i] == held[i], "read data held during write");
      en = 0; we = 0;
    end
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
