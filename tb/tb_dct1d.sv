// tb_dct1d: checks the 8-point 1-D DCT and IDCT against a floating-point
// matrix product, and their two-clock latency, on random Q10.24 vectors
// (one per clock, with gaps).
module tb_dct1d;
  import fusion_pkg::*;
  import tb_ref_pkg::*;

  typedef real vec_r_t [8];

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic      in_valid = 0;
  coef_vec_t in_vec;
  logic      fv, iv;
  coef_vec_t fo, io;

  dct1d #(.INVERSE(1'b0)) u_fwd (.clk, .rst_n, .in_valid, .in_vec, .out_valid(fv), .out_vec(fo));
  dct1d #(.INVERSE(1'b1)) u_inv (.clk, .rst_n, .in_valid, .in_vec, .out_valid(iv), .out_vec(io));

  int checks = 0, failures = 0;
  vec_r_t hist_in [512];
  int     h_rd = 0, h_wr = 0;
  int     hist_t [$];
  int     cyc = 0;

  always @(posedge clk) cyc++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  // compare outputs with the vector sent two clocks earlier (captured at
  // clock edge E, visible after edge E+1)
  always @(negedge clk) if (rst_n && fv) begin
    vec_r_t x;
    real ef, ei, rf, ri;
    check(hist_t.size() > 0, "output without input");
    if (hist_t.size() > 0) begin
      check(cyc - hist_t[0] == 1, $sformatf("latency %0d", cyc - hist_t[0]));
      x = hist_in[h_rd]; h_rd++;
      void'(hist_t.pop_front());
      for (int o = 0; o < 8; o++) begin
        rf = 0.0; ri = 0.0;
        for (int i = 0; i < 8; i++) begin
          rf += basis(o, i) * x[i];
          ri += basis(i, o) * x[i];
        end
        ef = q2r(fo[o]) - rf; ei = q2r(io[o]) - ri;
        check(ef < 2.0e-4 && ef > -2.0e-4, $sformatf("fwd[%0d] %f vs %f", o, q2r(fo[o]), rf));
        check(ei < 2.0e-4 && ei > -2.0e-4, $sformatf("inv[%0d] %f vs %f", o, q2r(io[o]), ri));
      end
    end
    check(iv == fv, "valid alignment");
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      in_valid = ($urandom % 4) != 0;
      if (in_valid) begin
        vec_r_t x;
        for (int i = 0; i < 8; i++) begin
          // values up to +-512 with a random fraction
          x[i] = (real'($urandom % 1024) - 512.0) + real'($urandom % 65536) / 65536.0;
          in_vec[i] = r2q(x[i]);
          x[i] = q2r(in_vec[i]);
        end
        hist_in[h_wr] = x; h_wr++;
        hist_t.push_back(cyc + 1);
      end
    end
    @(negedge clk);
    in_valid = 0;
    repeat (5) @(posedge clk);
    check(hist_t.size() == 0, "all vectors came out");
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
