// tb_decision_block: sends pairs of random coefficient blocks (8 vectors
// each, with gaps) and checks the two sums of absolute AC coefficients,
// the decision (1 only when C_A > C_B, ties go to B, a large DC term must
// not count) and the 4-clock delay after the last vector.
module tb_decision_block;
  import fusion_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       in_valid = 0, dec_valid, dec;
  logic [2:0] in_idx = 0;
  coef_vec_t  in_a, in_b;
  sum_t       sum_a, sum_b;

  decision_block dut (.*);

  int checks = 0, failures = 0, cyc = 0, ndec = 0;
  longint exp_a [$], exp_b [$];
  int     last_t [$];
  int     n_ties = 0;

  always @(posedge clk) cyc++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  always @(posedge clk) if (rst_n && dec_valid) begin
    longint ea, eb;
    ea = exp_a.pop_front(); eb = exp_b.pop_front();
    check(cyc - last_t.pop_front() == 4, "decision latency");
    check(longint'(sum_a) == ea, $sformatf("sum_a %0d vs %0d", sum_a, ea));
    check(longint'(sum_b) == eb, $sformatf("sum_b %0d vs %0d", sum_b, eb));
    check(dec == (ea > eb), "decision");
    ndec++;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < 60; b++) begin
      longint sa, sb;
      sa = 0; sb = 0;
      for (int k = 0; k < 8; k++) begin
        if (($urandom % 4) == 0) begin @(negedge clk); in_valid = 0; end
        @(negedge clk);
        in_valid = 1; in_idx = 3'(k);
        for (int l = 0; l < 8; l++) begin
          longint va, vb;
          // coefficients up to +-1024 in Q10.24, scaled per block
          va = longint'($urandom % (1 << 20)) * longint'(1 + b % 16) - (longint'(1) << 23);
          vb = longint'($urandom % (1 << 20)) * longint'(1 + (b * 5) % 16) - (longint'(1) << 23);
          if (b % 7 == 3) vb = va;                       // tie
          if (k == 0 && l == 0) begin                     // large DC must be ignored
            va = (b % 2) ? (longint'(1000) << 24) : -(longint'(1000) << 24);
            vb = -va;
          end
          in_a[l] = coef_t'(va); in_b[l] = coef_t'(vb);
          if (!(k == 0 && l == 0)) begin
            sa += (va < 0) ? -va : va;
            sb += (vb < 0) ? -vb : vb;
          end
        end
        if (k == 7) last_t.push_back(cyc + 1);
      end
      if (sa == sb) n_ties++;
      exp_a.push_back(sa); exp_b.push_back(sb);
    end
    @(negedge clk);
    in_valid = 0;
    repeat (10) @(posedge clk);
    check(ndec == 60, "decision count");
    check(n_ties > 0, "ties exercised");
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
