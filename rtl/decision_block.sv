// decision_block: block contrast measure and A/B decision of the fusion
// method (sum of absolute AC coefficients, compare the two sums).
//
// Both 2-D DCTs deliver a block in lockstep as eight coefficient vectors
// (vector k = column k; element 0 of vector 0 is the DC term). Each clock,
// the magnitudes of the AC coefficients of the incoming vector are added
// (the DC term is masked) and the partial sum is registered: this is the
// "In" of the paper's decision-block figure. Following that figure, each
// image has an accumulator whose second operand is a multiplexer choosing 0
// (first vector of a block) or the fed-back sum, a register after the
// adder, and an output multiplexer that captures the sum at the end of the
// block and otherwise holds it, feeding the comparator.
//
// Decision rule: dec = 1 (take A) when C_A > C_B, else 0 (take B), as in
// the paper's equation for W_n and its flowchart. The comparator in the
// paper's figure is labelled "A>=B"; the equation and flowchart were
// followed for ties.
//
// Timing: dec_valid pulses 4 clocks after the eighth vector of a block
// (abs/add stage, accumulator, capture, compare). Input vectors may have
// gaps; in_idx must count 0..7 within each block.
module decision_block
  import fusion_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  logic [2:0] in_idx,
  input  coef_vec_t  in_a,
  input  coef_vec_t  in_b,
  output logic       dec_valid,
  output logic       dec,        // 1: block of A, 0: block of B
  output sum_t       sum_a,      // C_A of the last decided block
  output sum_t       sum_b       // C_B of the last decided block
);

  // Stage 1: per-vector sums of |AC|
  sum_t       part_a, part_b;
  logic       p_valid, p_first, p_last;

  function automatic sum_t vec_abs_sum(coef_vec_t v, logic skip_dc);
    sum_t s;
    s = '0;
    for (int i = 0; i < N; i++)
      if (!(skip_dc && i == 0)) s += SUM_W'(coef_abs(v[i]));
    return s;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_valid <= 1'b0;
      p_first <= 1'b0;
      p_last  <= 1'b0;
      part_a  <= '0;
      part_b  <= '0;
    end else begin
      p_valid <= in_valid;
      p_first <= in_idx == 3'd0;
      p_last  <= in_idx == 3'd7;
      part_a  <= vec_abs_sum(in_a, in_idx == 3'd0);
      part_b  <= vec_abs_sum(in_b, in_idx == 3'd0);
    end
  end

  // Stage 2: accumulators (select 0 on the first vector of a block)
  sum_t acc_a, acc_b;
  logic a_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_a  <= '0;
      acc_b  <= '0;
      a_done <= 1'b0;
    end else begin
      a_done <= p_valid && p_last;
      if (p_valid) begin
        acc_a <= part_a + (p_first ? '0 : acc_a);
        acc_b <= part_b + (p_first ? '0 : acc_b);
      end
    end
  end

  // Stage 3: output hold registers; stage 4: comparator
  logic c_valid;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sum_a     <= '0;
      sum_b     <= '0;
      c_valid   <= 1'b0;
      dec_valid <= 1'b0;
      dec       <= 1'b0;
    end else begin
      c_valid <= a_done;
      if (a_done) begin
        sum_a <= acc_a;
        sum_b <= acc_b;
      end
      dec_valid <= c_valid;
      if (c_valid) dec <= sum_a > sum_b;
    end
  end

endmodule
