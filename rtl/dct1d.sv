// dct1d: 8-point one-dimensional DCT, or its inverse, on one 8-value vector
// per clock.
//
// The forward transform computes X[k] = sum_n C[k][n] x[n] and the inverse
// x[n] = sum_k C[k][n] X[k], where C is the orthonormal DCT-II matrix of
// fusion_pkg (the inverse only transposes the constant matrix, as the
// published architecture says of its IDCT: same structure, other
// coefficients). All 64 constant products are formed in parallel, so a
// new vector can enter every clock.
//
// Interface: in_valid/in_vec in, out_valid/out_vec out, values in Q10.24.
// Timing: two register stages (products, then rounded sums); out_valid
// follows in_valid by exactly 2 clocks. The two-stage split is this
// design's choice; the paper gives no pipeline for its 1-D DCT.
module dct1d
  import fusion_pkg::*;
#(
  parameter bit INVERSE = 1'b0
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  input  coef_vec_t in_vec,
  output logic      out_valid,
  output coef_vec_t out_vec
);

  // prod[o][i]: contribution of input i to output o, Q.48
  longint prod_q [N][N];
  logic   v1;

  always_ff @(posedge clk) begin
    for (int o = 0; o < N; o++)
      for (int i = 0; i < N; i++)
        prod_q[o][i] <= longint'(in_vec[i]) *
                        longint'(dct_coef(INVERSE ? i : o, INVERSE ? o : i));
  end

  always_ff @(posedge clk) begin
    for (int o = 0; o < N; o++) begin
      longint acc;
      acc = 0;
      for (int i = 0; i < N; i++) acc += prod_q[o][i];
      out_vec[o] <= round_sat(acc);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1        <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      v1        <= in_valid;
      out_valid <= v1;
    end
  end

endmodule
