// idct2d: 8x8 inverse DCT that turns fused coefficients back into pixels.
//
// The paper states that its IDCT is the DCT architecture with other
// coefficients; accordingly this is dct2d with INVERSE set (two 1-D
// inverse transforms around the ping-pong transpose memories), followed by
// a pixel stage that rounds each Q10.24 sample to an integer, undoes the
// -128 level shift applied before the forward DCT and clamps to 0..255
// (the level shift and clamp are this design's choices).
//
// Input: eight coefficient vectors per block, vector k = column k of the
// coefficient block (the order dct2d produces). Output: eight pixel rows
// per block, out_row = 0..7. Timing: one clock more than dct2d, i.e. the
// first row leaves 7 clocks after the last input vector of its block.
module idct2d
  import fusion_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  coef_vec_t  in_vec,
  output logic       out_valid,
  output logic [2:0] out_row,
  output pix_vec_t   out_pix
);

  logic       t_valid;
  logic [2:0] t_idx;
  coef_vec_t  t_vec;

  dct2d #(.INVERSE(1'b1)) u_idct (
    .clk, .rst_n, .in_valid, .in_vec,
    .out_valid(t_valid), .out_idx(t_idx), .out_vec(t_vec));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_row   <= '0;
    end else begin
      out_valid <= t_valid;
      out_row   <= t_idx;
    end
  end

  always_ff @(posedge clk)
    for (int i = 0; i < N; i++) out_pix[i] <= coef_to_pix(t_vec[i]);

endmodule
