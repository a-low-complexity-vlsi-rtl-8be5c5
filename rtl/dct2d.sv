// dct2d: 8x8 two-dimensional DCT (or IDCT) built, as in the published
// architecture, from two 1-D transforms with a pair of ping-pong transpose
// memories between them.
//
// A block enters as eight vectors, one per clock (rows of pixels for the
// forward DCT, columns of coefficients for the IDCT); gaps between vectors
// are allowed. The first 1-D transform works along each vector and writes
// its result into the transpose memory selected by the input/output
// selection bit. When eight vectors are in, the bit toggles: the next block
// is written into the other memory while the full one is read out column by
// column (the read side uses the inverted selection bit, as drawn in the
// paper's DCT/IDCT figure) into the second 1-D transform.
//
// Output: eight vectors per block, out_idx = 0..7. For the forward DCT,
// vector k holds coefficients D(0..7, k), i.e. column k of the coefficient
// block (horizontal frequency k, element l = vertical frequency). For the
// IDCT, vector r is pixel row r.
//
// Timing: throughput one vector per clock, one block per 8 clocks; the
// last input vector of a block leaves as transposed data 2+1 clocks later,
// and the first output vector appears 6 clocks after the last input vector
// (2 + 1 + 1 + 2). Block counting starts from reset.
module dct2d
  import fusion_pkg::*;
#(
  parameter bit INVERSE = 1'b0
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  coef_vec_t  in_vec,
  output logic       out_valid,
  output logic [2:0] out_idx,
  output coef_vec_t  out_vec
);

  logic      s1_valid;
  coef_vec_t s1_vec;

  dct1d #(.INVERSE(INVERSE)) u_first (
    .clk, .rst_n, .in_valid, .in_vec,
    .out_valid(s1_valid), .out_vec(s1_vec));

  // ping-pong control
  logic       sel;        // input/output selection: memory being written
  logic [2:0] wr_cnt;
  logic       rd_active;
  logic [2:0] rd_cnt;
  logic       rd_bank;
  logic       t_valid;
  logic       t_bank;
  coef_vec_t  t_vec0, t_vec1, t_vec;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sel       <= 1'b0;
      wr_cnt    <= '0;
      rd_active <= 1'b0;
      rd_cnt    <= '0;
      t_valid   <= 1'b0;
      t_bank    <= 1'b0;
    end else begin
      t_valid <= rd_active;
      t_bank  <= rd_bank;
      if (rd_active) begin
        rd_cnt <= rd_cnt + 3'd1;
        if (rd_cnt == 3'd7) rd_active <= 1'b0;
      end
      if (s1_valid) begin
        wr_cnt <= wr_cnt + 3'd1;
        if (wr_cnt == 3'd7) begin
          sel       <= ~sel;
          rd_active <= 1'b1;
          rd_cnt    <= '0;
        end
      end
    end
  end

  assign rd_bank = ~sel;

  transpose_mem u_tm0 (
    .clk, .wr_en(s1_valid && !sel), .wr_idx(wr_cnt), .wr_vec(s1_vec),
    .rd_en(rd_active && rd_bank == 1'b0), .rd_idx(rd_cnt), .rd_vec(t_vec0));
  transpose_mem u_tm1 (
    .clk, .wr_en(s1_valid && sel), .wr_idx(wr_cnt), .wr_vec(s1_vec),
    .rd_en(rd_active && rd_bank == 1'b1), .rd_idx(rd_cnt), .rd_vec(t_vec1));

  assign t_vec = t_bank ? t_vec1 : t_vec0;

  dct1d #(.INVERSE(INVERSE)) u_second (
    .clk, .rst_n, .in_valid(t_valid), .in_vec(t_vec),
    .out_valid, .out_vec);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         out_idx <= '0;
    else if (out_valid) out_idx <= out_idx + 3'd1;
  end

endmodule
