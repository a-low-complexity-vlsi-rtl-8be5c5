// transpose_mem: one 8x8 transpose memory of the 2-D DCT/IDCT.
//
// A block of eight 8-value vectors is written one vector per clock
// (wr_idx selects the row it lands in) and read back one column per clock
// (rd_idx selects the column): the word read at index c holds element c
// of each of the eight written vectors. This is the row/column transpose
// that sits between the two 1-D transforms. The paper describes its
// transpose memories as SRAM-based; here the 64 words are a plain array
// written a row at a time and read a column at a time, which this design
// chooses for a one-clock read of a whole column.
//
// Timing: writes take effect at the clock edge; rd_vec is registered and
// appears one clock after rd_en.
module transpose_mem
  import fusion_pkg::*;
(
  input  logic           clk,
  input  logic           wr_en,
  input  logic [2:0]     wr_idx,
  input  coef_vec_t      wr_vec,
  input  logic           rd_en,
  input  logic [2:0]     rd_idx,
  output coef_vec_t      rd_vec
);

  coef_t mem [N][N];   // mem[row][col]

  always_ff @(posedge clk) begin
    if (wr_en)
      for (int c = 0; c < N; c++) mem[wr_idx][c] <= wr_vec[c];
    if (rd_en)
      for (int r = 0; r < N; r++) rd_vec[r] <= mem[r][rd_idx];
  end

endmodule
