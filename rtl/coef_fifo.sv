// coef_fifo: first-in first-out buffer that keeps one image's DCT
// coefficient vectors until the fused selection for their block is known.
//
// One 8-coefficient vector (8 x 35 bits) is written per clock at most and
// one is read per clock at most. The storage is a single array with one
// write and one read port, standing in for the SRAM the paper uses for its
// FIFO; read data is registered, like an SRAM output, and appears one clock
// after rd_en. DEPTH must cover the vectors that wait for the consistency
// verification: about one image row of blocks plus a few blocks, i.e.
// 8 * (WB_MAX + 3) vectors; the default 4096 covers 3840-pixel rows.
//
// Interface: wr_en/wr_vec, rd_en/rd_vec, count, full, empty. Writing when
// full or reading when empty is an error (asserted), not a stall.
module coef_fifo
  import fusion_pkg::*;
#(
  parameter int DEPTH = 4096,
  localparam int AW = $clog2(DEPTH)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        wr_en,
  input  coef_vec_t   wr_vec,
  input  logic        rd_en,
  output coef_vec_t   rd_vec,
  output logic [AW:0] count,
  output logic        full,
  output logic        empty
);

  coef_vec_t   mem [DEPTH];
  logic [AW-1:0] wp, rp;

  assign full  = count == (AW+1)'(DEPTH);
  assign empty = count == '0;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wp] <= wr_vec;
    if (rd_en) rd_vec  <= mem[rp];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (wr_en) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (rd_en) rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      count <= count + (AW+1)'(wr_en) - (AW+1)'(rd_en);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> !full || rd_en);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) rd_en |-> !empty);

endmodule
