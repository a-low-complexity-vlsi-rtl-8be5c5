// block_reader: block-partition address generator. It reads both image
// memories in lockstep, block by block in raster order of blocks, each
// block as its eight pixel rows (one 8-pixel row per clock), which is the
// order the 2-D DCTs expect. Reading a frame of cfg_wb x cfg_hb blocks
// therefore takes 8 * cfg_wb * cfg_hb clocks with no gaps.
//
// Address of row r of block (bx, by): (8*by + r) * cfg_wb + bx, for an image
// stored as raster-order 8-pixel words (see image_mem).
//
// Interface: start (pulse, ignored while busy) latches the size; rd_en/addr
// drive the memories; pix_valid marks the clock in which the memories'
// registered read data is valid (one clock after rd_en). busy is high from
// start to the last read.
module block_reader
  import fusion_pkg::*;
#(
  parameter int WB_MAX = 480,
  parameter int HB_MAX = 270,
  localparam int XW = $clog2(WB_MAX + 1),
  localparam int YW = $clog2(HB_MAX + 1),
  localparam int AW = $clog2(WB_MAX * HB_MAX * N)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [XW-1:0] cfg_wb,
  input  logic [YW-1:0] cfg_hb,
  output logic          busy,
  output logic          rd_en,
  output logic [AW-1:0] addr,
  output logic          pix_valid
);

  logic [XW-1:0] wb, bx;
  logic [YW-1:0] hb, by;
  logic [2:0]    r;

  assign rd_en = busy;
  assign addr  = AW'((AW'(by) * AW'(N) + AW'(r)) * AW'(wb) + AW'(bx));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      wb <= XW'(1); hb <= YW'(1);
      bx <= '0; by <= '0; r <= '0;
      pix_valid <= 1'b0;
    end else begin
      pix_valid <= rd_en;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1;
          wb <= cfg_wb; hb <= cfg_hb;
          bx <= '0; by <= '0; r <= '0;
        end
      end else begin
        r <= r + 3'd1;
        if (r == 3'd7) begin
          if (bx + 1'b1 == wb) begin
            bx <= '0;
            by <= by + 1'b1;
            if (YW'(by + 1'b1) == hb) busy <= 1'b0;
          end else bx <= bx + 1'b1;
        end
      end
    end
  end

endmodule
