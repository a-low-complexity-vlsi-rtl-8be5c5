// majority_filter: consistency verification of the block decision map.
//
// The decision block delivers one decision per 8x8 block, in raster order
// of blocks (left to right, top to bottom). Each decision is stored in a
// small decision-map buffer of four block rows. The filtered decision of
// block (x, y) is the majority of the 3x3 neighbourhood of decisions
// centred on it: the nine one-bit decisions are added by the adder tree of
// the paper's majority-filter figure ((a+b)+c, (d+e)+f, (g+h)+i, then the
// first two sums, then the third) and the total is compared with 5 (">=",
// i.e. more 1s than 0s), which is R_n > 0 of the paper's fusion rule with
// W = +1/-1. Neighbours outside the image take the centre block's own
// decision (this design's choice; the paper does not treat borders).
//
// A filtered decision is issued as soon as the lower-right neighbour's
// decision (clamped to the image) has arrived and out_ready is high, one
// per clock at most (in the full design data select paces it), so
// each block's result leaves about one block row after its own decision;
// after the last decision of a frame, the last row drains on its own.
// out_raw carries the unfiltered decision of the same block at the same
// time, so the fused output can bypass the filter with no change of timing.
//
// Interface: start (pulse) clears the frame counters and latches cfg_wb /
// cfg_hb, the image size in blocks (1..WB_MAX, 1..HB_MAX). done pulses with
// the last filtered decision of the frame.
module majority_filter
  import fusion_pkg::*;
#(
  parameter int WB_MAX = 480,        // 3840 / 8
  parameter int HB_MAX = 270,        // 2160 / 8
  localparam int XW = $clog2(WB_MAX + 1),
  localparam int YW = $clog2(HB_MAX + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [XW-1:0] cfg_wb,
  input  logic [YW-1:0] cfg_hb,
  input  logic          in_valid,
  input  logic          in_dec,
  input  logic          out_ready,
  output logic          out_valid,
  output logic          out_dec,
  output logic          out_raw,
  output logic          done
);

  logic          map [4][WB_MAX];   // decision-map rows, slot = y mod 4
  logic [XW-1:0] wb;
  logic [YW-1:0] hb;
  logic [XW-1:0] ax, ox;            // next arrival / next output position
  logic [YW-1:0] ay, oy;
  logic          active;

  // lower-right neighbour of the output block, clamped to the image
  logic [XW-1:0] rx;
  logic [YW-1:0] ry;
  logic          ready;
  assign rx    = (ox + 1'b1 < wb) ? ox + 1'b1 : ox;
  assign ry    = (YW'(oy + 1'b1) < hb) ? YW'(oy + 1'b1) : oy;
  assign ready = active && out_ready && ((ay > ry) || (ay == ry && ax > rx));

  // 3x3 window, out-of-image neighbours replaced by the centre
  logic       w [3][3];
  logic [3:0] s_row0, s_row1, s_row2, s_top, s_all;

  always_comb begin
    logic c;
    c = map[oy[1:0]][ox];
    for (int dy = 0; dy < 3; dy++)
      for (int dx = 0; dx < 3; dx++) begin
        logic in_img;
        logic [YW-1:0] yy;
        logic [XW-1:0] xx;
        yy = YW'(oy + YW'(dy) - 1'b1);
        xx = XW'(ox + XW'(dx) - 1'b1);
        in_img = !(dy == 0 && oy == '0) && !(dy == 2 && YW'(oy + 1'b1) >= hb) &&
                 !(dx == 0 && ox == '0) && !(dx == 2 && XW'(ox + 1'b1) >= wb);
        w[dy][dx] = in_img ? map[yy[1:0]][xx] : c;
      end
    // adder tree of the majority-filter figure
    s_row0 = 4'(w[0][0]) + 4'(w[0][1]) + 4'(w[0][2]);
    s_row1 = 4'(w[1][0]) + 4'(w[1][1]) + 4'(w[1][2]);
    s_row2 = 4'(w[2][0]) + 4'(w[2][1]) + 4'(w[2][2]);
    s_top  = s_row0 + s_row1;
    s_all  = s_top + s_row2;
  end

  always_ff @(posedge clk) begin
    if (in_valid && active) map[ay[1:0]][ax] <= in_dec;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wb <= XW'(1); hb <= YW'(1);
      ax <= '0; ay <= '0; ox <= '0; oy <= '0;
      active    <= 1'b0;
      out_valid <= 1'b0;
      out_dec   <= 1'b0;
      out_raw   <= 1'b0;
      done      <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      done      <= 1'b0;
      if (start) begin
        wb <= cfg_wb; hb <= cfg_hb;
        ax <= '0; ay <= '0; ox <= '0; oy <= '0;
        active <= 1'b1;
      end else begin
        if (in_valid && active) begin
          if (ax + 1'b1 == wb) begin ax <= '0; ay <= ay + 1'b1; end
          else ax <= ax + 1'b1;
        end
        if (ready) begin
          out_valid <= 1'b1;
          out_dec   <= s_all >= 4'd5;
          out_raw   <= map[oy[1:0]][ox];
          if (ox + 1'b1 == wb) begin
            ox <= '0;
            oy <= oy + 1'b1;
            if (YW'(oy + 1'b1) == hb) begin
              active <= 1'b0;
              done   <= 1'b1;
            end
          end else ox <= ox + 1'b1;
        end
      end
    end
  end

  // a decision may only arrive while a frame is open and not complete
  a_no_extra: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid |-> active && ay < hb);

endmodule
