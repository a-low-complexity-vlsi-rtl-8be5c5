// fusion_top: multi-focus image fusion in the DCT domain (DCT+Amp_max with
// optional consistency verification), one frame at a time.
//
// Two source images of the same scene, focused at different depths, are
// written into two image memories. On start, the block reader walks both
// memories in 8x8 block order, eight pixels per clock, and two 2-D DCTs
// transform the blocks in lockstep. Each image's coefficient vectors wait
// in a FIFO while the decision block compares the sums of absolute AC
// coefficients of the two blocks and the majority filter smooths the
// per-block decisions over a 3x3 neighbourhood of blocks. Data select then
// forwards, per block, the coefficients of the image that won. The fused
// coefficients leave on coef_* (the input of a JPEG quantiser/entropy
// coder, which is not part of this design) and are also turned back into
// pixels by the IDCT on pix_*. The block structure follows the paper's
// block diagram: Memory 1/2 -> DCT -> FIFO / Decision -> Data select, plus
// its IDCT; the host interface, frame control, image-size inputs and the
// cv_en bypass of the filter are this design's choices.
//
// Interface:
//   wr_*_a / wr_*_b  host writes of 8-pixel words, address = row*(W/8)+x/8;
//                    accepted only while wr_ready (not busy).
//   cfg_wb, cfg_hb   image size in 8x8 blocks (<= IMG_W/8, IMG_H/8), and
//   cv_en            consistency verification on/off, latched by start.
//   start / busy / done  run one frame; done pulses for one clock right
//                    after the last fused coefficient vector (the IDCT
//                    delivers its last pixel rows up to 15 clocks later).
//   coef_*           fused coefficients: 8 vectors per block, vector k =
//                    coefficient column k, Q10.24, with the block's decision
//                    (1 = image A).
//   pix_*            fused image rows after the IDCT, 8 rows per block.
// Timing: 8 pixels per clock in and 8 coefficients per clock out, one
// block per 8 clocks; a frame of B blocks takes 8*B clocks plus the
// pipeline and the one-block-row wait of the majority filter.
module fusion_top
  import fusion_pkg::*;
#(
  parameter int IMG_W = 3840,
  parameter int IMG_H = 2160,
  localparam int WB_MAX     = IMG_W / N,
  localparam int HB_MAX     = IMG_H / N,
  localparam int MEM_DEPTH  = WB_MAX * HB_MAX * N,
  localparam int FIFO_DEPTH = 2 ** $clog2(N * (WB_MAX + 3)),
  localparam int AW = $clog2(MEM_DEPTH),
  localparam int XW = $clog2(WB_MAX + 1),
  localparam int YW = $clog2(HB_MAX + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  // host writes
  input  logic          wr_en_a,
  input  logic [AW-1:0] wr_addr_a,
  input  pix_vec_t      wr_data_a,
  input  logic          wr_en_b,
  input  logic [AW-1:0] wr_addr_b,
  input  pix_vec_t      wr_data_b,
  output logic          wr_ready,
  // frame control
  input  logic [XW-1:0] cfg_wb,
  input  logic [YW-1:0] cfg_hb,
  input  logic          cv_en,
  input  logic          start,
  output logic          busy,
  output logic          done,
  // fused DCT coefficients
  output logic          coef_valid,
  output logic [2:0]    coef_idx,
  output logic          coef_dec,
  output coef_vec_t     coef_vec,
  // fused pixels
  output logic          pix_valid,
  output logic [2:0]    pix_row,
  output pix_vec_t      pix_vec
);

  logic go;
  logic cv_q;
  logic frame_open;
  logic [AW-1:0] blocks_left;

  assign go       = start && !busy;
  assign busy     = frame_open;
  assign wr_ready = !busy;

  // ---------------- memories and block reader ----------------
  logic          rd_en, mem_valid;
  logic [AW-1:0] rd_addr;
  pix_vec_t      rdata_a, rdata_b;

  block_reader #(.WB_MAX(WB_MAX), .HB_MAX(HB_MAX)) u_reader (
    .clk, .rst_n, .start(go), .cfg_wb, .cfg_hb,
    .busy(), .rd_en, .addr(rd_addr), .pix_valid(mem_valid));

  image_mem #(.DEPTH(MEM_DEPTH)) u_mem_a (
    .clk, .en(rd_en || (wr_en_a && wr_ready)), .we(!rd_en && wr_en_a),
    .addr(rd_en ? rd_addr : wr_addr_a), .wdata(wr_data_a), .rdata(rdata_a));
  image_mem #(.DEPTH(MEM_DEPTH)) u_mem_b (
    .clk, .en(rd_en || (wr_en_b && wr_ready)), .we(!rd_en && wr_en_b),
    .addr(rd_en ? rd_addr : wr_addr_b), .wdata(wr_data_b), .rdata(rdata_b));

  // ---------------- two 2-D DCTs ----------------
  coef_vec_t  lvl_a, lvl_b, dct_a, dct_b;
  logic       dct_valid, dct_valid_b;
  logic [2:0] dct_idx, dct_idx_b;

  always_comb
    for (int i = 0; i < N; i++) begin
      lvl_a[i] = pix_to_coef(rdata_a[i]);
      lvl_b[i] = pix_to_coef(rdata_b[i]);
    end

  dct2d #(.INVERSE(1'b0)) u_dct_a (
    .clk, .rst_n, .in_valid(mem_valid), .in_vec(lvl_a),
    .out_valid(dct_valid), .out_idx(dct_idx), .out_vec(dct_a));
  dct2d #(.INVERSE(1'b0)) u_dct_b (
    .clk, .rst_n, .in_valid(mem_valid), .in_vec(lvl_b),
    .out_valid(dct_valid_b), .out_idx(dct_idx_b), .out_vec(dct_b));

  // ---------------- decision and consistency verification ----------------
  logic dec_valid, dec;
  logic mf_valid, mf_dec, mf_raw, ds_ready;

  decision_block u_decision (
    .clk, .rst_n, .in_valid(dct_valid), .in_idx(dct_idx),
    .in_a(dct_a), .in_b(dct_b),
    .dec_valid, .dec, .sum_a(), .sum_b());

  majority_filter #(.WB_MAX(WB_MAX), .HB_MAX(HB_MAX)) u_majority (
    .clk, .rst_n, .start(go), .cfg_wb, .cfg_hb,
    .in_valid(dec_valid), .in_dec(dec), .out_ready(ds_ready),
    .out_valid(mf_valid), .out_dec(mf_dec), .out_raw(mf_raw), .done());

  // ---------------- FIFOs and data select ----------------
  logic      fifo_rd;
  coef_vec_t fifo_a, fifo_b;

  coef_fifo #(.DEPTH(FIFO_DEPTH)) u_fifo_a (
    .clk, .rst_n, .wr_en(dct_valid), .wr_vec(dct_a), .rd_en(fifo_rd),
    .rd_vec(fifo_a), .count(), .full(), .empty());
  coef_fifo #(.DEPTH(FIFO_DEPTH)) u_fifo_b (
    .clk, .rst_n, .wr_en(dct_valid), .wr_vec(dct_b), .rd_en(fifo_rd),
    .rd_vec(fifo_b), .count(), .full(), .empty());

  data_select u_select (
    .clk, .rst_n, .cv_en(cv_q),
    .dec_valid(mf_valid), .dec_cv(mf_dec), .dec_raw(mf_raw), .dec_ready(ds_ready),
    .fifo_rd, .fifo_a, .fifo_b,
    .out_valid(coef_valid), .out_idx(coef_idx), .out_dec(coef_dec), .out_vec(coef_vec));

  // ---------------- IDCT of the fused coefficients ----------------
  idct2d u_idct (
    .clk, .rst_n, .in_valid(coef_valid), .in_vec(coef_vec),
    .out_valid(pix_valid), .out_row(pix_row), .out_pix(pix_vec));

  // ---------------- frame control ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      frame_open  <= 1'b0;
      cv_q        <= 1'b1;
      blocks_left <= '0;
      done        <= 1'b0;
    end else begin
      done <= 1'b0;
      if (go) begin
        frame_open  <= 1'b1;
        cv_q        <= cv_en;
        blocks_left <= AW'(cfg_wb) * AW'(cfg_hb);
      end else if (coef_valid && coef_idx == 3'd7) begin
        blocks_left <= blocks_left - 1'b1;
        if (blocks_left == AW'(1)) begin
          frame_open <= 1'b0;
          done       <= 1'b1;
        end
      end
    end
  end

  // the two DCTs run in lockstep
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
    dct_valid == dct_valid_b && dct_idx == dct_idx_b);
  // host writes are only legal while the memories are idle
  a_no_write_busy: assert property (@(posedge clk) disable iff (!rst_n)
    (wr_en_a || wr_en_b) |-> wr_ready);

endmodule
