// data_select: picks, block by block, the coefficient vectors of image A or
// image B from the two coefficient FIFOs and emits the fused block.
//
// The majority filter hands over one decision per block, in block order,
// carrying both the filtered decision (consistency verified) and the raw
// one; cv_en chooses which is applied (1: DCT+Amp_max+Cv, 0: DCT+Amp_max).
// Decisions enter a two-entry queue; dec_ready tells the filter when one
// may be sent. For each decision the block pops its eight vectors from
// both FIFOs (one per clock) and forwards those of A when the decision is
// 1 and those of B otherwise, per the paper's rule F = A if R_n > 0 else B.
//
// Timing: FIFO reads are registered, so out_valid follows each read by one
// clock; a block leaves in 8 consecutive clocks and the next queued block
// follows with no gap, out_idx = 0..7 in the
// order the DCT produced them (vector k = coefficient column k).
module data_select
  import fusion_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       cv_en,
  input  logic       dec_valid,
  input  logic       dec_cv,
  input  logic       dec_raw,
  output logic       dec_ready,
  output logic       fifo_rd,
  input  coef_vec_t  fifo_a,
  input  coef_vec_t  fifo_b,
  output logic       out_valid,
  output logic [2:0] out_idx,
  output logic       out_dec,
  output coef_vec_t  out_vec
);

  logic [1:0] q_cnt;
  logic       q [2];
  logic       busy;
  logic [2:0] cnt;
  logic       cur;
  logic       r_valid;
  logic [2:0] r_idx;
  logic       r_cur;
  logic       pop;

  assign dec_ready = (q_cnt == 2'd0) && !dec_valid;
  assign pop       = q_cnt != 2'd0 && (!busy || cnt == 3'd7);
  assign fifo_rd   = busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_cnt   <= '0;
      q[0]    <= 1'b0;
      q[1]    <= 1'b0;
      busy    <= 1'b0;
      cnt     <= '0;
      cur     <= 1'b0;
      r_valid <= 1'b0;
      r_idx   <= '0;
      r_cur   <= 1'b0;
    end else begin
      // queue: push at the tail, pop from the head
      case ({dec_valid, pop})
        2'b10: begin q[q_cnt[0]] <= cv_en ? dec_cv : dec_raw; q_cnt <= q_cnt + 1'b1; end
        2'b01: begin q[0] <= q[1]; q_cnt <= q_cnt - 1'b1; end
        2'b11: begin
          if (q_cnt == 2'd1) q[0] <= cv_en ? dec_cv : dec_raw;
          else begin q[0] <= q[1]; q[1] <= cv_en ? dec_cv : dec_raw; end
        end
        default: ;
      endcase
      if (pop) begin
        busy <= 1'b1;
        cnt  <= '0;
        cur  <= q[0];
      end else if (busy) begin
        cnt <= cnt + 1'b1;
        if (cnt == 3'd7) busy <= 1'b0;
      end
      r_valid <= busy;
      r_idx   <= cnt;
      r_cur   <= cur;
    end
  end

  assign out_valid = r_valid;
  assign out_idx   = r_idx;
  assign out_dec   = r_cur;
  always_comb
    for (int i = 0; i < N; i++) out_vec[i] = r_cur ? fifo_a[i] : fifo_b[i];

  a_queue_bound: assert property (@(posedge clk) disable iff (!rst_n)
    dec_valid |-> q_cnt < 2'd2 || pop);

endmodule
