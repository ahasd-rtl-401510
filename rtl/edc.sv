// edc: Entropy-History-Aware Drafting Control. Decides after every draft
// batch whether the PIM should keep drafting ahead of verification.
//
// Draft path: the batch's per-token entropies go through an average entropy
// unit; its 3-bit bucket is shifted into the Local Entropy History Table
// (LEHT, 8 entries, [7] newest) and the 3-bit Leading Length Register (LLR,
// unverified batches ahead of verification) is incremented, saturating at 7.
// The updated LEHT and LLR form the 9-bit index {avg(H4..7), avg(H0..3), LLR}
// into the Pattern History Table; the counter's top bit is the prediction
// (1 = keep drafting). pred_valid pulses one cycle with pred_draft and the
// LLR that was used (to travel with the batch).
//
// Verify path: for each verification result the entropies of the accepted
// prefix go through a second average entropy unit; if at least one token was
// accepted its bucket is shifted into the Local Commit Entropy History Table
// (LCEHT). The PHT entry addressed by the LCEHT pattern and the LLR recorded
// when the batch was predicted is incremented when the batch was fully
// accepted and decremented otherwise; the LLR is decremented. On a rejection
// the LEHT is rolled back to the LCEHT contents.
//
// Interface: d_valid/d_ready and v_valid/v_ready accept events; each path
// has its own averaging unit and both may be busy at once. Results are
// applied one per cycle, verification first. Timing: a prediction appears
// 22 cycles after the edge that accepts a draft event when nothing else is
// pending.
//
// From AHASD: tables and sizes, the bucket mapping, the index layout, the
// MSB decision, counter training by full acceptance, LLR counting, the
// rollback, and the LCEHT/predict-moment LLR update index (from its figure).
// This design's choices: fixed-point entropy, handshakes, event ordering,
// saturation of the LLR, and that a batch with no accepted token leaves
// the LCEHT unchanged.
module edc
  import ahasd_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  ent_t            h_max,

  // finished draft batch (from the PIM DLM)
  input  logic            d_valid,
  output logic            d_ready,
  input  ent_t [MAX_DRAFT-1:0] d_ent,
  input  len_t            d_len,

  // verification result (from the NPU TLM, via the feedback queue)
  input  logic            v_valid,
  output logic            v_ready,
  input  feedback_t       v_fb,

  // prediction for the last draft batch
  output logic            pred_valid,
  output logic            pred_draft,
  output llr_t            pred_llr,
  output pht_idx_t        pred_idx,

  // training event (for observation)
  output logic            upd_valid,
  output logic            upd_inc,
  output pht_idx_t        upd_idx,

  // state (for observation)
  output llr_t            llr,
  output hist_t           leht,
  output hist_t           lceht
);
  // ---------------- average entropy units ----------------
  logic    ad_ov, ad_or, av_ov, av_or;
  bucket_t ad_bucket, av_bucket;
  ent_t    ad_avg, av_avg;

  avg_entropy_unit u_avg_draft (
    .clk, .rst_n,
    .in_valid (d_valid), .in_ready (d_ready),
    .ent (d_ent), .len (d_len), .h_max,
    .out_valid (ad_ov), .out_ready (ad_or),
    .avg (ad_avg), .bucket (ad_bucket)
  );

  // latch the verification fields that travel beside the entropies
  logic v_fire;
  logic v_all_q, v_nz_q;
  llr_t v_llr_q;
  assign v_fire = v_valid && v_ready;

  avg_entropy_unit u_avg_commit (
    .clk, .rst_n,
    .in_valid (v_valid), .in_ready (v_ready),
    .ent (v_fb.ent), .len (v_fb.acc_len), .h_max,
    .out_valid (av_ov), .out_ready (av_or),
    .avg (av_avg), .bucket (av_bucket)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_all_q <= 1'b0; v_nz_q <= 1'b0; v_llr_q <= '0;
    end else if (v_fire) begin
      v_all_q <= v_fb.all_accept;
      v_nz_q  <= (v_fb.acc_len != '0);
      v_llr_q <= v_fb.llr_pred;
    end
  end

  // ---------------- apply stage ----------------
  logic  do_v, do_d;
  assign do_v  = av_ov;
  assign do_d  = ad_ov && !av_ov;
  assign av_or = do_v;
  assign ad_or = do_d;

  hist_t leht_d, lceht_v;
  llr_t  llr_inc;
  assign leht_d  = {ad_bucket, leht[HIST_DEPTH-1:1]};
  assign lceht_v = v_nz_q ? {av_bucket, lceht[HIST_DEPTH-1:1]} : lceht;
  assign llr_inc = (llr == '1) ? llr : llr + 1'b1;

  bucket_t  pd_hi, pd_lo, pv_hi, pv_lo;
  pht_idx_t idx_d, idx_v;
  edc_pattern_gen u_pat_draft  (.hist(leht_d),  .llr(llr_inc), .avg_new(pd_hi), .avg_old(pd_lo), .idx(idx_d));
  edc_pattern_gen u_pat_commit (.hist(lceht_v), .llr(v_llr_q), .avg_new(pv_hi), .avg_old(pv_lo), .idx(idx_v));

  logic [PHT_CTR_W-1:0] rd_ctr;
  logic                 rd_draft;
  edc_pht u_pht (
    .clk, .rst_n,
    .rd_idx (idx_d), .rd_ctr, .rd_draft,
    .upd_valid (do_v), .upd_idx (idx_v), .upd_inc (v_all_q)
  );

  assign upd_valid = do_v;
  assign upd_inc   = v_all_q;
  assign upd_idx   = idx_v;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      leht <= '0; lceht <= '0; llr <= '0;
      pred_valid <= 1'b0; pred_draft <= 1'b0; pred_llr <= '0; pred_idx <= '0;
    end else begin
      pred_valid <= 1'b0;
      if (do_v) begin
        lceht <= lceht_v;
        if (llr != '0) llr <= llr - 1'b1;
        if (!v_all_q) leht <= lceht_v;          // roll back to committed history
      end else if (do_d) begin
        leht       <= leht_d;
        llr        <= llr_inc;
        pred_valid <= 1'b1;
        pred_draft <= rd_draft;
        pred_llr   <= llr_inc;
        pred_idx   <= idx_d;
      end
    end
  end
endmodule
