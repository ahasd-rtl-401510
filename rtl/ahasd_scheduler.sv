// ahasd_scheduler: the AHASD runtime scheduler, which decides after every
// draft batch whether the PIM keeps drafting ahead or inserts a small
// pre-verification of the earliest unverified tokens on the PIM.
//
// For each finished draft batch it (1) lets the drafting control (edc)
// predict from the entropy history and leading length whether further
// look-ahead drafting is worthwhile, (2) pushes the batch, tagged with a
// batch id and the leading length used for the prediction, into the
// unverified draft queue, and (3) if the prediction is "do not draft", asks
// the time-aware control (tvc) how many tokens can be pre-verified before
// the NPU finishes its current verification; this evaluation starts with
// the prediction and overlaps the push. If that is at least one, a
// pre-verify task (up to MAX_DRAFT tokens of the earliest batch that the
// NPU's running verification does not cover) is pushed into the pre-verify
// queue and drafting pauses until pv_done;
// otherwise drafting continues. Verification results from the feedback
// queue train the edc as soon as they arrive, independent of drafting.
//
// Interface: dr_* accepts finished draft batches from the PIM (dr_ready is
// low while a decision is pending, which stalls the PIM); draft_enable tells
// the PIM that it may start the next batch; udq_*, fbq_* and pvq_* are the
// queue sides (valid/ready); npu_* report the NPU's verification windows in
// this clock, npu_next_id (sampled with npu_start) being the first batch id
// that the starting verification does not cover; pv_done/pv_cycles/pv_len report a finished pre-verification.
// Events pulse one cycle each for observation.
// The decision sequence (EDC first, TVC only when EDC says stop, drafting
// continues when TVC finds no room) follows AHASD; the handshakes, batch
// ids, the cap of one batch per pre-verification and pausing drafting while
// it runs are this design's choices.
module ahasd_scheduler
  import ahasd_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  ent_t                h_max,

  // finished draft batches from the PIM DLM ranks
  input  logic                dr_valid,
  output logic                dr_ready,
  input  logic [MAX_DRAFT-1:0][TOKEN_W-1:0] dr_tokens,
  input  ent_t [MAX_DRAFT-1:0] dr_ent,
  input  len_t                dr_len,
  input  logic [CYC_W-1:0]    dr_cycles,
  output logic                draft_enable,

  // unverified draft queue (write side)
  output logic                udq_valid,
  input  logic                udq_ready,
  output draft_batch_t        udq_data,

  // feedback queue (read side)
  input  logic                fbq_valid,
  output logic                fbq_ready,
  input  feedback_t           fbq_data,

  // pre-verify draft queue (write side)
  output logic                pvq_valid,
  input  logic                pvq_ready,
  output preverify_t          pvq_data,

  // NPU verification windows and PIM pre-verification completion
  input  logic                npu_start,
  input  logic [LKV_W-1:0]    npu_lkv,
  input  logic [BATCH_ID_W-1:0] npu_next_id,
  input  logic                npu_done,
  input  logic [CYC_W-1:0]    npu_cycles,
  input  logic                pv_done,
  input  logic [CYC_W-1:0]    pv_cycles,
  input  len_t                pv_len,

  // observation
  output logic                ev_pred_draft,   // edc: keep drafting
  output logic                ev_pred_stop,    // edc: stop drafting
  output logic                ev_insert,       // tvc: pre-verify inserted
  output logic                ev_no_insert,    // tvc: no room, keep drafting
  output logic                ev_udq_stall,    // batch waiting on a full queue
  output logic                ev_rollback,     // rejected batch rolled back
  output llr_t                llr
);
  typedef enum logic [2:0] {S_READY, S_PRED, S_PUSH, S_EVAL, S_PVPUSH, S_PVWAIT} state_e;
  state_e state;

  draft_batch_t            cur;
  logic [BATCH_ID_W-1:0]   next_id, oldest_id;
  logic                    cur_draft;
  logic [CYC_W-1:0]        pv_tok_q;
  logic                    eval_seen, ins_q;
  logic                    have_cand;

  // ---------------- EDC ----------------
  logic     e_d_ready, e_v_ready, e_pred_valid, e_pred_draft;
  llr_t     e_pred_llr;
  pht_idx_t e_pred_idx, e_upd_idx;
  logic     e_upd_valid, e_upd_inc;
  hist_t    e_leht, e_lceht;
  logic     dr_fire;

  assign dr_ready = (state == S_READY) && e_d_ready;
  assign dr_fire  = dr_valid && dr_ready;

  edc u_edc (
    .clk, .rst_n, .h_max,
    .d_valid (dr_fire), .d_ready (e_d_ready), .d_ent (dr_ent), .d_len (dr_len),
    .v_valid (fbq_valid), .v_ready (e_v_ready), .v_fb (fbq_data),
    .pred_valid (e_pred_valid), .pred_draft (e_pred_draft),
    .pred_llr (e_pred_llr), .pred_idx (e_pred_idx),
    .upd_valid (e_upd_valid), .upd_inc (e_upd_inc), .upd_idx (e_upd_idx),
    .llr, .leht (e_leht), .lceht (e_lceht)
  );
  assign fbq_ready   = e_v_ready;
  assign ev_rollback = e_upd_valid && !e_upd_inc;

  // ---------------- TVC ----------------
  logic             t_eval_req, t_eval_busy, t_eval_done, t_insert;
  logic [CYC_W-1:0] t_pv_tokens, t_ncr, t_c_npu, t_c_left;
  logic [RATIO_W-1:0] t_nv, t_pd, t_pv;

  tvc u_tvc (
    .clk, .rst_n,
    .npu_start, .npu_lkv, .npu_done, .npu_cycles,
    .draft_done (dr_fire), .draft_cycles (dr_cycles), .draft_len (dr_len),
    .pv_done, .pv_cycles, .pv_len,
    .eval_req (t_eval_req), .eval_busy (t_eval_busy), .eval_done (t_eval_done),
    .insert (t_insert), .pv_tokens (t_pv_tokens),
    .ncr (t_ncr), .c_npu (t_c_npu), .c_left (t_c_left),
    .avg_nvct (t_nv), .avg_pdct (t_pd), .avg_pvct (t_pv)
  );

  // ---------------- decision sequence ----------------
  assign draft_enable = (state == S_READY);
  assign udq_valid    = (state == S_PUSH);
  assign udq_data     = cur;
  assign pvq_valid    = (state == S_PVPUSH);
  assign pvq_data.batch_id = oldest_id;
  assign pvq_data.len      = (pv_tok_q > CYC_W'(MAX_DRAFT)) ? len_t'(MAX_DRAFT) : len_t'(pv_tok_q);
  assign t_eval_req   = (state == S_PRED) && e_pred_valid && !e_pred_draft;

  assign ev_pred_draft = e_pred_valid &&  e_pred_draft;
  assign ev_pred_stop  = e_pred_valid && !e_pred_draft;
  // a candidate exists when some drafted batch is not covered by the
  // verification the NPU is running
  assign have_cand     = (oldest_id != next_id);
  assign ev_insert     = t_eval_done &&  t_insert && have_cand;
  assign ev_no_insert  = t_eval_done && !(t_insert && have_cand);
  assign ev_udq_stall  = (state == S_PUSH) && !udq_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_READY; cur <= '0; next_id <= '0; oldest_id <= '0;
      cur_draft <= 1'b0; pv_tok_q <= '0; eval_seen <= 1'b0; ins_q <= 1'b0;
    end else begin
      if (t_eval_req) eval_seen <= 1'b0;
      if (t_eval_done) begin
        eval_seen <= 1'b1;
        ins_q     <= t_insert && have_cand;
        pv_tok_q  <= t_pv_tokens;
      end
      if (npu_start) oldest_id <= npu_next_id;
      unique case (state)
        S_READY: if (dr_fire) begin
          cur.batch_id <= next_id;
          cur.len      <= dr_len;
          cur.tokens   <= dr_tokens;
          cur.ent      <= dr_ent;
          next_id      <= next_id + 1'b1;
          state        <= S_PRED;
        end
        S_PRED: if (e_pred_valid) begin
          cur.llr_pred <= e_pred_llr;
          cur_draft    <= e_pred_draft;
          state        <= S_PUSH;
        end
        S_PUSH: if (udq_ready) state <= cur_draft ? S_READY : S_EVAL;
        S_EVAL: if (eval_seen) state <= ins_q ? S_PVPUSH : S_READY;
        S_PVPUSH: if (pvq_ready) state <= S_PVWAIT;
        S_PVWAIT: if (pv_done) state <= S_READY;
        default: state <= S_READY;
      endcase
    end
  end

  a_no_pv_while_drafting: assert property (@(posedge clk) disable iff (!rst_n)
    pvq_valid |-> !draft_enable);
endmodule
