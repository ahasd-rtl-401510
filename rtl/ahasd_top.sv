// ahasd_top: the AHASD control and memory-side logic between a mobile NPU
// (target-model verification) and an LPDDR5-PIM (draft-model drafting).
// It joins:
//   * the runtime scheduler (drafting control + time-aware pre-verification
//     control), on the PIM clock;
//   * three dual-clock queues: unverified drafts PIM -> NPU, verification
//     feedback NPU -> PIM, and pre-verify tasks scheduler -> PIM;
//   * the gated task scheduling unit, which gates the compute of the TLM or
//     the DLM ranks and issues pre-verify tasks;
//   * one attention algorithm unit per rank, enabled by that rank's gate.
// The NPU itself, the host CPU and the PIM ranks' DRAM and multiply units are
// outside: their signals are ports. NPU verification windows (npu_start /
// npu_done) are reported in the PIM clock, with cycle counts already scaled
// to PIM cycles; npu_next_id names the first batch the starting verification
// does not cover (the candidate for pre-verification).
// Timing: clk_pim and clk_npu are independent; rst_n resets both domains and
// must be released synchronously to both.
// The block set and its connections follow the AHASD architecture figure;
// queue depth, gate settling time, rank split and the port protocol are
// this design's choices.
module ahasd_top
  import ahasd_pkg::*;
#(
  parameter int unsigned          NUM_RANKS   = 16,
  parameter int unsigned          LANES       = 16,
  parameter int unsigned          VREGS       = 8,
  parameter int unsigned          QDEPTH      = 8,
  parameter logic [NUM_RANKS-1:0] TLM_MASK    = NUM_RANKS'((1 << (NUM_RANKS/2)) - 1),
  parameter int unsigned          GATE_CYCLES = 64
) (
  input  logic                clk_pim,
  input  logic                clk_npu,
  input  logic                rst_n,
  input  ent_t                cfg_h_max,

  // ---- PIM DLM ranks: drafting (clk_pim) ----
  output logic                draft_enable,
  input  logic                dr_valid,
  output logic                dr_ready,
  input  logic [MAX_DRAFT-1:0][TOKEN_W-1:0] dr_tokens,
  input  ent_t [MAX_DRAFT-1:0] dr_ent,
  input  len_t                dr_len,
  input  logic [CYC_W-1:0]    dr_cycles,

  // ---- PIM TLM ranks: pre-verification (clk_pim) ----
  output logic                pv_start,
  output preverify_t          pv_task,
  input  logic                pv_done,
  input  logic [CYC_W-1:0]    pv_cycles,

  // ---- rank gating (clk_pim) ----
  input  logic [NUM_RANKS-1:0] ranks_idle,
  output logic [NUM_RANKS-1:0] rank_en,
  output gt_mode_e            gt_mode,

  // ---- NPU verification windows, relayed by the host (clk_pim) ----
  input  logic                npu_start,
  input  logic [LKV_W-1:0]    npu_lkv,
  input  logic [BATCH_ID_W-1:0] npu_next_id,
  input  logic                npu_done,
  input  logic [CYC_W-1:0]    npu_cycles,

  // ---- per-rank AAU command ports (clk_pim) ----
  input  logic [NUM_RANKS-1:0]                  aau_cmd_valid,
  output logic [NUM_RANKS-1:0]                  aau_cmd_ready,
  input  aau_op_e [NUM_RANKS-1:0]               aau_cmd_op,
  input  logic [NUM_RANKS-1:0][$clog2(VREGS)-1:0] aau_cmd_dst,
  input  logic [NUM_RANKS-1:0][$clog2(VREGS)-1:0] aau_cmd_srca,
  input  logic [NUM_RANKS-1:0][$clog2(VREGS)-1:0] aau_cmd_srcb,
  input  logic [NUM_RANKS-1:0][LANES-1:0][15:0]  aau_cmd_data,
  output logic [NUM_RANKS-1:0]                  aau_rsp_valid,
  output logic [NUM_RANKS-1:0][LANES-1:0][15:0]  aau_rsp_data,

  // ---- NPU side (clk_npu) ----
  output logic                npu_draft_valid,
  input  logic                npu_draft_ready,
  output draft_batch_t        npu_draft,
  input  logic                npu_fb_valid,
  output logic                npu_fb_ready,
  input  feedback_t           npu_fb,

  // ---- observation (clk_pim) ----
  output logic                ev_pred_draft,
  output logic                ev_pred_stop,
  output logic                ev_insert,
  output logic                ev_no_insert,
  output logic                ev_udq_stall,
  output logic                ev_rollback,
  output llr_t                llr,
  output logic [15:0]         gate_switches
);
  // ---------------- queues ----------------
  logic         udq_w_valid, udq_w_ready;
  draft_batch_t udq_w_data;
  logic         fbq_r_valid, fbq_r_ready;
  feedback_t    fbq_r_data;
  logic         pvq_w_valid, pvq_w_ready, pvq_r_valid, pvq_r_ready;
  preverify_t   pvq_w_data, pvq_r_data;

  async_queue #(.T(draft_batch_t), .DEPTH(QDEPTH)) u_unverified_q (
    .wclk (clk_pim), .wrst_n (rst_n), .w_valid (udq_w_valid), .w_ready (udq_w_ready), .w_data (udq_w_data),
    .rclk (clk_npu), .rrst_n (rst_n), .r_valid (npu_draft_valid), .r_ready (npu_draft_ready), .r_data (npu_draft));

  async_queue #(.T(feedback_t), .DEPTH(QDEPTH)) u_feedback_q (
    .wclk (clk_npu), .wrst_n (rst_n), .w_valid (npu_fb_valid), .w_ready (npu_fb_ready), .w_data (npu_fb),
    .rclk (clk_pim), .rrst_n (rst_n), .r_valid (fbq_r_valid), .r_ready (fbq_r_ready), .r_data (fbq_r_data));

  async_queue #(.T(preverify_t), .DEPTH(QDEPTH)) u_preverify_q (
    .wclk (clk_pim), .wrst_n (rst_n), .w_valid (pvq_w_valid), .w_ready (pvq_w_ready), .w_data (pvq_w_data),
    .rclk (clk_pim), .rrst_n (rst_n), .r_valid (pvq_r_valid), .r_ready (pvq_r_ready), .r_data (pvq_r_data));

  // ---------------- runtime scheduler ----------------
  ahasd_scheduler u_sched (
    .clk (clk_pim), .rst_n, .h_max (cfg_h_max),
    .dr_valid, .dr_ready, .dr_tokens, .dr_ent, .dr_len, .dr_cycles, .draft_enable,
    .udq_valid (udq_w_valid), .udq_ready (udq_w_ready), .udq_data (udq_w_data),
    .fbq_valid (fbq_r_valid), .fbq_ready (fbq_r_ready), .fbq_data (fbq_r_data),
    .pvq_valid (pvq_w_valid), .pvq_ready (pvq_w_ready), .pvq_data (pvq_w_data),
    .npu_start, .npu_lkv, .npu_next_id, .npu_done, .npu_cycles,
    .pv_done, .pv_cycles, .pv_len (pv_task.len),
    .ev_pred_draft, .ev_pred_stop, .ev_insert, .ev_no_insert, .ev_udq_stall, .ev_rollback,
    .llr
  );

  // ---------------- gated task scheduling ----------------
  gtsu #(.NUM_RANKS (NUM_RANKS), .TLM_MASK (TLM_MASK), .GATE_CYCLES (GATE_CYCLES)) u_gtsu (
    .clk (clk_pim), .rst_n,
    .pv_valid (pvq_r_valid), .pv_ready (pvq_r_ready), .pv_task (pvq_r_data),
    .pv_start, .pv_task_o (pv_task), .pv_done,
    .ranks_idle, .rank_en, .mode (gt_mode), .switches (gate_switches)
  );

  // ---------------- attention algorithm units ----------------
  for (genvar r = 0; r < int'(NUM_RANKS); r++) begin : g_rank
    aau #(.LANES (LANES), .VREGS (VREGS)) u_aau (
      .clk (clk_pim), .rst_n, .en (rank_en[r]),
      .cmd_valid (aau_cmd_valid[r]), .cmd_ready (aau_cmd_ready[r]),
      .cmd_op (aau_cmd_op[r]), .cmd_dst (aau_cmd_dst[r]),
      .cmd_srca (aau_cmd_srca[r]), .cmd_srcb (aau_cmd_srcb[r]),
      .cmd_data (aau_cmd_data[r]),
      .rsp_valid (aau_rsp_valid[r]), .rsp_data (aau_rsp_data[r])
    );
  end
endmodule
