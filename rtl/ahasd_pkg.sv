// ahasd_pkg: types and constants shared by the AHASD speculative-decoding
// control blocks. Entropy values are unsigned fixed point Q4.12 (16 bits,
// 1.0 = 4096). The draft batch size limit, token width (18 bits, enough for a
// 256k-entry vocabulary) and queue depth are
// this design's own choices; the 3-bit entropy buckets, the 8-entry entropy
// histories, the 3-bit leading length register and the 512-entry pattern
// table follow the AHASD description.
package ahasd_pkg;

  // ---------------- entropy / EDC ----------------
  localparam int unsigned ENT_W        = 16;   // Q4.12 entropy
  localparam int unsigned ENT_FRAC     = 12;
  localparam int unsigned BUCKET_W     = 3;    // eight entropy intervals
  localparam int unsigned HIST_DEPTH   = 8;    // LEHT / LCEHT entries
  localparam int unsigned LLR_W        = 3;    // leading length register
  localparam int unsigned PHT_IDX_W    = 2*BUCKET_W + LLR_W;  // 9
  localparam int unsigned PHT_ENTRIES  = 1 << PHT_IDX_W;      // 512
  localparam int unsigned PHT_CTR_W    = 3;

  // H_max = 6.00 in the worked example of the drafting-control figure
  localparam logic [ENT_W-1:0] HMAX_DEFAULT = 16'(6 << ENT_FRAC);

  // ---------------- draft batches ----------------
  localparam int unsigned MAX_DRAFT    = 8;    // tokens per draft batch
  localparam int unsigned LEN_W        = $clog2(MAX_DRAFT + 1);  // 4
  localparam int unsigned TOKEN_W      = 18;   // vocabularies up to 262144 (PaLM: 256k)
  localparam int unsigned BATCH_ID_W   = 8;

  typedef logic [BUCKET_W-1:0] bucket_t;
  typedef logic [LLR_W-1:0]    llr_t;
  typedef logic [ENT_W-1:0]    ent_t;
  typedef logic [LEN_W-1:0]    len_t;
  typedef logic [PHT_IDX_W-1:0] pht_idx_t;
  typedef bucket_t [HIST_DEPTH-1:0] hist_t;   // [7] is the newest entry

  // One batch of draft tokens travelling PIM -> NPU (unverified draft queue)
  typedef struct packed {
    logic [BATCH_ID_W-1:0]           batch_id;
    len_t                            len;
    llr_t                            llr_pred;  // LLR at prediction moment
    logic [MAX_DRAFT-1:0][TOKEN_W-1:0] tokens;
    ent_t [MAX_DRAFT-1:0]            ent;       // softmax entropy per token
  } draft_batch_t;

  // Verification result NPU -> PIM (feedback queue)
  typedef struct packed {
    logic [BATCH_ID_W-1:0]  batch_id;
    logic                   all_accept;
    len_t                   acc_len;      // accepted prefix length
    llr_t                   llr_pred;     // echoed from the draft batch
    logic [TOKEN_W-1:0]     fix_token;    // TLM's token after the prefix
    ent_t [MAX_DRAFT-1:0]   ent;          // entropies of the batch, echoed
  } feedback_t;

  // Pre-verification task CPU scheduler -> PIM (pre-verify draft queue)
  typedef struct packed {
    logic [BATCH_ID_W-1:0]  batch_id;     // earliest unverified batch
    len_t                   len;          // tokens to pre-verify
  } preverify_t;

  // ---------------- TVC ----------------
  localparam int unsigned CYC_W   = 32;   // cycle counts
  localparam int unsigned RATIO_W = 16;   // cycles per token / per KV entry
  localparam int unsigned LKV_W   = 16;   // KV cache length

  // ---------------- AAU ----------------
  typedef enum logic [3:0] {
    AAU_LOAD  = 4'd0,   // vector buffer <- data path
    AAU_STORE = 4'd1,   // data path     <- vector buffer
    AAU_VADD  = 4'd2,   // VALU
    AAU_VSUB  = 4'd3,   // VALU
    AAU_VMAX  = 4'd4,   // VALU
    AAU_VMUL  = 4'd5,   // VMUL
    AAU_VEXP  = 4'd6,   // VEXP
    AAU_VLOG  = 4'd7,   // VLOG
    AAU_RSUM  = 4'd8,   // row-wise reduce, sum broadcast to all lanes
    AAU_RMAX  = 4'd9    // row-wise reduce, max broadcast to all lanes
  } aau_op_e;

  // Gated task scheduling modes
  typedef enum logic [1:0] {
    GT_DRAFT   = 2'd0,  // DLM ranks computing
    GT_TO_TLM  = 2'd1,  // gates switching towards TLM ranks
    GT_VERIFY  = 2'd2,  // TLM ranks pre-verifying
    GT_TO_DLM  = 2'd3   // gates switching back
  } gt_mode_e;

endpackage
