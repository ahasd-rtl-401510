// tvc: Time-Aware Pre-Verification Control. Models the latency of the NPU's
// current verification and of PIM drafting / pre-verification and tells how
// many draft tokens the PIM can pre-verify without leaving the NPU idle.
//
//   C_NPU     = avg(NVCT) * L_KV          (cycles of the current verification)
//   C_left    = C_NPU - (NCR + avg(PDCT))  (keep room for one new draft token)
//   L_preverify = C_left / avg(PVCT)       insert = (L_preverify >= 1)
//
// NVCT, PDCT and PVCT are four-entry tables of cycles per unit (per KV entry
// for the NPU, per draft token for the PIM), updated when a task finishes.
// NCR counts, in this block's clock (PIM side), the cycles since the current
// NPU verification started. NPU cycle counts given to npu_done must already
// be converted to PIM-side cycles.
//
// Interface: npu_start (pulse, with npu_lkv) starts a verification window
// and clears NCR; npu_done (pulse, with npu_cycles) closes it and trains
// NVCT; draft_done / pv_done train PDCT / PVCT. eval_req (pulse) starts an
// evaluation; eval_done pulses CYC_W+2 cycles later with insert and
// pv_tokens. With no NPU verification in flight the window is empty and
// insert is 0. Equations, tables, NCR and the >= 1 test follow AHASD; the
// widths, saturation at zero, and the empty-window rule are this design's.
module tvc
  import ahasd_pkg::*;
#(
  parameter logic [RATIO_W-1:0] PRESET_NVCT = 16'd8,
  parameter logic [RATIO_W-1:0] PRESET_PDCT = 16'd4,
  parameter logic [RATIO_W-1:0] PRESET_PVCT = 16'd9
) (
  input  logic               clk,
  input  logic               rst_n,
  // NPU verification window
  input  logic               npu_start,
  input  logic [LKV_W-1:0]   npu_lkv,
  input  logic               npu_done,
  input  logic [CYC_W-1:0]   npu_cycles,
  // PIM task completions
  input  logic               draft_done,
  input  logic [CYC_W-1:0]   draft_cycles,
  input  len_t               draft_len,
  input  logic               pv_done,
  input  logic [CYC_W-1:0]   pv_cycles,
  input  len_t               pv_len,
  // evaluation
  input  logic               eval_req,
  output logic               eval_busy,
  output logic               eval_done,
  output logic               insert,
  output logic [CYC_W-1:0]   pv_tokens,
  // observation
  output logic [CYC_W-1:0]   ncr,
  output logic [CYC_W-1:0]   c_npu,
  output logic [CYC_W-1:0]   c_left,
  output logic [RATIO_W-1:0] avg_nvct,
  output logic [RATIO_W-1:0] avg_pdct,
  output logic [RATIO_W-1:0] avg_pvct
);
  logic               nv_busy, pd_busy, pvb;
  logic [RATIO_W-1:0] nv_e [4], pd_e [4], pv_e [4];
  logic [LKV_W-1:0]   lkv_q;
  logic               npu_active;

  tvc_cycle_table #(.PRESET(PRESET_NVCT)) u_nvct (
    .clk, .rst_n, .upd_valid (npu_done), .cycles (npu_cycles), .length (lkv_q),
    .busy (nv_busy), .avg (avg_nvct), .entry (nv_e));
  tvc_cycle_table #(.PRESET(PRESET_PDCT)) u_pdct (
    .clk, .rst_n, .upd_valid (draft_done), .cycles (draft_cycles), .length (LKV_W'(draft_len)),
    .busy (pd_busy), .avg (avg_pdct), .entry (pd_e));
  tvc_cycle_table #(.PRESET(PRESET_PVCT)) u_pvct (
    .clk, .rst_n, .upd_valid (pv_done), .cycles (pv_cycles), .length (LKV_W'(pv_len)),
    .busy (pvb), .avg (avg_pvct), .entry (pv_e));

  // NPU Current Execution Cycle Register
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ncr <= '0; lkv_q <= '0; npu_active <= 1'b0;
    end else if (npu_start) begin
      ncr <= '0; lkv_q <= npu_lkv; npu_active <= 1'b1;
    end else if (npu_done) begin
      npu_active <= 1'b0;
    end else if (npu_active && ncr != '1) begin
      ncr <= ncr + 1'b1;
    end
  end

  // ADD, iMUL, SUB
  logic [CYC_W:0] need, prod;
  always_comb begin
    prod   = (CYC_W+1)'(avg_nvct) * (CYC_W+1)'(lkv_q);
    need   = (CYC_W+1)'(ncr) + (CYC_W+1)'(avg_pdct);
  end

  // iDIV
  logic             div_start, div_busy, div_done;
  logic [CYC_W-1:0] div_q;
  logic [RATIO_W-1:0] div_r;

  seq_div #(.NW(CYC_W), .DW(RATIO_W)) u_div (
    .clk, .rst_n, .start (div_start),
    .dividend (c_left), .divisor (avg_pvct),
    .busy (div_busy), .done (div_done), .quotient (div_q), .remainder (div_r));

  typedef enum logic [1:0] {E_IDLE, E_SUB, E_DIV} estate_e;
  estate_e est;
  assign eval_busy = (est != E_IDLE);
  assign div_start = (est == E_SUB);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      est <= E_IDLE; c_npu <= '0; c_left <= '0;
      eval_done <= 1'b0; insert <= 1'b0; pv_tokens <= '0;
    end else begin
      eval_done <= 1'b0;
      unique case (est)
        E_IDLE: if (eval_req) begin
          c_npu  <= prod[CYC_W] ? '1 : prod[CYC_W-1:0];
          c_left <= (!npu_active || need >= prod) ? '0 : CYC_W'(prod - need);
          est    <= E_SUB;
        end
        E_SUB: est <= E_DIV;                       // divider started this cycle
        E_DIV: if (div_done) begin
          pv_tokens <= (avg_pvct == '0) ? '0 : div_q;
          insert    <= (avg_pvct != '0) && (div_q != '0);
          eval_done <= 1'b1;
          est       <= E_IDLE;
        end
        default: est <= E_IDLE;
      endcase
    end
  end
endmodule
