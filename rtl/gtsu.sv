// gtsu: Gated Task Scheduling Unit of the LPDDR5-PIM. The PIM ranks hold
// either draft-model (DLM) or target-model (TLM) weights; TLM_MASK marks the
// TLM ranks. In draft mode only the DLM ranks' compute units are enabled.
// When a pre-verification task is waiting in the pre-verify queue the unit
// takes it, disables every rank, waits until the DLM ranks report idle and
// then GATE_CYCLES more (gate settling: row precharge then activation,
// t_RP + t_RCD), enables the TLM ranks and issues the task (pv_start). When
// the task reports pv_done the same drain-and-settle sequence switches back
// to the DLM ranks. Only whole ranks are gated, so a switch costs
// GATE_CYCLES plus the drain time.
// Interface: pv_valid/pv_ready pops the pre-verify queue; rank_en is one bit
// per rank; ranks_idle is one bit per rank from the PIM; mode shows the
// state; switches counts completed gate changes.
// Rank-level gating on pre-verification follows AHASD; the drain rule, the
// settle time and the TLM/DLM rank split (lower half TLM) are this design's.
module gtsu
  import ahasd_pkg::*;
#(
  parameter int unsigned          NUM_RANKS   = 16,
  parameter logic [NUM_RANKS-1:0] TLM_MASK    = NUM_RANKS'((1 << (NUM_RANKS/2)) - 1),
  parameter int unsigned          GATE_CYCLES = 64
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 pv_valid,
  output logic                 pv_ready,
  input  preverify_t           pv_task,
  output logic                 pv_start,
  output preverify_t           pv_task_o,
  input  logic                 pv_done,
  input  logic [NUM_RANKS-1:0] ranks_idle,
  output logic [NUM_RANKS-1:0] rank_en,
  output gt_mode_e             mode,
  output logic [15:0]          switches
);
  localparam logic [NUM_RANKS-1:0] DLM_MASK = ~TLM_MASK;
  localparam int unsigned CW = $clog2(GATE_CYCLES + 1);

  logic [CW-1:0] settle;
  logic          drained;

  // ranks that must be idle before the gates may change
  always_comb begin
    unique case (mode)
      GT_TO_TLM: drained = ((ranks_idle & DLM_MASK) == DLM_MASK);
      GT_TO_DLM: drained = ((ranks_idle & TLM_MASK) == TLM_MASK);
      default:   drained = 1'b0;
    endcase
  end

  assign pv_ready = (mode == GT_DRAFT);

  always_comb begin
    unique case (mode)
      GT_DRAFT:  rank_en = DLM_MASK;
      GT_VERIFY: rank_en = TLM_MASK;
      default:   rank_en = '0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode <= GT_DRAFT; settle <= '0; pv_start <= 1'b0; pv_task_o <= '0; switches <= '0;
    end else begin
      pv_start <= 1'b0;
      unique case (mode)
        GT_DRAFT: if (pv_valid) begin
          pv_task_o <= pv_task;
          settle    <= CW'(GATE_CYCLES);
          mode      <= GT_TO_TLM;
        end
        GT_TO_TLM: if (drained) begin
          if (settle == '0) begin
            mode     <= GT_VERIFY;
            pv_start <= 1'b1;
            switches <= switches + 1'b1;
          end else settle <= settle - 1'b1;
        end
        GT_VERIFY: if (pv_done) begin
          settle <= CW'(GATE_CYCLES);
          mode   <= GT_TO_DLM;
        end
        GT_TO_DLM: if (drained) begin
          if (settle == '0) begin
            mode     <= GT_DRAFT;
            switches <= switches + 1'b1;
          end else settle <= settle - 1'b1;
        end
        default: mode <= GT_DRAFT;
      endcase
    end
  end

  a_exclusive: assert property (@(posedge clk) disable iff (!rst_n)
    !(|(rank_en & TLM_MASK) && |(rank_en & DLM_MASK)));
  a_start_in_verify: assert property (@(posedge clk) disable iff (!rst_n)
    pv_start |-> mode == GT_VERIFY);
endmodule
