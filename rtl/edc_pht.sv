// edc_pht: Pattern History Table of the drafting control, 512 entries of
// 3-bit saturating counters indexed by the 9-bit entropy pattern. The read
// port is combinational; the most significant counter bit is the
// "keep drafting" prediction. One update per cycle: upd_inc increments the
// addressed counter (draft fully accepted), otherwise it is decremented,
// both saturating. Reset sets every counter to INIT.
// Size, width and the increment/decrement rule follow AHASD; the reset value
// 3'b100 (weakly "draft") is this design's choice.
module edc_pht
  import ahasd_pkg::*;
#(
  parameter logic [PHT_CTR_W-1:0] INIT = 3'b100
) (
  input  logic     clk,
  input  logic     rst_n,
  input  pht_idx_t rd_idx,
  output logic [PHT_CTR_W-1:0] rd_ctr,
  output logic     rd_draft,
  input  logic     upd_valid,
  input  pht_idx_t upd_idx,
  input  logic     upd_inc
);
  logic [PHT_CTR_W-1:0] ctr [PHT_ENTRIES];

  assign rd_ctr   = ctr[rd_idx];
  assign rd_draft = rd_ctr[PHT_CTR_W-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(PHT_ENTRIES); i++) ctr[i] <= INIT;
    end else if (upd_valid) begin
      if (upd_inc) begin
        if (ctr[upd_idx] != '1) ctr[upd_idx] <= ctr[upd_idx] + 1'b1;
      end else begin
        if (ctr[upd_idx] != '0) ctr[upd_idx] <= ctr[upd_idx] - 1'b1;
      end
    end
  end
endmodule
