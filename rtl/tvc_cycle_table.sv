// tvc_cycle_table: one of the TVC's cycle tables (NPU Verification Cycle
// Table, PIM Drafting Cycle Table, PIM Pre-Verification Cycle Table).
// It keeps the last four per-unit cycle ratios (cycles of a finished task
// divided by its length: KV-cache length for the NPU, draft length for the
// PIM) in a shift register and outputs their average (sum / 4, truncated).
// All four entries start at PRESET, the per-token cost from offline
// profiling, so early predictions are stable.
// Interface: upd_valid with cycles and length records one task; the ratio is
// formed by a bit-serial divider and enters the table CYC_W+1 cycles later
// (busy is high meanwhile; updates arriving while busy are dropped, and a
// zero length is ignored). Ratios above 16 bits saturate.
// The four-entry history, its average and the offline preset follow AHASD;
// the widths, the truncating average and the drop-while-busy rule are this
// design's choices.
module tvc_cycle_table
  import ahasd_pkg::*;
#(
  parameter logic [RATIO_W-1:0] PRESET = 16'd8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               upd_valid,
  input  logic [CYC_W-1:0]   cycles,
  input  logic [LKV_W-1:0]   length,
  output logic               busy,
  output logic [RATIO_W-1:0] avg,
  output logic [RATIO_W-1:0] entry [4]     // [0] newest
);
  logic             div_busy, div_done, start;
  logic [CYC_W-1:0] q;
  logic [LKV_W-1:0] r;

  assign start = upd_valid && !div_busy && (length != '0);
  assign busy  = div_busy;

  seq_div #(.NW(CYC_W), .DW(LKV_W)) u_div (
    .clk, .rst_n, .start,
    .dividend (cycles), .divisor (length),
    .busy (div_busy), .done (div_done), .quotient (q), .remainder (r)
  );

  logic [RATIO_W-1:0] ratio;
  assign ratio = (q > CYC_W'({RATIO_W{1'b1}})) ? '1 : q[RATIO_W-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 4; i++) entry[i] <= PRESET;
    end else if (div_done) begin
      entry[0] <= ratio;
      for (int i = 1; i < 4; i++) entry[i] <= entry[i-1];
    end
  end

  logic [RATIO_W+1:0] sum;
  always_comb begin
    sum = '0;
    for (int i = 0; i < 4; i++) sum += (RATIO_W+2)'(entry[i]);
  end
  assign avg = sum[RATIO_W+1:2];
endmodule
