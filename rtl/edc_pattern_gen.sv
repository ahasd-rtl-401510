// edc_pattern_gen: entropy pattern generation of the drafting control.
// The 8-entry entropy history is split into its newer half (entries 4..7)
// and older half (entries 0..3). Each half is summed and divided by four
// with rounding, giving a 3-bit group average; the two averages and the
// 3-bit leading length form the 9-bit pattern table index
// {avg(H4..H7), avg(H0..H3), LLR}. Purely combinational.
// The grouping, the divide-by-four with rounding and the index layout follow
// AHASD. The rounding rule is this design's choice: round half to even,
// which reproduces AHASD's worked example (history 2,1,2,2 | 3,2,6,7 with
// LLR 3 gives index 0xA3).
module edc_pattern_gen
  import ahasd_pkg::*;
(
  input  hist_t    hist,     // [7] newest
  input  llr_t     llr,
  output bucket_t  avg_new,  // average of H4..H7
  output bucket_t  avg_old,  // average of H0..H3
  output pht_idx_t idx
);
  // sum of four 3-bit values is at most 28; (sum / 4) rounded to nearest,
  // ties to even, is at most 7
  function automatic bucket_t round_avg4(input logic [4:0] s);
    logic [2:0] q;
    logic [1:0] f;
    q = s[4:2];
    f = s[1:0];
    if (f == 2'b11 || (f == 2'b10 && q[0])) q = q + 1'b1;
    return q;
  endfunction

  logic [4:0] sum_new, sum_old;
  always_comb begin
    sum_new = 5'(hist[4]) + 5'(hist[5]) + 5'(hist[6]) + 5'(hist[7]);
    sum_old = 5'(hist[0]) + 5'(hist[1]) + 5'(hist[2]) + 5'(hist[3]);
  end

  assign avg_new = round_avg4(sum_new);
  assign avg_old = round_avg4(sum_old);
  assign idx     = {avg_new, avg_old, llr};
endmodule
