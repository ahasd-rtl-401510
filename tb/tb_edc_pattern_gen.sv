// tb_edc_pattern_gen: checks the 9-bit pattern index. The worked example
// (newest-first history 2,1,2,2,3,2,6,7 with leading length 3 gives 0xA3;
// committed history 2,3,2,6,7,4,5,3 with leading length 1 gives 0xE9), then
// random histories against a rounding computed with real numbers
// (group sum / 4 rounded to nearest, ties to even).
module tb_edc_pattern_gen;
  import ahasd_pkg::*;
  hist_t hist;
  llr_t llr;
  bucket_t avg_new, avg_old;
  pht_idx_t idx;

  edc_pattern_gen dut (.*);

  int checks = 0, failures = 0;

  function automatic int rnd4(input int s);
    real v; int f;
    v = s / 4.0;
    f = $rtoi(v);            // floor for s >= 0
    if (v - f > 0.5) return f + 1;
    if (v - f == 0.5) return (f % 2 == 0) ? f : f + 1;
    return f;
  endfunction

  task automatic check(input int exp_idx);
    #1;
    checks++;
    if (int'(idx) != exp_idx) begin
      failures++;
      $display("hist=%h llr=%0d idx=%h expected %h", hist, llr, idx, exp_idx);
    end
  endtask

  initial begin
    // newest entry is [7]
    hist = {3'd2, 3'd1, 3'd2, 3'd2, 3'd3, 3'd2, 3'd6, 3'd7}; llr = 3;
    check(9'h0A3);
    hist = {3'd2, 3'd3, 3'd2, 3'd6, 3'd7, 3'd4, 3'd5, 3'd3}; llr = 1;
    check(9'h0E9);
    for (int t = 0; t < 2000; t++) begin
      int sn, so;
      sn = 0; so = 0;
      for (int i = 0; i < 8; i++) begin
        hist[i] = 3'($urandom_range(0, 7));
        if (i >= 4) sn += int'(hist[i]); else so += int'(hist[i]);
      end
      llr = 3'($urandom_range(0, 7));
      check((rnd4(sn) << 6) | (rnd4(so) << 3) | int'(llr));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
