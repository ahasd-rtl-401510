// tb_edc: checks the drafting control against a reference model kept in
// this testbench (entropy histories, leading length, 512 counters).
// Draft batches use per-token entropies at the centre of a chosen bucket so
// that the expected bucket is known; verification results carry junk
// entropies beyond the accepted prefix, which must be ignored. The worked
// examples are replayed: history 2,1,2,2,3,2,6,7 with LLR 3 must address
// entry 0xA3, and committed history 2,3,2,6,7,4,5,3 with a predict-moment
// LLR of 1 must train entry 0xE9. A prediction must appear 22 cycles after
// the draft event is taken.
module tb_edc;
  import ahasd_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  ent_t h_max;
  logic d_valid, d_ready, v_valid, v_ready;
  ent_t [MAX_DRAFT-1:0] d_ent;
  len_t d_len;
  feedback_t v_fb;
  logic pred_valid, pred_draft, upd_valid, upd_inc;
  llr_t pred_llr, llr;
  pht_idx_t pred_idx, upd_idx;
  hist_t leht, lceht;

  edc dut (.*);

  int checks = 0, failures = 0;
  int m_leht [8], m_lceht [8], m_llr, m_pht [512];
  int n_stop = 0, n_draft = 0, n_rollback = 0;

  task automatic finish();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    finish();
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  function automatic int rnd4(input int s);
    int f, r;
    f = s / 4; r = s % 4;
    if (r == 3 || (r == 2 && f % 2 == 1)) return f + 1;
    return f;
  endfunction

  function automatic int pattern(input int h [8], input int l);
    return (rnd4(h[4] + h[5] + h[6] + h[7]) << 6) | (rnd4(h[0] + h[1] + h[2] + h[3]) << 3) | l;
  endfunction

  function automatic ent_t centre(input int b);
    return ent_t'(b * 3072 + 1536);     // middle of bucket b for H_max = 6.0
  endfunction

  task automatic check_state();
    chk(int'(llr) == m_llr, "llr");
    for (int i = 0; i < 8; i++) begin
      chk(int'(leht[i]) == m_leht[i], $sformatf("leht[%0d]", i));
      chk(int'(lceht[i]) == m_lceht[i], $sformatf("lceht[%0d]", i));
    end
  endtask

  task automatic draft(input int b, input int exp_idx = -1, input bit check_lat = 0);
    int n, idx, lat;
    n = $urandom_range(1, MAX_DRAFT);
    @(negedge clk);
    for (int i = 0; i < MAX_DRAFT; i++) d_ent[i] = (i < n) ? centre(b) : 16'hffff;
    d_len = len_t'(n);
    d_valid = 1;
    while (!d_ready) @(negedge clk);
    @(posedge clk);
    @(negedge clk) d_valid = 0;
    lat = 0;
    while (!pred_valid) begin @(negedge clk); lat++; end
    // model
    for (int i = 0; i < 7; i++) m_leht[i] = m_leht[i+1];
    m_leht[7] = b;
    m_llr = (m_llr == 7) ? 7 : m_llr + 1;
    idx = pattern(m_leht, m_llr);
    chk(int'(pred_idx) == idx, $sformatf("pred_idx %h exp %h", pred_idx, idx));
    chk(pred_draft == (m_pht[idx] >= 4), "pred_draft");
    chk(int'(pred_llr) == m_llr, "pred_llr");
    if (exp_idx >= 0) chk(idx == exp_idx && int'(pred_idx) == exp_idx, $sformatf("example index %h", pred_idx));
    if (check_lat) chk(lat == 22, $sformatf("prediction latency %0d", lat));
    if (pred_draft) n_draft++; else n_stop++;
    @(negedge clk);
    check_state();
  endtask

  task automatic verify(input int b, input int acc, input bit all, input int lp, input int exp_idx = -1);
    int idx;
    @(negedge clk);
    v_fb = '0;
    for (int i = 0; i < MAX_DRAFT; i++) v_fb.ent[i] = (i < acc) ? centre(b) : 16'(($urandom_range(0, 65535)));
    v_fb.acc_len = len_t'(acc);
    v_fb.all_accept = all;
    v_fb.llr_pred = llr_t'(lp);
    v_valid = 1;
    while (!v_ready) @(negedge clk);
    @(posedge clk);
    @(negedge clk) v_valid = 0;
    while (!upd_valid) @(negedge clk);
    if (acc > 0) begin
      for (int i = 0; i < 7; i++) m_lceht[i] = m_lceht[i+1];
      m_lceht[7] = b;
    end
    idx = pattern(m_lceht, lp);
    chk(int'(upd_idx) == idx, $sformatf("upd_idx %h exp %h", upd_idx, idx));
    chk(upd_inc == all, "upd_inc");
    if (exp_idx >= 0) chk(idx == exp_idx && int'(upd_idx) == exp_idx, $sformatf("example update index %h", upd_idx));
    if (all) m_pht[idx] = (m_pht[idx] == 7) ? 7 : m_pht[idx] + 1;
    else begin
      m_pht[idx] = (m_pht[idx] == 0) ? 0 : m_pht[idx] - 1;
      m_leht = m_lceht;
      n_rollback++;
    end
    m_llr = (m_llr == 0) ? 0 : m_llr - 1;
    @(negedge clk);
    check_state();
  endtask

  initial begin
    d_valid = 0; v_valid = 0; d_ent = '0; d_len = '0; v_fb = '0;
    h_max = 16'(6 * 4096);
    for (int i = 0; i < 8; i++) begin m_leht[i] = 0; m_lceht[i] = 0; end
    for (int i = 0; i < 512; i++) m_pht[i] = 4;
    m_llr = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---- worked examples ----
    draft(7, -1, 1); draft(6); draft(2); draft(3); draft(2); draft(2); draft(1);
    for (int k = 0; k < 5; k++) verify((k == 0) ? 3 : (k == 1) ? 5 : (k == 2) ? 4 : (k == 3) ? 7 : 6, 8, 1, 0);
    draft(2, 9'h0A3);
    verify(2, 8, 1, 0); verify(3, 8, 1, 0); verify(2, 8, 1, 1, 9'h0E9);
    // ---- random traffic ----
    for (int t = 0; t < 600; t++) begin
      if ($urandom_range(0, 1) == 0) draft($urandom_range(0, 7));
      else begin
        int acc;
        bit all;
        all = ($urandom_range(0, 2) != 0);
        acc = all ? $urandom_range(1, MAX_DRAFT) : $urandom_range(0, MAX_DRAFT - 1);
        verify($urandom_range(0, 7), acc, all, $urandom_range(0, 7));
      end
    end
    chk(n_stop > 0 && n_draft > 0 && n_rollback > 0, "both predictions and a rollback seen");
    $display("predictions: draft=%0d stop=%0d rollbacks=%0d", n_draft, n_stop, n_rollback);
    finish();
  end
endmodule
