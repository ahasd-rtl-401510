// tb_tvc: checks the time-aware pre-verification control. It replays the
// worked example: drafting ratios 4,4,3,5 (average 4), NPU ratios 6,7,9,10
// (average 8), pre-verify ratios 9,10,8,10 (average 9), KV length 4 and an
// NPU cycle register of 10 give C_NPU = 32, C_left = 32 - (10 + 4) = 18 and
// 18 / 9 = 2 tokens, so a pre-verification is inserted. Then random windows
// are compared with the same equations computed here, including windows
// with no room (no insertion) and evaluations with no NPU task in flight.
// The answer must come 34 cycles after eval_req.
module tb_tvc;
  import ahasd_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic npu_start, npu_done, draft_done, pv_done, eval_req, eval_busy, eval_done, insert;
  logic [LKV_W-1:0] npu_lkv;
  logic [CYC_W-1:0] npu_cycles, draft_cycles, pv_cycles, pv_tokens, ncr, c_npu, c_left;
  len_t draft_len, pv_len;
  logic [RATIO_W-1:0] avg_nvct, avg_pdct, avg_pvct;

  tvc dut (.*);

  int checks = 0, failures = 0;
  int n_insert = 0, n_none = 0;

  task automatic finish();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    finish();
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic pulse_wait(ref logic sig);
    @(negedge clk) sig = 1;
    @(negedge clk) sig = 0;
    repeat (36) @(negedge clk);
  endtask

  task automatic npu_window(input int lkv, input int cyc);
    @(negedge clk) begin npu_start = 1; npu_lkv = 16'(lkv); end
    @(negedge clk) npu_start = 0;
    @(negedge clk) begin npu_done = 1; npu_cycles = 32'(cyc); end
    @(negedge clk) npu_done = 0;
    repeat (36) @(negedge clk);
  endtask

  // evaluate when the NCR reads `at`; returns through checks
  task automatic evaluate(input int at, input int lkv, input bit active);
    longint cn, need, left, q;
    int lat;
    if (active) while (int'(ncr) != at) @(negedge clk);
    cn   = longint'(avg_nvct) * lkv;
    need = longint'(ncr) + avg_pdct;
    left = (!active || need >= cn) ? 0 : cn - need;
    q    = (avg_pvct == 0) ? 0 : left / avg_pvct;
    eval_req = 1;
    @(negedge clk) eval_req = 0;
    lat = 0;
    while (!eval_done) begin @(negedge clk); lat++; end
    chk(lat == 34, $sformatf("eval latency %0d", lat));
    chk(longint'(c_left) == left, $sformatf("c_left %0d exp %0d", c_left, left));
    chk(longint'(pv_tokens) == q, $sformatf("pv_tokens %0d exp %0d", pv_tokens, q));
    chk(insert == (q >= 1), "insert");
    if (insert) n_insert++; else n_none++;
  endtask

  initial begin
    {npu_start, npu_done, draft_done, pv_done, eval_req} = '0;
    npu_lkv = 0; npu_cycles = 0; draft_cycles = 0; pv_cycles = 0; draft_len = 0; pv_len = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---- worked example ----
    draft_len = 1;
    draft_cycles = 4; pulse_wait(draft_done);
    draft_cycles = 4; pulse_wait(draft_done);
    draft_cycles = 3; pulse_wait(draft_done);
    draft_cycles = 5; pulse_wait(draft_done);
    pv_len = 1;
    pv_cycles = 9;  pulse_wait(pv_done);
    pv_cycles = 10; pulse_wait(pv_done);
    pv_cycles = 8;  pulse_wait(pv_done);
    pv_cycles = 10; pulse_wait(pv_done);
    npu_window(1, 6); npu_window(1, 7); npu_window(1, 9); npu_window(1, 10);
    chk(avg_pdct == 4 && avg_nvct == 8 && avg_pvct == 9, "example table averages");
    @(negedge clk) begin npu_start = 1; npu_lkv = 4; end
    @(negedge clk) npu_start = 0;
    evaluate(10, 4, 1);
    chk(c_npu == 32 && c_left == 18 && pv_tokens == 2 && insert, "worked example 32-14=18, 18/9=2");
    @(negedge clk) npu_done = 1; npu_cycles = 40;
    @(negedge clk) npu_done = 0;
    repeat (36) @(negedge clk);
    // no NPU task in flight: no window
    evaluate(0, 4, 0);
    // ---- random windows ----
    for (int t = 0; t < 60; t++) begin
      int lkv, at;
      draft_len = len_t'($urandom_range(1, 8)); draft_cycles = 32'($urandom_range(10, 400)); pulse_wait(draft_done);
      pv_len = len_t'($urandom_range(1, 8));    pv_cycles = 32'($urandom_range(20, 800));    pulse_wait(pv_done);
      lkv = $urandom_range(16, 2048);
      @(negedge clk) begin npu_start = 1; npu_lkv = 16'(lkv); end
      @(negedge clk) npu_start = 0;
      at = $urandom_range(1, 400);
      evaluate(at, lkv, 1);
      @(negedge clk) begin npu_done = 1; npu_cycles = 32'(lkv * $urandom_range(1, 12)); end
      @(negedge clk) npu_done = 0;
      repeat (36) @(negedge clk);
    end
    chk(n_insert > 1 && n_none > 1, "both insert and no-insert outcomes");
    $display("insert=%0d no_insert=%0d", n_insert, n_none);
    finish();
  end
endmodule
