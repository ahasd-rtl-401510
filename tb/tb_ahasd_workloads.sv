// tb_ahasd_workloads: runs the whole design at its default parameters
// through the generation of 1024 tokens (batch size 1) for three draft/target
// model pairs: OPT 1.3B/6.7B, LLaMA2 7B/13B and a PaLM-like 8B/30B. The
// pairs differ here only in what the control hardware sees of them: the
// vocabulary (token ids up to 50272, 32000 and 256000), the drafting time
// per token and the NPU verification time per KV-cache entry, which grow
// with model size (own relative numbers, not measurements). The KV length
// reported with each verification is a 128-token prompt plus the tokens
// committed so far.
// Models stand in for the outside parts: the DLM ranks draft whenever
// drafting is enabled, with token entropies that drift between confident
// and uncertain stretches; the NPU accepts the prefix of a batch up to the
// first token whose entropy exceeds a random threshold and commits the
// accepted tokens plus one correction token; the TLM ranks run pre-verify
// tasks; a host relays the NPU windows. After 1024 committed tokens drafting
// stops, the design drains, and it is reset for the next pair.
// Checked per pair: token ids and batch contents arrive unchanged and in
// order, ids stay below the vocabulary, the KV length stays within 16 bits,
// every batch is verified, pre-verify tasks run only on the TLM ranks, and
// 1024 tokens are committed before the watchdog. Printed per pair: batches,
// committed tokens, mean accepted length, predictions, pre-verifications and
// elapsed PIM cycles.
module tb_ahasd_workloads;
  import ahasd_pkg::*;
  localparam int R = 16, L = 16;
  localparam int GEN_TOKENS = 1024, PROMPT = 128;

  logic clk_pim = 0, clk_npu = 0, rst_n = 0;
  always #5 clk_pim = ~clk_pim;
  always #3.5 clk_npu = ~clk_npu;

  ent_t cfg_h_max;
  logic draft_enable, dr_valid, dr_ready;
  logic [MAX_DRAFT-1:0][TOKEN_W-1:0] dr_tokens;
  ent_t [MAX_DRAFT-1:0] dr_ent;
  len_t dr_len;
  logic [CYC_W-1:0] dr_cycles, pv_cycles, npu_cycles;
  logic pv_start, pv_done;
  preverify_t pv_task;
  logic [R-1:0] ranks_idle, rank_en;
  gt_mode_e gt_mode;
  logic npu_start, npu_done;
  logic [LKV_W-1:0] npu_lkv;
  logic [BATCH_ID_W-1:0] npu_next_id;
  logic [R-1:0] aau_cmd_valid, aau_cmd_ready, aau_rsp_valid;
  aau_op_e [R-1:0] aau_cmd_op;
  logic [R-1:0][2:0] aau_cmd_dst, aau_cmd_srca, aau_cmd_srcb;
  logic [R-1:0][L-1:0][15:0] aau_cmd_data, aau_rsp_data;
  logic npu_draft_valid, npu_draft_ready, npu_fb_valid, npu_fb_ready;
  draft_batch_t npu_draft;
  feedback_t npu_fb;
  logic ev_pred_draft, ev_pred_stop, ev_insert, ev_no_insert, ev_udq_stall, ev_rollback;
  llr_t llr;
  logic [15:0] gate_switches;

  ahasd_top dut (.*);

  int checks = 0, failures = 0;

  task automatic finish();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    repeat (3000000) @(posedge clk_pim);
    $display("watchdog expired");
    failures++;
    finish();
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // workload description
  int vocab, draft_per_tok, npu_per_kv8;
  // run state
  bit drafting_on = 0;
  bit drafter_busy = 0, npu_busy = 0, pv_busy = 0;
  draft_batch_t sent [$];
  int next_npu_id, committed, n_batches, n_acc_tokens, n_pv;
  int c_draft, c_stop, c_ins, c_rb;
  bit start_req = 0, done_req = 0;
  int done_cyc = 0, start_lkv = 0, start_next = 0;
  int drift = 0;

  always @(posedge clk_pim) if (rst_n) begin
    c_draft += ev_pred_draft; c_stop += ev_pred_stop; c_ins += ev_insert; c_rb += ev_rollback;
  end

  always @(negedge clk_pim) begin
    ranks_idle = {{8{!drafter_busy}}, {8{!pv_busy}}};
    if (rst_n) chk(!(|rank_en[7:0] && |rank_en[15:8]), "TLM and DLM ranks enabled together");
  end

  // ---------------- PIM DLM ranks ----------------
  initial begin
    dr_valid = 0; dr_tokens = '0; dr_ent = '0; dr_len = 0; dr_cycles = 0;
    forever begin
      @(negedge clk_pim);
      if (rst_n && drafting_on && draft_enable && !dr_valid) begin
        int n;
        draft_batch_t b;
        drafter_busy = 1;
        n = $urandom_range(2, MAX_DRAFT);
        repeat (n * draft_per_tok) @(negedge clk_pim);
        drafter_busy = 0;
        // entropy level drifts slowly between confident and uncertain text
        if ($urandom_range(0, 15) == 0) drift = $urandom_range(0, 3);
        b = '0;
        b.len = len_t'(n);
        for (int i = 0; i < MAX_DRAFT; i++) begin
          b.tokens[i] = TOKEN_W'($urandom_range(0, vocab - 1));
          b.ent[i] = 16'($urandom_range(drift * 4096, drift * 4096 + 2 * 4096));
        end
        dr_tokens = b.tokens; dr_ent = b.ent; dr_len = b.len; dr_cycles = 32'(n * draft_per_tok);
        dr_valid = 1;
        @(posedge clk_pim);
        while (!dr_ready) @(posedge clk_pim);
        sent.push_back(b);
        @(negedge clk_pim) dr_valid = 0;
      end
    end
  end

  // ---------------- PIM TLM ranks ----------------
  initial begin
    pv_done = 0; pv_cycles = 0;
    forever begin
      @(posedge clk_pim);
      if (rst_n && pv_start) begin
        int n;
        n_pv++;
        chk(rank_en == 16'h00ff, "pre-verify runs on the TLM ranks only");
        n = int'(pv_task.len);
        @(negedge clk_pim) pv_busy = 1;
        repeat (n * 3 * draft_per_tok) @(negedge clk_pim);
        pv_busy = 0;
        pv_cycles = 32'(n * 3 * draft_per_tok);
        pv_done = 1;
        @(negedge clk_pim) pv_done = 0;
      end
    end
  end

  // ---------------- NPU ----------------
  initial begin
    npu_draft_ready = 0; npu_fb_valid = 0; npu_fb = '0;
    forever begin
      @(negedge clk_npu);
      if (rst_n) begin
        npu_draft_ready = 1;
        @(posedge clk_npu);
        if (npu_draft_valid) begin
          draft_batch_t b, e;
          int lkv, dur, acc;
          b = npu_draft;
          npu_busy = 1;
          @(negedge clk_npu) npu_draft_ready = 0;
          chk(sent.size() > 0, "batch arrived that was never drafted");
          e = sent.pop_front();
          chk(int'(b.batch_id) == (next_npu_id & 255), "batch order");
          chk(b.len == e.len && b.tokens == e.tokens && b.ent == e.ent, "batch contents");
          for (int i = 0; i < int'(b.len); i++) chk(int'(b.tokens[i]) < vocab, "token id within the vocabulary");
          next_npu_id++;
          n_batches++;
          lkv = PROMPT + committed;
          chk(lkv < 65536, "KV length fits");
          dur = 50 + lkv * npu_per_kv8 / 8;
          start_lkv = lkv; start_next = int'(b.batch_id) + 1; start_req = 1;
          repeat (dur) @(negedge clk_npu);
          done_cyc = dur * 7 / 10;
          done_req = 1;
          acc = 0;
          while (acc < int'(b.len) && b.ent[acc] < 16'($urandom_range(2 * 4096, 5 * 4096))) acc++;
          n_acc_tokens += acc;
          committed += acc + 1;
          npu_fb = '0;
          npu_fb.batch_id = b.batch_id;
          npu_fb.all_accept = (acc == int'(b.len));
          npu_fb.acc_len = len_t'(acc);
          npu_fb.llr_pred = b.llr_pred;
          npu_fb.fix_token = TOKEN_W'($urandom_range(0, vocab - 1));
          npu_fb.ent = b.ent;
          npu_fb_valid = 1;
          @(posedge clk_npu);
          while (!npu_fb_ready) @(posedge clk_npu);
          @(negedge clk_npu) npu_fb_valid = 0;
          npu_busy = 0;
        end else begin
          @(negedge clk_npu) npu_draft_ready = 0;
        end
      end
    end
  end

  // ---------------- host relay ----------------
  initial begin
    npu_start = 0; npu_done = 0; npu_lkv = 0; npu_cycles = 0; npu_next_id = 0;
    forever begin
      @(negedge clk_pim);
      npu_start = 0; npu_done = 0;
      if (start_req) begin
        npu_start = 1; npu_lkv = LKV_W'(start_lkv); npu_next_id = 8'(start_next); start_req = 0;
      end else if (done_req) begin
        npu_done = 1; npu_cycles = 32'(done_cyc); done_req = 0;
      end
    end
  end

  task automatic run(input string name, input int voc, input int dpt, input int nkv);
    longint t0;
    vocab = voc; draft_per_tok = dpt; npu_per_kv8 = nkv;
    next_npu_id = 0; committed = 0; n_batches = 0; n_acc_tokens = 0; n_pv = 0;
    c_draft = 0; c_stop = 0; c_ins = 0; c_rb = 0;
    sent.delete();
    rst_n = 0;
    repeat (3) @(posedge clk_pim);
    rst_n = 1;
    t0 = $time;
    drafting_on = 1;
    while (committed < GEN_TOKENS) @(posedge clk_pim);
    // stop drafting and let every batch in flight be verified
    drafting_on = 0;
    repeat (20) @(posedge clk_pim);
    while (dr_valid || drafter_busy || sent.size() > 0 || npu_busy || pv_busy || !draft_enable)
      @(posedge clk_pim);
    chk(n_batches > 0 && sent.size() == 0, "all drafted batches verified");
    chk(committed >= GEN_TOKENS, "generation length reached");
    $display("%s: vocab=%0d batches=%0d committed=%0d mean_accepted=%0d.%02d keep=%0d stop=%0d preverify=%0d rollback=%0d pim_cycles=%0d",
             name, voc, n_batches, committed, n_acc_tokens / n_batches, (n_acc_tokens * 100 / n_batches) % 100,
             c_draft, c_stop, n_pv, c_rb, ($time - t0) / 10);
    chk(c_draft > 0 && c_stop > 0, "both predictions seen");
  endtask

  initial begin
    cfg_h_max = 16'(6 * 4096);
    aau_cmd_valid = '0; aau_cmd_op = '{default: AAU_LOAD}; aau_cmd_dst = '0;
    aau_cmd_srca = '0; aau_cmd_srcb = '0; aau_cmd_data = '0;
    ranks_idle = '1;
    run("OPT-1.3B/OPT-6.7B", 50272, 4, 8);
    run("LLaMA2-7B/LLaMA2-13B", 32000, 8, 16);
    run("PaLM-8B/PaLM-30B", 256000, 9, 32);
    finish();
  end
endmodule
