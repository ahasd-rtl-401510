// tb_ahasd_top: end-to-end run of the whole design at its default
// parameters (16 ranks, 16-lane AAUs, 8-deep queues) with a PIM clock of
// 10 ns and an unrelated NPU clock of 7 ns. Models in this testbench stand
// in for the parts outside the design: the PIM's DLM ranks draft batches
// when drafting is enabled (their ranks report busy meanwhile), its TLM
// ranks run pre-verify tasks, the NPU takes batches from the unverified
// queue on its own clock, verifies them (rejecting low-confidence drafts)
// and returns feedback, and a host relays the NPU's verification windows.
// Checked: batches reach the NPU in order with consecutive ids and
// unchanged contents; pre-verify tasks name the first batch not covered by
// the NPU's running verification and only run while exactly the TLM ranks
// are enabled; TLM and DLM ranks
// are never enabled together; an AAU accepts commands exactly when its rank
// is enabled and computes exp within 1 %. Each mechanism must happen at
// least once: keep-drafting and stop predictions, inserted and refused
// pre-verifications, a full unverified queue, a rollback, rank switches
// both ways, AAU work in DLM and in TLM ranks and a refused AAU command.
module tb_ahasd_top;
  import ahasd_pkg::*;
  localparam int R = 16, L = 16;

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
  int start_next = 0, relayed_next = -1, relayed_prev = -1;
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
  int c_draft = 0, c_stop = 0, c_ins = 0, c_noins = 0, c_stall = 0, c_rb = 0;
  int c_pv = 0, c_aau_dlm = 0, c_aau_tlm = 0, c_aau_refused = 0, c_batches = 0;

  task automatic finish();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    repeat (400000) @(posedge clk_pim);
    $display("watchdog expired");
    failures++;
    finish();
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  draft_batch_t sent [$];       // batches accepted from the PIM model, in order
  draft_batch_t inflight [$];   // taken by the NPU, not yet fed back
  int next_npu_id = 0;
  bit hard_phase = 0, npu_gaps = 0;
  bit start_req = 0, done_req = 0;
  int done_cyc = 0, start_lkv = 0;
  int dlm_busy = 0, tlm_busy = 0;

  always @(posedge clk_pim) if (rst_n) begin
    c_draft += ev_pred_draft; c_stop += ev_pred_stop; c_ins += ev_insert;
    c_noins += ev_no_insert; c_stall += ev_udq_stall; c_rb += ev_rollback;
  end

  always @(negedge clk_pim) if (rst_n) begin
    chk(!(|rank_en[7:0] && |rank_en[15:8]), "TLM and DLM ranks enabled together");
    ranks_idle = {{8{dlm_busy == 0}}, {8{tlm_busy == 0}}};
  end

  // ---------------- PIM DLM ranks: drafting ----------------
  initial begin
    dr_valid = 0; dr_tokens = '0; dr_ent = '0; dr_len = 0; dr_cycles = 0;
    wait (rst_n);
    forever begin
      @(negedge clk_pim);
      if (draft_enable && !dr_valid) begin
        int n;
        draft_batch_t b;
        n = $urandom_range(1, MAX_DRAFT);
        dlm_busy = 1;
        repeat (n * 6) @(negedge clk_pim);       // drafting time
        dlm_busy = 0;
        b = '0;
        b.len = len_t'(n);
        for (int i = 0; i < MAX_DRAFT; i++) begin
          b.tokens[i] = 16'($urandom);
          b.ent[i] = hard_phase ? 16'($urandom_range(5 * 4096, 6 * 4096)) : 16'($urandom_range(0, 4096));
        end
        dr_tokens = b.tokens; dr_ent = b.ent; dr_len = b.len; dr_cycles = 32'(n * 6);
        dr_valid = 1;
        @(posedge clk_pim);
        while (!dr_ready) @(posedge clk_pim);
        sent.push_back(b);
        @(negedge clk_pim) dr_valid = 0;
      end
    end
  end

  // ---------------- PIM TLM ranks: pre-verification ----------------
  initial begin
    pv_done = 0; pv_cycles = 0;
    wait (rst_n);
    forever begin
      @(posedge clk_pim);
      if (pv_start) begin
        int n;
        c_pv++;
        chk(rank_en == 16'h00ff, "pre-verify runs on the TLM ranks only");
        chk(pv_task.len >= 1 && pv_task.len <= MAX_DRAFT, "pre-verify length");
        // the first batch not covered by the NPU's latest (or, if a new
        // verification started during gating, previous) verification
        chk(int'(pv_task.batch_id) == relayed_next || int'(pv_task.batch_id) == relayed_prev,
            $sformatf("pre-verify batch %0d, NPU next %0d/%0d", pv_task.batch_id, relayed_next, relayed_prev));
        n = int'(pv_task.len);
        @(negedge clk_pim) tlm_busy = 1;
        repeat (n * 10) @(negedge clk_pim);
        tlm_busy = 0;
        pv_cycles = 32'(n * 10);
        pv_done = 1;
        @(negedge clk_pim) pv_done = 0;
      end
    end
  end

  // ---------------- NPU (own clock) ----------------
  initial begin
    npu_draft_ready = 0; npu_fb_valid = 0; npu_fb = '0;
    wait (rst_n);
    forever begin
      @(negedge clk_npu);
      if (npu_gaps) repeat ($urandom_range(0, 500)) @(negedge clk_npu);
      npu_draft_ready = 1;
      @(posedge clk_npu);
      while (!npu_draft_valid) @(posedge clk_npu);
      begin
        draft_batch_t b, e;
        int lkv, dur, acc;
        b = npu_draft;
        @(negedge clk_npu) npu_draft_ready = 0;
        chk(sent.size() > 0, "batch arrived that was never drafted");
        e = sent.pop_front();
        chk(int'(b.batch_id) == (next_npu_id & 255), $sformatf("batch id %0d exp %0d", b.batch_id, next_npu_id));
        chk(b.len == e.len && b.tokens == e.tokens && b.ent == e.ent, "batch contents");
        next_npu_id++;
        c_batches++;
        inflight.push_back(b);
        lkv = $urandom_range(100, 200);
        dur = lkv * $urandom_range(1, 3);
        start_lkv = lkv; start_next = int'(b.batch_id) + 1; start_req = 1;
        repeat (dur) @(negedge clk_npu);
        done_cyc = dur * 7 / 10;          // NPU cycles scaled to PIM cycles
        done_req = 1;
        acc = (b.ent[0] > 16'(4 * 4096)) ? 0 : int'(b.len);
        npu_fb = '0;
        npu_fb.batch_id = b.batch_id;
        npu_fb.all_accept = (acc == int'(b.len));
        npu_fb.acc_len = len_t'(acc);
        npu_fb.llr_pred = b.llr_pred;
        npu_fb.fix_token = 16'($urandom);
        npu_fb.ent = b.ent;
        npu_fb_valid = 1;
        @(posedge clk_npu);
        while (!npu_fb_ready) @(posedge clk_npu);
        @(negedge clk_npu) npu_fb_valid = 0;
        void'(inflight.pop_front());
      end
    end
  end

  // ---------------- host relay of NPU windows into the PIM clock ----------------
  initial begin
    npu_start = 0; npu_done = 0; npu_lkv = 0; npu_cycles = 0; npu_next_id = 0;
    forever begin
      @(negedge clk_pim);
      npu_start = 0; npu_done = 0;
      if (start_req) begin
        npu_start = 1; npu_lkv = 16'(start_lkv); npu_next_id = 8'(start_next); start_req = 0;
        relayed_prev = relayed_next; relayed_next = start_next & 255;
      end
      else if (done_req) begin npu_done = 1; npu_cycles = 32'(done_cyc); done_req = 0; end
    end
  end

  // ---------------- AAU traffic on random ranks ----------------
  initial begin
    aau_cmd_valid = '0; aau_cmd_op = '{default: AAU_LOAD}; aau_cmd_dst = '0;
    aau_cmd_srca = '0; aau_cmd_srcb = '0; aau_cmd_data = '0;
    wait (rst_n);
    forever begin
      int r;
      int x [L];
      bit en0;
      repeat ($urandom_range(5, 40)) @(negedge clk_pim);
      // prefer TLM ranks while they are enabled so both kinds are exercised
      r = (rank_en[0] && $urandom_range(0, 1)) ? $urandom_range(0, 7) : $urandom_range(0, R - 1);
      for (int l = 0; l < L; l++) begin
        x[l] = $urandom_range(0, 2048) - 1536;
        aau_cmd_data[r][l] = 16'(x[l]);
      end
      en0 = rank_en[r];
      aau_cmd_valid[r] = 1; aau_cmd_op[r] = AAU_LOAD; aau_cmd_dst[r] = 3'd1;
      #1;
      chk(aau_cmd_ready[r] == rank_en[r], "AAU ready follows its rank gate");
      @(negedge clk_pim);
      if (!en0) begin
        aau_cmd_valid[r] = 0;
        c_aau_refused++;
      end else if (rank_en[r]) begin
        aau_cmd_op[r] = AAU_VEXP; aau_cmd_dst[r] = 3'd2; aau_cmd_srca[r] = 3'd1;
        @(negedge clk_pim);
        if (rank_en[r]) begin
          aau_cmd_op[r] = AAU_STORE; aau_cmd_srca[r] = 3'd2;
          @(negedge clk_pim);
          aau_cmd_valid[r] = 0;
          if (aau_rsp_valid[r]) begin
            for (int l = 0; l < L; l++) begin
              real rv, got;
              rv = $exp(x[l] / 256.0) * 256.0;
              got = real'($signed(aau_rsp_data[r][l]));
              chk(got - rv <= 0.01 * rv + 2 && rv - got <= 0.01 * rv + 2, "AAU exp in rank");
            end
            if (r < 8) c_aau_tlm++; else c_aau_dlm++;
          end
        end else aau_cmd_valid[r] = 0;
      end else aau_cmd_valid[r] = 0;
    end
  end

  initial begin
    cfg_h_max = 16'(6 * 4096);
    ranks_idle = '1;
    repeat (3) @(posedge clk_pim);
    rst_n = 1;
    repeat (15000) @(posedge clk_pim);
    hard_phase = 1;
    repeat (30000) @(posedge clk_pim);
    npu_gaps = 1;
    repeat (30000) @(posedge clk_pim);
    npu_gaps = 0; hard_phase = 0;
    repeat (15000) @(posedge clk_pim);
    $display("batches=%0d pred_draft=%0d pred_stop=%0d insert=%0d no_insert=%0d udq_full_cycles=%0d rollback=%0d",
             c_batches, c_draft, c_stop, c_ins, c_noins, c_stall, c_rb);
    $display("preverify=%0d gate_switches=%0d aau_dlm=%0d aau_tlm=%0d aau_refused=%0d",
             c_pv, gate_switches, c_aau_dlm, c_aau_tlm, c_aau_refused);
    chk(c_batches > 50, "batches verified");
    chk(c_draft > 0, "keep-drafting prediction");
    chk(c_stop > 0, "stop prediction");
    chk(c_ins > 0 && c_pv > 0, "pre-verification inserted and run");
    chk(c_noins > 0, "pre-verification refused");
    chk(c_stall > 0, "unverified queue full");
    chk(c_rb > 0, "rollback");
    chk(int'(gate_switches) >= 2 * c_pv && c_pv > 0, "rank switches both ways");
    chk(c_aau_dlm > 0 && c_aau_tlm > 0, "AAU work in DLM and TLM ranks");
    chk(c_aau_refused > 0, "AAU command refused on a gated rank");
    finish();
  end
endmodule
