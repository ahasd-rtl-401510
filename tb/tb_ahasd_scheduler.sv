// tb_ahasd_scheduler: runs the runtime scheduler against simple models of
// the PIM (drafts batches whenever allowed), the NPU (verifies batches in
// order after a delay, rejecting high-entropy ones) and the queues. Checked:
// batches leave in order with consecutive ids and unchanged contents; the
// leading length carried with each batch equals the number of unverified
// batches including itself (the queue model holds at most five and the NPU
// one more, so it never saturates); a pre-verify task names the earliest
// unverified batch and 1..8 tokens and is only issued after a "stop"
// prediction; drafting stays disabled until the pre-verification ends.
// Every mechanism must occur: keep-drafting and stop predictions, inserted
// and refused pre-verifications, a full unverified queue, a rollback.
module tb_ahasd_scheduler;
  import ahasd_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  ent_t h_max;
  logic dr_valid, dr_ready, draft_enable;
  logic [MAX_DRAFT-1:0][TOKEN_W-1:0] dr_tokens;
  ent_t [MAX_DRAFT-1:0] dr_ent;
  len_t dr_len;
  logic [CYC_W-1:0] dr_cycles, npu_cycles, pv_cycles;
  logic udq_valid, udq_ready, fbq_valid, fbq_ready, pvq_valid, pvq_ready;
  draft_batch_t udq_data;
  feedback_t fbq_data;
  preverify_t pvq_data;
  logic npu_start, npu_done, pv_done;
  logic [LKV_W-1:0] npu_lkv;
  logic [BATCH_ID_W-1:0] npu_next_id;
  int cur_npu_id = -1, relayed_next = -1;
  len_t pv_len;
  logic ev_pred_draft, ev_pred_stop, ev_insert, ev_no_insert, ev_udq_stall, ev_rollback;
  llr_t llr;

  ahasd_scheduler dut (.*);

  int checks = 0, failures = 0;
  int c_draft = 0, c_stop = 0, c_ins = 0, c_noins = 0, c_stall = 0, c_rb = 0, c_pv = 0;

  task automatic finish();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    finish();
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  draft_batch_t sent [$];     // batches offered by the PIM model
  draft_batch_t inflight [$]; // pushed, not yet verified
  draft_batch_t inq [$];      // pushed, not yet taken by the NPU
  int llr_snap [$];           // expected leading length per batch
  int n_dr = 0, n_fb = 0;
  int next_id = 0, last_stop_t = -1000, pv_pending = 0;
  bit hard_phase, npu_gaps;

  always @(posedge clk) if (rst_n) begin
    c_draft += ev_pred_draft; c_stop += ev_pred_stop; c_ins += ev_insert;
    c_noins += ev_no_insert; c_stall += ev_udq_stall; c_rb += ev_rollback;
    if (ev_pred_stop) last_stop_t = $time;
    // a verification taken in the same cycle as a draft is applied first
    if (fbq_valid && fbq_ready) n_fb++;
    if (dr_valid && dr_ready) begin
      n_dr++;
      llr_snap.push_back(n_dr - n_fb);
    end
  end

  // PIM drafting model
  initial begin
    dr_valid = 0; dr_tokens = '0; dr_ent = '0; dr_len = 0; dr_cycles = 0;
    wait (rst_n);
    forever begin
      @(negedge clk);
      if (draft_enable && !dr_valid && $urandom_range(0, 3) == 0) begin
        int n;
        draft_batch_t b;
        n = $urandom_range(1, MAX_DRAFT);
        b = '0;
        b.len = len_t'(n);
        for (int i = 0; i < MAX_DRAFT; i++) begin
          b.tokens[i] = 16'($urandom);
          b.ent[i] = hard_phase ? 16'($urandom_range(5 * 4096, 6 * 4096)) : 16'($urandom_range(0, 4096));
        end
        dr_tokens = b.tokens; dr_ent = b.ent; dr_len = b.len; dr_cycles = 32'(n * 40);
        dr_valid = 1;
        sent.push_back(b);
      end
      @(posedge clk);
      if (dr_valid && dr_ready) begin
        @(negedge clk) dr_valid = 0;
      end
    end
  end

  // unverified queue sink, 8 deep, drained by the NPU model
  initial begin
    udq_ready = 1;
    forever begin
      @(negedge clk);
      udq_ready = (inq.size() < 5);
      @(posedge clk);
      if (udq_valid && udq_ready) begin
        draft_batch_t e;
        e = sent.pop_front();
        chk(int'(udq_data.batch_id) == (next_id & 255), $sformatf("batch id %0d exp %0d", udq_data.batch_id, next_id));
        chk(udq_data.len == e.len && udq_data.tokens == e.tokens && udq_data.ent == e.ent, "batch contents");
        begin
          int exp_llr;
          exp_llr = llr_snap.pop_front();
          if (exp_llr > 7) exp_llr = 7;
          chk(int'(udq_data.llr_pred) == exp_llr, $sformatf("llr_pred %0d exp %0d", udq_data.llr_pred, exp_llr));
        end
        next_id++;
        inflight.push_back(udq_data);
        inq.push_back(udq_data);
      end
    end
  end

  // NPU model: one verification window per batch, reports windows and
  // returns feedback; rejects batches whose first token entropy is high
  initial begin
    fbq_valid = 0; fbq_data = '0; npu_start = 0; npu_next_id = 0; npu_done = 0; npu_lkv = 0; npu_cycles = 0;
    wait (rst_n);
    forever begin
      @(negedge clk);
      if (inq.size() > 0) begin
        draft_batch_t b;
        int lkv, dur, acc;
        if (npu_gaps) repeat ($urandom_range(0, 400)) @(negedge clk);
        b = inq.pop_front();
        lkv = $urandom_range(100, 200);
        dur = lkv * $urandom_range(1, 3);
        npu_start = 1; npu_lkv = 16'(lkv); npu_next_id = b.batch_id + 1'b1;
        cur_npu_id = int'(b.batch_id); relayed_next = int'(npu_next_id);
        @(negedge clk) npu_start = 0;
        repeat (dur) @(negedge clk);
        npu_done = 1; npu_cycles = 32'(dur);
        @(negedge clk) npu_done = 0;
        acc = (b.ent[0] > 16'(4 * 4096)) ? 0 : int'(b.len);
        fbq_data = '0;
        fbq_data.batch_id = b.batch_id;
        fbq_data.all_accept = (acc == int'(b.len));
        fbq_data.acc_len = len_t'(acc);
        fbq_data.llr_pred = b.llr_pred;
        fbq_data.ent = b.ent;
        fbq_valid = 1;
        @(posedge clk);
        while (!fbq_ready) @(posedge clk);
        @(negedge clk) fbq_valid = 0;
        void'(inflight.pop_front());
      end
    end
  end

  // pre-verify queue sink and PIM pre-verification model
  initial begin
    pvq_ready = 1; pv_done = 0; pv_cycles = 0; pv_len = 0;
    wait (rst_n);
    forever begin
      @(posedge clk);
      if (pvq_valid && pvq_ready) begin
        int lat;
        c_pv++;
        chk(last_stop_t >= 0, "pre-verify only after a stop prediction");
        chk(int'(pvq_data.batch_id) == relayed_next && int'(pvq_data.batch_id) != cur_npu_id,
            $sformatf("pre-verify batch %0d, first batch after the NPU's %0d", pvq_data.batch_id, cur_npu_id));
        chk(pvq_data.len >= 1 && pvq_data.len <= MAX_DRAFT, "pre-verify length");
        lat = $urandom_range(20, 80);
        repeat (lat) begin
          @(negedge clk);
          chk(!draft_enable, "drafting paused during pre-verification");
        end
        pv_len = pvq_data.len; pv_cycles = 32'(int'(pvq_data.len) * 20);
        pv_done = 1;
        @(negedge clk) pv_done = 0;
      end
    end
  end

  initial begin
    h_max = 16'(6 * 4096);
    hard_phase = 0; npu_gaps = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (20000) @(posedge clk);
    hard_phase = 1;               // low-confidence drafts, often rejected
    repeat (40000) @(posedge clk);
    npu_gaps = 1;                 // NPU idle between verifications
    repeat (40000) @(posedge clk);
    npu_gaps = 0;
    hard_phase = 0;
    repeat (20000) @(posedge clk);
    $display("pred_draft=%0d pred_stop=%0d insert=%0d no_insert=%0d udq_stall=%0d rollback=%0d preverify=%0d batches=%0d",
             c_draft, c_stop, c_ins, c_noins, c_stall, c_rb, c_pv, next_id);
    chk(c_draft > 0, "keep-drafting prediction seen");
    chk(c_stop > 0, "stop prediction seen");
    chk(c_ins > 0 && c_pv == c_ins, "pre-verification inserted");
    chk(c_noins > 0, "pre-verification refused");
    chk(c_stall > 0, "unverified queue full");
    chk(c_rb > 0, "rollback");
    finish();
  end
endmodule
