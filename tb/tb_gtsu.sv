// tb_gtsu: checks rank gating. In draft mode only the DLM ranks (upper
// half) are enabled. A queued pre-verify task must disable all ranks, wait
// until the DLM ranks are idle, wait GATE_CYCLES (64) more, then enable
// exactly the TLM ranks with a one-cycle pv_start carrying the task; after
// pv_done the same sequence returns to the DLM ranks. The switch time with
// idle ranks is checked (GATE_CYCLES+1 = 65 clock edges from the edge that
// takes the task to the edge that raises pv_start; well under a microsecond
// at any DRAM
// clock above 65 MHz), as is the extra time for a slow drain.
module tb_gtsu;
  import ahasd_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int R = 16;
  logic pv_valid, pv_ready, pv_start, pv_done;
  preverify_t pv_task, pv_task_o;
  logic [R-1:0] ranks_idle, rank_en;
  gt_mode_e mode;
  logic [15:0] switches;

  gtsu dut (.*);

  int checks = 0, failures = 0;

  task automatic finish();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    finish();
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // every cycle: TLM and DLM ranks never both enabled, enable masks exact
  always @(negedge clk) if (rst_n) begin
    chk(rank_en == 16'hff00 || rank_en == 16'h00ff || rank_en == 16'h0000, $sformatf("rank_en %h", rank_en));
  end

  task automatic one_task(input int id, input int len, input int drain);
    int t;
    @(negedge clk);
    pv_task.batch_id = 8'(id); pv_task.len = len_t'(len); pv_valid = 1;
    ranks_idle = (drain > 0) ? 16'h00ff : 16'hffff;   // DLM ranks still busy
    chk(pv_ready && rank_en == 16'hff00, "draft mode before task");
    @(negedge clk) pv_valid = 0;
    chk(rank_en == 16'h0000, "all ranks gated while switching");
    t = 1;
    while (!pv_start) begin
      @(negedge clk); t++;
      if (t == drain) ranks_idle = 16'hffff;
    end
    chk(t == 66 + ((drain > 0) ? drain - 1 : 0), $sformatf("switch to TLM took %0d cycles", t));
    chk(rank_en == 16'h00ff && mode == GT_VERIFY, "TLM ranks enabled");
    chk(pv_task_o.batch_id == 8'(id) && pv_task_o.len == len_t'(len), "task passed on");
    repeat ($urandom_range(1, 30)) @(negedge clk);
    chk(rank_en == 16'h00ff && !pv_ready, "TLM ranks stay enabled until pv_done");
    pv_done = 1;
    @(negedge clk) pv_done = 0;
    chk(rank_en == 16'h0000, "gated after pv_done");
    t = 1;
    while (mode != GT_DRAFT) begin @(negedge clk); t++; end
    chk(t == 66, $sformatf("switch back took %0d cycles", t));
    chk(rank_en == 16'hff00, "DLM ranks enabled again");
  endtask

  initial begin
    pv_valid = 0; pv_task = '0; pv_done = 0; ranks_idle = '1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(mode == GT_DRAFT && rank_en == 16'hff00, "reset in draft mode");
    one_task(5, 2, 0);
    one_task(6, 3, 17);
    for (int k = 0; k < 5; k++) one_task($urandom_range(0, 255), $urandom_range(1, 8), $urandom_range(0, 40));
    chk(switches == 16'd14, $sformatf("switch count %0d", switches));
    finish();
  end
endmodule
