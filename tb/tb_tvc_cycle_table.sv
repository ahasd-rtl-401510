// tb_tvc_cycle_table: checks the four-entry cycle table. After reset all
// entries hold the preset and the average equals it; each recorded task
// enters as cycles / length (truncated, saturating at 16 bits) 33 cycles
// after the update; the average is the truncated mean of the last four
// ratios; zero lengths are ignored.
module tb_tvc_cycle_table;
  import ahasd_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic upd_valid, busy;
  logic [CYC_W-1:0] cycles;
  logic [LKV_W-1:0] length;
  logic [RATIO_W-1:0] avg;
  logic [RATIO_W-1:0] entry [4];

  tvc_cycle_table #(.PRESET(16'd7)) dut (.*);

  int checks = 0, failures = 0;
  longint m [4];

  task automatic finish();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    finish();
  end

  task automatic record(input longint c, input int l);
    int lat;
    longint r;
    @(negedge clk);
    cycles = 32'(c); length = 16'(l); upd_valid = 1;
    @(negedge clk) upd_valid = 0;
    if (l != 0) begin
      lat = 1;
      while (busy) begin @(negedge clk); lat++; end
      @(negedge clk);
      checks++;
      if (lat != 33) begin failures++; $display("update latency %0d", lat); end
      r = c / l;
      if (r > 65535) r = 65535;
      m[3] = m[2]; m[2] = m[1]; m[1] = m[0]; m[0] = r;
    end else repeat (40) @(negedge clk);
    checks += 2;
    if (entry[0] != 16'(m[0])) begin failures++; $display("entry0 %0d exp %0d", entry[0], m[0]); end
    if (avg != 16'((m[0] + m[1] + m[2] + m[3]) / 4)) begin failures++; $display("avg %0d", avg); end
  endtask

  initial begin
    upd_valid = 0; cycles = 0; length = 0;
    for (int i = 0; i < 4; i++) m[i] = 7;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++;
    if (avg != 16'd7) begin failures++; $display("preset avg %0d", avg); end
    record(64'd6, 1); record(64'd14, 2); record(64'd27, 3); record(64'd41, 4);   // 6 7 9 10 -> avg 8
    checks++;
    if (avg != 16'd8) begin failures++; $display("example avg %0d", avg); end
    record(64'd100, 0);
    record(64'd4000000000, 1);   // saturates
    for (int t = 0; t < 100; t++) record(longint'($urandom), $urandom_range(1, 4000));
    finish();
  end
endmodule
