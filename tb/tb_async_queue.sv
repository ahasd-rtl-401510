// tb_async_queue: checks the dual-clock queue with unrelated write (10 ns)
// and read (7 ns) clocks and random valid/ready on both sides. Every entry
// must come out once, in order and unchanged; the queue must report full
// at least once (reader stalled) and must never accept more than DEPTH
// entries ahead of the reader.
module tb_async_queue;
  localparam int DEPTH = 8;
  localparam int N     = 300;
  logic wclk = 0, rclk = 0, rst_n = 0;
  always #5 wclk = ~wclk;
  always #3.5 rclk = ~rclk;

  logic w_valid, w_ready, r_valid, r_ready;
  logic [31:0] w_data, r_data;

  async_queue #(.T(logic [31:0]), .DEPTH(DEPTH)) dut (
    .wclk, .wrst_n (rst_n), .w_valid, .w_ready, .w_data,
    .rclk, .rrst_n (rst_n), .r_valid, .r_ready, .r_data);

  int checks = 0, failures = 0;
  int sent = 0, got = 0, full_seen = 0;
  bit slow_reader;

  task automatic finish();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    #200000;
    $display("watchdog expired");
    failures++;
    finish();
  end

  // writer
  initial begin
    w_valid = 0; w_data = 0;
    repeat (3) @(posedge wclk);
    rst_n = 1;
    checks++;
    if (r_valid) begin failures++; $display("r_valid after reset"); end
    while (sent < N) begin
      @(negedge wclk);
      w_valid = ($urandom_range(0, 3) != 0);
      w_data  = 32'hA5000000 + sent;
      @(posedge wclk);
      if (!w_ready) full_seen++;
      if (w_valid && w_ready) begin
        sent++;
        checks++;
        if (sent - got > DEPTH) begin failures++; $display("more than DEPTH in flight"); end
      end
    end
    @(negedge wclk) w_valid = 0;
  end

  // reader: slow phase first so that the queue fills
  initial begin
    r_ready = 0;
    wait (rst_n);
    while (got < N) begin
      @(negedge rclk);
      slow_reader = (got < 60);
      r_ready = slow_reader ? ($urandom_range(0, 9) == 0) : ($urandom_range(0, 1) == 1);
      @(posedge rclk);
      if (r_valid && r_ready) begin
        checks++;
        if (r_data !== 32'hA5000000 + got) begin
          failures++;
          $display("order error: got %h expected %h", r_data, 32'hA5000000 + got);
        end
        got++;
      end
    end
    @(negedge rclk) r_ready = 0;
    repeat (10) @(posedge rclk);
    checks++;
    if (r_valid) begin failures++; $display("r_valid with queue drained"); end
    checks++;
    if (full_seen == 0) begin failures++; $display("queue never reported full"); end
    $display("entries=%0d full_cycles=%0d", got, full_seen);
    finish();
  end
endmodule
