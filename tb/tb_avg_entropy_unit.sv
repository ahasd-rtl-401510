// tb_avg_entropy_unit: checks the average entropy and its bucket. First the
// worked example (average 1.86 with H_max = 6.00 falls in bucket 2), then
// random batches whose expected average (sum / len, truncated) and bucket
// (floor(avg * 8 / H_max), at most 7) are computed here. Also checks the
// 21-cycle latency from acceptance to out_valid and the zero-length case.
module tb_avg_entropy_unit;
  import ahasd_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready;
  ent_t [MAX_DRAFT-1:0] ent;
  len_t len;
  ent_t h_max, avg;
  bucket_t bucket;

  avg_entropy_unit dut (.*);

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

  task automatic run(input int n, input int exp_avg, input int exp_bucket, input int exp_lat);
    int lat;
    @(negedge clk);
    len = len_t'(n);
    in_valid = 1;
    @(posedge clk);
    checks++;
    if (!in_ready) begin failures++; $display("not ready"); end
    @(negedge clk) in_valid = 0;
    lat = 1;
    while (!out_valid) begin @(posedge clk); lat++; @(negedge clk); end
    lat--;
    checks += 3;
    if (int'(avg) != exp_avg) begin failures++; $display("avg %0d exp %0d", avg, exp_avg); end
    if (int'(bucket) != exp_bucket) begin failures++; $display("bucket %0d exp %0d", bucket, exp_bucket); end
    if (exp_lat >= 0 && lat != exp_lat) begin failures++; $display("latency %0d exp %0d", lat, exp_lat); end
    out_ready = 1;
    @(negedge clk) out_ready = 0;
  endtask

  initial begin
    in_valid = 0; out_ready = 0; ent = '0; len = '0;
    h_max = 16'(6 * 4096);
    repeat (3) @(posedge clk);
    rst_n = 1;
    // worked example: three tokens averaging 1.86
    ent = '0;
    ent[0] = 16'(int'(1.50 * 4096)); ent[1] = 16'(int'(2.00 * 4096)); ent[2] = 16'(int'(2.08 * 4096));
    run(3, (int'(1.50 * 4096) + int'(2.00 * 4096) + int'(2.08 * 4096)) / 3, 2, 21);
    // zero length
    run(0, 0, 0, -1);
    // random batches, with several H_max values that are multiples of 1/512
    for (int t = 0; t < 200; t++) begin
      int n, s, a, b;
      h_max = 16'($urandom_range(8, 60) * 512);
      n = $urandom_range(1, MAX_DRAFT);
      s = 0;
      for (int i = 0; i < MAX_DRAFT; i++) begin
        ent[i] = 16'($urandom_range(0, int'(h_max) + 4096));
        if (i < n) s += int'(ent[i]);
      end
      a = s / n;
      b = (a * 8) / int'(h_max);
      if (b > 7) b = 7;
      run(n, a, b, -1);
    end
    finish();
  end
endmodule
