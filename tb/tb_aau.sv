// tb_aau: checks the attention algorithm unit against real-number references
// computed here. Random Q8.8 vectors exercise every operation: VADD, VSUB,
// VMAX, VMUL and the two row-wise reductions must be exact (with 16-bit
// saturation); VEXP must be within 1 % + 2 LSB of exp(x) and VLOG within
// 1 % + 3 LSB of ln(x). A softmax-style sequence (max, subtract, exp, sum)
// is run end to end, and with the rank gate closed a command must be refused
// and leave the buffer unchanged. STORE data must follow one cycle later.
module tb_aau;
  import ahasd_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int L = 16;
  logic en, cmd_valid, cmd_ready, rsp_valid;
  aau_op_e cmd_op;
  logic [2:0] cmd_dst, cmd_srca, cmd_srcb;
  logic [L-1:0][15:0] cmd_data, rsp_data;

  aau dut (.*);

  int checks = 0, failures = 0;
  int n_ops [16];

  task automatic finish();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    finish();
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  function automatic int s16(input int v);
    return (v > 32767) ? 32767 : (v < -32768) ? -32768 : v;
  endfunction

  task automatic cmd(input aau_op_e op, input int d, input int a, input int b);
    @(negedge clk);
    cmd_valid = 1; cmd_op = op; cmd_dst = 3'(d); cmd_srca = 3'(a); cmd_srcb = 3'(b);
    @(posedge clk);
    if (cmd_ready) n_ops[op]++;
    @(negedge clk) cmd_valid = 0;
  endtask

  task automatic load(input int d, input int v [L]);
    for (int l = 0; l < L; l++) cmd_data[l] = 16'(v[l]);
    cmd(AAU_LOAD, d, 0, 0);
  endtask

  task automatic store(input int a, output int v [L]);
    @(negedge clk);
    cmd_valid = 1; cmd_op = AAU_STORE; cmd_srca = 3'(a);
    @(posedge clk);
    n_ops[AAU_STORE]++;
    @(negedge clk) cmd_valid = 0;
    chk(rsp_valid, "rsp_valid one cycle after STORE");
    for (int l = 0; l < L; l++) v[l] = int'($signed(rsp_data[l]));
  endtask

  int a [L], b [L], r [L];

  initial begin
    en = 1; cmd_valid = 0; cmd_op = AAU_LOAD; cmd_dst = 0; cmd_srca = 0; cmd_srcb = 0; cmd_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 150; t++) begin
      for (int l = 0; l < L; l++) begin
        a[l] = $urandom_range(0, 65535) - 32768;
        b[l] = $urandom_range(0, 65535) - 32768;
        if (t % 2 == 0) begin a[l] = a[l] / 64; b[l] = b[l] / 64; end   // small values too
      end
      load(0, a); load(1, b);
      cmd(AAU_VADD, 2, 0, 1); store(2, r);
      for (int l = 0; l < L; l++) chk(r[l] == s16(a[l] + b[l]), "VADD");
      cmd(AAU_VSUB, 2, 0, 1); store(2, r);
      for (int l = 0; l < L; l++) chk(r[l] == s16(a[l] - b[l]), "VSUB");
      cmd(AAU_VMAX, 2, 0, 1); store(2, r);
      for (int l = 0; l < L; l++) chk(r[l] == ((a[l] > b[l]) ? a[l] : b[l]), "VMAX");
      cmd(AAU_VMUL, 3, 0, 1); store(3, r);
      for (int l = 0; l < L; l++) chk(r[l] == s16(int'((longint'(a[l]) * b[l]) >>> 8)), $sformatf("VMUL %0d*%0d=%0d", a[l], b[l], r[l]));
      cmd(AAU_RSUM, 4, 0, 0); store(4, r);
      begin
        int s, m;
        s = 0; m = a[0];
        for (int l = 0; l < L; l++) begin s += a[l]; if (a[l] > m) m = a[l]; end
        for (int l = 0; l < L; l++) chk(r[l] == s16(s), "RSUM");
        cmd(AAU_RMAX, 5, 0, 0); store(5, r);
        for (int l = 0; l < L; l++) chk(r[l] == m, "RMAX");
      end
      // VEXP over [-8, 4.8)
      for (int l = 0; l < L; l++) a[l] = $urandom_range(0, 3276) - 2048;
      load(0, a); cmd(AAU_VEXP, 6, 0, 0); store(6, r);
      for (int l = 0; l < L; l++) begin
        real rv;
        rv = $exp(a[l] / 256.0) * 256.0;
        chk((r[l] - rv) <= 0.01 * rv + 2 && (rv - r[l]) <= 0.01 * rv + 2,
            $sformatf("VEXP x=%0d got %0d rv %f", a[l], r[l], rv));
      end
      // VLOG over (0, 128)
      for (int l = 0; l < L; l++) a[l] = $urandom_range(1, 32767) >> $urandom_range(0, 14);
      for (int l = 0; l < L; l++) if (a[l] == 0) a[l] = 1;
      load(0, a); cmd(AAU_VLOG, 7, 0, 0); store(7, r);
      for (int l = 0; l < L; l++) begin
        real rv, tol;
        rv = $ln(a[l] / 256.0) * 256.0;
        tol = 0.01 * ((rv < 0) ? -rv : rv) + 3;
        chk((r[l] - rv) <= tol && (rv - r[l]) <= tol, $sformatf("VLOG x=%0d got %0d rv %f", a[l], r[l], rv));
      end
    end
    // ln of non-positive values
    for (int l = 0; l < L; l++) a[l] = -l;
    load(0, a); cmd(AAU_VLOG, 7, 0, 0); store(7, r);
    for (int l = 0; l < L; l++) chk(r[l] == -32768, "VLOG of x <= 0");
    // softmax: e^(x - max) summed over the row
    begin
      real ref_sum;
      for (int l = 0; l < L; l++) a[l] = $urandom_range(0, 1024) - 512;
      load(0, a);
      cmd(AAU_RMAX, 1, 0, 0); cmd(AAU_VSUB, 2, 0, 1); cmd(AAU_VEXP, 3, 2, 0); cmd(AAU_RSUM, 4, 3, 0);
      store(4, r);
      ref_sum = 0;
      begin
        int m; m = a[0];
        for (int l = 0; l < L; l++) if (a[l] > m) m = a[l];
        for (int l = 0; l < L; l++) ref_sum += $exp((a[l] - m) / 256.0) * 256.0;
      end
      chk((r[0] - ref_sum) <= 0.01 * ref_sum + 32 && (ref_sum - r[0]) <= 0.01 * ref_sum + 32,
          $sformatf("softmax denominator %0d rv %f", r[0], ref_sum));
    end
    // gated rank: command refused, buffer unchanged
    store(4, a);
    en = 0;
    @(negedge clk);
    chk(!cmd_ready, "cmd_ready low when gated");
    for (int l = 0; l < L; l++) cmd_data[l] = 16'h1234;
    cmd(AAU_LOAD, 4, 0, 0);
    en = 1;
    store(4, r);
    for (int l = 0; l < L; l++) chk(r[l] == a[l], "gated LOAD ignored");
    finish();
  end
endmodule
