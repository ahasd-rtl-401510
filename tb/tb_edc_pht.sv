// tb_edc_pht: checks the 512-entry table of 3-bit saturating counters
// against a model: reset value 3'b100 everywhere, increment / decrement with
// saturation, prediction = counter MSB, reads of untouched entries.
module tb_edc_pht;
  import ahasd_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  pht_idx_t rd_idx, upd_idx;
  logic [2:0] rd_ctr;
  logic rd_draft, upd_valid, upd_inc;

  edc_pht dut (.*);

  int checks = 0, failures = 0;
  int model [512];

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    upd_valid = 0; upd_inc = 0; upd_idx = 0; rd_idx = 0;
    for (int i = 0; i < 512; i++) model[i] = 4;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 512; i += 37) begin
      rd_idx = 9'(i); #1;
      checks++;
      if (rd_ctr != 3'b100) begin failures++; $display("reset value %0d at %0d", rd_ctr, i); end
    end
    for (int t = 0; t < 4000; t++) begin
      int i;
      @(negedge clk);
      i = $urandom_range(0, 15) * 32 + 5;    // a few hot entries to hit saturation
      upd_valid = ($urandom_range(0, 3) != 0);
      upd_idx   = 9'(i);
      upd_inc   = $urandom_range(0, 1);
      rd_idx    = 9'($urandom_range(0, 511));
      #1;
      checks += 2;
      if (int'(rd_ctr) != model[rd_idx]) begin failures++; $display("ctr[%0d]=%0d model %0d", rd_idx, rd_ctr, model[rd_idx]); end
      if (rd_draft != (model[rd_idx] >= 4)) begin failures++; $display("draft bit wrong"); end
      @(posedge clk);
      if (upd_valid) begin
        if (upd_inc) model[i] = (model[i] == 7) ? 7 : model[i] + 1;
        else         model[i] = (model[i] == 0) ? 0 : model[i] - 1;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
