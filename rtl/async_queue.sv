// async_queue: dual-clock FIFO used for AHASD's three cross-device queues
// (unverified draft queue PIM->NPU, feedback queue NPU->PIM and pre-verify
// draft queue scheduler->PIM). The writer and reader each run on their own
// clock, so drafting on the PIM and verification on the NPU advance
// independently. Pointers are Gray coded and crossed with two-flop
// synchronisers; full and empty are therefore conservative by two cycles of
// the other clock. Interface: valid/ready on both sides (w_ready = not full,
// r_valid = not empty); an entry moves when valid and ready are both high.
// r_data shows the oldest entry combinationally. The queues and their roles
// follow AHASD; the depth (8, enough for the eight batches a 3-bit leading
// length can count) and the Gray-pointer structure are this design's choice.
module async_queue #(
  parameter type         T     = logic [31:0],
  parameter int unsigned DEPTH = 8            // power of two
) (
  input  logic wclk,
  input  logic wrst_n,
  input  logic w_valid,
  output logic w_ready,
  input  T     w_data,

  input  logic rclk,
  input  logic rrst_n,
  output logic r_valid,
  input  logic r_ready,
  output T     r_data
);
  localparam int unsigned AW = $clog2(DEPTH);

  T mem [DEPTH];

  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] rgray_w1, rgray_w2;   // read pointer in write domain
  logic [AW:0] wgray_r1, wgray_r2;   // write pointer in read domain

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // ---------------- write side ----------------
  logic [AW:0] wbin_n;
  logic        wfull;
  assign wbin_n  = wbin + 1'b1;
  assign wfull   = (wgray == {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});
  assign w_ready = !wfull;

  always_ff @(posedge wclk) begin
    if (w_valid && w_ready) mem[wbin[AW-1:0]] <= w_data;
  end

  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wbin <= '0; wgray <= '0; rgray_w1 <= '0; rgray_w2 <= '0;
    end else begin
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
      if (w_valid && w_ready) begin
        wbin  <= wbin_n;
        wgray <= bin2gray(wbin_n);
      end
    end
  end

  // ---------------- read side ----------------
  logic [AW:0] rbin_n;
  assign rbin_n  = rbin + 1'b1;
  assign r_valid = (rgray != wgray_r2);
  assign r_data  = mem[rbin[AW-1:0]];

  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rbin <= '0; rgray <= '0; wgray_r1 <= '0; wgray_r2 <= '0;
    end else begin
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
      if (r_valid && r_ready) begin
        rbin  <= rbin_n;
        rgray <= bin2gray(rbin_n);
      end
    end
  end

  // The oldest entry may not change while it is offered and not taken.
  a_rdata_stable: assert property (@(posedge rclk) disable iff (!rrst_n)
    (r_valid && !r_ready) |=> (r_valid && r_data == $past(r_data)));

  initial begin
    assert (DEPTH >= 4 && (DEPTH & (DEPTH - 1)) == 0)
      else $error("async_queue: DEPTH must be a power of two >= 4");
  end
endmodule
