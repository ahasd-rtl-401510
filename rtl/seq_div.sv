// seq_div: unsigned restoring divider, one quotient bit per clock.
// A pulse on start with dividend/divisor begins a division; NW cycles later
// done pulses for one cycle with quotient = dividend / divisor (truncated)
// and remainder. busy is high in between; start is ignored while busy.
// Division by zero returns an all-ones quotient. Used for the averaging
// divider of the entropy unit, the per-token cycle ratios and the TVC's
// integer divide; the bit-serial form is this design's choice.
module seq_div #(
  parameter int unsigned NW = 16,   // dividend / quotient width
  parameter int unsigned DW = 16    // divisor width
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [NW-1:0] dividend,
  input  logic [DW-1:0] divisor,
  output logic          busy,
  output logic          done,
  output logic [NW-1:0] quotient,
  output logic [DW-1:0] remainder
);
  localparam int unsigned CW = $clog2(NW + 1);

  logic [NW-1:0] q;
  logic [DW:0]   r;        // one spare bit for the trial subtraction
  logic [DW-1:0] d;
  logic [CW-1:0] cnt;
  logic          dz;

  logic [DW:0] r_shift;
  logic [DW:0] r_trial;
  always_comb begin
    r_shift = {r[DW-1:0], q[NW-1]};
    r_trial = r_shift - {1'b0, d};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q <= '0; r <= '0; d <= '0; cnt <= '0; busy <= 1'b0; done <= 1'b0; dz <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          q    <= dividend;
          r    <= '0;
          d    <= divisor;
          dz   <= (divisor == '0);
          cnt  <= CW'(NW);
          busy <= 1'b1;
        end
      end else begin
        if (r_trial[DW]) begin           // negative: restore
          r <= r_shift;
          q <= {q[NW-2:0], 1'b0};
        end else begin
          r <= r_trial;
          q <= {q[NW-2:0], 1'b1};
        end
        cnt <= cnt - 1'b1;
        if (cnt == CW'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign quotient  = dz ? '1 : q;
  assign remainder = r[DW-1:0];
endmodule
