// avg_entropy_unit: average softmax entropy of one draft batch and its
// entropy bucket. The per-token entropies of the first `len` tokens are
// summed by an adder tree (the "reduce" stage), the sum is divided by the
// batch length with a bit-serial divider, and the average is mapped to one
// of eight equal intervals of [0, h_max]: bucket = k for
// k*h_max/8 <= avg < (k+1)*h_max/8, saturating at 7.
// Interface: in_valid/in_ready accepts a batch; out_valid/out_ready returns
// avg (Q4.12) and bucket. Timing: NW+1 cycles from acceptance to out_valid
// (21 cycles at the defaults), one batch at a time. len = 0 gives avg 0 and
// bucket 0.
// The structure (reduce, divide, eight equally spaced buckets over
// [0, h_max]) follows AHASD. AHASD draws floating-point add and divide; this
// design uses Q4.12 fixed point, which is exact enough for a 3-bit bucket.
module avg_entropy_unit
  import ahasd_pkg::*;
#(
  parameter int unsigned N = MAX_DRAFT      // tokens per batch
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  output logic               in_ready,
  input  ent_t [N-1:0]       ent,
  input  len_t               len,
  input  ent_t               h_max,
  output logic               out_valid,
  input  logic               out_ready,
  output ent_t               avg,
  output bucket_t            bucket
);
  localparam int unsigned NW = ENT_W + $clog2(N + 1);   // sum width

  typedef enum logic [1:0] {S_IDLE, S_DIV, S_OUT} state_e;
  state_e state;

  // reduce: masked sum of the first len entropies
  logic [NW-1:0] sum;
  always_comb begin
    sum = '0;
    for (int i = 0; i < int'(N); i++)
      if (i < int'(len)) sum += NW'(ent[i]);
  end

  logic          div_start, div_busy, div_done;
  logic [NW-1:0] div_q;
  logic [LEN_W-1:0] div_r;
  logic          zero_len;

  assign in_ready  = (state == S_IDLE);
  assign div_start = in_valid && in_ready;

  seq_div #(.NW(NW), .DW(LEN_W)) u_div (
    .clk, .rst_n,
    .start    (div_start),
    .dividend (sum),
    .divisor  (len),
    .busy     (div_busy),
    .done     (div_done),
    .quotient (div_q),
    .remainder(div_r)
  );

  // bucket thresholds k*h_max/8
  function automatic bucket_t to_bucket(input ent_t a, input ent_t hm);
    logic [ENT_W+2:0] t;
    bucket_t b;
    b = '0;
    for (int k = 1; k < (1 << BUCKET_W); k++) begin
      t = ((ENT_W+3)'(k) * (ENT_W+3)'(hm)) >> 3;
      if ((ENT_W+3)'(a) >= t) b = bucket_t'(k);
    end
    return b;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; out_valid <= 1'b0; avg <= '0; bucket <= '0; zero_len <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: if (div_start) begin
          zero_len <= (len == '0);
          state    <= S_DIV;
        end
        S_DIV: if (div_done) begin
          if (zero_len) begin
            avg    <= '0;
            bucket <= '0;
          end else begin
            avg    <= ent_t'(div_q);
            bucket <= to_bucket(ent_t'(div_q), h_max);
          end
          out_valid <= 1'b1;
          state     <= S_OUT;
        end
        S_OUT: if (out_ready) begin
          out_valid <= 1'b0;
          state     <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
