// aau: Attention Algorithm Unit, placed in each LPDDR5-PIM rank so that the
// nonlinear and reduction steps of attention (softmax max/exp/sum, entropy
// log terms) run on the memory side instead of shipping activations to the
// NPU. It holds a vector buffer of VREGS registers of LANES signed Q8.8
// values and executes one command per cycle from its vector control:
//   LOAD  dst <- cmd_data           STORE rsp_data <- srca (next cycle)
//   VADD/VSUB/VMAX (VALU), VMUL (VMUL), VEXP (VEXP), VLOG (VLOG),
//   RSUM/RMAX (row-wise reduce over the lanes, result in every lane).
// Arithmetic saturates to 16 bits. VEXP computes 2^(x*log2 e) as a shift of
// a quadratic fit of 2^f on the fraction (within 1 % + 2 LSB); VLOG computes
// ln x = ln2 * (leading-one position + quadratic fit of log2(1+m)); ln of
// a value <= 0 returns the most negative number.
// Interface: a command is taken when cmd_valid and cmd_ready; cmd_ready is
// the rank's compute enable from the gated task scheduler. Timing: results
// are written at the clock edge that takes the command; STORE data is valid
// with rsp_valid one cycle later.
// The unit list (row-wise reduce, VALU, VMUL, VEXP, VLOG, vector buffer,
// vector control) follows AHASD; the number format, buffer size, lane count,
// operation set and the approximations are this design's choices.
module aau
  import ahasd_pkg::*;
#(
  parameter int unsigned LANES = 16,
  parameter int unsigned VREGS = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     en,
  input  logic                     cmd_valid,
  output logic                     cmd_ready,
  input  aau_op_e                  cmd_op,
  input  logic [$clog2(VREGS)-1:0] cmd_dst,
  input  logic [$clog2(VREGS)-1:0] cmd_srca,
  input  logic [$clog2(VREGS)-1:0] cmd_srcb,
  input  logic [LANES-1:0][15:0]   cmd_data,
  output logic                     rsp_valid,
  output logic [LANES-1:0][15:0]   rsp_data
);
  typedef logic signed [15:0] q88_t;

  // vector buffer: plain registers, VREGS x LANES x 16 bits
  logic [VREGS-1:0][LANES-1:0][15:0] vbuf;

  function automatic q88_t sat16(input logic signed [35:0] v);
    if (v > 36'sd32767)       return 16'sh7fff;
    else if (v < -36'sd32768) return 16'sh8000;
    else                      return q88_t'(v);
  endfunction

  function automatic q88_t f_exp(input q88_t x);
    logic signed [47:0] y;     // x*log2(e), Q.24
    logic signed [23:0] k;
    logic        [11:0] f;
    logic        [31:0] p;     // 2^f in Q.12
    y = 48'(x) * 48'sd94548;   // log2(e) = 94548 / 65536
    k = 24'(y >>> 24);
    f = y[23:12];
    p = 32'd4096 + ((32'(f) * (32'd2688 + ((32'd1408 * 32'(f)) >> 12))) >> 12);
    if (k >= 24'sd7)       return 16'sh7fff;
    else if (k < -24'sd9)  return 16'sh0000;
    else if (k >= 24'sd4)  return q88_t'(p << (k - 24'sd4));
    else                   return q88_t'(p >> (24'sd4 - k));
  endfunction

  function automatic q88_t f_log(input q88_t x);
    int          pos;
    logic [15:0] xn;
    logic [7:0]  m;
    logic signed [31:0] l2, l;
    if (x <= 0) return 16'sh8000;
    pos = 0;
    for (int i = 0; i < 15; i++) if (x[i]) pos = i;
    xn = 16'(x) << (14 - pos);
    m  = xn[13:6];
    l2 = 32'((pos - 8) * 256) + 32'(m)
       + 32'((32'd89 * 32'(m) * (32'd256 - 32'(m))) >> 16);
    l  = (l2 * 32'sd177) >>> 8;
    return sat16(36'(l));
  endfunction

  assign cmd_ready = en;
  logic fire;
  assign fire = cmd_valid && cmd_ready;

  // operands
  logic [LANES-1:0][15:0] va, vb, res;
  assign va = vbuf[cmd_srca];
  assign vb = vbuf[cmd_srcb];

  // row-wise reduce of source A
  logic signed [35:0] rsum;
  q88_t               rmax;
  always_comb begin
    rsum = '0;
    rmax = q88_t'(va[0]);
    for (int l = 0; l < int'(LANES); l++) begin
      rsum += 36'(q88_t'(va[l]));
      if (q88_t'(va[l]) > rmax) rmax = q88_t'(va[l]);
    end
  end

  // VALU / VMUL / VEXP / VLOG, one result per lane
  always_comb begin
    for (int l = 0; l < int'(LANES); l++) begin
      q88_t a, b;
      a = q88_t'(va[l]);
      b = q88_t'(vb[l]);
      unique case (cmd_op)
        AAU_LOAD:  res[l] = cmd_data[l];
        AAU_VADD:  res[l] = sat16(36'(a) + 36'(b));
        AAU_VSUB:  res[l] = sat16(36'(a) - 36'(b));
        AAU_VMAX:  res[l] = (a > b) ? a : b;
        AAU_VMUL:  res[l] = sat16((36'(a) * 36'(b)) >>> 8);
        AAU_VEXP:  res[l] = f_exp(a);
        AAU_VLOG:  res[l] = f_log(a);
        AAU_RSUM:  res[l] = sat16(rsum);
        AAU_RMAX:  res[l] = rmax;
        default:   res[l] = a;      // STORE writes nothing
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vbuf      <= '0;
      rsp_valid <= 1'b0;
      rsp_data  <= '0;
    end else begin
      rsp_valid <= fire && (cmd_op == AAU_STORE);
      if (fire) begin
        if (cmd_op == AAU_STORE) rsp_data      <= va;
        else                     vbuf[cmd_dst] <= res;
      end
    end
  end
endmodule
