// simd_mul: the lane's multi-precision integer multiplier.
//
// Like the ALU, it works on 1x64, 2x32, 4x16 or 8x8-bit elements of a 64-bit
// word and delivers 64 bit of results per cycle. Operations: low half of the
// product (vmul), high half signed (vmulh) or unsigned (vmulhu), and
// multiply-add vd = a*b + c (vmadd, low half). The paper gives the precisions
// and throughput only; the operation list and the single pipeline stage are
// this design's choices.
//
// Timing: result with valid_o one cycle after valid_i, no back pressure.
module simd_mul import ara_pkg::*; (
  input  logic  clk_i,
  input  logic  rst_ni,
  input  logic  valid_i,
  input  op_e   op_i,
  input  sew_e  sew_i,
  input  word_t a_i,
  input  word_t b_i,
  input  word_t c_i,
  output logic  valid_o,
  output word_t result_o
);
  function automatic word_t compute(op_e op, sew_e sew, word_t a, word_t b, word_t c);
    word_t r;
    int unsigned w, n;
    logic [63:0] ea, eb, ec, m, er;
    logic [127:0] pu, ps;
    w = 8 << sew;
    n = 64 / w;
    m = (w == 64) ? '1 : ((64'd1 << w) - 1);
    r = '0;
    for (int unsigned e = 0; e < 8; e++) begin
      if (e < n) begin
        ea = (a >> (e * w)) & m;
        eb = (b >> (e * w)) & m;
        ec = (c >> (e * w)) & m;
        pu = {64'b0, ea} * {64'b0, eb};
        // signed product: sign-extend both operands from w bits
        ps = 128'($signed({ea << (64 - w), 64'b0}) >>> (128 - w)) *
             128'($signed({eb << (64 - w), 64'b0}) >>> (128 - w));
        unique case (op)
          OP_VMULH:  er = 64'(ps >> w);
          OP_VMULHU: er = 64'(pu >> w);
          OP_VMADD:  er = 64'(pu) + ec;
          default:   er = 64'(pu);
        endcase
        r |= (er & m) << (e * w);
      end
    end
    return r;
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      valid_o  <= 1'b0;
      result_o <= '0;
    end else begin
      valid_o <= valid_i;
      if (valid_i) result_o <= compute(op_i, sew_i, a_i, b_i, c_i);
    end
  end
endmodule
