// simd_alu: the lane's multi-precision integer ALU.
//
// The 64-bit datapath is split into 1x64, 2x32, 4x16 or 8x8-bit elements, so
// that narrower data gives proportionally more operations per cycle while the
// throughput stays 64 bit per cycle, as the paper describes. Operations: add,
// subtract, and, or, xor, shifts (logical/arithmetic, shift amount taken modulo
// the element width), and signed/unsigned minimum and maximum. The paper names
// the unit and its precisions but not its operation set or pipeline; the
// operation list and the single register stage are this design's choices.
//
// Timing: operands and op presented with valid_i; the result appears with
// valid_o one cycle later. No back pressure (the lane only issues when its
// result queue has room).
module simd_alu import ara_pkg::*; (
  input  logic  clk_i,
  input  logic  rst_ni,
  input  logic  valid_i,
  input  op_e   op_i,
  input  sew_e  sew_i,
  input  word_t a_i,
  input  word_t b_i,
  output logic  valid_o,
  output word_t result_o
);
  // b op a, element by element (b is the vector operand vs2, a is vs1 or scalar)
  function automatic word_t compute(op_e op, sew_e sew, word_t a, word_t b);
    word_t r;
    int unsigned w, n;
    logic [63:0] ea, eb, er, m;
    w = 8 << sew;
    n = 64 / w;
    m = (w == 64) ? '1 : ((64'd1 << w) - 1);
    r = '0;
    for (int unsigned e = 0; e < 8; e++) begin
      if (e < n) begin
        ea = (a >> (e * w)) & m;
        eb = (b >> (e * w)) & m;
        unique case (op)
          OP_VADD:  er = eb + ea;
          OP_VSUB:  er = eb - ea;
          OP_VAND:  er = eb & ea;
          OP_VOR:   er = eb | ea;
          OP_VXOR:  er = eb ^ ea;
          OP_VSLL:  er = eb << (ea & 64'(w - 1));
          OP_VSRL:  er = eb >> (ea & 64'(w - 1));
          OP_VSRA:  er = 64'($signed(eb << (64 - w)) >>> ((ea & 64'(w - 1)) + 64'(64 - w)));
          OP_VMINU: er = (eb < ea) ? eb : ea;
          OP_VMAXU: er = (eb > ea) ? eb : ea;
          OP_VMIN:  er = ($signed(eb << (64 - w)) < $signed(ea << (64 - w))) ? eb : ea;
          OP_VMAX:  er = ($signed(eb << (64 - w)) > $signed(ea << (64 - w))) ? eb : ea;
          default:  er = '0;
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
      if (valid_i) result_o <= compute(op_i, sew_i, a_i, b_i);
    end
  end
endmodule
