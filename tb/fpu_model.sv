// fpu_model: behavioural model of one lane's floating point unit, for
// simulation only (kind: behavioural model, not synthesizable).
//
// The vector unit uses an existing multi-precision IEEE-754 FPU. This model
// stands in for it with the same port as the lane's FPU port: one request per
// cycle, results in order after a fixed Latency. It computes with the
// simulator's double arithmetic for 64-bit elements; fused multiply-add is
// computed as a product followed by a sum. Narrower formats are not modelled
// and return zero.
// Operand convention of the lane: result = b op a, fmadd = a*b + c, sqrt(a).
module fpu_model import ara_pkg::*; #(
  parameter int unsigned Latency = 3
) (
  input  logic  clk_i,
  input  logic  valid_i,
  input  op_e   op_i,
  input  sew_e  sew_i,
  input  word_t a_i,
  input  word_t b_i,
  input  word_t c_i,
  output logic  valid_o,
  output word_t result_o
);
  function automatic real f64(op_e op, real a, real b, real c);
    case (op)
      OP_VFADD:  return b + a;
      OP_VFSUB:  return b - a;
      OP_VFMUL:  return b * a;
      OP_VFMADD: return a * b + c;
      OP_VFDIV:  return b / a;
      OP_VFSQRT: return $sqrt(a);
      OP_VFMIN:  return (b < a) ? b : a;
      OP_VFMAX:  return (b > a) ? b : a;
      default:   return 0.0;
    endcase
  endfunction

  function automatic word_t compute(op_e op, sew_e sew, word_t a, word_t b, word_t c);
    if (sew != EW64) return '0;
    return $realtobits(f64(op, $bitstoreal(a), $bitstoreal(b), $bitstoreal(c)));
  endfunction

  logic  [Latency-1:0] v_q = '0;
  word_t [Latency-1:0] d_q = '0;

  always_ff @(posedge clk_i) begin
    v_q[0] <= valid_i;
    d_q[0] <= compute(op_i, sew_i, a_i, b_i, c_i);
    for (int i = 1; i < Latency; i++) begin
      v_q[i] <= v_q[i-1];
      d_q[i] <= d_q[i-1];
    end
  end

  assign valid_o  = v_q[Latency-1];
  assign result_o = d_q[Latency-1];
endmodule
