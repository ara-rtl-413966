// tb_simd_mul: random operands for vmul, vmulh, vmulhu and vmadd at 64, 32,
// 16 and 8-bit element width. The reference extends each element to 128 bits
// (signed or unsigned) and multiplies there. Checks the result and the
// one-cycle latency.
module tb_simd_mul;
  import ara_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic valid = 1'b0, valid_o;
  op_e  op = OP_VMUL;
  sew_e sew = EW64;
  word_t a = '0, b = '0, c = '0, res;

  simd_mul dut (.clk_i(clk), .rst_ni(rst_n), .valid_i(valid), .op_i(op), .sew_i(sew),
                .a_i(a), .b_i(b), .c_i(c), .valid_o(valid_o), .result_o(res));

  function automatic word_t ref_mul(op_e o, sew_e s, word_t x, word_t y, word_t z);
    word_t r;
    int w;
    w = 8 << s;
    r = '0;
    for (int e = 0; e < 64 / w; e++) begin
      logic [127:0] ux, uy, sx, sy, p;
      logic [63:0]  uz;
      ux = '0; uy = '0; uz = '0;
      for (int i = 0; i < w; i++) begin
        ux[i] = x[e * w + i];
        uy[i] = y[e * w + i];
        uz[i] = z[e * w + i];
      end
      sx = ux; sy = uy;
      for (int i = w; i < 128; i++) begin
        sx[i] = ux[w - 1];
        sy[i] = uy[w - 1];
      end
      case (o)
        OP_VMULH:  p = (sx * sy) >> w;
        OP_VMULHU: p = (ux * uy) >> w;
        OP_VMADD:  p = ux * uy + 128'(uz);
        default:   p = ux * uy;
      endcase
      for (int i = 0; i < w; i++) r[e * w + i] = p[i];
    end
    return r;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  op_e ops[4] = '{OP_VMUL, OP_VMULH, OP_VMULHU, OP_VMADD};

  initial begin
    word_t expv;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      valid = ($urandom % 4 != 0);
      op  = ops[$urandom % 4];
      sew = sew_e'($urandom % 4);
      a   = {$urandom, $urandom};
      b   = {$urandom, $urandom};
      c   = {$urandom, $urandom};
      expv = ref_mul(op, sew, a, b, c);
      @(posedge clk);
      @(negedge clk);
      checks++;
      if (valid_o !== valid) begin failures++; $display("FAIL latency: valid_o %b", valid_o); end
      if (valid) begin
        checks++;
        if (res !== expv) begin
          failures++;
          $display("FAIL %s sew %0d: %h * %h (+ %h) = %h, expected %h", op.name(), sew, a, b, c, res, expv);
        end
      end
      valid = 1'b0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
