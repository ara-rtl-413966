// tb_simd_alu: random operands for every operation at 64, 32, 16 and 8-bit
// element width. The reference splits the word into elements with part
// selects and computes each one with SystemVerilog's own signed and unsigned
// arithmetic of that width. Checks the result and the one-cycle latency.
module tb_simd_alu;
  import ara_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic valid = 1'b0, valid_o;
  op_e  op = OP_VADD;
  sew_e sew = EW64;
  word_t a = '0, b = '0, res;

  simd_alu dut (.clk_i(clk), .rst_ni(rst_n), .valid_i(valid), .op_i(op), .sew_i(sew),
                .a_i(a), .b_i(b), .valid_o(valid_o), .result_o(res));

  function automatic word_t ref_alu(op_e o, sew_e s, word_t x, word_t y);
    word_t r;
    int w;
    w = 8 << s;
    r = '0;
    for (int e = 0; e < 64 / w; e++) begin
      longint unsigned ua, ub, ur, sh;
      longint sa, sb;
      ua = (x >> (e * w)) & ((w == 64) ? '1 : ((64'd1 << w) - 1));
      ub = (y >> (e * w)) & ((w == 64) ? '1 : ((64'd1 << w) - 1));
      sa = (w == 64) ? longint'(ua) : (longint'(ua << (64 - w)) >>> (64 - w));
      sb = (w == 64) ? longint'(ub) : (longint'(ub << (64 - w)) >>> (64 - w));
      sh = ua % w;
      case (o)
        OP_VADD:  ur = ub + ua;
        OP_VSUB:  ur = ub - ua;
        OP_VAND:  ur = ub & ua;
        OP_VOR:   ur = ub | ua;
        OP_VXOR:  ur = ub ^ ua;
        OP_VSLL:  ur = ub << sh;
        OP_VSRL:  ur = ub >> sh;
        OP_VSRA:  ur = sb >>> sh;
        OP_VMIN:  ur = (sb < sa) ? ub : ua;
        OP_VMAX:  ur = (sb > sa) ? ub : ua;
        OP_VMINU: ur = (ub < ua) ? ub : ua;
        OP_VMAXU: ur = (ub > ua) ? ub : ua;
        default:  ur = 0;
      endcase
      if (w < 64) ur &= (64'd1 << w) - 1;
      r |= word_t'(ur) << (e * w);
    end
    return r;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  op_e ops[12] = '{OP_VADD, OP_VSUB, OP_VAND, OP_VOR, OP_VXOR, OP_VSLL, OP_VSRL, OP_VSRA,
                   OP_VMIN, OP_VMAX, OP_VMINU, OP_VMAXU};

  initial begin
    word_t expv;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      valid = ($urandom % 4 != 0);
      op  = ops[$urandom % 12];
      sew = sew_e'($urandom % 4);
      a   = {$urandom, $urandom};
      b   = {$urandom, $urandom};
      if (t % 7 == 0) a = '0;
      expv = ref_alu(op, sew, a, b);
      @(posedge clk);
      @(negedge clk);
      checks++;
      if (valid_o !== valid) begin failures++; $display("FAIL latency: valid_o %b", valid_o); end
      if (valid) begin
        checks++;
        if (res !== expv) begin
          failures++;
          $display("FAIL %s sew %0d: %h op %h = %h, expected %h", op.name(), sew, b, a, res, expv);
        end
      end
      valid = 1'b0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
