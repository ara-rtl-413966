// tb_sldu: checks the slide unit alone, with the lanes replaced by simple
// models. Each lane model streams its words of the source register, row by
// row, with random gaps, and takes destination words with random back
// pressure into a copy of the destination register. Random slide-up and
// slide-down amounts (including zero, amounts beyond the vector length and
// vector lengths that are not a multiple of the lane count), element insert
// and element extract are compared with a reference slide computed on flat
// arrays.
module tb_sldu;
  import ara_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic vop_valid = 1'b0, vop_ready;
  vop_t vop = '0;
  logic [NrLanes-1:0] sl_valid, sw_valid, sw_ready;
  word_t [NrLanes-1:0] sl_data, sw_data;
  logic sl_pop, done;
  logic [VlW-1:0] sw_idx;
  id_t done_id;
  word_t done_result;

  sldu dut (
    .clk_i(clk), .rst_ni(rst_n), .vop_valid_i(vop_valid), .vop_i(vop), .vop_ready_o(vop_ready),
    .sl_valid_i(sl_valid), .sl_data_i(sl_data), .sl_pop_o(sl_pop),
    .sw_valid_o(sw_valid), .sw_idx_o(sw_idx), .sw_data_o(sw_data), .sw_ready_i(sw_ready),
    .done_o(done), .done_id_o(done_id), .done_result_o(done_result)
  );

  localparam int MaxW = 256;
  word_t src [MaxW], dst [MaxW], expd [MaxW];
  int    r0 = 0, nrows = 0, ptr [NrLanes];
  logic  [NrLanes-1:0] gap = '0, rdy = '0;

  // lane models
  always_comb begin
    for (int l = 0; l < NrLanes; l++) begin
      sl_valid[l] = (ptr[l] < nrows) && !gap[l];
      sl_data[l]  = src[((r0 + ptr[l]) * NrLanes + l) % MaxW];
    end
    sw_ready = rdy;
  end
  always @(posedge clk) begin
    for (int l = 0; l < NrLanes; l++) begin
      if (sl_pop) ptr[l] <= ptr[l] + 1;
      if (sw_valid[l] && sw_ready[l]) dst[int'(sw_idx) * NrLanes + l] <= sw_data[l];
      gap[l] <= ($urandom % 4 == 0);
      rdy[l] <= ($urandom % 4 != 0);
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    op_e op;
    int vlw, amt, t0;
    sldu_rows_t sr;
    foreach (ptr[l]) ptr[l] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 300; t++) begin
      case ($urandom % 4)
        0: op = OP_VSLIDEUP;
        1: op = OP_VSLIDEDOWN;
        2: op = OP_VINS;
        default: op = OP_VEXT;
      endcase
      vlw = 1 + $urandom % 64;
      amt = (t % 10 == 0) ? 0 : $urandom % (vlw + 5);
      if (op inside {OP_VINS, OP_VEXT}) amt = $urandom % vlw;
      for (int i = 0; i < MaxW; i++) begin
        src[i] = {$urandom, $urandom};
        dst[i] = {$urandom, $urandom};
        expd[i] = dst[i];
      end
      for (int i = 0; i < vlw; i++)
        unique case (op)
          OP_VSLIDEDOWN: expd[i] = (i + amt < vlw) ? src[i + amt] : '0;
          OP_VSLIDEUP:   if (i >= amt) expd[i] = src[i - amt];
          OP_VINS:       if (i == amt) expd[i] = 64'hfeed_0000 + 64'(t);
          default: ;
        endcase
      // the rows the lanes stream
      sr = sldu_src_rows(op, 64'(amt), VlW'(vlw));
      r0 = int'(sr.r0);
      nrows = int'(sr.n);
      foreach (ptr[l]) ptr[l] = 0;
      @(negedge clk);
      vop = '0;
      vop.id = id_t'(t % NrInsn);
      vop.op = op;
      vop.unit = UNIT_SLDU;
      vop.sew = EW64;
      vop.scalar = 64'(amt);
      vop.stride = 64'hfeed_0000 + 64'(t);
      vop.vl = VlW'(vlw);
      vop.vlw = VlW'(vlw);
      vop_valid = 1'b1;
      do @(posedge clk); while (!vop_ready);
      @(negedge clk);
      vop_valid = 1'b0;
      t0 = 0;
      while (!done) begin @(negedge clk); t0++; end
      checks++;
      if (done_id !== id_t'(t % NrInsn)) begin failures++; $display("FAIL done id"); end
      if (op == OP_VEXT) begin
        checks++;
        if (done_result !== src[amt]) begin
          failures++;
          $display("FAIL vext %0d: got %h expected %h", amt, done_result, src[amt]);
        end
      end
      @(negedge clk);
      for (int i = 0; i < MaxW; i++) begin
        checks++;
        if (dst[i] !== expd[i]) begin
          failures++;
          $display("FAIL %s amt %0d vlw %0d word %0d: got %h expected %h", op.name(), amt, vlw, i, dst[i], expd[i]);
        end
      end
      checks++;
      if (nrows != 0 && ptr[0] != nrows) begin failures++; $display("FAIL rows consumed %0d of %0d", ptr[0], nrows); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
