// tb_ara_dispatcher: checks the dispatcher between the scalar core and the
// vector unit. A core model offers random instructions, some still
// speculative, and sometimes raises flush; a vector-unit model takes them with
// random back pressure and answers each one a few cycles later. Checked: no
// instruction is accepted while speculative or during a flush, the
// instructions reach the vector unit complete and in order, the queue holds
// InsnQueueDepth instructions before it refuses more, answers are passed on
// in the same cycle, and the pending count equals accepted minus answered.
module tb_ara_dispatcher;
  import ara_pkg::*;
  localparam int unsigned Depth = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic insn_valid = 1'b0, nonspec = 1'b0, flush = 1'b0, insn_ready;
  ara_req_t insn = '0, req;
  logic resp_valid_o, req_valid, req_ready = 1'b0, resp_valid_i = 1'b0;
  ara_resp_t resp_o, resp_i = '0;
  logic [7:0] pending;

  ara_dispatcher #(.InsnQueueDepth(Depth)) dut (
    .clk_i(clk), .rst_ni(rst_n), .insn_valid_i(insn_valid), .insn_i(insn), .nonspec_i(nonspec),
    .flush_i(flush), .insn_ready_o(insn_ready), .resp_valid_o(resp_valid_o), .resp_o(resp_o),
    .pending_o(pending), .req_valid_o(req_valid), .req_o(req), .req_ready_i(req_ready),
    .resp_valid_i(resp_valid_i), .resp_i(resp_i)
  );

  task automatic expect_true(string what, logic c);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  ara_req_t sent[$];
  bit was_taken = 0;
  int accepted = 0, answered = 0, taken = 0, resp_due[$];

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // fill test: vector unit stalled, the queue must take exactly Depth instructions
    @(negedge clk);
    for (int i = 0; i < Depth + 2; i++) begin
      insn = '0; insn.op = OP_VADD; insn.scalar = 64'(i);
      insn_valid = 1'b1; nonspec = 1'b1;
      @(posedge clk);
      expect_true("fills up to its depth", insn_ready == (i < Depth));
      if (insn_ready) begin sent.push_back(insn); accepted++; end
      @(negedge clk);
    end
    insn_valid = 1'b0;
    // random traffic
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      if (was_taken) insn_valid = 1'b0;
      was_taken = 1'b0;
      if (!insn_valid || $urandom % 3 == 0) begin
        insn = ara_req_t'({$urandom, $urandom, $urandom, $urandom, $urandom, $urandom});
        insn_valid = ($urandom % 2);
      end
      nonspec = ($urandom % 3 != 0);
      flush = ($urandom % 20 == 0);
      req_ready = ($urandom % 2);
      resp_valid_i = 1'b0;
      if (resp_due.size() > 0 && resp_due[0] <= t) begin
        void'(resp_due.pop_front());
        resp_valid_i = 1'b1;
        resp_i = ara_resp_t'({$urandom, $urandom, $urandom});
      end
      @(posedge clk);
      expect_true("no accept while speculative or flushed", !(insn_ready && (!nonspec || flush)));
      expect_true("answer passed through", resp_valid_o == resp_valid_i && (!resp_valid_i || resp_o == resp_i));
      expect_true("pending count", pending == 8'(accepted - answered));
      if (insn_valid && insn_ready) begin
        sent.push_back(insn);
        accepted++;
        was_taken = 1'b1;
      end
      if (req_valid && req_ready) begin
        checks++;
        if (sent.size() == 0 || req !== sent[0]) begin
          failures++;
          $display("FAIL order: got %h", req);
        end else void'(sent.pop_front());
        taken++;
        resp_due.push_back(t + 1 + $urandom % 6);
      end
      if (resp_valid_i) answered++;
    end
    expect_true("traffic flowed", taken > 500);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
