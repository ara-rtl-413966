// ara_dispatcher: the vector unit's side of the interface to the scalar core.
//
// The scalar core partially decodes vector instructions and executes
// speculatively, while the vector unit executes only non-speculative work. The
// dispatcher therefore waits until a vector instruction has reached the top of
// the scalar core's scoreboard (nonspec_i) before pushing it, together with the
// values of the scalar registers it reads, into the instruction queue. A
// flush of the scalar pipeline drops an instruction that is still speculative.
// The answers of the vector unit (acknowledge, scalar result or exception)
// are passed back to the scoreboard; the dispatcher counts the instructions
// sent but not yet answered (pending_o), so the core can wait for them.
//
// The paper places decoder and dispatcher in the scalar core's execute stage;
// the decoded instruction format (ara_req_t) and the queue depth are this
// design's choices. Timing: an instruction is accepted (ready_o) in the cycle
// it is valid and non-speculative and the queue has room; it can leave the
// queue in the next cycle.
module ara_dispatcher import ara_pkg::*; #(
  parameter int unsigned InsnQueueDepth = 4
) (
  input  logic      clk_i,
  input  logic      rst_ni,
  // scalar core
  input  logic      insn_valid_i,
  input  ara_req_t  insn_i,
  input  logic      nonspec_i,
  input  logic      flush_i,
  output logic      insn_ready_o,
  output logic      resp_valid_o,
  output ara_resp_t resp_o,
  output logic [7:0] pending_o,
  // vector unit
  output logic      req_valid_o,
  output ara_req_t  req_o,
  input  logic      req_ready_i,
  input  logic      resp_valid_i,
  input  ara_resp_t resp_i
);
  logic q_full, q_empty, push;

  assign insn_ready_o = nonspec_i && !flush_i && !q_full;
  assign push         = insn_valid_i && insn_ready_o;

  operand_queue #(.Width($bits(ara_req_t)), .Depth(InsnQueueDepth)) i_insn_queue (
    .clk_i, .rst_ni, .push_i(push), .data_i(insn_i),
    .pop_i(req_valid_o && req_ready_i), .data_o(req_o),
    .full_o(q_full), .empty_o(q_empty), .count_o()
  );
  assign req_valid_o = !q_empty;

  assign resp_valid_o = resp_valid_i;
  assign resp_o       = resp_i;

  logic [7:0] pending_q;
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) pending_q <= '0;
    else pending_q <= pending_q + (push ? 8'd1 : 8'd0) - (resp_valid_i ? 8'd1 : 8'd0);
  end
  assign pending_o = pending_q;

  a_no_spec_push: assert property (@(posedge clk_i) disable iff (!rst_ni) push |-> nonspec_i);
endmodule
