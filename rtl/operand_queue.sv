// operand_queue: synchronous FIFO used for every queue of the lane.
//
// The lanes put a small FIFO between the vector register file and each
// functional-unit input ("operand queues") and between each unit's output and
// the register file ("result queues"), so that bank conflicts on either side
// only delay data instead of stalling the whole lane. The paper gives the
// queue widths (64 bit) and depths (5 for FPU/MUL and ALU operands, 2 for
// load/store operands, 4 for results); the same module is also used, with other
// widths, for the instruction and operation queues.
//
// Interface: push/pop handshakes with full/empty flags and an occupancy count.
// Data pushed in cycle t can be popped from cycle t+1; pushing into a full
// queue or popping an empty one is illegal and flagged by assertions.
module operand_queue #(
  parameter int unsigned Width = 64,
  parameter int unsigned Depth = 5
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  logic                     push_i,
  input  logic [Width-1:0]         data_i,
  input  logic                     pop_i,
  output logic [Width-1:0]         data_o,
  output logic                     full_o,
  output logic                     empty_o,
  output logic [$clog2(Depth+1)-1:0] count_o
);
  localparam int unsigned PtrW = (Depth > 1) ? $clog2(Depth) : 1;

  logic [Width-1:0] mem_q [Depth];
  logic [PtrW-1:0]  rd_q, wr_q;
  logic [$clog2(Depth+1)-1:0] cnt_q;

  assign data_o  = mem_q[rd_q];
  assign full_o  = (cnt_q == ($clog2(Depth+1))'(Depth));
  assign empty_o = (cnt_q == '0);
  assign count_o = cnt_q;

  function automatic logic [PtrW-1:0] incr(logic [PtrW-1:0] p);
    return (p == PtrW'(Depth - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (push_i) wr_q <= incr(wr_q);
      if (pop_i)  rd_q <= incr(rd_q);
      cnt_q <= cnt_q + (push_i ? 1'b1 : 1'b0) - (pop_i ? 1'b1 : 1'b0);
    end
  end

  always_ff @(posedge clk_i) begin
    if (push_i) mem_q[wr_q] <= data_i;
  end

  a_no_overflow:  assert property (@(posedge clk_i) disable iff (!rst_ni) push_i |-> (!full_o || pop_i));
  a_no_underflow: assert property (@(posedge clk_i) disable iff (!rst_ni) pop_i |-> !empty_o);
endmodule
