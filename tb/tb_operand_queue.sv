// tb_operand_queue: random push/pop traffic against a reference queue.
// Checks the head word, the full/empty flags and the occupancy count every
// cycle, for the operand-queue depth of 5 words used by the arithmetic units.
module tb_operand_queue;
  localparam int unsigned W = 64, D = 5;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic push = 1'b0, pop = 1'b0, full, empty;
  logic [W-1:0] din = '0, dout;
  logic [$clog2(D+1)-1:0] cnt;
  logic [W-1:0] ref_q[$];

  operand_queue #(.Width(W), .Depth(D)) dut (
    .clk_i(clk), .rst_ni(rst_n), .push_i(push), .data_i(din), .pop_i(pop),
    .data_o(dout), .full_o(full), .empty_o(empty), .count_o(cnt)
  );

  task automatic check(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h expected %h", what, got, exp); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      // compare state
      check("empty", empty, ref_q.size() == 0);
      check("full", full, ref_q.size() == D);
      check("count", cnt, ref_q.size());
      if (ref_q.size() > 0) check("head", dout, ref_q[0]);
      // new stimulus (phases with mostly pushes, then mostly pops)
      push = ((t / 50) % 2 == 0) ? ($urandom % 4 != 0) : ($urandom % 4 == 0);
      pop  = ((t / 50) % 2 == 0) ? ($urandom % 4 == 0) : ($urandom % 4 != 0);
      if (full) push = 1'b0;
      if (empty) pop = 1'b0;
      din = {$urandom, $urandom};
      @(posedge clk);
      if (pop) void'(ref_q.pop_front());
      if (push) ref_q.push_back(din);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
