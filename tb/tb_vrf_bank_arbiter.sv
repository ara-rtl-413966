// tb_vrf_bank_arbiter: checks the bank arbiter of the register file.
// Random request patterns: the grant is one-hot, a subset of the requests and
// never empty when something is requested; a low-priority (memory) request is
// only granted when no high-priority request is present or after the fixed
// number of waiting cycles; round-robin order inside a level gives every one
// of k permanent requesters exactly one grant in every k cycles, and a waiting
// low-priority requester is served within HiWeight+1 cycles.
module tb_vrf_bank_arbiter;
  localparam int unsigned N = 11, HW = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic [N-1:0] req = '0, hi = '0, gnt;

  vrf_bank_arbiter #(.NumReq(N), .HiWeight(HW)) dut (.clk_i(clk), .rst_ni(rst_n), .req_i(req), .hi_i(hi), .gnt_o(gnt));

  task automatic expect_true(string what, logic c);
    checks++;
    if (!c) begin failures++; $display("FAIL %s (req %b hi %b gnt %b)", what, req, hi, gnt); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lo_wait, cnt[N];
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // random traffic
    lo_wait = 0;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      req = N'({$urandom, $urandom});
      hi  = N'({$urandom, $urandom});
      @(posedge clk);
      expect_true("onehot", $countones(gnt) <= 1);
      expect_true("subset", (gnt & ~req) == '0);
      expect_true("work conserving", (req == '0) || (gnt != '0));
      if ((req & hi) != '0 && (gnt & ~hi) != '0)
        expect_true("low grant only after waiting", lo_wait >= HW);
      if ((req & hi) == '0 && req != '0) expect_true("low served when alone", (gnt & ~hi) != '0);
      // waiting-cycle count of the low level as seen from outside
      if ((req & ~hi) != '0 && (gnt & ~hi) == '0) lo_wait++;
      else lo_wait = 0;
    end
    // round-robin fairness: 5 permanent high-priority requesters
    @(negedge clk);
    req = 11'b100_1010_0101; hi = '1;
    foreach (cnt[i]) cnt[i] = 0;
    repeat (50) begin
      @(posedge clk);
      for (int i = 0; i < N; i++) if (gnt[i]) cnt[i]++;
    end
    for (int i = 0; i < N; i++) expect_true("round robin share", cnt[i] == (req[i] ? 10 : 0));
    // a low-priority requester against permanent high traffic: one grant per HW+1 cycles
    @(negedge clk);
    req = 11'b000_0000_0111; hi = 11'b000_0000_0011;
    cnt[2] = 0;
    repeat (10 * (HW + 1)) begin
      @(posedge clk);
      if (gnt[2]) cnt[2]++;
    end
    expect_true("low level weight", cnt[2] == 10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
