// tb_vrf: checks one lane's register file (8 single-ported banks of 256
// 64-bit words, 16 KiB) with its 11 requesters.
// Random read and write requests, with few distinct rows so that requests
// collide on banks and hit recently written words. Checked every cycle: each
// requested bank grants exactly one of its requesters, nobody else is granted,
// a granted read returns one cycle later the value the reference array holds,
// and a granted write is visible to later reads.
module tb_vrf;
  import ara_pkg::*;
  localparam int unsigned N = 11;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic [N-1:0] req = '0, we = '0, hi = '0, gnt, rvalid;
  logic [N-1:0][2:0] bank = '0;
  logic [N-1:0][7:0] row = '0;
  word_t [N-1:0] wdata = '0, rdata;

  vrf #(.NumReq(N)) dut (
    .clk_i(clk), .rst_ni(rst_n), .req_i(req), .we_i(we), .hi_i(hi), .bank_i(bank), .row_i(row),
    .wdata_i(wdata), .gnt_o(gnt), .rvalid_o(rvalid), .rdata_o(rdata)
  );

  word_t model [8][256];
  bit    known [8][256];

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

  initial begin
    logic [N-1:0] exp_rv;
    word_t exp_rd [N];
    int nconf;
    foreach (known[b, r]) known[b][r] = 0;
    exp_rv = '0;
    nconf = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      for (int i = 0; i < N; i++) begin
        req[i]   = ($urandom % 3 == 0);
        we[i]    = (t < 200) ? 1'b1 : ($urandom % 3 == 0);
        hi[i]    = $urandom % 2;
        bank[i]  = 3'($urandom);
        row[i]   = 8'($urandom % 4) + ((t < 200) ? 8'd0 : 8'd252);
        wdata[i] = {$urandom, $urandom};
      end
      if (t == 200) foreach (known[b, r]) known[b][r] = 0;  // second phase uses other rows
      @(posedge clk);
      // read data of the grants made in the previous cycle
      for (int i = 0; i < N; i++) begin
        expect_true("rvalid", rvalid[i] == exp_rv[i]);
        if (exp_rv[i] && exp_rd[i] != '0) begin
          checks++;
          if (rdata[i] !== exp_rd[i]) begin
            failures++;
            $display("FAIL read data req %0d: got %h expected %h", i, rdata[i], exp_rd[i]);
          end
        end
      end
      // grants of this cycle
      for (int b = 0; b < 8; b++) begin
        logic [N-1:0] rb;
        for (int i = 0; i < N; i++) rb[i] = req[i] && bank[i] == 3'(b);
        expect_true("one grant per requested bank", $countones(gnt & rb) == ((rb != '0) ? 1 : 0));
        if ($countones(rb) > 1) nconf++;
      end
      expect_true("grant only to requesters", (gnt & ~req) == '0);
      exp_rv = '0;
      for (int i = 0; i < N; i++) begin
        exp_rd[i] = '0;
        if (gnt[i] && !we[i]) begin
          exp_rv[i] = 1'b1;
          if (known[bank[i]][row[i]]) exp_rd[i] = model[bank[i]][row[i]];
        end
      end
      for (int i = 0; i < N; i++)
        if (gnt[i] && we[i]) begin
          model[bank[i]][row[i]] = wdata[i];
          known[bank[i]][row[i]] = 1;
        end
    end
    expect_true("bank conflicts occurred", nconf > 100);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
