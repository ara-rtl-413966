// tb_ara_sequencer: checks the main sequencer with models of the lanes, the
// load/store unit and the slide unit.
// A random instruction stream on a few registers (so that dependences are
// frequent) is offered to the sequencer; the unit models accept operations
// with random back pressure and report completion after random delays, lane by
// lane. The testbench keeps its own table of running instructions and checks:
// issued ids are free and never referenced by a running instruction; the RAW
// and WAR/WAW masks carried by each operation match the dependences worked
// out from the table; vl and the word count are right; setvl answers
// min(AVL, VLMAX); illegal instructions answer with an exception and are not
// issued; vext answers with the slide unit's result only after completion;
// at most eight instructions run at once, and the limit is reached.
// Timing: inputs change on the falling edge and a request counts as taken at
// the rising edge where req_ready is high; completion pulses are computed at
// one rising edge and seen at the next. The eight-instruction limit follows
// the paper; the models' delays, the exception rules and the id-reuse rule
// are this design's own.
module tb_ara_sequencer;
  import ara_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic req_valid = 1'b0, req_ready, resp_valid, vop_valid;
  ara_req_t req = '0;
  ara_resp_t resp;
  vop_t vop;
  logic lanes_ready, vlsu_ready, sldu_ready;
  logic [NrLanes-1:0][NrInsn-1:0] lane_done;
  logic vlsu_done, sldu_done;
  id_t  vlsu_done_id, sldu_done_id;
  word_t sldu_result;
  logic ev_stall, ev_hazard, ev_exc, idle;

  ara_sequencer dut (
    .clk_i(clk), .rst_ni(rst_n), .req_valid_i(req_valid), .req_i(req), .req_ready_o(req_ready),
    .resp_valid_o(resp_valid), .resp_o(resp), .vop_valid_o(vop_valid), .vop_o(vop),
    .lanes_ready_i(lanes_ready), .vlsu_ready_i(vlsu_ready), .sldu_ready_i(sldu_ready),
    .lane_done_i(lane_done), .vlsu_done_i(vlsu_done), .vlsu_done_id_i(vlsu_done_id),
    .sldu_done_i(sldu_done), .sldu_done_id_i(sldu_done_id), .sldu_result_i(sldu_result),
    .ev_struct_stall_o(ev_stall), .ev_hazard_o(ev_hazard), .ev_exception_o(ev_exc), .idle_o(idle)
  );

  task automatic expect_true(string what, logic c);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------------------------------------------------------- reference table
  typedef struct {
    bit valid;
    bit wr;
    int vd;
    int rd [$];
    bit glob;
    int glob_time;
    int lane_time [NrLanes];
    bit lane_sent [NrLanes];
    bit glob_sent;
    bit [NrInsn-1:0] dep;
    bit is_ext;
  } entry_t;
  entry_t tab [NrInsn];

  function automatic void operands(op_e op, logic use_scalar, int vs1, int vs2, int vd,
                                   output bit wr, output int rd [$]);
    rd = {};
    wr = 1;
    case (op)
      OP_VLD, OP_VLDS: ;
      OP_VLDX:          rd.push_back(vs2);
      OP_VST, OP_VSTS:  begin wr = 0; rd.push_back(vs1); end
      OP_VSTX:          begin wr = 0; rd.push_back(vs1); rd.push_back(vs2); end
      OP_VSLIDEUP, OP_VSLIDEDOWN: rd.push_back(vs2);
      OP_VINS:          ;
      OP_VEXT:          begin wr = 0; rd.push_back(vs2); end
      OP_VFSQRT:        if (!use_scalar) rd.push_back(vs1);
      OP_VFMADD, OP_VMADD: begin
        if (!use_scalar) rd.push_back(vs1);
        rd.push_back(vs2);
        rd.push_back(vd);
      end
      default: begin
        if (!use_scalar) rd.push_back(vs1);
        rd.push_back(vs2);
      end
    endcase
  endfunction

  // ---------------------------------------------------------------- unit models
  // Completion pulses are produced from the table at a clock edge and seen by
  // the sequencer and by the checker at the next edge.
  int cycle = 0;
  logic ready_rand = 1'b1;
  always @(posedge clk) ready_rand <= ($urandom % 4 != 0);
  assign lanes_ready = ready_rand;
  assign vlsu_ready  = ready_rand;
  assign sldu_ready  = 1'b1;

  int  sldu_fifo [$];      // slide-unit instructions in issue order
  int  pending_ext = -1;   // id of the vext waiting for its answer
  bit  all_sent [NrInsn];
  int  inflight = 0, max_inflight = 0, n_issued = 0, n_exc = 0, n_cfg = 0;
  logic [VlW-1:0] vl_ref = '0;
  initial begin
    lane_done = '0; vlsu_done = 1'b0; vlsu_done_id = '0;
    sldu_done = 1'b0; sldu_done_id = '0; sldu_result = '0;
  end

  always @(posedge clk) if (rst_n) begin
    cycle++;
    // completions delivered at this edge
    for (int i = 0; i < NrInsn; i++) begin
      for (int l = 0; l < NrLanes; l++) if (lane_done[l][i]) tab[i].lane_sent[l] = 1;
      if (vlsu_done && vlsu_done_id == id_t'(i)) tab[i].glob_sent = 1;
      if (sldu_done && sldu_done_id == id_t'(i)) tab[i].glob_sent = 1;
    end
    // the answer to a vext comes once it is complete
    if (resp_valid && !req_ready) begin
      expect_true("answer only for a waiting vext", pending_ext >= 0);
      if (pending_ext >= 0) begin
        expect_true("vext answered after completion", !tab[pending_ext].valid || all_sent[pending_ext]);
        checks++;
        if (resp.result !== 64'hABCD_0000 + 64'(pending_ext)) begin
          failures++;
          $display("FAIL vext result %h", resp.result);
        end
        pending_ext = -1;
      end
    end
    // issue
    if (vop_valid) begin
      bit wr;
      int rd [$];
      bit [NrInsn-1:0] raw, wawar, referenced;
      int id;
      id = int'(vop.id);
      n_issued++;
      expect_true("issued id is free", !tab[id].valid);
      referenced = '0;
      for (int j = 0; j < NrInsn; j++) if (tab[j].valid) referenced |= tab[j].dep;
      expect_true("issued id is not referenced", !referenced[id]);
      operands(vop.op, vop.use_scalar, int'(vop.vs1), int'(vop.vs2), int'(vop.vd), wr, rd);
      raw = '0; wawar = '0;
      for (int j = 0; j < NrInsn; j++) if (tab[j].valid) begin
        if (tab[j].wr && (tab[j].vd inside {rd})) raw[j] = 1;
        if (wr && tab[j].wr && tab[j].vd == int'(vop.vd)) wawar[j] = 1;
        if (wr && (int'(vop.vd) inside {tab[j].rd})) wawar[j] = 1;
      end
      checks++;
      if (vop.raw !== raw || vop.wawar !== wawar) begin
        failures++;
        $display("FAIL masks for %s: raw %b/%b wawar %b/%b", vop.op.name(), vop.raw, raw, vop.wawar, wawar);
        for (int j = 0; j < NrInsn; j++) $display("  %0d dut v%b l%b g%b | tb v%b as%b ls%p gs%b", j, dut.valid_q[j], dut.lanes_q[j], dut.glob_q[j], tab[j].valid, all_sent[j], tab[j].lane_sent, tab[j].glob_sent);
      end
      expect_true("vl", vop.vl == vl_ref);
      expect_true("word count", vop.vlw == VlW'((int'(vl_ref) * (8 << vop.sew) + 63) / 64));
      tab[id].valid = 1;
      all_sent[id] = 0;
      tab[id].wr = wr;
      tab[id].vd = int'(vop.vd);
      tab[id].rd = rd;
      tab[id].dep = raw | wawar;
      tab[id].glob = vop.unit inside {UNIT_LD, UNIT_ST, UNIT_SLDU};
      tab[id].is_ext = (vop.unit == UNIT_SLDU);
      tab[id].glob_sent = 0;
      tab[id].glob_time = cycle + 1 + $urandom % 30;
      for (int l = 0; l < NrLanes; l++) begin
        tab[id].lane_sent[l] = 0;
        tab[id].lane_time[l] = cycle + 1 + $urandom % 30;
      end
      if (vop.op == OP_VEXT) pending_ext = id;
      if (vop.unit == UNIT_SLDU) sldu_fifo.push_back(id);
    end
    // retire: the sequencer frees an entry one cycle after its last completion
    for (int i = 0; i < NrInsn; i++)
      if (tab[i].valid) begin
        bit all;
        all = 1;
        for (int l = 0; l < NrLanes; l++) if (!tab[i].lane_sent[l]) all = 0;
        if (tab[i].glob && !tab[i].glob_sent) all = 0;
        if (all_sent[i]) tab[i].valid = 0;
        else all_sent[i] = all;
      end
    inflight = 0;
    for (int i = 0; i < NrInsn; i++) if (tab[i].valid) inflight++;
    if (inflight > max_inflight) max_inflight = inflight;
    expect_true("at most eight running", inflight <= NrInsn);
    // completions for the next edge: any lane whose time has come, and one
    // load/store and one slide completion, lowest id first
    begin
      logic [NrLanes-1:0][NrInsn-1:0] ld;
      int gv, gs;
      ld = '0; gv = -1; gs = -1;
      for (int i = NrInsn - 1; i >= 0; i--)
        if (tab[i].valid && !all_sent[i]) begin
          for (int l = 0; l < NrLanes; l++)
            if (!tab[i].lane_sent[l] && tab[i].lane_time[l] <= cycle) ld[l][i] = 1'b1;
          if (tab[i].glob && !tab[i].is_ext && !tab[i].glob_sent && tab[i].glob_time <= cycle) gv = i;
        end
      // the slide unit finishes its oldest instruction after all lanes have
      if (sldu_fifo.size() > 0) begin
        bit lanes_all;
        lanes_all = 1;
        for (int l = 0; l < NrLanes; l++) if (!tab[sldu_fifo[0]].lane_sent[l]) lanes_all = 0;
        if (lanes_all && tab[sldu_fifo[0]].glob_time <= cycle) gs = sldu_fifo.pop_front();
      end
      lane_done    <= ld;
      vlsu_done    <= (gv >= 0);
      vlsu_done_id <= id_t'(gv < 0 ? 0 : gv);
      sldu_done    <= (gs >= 0);
      sldu_done_id <= id_t'(gs < 0 ? 0 : gs);
      sldu_result  <= 64'hABCD_0000 + 64'(gs < 0 ? 0 : gs);
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  op_e ops[] = '{OP_VADD, OP_VMUL, OP_VFMADD, OP_VFADD, OP_VLD, OP_VST, OP_VLDS, OP_VLDX,
                 OP_VSTX, OP_VSLIDEUP, OP_VSLIDEDOWN, OP_VINS, OP_VEXT, OP_SETVL, OP_VFSQRT};

  initial begin
    int avl, exp_vl;
    bit exc_exp;
    foreach (tab[i]) begin tab[i].valid = 0; tab[i].dep = '0; all_sent[i] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      req = '0;
      req.op = ops[$urandom % ops.size()];
      if (t < 2) req.op = OP_SETVL;
      req.sew = ($urandom % 8 == 0) ? sew_e'($urandom % 4) : EW64;
      req.vd = vreg_t'($urandom % 5);
      req.vs1 = vreg_t'($urandom % 5);
      req.vs2 = vreg_t'($urandom % 5);
      req.use_scalar = $urandom % 2;
      avl = $urandom % 400;
      req.scalar = (req.op == OP_SETVL) ? 64'(avl) : (req.op inside {OP_VINS, OP_VEXT}) ?
                   64'($urandom % 300) : 64'(($urandom % 64) * 8 + (($urandom % 10 == 0) ? 4 : 0));
      req.stride = 64'(($urandom % 8) * 8);
      // reference answer
      exc_exp = 0;
      if (req.op inside {OP_VLD, OP_VST, OP_VLDS, OP_VLDX, OP_VSTX} && req.scalar % 8 != 0) exc_exp = 1;
      if (req.op inside {OP_VLDS, OP_VLDX, OP_VSTX, OP_VSLIDEUP, OP_VSLIDEDOWN, OP_VINS, OP_VEXT} && req.sew != EW64) exc_exp = 1;
      if (req.op inside {OP_VINS, OP_VEXT} && req.scalar >= 64'(vl_ref)) exc_exp = 1;
      exp_vl = (avl > (16384 / 32 * NrLanes) / (1 << req.sew)) ? (16384 / 32 * NrLanes) / (1 << req.sew) : avl;
      req_valid = 1'b1;
      do @(posedge clk); while (!req_ready);
      if (req.op == OP_SETVL) n_cfg++;
      if (exc_exp) n_exc++;
      if (!(req.op == OP_VEXT && !exc_exp)) begin
        checks++;
        if (!resp_valid || resp.exception !== exc_exp ||
            (req.op == OP_SETVL && resp.result !== 64'(exp_vl))) begin
          failures++;
          $display("FAIL answer to %s: valid %b exc %b/%b result %0d/%0d", req.op.name(), resp_valid,
                   resp.exception, exc_exp, resp.result, exp_vl);
        end
        expect_true("illegal instruction not issued", !(exc_exp && vop_valid));
        if (req.op == OP_SETVL) vl_ref = VlW'(exp_vl);
      end
      @(negedge clk);
      req_valid = 1'b0;
      if (req.op == OP_VEXT && !exc_exp)
        while (pending_ext >= 0) @(negedge clk);
      if ($urandom % 50 == 0) repeat (40) @(negedge clk);   // let everything drain now and then
    end
    repeat (100) @(negedge clk);
    expect_true("idle at the end", idle);
    expect_true("eight instructions in flight reached", max_inflight == NrInsn);
    $display("issued %0d, exceptions %0d, setvl %0d, max in flight %0d", n_issued, n_exc, n_cfg, max_inflight);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
