// tb_ara: end-to-end test of the vector unit at its default size (4 lanes,
// 16 KiB of register file per lane, 128-bit memory port).
//
// The testbench plays the scalar core: it sends decoded vector instructions
// through the dispatcher port (holding some of them speculative for a few
// cycles first), collects the answers, and checks the results in memory or in
// scalar answers against values computed here. Memory is a behavioural AXI
// model with random stalls; each lane's FPU is a behavioural model.
//
// Programs run: configuration (setvl), unit-stride, strided and indexed loads
// and stores, integer ALU and multiplier operations at 64 and 16 bit, DAXPY
// (y = a*x + y), slides, element insert/extract, a misaligned access that must
// raise an exception, and a 16x16 double-precision matrix multiplication
// C = A*B + C written with vector-scalar multiply-adds as in the paper's kernel.
// It also checks the FPU throughput of one 64-bit result per lane and cycle,
// and counts how often each mechanism occurred: structural stalls, flagged data
// hazards, throttled (chained) operand fetches, bank conflicts, multi-beat
// bursts, exceptions, slides, and vector-scalar exchanges.
module tb_ara;
  import ara_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle++;

  // ------------------------------------------------------ DUT and models
  logic insn_valid = 1'b0, insn_nonspec = 1'b0, flush = 1'b0, insn_ready;
  ara_req_t insn = '0;
  logic resp_valid;
  ara_resp_t resp;
  logic [7:0] pending;

  logic ar_valid, ar_ready, r_valid, r_last, r_ready, aw_valid, aw_ready;
  logic w_valid, w_last, w_ready, b_valid, b_ready;
  axi_ax_t ar, aw;
  logic [AxiDataW-1:0] r_data, w_data;
  logic [AxiBytes-1:0] w_strb;

  logic [NrLanes-1:0]  fpu_valid, fpu_rvalid;
  op_e  [NrLanes-1:0]  fpu_op;
  sew_e [NrLanes-1:0]  fpu_sew;
  word_t [NrLanes-1:0] fpu_a, fpu_b, fpu_c, fpu_res;
  logic ev_stall, ev_hazard, ev_exc, idle;

  ara dut (
    .clk_i(clk), .rst_ni(rst_n),
    .insn_valid_i(insn_valid), .insn_i(insn), .insn_nonspec_i(insn_nonspec), .flush_i(flush),
    .insn_ready_o(insn_ready), .resp_valid_o(resp_valid), .resp_o(resp), .pending_o(pending),
    .ar_valid_o(ar_valid), .ar_o(ar), .ar_ready_i(ar_ready), .r_valid_i(r_valid), .r_data_i(r_data),
    .r_last_i(r_last), .r_ready_o(r_ready), .aw_valid_o(aw_valid), .aw_o(aw), .aw_ready_i(aw_ready),
    .w_valid_o(w_valid), .w_data_o(w_data), .w_strb_o(w_strb), .w_last_o(w_last), .w_ready_i(w_ready),
    .b_valid_i(b_valid), .b_ready_o(b_ready),
    .fpu_valid_o(fpu_valid), .fpu_op_o(fpu_op), .fpu_sew_o(fpu_sew), .fpu_a_o(fpu_a), .fpu_b_o(fpu_b),
    .fpu_c_o(fpu_c), .fpu_valid_i(fpu_rvalid), .fpu_result_i(fpu_res),
    .ev_struct_stall_o(ev_stall), .ev_hazard_o(ev_hazard), .ev_exception_o(ev_exc), .idle_o(idle)
  );

  axi_mem_model #(.MemWords(65536)) mem (
    .clk_i(clk), .ar_valid_i(ar_valid), .ar_i(ar), .ar_ready_o(ar_ready),
    .r_valid_o(r_valid), .r_data_o(r_data), .r_last_o(r_last), .r_ready_i(r_ready),
    .aw_valid_i(aw_valid), .aw_i(aw), .aw_ready_o(aw_ready),
    .w_valid_i(w_valid), .w_data_i(w_data), .w_strb_i(w_strb), .w_last_i(w_last), .w_ready_o(w_ready),
    .b_valid_o(b_valid), .b_ready_i(b_ready)
  );

  for (genvar l = 0; l < NrLanes; l++) begin : gen_fpu
    fpu_model #(.Latency(3)) i_fpu (
      .clk_i(clk), .valid_i(fpu_valid[l]), .op_i(fpu_op[l]), .sew_i(fpu_sew[l]),
      .a_i(fpu_a[l]), .b_i(fpu_b[l]), .c_i(fpu_c[l]), .valid_o(fpu_rvalid[l]), .result_o(fpu_res[l])
    );
  end

  // ------------------------------------------------------ mechanism counters
  int n_stall = 0, n_hazard = 0, n_exc = 0, n_conflict = 0, n_throttle = 0;
  int n_fpu = 0, n_resp = 0;
  always @(posedge clk) if (rst_n) begin
    if (ev_stall)  n_stall++;
    if (ev_hazard) n_hazard++;
    if (ev_exc)    n_exc++;
    if (resp_valid) n_resp++;
    for (int l = 0; l < NrLanes; l++) if (fpu_valid[l]) n_fpu++;
  end
  // bank conflicts and throttled operand requests, observed in lane 0
  always @(posedge clk) if (rst_n) begin
    for (int b = 0; b < NrBanks; b++)
      if ($countones(dut.gen_lane[0].i_lane.i_vrf.bank_req[b]) > 1) n_conflict++;
    for (int s = 0; s < 7; s++)
      if (dut.gen_lane[0].i_lane.i_seq.s_en[s] && !dut.gen_lane[0].i_lane.i_seq.s_done[s] &&
          dut.gen_lane[0].i_lane.i_seq.sroom_i[s] && !dut.gen_lane[0].i_lane.i_seq.sreq_o[s])
        n_throttle++;
  end

  // ------------------------------------------------------ helpers
  word_t last_resp;
  logic  last_exc;
  int    n_sent = 0, n_got = 0;
  always @(posedge clk) if (resp_valid) begin
    last_resp <= resp.result;
    last_exc  <= resp.exception;
    n_got++;
  end

  task automatic check(input string what, input logic [63:0] got, input logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h (cycle %0d)", what, got, exp, cycle);
    end
  endtask

  // Send one instruction; every fifth one is held speculative for 3 cycles.
  // Inputs change on the falling edge, the handshake completes on the rising one.
  task automatic send(input op_e op, input sew_e sew, input int vd, input int vs1, input int vs2,
                      input logic use_scalar, input logic [63:0] scalar, input logic [63:0] stride);
    @(negedge clk);
    insn.op = op; insn.sew = sew; insn.vd = vreg_t'(vd); insn.vs1 = vreg_t'(vs1);
    insn.vs2 = vreg_t'(vs2); insn.use_scalar = use_scalar; insn.scalar = scalar; insn.stride = stride;
    insn_valid = 1'b1;
    insn_nonspec = (n_sent % 5 != 4);
    if (n_sent % 5 == 4) begin
      repeat (3) @(negedge clk);
      insn_nonspec = 1'b1;
    end
    do @(posedge clk); while (!insn_ready);
    @(negedge clk);
    insn_valid = 1'b0;
    insn_nonspec = 1'b0;
    n_sent++;
  endtask

  // wait for all answers and for the vector unit to go idle
  task automatic drain();
    do @(posedge clk); while (!(n_got == n_sent && idle && pending == 0));
    repeat (2) @(posedge clk);
  endtask

  // wait for the answer of the last instruction sent
  task automatic wait_resp();
    do @(posedge clk); while (n_got != n_sent);
  endtask

  function automatic word_t dbl(int v);
    return $realtobits(real'(v));
  endfunction

  task automatic setvl(input int avl, input sew_e sew, input int expect_vl);
    send(OP_SETVL, sew, 0, 0, 0, 1'b0, 64'(avl), 0);
    wait_resp();
    @(posedge clk);
    check("setvl", last_resp, 64'(expect_vl));
  endtask

  // ------------------------------------------------------ test program
  localparam logic [63:0] XB = 64'h1000, YB = 64'h3008, ZB = 64'h6000, IB = 64'h8000;
  localparam logic [63:0] AB = 64'h10000, BB = 64'h18000, CB = 64'h20000;

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n, t0, t1, f0;
    real a_s;
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);

    // memory contents: x[i] = i+1, y[i] = 2*i (doubles); integer data at ZB
    for (int i = 0; i < 300; i++) begin
      mem.mem[(XB >> 3) + i] = dbl(i + 1);
      mem.mem[(YB >> 3) + i] = dbl(2 * i);
    end

    // ---- configuration
    setvl(1000, EW64, 256);      // VLMAX for 64-bit elements on 4 lanes
    setvl(200, EW64, 200);

    // ---- DAXPY, n = 200 (y starts at an address that is not beat aligned)
    send(OP_VLD, EW64, 1, 0, 0, 1'b0, XB, 0);
    send(OP_VLD, EW64, 2, 0, 0, 1'b0, YB, 0);
    send(OP_VFMADD, EW64, 2, 0, 1, 1'b1, dbl(3), 0);       // v2 = 3*v1 + v2
    send(OP_VST, EW64, 0, 2, 0, 1'b0, YB, 0);
    drain();
    for (int i = 0; i < 200; i++)
      check("daxpy", mem.mem[(YB >> 3) + i], dbl(3 * (i + 1) + 2 * i));
    check("daxpy tail untouched", mem.mem[(YB >> 3) + 200], dbl(400));

    // ---- FPU throughput: vl = 256 -> 64 words per lane, one per cycle
    setvl(256, EW64, 256);
    t0 = cycle;
    send(OP_VFMUL, EW64, 3, 1, 1, 1'b0, 0, 0);
    drain();
    t1 = cycle;
    $display("vfmul of 256 elements on %0d lanes: %0d cycles", NrLanes, t1 - t0);
    checks++;
    if (t1 - t0 > 256 / NrLanes + 40) begin
      failures++;
      $display("FAIL FPU throughput: %0d cycles", t1 - t0);
    end

    // ---- integer ALU / MUL at 64 bit
    setvl(64, EW64, 64);
    for (int i = 0; i < 64; i++) mem.mem[(ZB >> 3) + i] = 64'(i * 7 + 3) - 64'd100;
    send(OP_VLD,  EW64, 4, 0, 0, 1'b0, ZB, 0);
    send(OP_VADD, EW64, 5, 4, 4, 1'b0, 0, 0);              // v5 = v4 + v4
    send(OP_VMUL, EW64, 6, 5, 4, 1'b0, 0, 0);              // v6 = v5 * v4
    send(OP_VSUB, EW64, 7, 0, 6, 1'b1, 64'd5, 0);          // v7 = v6 - 5
    send(OP_VMAX, EW64, 8, 0, 4, 1'b1, 64'd0, 0);          // v8 = max(v4, 0)
    send(OP_VST,  EW64, 0, 7, 0, 1'b0, ZB + 64'h800, 0);
    send(OP_VST,  EW64, 0, 8, 0, 1'b0, ZB + 64'h1000, 0);
    drain();
    for (int i = 0; i < 64; i++) begin
      logic [63:0] x;
      x = 64'(i * 7 + 3) - 64'd100;
      check("alu/mul chain", mem.mem[((ZB + 64'h800) >> 3) + i], (x + x) * x - 64'd5);
      check("vmax", mem.mem[((ZB + 64'h1000) >> 3) + i], ($signed(x) > 0) ? x : 64'd0);
    end

    // ---- 16-bit elements: 4 per word
    setvl(100, EW16, 100);
    for (int i = 0; i < 25; i++)
      mem.mem[(ZB >> 3) + i] = {16'(4*i+3), 16'(4*i+2), 16'(4*i+1), 16'(4*i)};
    send(OP_VLD,  EW16, 9, 0, 0, 1'b0, ZB, 0);
    send(OP_VMUL, EW16, 10, 0, 9, 1'b1, 64'd300, 0);       // wraps at 16 bit
    send(OP_VSRL, EW16, 11, 0, 10, 1'b1, 64'd2, 0);
    send(OP_VST,  EW16, 0, 11, 0, 1'b0, ZB + 64'h2000, 0);
    drain();
    for (int i = 0; i < 25; i++) begin
      logic [63:0] e;
      for (int k = 0; k < 4; k++) e[k*16 +: 16] = 16'(16'((4*i+k) * 300) >> 2);
      check("ew16", mem.mem[((ZB + 64'h2000) >> 3) + i], e);
    end

    // ---- strided load, indexed load (gather), strided store
    setvl(32, EW64, 32);
    for (int i = 0; i < 32; i++) mem.mem[(IB >> 3) + i] = 64'((31 - i) * 8);   // byte offsets
    send(OP_VLDS, EW64, 12, 0, 0, 1'b0, XB, 24);           // x[0], x[3], x[6], ...
    send(OP_VLD,  EW64, 13, 0, 0, 1'b0, IB, 0);
    send(OP_VLDX, EW64, 14, 0, 13, 1'b0, XB, 0);           // x[31-i]
    send(OP_VFADD, EW64, 15, 12, 14, 1'b0, 0, 0);
    send(OP_VSTS, EW64, 0, 15, 0, 1'b0, ZB + 64'h3000, 16);
    drain();
    for (int i = 0; i < 32; i++)
      check("strided/gather", mem.mem[((ZB + 64'h3000) >> 3) + 2 * i], dbl((3 * i + 1) + (31 - i + 1)));

    // ---- indexed store (scatter)
    send(OP_VSTX, EW64, 0, 12, 13, 1'b0, ZB + 64'h4000, 0);
    drain();
    for (int i = 0; i < 32; i++)
      check("scatter", mem.mem[((ZB + 64'h4000) >> 3) + 31 - i], dbl(3 * i + 1));

    // ---- slides, insert, extract
    setvl(40, EW64, 40);
    send(OP_VLD, EW64, 16, 0, 0, 1'b0, XB, 0);              // v16[i] = i+1
    send(OP_VLD, EW64, 17, 0, 0, 1'b0, YB, 0);
    send(OP_VSLIDEDOWN, EW64, 18, 0, 16, 1'b0, 64'd5, 0);
    send(OP_VSLIDEUP,   EW64, 17, 0, 16, 1'b0, 64'd7, 0);
    send(OP_VINS,       EW64, 18, 0, 0, 1'b0, 64'd3, 64'hdead_beef);
    send(OP_VST, EW64, 0, 18, 0, 1'b0, ZB + 64'h5000, 0);
    send(OP_VST, EW64, 0, 17, 0, 1'b0, ZB + 64'h5800, 0);
    drain();
    for (int i = 0; i < 40; i++) begin
      check("slidedown/vins", mem.mem[((ZB + 64'h5000) >> 3) + i],
            (i == 3) ? 64'hdead_beef : (i + 5 < 40) ? dbl(i + 6) : 64'd0);
      check("slideup", mem.mem[((ZB + 64'h5800) >> 3) + i],
            (i < 7) ? mem.mem[(YB >> 3) + i] : dbl(i - 7 + 1));
    end
    send(OP_VEXT, EW64, 0, 0, 16, 1'b0, 64'd29, 0);
    wait_resp();
    @(posedge clk);
    check("vext", last_resp, dbl(30));

    // ---- exception: misaligned base address
    send(OP_VLD, EW64, 19, 0, 0, 1'b0, XB + 4, 0);
    wait_resp();
    @(posedge clk);
    check("exception flagged", 64'(last_exc), 64'd1);
    drain();

    // ---- matrix multiplication C = A*B + C, n = 16, 4 rows of C per tile
    n = 16;
    for (int i = 0; i < n; i++)
      for (int j = 0; j < n; j++) begin
        mem.mem[(AB >> 3) + i*n + j] = dbl((i + 2*j) % 7 - 3);
        mem.mem[(BB >> 3) + i*n + j] = dbl((3*i + j) % 5 - 2);
        mem.mem[(CB >> 3) + i*n + j] = dbl(i - j);
      end
    setvl(n, EW64, n);
    t0 = cycle;
    f0 = n_fpu;
    for (int r = 0; r < n; r += 4) begin
      for (int j = 0; j < 4; j++)                                    // phase I
        send(OP_VLD, EW64, 20 + j, 0, 0, 1'b0, CB + 64'((r + j) * n * 8), 0);
      for (int i = 0; i < n; i++) begin                              // phase II
        send(OP_VLD, EW64, 24 + (i % 2), 0, 0, 1'b0, BB + 64'(i * n * 8), 0);
        for (int j = 0; j < 4; j++)
          send(OP_VFMADD, EW64, 20 + j, 0, 24 + (i % 2), 1'b1,
               mem.mem[(AB >> 3) + (r + j) * n + i], 0);
      end
      for (int j = 0; j < 4; j++)                                    // phase III
        send(OP_VST, EW64, 0, 20 + j, 0, 1'b0, CB + 64'((r + j) * n * 8), 0);
    end
    drain();
    $display("matmul %0dx%0d: %0d cycles, %0d FMA words over %0d lanes (FPU busy %0d%% of the cycles)",
             n, n, cycle - t0, n_fpu - f0, NrLanes, 100 * (n_fpu - f0) / (NrLanes * (cycle - t0)));
    for (int i = 0; i < n; i++)
      for (int j = 0; j < n; j++) begin
        int acc;
        acc = i - j;
        for (int k = 0; k < n; k++) acc += ((i + 2*k) % 7 - 3) * ((3*k + j) % 5 - 2);
        check("matmul", mem.mem[(CB >> 3) + i*n + j], dbl(acc));
      end

    // ---- mechanisms
    $display("events: struct stalls %0d, hazards %0d, throttled requests %0d, bank conflicts %0d, bursts %0d, exceptions %0d, fpu ops %0d",
             n_stall, n_hazard, n_throttle, n_conflict, mem.nbursts, n_exc, n_fpu);
    checks += 6;
    if (n_stall == 0)    begin failures++; $display("FAIL no structural stall"); end
    if (n_hazard == 0)   begin failures++; $display("FAIL no data hazard"); end
    if (n_throttle == 0) begin failures++; $display("FAIL no throttled operand fetch"); end
    if (n_conflict == 0) begin failures++; $display("FAIL no bank conflict"); end
    if (mem.nbursts == 0) begin failures++; $display("FAIL no burst"); end
    if (n_exc != 1)      begin failures++; $display("FAIL exceptions %0d", n_exc); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
