// tb_vlsu: checks the vector load/store unit with lane models and a
// behavioural AXI memory.
// Each lane model holds its part of a source and a destination register
// (word w in lane w mod NrLanes), streams store data and indices with random
// gaps and takes load data with random back pressure. Random unit-stride
// (any 8-byte aligned base, lengths that cross 4 KiB pages), constant-stride
// and indexed loads and stores are compared with a flat reference memory.
// With memory stalls switched off, a 256-word unit-stride load must run at the
// full port width: one beat of NrLanes words per cycle, plus a small start-up.
module tb_vlsu;
  import ara_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle++;

  logic vop_valid = 1'b0, vop_ready, done;
  vop_t vop = '0;
  id_t  done_id;
  logic ar_valid, ar_ready, r_valid, r_last, r_ready, aw_valid, aw_ready;
  logic w_valid, w_last, w_ready, b_valid, b_ready;
  axi_ax_t ar, aw;
  logic [AxiDataW-1:0] r_data, w_data;
  logic [AxiBytes-1:0] w_strb;
  logic  [NrLanes-1:0] ld_valid, ld_ready, st_valid, st_pop, idx_valid, idx_pop;
  word_t [NrLanes-1:0] ld_data, st_data, idx_data;

  vlsu dut (
    .clk_i(clk), .rst_ni(rst_n), .vop_valid_i(vop_valid), .vop_i(vop), .vop_ready_o(vop_ready),
    .done_o(done), .done_id_o(done_id),
    .ar_valid_o(ar_valid), .ar_o(ar), .ar_ready_i(ar_ready), .r_valid_i(r_valid), .r_data_i(r_data),
    .r_last_i(r_last), .r_ready_o(r_ready), .aw_valid_o(aw_valid), .aw_o(aw), .aw_ready_i(aw_ready),
    .w_valid_o(w_valid), .w_data_o(w_data), .w_strb_o(w_strb), .w_last_o(w_last), .w_ready_i(w_ready),
    .b_valid_i(b_valid), .b_ready_o(b_ready),
    .ld_valid_o(ld_valid), .ld_data_o(ld_data), .ld_ready_i(ld_ready),
    .st_valid_i(st_valid), .st_data_i(st_data), .st_pop_o(st_pop),
    .idx_valid_i(idx_valid), .idx_data_i(idx_data), .idx_pop_o(idx_pop)
  );

  axi_mem_model #(.MemWords(16384)) mem (
    .clk_i(clk), .ar_valid_i(ar_valid), .ar_i(ar), .ar_ready_o(ar_ready),
    .r_valid_o(r_valid), .r_data_o(r_data), .r_last_o(r_last), .r_ready_i(r_ready),
    .aw_valid_i(aw_valid), .aw_i(aw), .aw_ready_o(aw_ready),
    .w_valid_i(w_valid), .w_data_i(w_data), .w_strb_i(w_strb), .w_last_i(w_last), .w_ready_o(w_ready),
    .b_valid_o(b_valid), .b_ready_i(b_ready)
  );

  // lane models: source (store data / index) and destination (load) registers
  localparam int MaxW = 256;
  word_t src [MaxW], idx [MaxW], dst [MaxW];
  int    sptr [NrLanes], iptr [NrLanes], lptr [NrLanes];
  int    nw = 0;
  bit    gaps = 1;
  logic [NrLanes-1:0] sgap = '0, igap = '0, lgap = '0;

  always_comb
    for (int l = 0; l < NrLanes; l++) begin
      st_valid[l]  = (sptr[l] * NrLanes + l < nw) && !sgap[l];
      st_data[l]   = src[(sptr[l] * NrLanes + l) % MaxW];
      idx_valid[l] = (iptr[l] * NrLanes + l < nw) && !igap[l];
      idx_data[l]  = idx[(iptr[l] * NrLanes + l) % MaxW];
      ld_ready[l]  = !lgap[l];
    end
  always @(posedge clk)
    for (int l = 0; l < NrLanes; l++) begin
      if (st_pop[l]) sptr[l] <= sptr[l] + 1;
      if (idx_pop[l]) iptr[l] <= iptr[l] + 1;
      if (ld_valid[l] && ld_ready[l]) begin
        dst[(lptr[l] * NrLanes + l) % MaxW] <= ld_data[l];
        lptr[l] <= lptr[l] + 1;
      end
      sgap[l] <= gaps && ($urandom % 4 == 0);
      igap[l] <= gaps && ($urandom % 4 == 0);
      lgap[l] <= gaps && ($urandom % 4 == 0);
    end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  word_t refm [16384];

  task automatic run(op_e op, int n, logic [63:0] base, logic [63:0] stride, output int cycles);
    int t0;
    nw = n;
    foreach (sptr[l]) begin sptr[l] = 0; iptr[l] = 0; lptr[l] = 0; end
    @(negedge clk);
    vop = '0;
    vop.id = id_t'($urandom);
    vop.op = op;
    vop.unit = (op inside {OP_VST, OP_VSTS, OP_VSTX}) ? UNIT_ST : UNIT_LD;
    vop.sew = EW64;
    vop.scalar = base;
    vop.stride = stride;
    vop.vl = VlW'(n);
    vop.vlw = VlW'(n);
    vop_valid = 1'b1;
    t0 = cycle;
    do @(posedge clk); while (!vop_ready);
    @(negedge clk);
    vop_valid = 1'b0;
    while (!done) @(negedge clk);
    cycles = cycle - t0;
    checks++;
    if (done_id !== vop.id) begin failures++; $display("FAIL done id"); end
    @(negedge clk);
  endtask

  initial begin
    int n, cyc;
    logic [63:0] base, stride, a;
    op_e op;
    foreach (sptr[l]) begin sptr[l] = 0; iptr[l] = 0; lptr[l] = 0; end
    for (int i = 0; i < 16384; i++) begin
      mem.mem[i] = {$urandom, $urandom};
      refm[i] = mem.mem[i];
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 120; t++) begin
      case (t % 6)
        0: op = OP_VLD;  1: op = OP_VST;  2: op = OP_VLDS;
        3: op = OP_VSTS; 4: op = OP_VLDX; default: op = OP_VSTX;
      endcase
      n = 1 + $urandom % MaxW;
      base = 64'(($urandom % 8000) * 8);
      stride = 64'((($urandom % 9) + 1) * 8);
      for (int i = 0; i < MaxW; i++) begin
        src[i] = {$urandom, $urandom};
        dst[i] = '0;
        idx[i] = 64'(($urandom % 4000) * 8);
      end
      if (op == OP_VSTX)   // scatter with distinct offsets
        for (int i = 0; i < MaxW; i++) idx[i] = 64'((i * 13 % 4000) * 8);
      run(op, n, base, stride, cyc);
      for (int i = 0; i < n; i++) begin
        unique case (op)
          OP_VLD, OP_VST:   a = base + 64'(i * 8);
          OP_VLDS, OP_VSTS: a = base + 64'(i) * stride;
          default:          a = base + idx[i];
        endcase
        a = (a >> 3) % 16384;
        if (op inside {OP_VST, OP_VSTS, OP_VSTX}) refm[a] = src[i];
        else begin
          checks++;
          if (dst[i] !== refm[a]) begin
            failures++;
            $display("FAIL %s n %0d base %h word %0d: got %h expected %h", op.name(), n, base, i, dst[i], refm[a]);
          end
        end
      end
      if (op inside {OP_VST, OP_VSTS, OP_VSTX})
        for (int i = 0; i < 16384; i++) begin
          checks++;
          if (mem.mem[i] !== refm[i]) begin
            failures++;
            $display("FAIL %s n %0d base %h: memory word %0d got %h expected %h", op.name(), n, base, i, mem.mem[i], refm[i]);
            break;
          end
        end
    end
    // bandwidth: 256 words, aligned, no stalls anywhere
    gaps = 0;
    mem.stall_en = 0;
    repeat (3) @(negedge clk);
    run(OP_VLD, 256, 64'h4000, 0, cyc);
    $display("unit-stride load of 256 words: %0d cycles (%0d beats)", cyc, 256 / int'(WordsPerBeat));
    checks++;
    if (cyc > 256 / int'(WordsPerBeat) + 8) begin failures++; $display("FAIL load bandwidth: %0d cycles", cyc); end
    run(OP_VST, 256, 64'h8000, 0, cyc);
    $display("unit-stride store of 256 words: %0d cycles", cyc);
    checks++;
    if (cyc > 256 / int'(WordsPerBeat) + 8) begin failures++; $display("FAIL store bandwidth: %0d cycles", cyc); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
