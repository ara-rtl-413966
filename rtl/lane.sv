// lane: one of the identical lanes of the vector unit.
//
// A lane holds a 16 KiB slice of the vector register file (eight 64-bit
// single-ported banks, see vrf), the lane sequencer, the operand queues, the
// integer ALU and multiplier, and the port of the floating point unit, which is
// an existing IP block and therefore lives outside this RTL. All arithmetic of
// a vector instruction stays inside the lanes; only the load/store unit and the
// slide unit exchange data with all lanes at once.
//
// Queues, as given in the paper: FPU/MUL operands a, b, c of depth 5, ALU
// operands a, b of depth 5 (the a queue also carries the slide unit's
// operands), load/store data and index of depth 2, and one result queue of
// depth 4 each for the ALU and for the FPU/MUL. The paper's fourth FPU/MUL
// queue and third ALU and load/store queues carry the mask operand of
// predicated instructions, which this design does not support, so they are not
// built. Load data and slide-unit data entering the lane are buffered in small
// queues of depth 2 (this design's choice).
//
// Requesters of the register file: streams 0..6 (operand fetches, see
// lane_sequencer) and the write-backs 7 ALU, 8 FPU/MUL, 9 load, 10 slide unit.
// Load/store and slide-unit traffic has the low arbitration priority.
//
// Functional units are issued only when their result queue has room for every
// result still in flight, so the units need no back pressure. The FPU port
// expects one request per cycle at most and results in request order, with any
// latency.
module lane import ara_pkg::*; #(
  parameter int unsigned LaneId = 0
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  // operation from the main sequencer
  input  logic        vop_valid_i,
  input  vop_t        vop_i,
  output logic        vop_ready_o,
  output logic [NrInsn-1:0] done_o,
  // FPU port
  output logic        fpu_valid_o,
  output op_e         fpu_op_o,
  output sew_e        fpu_sew_o,
  output word_t       fpu_a_o,
  output word_t       fpu_b_o,
  output word_t       fpu_c_o,
  input  logic        fpu_valid_i,
  input  word_t       fpu_result_i,
  // load/store unit: store data, indices, load data
  output logic        st_valid_o,
  output word_t       st_data_o,
  input  logic        st_pop_i,
  output logic        idx_valid_o,
  output word_t       idx_data_o,
  input  logic        idx_pop_i,
  input  logic        ld_valid_i,
  input  word_t       ld_data_i,
  output logic        ld_ready_o,
  // slide unit: operands out, results in
  output logic        sl_valid_o,
  output word_t       sl_data_o,
  input  logic        sl_pop_i,
  input  logic        sw_valid_i,
  input  logic [VlW-1:0] sw_idx_i,
  input  word_t       sw_data_i,
  output logic        sw_ready_o,
  input  logic        sldu_done_i,
  input  id_t         sldu_done_id_i
);
  localparam int unsigned NReq = 11;
  localparam int unsigned OpQDepth  [7] = '{5, 5, 5, 5, 5, 2, 2};
  localparam int unsigned ResQDepth = 4;

  // ------------------------------------------------------ lane sequencer
  logic [2:0]          ctx_valid, ctx_wr_ok, ctx_retire;
  vop_t [2:0]          ctx;
  logic [2:0][VlW-1:0] ctx_nw;
  logic [6:0]          sreq, sgnt, sroom;
  logic [6:0][$clog2(NrBanks)-1:0]      sbank;
  logic [6:0][$clog2(WordsPerBank)-1:0] srow;
  logic [3:0]          wev;
  id_t  [3:0]          wid;
  logic [3:0][VlW-1:0] widx;
  logic                st_drained, sw_empty;

  lane_sequencer #(.LaneId(LaneId)) i_seq (
    .clk_i, .rst_ni,
    .vop_valid_i, .vop_i, .vop_ready_o,
    .ctx_valid_o(ctx_valid), .ctx_o(ctx), .ctx_nw_o(ctx_nw), .ctx_wr_ok_o(ctx_wr_ok),
    .ctx_retire_o(ctx_retire),
    .sreq_o(sreq), .sbank_o(sbank), .srow_o(srow), .sgnt_i(sgnt), .sroom_i(sroom),
    .wev_i(wev), .wid_i(wid), .widx_i(widx),
    .st_drained_i(st_drained), .sldu_done_i, .sldu_done_id_i,
    .sldu_wq_empty_i(sw_empty), .done_o
  );

  // ------------------------------------------------------ register file
  logic [NReq-1:0] req, we, hi, gnt, rvalid;
  logic [NReq-1:0][$clog2(NrBanks)-1:0]      bank;
  logic [NReq-1:0][$clog2(WordsPerBank)-1:0] row;
  word_t [NReq-1:0] wdata, rdata;

  vrf #(.NumReq(NReq)) i_vrf (
    .clk_i, .rst_ni, .req_i(req), .we_i(we), .hi_i(hi), .bank_i(bank), .row_i(row),
    .wdata_i(wdata), .gnt_o(gnt), .rvalid_o(rvalid), .rdata_o(rdata)
  );

  // ------------------------------------------------------ operand queues
  logic [6:0]  oq_pop, oq_empty;
  word_t [6:0] oq_data;
  logic [6:0][2:0] oq_cnt;

  for (genvar s = 0; s < 7; s++) begin : gen_oq
    logic [$clog2(OpQDepth[s]+1)-1:0] cnt;
    operand_queue #(.Width(64), .Depth(OpQDepth[s])) i_oq (
      .clk_i, .rst_ni, .push_i(rvalid[s]), .data_i(rdata[s]),
      .pop_i(oq_pop[s]), .data_o(oq_data[s]), .full_o(), .empty_o(oq_empty[s]), .count_o(cnt)
    );
    assign oq_cnt[s] = 3'(cnt);
    assign sroom[s]  = (32'(oq_cnt[s]) + (rvalid[s] ? 1 : 0)) < OpQDepth[s];
  end
  assign sgnt = gnt[6:0];

  // ------------------------------------------------------ ALU
  logic  alu_issue, alu_out_valid;
  word_t alu_a, alu_result;
  logic [VlW-1:0] alu_iss_q, alu_wb_q;
  logic  rq_alu_push, rq_alu_pop, rq_alu_empty;
  word_t rq_alu_data;
  logic [2:0] rq_alu_cnt;
  logic  is_alu;

  assign is_alu = ctx_valid[0] && ctx[0].unit == UNIT_ALU;
  assign alu_a  = ctx[0].use_scalar ? replicate(ctx[0].scalar, ctx[0].sew) : oq_data[0];
  assign alu_issue = is_alu && (alu_iss_q < ctx_nw[0]) &&
                     (ctx[0].use_scalar || !oq_empty[0]) && !oq_empty[1] &&
                     ((32'(rq_alu_cnt) + (alu_out_valid ? 1 : 0)) < ResQDepth);

  simd_alu i_alu (
    .clk_i, .rst_ni, .valid_i(alu_issue), .op_i(ctx[0].op), .sew_i(ctx[0].sew),
    .a_i(alu_a), .b_i(oq_data[1]), .valid_o(alu_out_valid), .result_o(alu_result)
  );

  operand_queue #(.Width(64), .Depth(ResQDepth)) i_rq_alu (
    .clk_i, .rst_ni, .push_i(alu_out_valid), .data_i(alu_result),
    .pop_i(rq_alu_pop), .data_o(rq_alu_data), .full_o(), .empty_o(rq_alu_empty), .count_o(rq_alu_cnt)
  );

  // ------------------------------------------------------ FPU / MUL
  logic  mf_issue, mf_fpu, mul_out_valid;
  word_t mf_a, mul_result;
  logic [VlW-1:0] mf_iss_q, mf_wb_q;
  logic [2:0] mf_inflight_q;
  logic  rq_mf_push, rq_mf_pop, rq_mf_empty;
  word_t rq_mf_data, rq_mf_in;
  logic [2:0] rq_mf_cnt;
  logic  need_b, need_c;

  assign mf_fpu = is_fpu_op(ctx[1].op);
  assign need_b = ctx[1].op != OP_VFSQRT;
  assign need_c = ctx[1].op inside {OP_VMADD, OP_VFMADD};
  assign mf_a   = ctx[1].use_scalar ? replicate(ctx[1].scalar, ctx[1].sew) : oq_data[2];
  assign mf_issue = ctx_valid[1] && (mf_iss_q < ctx_nw[1]) &&
                    (ctx[1].use_scalar || !oq_empty[2]) && (!need_b || !oq_empty[3]) &&
                    (!need_c || !oq_empty[4]) &&
                    ((32'(rq_mf_cnt) + 32'(mf_inflight_q)) < ResQDepth);

  simd_mul i_mul (
    .clk_i, .rst_ni, .valid_i(mf_issue && !mf_fpu), .op_i(ctx[1].op), .sew_i(ctx[1].sew),
    .a_i(mf_a), .b_i(oq_data[3]), .c_i(oq_data[4]), .valid_o(mul_out_valid), .result_o(mul_result)
  );

  assign fpu_valid_o = mf_issue && mf_fpu;
  assign fpu_op_o    = ctx[1].op;
  assign fpu_sew_o   = ctx[1].sew;
  assign fpu_a_o     = mf_a;
  assign fpu_b_o     = oq_data[3];
  assign fpu_c_o     = oq_data[4];

  assign rq_mf_push = mul_out_valid || fpu_valid_i;
  assign rq_mf_in   = mul_out_valid ? mul_result : fpu_result_i;

  operand_queue #(.Width(64), .Depth(ResQDepth)) i_rq_mf (
    .clk_i, .rst_ni, .push_i(rq_mf_push), .data_i(rq_mf_in),
    .pop_i(rq_mf_pop), .data_o(rq_mf_data), .full_o(), .empty_o(rq_mf_empty), .count_o(rq_mf_cnt)
  );

  // ------------------------------------------------------ load/store and slide
  logic  lq_empty, lq_full, lq_pop;
  word_t lq_data;
  logic [VlW-1:0] ld_wb_q;
  logic  swq_full, swq_pop;
  logic [VlW+63:0] swq_data;

  assign st_valid_o  = !oq_empty[5];
  assign st_data_o   = oq_data[5];
  assign idx_valid_o = !oq_empty[6];
  assign idx_data_o  = oq_data[6];
  assign st_drained  = oq_empty[5] && oq_empty[6] && !rvalid[5] && !rvalid[6];

  operand_queue #(.Width(64), .Depth(2)) i_ldq (
    .clk_i, .rst_ni, .push_i(ld_valid_i && ld_ready_o), .data_i(ld_data_i),
    .pop_i(lq_pop), .data_o(lq_data), .full_o(lq_full), .empty_o(lq_empty), .count_o()
  );
  assign ld_ready_o = !lq_full;

  assign sl_valid_o = ctx_valid[0] && ctx[0].unit == UNIT_SLDU && !oq_empty[0];
  assign sl_data_o  = oq_data[0];

  operand_queue #(.Width(VlW + 64), .Depth(2)) i_swq (
    .clk_i, .rst_ni, .push_i(sw_valid_i && sw_ready_o), .data_i({sw_idx_i, sw_data_i}),
    .pop_i(swq_pop), .data_o(swq_data), .full_o(swq_full), .empty_o(sw_empty), .count_o()
  );
  assign sw_ready_o = !swq_full;

  // operand queue pops
  always_comb begin
    oq_pop    = '0;
    oq_pop[0] = (alu_issue && !ctx[0].use_scalar) || (sl_valid_o && sl_pop_i);
    oq_pop[1] = alu_issue;
    oq_pop[2] = mf_issue && !ctx[1].use_scalar;
    oq_pop[3] = mf_issue && need_b;
    oq_pop[4] = mf_issue && need_c;
    oq_pop[5] = st_valid_o && st_pop_i;
    oq_pop[6] = idx_valid_o && idx_pop_i;
  end

  // ------------------------------------------------------ VRF requests
  logic [3:0]          wb_req;
  vreg_t [3:0]         wb_reg;
  logic [3:0][VlW-1:0] wb_idx;
  word_t [3:0]         wb_data;

  always_comb begin
    wb_req[0]  = !rq_alu_empty && ctx_wr_ok[0];
    wb_reg[0]  = ctx[0].vd;  wb_idx[0] = alu_wb_q;  wb_data[0] = rq_alu_data;
    wb_req[1]  = !rq_mf_empty && ctx_wr_ok[1];
    wb_reg[1]  = ctx[1].vd;  wb_idx[1] = mf_wb_q;   wb_data[1] = rq_mf_data;
    wb_req[2]  = !lq_empty && ctx_wr_ok[2] && ctx_valid[2] && ctx[2].unit == UNIT_LD;
    wb_reg[2]  = ctx[2].vd;  wb_idx[2] = ld_wb_q;   wb_data[2] = lq_data;
    wb_req[3]  = !sw_empty && ctx_wr_ok[0];
    wb_reg[3]  = ctx[0].vd;  wb_idx[3] = swq_data[VlW+63:64]; wb_data[3] = swq_data[63:0];

    for (int s = 0; s < 7; s++) begin
      req[s]   = sreq[s];
      we[s]    = 1'b0;
      hi[s]    = (s < 5);
      bank[s]  = sbank[s];
      row[s]   = srow[s];
      wdata[s] = '0;
    end
    for (int w = 0; w < 4; w++) begin
      req[7+w]   = wb_req[w];
      we[7+w]    = 1'b1;
      hi[7+w]    = (w < 2);
      bank[7+w]  = vrf_bank(wb_reg[w], wb_idx[w]);
      row[7+w]   = vrf_row(wb_reg[w], wb_idx[w]);
      wdata[7+w] = wb_data[w];
    end
  end

  assign rq_alu_pop = wb_req[0] && gnt[7];
  assign rq_mf_pop  = wb_req[1] && gnt[8];
  assign lq_pop     = wb_req[2] && gnt[9];
  assign swq_pop    = wb_req[3] && gnt[10];

  always_comb begin
    wev = {swq_pop, lq_pop, rq_mf_pop, rq_alu_pop};
    wid = {ctx[0].id, ctx[2].id, ctx[1].id, ctx[0].id};
    widx = wb_idx;
  end

  // ------------------------------------------------------ counters
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      alu_iss_q     <= '0;
      alu_wb_q      <= '0;
      mf_iss_q      <= '0;
      mf_wb_q       <= '0;
      mf_inflight_q <= '0;
      ld_wb_q       <= '0;
    end else begin
      if (alu_issue)  alu_iss_q <= alu_iss_q + 1'b1;
      if (rq_alu_pop) alu_wb_q  <= alu_wb_q + 1'b1;
      if (mf_issue)   mf_iss_q  <= mf_iss_q + 1'b1;
      if (rq_mf_pop)  mf_wb_q   <= mf_wb_q + 1'b1;
      if (lq_pop)     ld_wb_q   <= ld_wb_q + 1'b1;
      mf_inflight_q <= mf_inflight_q + (mf_issue ? 3'd1 : 3'd0) - (rq_mf_push ? 3'd1 : 3'd0);
      if (ctx_retire[0]) begin alu_iss_q <= '0; alu_wb_q <= '0; end
      if (ctx_retire[1]) begin mf_iss_q  <= '0; mf_wb_q  <= '0; end
      if (ctx_retire[2]) ld_wb_q <= '0;
    end
  end

  a_fpu_in_order: assert property (@(posedge clk_i) disable iff (!rst_ni)
    fpu_valid_i |-> !mul_out_valid);
endmodule
