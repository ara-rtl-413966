// lane_sequencer: issues the operations of one lane and fetches their operands.
//
// Every operation broadcast by the main sequencer is accepted by all lanes at
// once and queued per execution context: ALU (shared with the slide unit, whose
// operands travel through the ALU operand queues, so the two never run at the
// same time), FPU/MUL (one context, the multiplier and FPU share their queues),
// and load/store. The head of each queue is the context's running operation.
//
// For it the lane sequencer generates up to seven independent streams of VRF
// read requests (ALU a/b, FPU/MUL a/b/c, load/store data and index), one word
// per cycle and stream, as long as the target operand queue has room. Operand
// fetch is decoupled from result write-back; dependent operations are kept at
// the pace of their producer by throttling the requests: word k of a register
// still being written by an older operation j is requested only once j has
// written word k in this lane (wr_ptr). There is no forwarding. Writes of an
// operation that has a WAR or WAW dependence wait until the older operation
// has finished in this lane. The paper describes the throttling ("operands of
// i are requested only if j produced results in the previous cycle"); the word
// counters used to implement it, and the WAR/WAW rule, are this design's.
//
// The lane sequencer also counts the words written for each context, retires a
// context when all of its work in the lane is done, and reports that to the
// main sequencer with a one-cycle pulse on done_o[id].
module lane_sequencer import ara_pkg::*; #(
  parameter int unsigned LaneId    = 0,
  parameter int unsigned OpQDepth  = 4
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  // operation from the main sequencer
  input  logic                 vop_valid_i,
  input  vop_t                 vop_i,
  output logic                 vop_ready_o,
  // running operation of each context: 0 ALU/SLDU, 1 FPU/MUL, 2 load/store
  output logic [2:0]           ctx_valid_o,
  output vop_t [2:0]           ctx_o,
  output logic [2:0][VlW-1:0]  ctx_nw_o,
  output logic [2:0]           ctx_wr_ok_o,
  output logic [2:0]           ctx_retire_o,
  // operand request streams: 0 ALU a, 1 ALU b, 2 MFPU a, 3 MFPU b, 4 MFPU c,
  // 5 load/store data, 6 load/store index
  output logic [6:0]           sreq_o,
  output logic [6:0][$clog2(NrBanks)-1:0]      sbank_o,
  output logic [6:0][$clog2(WordsPerBank)-1:0] srow_o,
  input  logic [6:0]           sgnt_i,
  input  logic [6:0]           sroom_i,
  // VRF writes: 0 ALU, 1 FPU/MUL, 2 load, 3 slide unit
  input  logic [3:0]           wev_i,
  input  id_t  [3:0]           wid_i,
  input  logic [3:0][VlW-1:0]  widx_i,
  // completion information
  input  logic                 st_drained_i,
  input  logic                 sldu_done_i,
  input  id_t                  sldu_done_id_i,
  input  logic                 sldu_wq_empty_i,
  output logic [NrInsn-1:0]    done_o
);
  localparam int unsigned NCtx = 3;

  // ------------------------------------------------------ operation queues
  logic [NCtx-1:0] q_push, q_full, q_empty;
  vop_t [NCtx-1:0] q_head;
  logic [1:0]      tgt;

  always_comb begin
    unique case (vop_i.unit)
      UNIT_MFPU:        tgt = 2'd1;
      UNIT_LD, UNIT_ST: tgt = 2'd2;
      default:          tgt = 2'd0;
    endcase
  end

  assign vop_ready_o = !q_full[tgt];

  for (genvar c = 0; c < NCtx; c++) begin : gen_opq
    assign q_push[c] = vop_valid_i && vop_ready_o && (tgt == 2'(c));
    operand_queue #(.Width($bits(vop_t)), .Depth(OpQDepth)) i_opq (
      .clk_i, .rst_ni,
      .push_i(q_push[c]), .data_i(vop_i),
      .pop_i(ctx_retire_o[c]), .data_o(q_head[c]),
      .full_o(q_full[c]), .empty_o(q_empty[c]), .count_o()
    );
    assign ctx_valid_o[c] = !q_empty[c];
    assign ctx_o[c]       = q_head[c];
    assign ctx_nw_o[c]    = lane_words(q_head[c].vlw, LaneId);
  end

  // ------------------------------------------------------ hazard tracking
  logic [NrInsn-1:0]           busy_q;
  logic [NrInsn-1:0][VlW-1:0]  wr_ptr_q;

  function automatic logic readable(logic [NrInsn-1:0] raw, logic [VlW-1:0] k,
                                    logic [NrInsn-1:0] busy, logic [NrInsn-1:0][VlW-1:0] wp);
    logic ok;
    ok = 1'b1;
    for (int j = 0; j < NrInsn; j++)
      if (raw[j] && busy[j] && !(k < wp[j])) ok = 1'b0;
    return ok;
  endfunction

  for (genvar c = 0; c < NCtx; c++) begin : gen_wrok
    assign ctx_wr_ok_o[c] = ((q_head[c].wawar & busy_q) == '0);
  end

  // ------------------------------------------------------ request streams
  logic [6:0]                  s_en;
  vreg_t [6:0]                 s_reg;
  logic [6:0][VlW-1:0]         s_first, s_n;
  logic [6:0][VlW-1:0]         s_cnt_q;
  logic [6:0][NrInsn-1:0]      s_raw;
  logic [6:0]                  s_done;
  sldu_rows_t                  srows;

  always_comb begin
    s_en    = '0;
    s_reg   = '0;
    s_first = '0;
    s_n     = '0;
    s_raw   = '0;
    srows   = sldu_src_rows(q_head[0].op, q_head[0].scalar, q_head[0].vlw);
    // ALU / slide context
    if (ctx_valid_o[0]) begin
      if (q_head[0].unit == UNIT_ALU) begin
        s_en[0] = !q_head[0].use_scalar; s_reg[0] = q_head[0].vs1; s_n[0] = ctx_nw_o[0];
        s_en[1] = 1'b1;                  s_reg[1] = q_head[0].vs2; s_n[1] = ctx_nw_o[0];
      end else if (q_head[0].op != OP_VINS) begin
        s_en[0] = 1'b1; s_reg[0] = q_head[0].vs2; s_first[0] = srows.r0; s_n[0] = srows.n;
      end
      s_raw[0] = q_head[0].raw;
      s_raw[1] = q_head[0].raw;
    end
    // FPU / MUL context
    if (ctx_valid_o[1]) begin
      s_en[2] = !q_head[1].use_scalar;                      s_reg[2] = q_head[1].vs1;
      s_en[3] = q_head[1].op != OP_VFSQRT;                  s_reg[3] = q_head[1].vs2;
      s_en[4] = q_head[1].op inside {OP_VMADD, OP_VFMADD};  s_reg[4] = q_head[1].vd;
      for (int s = 2; s <= 4; s++) begin
        s_n[s]   = ctx_nw_o[1];
        s_raw[s] = q_head[1].raw;
      end
    end
    // load/store context
    if (ctx_valid_o[2]) begin
      s_en[5] = q_head[2].unit == UNIT_ST;                  s_reg[5] = q_head[2].vs1;
      s_en[6] = q_head[2].op inside {OP_VLDX, OP_VSTX};     s_reg[6] = q_head[2].vs2;
      s_n[5] = ctx_nw_o[2];
      s_n[6] = ctx_nw_o[2];
      s_raw[5] = q_head[2].raw;
      s_raw[6] = q_head[2].raw;
    end
  end

  for (genvar s = 0; s < 7; s++) begin : gen_stream
    logic [VlW-1:0] k;
    assign k         = s_first[s] + s_cnt_q[s];
    assign s_done[s] = !s_en[s] || (s_cnt_q[s] >= s_n[s]);
    assign sreq_o[s] = s_en[s] && !s_done[s] && sroom_i[s] &&
                       readable(s_raw[s], k, busy_q, wr_ptr_q);
    assign sbank_o[s] = vrf_bank(s_reg[s], k);
    assign srow_o[s]  = vrf_row(s_reg[s], k);
  end

  // ------------------------------------------------------ completion
  logic [NCtx-1:0][VlW-1:0] wcnt_q;
  logic                     sldu_seen_q;
  logic [NCtx-1:0]          fin;

  always_comb begin
    fin = '0;
    // ALU / slide
    if (q_head[0].unit == UNIT_ALU)
      fin[0] = s_done[0] && s_done[1] && (wcnt_q[0] == ctx_nw_o[0]);
    else
      fin[0] = s_done[0] && (sldu_seen_q || (sldu_done_i && sldu_done_id_i == q_head[0].id))
               && sldu_wq_empty_i;
    // FPU / MUL
    fin[1] = s_done[2] && s_done[3] && s_done[4] && (wcnt_q[1] == ctx_nw_o[1]);
    // load / store
    if (q_head[2].unit == UNIT_LD)
      fin[2] = s_done[6] && (wcnt_q[2] == ctx_nw_o[2]);
    else
      fin[2] = s_done[5] && s_done[6] && st_drained_i;
    ctx_retire_o = fin & ctx_valid_o;
  end

  always_comb begin
    done_o = '0;
    for (int c = 0; c < NCtx; c++)
      if (ctx_retire_o[c]) done_o[q_head[c].id] = 1'b1;
  end

  // ------------------------------------------------------ state
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      busy_q      <= '0;
      wr_ptr_q    <= '0;
      s_cnt_q     <= '0;
      wcnt_q      <= '0;
      sldu_seen_q <= 1'b0;
    end else begin
      // stream counters
      for (int s = 0; s < 7; s++)
        if (sreq_o[s] && sgnt_i[s]) s_cnt_q[s] <= s_cnt_q[s] + 1'b1;
      // write events
      for (int w = 0; w < 4; w++) begin
        if (wev_i[w]) begin
          if (wr_ptr_q[wid_i[w]] < widx_i[w] + 1'b1) wr_ptr_q[wid_i[w]] <= widx_i[w] + 1'b1;
          for (int c = 0; c < NCtx; c++)
            if (ctx_valid_o[c] && q_head[c].id == wid_i[w]) wcnt_q[c] <= wcnt_q[c] + 1'b1;
        end
      end
      if (sldu_done_i && ctx_valid_o[0] && sldu_done_id_i == q_head[0].id) sldu_seen_q <= 1'b1;
      // retire
      for (int c = 0; c < NCtx; c++) begin
        if (ctx_retire_o[c]) begin
          busy_q[q_head[c].id] <= 1'b0;
          wcnt_q[c] <= '0;
          if (c == 0) begin
            sldu_seen_q <= 1'b0;
            s_cnt_q[0]  <= '0;
            s_cnt_q[1]  <= '0;
          end else if (c == 1) begin
            s_cnt_q[2] <= '0;
            s_cnt_q[3] <= '0;
            s_cnt_q[4] <= '0;
          end else begin
            s_cnt_q[5] <= '0;
            s_cnt_q[6] <= '0;
          end
        end
      end
      // accept
      if (vop_valid_i && vop_ready_o) begin
        busy_q[vop_i.id]   <= 1'b1;
        wr_ptr_q[vop_i.id] <= '0;
      end
    end
  end

  a_accept_free_id: assert property (@(posedge clk_i) disable iff (!rst_ni)
    (vop_valid_i && vop_ready_o) |-> !busy_q[vop_i.id]);
endmodule
