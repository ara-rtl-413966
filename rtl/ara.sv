// ara: top level of the vector unit.
//
// A 64-bit vector processor built from NrLanes identical lanes, driven as a
// tightly coupled coprocessor by a scalar RISC-V core. The scalar core fetches
// and partially decodes vector instructions; the dispatcher forwards them,
// once non-speculative, through the instruction queue to the main sequencer.
// The sequencer tracks up to eight running instructions and broadcasts them to
// the lanes, the vector load/store unit (VLSU) and the slide unit (SLDU).
// The lanes hold the register file and do all element-wise arithmetic; the
// VLSU (single memory port, 32*NrLanes bits wide) and the SLDU are the only
// blocks that exchange data with every lane.
//
// External parts brought out as ports: the scalar core (instruction and answer
// interface), the memory (AXI-like master port) and one floating point unit
// per lane (request/result port per lane), which is an existing IP block.
module ara import ara_pkg::*; (
  input  logic                          clk_i,
  input  logic                          rst_ni,
  // scalar core interface
  input  logic                          insn_valid_i,
  input  ara_req_t                      insn_i,
  input  logic                          insn_nonspec_i,
  input  logic                          flush_i,
  output logic                          insn_ready_o,
  output logic                          resp_valid_o,
  output ara_resp_t                     resp_o,
  output logic [7:0]                    pending_o,
  // memory port
  output logic                          ar_valid_o,
  output axi_ax_t                       ar_o,
  input  logic                          ar_ready_i,
  input  logic                          r_valid_i,
  input  logic [AxiDataW-1:0]           r_data_i,
  input  logic                          r_last_i,
  output logic                          r_ready_o,
  output logic                          aw_valid_o,
  output axi_ax_t                       aw_o,
  input  logic                          aw_ready_i,
  output logic                          w_valid_o,
  output logic [AxiDataW-1:0]           w_data_o,
  output logic [AxiBytes-1:0]           w_strb_o,
  output logic                          w_last_o,
  input  logic                          w_ready_i,
  input  logic                          b_valid_i,
  output logic                          b_ready_o,
  // floating point units, one per lane
  output logic [NrLanes-1:0]            fpu_valid_o,
  output op_e  [NrLanes-1:0]            fpu_op_o,
  output sew_e [NrLanes-1:0]            fpu_sew_o,
  output word_t [NrLanes-1:0]           fpu_a_o,
  output word_t [NrLanes-1:0]           fpu_b_o,
  output word_t [NrLanes-1:0]           fpu_c_o,
  input  logic [NrLanes-1:0]            fpu_valid_i,
  input  word_t [NrLanes-1:0]           fpu_result_i,
  // event pulses (structural stall, hazard flagged, exception)
  output logic                          ev_struct_stall_o,
  output logic                          ev_hazard_o,
  output logic                          ev_exception_o,
  output logic                          idle_o
);
  // ------------------------------------------------------ front end
  logic      req_valid, req_ready, sresp_valid;
  ara_req_t  req;
  ara_resp_t sresp;

  ara_dispatcher i_dispatcher (
    .clk_i, .rst_ni,
    .insn_valid_i, .insn_i, .nonspec_i(insn_nonspec_i), .flush_i, .insn_ready_o,
    .resp_valid_o, .resp_o, .pending_o,
    .req_valid_o(req_valid), .req_o(req), .req_ready_i(req_ready),
    .resp_valid_i(sresp_valid), .resp_i(sresp)
  );

  // ------------------------------------------------------ sequencer
  logic  vop_valid, vlsu_ready, sldu_ready, vlsu_done, sldu_done;
  vop_t  vop;
  id_t   vlsu_done_id, sldu_done_id;
  word_t sldu_result;
  logic [NrLanes-1:0]              lane_ready;
  logic [NrLanes-1:0][NrInsn-1:0]  lane_done;

  ara_sequencer i_sequencer (
    .clk_i, .rst_ni,
    .req_valid_i(req_valid), .req_i(req), .req_ready_o(req_ready),
    .resp_valid_o(sresp_valid), .resp_o(sresp),
    .vop_valid_o(vop_valid), .vop_o(vop),
    .lanes_ready_i(&lane_ready), .vlsu_ready_i(vlsu_ready), .sldu_ready_i(sldu_ready),
    .lane_done_i(lane_done),
    .vlsu_done_i(vlsu_done), .vlsu_done_id_i(vlsu_done_id),
    .sldu_done_i(sldu_done), .sldu_done_id_i(sldu_done_id), .sldu_result_i(sldu_result),
    .ev_struct_stall_o, .ev_hazard_o, .ev_exception_o, .idle_o
  );

  // ------------------------------------------------------ lanes
  logic [NrLanes-1:0]  st_valid, st_pop, idx_valid, idx_pop, ld_valid, ld_ready;
  word_t [NrLanes-1:0] st_data, idx_data, ld_data;
  logic [NrLanes-1:0]  sl_valid, sw_valid, sw_ready;
  word_t [NrLanes-1:0] sl_data, sw_data;
  logic                sl_pop;
  logic [VlW-1:0]      sw_idx;

  for (genvar l = 0; l < NrLanes; l++) begin : gen_lane
    lane #(.LaneId(l)) i_lane (
      .clk_i, .rst_ni,
      .vop_valid_i(vop_valid), .vop_i(vop), .vop_ready_o(lane_ready[l]), .done_o(lane_done[l]),
      .fpu_valid_o(fpu_valid_o[l]), .fpu_op_o(fpu_op_o[l]), .fpu_sew_o(fpu_sew_o[l]),
      .fpu_a_o(fpu_a_o[l]), .fpu_b_o(fpu_b_o[l]), .fpu_c_o(fpu_c_o[l]),
      .fpu_valid_i(fpu_valid_i[l]), .fpu_result_i(fpu_result_i[l]),
      .st_valid_o(st_valid[l]), .st_data_o(st_data[l]), .st_pop_i(st_pop[l]),
      .idx_valid_o(idx_valid[l]), .idx_data_o(idx_data[l]), .idx_pop_i(idx_pop[l]),
      .ld_valid_i(ld_valid[l]), .ld_data_i(ld_data[l]), .ld_ready_o(ld_ready[l]),
      .sl_valid_o(sl_valid[l]), .sl_data_o(sl_data[l]), .sl_pop_i(sl_pop),
      .sw_valid_i(sw_valid[l]), .sw_idx_i(sw_idx), .sw_data_i(sw_data[l]), .sw_ready_o(sw_ready[l]),
      .sldu_done_i(sldu_done), .sldu_done_id_i(sldu_done_id)
    );
  end

  // ------------------------------------------------------ load/store unit
  vlsu i_vlsu (
    .clk_i, .rst_ni,
    .vop_valid_i(vop_valid && vop.unit inside {UNIT_LD, UNIT_ST}), .vop_i(vop), .vop_ready_o(vlsu_ready),
    .done_o(vlsu_done), .done_id_o(vlsu_done_id),
    .ar_valid_o, .ar_o, .ar_ready_i, .r_valid_i, .r_data_i, .r_last_i, .r_ready_o,
    .aw_valid_o, .aw_o, .aw_ready_i, .w_valid_o, .w_data_o, .w_strb_o, .w_last_o, .w_ready_i,
    .b_valid_i, .b_ready_o,
    .ld_valid_o(ld_valid), .ld_data_o(ld_data), .ld_ready_i(ld_ready),
    .st_valid_i(st_valid), .st_data_i(st_data), .st_pop_o(st_pop),
    .idx_valid_i(idx_valid), .idx_data_i(idx_data), .idx_pop_o(idx_pop)
  );

  // ------------------------------------------------------ slide unit
  sldu i_sldu (
    .clk_i, .rst_ni,
    .vop_valid_i(vop_valid && vop.unit == UNIT_SLDU), .vop_i(vop), .vop_ready_o(sldu_ready),
    .sl_valid_i(sl_valid), .sl_data_i(sl_data), .sl_pop_o(sl_pop),
    .sw_valid_o(sw_valid), .sw_idx_o(sw_idx), .sw_data_o(sw_data), .sw_ready_i(sw_ready),
    .done_o(sldu_done), .done_id_o(sldu_done_id), .done_result_o(sldu_result)
  );
endmodule
