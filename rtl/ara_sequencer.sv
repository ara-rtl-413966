// ara_sequencer: main sequencer of the vector unit.
//
// The only block with a global view of execution. It takes decoded vector
// instructions from the instruction queue, keeps track of up to NrInsn (8)
// instructions running at once, broadcasts each as an operation to all lanes
// and, where needed, to the load/store unit or the slide unit, and answers the
// scalar core.
//
// Hazards, as described in the paper:
//  - structural: an instruction is held back (the sequencer stalls) while no
//    instruction slot is free or while the operation queue of its target unit,
//    in the lanes or in a global unit, is full. The ALU and the slide unit
//    share the ALU operand queues and the multiplier and FPU share theirs, so
//    each pair is serialised by sharing one operation queue in the lanes;
//  - data: for every new instruction the sequencer compares its registers
//    with those of the running ones and marks RAW, WAR and WAW dependences in
//    the operation (raw / wawar masks). It does not stall for them; the lanes
//    resolve them word by word.
// An instruction slot is freed when every lane and the global unit involved
// report completion, and only reused once no running instruction still refers
// to it in its dependence masks.
//
// Answers to the scalar core: instructions are acknowledged as soon as they
// are known not to raise an exception, which is when they are issued; setvl
// answers with the new vector length at once; vext answers with the element
// once the slide unit has read it (the sequencer takes nothing new meanwhile).
// Exceptions (this design's checks): memory addresses not 8-byte aligned,
// strides not a multiple of 8, and constant-stride, indexed or slide-unit
// instructions with an element width other than 64 bit, or vins/vext indices
// beyond the vector length. Such an instruction is answered with the exception
// flag and not executed.
module ara_sequencer import ara_pkg::*; (
  input  logic                          clk_i,
  input  logic                          rst_ni,
  // instruction queue
  input  logic                          req_valid_i,
  input  ara_req_t                      req_i,
  output logic                          req_ready_o,
  // answer to the scalar core
  output logic                          resp_valid_o,
  output ara_resp_t                     resp_o,
  // operation broadcast
  output logic                          vop_valid_o,
  output vop_t                          vop_o,
  input  logic                          lanes_ready_i,
  input  logic                          vlsu_ready_i,
  input  logic                          sldu_ready_i,
  // completion
  input  logic [NrLanes-1:0][NrInsn-1:0] lane_done_i,
  input  logic                          vlsu_done_i,
  input  id_t                           vlsu_done_id_i,
  input  logic                          sldu_done_i,
  input  id_t                           sldu_done_id_i,
  input  word_t                         sldu_result_i,
  // events, one-cycle pulses
  output logic                          ev_struct_stall_o,
  output logic                          ev_hazard_o,
  output logic                          ev_exception_o,
  output logic                          idle_o
);
  // ------------------------------------------------------ state
  logic [VlW-1:0]                      vl_q;
  logic [NrInsn-1:0]                   valid_q, glob_q;
  logic [NrInsn-1:0][NrLanes-1:0]      lanes_q;
  logic [NrInsn-1:0][NrInsn-1:0]       dep_q;
  vreg_t [NrInsn-1:0]                  vd_q, vs1_q, vs2_q;
  logic [NrInsn-1:0][2:0]              rd_q;
  logic [NrInsn-1:0]                   wr_q;
  logic                                ext_wait_q;
  id_t                                 ext_id_q;
  word_t                               ext_res_q;

  // ------------------------------------------------------ decode of the head
  unit_e          unit;
  logic [2:0]     rd;
  logic           wr, exc, fire, targets_ready, id_free;
  logic [VlW-1:0] vlmax, new_vl;
  id_t            free_id;
  logic [NrInsn-1:0] raw, wawar, referenced;

  always_comb begin
    unit  = unit_of(req_i.op);
    rd    = reads_of(req_i.op, req_i.use_scalar);
    wr    = writes_vd(req_i.op);
    vlmax = VlW'((WordsPerReg * NrLanes * 8) >> req_i.sew);
    new_vl = (req_i.scalar > 64'(vlmax)) ? vlmax : req_i.scalar[VlW-1:0];

    exc = 1'b0;
    if (unit inside {UNIT_LD, UNIT_ST} && req_i.scalar[2:0] != 3'b0) exc = 1'b1;
    if (req_i.op inside {OP_VLDS, OP_VSTS} && req_i.stride[2:0] != 3'b0) exc = 1'b1;
    if (req_i.op inside {OP_VLDS, OP_VSTS, OP_VLDX, OP_VSTX} && req_i.sew != EW64) exc = 1'b1;
    if (unit == UNIT_SLDU && req_i.sew != EW64) exc = 1'b1;
    if (req_i.op inside {OP_VINS, OP_VEXT} && req_i.scalar >= 64'(vl_q)) exc = 1'b1;

    // dependences on running instructions
    referenced = '0;
    for (int j = 0; j < NrInsn; j++)
      if (valid_q[j]) referenced |= dep_q[j];
    raw   = '0;
    wawar = '0;
    for (int j = 0; j < NrInsn; j++) begin
      if (valid_q[j]) begin
        if (wr_q[j] && ((rd[0] && req_i.vs1 == vd_q[j]) || (rd[1] && req_i.vs2 == vd_q[j]) ||
                        (rd[2] && req_i.vd == vd_q[j])))
          raw[j] = 1'b1;
        if (wr && wr_q[j] && req_i.vd == vd_q[j]) wawar[j] = 1'b1;                 // WAW
        if (wr && ((rd_q[j][0] && vs1_q[j] == req_i.vd) || (rd_q[j][1] && vs2_q[j] == req_i.vd) ||
                   (rd_q[j][2] && vd_q[j] == req_i.vd)))
          wawar[j] = 1'b1;                                                       // WAR
      end
    end

    id_free = 1'b0;
    free_id = '0;
    for (int i = NrInsn - 1; i >= 0; i--)
      if (!valid_q[i] && !referenced[i]) begin id_free = 1'b1; free_id = id_t'(i); end

    unique case (unit)
      UNIT_LD, UNIT_ST: targets_ready = lanes_ready_i && vlsu_ready_i;
      UNIT_SLDU:        targets_ready = lanes_ready_i && sldu_ready_i;
      default:          targets_ready = lanes_ready_i;
    endcase
  end

  logic is_cfg;
  assign is_cfg = (unit == UNIT_NONE);

  // operation
  always_comb begin
    vop_o            = '0;
    vop_o.id         = free_id;
    vop_o.op         = req_i.op;
    vop_o.unit       = unit;
    vop_o.sew        = req_i.sew;
    vop_o.vd         = req_i.vd;
    vop_o.vs1        = req_i.vs1;
    vop_o.vs2        = req_i.vs2;
    vop_o.use_scalar = req_i.use_scalar;
    vop_o.scalar     = req_i.scalar;
    vop_o.stride     = req_i.stride;
    vop_o.vl         = vl_q;
    vop_o.vlw        = words_of(vl_q, req_i.sew);
    vop_o.raw        = raw;
    vop_o.wawar      = wawar;
  end

  assign fire        = req_valid_i && !ext_wait_q && !is_cfg && !exc && id_free && targets_ready;
  assign vop_valid_o = fire;
  assign req_ready_o = req_valid_i && !ext_wait_q && (is_cfg || exc || fire);

  // ------------------------------------------------------ completion
  logic [NrInsn-1:0] complete;
  always_comb begin
    for (int i = 0; i < NrInsn; i++)
      complete[i] = valid_q[i] && (&lanes_q[i]) && !glob_q[i];
  end

  // answers
  always_comb begin
    resp_valid_o = 1'b0;
    resp_o       = '0;
    if (ext_wait_q) begin
      resp_valid_o  = complete[ext_id_q];
      resp_o.result = ext_res_q;
    end else if (req_ready_o) begin
      resp_valid_o     = (req_i.op != OP_VEXT) || exc;
      resp_o.exception = exc;
      resp_o.result    = (is_cfg && !exc) ? 64'(new_vl) : '0;
    end
  end

  assign ev_struct_stall_o = req_valid_i && !ext_wait_q && !is_cfg && !exc && !(id_free && targets_ready);
  assign ev_hazard_o       = fire && ((raw | wawar) != '0);
  assign ev_exception_o    = req_ready_o && exc;
  assign idle_o            = (valid_q == '0);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      vl_q       <= '0;
      valid_q    <= '0;
      glob_q     <= '0;
      lanes_q    <= '0;
      dep_q      <= '0;
      vd_q       <= '0;
      vs1_q      <= '0;
      vs2_q      <= '0;
      rd_q       <= '0;
      wr_q       <= '0;
      ext_wait_q <= 1'b0;
      ext_id_q   <= '0;
      ext_res_q  <= '0;
    end else begin
      for (int l = 0; l < NrLanes; l++)
        for (int i = 0; i < NrInsn; i++)
          if (lane_done_i[l][i]) lanes_q[i][l] <= 1'b1;
      if (vlsu_done_i) glob_q[vlsu_done_id_i] <= 1'b0;
      if (sldu_done_i) begin
        glob_q[sldu_done_id_i] <= 1'b0;
        ext_res_q              <= sldu_result_i;
      end
      for (int i = 0; i < NrInsn; i++)
        if (complete[i]) valid_q[i] <= 1'b0;
      if (ext_wait_q && complete[ext_id_q]) ext_wait_q <= 1'b0;

      if (req_ready_o && is_cfg && !exc) vl_q <= new_vl;
      if (fire) begin
        valid_q[free_id] <= 1'b1;
        glob_q[free_id]  <= unit inside {UNIT_LD, UNIT_ST, UNIT_SLDU};
        lanes_q[free_id] <= '0;
        dep_q[free_id]   <= raw | wawar;
        vd_q[free_id]    <= req_i.vd;
        vs1_q[free_id]   <= req_i.vs1;
        vs2_q[free_id]   <= req_i.vs2;
        rd_q[free_id]    <= rd;
        wr_q[free_id]    <= wr;
        if (req_i.op == OP_VEXT) begin
          ext_wait_q <= 1'b1;
          ext_id_q   <= free_id;
        end
      end
    end
  end

  a_fire_free: assert property (@(posedge clk_i) disable iff (!rst_ni) fire |-> !valid_q[free_id]);
endmodule
