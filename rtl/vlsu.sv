// vlsu: vector load/store unit, the single memory port of the vector unit.
//
// The port is AxiDataW = 32*NrLanes bits wide, which keeps the memory bandwidth
// at 2 bytes per double-precision FLOP of peak performance (each lane does one
// 64-bit FMA, two FLOPs, per cycle), as chosen in the paper. Inside: the address
// generator (vlsu_addrgen), the load unit (vlsu_load) and the store unit
// (vlsu_store), which talk to memory through a reduced AXI4 interface (INCR
// bursts, one outstanding ID) and to the lanes through per-lane word streams.
//
// The unit executes one memory instruction at a time: it accepts an operation
// when idle, and pulses done_o with the id once a load has delivered all its
// words to the lanes, or once a store has been acknowledged by memory.
module vlsu import ara_pkg::*; (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  logic                  vop_valid_i,
  input  vop_t                  vop_i,
  output logic                  vop_ready_o,
  output logic                  done_o,
  output id_t                   done_id_o,
  // AXI master
  output logic                  ar_valid_o,
  output axi_ax_t               ar_o,
  input  logic                  ar_ready_i,
  input  logic                  r_valid_i,
  input  logic [AxiDataW-1:0]   r_data_i,
  input  logic                  r_last_i,
  output logic                  r_ready_o,
  output logic                  aw_valid_o,
  output axi_ax_t               aw_o,
  input  logic                  aw_ready_i,
  output logic                  w_valid_o,
  output logic [AxiDataW-1:0]   w_data_o,
  output logic [AxiBytes-1:0]   w_strb_o,
  output logic                  w_last_o,
  input  logic                  w_ready_i,
  input  logic                  b_valid_i,
  output logic                  b_ready_o,
  // lanes
  output logic [NrLanes-1:0]    ld_valid_o,
  output word_t [NrLanes-1:0]   ld_data_o,
  input  logic [NrLanes-1:0]    ld_ready_i,
  input  logic [NrLanes-1:0]    st_valid_i,
  input  word_t [NrLanes-1:0]   st_data_i,
  output logic [NrLanes-1:0]    st_pop_o,
  input  logic [NrLanes-1:0]    idx_valid_i,
  input  word_t [NrLanes-1:0]   idx_data_i,
  output logic [NrLanes-1:0]    idx_pop_o
);
  logic busy_q, start, is_store_q, ag_busy, ld_done, st_done;
  vop_t op_q;

  assign vop_ready_o = !busy_q;
  assign start       = vop_valid_i && vop_ready_o;

  logic       desc_valid, desc_ready, ld_desc_ready, st_desc_ready;
  vlsu_desc_t desc;

  vlsu_addrgen i_addrgen (
    .clk_i, .rst_ni, .start_i(start), .vop_i, .busy_o(ag_busy),
    .idx_valid_i, .idx_data_i, .idx_pop_o,
    .desc_valid_o(desc_valid), .desc_o(desc), .desc_ready_i(desc_ready)
  );
  assign desc_ready = is_store_q ? st_desc_ready : ld_desc_ready;

  vlsu_load i_load (
    .clk_i, .rst_ni, .start_i(start && vop_i.unit == UNIT_LD), .vlw_i(op_q.vlw), .done_o(ld_done),
    .desc_valid_i(desc_valid && !is_store_q), .desc_i(desc), .desc_ready_o(ld_desc_ready),
    .ar_valid_o, .ar_o, .ar_ready_i, .r_valid_i, .r_data_i, .r_last_i, .r_ready_o,
    .ld_valid_o, .ld_data_o, .ld_ready_i
  );

  vlsu_store i_store (
    .clk_i, .rst_ni, .start_i(start && vop_i.unit == UNIT_ST), .vlw_i(op_q.vlw), .done_o(st_done),
    .desc_valid_i(desc_valid && is_store_q), .desc_i(desc), .desc_ready_o(st_desc_ready),
    .aw_valid_o, .aw_o, .aw_ready_i, .w_valid_o, .w_data_o, .w_strb_o, .w_last_o, .w_ready_i,
    .b_valid_i, .b_ready_o, .st_valid_i, .st_data_i, .st_pop_o
  );

  logic finished;
  assign finished  = busy_q && !start && !ag_busy && (is_store_q ? st_done : ld_done);
  assign done_o    = finished;
  assign done_id_o = op_q.id;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      busy_q     <= 1'b0;
      is_store_q <= 1'b0;
      op_q       <= '0;
    end else if (start) begin
      busy_q     <= 1'b1;
      is_store_q <= (vop_i.unit == UNIT_ST);
      op_q       <= vop_i;
    end else if (finished) begin
      busy_q <= 1'b0;
    end
  end
endmodule
