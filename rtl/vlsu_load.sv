// vlsu_load: load unit of the vector load/store unit.
//
// Takes burst descriptors from the address generator, sends the read address
// on the AXI AR channel and keeps the descriptor until its last beat returned.
// Returned beats wait in a two-entry buffer (the "2" of the paper's block
// diagram); each beat carries up to AxiDataW/64 words, starting at the
// descriptor's word offset in its first beat. Word g of the vector goes to lane
// g mod NrLanes; a beat is handed over in one cycle once every lane it feeds can
// accept, so words reach each lane in order.
//
// Timing: AR follows a descriptor in the same cycle if the AXI slave is ready;
// words reach the lanes one cycle after their beat entered the buffer at the
// earliest. done_o is high while all vlw words of the instruction were delivered.
module vlsu_load import ara_pkg::*; (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  logic                  start_i,
  input  logic [VlW-1:0]        vlw_i,
  output logic                  done_o,
  // descriptors
  input  logic                  desc_valid_i,
  input  vlsu_desc_t            desc_i,
  output logic                  desc_ready_o,
  // AXI read channels
  output logic                  ar_valid_o,
  output axi_ax_t               ar_o,
  input  logic                  ar_ready_i,
  input  logic                  r_valid_i,
  input  logic [AxiDataW-1:0]   r_data_i,
  input  logic                  r_last_i,
  output logic                  r_ready_o,
  // lanes
  output logic [NrLanes-1:0]    ld_valid_o,
  output word_t [NrLanes-1:0]   ld_data_o,
  input  logic [NrLanes-1:0]    ld_ready_i
);
  // descriptors of bursts in flight
  logic       inf_full, inf_empty, inf_pop;
  vlsu_desc_t inf_head;
  operand_queue #(.Width($bits(vlsu_desc_t)), .Depth(4)) i_inflight (
    .clk_i, .rst_ni, .push_i(ar_valid_o && ar_ready_i), .data_i(desc_i),
    .pop_i(inf_pop), .data_o(inf_head), .full_o(inf_full), .empty_o(inf_empty), .count_o()
  );

  assign ar_valid_o   = desc_valid_i && !inf_full;
  assign ar_o.addr    = desc_i.addr;
  assign ar_o.len     = desc_i.len;
  assign ar_o.size    = desc_i.size;
  assign desc_ready_o = ar_valid_o && ar_ready_i;

  // beat buffer
  logic                rb_full, rb_empty, rb_pop;
  logic [AxiDataW:0]   rb_head;
  operand_queue #(.Width(AxiDataW + 1), .Depth(2)) i_rbuf (
    .clk_i, .rst_ni, .push_i(r_valid_i && r_ready_o), .data_i({r_last_i, r_data_i}),
    .pop_i(rb_pop), .data_o(rb_head), .full_o(rb_full), .empty_o(rb_empty), .count_o()
  );
  assign r_ready_o = !rb_full;

  logic [VlW-1:0] g_q;        // words delivered for this instruction
  logic [VlW-1:0] brem_q;     // words left in the current burst
  logic           bfirst_q;   // next beat is the first of its burst

  logic [VlW-1:0] brem;
  int unsigned    pos0, cnt;
  logic [NrLanes-1:0] tgt;
  logic           can_go;

  always_comb begin
    brem = bfirst_q ? inf_head.nw : brem_q;
    pos0 = bfirst_q ? int'(inf_head.off) : 0;
    cnt  = WordsPerBeat - pos0;
    if (cnt > int'(brem)) cnt = int'(brem);
    tgt       = '0;
    ld_data_o = '0;
    for (int unsigned i = 0; i < WordsPerBeat; i++) begin
      if (i < cnt) begin
        tgt[(g_q + i) % NrLanes]       = 1'b1;
        ld_data_o[(g_q + i) % NrLanes] = rb_head[(pos0 + i) * 64 +: 64];
      end
    end
    can_go     = !rb_empty && !inf_empty && ((tgt & ~ld_ready_i) == '0);
    ld_valid_o = can_go ? tgt : '0;
    rb_pop     = can_go;
    inf_pop    = can_go && rb_head[AxiDataW];
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      g_q      <= '0;
      brem_q   <= '0;
      bfirst_q <= 1'b1;
    end else begin
      if (start_i) g_q <= '0;
      else if (can_go) g_q <= g_q + VlW'(cnt);
      if (can_go) begin
        brem_q   <= brem - VlW'(cnt);
        bfirst_q <= rb_head[AxiDataW];
      end
    end
  end

  assign done_o = (g_q == vlw_i);
endmodule
