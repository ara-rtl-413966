// vlsu_store: store unit of the vector load/store unit.
//
// Takes burst descriptors from the address generator, sends them on the AXI
// AW channel and then builds the write beats: word g of the vector comes from
// the store-data queue of lane g mod NrLanes and is placed at its word position
// in the beat, with the byte strobes of that word set. A beat is sent when all
// words it needs are present; the lanes' queues are popped in the same cycle.
// Every burst is closed by a write response on the B channel.
//
// Timing: done_o is high when every word of the instruction has been written
// and every burst acknowledged.
module vlsu_store import ara_pkg::*; (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  logic                  start_i,
  input  logic [VlW-1:0]        vlw_i,
  output logic                  done_o,
  input  logic                  desc_valid_i,
  input  vlsu_desc_t            desc_i,
  output logic                  desc_ready_o,
  // AXI write channels
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
  input  logic [NrLanes-1:0]    st_valid_i,
  input  word_t [NrLanes-1:0]   st_data_i,
  output logic [NrLanes-1:0]    st_pop_o
);
  logic       inf_full, inf_empty, inf_pop;
  vlsu_desc_t inf_head;
  operand_queue #(.Width($bits(vlsu_desc_t)), .Depth(4)) i_inflight (
    .clk_i, .rst_ni, .push_i(aw_valid_o && aw_ready_i), .data_i(desc_i),
    .pop_i(inf_pop), .data_o(inf_head), .full_o(inf_full), .empty_o(inf_empty), .count_o()
  );

  assign aw_valid_o   = desc_valid_i && !inf_full;
  assign aw_o.addr    = desc_i.addr;
  assign aw_o.len     = desc_i.len;
  assign aw_o.size    = desc_i.size;
  assign desc_ready_o = aw_valid_o && aw_ready_i;

  logic [VlW-1:0] g_q, brem_q;
  logic [7:0]     beat_q;
  logic           bfirst_q;
  logic [15:0]    bpend_q;     // bursts whose response is outstanding

  logic [VlW-1:0] brem;
  int unsigned    pos0, cnt;
  logic [NrLanes-1:0] tgt;
  logic           last;

  always_comb begin
    brem = bfirst_q ? inf_head.nw : brem_q;
    pos0 = bfirst_q ? int'(inf_head.off) : 0;
    cnt  = WordsPerBeat - pos0;
    if (cnt > int'(brem)) cnt = int'(brem);
    tgt      = '0;
    w_data_o = '0;
    w_strb_o = '0;
    for (int unsigned i = 0; i < WordsPerBeat; i++) begin
      if (i < cnt) begin
        tgt[(g_q + i) % NrLanes]  = 1'b1;
        w_data_o[(pos0 + i) * 64 +: 64] = st_data_i[(g_q + i) % NrLanes];
        w_strb_o[(pos0 + i) * 8 +: 8]   = 8'hff;
      end
    end
    last      = (beat_q == inf_head.len);
    w_last_o  = last;
    w_valid_o = !inf_empty && ((tgt & ~st_valid_i) == '0);
    st_pop_o  = (w_valid_o && w_ready_i) ? tgt : '0;
    inf_pop   = w_valid_o && w_ready_i && last;
  end

  assign b_ready_o = 1'b1;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      g_q      <= '0;
      brem_q   <= '0;
      beat_q   <= '0;
      bfirst_q <= 1'b1;
      bpend_q  <= '0;
    end else begin
      if (start_i) g_q <= '0;
      else if (w_valid_o && w_ready_i) g_q <= g_q + VlW'(cnt);
      if (w_valid_o && w_ready_i) begin
        brem_q   <= brem - VlW'(cnt);
        bfirst_q <= last;
        beat_q   <= last ? 8'd0 : beat_q + 1'b1;
      end
      bpend_q <= bpend_q + ((aw_valid_o && aw_ready_i) ? 16'd1 : 16'd0) - (b_valid_i ? 16'd1 : 16'd0);
    end
  end

  assign done_o = (g_q == vlw_i) && (bpend_q == '0) && inf_empty;
endmodule
