// vlsu_addrgen: address generator of the vector load/store unit.
//
// For every memory instruction it produces a sequence of burst descriptors for
// the load or the store unit. Three access patterns, as in the paper:
//  - unit stride: the contiguous region is coalesced into bursts of full-width
//    beats. A burst ends after 256 beats or at a 4 KiB boundary (AXI rules; the
//    paper only says that unit-stride accesses are coalesced into bursts);
//  - constant stride: one single-beat, 8-byte transfer per element;
//  - indexed (gather/scatter): like constant stride, but the address of
//    element e is base + index[e], the index words coming from the lanes
//    (element e from lane e mod NrLanes).
// Addresses must be 8-byte aligned; constant-stride and indexed accesses use
// 64-bit elements (both checked by the main sequencer).
//
// Timing: one descriptor per cycle into the descriptor queue of the target
// unit; busy_o stays high until the last descriptor of the instruction left.
module vlsu_addrgen import ara_pkg::*; (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  logic                start_i,
  input  vop_t                vop_i,
  output logic                busy_o,
  // indices from the lanes
  input  logic [NrLanes-1:0]  idx_valid_i,
  input  word_t [NrLanes-1:0] idx_data_i,
  output logic [NrLanes-1:0]  idx_pop_o,
  // descriptors
  output logic                desc_valid_o,
  output vlsu_desc_t          desc_o,
  input  logic                desc_ready_i
);
  logic           busy_q;
  vop_t           op_q;
  logic [VlW-1:0] g_q;      // words (unit stride) or elements (others) already covered

  logic [AddrW-1:0] cur;
  logic [$clog2(NrLanes)-1:0] lane;
  logic [VlW-1:0] rem, max_beats, max_page, nw;
  logic [7:0]     off;
  logic           unit_stride, indexed, have_addr;

  assign busy_o      = busy_q;
  assign unit_stride = op_q.op inside {OP_VLD, OP_VST};
  assign indexed     = op_q.op inside {OP_VLDX, OP_VSTX};
  assign lane        = ($clog2(NrLanes))'(g_q % NrLanes);

  always_comb begin
    rem = op_q.vlw - g_q;
    if (unit_stride)  cur = op_q.scalar + AddrW'(g_q) * 8;
    else if (indexed) cur = op_q.scalar + idx_data_i[lane];
    else              cur = op_q.scalar + AddrW'(g_q) * op_q.stride;
    have_addr = !indexed || idx_valid_i[lane];
    off       = 8'((cur % AxiBytes) / 8);
    max_beats = VlW'(256 * WordsPerBeat) - VlW'(off);
    max_page  = VlW'((4096 - (cur % 4096)) / 8);
    nw        = rem;
    if (nw > max_beats) nw = max_beats;
    if (nw > max_page)  nw = max_page;
    desc_o = '0;
    if (unit_stride) begin
      desc_o.addr = cur - (cur % AxiBytes);
      desc_o.len  = 8'((32'(off) + 32'(nw) + WordsPerBeat - 1) / WordsPerBeat - 1);
      desc_o.size = 3'($clog2(AxiBytes));
      desc_o.off  = off;
      desc_o.nw   = nw;
    end else begin
      desc_o.addr = cur;
      desc_o.len  = 8'd0;
      desc_o.size = 3'd3;
      desc_o.off  = off;
      desc_o.nw   = VlW'(1);
    end
  end

  assign desc_valid_o = busy_q && have_addr;

  always_comb begin
    idx_pop_o = '0;
    if (indexed && desc_valid_o && desc_ready_i) idx_pop_o[lane] = 1'b1;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      busy_q <= 1'b0;
      op_q   <= '0;
      g_q    <= '0;
    end else if (start_i) begin
      busy_q <= (vop_i.vlw != '0);
      op_q   <= vop_i;
      g_q    <= '0;
    end else if (desc_valid_o && desc_ready_i) begin
      g_q <= g_q + desc_o.nw;
      if (g_q + desc_o.nw >= op_q.vlw) busy_q <= 1'b0;
    end
  end

  a_aligned: assert property (@(posedge clk_i) disable iff (!rst_ni)
    desc_valid_o |-> desc_o.addr[2:0] == 3'b0);
endmodule
