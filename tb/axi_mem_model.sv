// axi_mem_model: behavioural memory behind the vector unit's memory port, for
// simulation only. It accepts read and write bursts of the reduced AXI subset
// used by the vector load/store unit (INCR bursts, full-width or single narrow
// beats), answers with random gaps when Stall is set, and holds MemWords 64-bit
// words at byte addresses 0 .. 8*MemWords-1 (higher address bits are ignored).
module axi_mem_model import ara_pkg::*; #(
  parameter int unsigned MemWords = 65536,
  parameter bit          Stall    = 1'b1
) (
  input  logic                 clk_i,
  input  logic                 ar_valid_i,
  input  axi_ax_t              ar_i,
  output logic                 ar_ready_o,
  output logic                 r_valid_o,
  output logic [AxiDataW-1:0]  r_data_o,
  output logic                 r_last_o,
  input  logic                 r_ready_i,
  input  logic                 aw_valid_i,
  input  axi_ax_t              aw_i,
  output logic                 aw_ready_o,
  input  logic                 w_valid_i,
  input  logic [AxiDataW-1:0]  w_data_i,
  input  logic [AxiBytes-1:0]  w_strb_i,
  input  logic                 w_last_i,
  output logic                 w_ready_o,
  output logic                 b_valid_o,
  input  logic                 b_ready_i
);
  word_t mem [MemWords];

  bit      stall_en = Stall;   // may be changed at run time by a testbench
  axi_ax_t rq[$], wq[$];
  int      rbeat = 0, wbeat = 0, bpend = 0;
  int      nreads = 0, nwrites = 0, nbursts = 0;

  function automatic int unsigned widx(logic [AddrW-1:0] a);
    return int'((a >> 3) % MemWords);
  endfunction

  function automatic logic [AddrW-1:0] beat_addr(axi_ax_t ax, int beat);
    logic [AddrW-1:0] base;
    base = ax.addr - (ax.addr % AxiBytes);
    return base + AddrW'(beat * AxiBytes);
  endfunction

  initial begin
    ar_ready_o = 0;
    aw_ready_o = 0; w_ready_o = 0; b_valid_o = 0;
  end

  always @(posedge clk_i) begin
    // address channels
    if (ar_valid_i && ar_ready_o) begin rq.push_back(ar_i); nreads++; if (ar_i.len != 0) nbursts++; end
    if (aw_valid_i && aw_ready_o) begin wq.push_back(aw_i); nwrites++; if (aw_i.len != 0) nbursts++; end
    // read data
    if (r_valid_o && r_ready_i) begin
      if (r_last_o) begin void'(rq.pop_front()); rbeat = 0; end
      else rbeat++;
    end
    // write data
    if (w_valid_i && w_ready_o && wq.size() > 0) begin
      logic [AddrW-1:0] ba;
      ba = beat_addr(wq[0], wbeat);
      for (int i = 0; i < int'(WordsPerBeat); i++)
        for (int b = 0; b < 8; b++)
          if (w_strb_i[i*8 + b]) mem[widx(ba + AddrW'(i*8))][b*8 +: 8] <= w_data_i[i*64 + b*8 +: 8];
      if (w_last_i) begin void'(wq.pop_front()); wbeat = 0; bpend++; end
      else wbeat++;
    end
    if (b_valid_o && b_ready_i) bpend--;

    ar_ready_o <= !stall_en || ($urandom % 4 != 0);
    aw_ready_o <= !stall_en || ($urandom % 4 != 0);
    w_ready_o  <= (wq.size() > 0 || (aw_valid_i && aw_ready_o)) && (!stall_en || ($urandom % 4 != 0));
    b_valid_o  <= (bpend > 0) && !(b_valid_o && b_ready_i && bpend == 1);
  end

  // read data is driven combinationally from the head burst, with random gaps
  logic r_gap = 1'b0;
  always @(posedge clk_i) r_gap <= stall_en && ($urandom % 5 == 0);
  always_comb begin
    r_valid_o = (rq.size() > 0) && !r_gap;
    r_data_o  = '0;
    r_last_o  = 1'b0;
    if (rq.size() > 0) begin
      logic [AddrW-1:0] ba;
      ba = beat_addr(rq[0], rbeat);
      for (int i = 0; i < int'(WordsPerBeat); i++) r_data_o[i*64 +: 64] = mem[widx(ba + AddrW'(i*8))];
      r_last_o = (rbeat == int'(rq[0].len));
    end
  end
endmodule
