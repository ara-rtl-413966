// vrf_bank_arbiter: arbiter of one register-file bank.
//
// Every bank of the lane's register file is single ported, so in each cycle at
// most one of the lane's requesters (operand fetches and result write-backs)
// may use it. The paper resolves these bank conflicts with a weighted
// round-robin arbiter per bank with two priority levels, giving memory
// operations the low level so that their irregular accesses do not disturb the
// high-throughput arithmetic instructions. The weighting is not specified;
// here the low level wins when no high-level request is present, and in
// addition once after every HiWeight consecutive cycles in which a low-level
// requester was kept waiting, so that it cannot starve. Inside each level the
// grant rotates round-robin, starting after the last requester granted.
//
// Interface: req_i/hi_i one bit per requester, gnt_o one-hot (or zero), purely
// combinational; the rotation state advances on the clock when a grant is made.
module vrf_bank_arbiter #(
  parameter int unsigned NumReq   = 11,
  parameter int unsigned HiWeight = 4
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  logic [NumReq-1:0] req_i,
  input  logic [NumReq-1:0] hi_i,
  output logic [NumReq-1:0] gnt_o
);
  localparam int unsigned IdxW = $clog2(NumReq);

  logic [IdxW-1:0] last_hi_q, last_lo_q;
  logic [$clog2(HiWeight+1)-1:0] wait_q;

  logic [NumReq-1:0] req_hi, req_lo, gnt_hi, gnt_lo;
  logic pick_lo;

  assign req_hi = req_i & hi_i;
  assign req_lo = req_i & ~hi_i;

  // round-robin pick: first requester after `last`
  function automatic logic [NumReq-1:0] rr_pick(logic [NumReq-1:0] r, logic [IdxW-1:0] last);
    logic [NumReq-1:0] g;
    int unsigned idx;
    g = '0;
    for (int unsigned i = 1; i <= NumReq; i++) begin
      idx = (int'(last) + i) % NumReq;
      if (r[idx] && g == '0) g[idx] = 1'b1;
    end
    return g;
  endfunction

  function automatic logic [IdxW-1:0] onehot_idx(logic [NumReq-1:0] g);
    logic [IdxW-1:0] k;
    k = '0;
    for (int unsigned i = 0; i < NumReq; i++) if (g[i]) k = IdxW'(i);
    return k;
  endfunction

  always_comb begin
    gnt_hi  = rr_pick(req_hi, last_hi_q);
    gnt_lo  = rr_pick(req_lo, last_lo_q);
    pick_lo = (req_lo != '0) && ((req_hi == '0) || (wait_q >= ($clog2(HiWeight+1))'(HiWeight)));
    gnt_o   = pick_lo ? gnt_lo : gnt_hi;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      last_hi_q <= IdxW'(NumReq - 1);
      last_lo_q <= IdxW'(NumReq - 1);
      wait_q    <= '0;
    end else begin
      if (pick_lo)              last_lo_q <= onehot_idx(gnt_lo);
      else if (req_hi != '0)    last_hi_q <= onehot_idx(gnt_hi);
      if (pick_lo || req_lo == '0) wait_q <= '0;
      else                         wait_q <= wait_q + 1'b1;
    end
  end

  a_onehot: assert property (@(posedge clk_i) disable iff (!rst_ni) $onehot0(gnt_o));
  a_gnt_req: assert property (@(posedge clk_i) disable iff (!rst_ni) (gnt_o & ~req_i) == '0);
endmodule
