// sldu: slide unit, the block that moves data between lanes.
//
// Instructions that need words of a register from all lanes at once run here:
// slide-up and slide-down (vd[i] <- vs2[i -/+ amount]), extraction of one
// element into a scalar result (vext) and insertion of a scalar into one
// element (vins). As in the paper, reductions are not supported.
//
// How it works: a vector is seen as rows of NrLanes 64-bit words, one word per
// lane. A slide by s words maps destination word d to source word d+s, so each
// destination row is built from two consecutive source rows, P and P+1, with
// P = q + floor(s/NrLanes) for destination row q, and an offset m = s mod
// NrLanes inside them. The unit keeps a window of two source rows (the "2"-deep
// buffer of the paper's block diagram), emits one destination row per cycle
// when every lane can take its word, and then slides the window by one row.
// Rows outside the source vector read as zero. Lanes send source rows r0 ..
// r0+n-1 (ara_pkg::sldu_src_rows), the same rows in all lanes.
// Slide-up leaves destination words below the slide amount untouched; words
// at or beyond the vector length are not written.
//
// Scope (this design's choice): slide amounts and indices are counted in
// 64-bit elements, so the sequencer only accepts these instructions with
// SEW = 64. When all destination words have been handed to the lanes, done_o
// pulses with the instruction id (and the scalar for vext).
module sldu import ara_pkg::*; (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  logic                  vop_valid_i,
  input  vop_t                  vop_i,
  output logic                  vop_ready_o,
  // source words from the lanes
  input  logic [NrLanes-1:0]    sl_valid_i,
  input  word_t [NrLanes-1:0]   sl_data_i,
  output logic                  sl_pop_o,
  // destination words to the lanes
  output logic [NrLanes-1:0]    sw_valid_o,
  output logic [VlW-1:0]        sw_idx_o,
  output word_t [NrLanes-1:0]   sw_data_o,
  input  logic [NrLanes-1:0]    sw_ready_i,
  // completion
  output logic                  done_o,
  output id_t                   done_id_o,
  output word_t                 done_result_o
);
  typedef enum logic [1:0] { IDLE, FILL, EMIT, FIN } state_e;

  state_e state_q;
  vop_t   op_q;
  // row numbers are signed: the first source row of a slide-up can be negative
  typedef logic signed [VlW+1:0] srow_t;
  srow_t  q_q, qn_q, p_q;         // destination row, last destination row, low source row
  srow_t  m_q;                    // word offset inside the window
  srow_t  r0_q, r1_q;             // source rows streamed by the lanes
  logic   have_lo_q;
  word_t [NrLanes-1:0] lo_q, hi_q;
  word_t  result_q;

  assign vop_ready_o = (state_q == IDLE);

  // next source row the window needs
  srow_t need_row;
  logic need_in_range, row_avail;
  assign need_row      = have_lo_q ? p_q + 1 : p_q;
  assign need_in_range = (need_row >= r0_q) && (need_row <= r1_q);
  assign row_avail     = !need_in_range || (&sl_valid_i);
  assign sl_pop_o      = (state_q == FILL) && need_in_range && (&sl_valid_i);

  // combined window and destination row
  word_t [2*NrLanes-1:0] win;
  word_t [NrLanes-1:0]   drow;
  logic  [NrLanes-1:0]   dwrite;
  always_comb begin
    for (int k = 0; k < NrLanes; k++) begin
      win[k]           = lo_q[k];
      win[NrLanes + k] = hi_q[k];
    end
    for (int k = 0; k < NrLanes; k++) begin
      int d, src;
      d   = int'(q_q) * NrLanes + k;
      src = d + sldu_shift(op_q.op, op_q.scalar);
      drow[k]   = (src >= 0 && src < int'(op_q.vlw)) ? win[k + int'(m_q)] : '0;
      dwrite[k] = (d < int'(op_q.vlw)) &&
                  !(op_q.op == OP_VSLIDEUP && d < int'(op_q.scalar[VlW-1:0]));
    end
  end

  // outputs towards the lanes
  always_comb begin
    sw_valid_o = '0;
    sw_data_o  = drow;
    sw_idx_o   = VlW'(q_q);
    if (state_q == EMIT) begin
      if (op_q.op == OP_VINS) begin
        for (int k = 0; k < NrLanes; k++) begin
          sw_valid_o[k] = (op_q.scalar[VlW-1:0] % NrLanes) == VlW'(k);
          sw_data_o[k]  = op_q.stride;   // the scalar to insert travels in the stride field
        end
        sw_idx_o = VlW'(op_q.scalar[VlW-1:0] / NrLanes);
      end else if (op_q.op != OP_VEXT) begin
        sw_valid_o = dwrite;
      end
    end
  end

  // set-up values of a new instruction
  sldu_rows_t st_rows;
  int         st_s, st_fd, st_q0, st_qn;
  always_comb begin
    st_rows = sldu_src_rows(vop_i.op, vop_i.scalar, vop_i.vlw);
    st_s    = sldu_shift(vop_i.op, vop_i.scalar);
    st_fd   = floor_div_lanes(st_s);
    st_q0   = sldu_first_drow(vop_i.op, vop_i.scalar);
    st_qn   = (vop_i.op == OP_VEXT) ? 0 : (int'(vop_i.vlw) + NrLanes - 1) / NrLanes - 1;
  end

  // incoming source row (rows outside the source vector read as zero)
  word_t [NrLanes-1:0] in_row;
  always_comb
    for (int k = 0; k < NrLanes; k++) in_row[k] = need_in_range ? sl_data_i[k] : '0;

  logic emit_fire;
  assign emit_fire = (state_q == EMIT) && ((sw_valid_o & ~sw_ready_i) == '0);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q   <= IDLE;
      op_q      <= '0;
      q_q       <= '0;
      qn_q      <= '0;
      p_q       <= '0;
      m_q       <= '0;
      r0_q      <= '0;
      r1_q      <= '1;
      have_lo_q <= 1'b0;
      lo_q      <= '0;
      hi_q      <= '0;
      result_q  <= '0;
    end else begin
      unique case (state_q)
        IDLE: if (vop_valid_i) begin
          op_q      <= vop_i;
          q_q       <= srow_t'(st_q0);
          qn_q      <= srow_t'(st_qn);
          p_q       <= srow_t'(st_q0 + st_fd);
          m_q       <= srow_t'(st_s - st_fd * NrLanes);
          r0_q      <= srow_t'(int'(st_rows.r0));
          r1_q      <= srow_t'(int'(st_rows.r0) + int'(st_rows.n) - 1);
          have_lo_q <= 1'b0;
          if (vop_i.op == OP_VINS) state_q <= EMIT;
          else if (st_q0 > st_qn)  state_q <= FIN;
          else                     state_q <= FILL;
        end
        FILL: if (row_avail) begin
          if (!have_lo_q) begin
            lo_q      <= in_row;
            have_lo_q <= 1'b1;
          end else begin
            hi_q    <= in_row;
            state_q <= EMIT;
          end
        end
        EMIT: if (emit_fire) begin
          if (op_q.op == OP_VEXT) result_q <= drow[0];
          if (op_q.op == OP_VINS || q_q >= qn_q) begin
            state_q <= FIN;
          end else begin
            q_q     <= q_q + 1;
            p_q     <= p_q + 1;
            lo_q    <= hi_q;    // window moves by one row, still holding the new low row
            state_q <= FILL;    // have_lo_q stays set: fetch the new high row
          end
        end
        FIN: state_q <= IDLE;
        default: state_q <= IDLE;
      endcase
    end
  end

  assign done_o        = (state_q == FIN);
  assign done_id_o     = op_q.id;
  assign done_result_o = result_q;
endmodule
