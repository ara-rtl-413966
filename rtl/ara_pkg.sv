// ara_pkg: types and constants shared by the vector unit.
//
// The vector unit is built from identical lanes. Every lane holds a slice of the
// vector register file (VRF) and its own integer ALU, integer multiplier and a
// port to a floating point unit. Units that touch all lanes (load/store unit and
// slide unit) sit next to the lanes, and a main sequencer drives them all.
//
// Data layout used throughout: a vector register is a sequence of 64-bit words.
// Word w of a register lives in lane (w mod NrLanes), at lane-local word index
// (w div NrLanes). Narrow elements are packed little-endian into the words, so
// an element of SEW bytes at index i occupies bytes i*SEW .. i*SEW+SEW-1 of the
// register. Inside a lane, the register's local word k sits in bank
// (k + v) mod 8 at row v*RowsPerReg + k/8: the starting bank of each register is
// shifted by one ("barber's pole"), as in the paper's VRF figure.
//
// From the paper: 8 in-flight instructions, 16 KiB of VRF per lane in eight
// 64-bit single-ported banks, a 64-bit lane datapath, memory width 32*NrLanes
// bits, ten operand queues per lane (4 FPU/MUL of depth 5, 3 ALU of depth 5,
// 3 load/store of depth 2) and two result queues of depth 4.
// This design's own choices: the decoded instruction format below, the op
// codes, the number of lanes default (4, the placed-and-routed instance), and a
// reduced AXI4 subset (INCR bursts only, no IDs, no error responses).
package ara_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned NrLanes       = 4;        // paper: l in {2,4,8,16}
  localparam int unsigned NrVRegs       = 32;
  localparam int unsigned NrBanks       = 8;        // banks per lane
  localparam int unsigned VrfBytesLane  = 16384;    // 16 KiB per lane
  localparam int unsigned WordsPerBank  = VrfBytesLane / 8 / NrBanks;   // 256
  localparam int unsigned WordsPerReg   = VrfBytesLane / 8 / NrVRegs;   // 64 per lane
  localparam int unsigned RowsPerReg    = WordsPerReg / NrBanks;        // 8
  localparam int unsigned NrInsn        = 8;        // in-flight vector instructions
  localparam int unsigned IdW           = $clog2(NrInsn);

  localparam int unsigned AddrW         = 64;
  localparam int unsigned VlW           = 16;       // vector length field width

  typedef logic [4:0]     vreg_t;
  typedef logic [IdW-1:0] id_t;
  typedef logic [63:0]    word_t;

  // element width
  typedef enum logic [1:0] { EW8 = 2'd0, EW16 = 2'd1, EW32 = 2'd2, EW64 = 2'd3 } sew_e;

  // functional unit that executes an instruction
  typedef enum logic [2:0] {
    UNIT_NONE = 3'd0,   // handled in the sequencer (setvl)
    UNIT_ALU  = 3'd1,
    UNIT_MFPU = 3'd2,   // multiplier or FPU, they share operand queues
    UNIT_LD   = 3'd3,
    UNIT_ST   = 3'd4,
    UNIT_SLDU = 3'd5
  } unit_e;

  typedef enum logic [5:0] {
    // integer ALU
    OP_VADD, OP_VSUB, OP_VAND, OP_VOR, OP_VXOR, OP_VSLL, OP_VSRL, OP_VSRA,
    OP_VMIN, OP_VMAX, OP_VMINU, OP_VMAXU,
    // integer multiplier
    OP_VMUL, OP_VMULH, OP_VMULHU, OP_VMADD,
    // floating point (executed by the external FPU)
    OP_VFADD, OP_VFSUB, OP_VFMUL, OP_VFMADD, OP_VFDIV, OP_VFSQRT, OP_VFMIN, OP_VFMAX,
    // memory
    OP_VLD, OP_VLDS, OP_VLDX, OP_VST, OP_VSTS, OP_VSTX,
    // slide unit
    OP_VSLIDEUP, OP_VSLIDEDOWN, OP_VINS, OP_VEXT,
    // configuration
    OP_SETVL
  } op_e;

  // Decoded instruction as pushed by the dispatcher into the instruction queue.
  typedef struct packed {
    op_e         op;
    sew_e        sew;
    vreg_t       vd;
    vreg_t       vs1;
    vreg_t       vs2;
    logic        use_scalar;   // operand A is the scalar, replicated
    logic [63:0] scalar;       // rs1 value (scalar operand, base address, AVL, slide amount, index)
    logic [63:0] stride;       // rs2 value (stride in bytes; value to insert for vins)
  } ara_req_t;

  // Answer to the scalar core: acknowledge, scalar result or exception.
  typedef struct packed {
    logic        exception;
    logic [63:0] result;
  } ara_resp_t;

  // Operation broadcast by the main sequencer to lanes and global units.
  typedef struct packed {
    id_t             id;
    op_e             op;
    unit_e           unit;
    sew_e            sew;
    vreg_t           vd;
    vreg_t           vs1;
    vreg_t           vs2;
    logic            use_scalar;
    logic [63:0]     scalar;
    logic [63:0]     stride;
    logic [VlW-1:0]  vl;        // in elements
    logic [VlW-1:0]  vlw;       // in 64-bit words over the whole vector
    logic [NrInsn-1:0] raw;     // older instructions whose results this one reads
    logic [NrInsn-1:0] wawar;   // older instructions it must not overtake when writing
  } vop_t;

  // ------------------------------------------------------------ AXI subset
  localparam int unsigned AxiDataW = 32 * NrLanes;   // paper: 32*l bits

  typedef struct packed {
    logic [AddrW-1:0] addr;
    logic [7:0]       len;    // beats - 1
    logic [2:0]       size;   // log2(bytes per beat)
  } axi_ax_t;

  // Burst descriptor from the address generator to the load and store units.
  localparam int unsigned AxiBytes     = AxiDataW / 8;
  localparam int unsigned WordsPerBeat = AxiDataW / 64;

  typedef struct packed {
    logic [AddrW-1:0] addr;   // address of the burst (beat-aligned, or the element address)
    logic [7:0]       len;    // beats - 1
    logic [2:0]       size;   // log2(bytes per beat)
    logic [7:0]       off;    // position of the first 64-bit word in the first beat
    logic [VlW-1:0]   nw;     // 64-bit words carried by the burst
  } vlsu_desc_t;

  // ------------------------------------------------------------ helpers
  function automatic int unsigned sew_bytes(sew_e s);
    return 1 << s;
  endfunction

  function automatic logic [VlW-1:0] words_of(logic [VlW-1:0] vl, sew_e s);
    logic [VlW+2:0] bytes;
    bytes = {3'b0, vl} << s;
    return VlW'((bytes + 7) >> 3);
  endfunction

  function automatic unit_e unit_of(op_e op);
    unique case (op)
      OP_VADD, OP_VSUB, OP_VAND, OP_VOR, OP_VXOR, OP_VSLL, OP_VSRL, OP_VSRA,
      OP_VMIN, OP_VMAX, OP_VMINU, OP_VMAXU:                       return UNIT_ALU;
      OP_VMUL, OP_VMULH, OP_VMULHU, OP_VMADD,
      OP_VFADD, OP_VFSUB, OP_VFMUL, OP_VFMADD, OP_VFDIV, OP_VFSQRT,
      OP_VFMIN, OP_VFMAX:                                         return UNIT_MFPU;
      OP_VLD, OP_VLDS, OP_VLDX:                                   return UNIT_LD;
      OP_VST, OP_VSTS, OP_VSTX:                                   return UNIT_ST;
      OP_VSLIDEUP, OP_VSLIDEDOWN, OP_VINS, OP_VEXT:               return UNIT_SLDU;
      default:                                                    return UNIT_NONE;
    endcase
  endfunction

  function automatic logic is_fpu_op(op_e op);
    return op inside {OP_VFADD, OP_VFSUB, OP_VFMUL, OP_VFMADD, OP_VFDIV,
                      OP_VFSQRT, OP_VFMIN, OP_VFMAX};
  endfunction

  // Which vector operands an instruction reads: {vd as source, vs2, vs1}.
  function automatic logic [2:0] reads_of(op_e op, logic use_scalar);
    logic [2:0] r;
    unit_e u;
    r = 3'b000;
    u = unit_of(op);
    unique case (u)
      UNIT_ALU:  r = {1'b0, 1'b1, ~use_scalar};
      UNIT_MFPU: begin
        r = {1'b0, op != OP_VFSQRT, ~use_scalar};
        if (op inside {OP_VMADD, OP_VFMADD}) r[2] = 1'b1;
      end
      UNIT_LD:   r = {1'b0, op == OP_VLDX, 1'b0};
      UNIT_ST:   r = {1'b0, op == OP_VSTX, 1'b1};
      UNIT_SLDU: r = {1'b0, op != OP_VINS, 1'b0};
      default:   r = 3'b000;
    endcase
    return r;
  endfunction

  function automatic logic writes_vd(op_e op);
    unit_e u;
    u = unit_of(op);
    return u inside {UNIT_ALU, UNIT_MFPU, UNIT_LD} ||
           op inside {OP_VSLIDEUP, OP_VSLIDEDOWN, OP_VINS};
  endfunction

  // Lane-local number of words of a vector with vlw words in total.
  function automatic logic [VlW-1:0] lane_words(logic [VlW-1:0] vlw, int unsigned lane);
    if (vlw <= VlW'(lane)) return '0;
    return VlW'((vlw - VlW'(lane) + VlW'(NrLanes) - 1) / NrLanes);
  endfunction

  // VRF address of lane-local word k of register v (barber's pole).
  function automatic logic [$clog2(NrBanks)-1:0] vrf_bank(vreg_t v, logic [VlW-1:0] k);
    return ($clog2(NrBanks))'((k + VlW'(v)) % NrBanks);
  endfunction

  function automatic logic [$clog2(WordsPerBank)-1:0] vrf_row(vreg_t v, logic [VlW-1:0] k);
    return ($clog2(WordsPerBank))'(int'(v) * RowsPerReg + int'(k / NrBanks));
  endfunction

  // Slide unit: a slide by s words maps destination word d to source word d+s
  // (s = +amount for slide-down, -amount for slide-up). Rows are groups of NrLanes
  // words, one per lane.  First destination row and first source row read:
  function automatic int sldu_first_drow(op_e op, logic [63:0] amt);
    return (op == OP_VSLIDEUP) ? int'(amt[VlW-1:0]) / NrLanes : 0;
  endfunction

  function automatic int sldu_shift(op_e op, logic [63:0] amt);
    return (op == OP_VSLIDEUP) ? -int'(amt[VlW-1:0]) : int'(amt[VlW-1:0]);
  endfunction

  // Source rows (r0, number of rows) that every lane streams to the slide unit.
  typedef struct packed {
    logic [VlW-1:0] r0;
    logic [VlW-1:0] n;
  } sldu_rows_t;

  function automatic sldu_rows_t sldu_src_rows(op_e op, logic [63:0] amt, logic [VlW-1:0] vlw);
    sldu_rows_t res;
    int rows, q0, qn, fd, pmin, pmax, r0, r1;
    rows = (int'(vlw) + NrLanes - 1) / NrLanes;
    q0   = sldu_first_drow(op, amt);
    qn   = (op == OP_VEXT) ? 0 : rows - 1;
    fd   = floor_div_lanes(sldu_shift(op, amt));
    pmin = q0 + fd;
    pmax = qn + fd + 1;
    r0   = (pmin < 0) ? 0 : pmin;
    r1   = (pmax > rows - 1) ? rows - 1 : pmax;
    res.r0 = VlW'(r0);
    res.n  = (op == OP_VINS || q0 > qn || r1 < r0) ? '0 : VlW'(r1 - r0 + 1);
    return res;
  endfunction

  // Replicate the low SEW bits of a scalar over a 64-bit word.
  function automatic word_t replicate(logic [63:0] s, sew_e sew);
    unique case (sew)
      EW8:     return {8{s[7:0]}};
      EW16:    return {4{s[15:0]}};
      EW32:    return {2{s[31:0]}};
      default: return s;
    endcase
  endfunction

  // floor division of a possibly negative word offset by NrLanes
  function automatic int floor_div_lanes(int x);
    return (x >= 0) ? x / NrLanes : -((-x + NrLanes - 1) / NrLanes);
  endfunction

endpackage
