// vrf: the slice of the vector register file held by one lane, with its
// per-bank arbiters and the two crossbars around the banks.
//
// Following the paper, the 16 KiB slice is built from eight single-ported
// (1RW) banks, each one 64-bit word wide, instead of one many-ported memory.
// Each requester of the lane (operand fetches for the functional units, result
// write-backs, load data, slide-unit data) presents a bank, a row and, for a
// write, the data. One vrf_bank_arbiter per bank picks a single requester; the
// input crossbar routes the winner's address to the bank, the output crossbar
// returns read data to the requester that asked for it. The mapping of
// register words onto banks (barber's pole) is computed by the requesters with
// ara_pkg::vrf_bank/vrf_row.
//
// Timing: gnt_o is combinational in the request; a granted read returns its
// word one cycle later with rvalid_o. A granted write takes effect at the clock
// edge. The banks are modelled as arrays; a real chip uses SRAM macros.
module vrf import ara_pkg::*; #(
  parameter int unsigned NumReq   = 11,
  parameter int unsigned NumBanks = NrBanks,
  parameter int unsigned BankWords = WordsPerBank
) (
  input  logic                              clk_i,
  input  logic                              rst_ni,
  input  logic [NumReq-1:0]                 req_i,
  input  logic [NumReq-1:0]                 we_i,
  input  logic [NumReq-1:0]                 hi_i,
  input  logic [NumReq-1:0][$clog2(NumBanks)-1:0]  bank_i,
  input  logic [NumReq-1:0][$clog2(BankWords)-1:0] row_i,
  input  word_t [NumReq-1:0]                wdata_i,
  output logic [NumReq-1:0]                 gnt_o,
  output logic [NumReq-1:0]                 rvalid_o,
  output word_t [NumReq-1:0]                rdata_o
);
  localparam int unsigned IdxW = (NumReq > 1) ? $clog2(NumReq) : 1;

  logic [NumBanks-1:0][NumReq-1:0] bank_req, bank_gnt;
  logic [NumBanks-1:0]             bank_en, bank_we;
  logic [NumBanks-1:0][$clog2(BankWords)-1:0] bank_addr;
  word_t [NumBanks-1:0]            bank_wdata, bank_rdata;
  logic [NumBanks-1:0][IdxW-1:0]   bank_owner_d, bank_owner_q;
  logic [NumBanks-1:0]             bank_rd_q;

  // requests per bank
  always_comb begin
    for (int b = 0; b < NumBanks; b++)
      for (int r = 0; r < NumReq; r++)
        bank_req[b][r] = req_i[r] && (bank_i[r] == ($clog2(NumBanks))'(b));
  end

  for (genvar b = 0; b < NumBanks; b++) begin : gen_bank
    vrf_bank_arbiter #(.NumReq(NumReq)) i_arb (
      .clk_i, .rst_ni, .req_i(bank_req[b]), .hi_i(hi_i), .gnt_o(bank_gnt[b])
    );

    // input crossbar
    always_comb begin
      bank_en[b]      = 1'b0;
      bank_we[b]      = 1'b0;
      bank_addr[b]    = '0;
      bank_wdata[b]   = '0;
      bank_owner_d[b] = '0;
      for (int r = 0; r < NumReq; r++) begin
        if (bank_gnt[b][r]) begin
          bank_en[b]      = 1'b1;
          bank_we[b]      = we_i[r];
          bank_addr[b]    = row_i[r];
          bank_wdata[b]   = wdata_i[r];
          bank_owner_d[b] = IdxW'(r);
        end
      end
    end

    // single-ported bank, one cycle read latency
    word_t mem_q [BankWords];
    word_t rdata_q;
    always_ff @(posedge clk_i) begin
      if (bank_en[b]) begin
        if (bank_we[b]) mem_q[bank_addr[b]] <= bank_wdata[b];
        else            rdata_q <= mem_q[bank_addr[b]];
      end
    end
    assign bank_rdata[b] = rdata_q;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      bank_rd_q    <= '0;
      bank_owner_q <= '0;
    end else begin
      bank_rd_q    <= bank_en & ~bank_we;
      bank_owner_q <= bank_owner_d;
    end
  end

  // grants and output crossbar
  always_comb begin
    gnt_o    = '0;
    rvalid_o = '0;
    rdata_o  = '0;
    for (int b = 0; b < NumBanks; b++) begin
      gnt_o |= bank_gnt[b];
      if (bank_rd_q[b]) begin
        rvalid_o[bank_owner_q[b]] = 1'b1;
        rdata_o[bank_owner_q[b]]  = bank_rdata[b];
      end
    end
  end
endmodule
