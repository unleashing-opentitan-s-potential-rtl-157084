// tcdm: tightly coupled data memory of the secure element's accelerators.
//
// NumBanks single-port SRAM banks of BankWords 32-bit words are reached from
// NumMasters ports through a logarithmic (fully connected, single-stage)
// interconnect. Consecutive words go to consecutive banks (word
// interleaving), so two masters streaming through memory seldom collide.
// When several masters address the same bank in one cycle a per-bank
// round-robin arbiter grants one of them and the others see gnt = 0 and retry.
// The paper's configuration is 8 banks of 4 KiB (32 KiB) with two masters,
// the microcontroller (through the TL-UL adapter) and the DMA (through the
// AXI adapter). Addresses are byte addresses taken modulo the TCDM size.
// Timing: grant in the request cycle, read data one cycle later.
module tcdm
  import ot_pkg::*;
#(
  parameter int unsigned NumMasters = 2,
  parameter int unsigned NumBanks   = 8,
  parameter int unsigned BankWords  = 1024
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  mem_req_t req_i [NumMasters],
  output mem_rsp_t rsp_o [NumMasters],
  output logic     conflict_o          // some request lost arbitration
);
  localparam int unsigned BankW = (NumBanks > 1) ? $clog2(NumBanks) : 1;
  localparam int unsigned RowW  = $clog2(BankWords);
  localparam int unsigned MstW  = (NumMasters > 1) ? $clog2(NumMasters) : 1;

  logic [BankW-1:0] m_bank [NumMasters];
  logic [RowW-1:0]  m_row  [NumMasters];

  for (genvar m = 0; m < NumMasters; m++) begin : g_addr
    assign m_bank[m] = (NumBanks > 1) ? req_i[m].addr[2 +: BankW] : '0;
    assign m_row[m]  = req_i[m].addr[2 + ((NumBanks > 1) ? BankW : 0) +: RowW];
  end

  logic [NumBanks-1:0][NumMasters-1:0] bank_req, bank_gnt;
  logic [MstW-1:0]  rr_q  [NumBanks];
  logic [MstW-1:0]  win   [NumBanks];
  logic [NumBanks-1:0] win_valid;
  logic [31:0]      bank_rdata [NumBanks];

  for (genvar k = 0; k < NumBanks; k++) begin : g_bank
    // request matrix
    for (genvar m = 0; m < NumMasters; m++) begin : g_req
      assign bank_req[k][m] = req_i[m].req && (m_bank[m] == BankW'(k));
    end

    // round-robin: the first requester at or after rr_q wins
    always_comb begin
      win[k]       = '0;
      win_valid[k] = 1'b0;
      for (int i = NumMasters - 1; i >= 0; i--) begin
        int unsigned idx;
        idx = (int'(rr_q[k]) + i) % NumMasters;
        if (bank_req[k][idx]) begin
          win[k]       = MstW'(idx);
          win_valid[k] = 1'b1;
        end
      end
      bank_gnt[k] = '0;
      if (win_valid[k]) bank_gnt[k][win[k]] = 1'b1;
    end

    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni)           rr_q[k] <= '0;
      else if (win_valid[k]) rr_q[k] <= (win[k] == MstW'(NumMasters - 1)) ? '0 : win[k] + 1'b1;
    end

    tcdm_bank #(.Words(BankWords)) u_bank (
      .clk_i,
      .req_i   (win_valid[k]),
      .we_i    (req_i[win[k]].we),
      .addr_i  (m_row[win[k]]),
      .wdata_i (req_i[win[k]].wdata),
      .be_i    (req_i[win[k]].be),
      .rdata_o (bank_rdata[k])
    );
  end

  // response path: remember which bank served each master
  logic [NumMasters-1:0] gnt, rvalid_q;
  logic [BankW-1:0]      rbank_q [NumMasters];

  for (genvar m = 0; m < NumMasters; m++) begin : g_rsp
    assign gnt[m] = bank_gnt[m_bank[m]][m];
    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) begin
        rvalid_q[m] <= 1'b0;
        rbank_q[m]  <= '0;
      end else begin
        rvalid_q[m] <= req_i[m].req && gnt[m];
        if (req_i[m].req && gnt[m]) rbank_q[m] <= m_bank[m];
      end
    end
    assign rsp_o[m].gnt    = gnt[m] && req_i[m].req;
    assign rsp_o[m].rvalid = rvalid_q[m];
    assign rsp_o[m].rdata  = bank_rdata[rbank_q[m]];
  end

  always_comb begin
    conflict_o = 1'b0;
    for (int m = 0; m < NumMasters; m++) conflict_o |= req_i[m].req && !gnt[m];
  end
endmodule
