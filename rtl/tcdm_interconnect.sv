// tcdm_interconnect: logarithmic (fully connected, single-cycle) interconnect
// between the cluster's memory masters and the banks of the L1 scratchpad.
//
// Addresses are word-interleaved: byte address bits [1:0] select the byte, the
// next log2(NumBanks) bits the bank, the bits above the word inside the bank, so
// consecutive words fall into consecutive banks. Every bank has a round-robin
// arbiter. A master whose bank is free is granted in the same cycle it requests;
// masters that collide on a bank are granted one per cycle in round-robin order
// (the others see gnt low and keep their request, a bank-conflict stall). A
// granted read returns its data with rvalid in the next cycle; writes return
// nothing.
//
// Interface: m_req_i/m_rsp_o, one pmca_pkg TCDM port per master; bank_req_o
// drives each bank with a bank-local word address, bank_rdata_i is the bank's
// registered read data. The 32 banks and the single-cycle access are the paper's;
// the round-robin policy and the interleaving are this design's choice.
module tcdm_interconnect
  import pmca_pkg::*;
#(
  parameter int unsigned NumMasters = 25,
  parameter int unsigned NumBanks   = 32
) (
  input  logic      clk_i,
  input  logic      rst_ni,
  input  tcdm_req_t m_req_i      [NumMasters],
  output tcdm_rsp_t m_rsp_o      [NumMasters],
  output tcdm_req_t bank_req_o   [NumBanks],
  input  data_t     bank_rdata_i [NumBanks]
);
  localparam int unsigned BankSelW = $clog2(NumBanks);
  localparam int unsigned MstW     = (NumMasters > 1) ? $clog2(NumMasters) : 1;

  logic [BankSelW-1:0] m_bank [NumMasters];
  logic [MstW-1:0]     rr_q   [NumBanks];
  logic [MstW-1:0]     win    [NumBanks];
  logic                bank_busy [NumBanks];
  logic                gnt    [NumMasters];

  // routing of read data: which bank answers each master next cycle
  logic [BankSelW-1:0] sel_q    [NumMasters];
  logic                rvalid_q [NumMasters];

  always_comb begin
    for (int m = 0; m < NumMasters; m++) begin
      m_bank[m] = m_req_i[m].addr[2 +: BankSelW];
      gnt[m]    = 1'b0;
    end
    for (int b = 0; b < NumBanks; b++) begin
      bank_busy[b]  = 1'b0;
      win[b]        = '0;
      bank_req_o[b] = '0;
      // round-robin search starting at rr_q[b]
      for (int k = 0; k < NumMasters; k++) begin
        int m;
        m = int'(rr_q[b]) + k;
        if (m >= int'(NumMasters)) m = m - int'(NumMasters);
        if (!bank_busy[b] && m_req_i[m].valid && (m_bank[m] == BankSelW'(b))) begin
          bank_busy[b] = 1'b1;
          win[b]       = MstW'(m);
        end
      end
      if (bank_busy[b]) begin
        bank_req_o[b]       = m_req_i[win[b]];
        bank_req_o[b].addr  = m_req_i[win[b]].addr >> (2 + BankSelW);
        gnt[win[b]]         = 1'b1;
      end
    end
    for (int m = 0; m < NumMasters; m++) begin
      m_rsp_o[m].gnt    = gnt[m];
      m_rsp_o[m].rvalid = rvalid_q[m];
      m_rsp_o[m].rdata  = bank_rdata_i[sel_q[m]];
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int b = 0; b < NumBanks; b++) rr_q[b] <= '0;
      for (int m = 0; m < NumMasters; m++) begin
        sel_q[m]    <= '0;
        rvalid_q[m] <= 1'b0;
      end
    end else begin
      for (int b = 0; b < NumBanks; b++)
        if (bank_busy[b])
          rr_q[b] <= (int'(win[b]) == int'(NumMasters) - 1) ? '0 : win[b] + 1'b1;
      for (int m = 0; m < NumMasters; m++) begin
        rvalid_q[m] <= gnt[m] && !m_req_i[m].we;
        if (gnt[m]) sel_q[m] <= m_bank[m];
      end
    end
  end

  // A bank serves at most one master per cycle (one-hot grants per bank).
  for (genvar b = 0; b < NumBanks; b++) begin : g_chk
    logic [NumMasters-1:0] to_bank;
    always_comb
      for (int m = 0; m < NumMasters; m++)
        to_bank[m] = gnt[m] && (m_bank[m] == BankSelW'(b));
    assert property (@(posedge clk_i) disable iff (!rst_ni) $onehot0(to_bank))
      else $error("tcdm_interconnect: two grants to bank %0d", b);
  end

endmodule
