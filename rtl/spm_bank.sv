// spm_bank: one single-port scratchpad memory bank, 32-bit words with byte enables.
//
// Used for the 32 banks of the cluster's L1 data scratchpad and for the manager
// domain's L2 scratchpad. In silicon each bank is an SRAM macro; here it is a
// word array that synthesis keeps as a memory. A request (req_i) with we_i set
// writes the enabled bytes; without we_i it reads, and rdata_o holds the word one
// cycle later (and keeps it until the next read). Contents are not reset.
// The bank size is a parameter; the sizes used (1 MiB L1 over 32 banks, 128 KiB
// L2) are the paper's, the one-cycle read latency follows its single-cycle
// interconnect.
module spm_bank #(
  parameter int unsigned NumWords = 8192,
  parameter int unsigned AddrW    = $clog2(NumWords)
) (
  input  logic             clk_i,
  input  logic             req_i,
  input  logic             we_i,
  input  logic [3:0]       be_i,
  input  logic [AddrW-1:0] addr_i,
  input  logic [31:0]      wdata_i,
  output logic [31:0]      rdata_o
);
  logic [31:0] mem_q [NumWords];

  always_ff @(posedge clk_i) begin
    if (req_i) begin
      if (we_i) begin
        for (int b = 0; b < 4; b++)
          if (be_i[b]) mem_q[addr_i][b*8 +: 8] <= wdata_i[b*8 +: 8];
      end else begin
        rdata_o <= mem_q[addr_i];
      end
    end
  end
endmodule
