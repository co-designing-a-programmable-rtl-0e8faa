// pmca_cluster: the programmable multi-core accelerator (PMCA) of the power
// controller, with the manager domain's L2 scratchpad.
//
// Eight compute core complexes, each with an FP32 FPU, a FREP loop sequencer and
// three stream semantic registers (SSRs), share a 1 MiB L1 data scratchpad made of
// 32 word-interleaved banks behind a single-cycle logarithmic interconnect. A DMA
// engine, also a master of that interconnect, copies data between L1 and the
// 128 KiB L2 scratchpad of the manager domain. The 24 SSR ports and the DMA port
// are the interconnect's 25 masters (core c, lane l is master 3c+l; the DMA is the
// last). This is the structure on which the MPC solver (OSQP with the ParSPL
// schedule for its sparse triangular solves) runs: its sparse kernels stream
// matrix values and index arrays through the SSRs and repeat their inner loops
// with FREP, while the eight cores split each shard of work among them.
//
// Ports. The integer cores of the core complexes, the manager core and its
// peripherals are not part of this RTL: their signals are ports.
//  * acc_*  : per core, the FP instruction offload stream (fp_inst_t, valid/ready)
//             an integer core would drive;
//  * cfg_*  : per core, the SSR configuration writes (see snitch_cc_fp);
//  * dma_cmd_* : DMA command (source, destination, words, direction);
//  * l2_req_i/l2_rsp_o : manager-side access to L2 (TCDM protocol, priority over
//             the DMA), used to load the problem data and read back results.
// Status outputs show per core whether streams or instructions are still in
// flight, which a core's software would poll before a synchronisation barrier,
// and pulse fpu_issue_o in every cycle the core's FPU starts an instruction (the
// basis of the FPU-utilisation figure).
//
// The number of cores, banks and the memory sizes are the paper's (eight cores,
// 32 banks, 1 MiB L1, 128 KiB L2); the wiring of the DMA straight to L2 (the paper
// routes it through the manager domain's interconnect) and the fixed priority of
// the manager port are this design's simplifications.
//
// All flip-flops reset asynchronously on rst_ni low. Lint reports rst_ni as used
// both asynchronously and synchronously: the synchronous use is only the
// `disable iff` of the handshake assertions in the sub-blocks, not logic.
module pmca_cluster
  import pmca_pkg::*;
#(
  parameter int unsigned NumCores = 8,
  parameter int unsigned NumBanks = 32,
  parameter int unsigned L1Bytes  = 1024 * 1024,
  parameter int unsigned L2Bytes  = 128 * 1024
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  // FP offload per core
  input  logic        acc_valid_i [NumCores],
  output logic        acc_ready_o [NumCores],
  input  fp_inst_t    acc_inst_i  [NumCores],
  // SSR configuration per core
  input  logic        cfg_valid_i [NumCores],
  input  logic [1:0]  cfg_ssr_i   [NumCores],
  input  logic [4:0]  cfg_addr_i  [NumCores],
  input  data_t       cfg_wdata_i [NumCores],
  // per-core status
  output logic [NumSsr-1:0] ssr_busy_o [NumCores],
  output logic        core_busy_o [NumCores],
  output logic        illegal_o   [NumCores],
  output logic        fpu_issue_o [NumCores],
  // DMA command
  input  logic        dma_cmd_valid_i,
  output logic        dma_cmd_ready_o,
  input  addr_t       dma_cmd_src_i,
  input  addr_t       dma_cmd_dst_i,
  input  data_t       dma_cmd_len_i,
  input  logic        dma_cmd_dir_i,
  output logic        dma_busy_o,
  output logic        dma_done_o,
  // manager-domain access to L2
  input  tcdm_req_t   l2_req_i,
  output tcdm_rsp_t   l2_rsp_o
);
  localparam int unsigned NumMasters   = NumCores * NumSsr + 1;
  localparam int unsigned BankWords    = L1Bytes / 4 / NumBanks;
  localparam int unsigned BankAddrW    = $clog2(BankWords);
  localparam int unsigned L2Words      = L2Bytes / 4;
  localparam int unsigned L2AddrW      = $clog2(L2Words);

  tcdm_req_t m_req [NumMasters];
  tcdm_rsp_t m_rsp [NumMasters];
  tcdm_req_t b_req [NumBanks];
  data_t     b_rdata [NumBanks];

  // ------------------------------------------------------------ core complexes
  for (genvar c = 0; c < NumCores; c++) begin : g_cc
    tcdm_req_t ssr_req [NumSsr];
    tcdm_rsp_t ssr_rsp [NumSsr];

    snitch_cc_fp i_cc (
      .clk_i, .rst_ni,
      .acc_valid_i (acc_valid_i[c]),
      .acc_ready_o (acc_ready_o[c]),
      .acc_inst_i  (acc_inst_i[c]),
      .cfg_valid_i (cfg_valid_i[c]),
      .cfg_ssr_i   (cfg_ssr_i[c]),
      .cfg_addr_i  (cfg_addr_i[c]),
      .cfg_wdata_i (cfg_wdata_i[c]),
      .ssr_busy_o  (ssr_busy_o[c]),
      .busy_o      (core_busy_o[c]),
      .illegal_o   (illegal_o[c]),
      .issue_o     (fpu_issue_o[c]),
      .ssr_req_o   (ssr_req),
      .ssr_rsp_i   (ssr_rsp)
    );

    for (genvar l = 0; l < NumSsr; l++) begin : g_port
      assign m_req[c*NumSsr + l] = ssr_req[l];
      assign ssr_rsp[l]          = m_rsp[c*NumSsr + l];
    end
  end

  // ------------------------------------------------------------ DMA
  tcdm_req_t dma_l2_req;
  tcdm_rsp_t dma_l2_rsp;

  cluster_dma i_dma (
    .clk_i, .rst_ni,
    .cmd_valid_i (dma_cmd_valid_i),
    .cmd_ready_o (dma_cmd_ready_o),
    .cmd_src_i   (dma_cmd_src_i),
    .cmd_dst_i   (dma_cmd_dst_i),
    .cmd_len_i   (dma_cmd_len_i),
    .cmd_dir_i   (dma_cmd_dir_i),
    .busy_o      (dma_busy_o),
    .done_o      (dma_done_o),
    .l1_req_o    (m_req[NumMasters-1]),
    .l1_rsp_i    (m_rsp[NumMasters-1]),
    .l2_req_o    (dma_l2_req),
    .l2_rsp_i    (dma_l2_rsp)
  );

  // ------------------------------------------------------------ L1 scratchpad
  tcdm_interconnect #(.NumMasters(NumMasters), .NumBanks(NumBanks)) i_xbar (
    .clk_i, .rst_ni,
    .m_req_i      (m_req),
    .m_rsp_o      (m_rsp),
    .bank_req_o   (b_req),
    .bank_rdata_i (b_rdata)
  );

  for (genvar b = 0; b < NumBanks; b++) begin : g_bank
    spm_bank #(.NumWords(BankWords)) i_bank (
      .clk_i,
      .req_i   (b_req[b].valid),
      .we_i    (b_req[b].we),
      .be_i    (b_req[b].be),
      .addr_i  (b_req[b].addr[BankAddrW-1:0]),
      .wdata_i (b_req[b].wdata),
      .rdata_o (b_rdata[b])
    );
  end

  // ------------------------------------------------------------ L2 scratchpad
  logic  l2_sel_ext, l2_req, l2_we, ext_rvalid_q, dma_rvalid_q;
  logic [3:0] l2_be;
  addr_t l2_addr;
  data_t l2_wdata, l2_rdata;

  always_comb begin
    l2_sel_ext = l2_req_i.valid;
    l2_req     = l2_req_i.valid || dma_l2_req.valid;
    l2_we      = l2_sel_ext ? l2_req_i.we    : dma_l2_req.we;
    l2_be      = l2_sel_ext ? l2_req_i.be    : dma_l2_req.be;
    l2_addr    = l2_sel_ext ? l2_req_i.addr  : dma_l2_req.addr;
    l2_wdata   = l2_sel_ext ? l2_req_i.wdata : dma_l2_req.wdata;
    l2_rsp_o.gnt      = l2_req_i.valid;
    l2_rsp_o.rvalid   = ext_rvalid_q;
    l2_rsp_o.rdata    = l2_rdata;
    dma_l2_rsp.gnt    = dma_l2_req.valid && !l2_req_i.valid;
    dma_l2_rsp.rvalid = dma_rvalid_q;
    dma_l2_rsp.rdata  = l2_rdata;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ext_rvalid_q <= 1'b0;
      dma_rvalid_q <= 1'b0;
    end else begin
      ext_rvalid_q <= l2_req_i.valid && !l2_req_i.we;
      dma_rvalid_q <= dma_l2_rsp.gnt && !dma_l2_req.we;
    end
  end

  spm_bank #(.NumWords(L2Words)) i_l2 (
    .clk_i,
    .req_i   (l2_req),
    .we_i    (l2_we),
    .be_i    (l2_be),
    .addr_i  (l2_addr[2 +: L2AddrW]),
    .wdata_i (l2_wdata),
    .rdata_o (l2_rdata)
  );

endmodule
