// tb_pmca_cluster: end-to-end test of the accelerator cluster at its default size
// (8 cores, 32 banks, 1 MiB L1, 128 KiB L2).
//
// The testbench plays the manager core and the eight integer cores and runs a
// small piece of the MPC solver the way the cluster executes it:
//  0  the manager writes a vector x, a sparse matrix (16-bit row-wise column
//     indices and values) and bounds u into L2, and starts a DMA copy into L1,
//     while it keeps reading other L2 words (its port has priority, so the DMA
//     stalls);
//  1  a backward-substitution style shard: each core computes dot products of its
//     four rows with x, gathering x through an indirect SSR and repeating fmadd
//     with FREP, and writes its results y to L1;
//  2  after a barrier (all cores idle), an ADMM-style dense update: each core
//     projects its share of y onto [lo, u] (fmin/fmax in a two-instruction FREP
//     body) and scatters the results through a 16-bit permutation index array
//     (indirect write stream), so the cores write to each other's parts of z;
//  3  the DMA copies the results back to L2 and the manager checks them against a
//     reference computed here in FP32.
// It counts the mechanisms it relies on and fails if one never happened: bank
// conflict stalls, indirect index fetches, scattered writes, FREP replays, DMA transfers in both
// directions, manager-over-DMA priority stalls on L2, and FPU issues on every core.
`timescale 1ns/1ps
module tb_pmca_cluster;
  import pmca_pkg::*;
  import tb_fp_pkg::*;

  localparam int NC = 8;
  localparam int RPC = 4;            // rows per core
  localparam int NR = NC * RPC;      // rows
  localparam int NX = 64;            // length of x
  localparam int AX = 32'h0000, AIDX = 32'h1000, AVAL = 32'h2000, AY = 32'h3000,
                 AU = 32'h3100, AZ = 32'h3200, APERM = 32'h3400, AOUT = 32'h8000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       acc_valid [NC], acc_ready [NC], cfg_valid [NC];
  fp_inst_t   acc_inst [NC];
  logic [1:0] cfg_ssr [NC];
  logic [4:0] cfg_addr [NC];
  data_t      cfg_wdata [NC];
  logic [2:0] ssr_busy [NC];
  logic       core_busy [NC], illegal [NC], fpu_issue [NC];
  logic       dma_valid, dma_ready, dma_dir, dma_busy, dma_done;
  addr_t      dma_src, dma_dst;
  data_t      dma_len;
  tcdm_req_t  l2_req;
  tcdm_rsp_t  l2_rsp;

  pmca_cluster dut (
    .clk_i(clk), .rst_ni(rst_n),
    .acc_valid_i(acc_valid), .acc_ready_o(acc_ready), .acc_inst_i(acc_inst),
    .cfg_valid_i(cfg_valid), .cfg_ssr_i(cfg_ssr), .cfg_addr_i(cfg_addr), .cfg_wdata_i(cfg_wdata),
    .ssr_busy_o(ssr_busy), .core_busy_o(core_busy), .illegal_o(illegal), .fpu_issue_o(fpu_issue),
    .dma_cmd_valid_i(dma_valid), .dma_cmd_ready_o(dma_ready), .dma_cmd_src_i(dma_src),
    .dma_cmd_dst_i(dma_dst), .dma_cmd_len_i(dma_len), .dma_cmd_dir_i(dma_dir),
    .dma_busy_o(dma_busy), .dma_done_o(dma_done), .l2_req_i(l2_req), .l2_rsp_o(l2_rsp));

  int checks = 0, failures = 0;
  task automatic chk(input string w, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; if (failures < 10) $display("FAIL %s got %h exp %h", w, got, exp); end
  endtask

  // ---------------------------------------------------------------- event counters
  int n_conflict = 0, n_idx_fetch = 0, n_scatter = 0, n_frep_replay = 0, n_dma_in = 0, n_dma_out = 0,
      n_l2_prio = 0, n_illegal = 0, cycles = 0;
  int n_issue [NC];
  always @(posedge clk) if (rst_n) begin
    cycles++;
    for (int m = 0; m < NC * 3 + 1; m++)
      if (dut.m_req[m].valid && !dut.m_rsp[m].gnt) n_conflict++;
    if (dut.i_dma.l2_req_o.valid && !dut.i_dma.l2_rsp_i.gnt) n_l2_prio++;
    if (dma_done) begin if (dut.i_dma.dir_q) n_dma_out++; else n_dma_in++; end
    for (int c = 0; c < NC; c++) begin
      if (fpu_issue[c]) n_issue[c]++;
      if (illegal[c]) n_illegal++;
    end
  end
  for (genvar c = 0; c < NC; c++) begin : g_mon
    always @(posedge clk) if (rst_n) begin
      if (dut.g_cc[c].i_cc.g_ssr[0].i_ssr.mem_req_o.valid && dut.g_cc[c].i_cc.g_ssr[0].i_ssr.req_is_idx &&
          dut.g_cc[c].i_cc.g_ssr[0].i_ssr.mem_rsp_i.gnt) n_idx_fetch++;
      if (dut.g_cc[c].i_cc.g_ssr[1].i_ssr.mem_req_o.valid && dut.g_cc[c].i_cc.g_ssr[1].i_ssr.mem_req_o.we &&
          dut.g_cc[c].i_cc.g_ssr[1].i_ssr.ind_q && dut.g_cc[c].i_cc.g_ssr[1].i_ssr.mem_rsp_i.gnt) n_scatter++;
      if (dut.g_cc[c].i_cc.i_frep.state_q == 2'd2 && dut.g_cc[c].i_cc.i_frep.out_ready_i) n_frep_replay++;
    end
  end

  // ---------------------------------------------------------------- drivers
  task automatic l2_write(input int a, input logic [31:0] d);
    @(negedge clk); l2_req.valid = 1; l2_req.we = 1; l2_req.be = 4'hf; l2_req.addr = a; l2_req.wdata = d;
    @(negedge clk); l2_req.valid = 0; l2_req.we = 0;
  endtask
  task automatic l2_read(input int a, output logic [31:0] d);
    @(negedge clk); l2_req.valid = 1; l2_req.we = 0; l2_req.addr = a;
    @(negedge clk); l2_req.valid = 0;
    d = l2_rsp.rdata;
    if (!l2_rsp.rvalid) begin failures++; $display("FAIL L2 read without rvalid"); end
  endtask
  task automatic dma(input logic dir, input int src, input int dst, input int len);
    @(negedge clk); dma_valid = 1; dma_dir = dir; dma_src = src; dma_dst = dst; dma_len = len;
    @(posedge clk); while (!dma_ready) @(posedge clk);
    @(negedge clk); dma_valid = 0;
  endtask
  task automatic cfg(input int c, input int lane, input logic [4:0] a, input logic [31:0] d);
    @(negedge clk); cfg_valid[c] = 1; cfg_ssr[c] = 2'(lane); cfg_addr[c] = a; cfg_wdata[c] = d;
    @(negedge clk); cfg_valid[c] = 0;
  endtask
  task automatic off(input int c, input logic [31:0] instr, input logic [31:0] opa);
    @(negedge clk); acc_valid[c] = 1; acc_inst[c].instr = instr; acc_inst[c].opa = opa;
    @(posedge clk); while (!acc_ready[c]) @(posedge clk);
    @(negedge clk); acc_valid[c] = 0;
  endtask
  task automatic wait_idle(input int c);
    @(posedge clk);
    while (core_busy[c] || ssr_busy[c] != 0) @(posedge clk);
  endtask

  // ---------------------------------------------------------------- problem data
  logic [31:0] x [NX], u [NR], y_ref [NR], z_ref [NR], val [$];
  int          nnz [NR], rstart [NR], cidx [$], perm [NR];
  logic [31:0] lo;
  int          ndone = 0;

  // phase 1 on core c: dot products of rows c*RPC .. c*RPC+RPC-1
  task automatic run_rows(input int c);
    int r0, n;
    r0 = c * RPC;
    n = 0;
    for (int r = r0; r < r0 + RPC; r++) n += nnz[r];
    cfg(c, 0, SsrRegBound0, n - 1);
    cfg(c, 0, SsrRegIdxBase, AIDX + 2 * rstart[r0]);
    cfg(c, 0, SsrRegIdxCfg, 32'h121);
    cfg(c, 1, SsrRegBound0, n - 1);
    cfg(c, 1, SsrRegStride0, 4);
    cfg(c, 1, SsrRegIdxCfg, 32'h020);
    cfg(c, 2, SsrRegBound0, RPC - 1);
    cfg(c, 2, SsrRegStride0, 4);
    cfg(c, 0, SsrRegRptr0, AX);
    cfg(c, 1, SsrRegRptr0, AVAL + 4 * rstart[r0]);
    cfg(c, 2, SsrRegWptr0, AY + 4 * r0);
    cfg(c, 3, 5'd0, 1);
    for (int r = r0; r < r0 + RPC; r++) begin
      off(c, i_fmv_w_x(3), 0);
      off(c, i_frep(1, 0), nnz[r] - 1);
      off(c, i_fmadd(3, 0, 1, 3), 0);
      off(c, i_fmv_s(2, 3), 0);
    end
    wait_idle(c);
  endtask

  // phase 2 on core c: z[perm[r]] = max(min(y[r], u[r]), lo) on its RPC elements;
  // lane 0 reads u, lane 2 reads y, lane 1 scatters z through perm[]
  task automatic run_proj(input int c);
    int r0;
    r0 = c * RPC;
    cfg(c, 0, SsrRegIdxCfg, 32'h020);
    cfg(c, 1, SsrRegIdxCfg, 32'h121);
    cfg(c, 1, SsrRegIdxBase, APERM + 2 * r0);
    for (int l = 0; l < 3; l++) begin
      cfg(c, l, SsrRegBound0, RPC - 1);
      cfg(c, l, SsrRegStride0, 4);
    end
    cfg(c, 0, SsrRegRptr0, AU + 4 * r0);
    cfg(c, 2, SsrRegRptr0, AY + 4 * r0);
    cfg(c, 1, SsrRegWptr0, AZ);
    off(c, i_fmv_w_x(8), lo);
    off(c, i_frep(2, 0), RPC - 1);
    off(c, i_fmin(4, 2, 0), 0);
    off(c, i_fmax(1, 4, 8), 0);
    wait_idle(c);
  endtask

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int k, t_start;
    logic [31:0] d;
    for (int c = 0; c < NC; c++) begin
      acc_valid[c] = 0; acc_inst[c] = '0; cfg_valid[c] = 0; cfg_ssr[c] = 0; cfg_addr[c] = 0;
      cfg_wdata[c] = 0; n_issue[c] = 0;
    end
    dma_valid = 0; dma_dir = 0; dma_src = 0; dma_dst = 0; dma_len = 0; l2_req = '0;
    lo = 32'hbe80_0000;  // -0.25

    // problem
    for (int i = 0; i < NX; i++) x[i] = rnd_f();
    k = 0;
    for (int r = 0; r < NR; r++) begin
      nnz[r] = $urandom_range(1, 8);
      rstart[r] = k;
      for (int j = 0; j < nnz[r]; j++) begin
        cidx.push_back($urandom_range(0, NX - 1));
        val.push_back(rnd_f());
        k++;
      end
      u[r] = rnd_f();
      perm[r] = r;
    end
    for (int r = NR - 1; r > 0; r--) begin
      int j, t;
      j = $urandom_range(0, r);
      t = perm[r]; perm[r] = perm[j]; perm[j] = t;
    end
    for (int r = 0; r < NR; r++) begin
      logic [31:0] acc;
      acc = 0;
      for (int j = rstart[r]; j < rstart[r] + nnz[r]; j++) acc = fadd(fmul(x[cidx[j]], val[j]), acc);
      y_ref[r] = acc;
      z_ref[r] = (f2r(acc) < f2r(u[r])) ? acc : u[r];
      z_ref[r] = (f2r(z_ref[r]) > f2r(lo)) ? z_ref[r] : lo;
    end

    repeat (3) @(posedge clk);
    rst_n = 1;

    // phase 0: load L2, copy to L1
    for (int i = 0; i < NX; i++) l2_write(AX + 4 * i, x[i]);
    for (int j = 0; j < k; j += 2)
      l2_write(AIDX + 2 * j, {16'(j + 1 < k ? cidx[j + 1] : 0), 16'(cidx[j])});
    for (int j = 0; j < k; j++) l2_write(AVAL + 4 * j, val[j]);
    for (int r = 0; r < NR; r++) l2_write(AU + 4 * r, u[r]);
    for (int r = 0; r < NR; r += 2) l2_write(APERM + 2 * r, {16'(perm[r + 1]), 16'(perm[r])});
    for (int i = 0; i < 16; i++) l2_write(AOUT + 'h100 + 4 * i, 32'hFACE_0000 + i);
    dma(0, 0, 0, (APERM + 2 * NR) / 4);
    // manager keeps reading L2 while the DMA runs
    for (int i = 0; i < 16; i++) begin
      l2_read(AOUT + 'h100 + 4 * i, d);
      chk("manager read during DMA", d, 32'hFACE_0000 + i);
    end
    while (dma_busy) @(posedge clk);

    // phase 1: all cores in parallel, then barrier
    t_start = cycles;
    for (int c = 0; c < NC; c++) begin
      fork
        automatic int cc = c;
        begin run_rows(cc); ndone++; end
      join_none
    end
    wait (ndone == NC);
    ndone = 0;
    $display("phase 1 (sparse rows) took %0d cycles", cycles - t_start);
    // phase 2
    t_start = cycles;
    for (int c = 0; c < NC; c++) begin
      fork
        automatic int cc = c;
        begin run_proj(cc); ndone++; end
      join_none
    end
    wait (ndone == NC);
    $display("phase 2 (projection) took %0d cycles", cycles - t_start);

    // phase 3: results back to L2 and check
    dma(1, AY, AOUT, NR);
    while (dma_busy) @(posedge clk);
    dma(1, AZ, AOUT + 4 * NR, NR);
    while (dma_busy) @(posedge clk);
    for (int r = 0; r < NR; r++) begin
      l2_read(AOUT + 4 * r, d);       chk($sformatf("y[%0d]", r), d, y_ref[r]);
      l2_read(AOUT + 4 * (NR + perm[r]), d); chk($sformatf("z[%0d]", r), d, z_ref[r]);
    end

    // mechanisms
    $display("scattered writes %0d", n_scatter);
    checks++; if (n_scatter != NR)    begin failures++; $display("FAIL scattered writes %0d, expected %0d", n_scatter, NR); end
    $display("bank conflict stalls %0d, index fetches %0d, frep replays %0d, DMA in %0d out %0d, L2 priority stalls %0d",
             n_conflict, n_idx_fetch, n_frep_replay, n_dma_in, n_dma_out, n_l2_prio);
    checks++; if (n_conflict == 0)    begin failures++; $display("FAIL no bank conflict"); end
    checks++; if (n_idx_fetch == 0)   begin failures++; $display("FAIL no indirect index fetch"); end
    checks++; if (n_frep_replay == 0) begin failures++; $display("FAIL no frep replay"); end
    checks++; if (n_dma_in == 0)      begin failures++; $display("FAIL no DMA into L1"); end
    checks++; if (n_dma_out == 0)     begin failures++; $display("FAIL no DMA out of L1"); end
    checks++; if (n_l2_prio == 0)     begin failures++; $display("FAIL no L2 priority stall"); end
    chk("no illegal instructions", n_illegal, 0);
    for (int c = 0; c < NC; c++) begin
      checks++;
      if (n_issue[c] == 0) begin failures++; $display("FAIL core %0d issued nothing", c); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
