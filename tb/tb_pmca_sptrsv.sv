// tb_pmca_sptrsv: runs a sparse lower-triangular solve L x = b, the kernel that
// dominates the MPC solver, on the full-size cluster (default parameters).
//
// Two systems are solved one after the other, with the dimensions the source
// gives for the smallest evaluated MPC problem (3x3 grid, horizon 2), whose KKT
// matrix is quoted both as n = 95 variables + m = 97 constraints (192 unknowns)
// and as n = 1310 + m = 1312 (2622 unknowns). The larger one, with about forty
// levels, is close to the synchronisation count reported for the largest problem
// after scheduling. The sparsity patterns are random (a real factor's pattern is
// not reproduced): unknowns are numbered level by level, every row of a level depends
// only on earlier levels and on at least one unknown of the level just before, and
// has up to eight (small system) or six (large system) off-diagonal entries (unit diagonal, as in an LDL^T factor).
// This is the level-scheduled, row-oriented form of the solve: within a level the
// rows are split into eight contiguous chunks, one per core, and the levels are
// separated by barriers (the testbench waits until every core is idle), which is
// the synchronisation the ahead-of-time schedule tries to minimise.
//
// Per core and level: lane 0 gathers x through the rows' 16-bit column indices,
// lane 1 streams the matching values, lane 2 writes the finished x entries. Per row
// the core loads b_i with fmv.w.x, repeats fnmsub (acc -= L_ij * x_j) with FREP and
// pushes the result to lane 2. The data go L2 -> L1 by DMA and the solution back by
// DMA, and are checked against an FP32 reference with the same operation order.
// The testbench reports cycles, barriers and FPU utilisation, and fails if no bank
// conflict, index fetch or FREP replay occurred.
`timescale 1ns/1ps
module tb_pmca_sptrsv;
  import pmca_pkg::*;
  import tb_fp_pkg::*;

  localparam int NC = 8;
  localparam int MAXL = 256;         // most levels
  localparam int AX = 32'h0000, AIDX = 32'h4000, AVAL = 32'hC000, AOUT = 32'h1C000;

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
  int n_conflict = 0, n_idx_fetch = 0, n_frep_replay = 0, n_dma_in = 0, n_dma_out = 0,
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
  logic [31:0] b [], x_ref [], val [$];
  int          nnz [], rstart [], cidx [$], lvl_lo [MAXL], lvl_n [MAXL];
  int          nlev = 0, ndone = 0;

  // rows [lo, hi) of one level on core c
  task automatic run_chunk(input int c, input int lo, input int hi);
    int tot;
    tot = 0;
    for (int r = lo; r < hi; r++) tot += nnz[r];
    if (tot > 0) begin
      cfg(c, 0, SsrRegBound0, tot - 1);
      cfg(c, 0, SsrRegIdxBase, AIDX + 2 * rstart[lo]);
      cfg(c, 0, SsrRegIdxCfg, 32'h121);
      cfg(c, 1, SsrRegBound0, tot - 1);
      cfg(c, 1, SsrRegStride0, 4);
      cfg(c, 1, SsrRegIdxCfg, 32'h020);
      cfg(c, 0, SsrRegRptr0, AX);
      cfg(c, 1, SsrRegRptr0, AVAL + 4 * rstart[lo]);
    end
    cfg(c, 2, SsrRegBound0, hi - lo - 1);
    cfg(c, 2, SsrRegStride0, 4);
    cfg(c, 2, SsrRegWptr0, AX + 4 * lo);
    cfg(c, 3, 5'd0, 1);
    for (int r = lo; r < hi; r++) begin
      off(c, i_fmv_w_x(3), b[r]);
      if (nnz[r] > 0) begin
        off(c, i_frep(1, 0), nnz[r] - 1);
        off(c, i_fnmsub(3, 0, 1, 3), 0);
      end
      off(c, i_fmv_s(2, 3), 0);
    end
    wait_idle(c);
  endtask

  // build a random level-structured system of n unknowns (first level n0 rows,
  // others smin..smax rows, 1..maxnnz off-diagonal entries per row), load it, solve
  // it on the cluster and check x
  task automatic run_system(input int n, input int n0, input int smin, input int smax, input int maxnnz);
    int k, lo, t_start, t_solve, issues, issues0, nconf0;
    logic [31:0] d;
    b = new[n]; x_ref = new[n]; nnz = new[n]; rstart = new[n];
    cidx.delete(); val.delete();
    nlev = 0; lo = 0;
    while (lo < n) begin
      int sz;
      sz = (nlev == 0) ? n0 : $urandom_range(smin, smax);
      if (lo + sz > n || nlev == MAXL - 1) sz = n - lo;
      lvl_lo[nlev] = lo; lvl_n[nlev] = sz; nlev++; lo += sz;
    end
    k = 0;
    for (int l = 0; l < nlev; l++)
      for (int r = lvl_lo[l]; r < lvl_lo[l] + lvl_n[l]; r++) begin
        rstart[r] = k;
        nnz[r] = (l == 0) ? 0 : $urandom_range(1, maxnnz);
        for (int j = 0; j < nnz[r]; j++) begin
          if (j == 0) cidx.push_back($urandom_range(lvl_lo[l - 1], lvl_lo[l] - 1));
          else        cidx.push_back($urandom_range(0, lvl_lo[l] - 1));
          val.push_back(r2f((real'($urandom_range(0, 2000)) - 1000.0) / 4000.0));
        end
        k += nnz[r];
        b[r] = rnd_f();
      end
    // reference: x_i = b_i - sum_j L_ij x_j, same order and rounding as the cores
    for (int r = 0; r < n; r++) begin
      logic [31:0] acc, p;
      acc = b[r];
      for (int j = rstart[r]; j < rstart[r] + nnz[r]; j++) begin
        p = fmul(x_ref[cidx[j]], val[j]);
        acc = fadd({~p[31], p[30:0]}, acc);
      end
      x_ref[r] = acc;
    end
    $display("system: %0d unknowns, %0d levels, %0d off-diagonal non-zeros", n, nlev, k);
    if (AX + 4 * n > AIDX || AIDX + 2 * k > AVAL || AVAL + 4 * k > AOUT || AOUT + 4 * n > 128 * 1024) begin
      failures++; $display("FAIL system does not fit the memory layout");
      return;
    end

    for (int j = 0; j < k; j += 2)
      l2_write(AIDX + 2 * j, {16'(j + 1 < k ? cidx[j + 1] : 0), 16'(cidx[j])});
    for (int j = 0; j < k; j++) l2_write(AVAL + 4 * j, val[j]);
    dma(0, AIDX, AIDX, (AVAL + 4 * k - AIDX) / 4);
    while (dma_busy) @(posedge clk);

    issues0 = 0;
    for (int c = 0; c < NC; c++) issues0 += n_issue[c];
    nconf0 = n_conflict;
    t_start = cycles;
    for (int l = 0; l < nlev; l++) begin
      ndone = 0;
      for (int c = 0; c < NC; c++) begin
        fork
          automatic int cc = c;
          automatic int clo = lvl_lo[l] + lvl_n[l] * c / NC;
          automatic int chi = lvl_lo[l] + lvl_n[l] * (c + 1) / NC;
          begin if (chi > clo) run_chunk(cc, clo, chi); ndone++; end
        join_none
      end
      wait (ndone == NC);
    end
    t_solve = cycles - t_start;
    issues = -issues0;
    for (int c = 0; c < NC; c++) issues += n_issue[c];
    $display("solve: %0d cycles, %0d barriers, %0d FP instructions, FPU utilisation %0d%%, %0d bank conflict stalls",
             t_solve, nlev, issues, 100 * issues / (NC * t_solve), n_conflict - nconf0);

    dma(1, AX, AOUT, n);
    while (dma_busy) @(posedge clk);
    for (int r = 0; r < n; r++) begin
      l2_read(AOUT + 4 * r, d);
      chk($sformatf("x[%0d]", r), d, x_ref[r]);
    end
  endtask

  initial begin
    #200000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < NC; c++) begin
      acc_valid[c] = 0; acc_inst[c] = '0; cfg_valid[c] = 0; cfg_ssr[c] = 0; cfg_addr[c] = 0;
      cfg_wdata[c] = 0; n_issue[c] = 0;
    end
    dma_valid = 0; dma_dir = 0; dma_src = 0; dma_dst = 0; dma_len = 0; l2_req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    run_system(192, 40, 4, 28, 8);
    run_system(2622, 300, 20, 100, 6);

    $display("bank conflict stalls %0d, index fetches %0d, frep replays %0d",
             n_conflict, n_idx_fetch, n_frep_replay);
    checks++; if (n_conflict == 0)    begin failures++; $display("FAIL no bank conflict"); end
    checks++; if (n_idx_fetch == 0)   begin failures++; $display("FAIL no indirect index fetch"); end
    checks++; if (n_frep_replay == 0) begin failures++; $display("FAIL no frep replay"); end
    chk("no illegal instructions", n_illegal, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
