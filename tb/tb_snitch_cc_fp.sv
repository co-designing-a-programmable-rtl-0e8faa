// tb_snitch_cc_fp: self-checking test of one core complex's FP subsystem.
// A behavioural three-port scratchpad (random grant stalls) serves the SSR lanes.
// The testbench plays the integer core: it configures the streams and offloads
// instruction sequences for three solver kernels, then compares the memory
// results with FP32 references computed here:
//  A  sparse row dot products y_r = sum_k L_rk x[c_k] (indirect gather on lane 0,
//     affine values on lane 1, frep-repeated fmadd, results on lane 2);
//  B  y[r_k] = c - l_k x[c_k] (gather with 8-bit indices, scatter with 32-bit
//     indices, fnmsub);
//  C  box projection z = max(min(v, u), lo) with a two-instruction frep body,
//     also timed with grants always given;
//  D  f0 used as a plain register with streaming disabled, and an unsupported
//     instruction (fdiv.s) reported as illegal.
`timescale 1ns/1ps
module tb_snitch_cc_fp;
  import pmca_pkg::*;
  import tb_fp_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic acc_valid, acc_ready, cfg_valid, busy, illegal, issue;
  fp_inst_t acc_inst;
  logic [1:0] cfg_ssr; logic [4:0] cfg_addr; data_t cfg_wdata;
  logic [2:0] ssr_busy;
  tcdm_req_t req [3];
  tcdm_rsp_t rsp [3];

  snitch_cc_fp dut (.clk_i(clk), .rst_ni(rst_n), .acc_valid_i(acc_valid), .acc_ready_o(acc_ready),
    .acc_inst_i(acc_inst), .cfg_valid_i(cfg_valid), .cfg_ssr_i(cfg_ssr), .cfg_addr_i(cfg_addr),
    .cfg_wdata_i(cfg_wdata), .ssr_busy_o(ssr_busy), .busy_o(busy), .illegal_o(illegal),
    .issue_o(issue), .ssr_req_o(req), .ssr_rsp_i(rsp));

  logic [31:0] mem [4096];
  int pct = 70;
  logic g [3];
  always_ff @(posedge clk) for (int p = 0; p < 3; p++) g[p] <= $urandom_range(0, 99) < pct;
  always_comb for (int p = 0; p < 3; p++) begin
    rsp[p].gnt = req[p].valid && g[p];
  end
  always_ff @(posedge clk) for (int p = 0; p < 3; p++) begin
    rsp[p].rvalid <= 1'b0;
    if (req[p].valid && rsp[p].gnt) begin
      if (req[p].we) mem[req[p].addr[13:2]] <= req[p].wdata;
      else begin rsp[p].rvalid <= 1'b1; rsp[p].rdata <= mem[req[p].addr[13:2]]; end
    end
  end

  int checks = 0, failures = 0, n_illegal = 0;
  always @(posedge clk) if (rst_n && illegal) n_illegal++;

  task automatic chk(input string w, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; if (failures < 10) $display("FAIL %s got %h exp %h", w, got, exp); end
  endtask

  task automatic cfg(input int lane, input logic [4:0] a, input logic [31:0] d);
    @(negedge clk); cfg_valid = 1; cfg_ssr = 2'(lane); cfg_addr = a; cfg_wdata = d;
    @(negedge clk); cfg_valid = 0;
  endtask

  task automatic off(input logic [31:0] instr, input logic [31:0] opa);
    @(negedge clk); acc_valid = 1; acc_inst.instr = instr; acc_inst.opa = opa;
    @(posedge clk); while (!acc_ready) @(posedge clk);
    @(negedge clk); acc_valid = 0;
  endtask

  task automatic drain();
    @(posedge clk);
    while (busy || ssr_busy != 0) @(posedge clk);
    repeat (2) @(posedge clk);
  endtask

  function automatic void put_idx(input int base, input int k, input int isz, input int v);
    int ba; ba = base + (k << isz);
    case (isz)
      0: mem[ba >> 2][(ba % 4) * 8 +: 8] = 8'(v);
      1: mem[ba >> 2][(ba % 4) * 8 +: 16] = 16'(v);
      default: mem[ba >> 2] = 32'(v);
    endcase
  endfunction

  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    int nnz [6], tot, k, n, t0, t1;
    int cidx [$];
    logic [31:0] acc, cst, lo;
    acc_valid = 0; acc_inst = '0; cfg_valid = 0; cfg_ssr = 0; cfg_addr = 0; cfg_wdata = 0;
    for (int i = 0; i < 4096; i++) mem[i] = 0;
    for (int i = 0; i < 64; i++) mem[i] = rnd_f();   // x at 0x0000
    repeat (3) @(posedge clk); rst_n = 1;

    // ---------------- A: sparse row dot products
    tot = 0;
    for (int r = 0; r < 6; r++) begin nnz[r] = $urandom_range(1, 7); tot += nnz[r]; end
    cidx.delete();
    for (int j = 0; j < tot; j++) begin
      cidx.push_back($urandom_range(0, 63));
      put_idx(32'h1000, j, 1, cidx[j]);
      mem[(32'h2000 >> 2) + j] = rnd_f();
    end
    cfg(0, SsrRegBound0, tot - 1); cfg(0, SsrRegIdxBase, 32'h1000); cfg(0, SsrRegIdxCfg, 32'h121);
    cfg(1, SsrRegBound0, tot - 1); cfg(1, SsrRegStride0, 4); cfg(1, SsrRegIdxCfg, 32'h020);
    cfg(2, SsrRegBound0, 5); cfg(2, SsrRegStride0, 4); cfg(2, SsrRegIdxCfg, 32'h020);
    cfg(0, SsrRegRptr0, 32'h0000); cfg(1, SsrRegRptr0, 32'h2000); cfg(2, SsrRegWptr0, 32'h3000);
    cfg(3, 5'd0, 1);
    for (int r = 0; r < 6; r++) begin
      off(i_fmv_w_x(3), 0);
      off(i_frep(1, 0), nnz[r] - 1);
      off(i_fmadd(3, 0, 1, 3), 0);
      off(i_fmv_s(2, 3), 0);
    end
    drain();
    k = 0;
    for (int r = 0; r < 6; r++) begin
      acc = 0;
      for (int j = 0; j < nnz[r]; j++) begin
        acc = fadd(fmul(mem[cidx[k]], mem[(32'h2000 >> 2) + k]), acc);
        k++;
      end
      chk($sformatf("A row %0d", r), mem[(32'h3000 >> 2) + r], acc);
    end

    // ---------------- B: gather (8-bit idx) / scatter (32-bit idx) with fnmsub
    n = 10;
    cst = 32'h4040_0000; // 3.0
    for (int j = 0; j < n; j++) begin
      put_idx(32'h1400, j, 0, (j * 5 + 1) % 64);
      put_idx(32'h1800, j, 2, 63 - j * 3);
      mem[(32'h2400 >> 2) + j] = rnd_f();
    end
    cfg(0, SsrRegBound0, n - 1); cfg(0, SsrRegIdxBase, 32'h1400); cfg(0, SsrRegIdxCfg, 32'h120);
    cfg(1, SsrRegBound0, n - 1); cfg(1, SsrRegIdxBase, 32'h1800); cfg(1, SsrRegIdxCfg, 32'h122);
    cfg(2, SsrRegBound0, n - 1); cfg(2, SsrRegStride0, 4); cfg(2, SsrRegIdxCfg, 32'h020);
    cfg(0, SsrRegRptr0, 32'h0000); cfg(1, SsrRegWptr0, 32'h3400); cfg(2, SsrRegRptr0, 32'h2400);
    off(i_fmv_w_x(7), cst);
    off(i_frep(1, 0), n - 1);
    off(i_fnmsub(1, 2, 0, 7), 0);
    drain();
    for (int j = 0; j < n; j++)
      chk($sformatf("B %0d", j), mem[(32'h3400 >> 2) + 63 - j * 3],
          fadd(cst, fmul(mem[(32'h2400 >> 2) + j], mem[(j * 5 + 1) % 64]) ^ 32'h8000_0000));

    // ---------------- C: projection, timed with grants always given
    pct = 100;
    n = 32;
    lo = 32'hbf00_0000; // -0.5
    for (int j = 0; j < n; j++) begin
      mem[(32'h2800 >> 2) + j] = rnd_f();
      mem[(32'h2C00 >> 2) + j] = rnd_f();
    end
    cfg(0, SsrRegBound0, n - 1); cfg(0, SsrRegStride0, 4); cfg(0, SsrRegIdxCfg, 32'h020);
    cfg(1, SsrRegBound0, n - 1); cfg(1, SsrRegStride0, 4); cfg(1, SsrRegIdxCfg, 32'h020);
    cfg(2, SsrRegBound0, n - 1); cfg(2, SsrRegStride0, 4);
    cfg(0, SsrRegRptr0, 32'h2800); cfg(1, SsrRegRptr0, 32'h2C00); cfg(2, SsrRegWptr0, 32'h3800);
    off(i_fmv_w_x(8), lo);
    off(i_frep(2, 0), n - 1);
    t0 = $time / 10;
    off(i_fmin(4, 0, 1), 0);
    off(i_fmax(2, 4, 8), 0);
    drain();
    t1 = $time / 10;
    for (int j = 0; j < n; j++) begin
      logic [31:0] v, u, m;
      v = mem[(32'h2800 >> 2) + j]; u = mem[(32'h2C00 >> 2) + j];
      m = (f2r(v) < f2r(u)) ? v : u;
      m = (f2r(m) > f2r(lo)) ? m : lo;
      chk($sformatf("C %0d", j), mem[(32'h3800 >> 2) + j], m);
    end
    $display("projection of %0d elements (%0d FP instructions): %0d cycles", n, 2 * n, t1 - t0);
    checks++;
    if (t1 - t0 > 2 * n + 12) begin failures++; $display("FAIL projection took %0d cycles", t1 - t0); end

    // ---------------- D: plain registers and an illegal instruction
    cfg(3, 5'd0, 0);
    off(i_fmv_w_x(0), 32'h3fc0_0000);          // f0 = 1.5
    off(i_fadd(9, 0, 0), 0);                   // f9 = 3.0
    off(op_fp(7'b0001100, 3'd0, 9, 0, 0), 0);  // fdiv.s: not supported
    cfg(2, SsrRegBound0, 0);
    cfg(2, SsrRegWptr0, 32'h3F00);
    cfg(3, 5'd0, 1);
    off(i_fmv_s(2, 9), 0);
    drain();
    chk("D plain f0", mem[32'h3F00 >> 2], 32'h4040_0000);
    chk("D illegal", n_illegal, 1);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
