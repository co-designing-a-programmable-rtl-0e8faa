// tb_cluster_dma: self-checking test of the cluster DMA.
// Two behavioural memories stand for L1 and L2, each withholding grants at
// random. Transfers of several lengths in both directions are checked word by
// word against the source, including that no word outside the destination range
// changes; a zero-length command must complete at once; with grants always given
// a 64-word copy must take at most 64+4 cycles.
`timescale 1ns/1ps
module tb_cluster_dma;
  import pmca_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready, cmd_dir, busy, done;
  addr_t cmd_src, cmd_dst; data_t cmd_len;
  tcdm_req_t l1_req, l2_req; tcdm_rsp_t l1_rsp, l2_rsp;

  cluster_dma dut (.clk_i(clk), .rst_ni(rst_n), .cmd_valid_i(cmd_valid), .cmd_ready_o(cmd_ready),
    .cmd_src_i(cmd_src), .cmd_dst_i(cmd_dst), .cmd_len_i(cmd_len), .cmd_dir_i(cmd_dir),
    .busy_o(busy), .done_o(done), .l1_req_o(l1_req), .l1_rsp_i(l1_rsp),
    .l2_req_o(l2_req), .l2_rsp_i(l2_rsp));

  logic [31:0] m1 [1024], m2 [1024];
  int pct = 60;
  logic g1, g2;
  always_ff @(posedge clk) begin g1 <= $urandom_range(0,99) < pct; g2 <= $urandom_range(0,99) < pct; end
  assign l1_rsp.gnt = l1_req.valid && g1;
  assign l2_rsp.gnt = l2_req.valid && g2;
  always_ff @(posedge clk) begin
    l1_rsp.rvalid <= 0; l2_rsp.rvalid <= 0;
    if (l1_req.valid && l1_rsp.gnt) begin
      if (l1_req.we) m1[l1_req.addr[11:2]] <= l1_req.wdata;
      else begin l1_rsp.rvalid <= 1; l1_rsp.rdata <= m1[l1_req.addr[11:2]]; end
    end
    if (l2_req.valid && l2_rsp.gnt) begin
      if (l2_req.we) m2[l2_req.addr[11:2]] <= l2_req.wdata;
      else begin l2_rsp.rvalid <= 1; l2_rsp.rdata <= m2[l2_req.addr[11:2]]; end
    end
  end

  int checks = 0, failures = 0;
  task automatic chk(input string w, input logic [31:0] g, input logic [31:0] e);
    checks++; if (g !== e) begin failures++; if (failures < 10) $display("FAIL %s %h exp %h", w, g, e); end
  endtask

  task automatic xfer(input logic dir, input int src, input int dst, input int len, output int cyc);
    int t0;
    @(negedge clk);
    cmd_valid = 1; cmd_dir = dir; cmd_src = src; cmd_dst = dst; cmd_len = len;
    t0 = $time / 10;
    @(posedge clk); while (!cmd_ready) @(posedge clk);
    @(negedge clk); cmd_valid = 0;
    while (!done) @(negedge clk);
    cyc = $time / 10 - t0;
  endtask

  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    logic [31:0] s1 [1024], s2 [1024];
    int cyc;
    cmd_valid = 0; cmd_dir = 0; cmd_src = 0; cmd_dst = 0; cmd_len = 0;
    for (int i = 0; i < 1024; i++) begin m1[i] = 32'h1100_0000 + i; m2[i] = 32'h2200_0000 + i; end
    repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 12; t++) begin
      int len, so, dof, dir;
      len = $urandom_range(1, 100); so = $urandom_range(0, 400); dof = $urandom_range(0, 400); dir = t % 2;
      s1 = m1; s2 = m2;
      xfer(1'(dir), so*4, dof*4, len, cyc);
      @(posedge clk);
      for (int i = 0; i < 1024; i++) begin
        if (dir == 0) chk("L2->L1", m1[i], (i >= dof && i < dof+len) ? s2[so + i - dof] : s1[i]);
        else          chk("L1->L2", m2[i], (i >= dof && i < dof+len) ? s1[so + i - dof] : s2[i]);
      end
    end
    xfer(0, 0, 0, 0, cyc);
    chk("zero length", cyc, 1);
    pct = 100;
    @(posedge clk);
    xfer(0, 0, 32'h800, 64, cyc);
    $display("64-word copy: %0d cycles", cyc);
    checks++; if (cyc > 64 + 4) begin failures++; $display("FAIL rate %0d", cyc); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
