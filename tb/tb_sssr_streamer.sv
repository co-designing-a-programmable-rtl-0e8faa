// tb_sssr_streamer: self-checking test of one SSR lane.
// A behavioural scratchpad in the testbench answers the lane's requests with
// randomly withheld grants (bank conflicts) and one-cycle read latency. The test
// runs affine read streams of 1 to 4 dimensions, indirect gathers with 8-, 16-,
// 32- and 64-bit indices, an affine write stream and an indirect scatter, and
// compares every element with addresses computed here from the stream
// description. With grants always given it also checks the affine read rate of
// one element per cycle.
`timescale 1ns/1ps
module tb_sssr_streamer;
  import pmca_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       cfg_valid;
  logic [4:0] cfg_addr;
  data_t      cfg_wdata;
  logic       rd_valid, rd_ready, wr_valid, wr_ready, is_write, busy;
  data_t      rd_data, wr_data;
  tcdm_req_t  req;
  tcdm_rsp_t  rsp;

  sssr_streamer #(.Indirect(1'b1), .Depth(4)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .cfg_valid_i(cfg_valid), .cfg_addr_i(cfg_addr), .cfg_wdata_i(cfg_wdata),
    .rd_valid_o(rd_valid), .rd_data_o(rd_data), .rd_ready_i(rd_ready),
    .wr_valid_i(wr_valid), .wr_data_i(wr_data), .wr_ready_o(wr_ready),
    .is_write_o(is_write), .busy_o(busy),
    .mem_req_o(req), .mem_rsp_i(rsp)
  );

  // behavioural memory: 16 KiB, word addressed
  logic [31:0] mem [4096];
  int  gnt_pct = 70;
  logic gnt_rand;
  always_ff @(posedge clk) gnt_rand <= ($urandom_range(0, 99) < gnt_pct);
  assign rsp.gnt = req.valid && gnt_rand;
  always_ff @(posedge clk) begin
    rsp.rvalid <= 1'b0;
    if (req.valid && rsp.gnt) begin
      if (req.we) mem[req.addr[13:2]] <= req.wdata;
      else begin
        rsp.rvalid <= 1'b1;
        rsp.rdata  <= mem[req.addr[13:2]];
      end
    end
  end

  int checks = 0, failures = 0;
  task automatic chk(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got=%h exp=%h", what, got, exp);
    end
  endtask

  task automatic cfg(input logic [4:0] a, input logic [31:0] d);
    @(negedge clk);
    cfg_valid = 1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk);
    cfg_valid = 0;
  endtask

  // consume n elements, checking each against exp[]
  task automatic consume(input string what, input int n, input logic [31:0] exp[$], input bit rand_ready);
    int k = 0;
    while (k < n) begin
      @(negedge clk);
      rd_ready = rand_ready ? 1'($urandom) : 1'b1;
      if (rd_valid && rd_ready) begin
        chk(what, rd_data, exp[k]);
        k++;
      end
      @(posedge clk);
    end
    @(negedge clk); rd_ready = 0;
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] exp[$];
    int b[4], s[4], nd, n, t0, t1, base;
    logic [31:0] idx[$];
    cfg_valid = 0; cfg_addr = 0; cfg_wdata = 0; rd_ready = 0; wr_valid = 0; wr_data = 0;
    for (int i = 0; i < 4096; i++) mem[i] = 32'hA000_0000 + i;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- affine reads, 1..4 dims
    for (nd = 1; nd <= 4; nd++) begin
      b = '{3, 2, 1, 1};
      s = '{4, 64, -32, 1024};
      base = 32'h200;
      for (int d = 0; d < 4; d++) begin cfg(SsrRegBound0 + 5'(d), b[d]); cfg(SsrRegStride0 + 5'(d), s[d]); end
      cfg(SsrRegIdxCfg, 32'h020);
      exp.delete();
      for (int i3 = 0; i3 <= (nd > 3 ? b[3] : 0); i3++)
        for (int i2 = 0; i2 <= (nd > 2 ? b[2] : 0); i2++)
          for (int i1 = 0; i1 <= (nd > 1 ? b[1] : 0); i1++)
            for (int i0 = 0; i0 <= b[0]; i0++)
              exp.push_back(mem[(base + i0*s[0] + i1*s[1] + i2*s[2] + i3*s[3]) / 4]);
      cfg(SsrRegRptr0 + 5'(nd-1), base);
      consume($sformatf("affine%0dd", nd), exp.size(), exp, 1);
      repeat (3) @(posedge clk);
      chk("idle after stream", {31'd0, busy}, 0);
    end

    // ---- indirect gathers with 8/16/32/64-bit indices
    for (int isz = 0; isz < 4; isz++) begin
      n = 11;
      idx.delete();
      for (int k = 0; k < n; k++) idx.push_back($urandom_range(0, 255));
      // index array at byte 0x2000
      for (int k = 0; k < 64; k++) mem[(32'h2000 >> 2) + k] = 0;
      for (int k = 0; k < n; k++) begin
        int ba; ba = 32'h2000 + (k << isz);
        case (isz)
          0: mem[ba>>2][(ba%4)*8 +: 8] = 8'(idx[k]);
          1: mem[ba>>2][(ba%4)*8 +: 16] = 16'(idx[k]);
          default: mem[ba>>2] = idx[k];
        endcase
      end
      cfg(SsrRegBound0, n - 1);
      cfg(SsrRegIdxBase, 32'h2000);
      cfg(SsrRegIdxCfg, 32'h100 | 32'h020 | isz);
      exp.delete();
      for (int k = 0; k < n; k++) exp.push_back(mem[(32'h400 + idx[k]*4) >> 2]);
      cfg(SsrRegRptr0, 32'h400);
      consume($sformatf("gather isz=%0d", isz), n, exp, 1);
      repeat (3) @(posedge clk);
    end

    // ---- affine write, 2-D
    cfg(SsrRegIdxCfg, 32'h020);
    cfg(SsrRegBound0, 4); cfg(SsrRegStride0, 8);
    cfg(SsrRegBound0 + 1, 2); cfg(SsrRegStride0 + 1, 128);
    cfg(SsrRegWptr0 + 1, 32'h3000);
    for (int k = 0; k < 15; k++) begin
      @(negedge clk); wr_valid = 1; wr_data = 32'hC0DE_0000 + k;
      @(posedge clk); while (!wr_ready) @(posedge clk);
    end
    @(negedge clk); wr_valid = 0;
    while (busy) @(posedge clk);
    @(posedge clk);
    for (int j = 0; j < 3; j++) for (int i = 0; i < 5; i++)
      chk("affine write", mem[(32'h3000 + i*8 + j*128) >> 2], 32'hC0DE_0000 + j*5 + i);

    // ---- indirect scatter, 16-bit indices
    n = 9;
    for (int k = 0; k < n; k++) begin
      int ba; ba = 32'h2800 + k*2;
      mem[ba>>2][(ba%4)*8 +: 16] = 16'(k*7 + 3);
    end
    cfg(SsrRegBound0, n - 1);
    cfg(SsrRegIdxBase, 32'h2800);
    cfg(SsrRegIdxCfg, 32'h121);
    cfg(SsrRegWptr0, 32'h3800);
    for (int k = 0; k < n; k++) begin
      @(negedge clk); wr_valid = 1; wr_data = 32'h5CA7_0000 + k;
      @(posedge clk); while (!wr_ready) @(posedge clk);
    end
    @(negedge clk); wr_valid = 0;
    while (busy) @(posedge clk);
    @(posedge clk);
    for (int k = 0; k < n; k++) chk("scatter", mem[(32'h3800 + (k*7+3)*4) >> 2], 32'h5CA7_0000 + k);

    // ---- rate: 1-D affine read of 32 elements with grants always given
    gnt_pct = 100;
    repeat (2) @(posedge clk);
    cfg(SsrRegIdxCfg, 32'h020);
    cfg(SsrRegBound0, 31); cfg(SsrRegStride0, 4);
    exp.delete();
    for (int k = 0; k < 32; k++) exp.push_back(mem[(32'h100 >> 2) + k]);
    @(negedge clk); rd_ready = 1;
    cfg_valid = 1; cfg_addr = SsrRegRptr0; cfg_wdata = 32'h100;
    t0 = $time / 10;
    @(negedge clk); cfg_valid = 0;
    consume("rate", 32, exp, 0);
    t1 = $time / 10;
    $display("32-element affine stream took %0d cycles", t1 - t0);
    checks++;
    if (t1 - t0 > 32 + 4) begin failures++; $display("FAIL rate: %0d cycles", t1 - t0); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
