// tb_tcdm_interconnect: self-checking test of the logarithmic interconnect with
// 6 masters and 8 banks (behavioural banks in the testbench).
// Masters issue random reads and writes and hold each request until granted. A
// reference memory is updated at each grant; every read's data, returned one
// cycle after its grant, is compared with it. Also checked: masters on distinct
// banks are all granted in the same cycle; masters all hitting one bank are
// served one per cycle and each within NumMasters cycles (round robin).
`timescale 1ns/1ps
module tb_tcdm_interconnect;
  import pmca_pkg::*;
  localparam int NM = 6, NB = 8, WPB = 64;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  tcdm_req_t m_req [NM];
  tcdm_rsp_t m_rsp [NM];
  tcdm_req_t b_req [NB];
  data_t     b_rdata [NB];

  tcdm_interconnect #(.NumMasters(NM), .NumBanks(NB)) dut (
    .clk_i(clk), .rst_ni(rst_n), .m_req_i(m_req), .m_rsp_o(m_rsp),
    .bank_req_o(b_req), .bank_rdata_i(b_rdata));

  logic [31:0] bank_mem [NB][WPB];
  always_ff @(posedge clk)
    for (int b = 0; b < NB; b++)
      if (b_req[b].valid) begin
        if (b_req[b].we) bank_mem[b][b_req[b].addr[5:0]] <= b_req[b].wdata;
        else b_rdata[b] <= bank_mem[b][b_req[b].addr[5:0]];
      end

  logic [31:0] ref_mem [NB*WPB];
  logic [31:0] exp_rd [NM];
  logic        exp_v  [NM];
  int checks = 0, failures = 0;
  int mode = 0;   // 0 random, 1 distinct banks, 2 one bank
  int wait_cnt [NM];
  int max_wait = 0;

  // monitor: apply grants to the reference and check read data
  always @(posedge clk) if (rst_n) begin
    for (int m = 0; m < NM; m++) begin
      if (exp_v[m]) begin
        checks++;
        if (!m_rsp[m].rvalid || m_rsp[m].rdata !== exp_rd[m]) begin
          failures++;
          if (failures < 10) $display("FAIL m%0d rdata %h exp %h rvalid %b", m, m_rsp[m].rdata, exp_rd[m], m_rsp[m].rvalid);
        end
      end else if (m_rsp[m].rvalid) begin
        failures++; $display("FAIL m%0d spurious rvalid", m);
      end
      exp_v[m] = 1'b0;
    end
    for (int m = 0; m < NM; m++)
      if (m_req[m].valid && m_rsp[m].gnt) begin
        if (m_req[m].we) ref_mem[m_req[m].addr[10:2]] = m_req[m].wdata;
        else begin exp_rd[m] = ref_mem[m_req[m].addr[10:2]]; exp_v[m] = 1'b1; end
      end
  end

  // master drivers
  always @(posedge clk) if (rst_n) begin
    for (int m = 0; m < NM; m++) begin
      if (!m_req[m].valid || m_rsp[m].gnt) begin
        if (m_req[m].valid && wait_cnt[m] > max_wait) max_wait = wait_cnt[m];
        wait_cnt[m] = 0;
        m_req[m].valid <= (mode != 0) || 1'($urandom);
        m_req[m].we    <= 1'($urandom);
        m_req[m].be    <= 4'hf;
        m_req[m].wdata <= $urandom;
        case (mode)
          1: m_req[m].addr <= {21'd0, 6'($urandom), 3'(m), 2'b00};
          2: m_req[m].addr <= {21'd0, 6'($urandom), 3'd5, 2'b00};
          default: m_req[m].addr <= {21'd0, 9'($urandom), 2'b00};
        endcase
      end else wait_cnt[m]++;
    end
  end

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int all_gnt;
    for (int m = 0; m < NM; m++) begin m_req[m] = '0; exp_v[m] = 0; wait_cnt[m] = 0; end
    // identical initial contents in banks and reference
    for (int a = 0; a < NB*WPB; a++) begin
      ref_mem[a] = 32'h1000_0000 + a;
      bank_mem[a % NB][a / NB] = 32'h1000_0000 + a;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2000) @(posedge clk);
    // distinct banks: every valid request granted at once
    mode = 1;
    repeat (3) @(posedge clk);
    all_gnt = 1;
    repeat (50) begin
      @(negedge clk);
      for (int m = 0; m < NM; m++) if (m_req[m].valid && !m_rsp[m].gnt) all_gnt = 0;
    end
    checks++; if (!all_gnt) begin failures++; $display("FAIL conflict-free requests stalled"); end
    // all on one bank: round robin bound
    mode = 2;
    max_wait = 0;
    repeat (500) @(posedge clk);
    checks++; if (max_wait > NM - 1) begin failures++; $display("FAIL max wait %0d", max_wait); end
    $display("max wait under full conflict: %0d cycles", max_wait);
    mode = 0;
    repeat (500) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
