// tb_spm_bank: self-checking test of a scratchpad bank: random word and byte-lane
// writes against a reference array, reads checked one cycle after the request,
// and the read data held while the bank is idle or written.
`timescale 1ns/1ps
module tb_spm_bank;
  logic clk = 0;
  always #5 clk = ~clk;
  localparam int N = 256;
  logic req, we; logic [3:0] be; logic [7:0] addr; logic [31:0] wdata, rdata;
  logic [31:0] ref_mem [N];
  int checks = 0, failures = 0;

  spm_bank #(.NumWords(N)) dut (.clk_i(clk), .req_i(req), .we_i(we), .be_i(be),
                                .addr_i(addr), .wdata_i(wdata), .rdata_o(rdata));

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] last;
    req = 0; we = 0; be = 0; addr = 0; wdata = 0;
    // initialise everything
    for (int i = 0; i < N; i++) begin
      @(negedge clk); req = 1; we = 1; be = 4'hf; addr = 8'(i); wdata = $urandom; ref_mem[i] = wdata;
    end
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      req = 1'($urandom); we = 1'($urandom); be = 4'($urandom); addr = 8'($urandom); wdata = $urandom;
      if (req && we) for (int b = 0; b < 4; b++) if (be[b]) ref_mem[addr][b*8 +: 8] = wdata[b*8 +: 8];
      if (req && !we) begin
        last = ref_mem[addr];
        @(negedge clk);
        req = 0;
        checks++;
        if (rdata !== last) begin failures++; if (failures < 10) $display("FAIL read %h exp %h", rdata, last); end
        // hold while idle or writing
        req = 1; we = 1; be = 4'hf; addr = 8'($urandom); wdata = $urandom; ref_mem[addr] = wdata;
        @(negedge clk); req = 0;
        checks++;
        if (rdata !== last) begin failures++; $display("FAIL hold %h exp %h", rdata, last); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
