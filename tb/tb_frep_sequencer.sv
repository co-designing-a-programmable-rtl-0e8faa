// tb_frep_sequencer: self-checking test of the FREP sequencer.
// Sends plain instructions (expected to pass through unchanged), then outer and
// inner loops of several body lengths and repeat counts, with a randomly stalling
// issue stage, and compares the issued instruction sequence with the sequence
// expanded here from the loop description. Also checks the replay rate of one
// instruction per cycle with the issue stage always ready.
`timescale 1ns/1ps
module tb_frep_sequencer;
  import pmca_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic     in_valid, in_ready, out_valid, out_ready, busy;
  fp_inst_t in_inst, out_inst;

  frep_sequencer #(.LoopDepth(16)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .in_valid_i(in_valid), .in_ready_o(in_ready), .in_inst_i(in_inst),
    .out_valid_o(out_valid), .out_ready_i(out_ready), .out_inst_o(out_inst),
    .busy_o(busy)
  );

  int checks = 0, failures = 0;
  fp_inst_t exp_q[$];
  int got_n = 0;
  bit rand_ready = 1;

  // monitor: compare every issued instruction with the expected queue
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    got_n++;
    if (exp_q.size() == 0) begin
      failures++; $display("FAIL unexpected issue %h", out_inst.instr);
    end else begin
      fp_inst_t e; e = exp_q.pop_front();
      if (out_inst !== e) begin
        failures++;
        if (failures < 10) $display("FAIL issued %h/%h exp %h/%h", out_inst.instr, out_inst.opa, e.instr, e.opa);
      end
    end
  end
  always @(negedge clk) out_ready = rand_ready ? 1'($urandom) : 1'b1;

  task automatic send(input fp_inst_t x);
    @(negedge clk);
    in_valid = 1; in_inst = x;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    @(negedge clk); in_valid = 0;
  endtask

  function automatic fp_inst_t mk(input int k);
    fp_inst_t x;
    x.instr = {25'(k * 7919 + 1), 7'b1010011};
    x.opa = 32'(k);
    return x;
  endfunction

  task automatic loop(input int ninst, input int nrpt, input bit inner);
    fp_inst_t body[$], f;
    for (int i = 0; i < ninst; i++) body.push_back(mk($urandom_range(0, 1000)));
    f.instr = {12'(ninst - 1), 5'd0, 3'd0, 4'd0, inner, OpcFrep};
    f.opa = 32'(nrpt - 1);
    if (inner) begin
      foreach (body[i]) for (int r = 0; r < nrpt; r++) exp_q.push_back(body[i]);
    end else begin
      for (int r = 0; r < nrpt; r++) foreach (body[i]) exp_q.push_back(body[i]);
    end
    send(f);
    foreach (body[i]) send(body[i]);
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, n0;
    in_valid = 0; in_inst = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // pass-through
    for (int i = 0; i < 5; i++) begin exp_q.push_back(mk(i)); send(mk(i)); end
    loop(3, 4, 0);
    loop(1, 10, 0);
    loop(4, 3, 1);
    loop(16, 2, 0);
    loop(2, 1, 1);
    for (int i = 0; i < 3; i++) begin exp_q.push_back(mk(100 + i)); send(mk(100 + i)); end
    while (exp_q.size() != 0) @(posedge clk);
    repeat (2) @(posedge clk);
    checks++; if (busy) begin failures++; $display("FAIL busy after loops"); end
    // rate: a 2-instruction body repeated 20 times, issue stage always ready
    rand_ready = 0;
    n0 = got_n;
    loop(2, 20, 0);
    t0 = $time / 10;
    while (exp_q.size() != 0) @(posedge clk);
    checks++;
    if ($time / 10 - t0 > 40 + 2) begin failures++; $display("FAIL replay rate %0d cycles", $time/10 - t0); end
    checks++;
    if (got_n - n0 != 40) begin failures++; $display("FAIL issued %0d", got_n - n0); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
