// tb_fp32_fpu: self-checking test of the FP32 FPU.
// Random operands with exponents kept in the normal range are checked against a
// reference computed in double precision and rounded to FP32 (round to nearest
// even) by the testbench's own conversion routine; multiply-add is checked as a
// rounded product followed by a rounded sum. Directed cases cover zeros, signed
// zero, cancellation, infinities, NaN, min/max and the sign injections.
`timescale 1ns/1ps
module tb_fp32_fpu;
  import pmca_pkg::*;

  fpu_op_e     op;
  logic [31:0] a, b, c, res;
  int          checks = 0, failures = 0;

  fp32_fpu dut (.op_i(op), .a_i(a), .b_i(b), .c_i(c), .res_o(res));

  // FP32 bits -> real (normal numbers and zero only)
  function automatic real f2r(input logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 0) return 0.0;
    d = {f[31], 3'b000 + {3{1'b0}}, 8'h00, 52'd0};
    d[63] = f[31];
    d[62:52] = 11'(int'(f[30:23]) - 127 + 1023);
    d[51:0] = {f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  // real -> FP32 bits, round to nearest even, flush tiny results to zero
  function automatic logic [31:0] r2f(input real r);
    logic [63:0] d;
    logic [24:0] m;
    logic        g, rest;
    int          e;
    d = $realtobits(r);
    if (d[62:0] == 0) return {d[63], 31'd0};
    e = int'(d[62:52]) - 1023 + 127;
    m = {2'b01, d[51:29]};
    g = d[28];
    rest = |d[27:0];
    if (g && (rest || m[0])) m = m + 1;
    if (m[24]) begin m = m >> 1; e = e + 1; end
    if (e >= 255) return {d[63], 8'hff, 23'd0};
    if (e <= 0) return {d[63], 31'd0};
    return {d[63], e[7:0], m[22:0]};
  endfunction

  function automatic logic [31:0] rnd_f();
    logic [31:0] f;
    f[31] = 1'($urandom);
    f[30:23] = 8'(110 + $urandom_range(0, 34));
    f[22:0] = 23'($urandom);
    return f;
  endfunction

  task automatic check(input string what, input logic [31:0] exp);
    #1;
    checks++;
    if (res !== exp) begin
      failures++;
      if (failures < 10)
        $display("FAIL %s op=%0d a=%h b=%h c=%h got=%h exp=%h", what, op, a, b, c, res, exp);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] p, e;
    // random arithmetic
    for (int i = 0; i < 4000; i++) begin
      a = rnd_f(); b = rnd_f(); c = rnd_f();
      // bring b close to a sometimes to provoke cancellation
      if (i % 4 == 0) b = {~a[31], a[30:4], 4'($urandom)};
      op = FPU_ADD; check("add", r2f(f2r(a) + f2r(b)));
      op = FPU_SUB; check("sub", r2f(f2r(a) - f2r(b)));
      op = FPU_MUL; check("mul", r2f(f2r(a) * f2r(b)));
      p = r2f(f2r(a) * f2r(b));
      op = FPU_MADD;  check("madd",  r2f(f2r(p) + f2r(c)));
      op = FPU_MSUB;  check("msub",  r2f(f2r(p) - f2r(c)));
      op = FPU_NMSUB; check("nmsub", r2f(-f2r(p) + f2r(c)));
      op = FPU_NMADD; check("nmadd", r2f(-f2r(p) - f2r(c)));
      e = (f2r(a) < f2r(b)) ? a : b;
      op = FPU_MIN; check("min", e);
      e = (f2r(a) > f2r(b)) ? a : b;
      op = FPU_MAX; check("max", e);
    end
    // directed cases
    c = 32'h0;
    a = 32'h3f80_0000; b = 32'hbf80_0000; op = FPU_ADD; check("x+(-x)", 32'h0000_0000);
    a = 32'h8000_0000; b = 32'h8000_0000; op = FPU_ADD; check("-0+-0", 32'h8000_0000);
    a = 32'h7f80_0000; b = 32'hff80_0000; op = FPU_ADD; check("inf-inf", 32'h7fc0_0000);
    a = 32'h7f80_0000; b = 32'h3f80_0000; op = FPU_SUB; check("inf-1", 32'h7f80_0000);
    a = 32'h7f80_0000; b = 32'h0000_0000; op = FPU_MUL; check("inf*0", 32'h7fc0_0000);
    a = 32'h7f00_0000; b = 32'h4000_0000; op = FPU_MUL; check("overflow", 32'h7f80_0000);
    a = 32'h7fc0_0001; b = 32'h3f80_0000; op = FPU_ADD; check("nan", 32'h7fc0_0000);
    a = 32'h7fc0_0000; b = 32'h3f80_0000; op = FPU_MIN; check("min nan", 32'h3f80_0000);
    a = 32'h8000_0000; b = 32'h0000_0000; op = FPU_MIN; check("min -0", 32'h8000_0000);
    a = 32'h8000_0000; b = 32'h0000_0000; op = FPU_MAX; check("max +0", 32'h0000_0000);
    a = 32'h3f80_0000; b = 32'h4000_0000; op = FPU_ADD; check("1+2", 32'h4040_0000);
    a = 32'h3f80_0000; b = 32'h3380_0000; op = FPU_ADD; check("1+2^-24 tie even", 32'h3f80_0000);
    a = 32'h3f80_0001; b = 32'h3380_0000; op = FPU_ADD; check("tie up", 32'h3f80_0002);
    a = 32'h4040_0000; b = 32'hc000_0000; c = 32'h40e0_0000; op = FPU_MADD; check("3*-2+7", 32'h3f80_0000);
    a = 32'h4040_0000; b = 32'hc000_0000; c = 32'h40e0_0000; op = FPU_NMSUB; check("-(3*-2)+7", 32'h4150_0000);
    a = 32'h3f80_0000; b = 32'h8000_0000; op = FPU_SGNJ;  check("sgnj", 32'hbf80_0000);
    a = 32'hbf80_0000; b = 32'h8000_0000; op = FPU_SGNJN; check("sgnjn", 32'h3f80_0000);
    a = 32'hbf80_0000; b = 32'h8000_0000; op = FPU_SGNJX; check("sgnjx", 32'h3f80_0000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
