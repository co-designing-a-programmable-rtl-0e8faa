// tb_fp_pkg: FP32 helpers for the testbenches: conversion between FP32 bit
// patterns and real, with round-to-nearest-even, and RISC-V FP instruction
// encoders. Only normal numbers and zero are handled, which is all the tests use.
package tb_fp_pkg;

  function automatic real f2r(input logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 0) return 0.0;
    d[63]    = f[31];
    d[62:52] = 11'(int'(f[30:23]) - 127 + 1023);
    d[51:0]  = {f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(input real r);
    logic [63:0] d;
    logic [24:0] m;
    int          e;
    d = $realtobits(r);
    if (d[62:0] == 0) return {d[63], 31'd0};
    e = int'(d[62:52]) - 1023 + 127;
    m = {2'b01, d[51:29]};
    if (d[28] && ((|d[27:0]) || m[0])) m = m + 1;
    if (m[24]) begin m = m >> 1; e = e + 1; end
    if (e >= 255) return {d[63], 8'hff, 23'd0};
    if (e <= 0) return {d[63], 31'd0};
    return {d[63], e[7:0], m[22:0]};
  endfunction

  // FP32 arithmetic with one rounding per operation
  function automatic logic [31:0] fadd(input logic [31:0] a, input logic [31:0] b);
    return r2f(f2r(a) + f2r(b));
  endfunction
  function automatic logic [31:0] fmul(input logic [31:0] a, input logic [31:0] b);
    return r2f(f2r(a) * f2r(b));
  endfunction

  // random FP32 of moderate magnitude (exponent 2^-8 .. 2^7)
  function automatic logic [31:0] rnd_f();
    return {1'($urandom), 8'(119 + $urandom_range(0, 15)), 23'($urandom)};
  endfunction

  // instruction encoders
  function automatic logic [31:0] op_fp(input logic [6:0] f7, input logic [2:0] f3,
                                        input int rd, input int rs1, input int rs2);
    return {f7, 5'(rs2), 5'(rs1), f3, 5'(rd), 7'b1010011};
  endfunction
  function automatic logic [31:0] r4(input logic [6:0] opc, input int rd, input int rs1,
                                     input int rs2, input int rs3);
    return {5'(rs3), 2'b00, 5'(rs2), 5'(rs1), 3'b000, 5'(rd), opc};
  endfunction
  function automatic logic [31:0] i_fadd(input int rd, input int a, input int b);  return op_fp(7'b0000000, 3'd0, rd, a, b); endfunction
  function automatic logic [31:0] i_fmul(input int rd, input int a, input int b);  return op_fp(7'b0001000, 3'd0, rd, a, b); endfunction
  function automatic logic [31:0] i_fmin(input int rd, input int a, input int b);  return op_fp(7'b0010100, 3'd0, rd, a, b); endfunction
  function automatic logic [31:0] i_fmax(input int rd, input int a, input int b);  return op_fp(7'b0010100, 3'd1, rd, a, b); endfunction
  function automatic logic [31:0] i_fmv_s(input int rd, input int a);              return op_fp(7'b0010000, 3'd0, rd, a, a); endfunction
  function automatic logic [31:0] i_fmv_w_x(input int rd);                         return op_fp(7'b1111000, 3'd0, rd, 0, 0); endfunction
  function automatic logic [31:0] i_fmadd(input int rd, input int a, input int b, input int c);  return r4(7'b1000011, rd, a, b, c); endfunction
  function automatic logic [31:0] i_fnmsub(input int rd, input int a, input int b, input int c); return r4(7'b1001011, rd, a, b, c); endfunction
  function automatic logic [31:0] i_frep(input int ninst, input bit inner);
    return {12'(ninst - 1), 5'd0, 3'd0, 4'd0, inner, 7'b0001011};
  endfunction

endpackage
