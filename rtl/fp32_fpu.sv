// fp32_fpu: single-precision floating-point unit of one compute core.
//
// Computes, combinationally, one of: add, sub, mul, the four RISC-V multiply-add
// forms (a*b+c, a*b-c, -a*b+c, -a*b-c), min, max and the three sign-injections,
// on IEEE-754 binary32 operands. The result is registered by the caller (the
// core complex writes it to the FP register file or to an SSR write stream at
// the next clock edge), so one operation completes per cycle.
//
// The cluster's FPUs are used with FP32 data for the whole solver, which is what
// this unit implements. Its insides are this design's own choice:
//  * rounding is always round-to-nearest-even (the rm field is ignored);
//  * subnormal inputs are read as zero and subnormal results are flushed to a
//    signed zero;
//  * the multiply-add forms round the product to FP32 before the addition
//    (two roundings, not a fused operation);
//  * any NaN result is the canonical quiet NaN 0x7fc00000; min/max follow the
//    RISC-V rule (a single NaN operand yields the other operand, -0 < +0).
module fp32_fpu
  import pmca_pkg::*;
(
  input  fpu_op_e     op_i,
  input  logic [31:0] a_i,
  input  logic [31:0] b_i,
  input  logic [31:0] c_i,
  output logic [31:0] res_o
);

  localparam logic [31:0] QNaN = 32'h7fc0_0000;

  function automatic logic is_nan(input logic [31:0] x);
    return (x[30:23] == 8'hff) && (x[22:0] != '0);
  endfunction

  function automatic logic is_inf(input logic [31:0] x);
    return (x[30:23] == 8'hff) && (x[22:0] == '0);
  endfunction

  function automatic logic is_zero(input logic [31:0] x);
    return x[30:23] == 8'h00;  // zero or subnormal (read as zero)
  endfunction

  // Round a normalised 27-bit significand m (m[26] is the hidden one, m[2] the
  // guard bit, m[1:0] round and sticky) with exponent e to nearest-even, and pack.
  function automatic logic [31:0] round_pack(input logic s, input int e, input logic [26:0] m);
    logic [24:0] mr;
    logic        up;
    int          ee;
    up = m[2] & (m[1] | m[0] | m[3]);
    mr = {1'b0, m[26:3]} + {24'd0, up};
    ee = e;
    if (mr[24]) begin
      mr = mr >> 1;
      ee = ee + 1;
    end
    if (ee >= 255) return {s, 8'hff, 23'd0};
    if (ee <= 0)   return {s, 31'd0};
    return {s, ee[7:0], mr[22:0]};
  endfunction

  function automatic logic [31:0] f_add(input logic [31:0] a, input logic [31:0] b);
    logic [31:0] x, y;
    logic [26:0] mx, my, mys;
    logic [27:0] sum;
    logic        st;
    int          ex, ey, d, e;
    if (is_nan(a) || is_nan(b)) return QNaN;
    if (is_inf(a) && is_inf(b)) return (a[31] == b[31]) ? a : QNaN;
    if (is_inf(a)) return a;
    if (is_inf(b)) return b;
    if (is_zero(a) && is_zero(b)) return {a[31] & b[31], 31'd0};
    if (is_zero(a)) return b;
    if (is_zero(b)) return a;
    // order by magnitude: |x| >= |y|
    if (a[30:0] >= b[30:0]) begin x = a; y = b; end
    else begin x = b; y = a; end
    ex = int'(x[30:23]);
    ey = int'(y[30:23]);
    mx = {1'b1, x[22:0], 3'b000};
    my = {1'b1, y[22:0], 3'b000};
    d  = ex - ey;
    if (d > 26) begin
      mys = 27'd1;
    end else begin
      mys = my >> d;
      st  = |(my & ((27'd1 << d) - 27'd1));
      mys[0] = mys[0] | st;
    end
    e = ex;
    if (x[31] == y[31]) begin
      sum = {1'b0, mx} + {1'b0, mys};
      if (sum[27]) begin
        st  = sum[0];
        sum = sum >> 1;
        sum[0] = sum[0] | st;
        e = e + 1;
      end
      return round_pack(x[31], e, sum[26:0]);
    end else begin
      sum = {1'b0, mx} - {1'b0, mys};
      if (sum == '0) return 32'h0000_0000;
      for (int i = 0; i < 27; i++) begin
        if (!sum[26]) begin
          sum = sum << 1;
          e = e - 1;
        end
      end
      return round_pack(x[31], e, sum[26:0]);
    end
  endfunction

  function automatic logic [31:0] f_mul(input logic [31:0] a, input logic [31:0] b);
    logic        s;
    logic [47:0] p;
    logic [26:0] m;
    int          e;
    s = a[31] ^ b[31];
    if (is_nan(a) || is_nan(b)) return QNaN;
    if ((is_inf(a) && is_zero(b)) || (is_zero(a) && is_inf(b))) return QNaN;
    if (is_inf(a) || is_inf(b)) return {s, 8'hff, 23'd0};
    if (is_zero(a) || is_zero(b)) return {s, 31'd0};
    p = {24'd0, 1'b1, a[22:0]} * {24'd0, 1'b1, b[22:0]};
    e = int'(a[30:23]) + int'(b[30:23]) - 127;
    if (p[47]) begin
      m = {p[47:22], |p[21:0]};
      e = e + 1;
    end else begin
      m = {p[46:21], |p[20:0]};
    end
    return round_pack(s, e, m);
  endfunction

  // a < b for non-NaN operands, with -0 < +0
  function automatic logic f_lt(input logic [31:0] a, input logic [31:0] b);
    if (a[31] != b[31]) return a[31];
    if (a[31]) return a[30:0] > b[30:0];
    return a[30:0] < b[30:0];
  endfunction

  function automatic logic [31:0] f_minmax(input logic [31:0] a, input logic [31:0] b, input logic max);
    if (is_nan(a) && is_nan(b)) return QNaN;
    if (is_nan(a)) return b;
    if (is_nan(b)) return a;
    return (f_lt(a, b) ^ max) ? a : b;
  endfunction

  logic [31:0] prod;

  always_comb begin
    prod  = f_mul(a_i, b_i);
    res_o = QNaN;
    unique case (op_i)
      FPU_ADD:   res_o = f_add(a_i, b_i);
      FPU_SUB:   res_o = f_add(a_i, {~b_i[31], b_i[30:0]});
      FPU_MUL:   res_o = prod;
      FPU_MADD:  res_o = f_add(prod, c_i);
      FPU_MSUB:  res_o = f_add(prod, {~c_i[31], c_i[30:0]});
      FPU_NMSUB: res_o = f_add({~prod[31], prod[30:0]}, c_i);
      FPU_NMADD: res_o = f_add({~prod[31], prod[30:0]}, {~c_i[31], c_i[30:0]});
      FPU_MIN:   res_o = f_minmax(a_i, b_i, 1'b0);
      FPU_MAX:   res_o = f_minmax(a_i, b_i, 1'b1);
      FPU_SGNJ:  res_o = {b_i[31], a_i[30:0]};
      FPU_SGNJN: res_o = {~b_i[31], a_i[30:0]};
      FPU_SGNJX: res_o = {a_i[31] ^ b_i[31], a_i[30:0]};
      default:   res_o = QNaN;
    endcase
  end

endmodule
