// snitch_cc_fp: floating-point subsystem of one compute core complex.
//
// Holds what a compute core adds around its small integer core for FP work: the
// FREP sequencer, an FP register file of 32 x 32 bit, the FP32 FPU and three SSR
// lanes. The integer core (not part of this RTL) offloads RISC-V FP instructions
// together with the integer operand it read for them; this block decodes and
// executes them in order, one per cycle.
//
// Stream semantic registers. While streaming is enabled, FP registers ft0, ft1
// and ft2 (f0..f2) are the three SSR lanes: naming one of them as a source takes
// the next element of that lane's read stream, naming it as destination appends
// the result to that lane's write stream. An instruction waits (stalls in the
// issue stage) until every stream it reads has data and the stream it writes has
// room, so data dependencies on memory are handled by the streams themselves.
// Lanes 0 and 1 can run indirect (gather/scatter) streams, lane 2 only affine
// ones, as the paper gives two of three SSRs the indirect extension (which two is
// this design's choice). A source that names the same lane twice consumes one
// element.
//
// Supported instructions (single precision, rounding to nearest even): fadd.s,
// fsub.s, fmul.s, fmin.s, fmax.s, fsgnj[n|x].s, fmadd.s, fmsub.s, fnmsub.s,
// fnmadd.s, fmv.w.x, and frep (custom-0, see pmca_pkg). FP loads/stores, compares,
// conversions and divisions are not implemented: data reach the FPU only through
// the SSRs or fmv.w.x, which is how the solver kernels are written for this
// cluster. Other instructions are dropped with a one-cycle illegal_o pulse.
//
// Configuration port: cfg_ssr_i selects lane 0..2 (register map in pmca_pkg);
// cfg_ssr_i = 3, cfg_addr_i = 0 writes the streaming-enable bit (wdata[0]).
// Timing: the FPU is combinational and its result is written at the end of the
// issue cycle, so back-to-back dependent instructions issue every cycle.
module snitch_cc_fp
  import pmca_pkg::*;
#(
  parameter int unsigned SsrDepth  = 4,
  parameter int unsigned LoopDepth = 16
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  // FP offload from the integer core
  input  logic        acc_valid_i,
  output logic        acc_ready_o,
  input  fp_inst_t    acc_inst_i,
  // SSR configuration
  input  logic        cfg_valid_i,
  input  logic [1:0]  cfg_ssr_i,
  input  logic [4:0]  cfg_addr_i,
  input  data_t       cfg_wdata_i,
  // status
  output logic [NumSsr-1:0] ssr_busy_o,
  output logic        busy_o,
  output logic        illegal_o,
  output logic        issue_o,
  // SSR memory ports
  output tcdm_req_t   ssr_req_o [NumSsr],
  input  tcdm_rsp_t   ssr_rsp_i [NumSsr]
);

  // ------------------------------------------------------------ FREP sequencer
  logic     seq_valid, seq_ready, seq_busy;
  fp_inst_t seq_inst;

  frep_sequencer #(.LoopDepth(LoopDepth)) i_frep (
    .clk_i, .rst_ni,
    .in_valid_i  (acc_valid_i),
    .in_ready_o  (acc_ready_o),
    .in_inst_i   (acc_inst_i),
    .out_valid_o (seq_valid),
    .out_ready_i (seq_ready),
    .out_inst_o  (seq_inst),
    .busy_o      (seq_busy)
  );

  // ------------------------------------------------------------ SSR lanes
  logic        ssr_en_q;
  logic [NumSsr-1:0] lane_rvalid, lane_rready, lane_wvalid, lane_wready, lane_is_wr;
  data_t       lane_rdata [NumSsr];
  data_t       result;

  for (genvar i = 0; i < NumSsr; i++) begin : g_ssr
    sssr_streamer #(.Indirect(i < 2), .Depth(SsrDepth)) i_ssr (
      .clk_i, .rst_ni,
      .cfg_valid_i (cfg_valid_i && (cfg_ssr_i == 2'(i))),
      .cfg_addr_i,
      .cfg_wdata_i,
      .rd_valid_o  (lane_rvalid[i]),
      .rd_data_o   (lane_rdata[i]),
      .rd_ready_i  (lane_rready[i]),
      .wr_valid_i  (lane_wvalid[i]),
      .wr_data_i   (result),
      .wr_ready_o  (lane_wready[i]),
      .is_write_o  (lane_is_wr[i]),
      .busy_o      (ssr_busy_o[i]),
      .mem_req_o   (ssr_req_o[i]),
      .mem_rsp_i   (ssr_rsp_i[i])
    );
  end

  // ------------------------------------------------------------ decode
  logic [6:0] opcode, funct7;
  logic [2:0] funct3;
  logic [4:0] rs1, rs2, rs3, rd;
  fpu_op_e    op;
  logic       use1, use2, use3, is_mv, legal;

  always_comb begin
    opcode = seq_inst.instr[6:0];
    rd     = seq_inst.instr[11:7];
    funct3 = seq_inst.instr[14:12];
    rs1    = seq_inst.instr[19:15];
    rs2    = seq_inst.instr[24:20];
    rs3    = seq_inst.instr[31:27];
    funct7 = seq_inst.instr[31:25];
    op     = FPU_ADD;
    use1   = 1'b1;
    use2   = 1'b1;
    use3   = 1'b0;
    is_mv  = 1'b0;
    legal  = 1'b1;
    unique case (opcode)
      OpcOpFp: begin
        unique case (funct7)
          7'b0000000: op = FPU_ADD;
          7'b0000100: op = FPU_SUB;
          7'b0001000: op = FPU_MUL;
          7'b0010100: begin
            if (funct3 == 3'b000) op = FPU_MIN;
            else if (funct3 == 3'b001) op = FPU_MAX;
            else legal = 1'b0;
          end
          7'b0010000: begin
            if (funct3 == 3'b000) op = FPU_SGNJ;
            else if (funct3 == 3'b001) op = FPU_SGNJN;
            else if (funct3 == 3'b010) op = FPU_SGNJX;
            else legal = 1'b0;
          end
          7'b1111000: begin
            is_mv = 1'b1;
            use1  = 1'b0;
            use2  = 1'b0;
            legal = (rs2 == 5'd0) && (funct3 == 3'b000);
          end
          default: legal = 1'b0;
        endcase
      end
      OpcMadd, OpcMsub, OpcNmsub, OpcNmadd: begin
        use3  = 1'b1;
        legal = (seq_inst.instr[26:25] == 2'b00);
        unique case (opcode)
          OpcMadd:  op = FPU_MADD;
          OpcMsub:  op = FPU_MSUB;
          OpcNmsub: op = FPU_NMSUB;
          default:  op = FPU_NMADD;
        endcase
      end
      default: legal = 1'b0;
    endcase
  end

  // ------------------------------------------------------------ operands
  data_t fpr_q [32];
  data_t opa, opb, opc;
  logic [NumSsr-1:0] src_lane;   // lanes read by this instruction
  logic [NumSsr-1:0] dst_lane;   // lane written by this instruction
  logic ready_all, issue;

  function automatic logic is_stream_src(input logic [4:0] r, input logic en,
                                         input logic [NumSsr-1:0] is_wr);
    return en && (r < 5'(NumSsr)) && !is_wr[r[1:0]];
  endfunction

  always_comb begin
    src_lane = '0;
    dst_lane = '0;
    if (use1 && is_stream_src(rs1, ssr_en_q, lane_is_wr)) src_lane[rs1[1:0]] = 1'b1;
    if (use2 && is_stream_src(rs2, ssr_en_q, lane_is_wr)) src_lane[rs2[1:0]] = 1'b1;
    if (use3 && is_stream_src(rs3, ssr_en_q, lane_is_wr)) src_lane[rs3[1:0]] = 1'b1;
    if (ssr_en_q && (rd < 5'(NumSsr)) && lane_is_wr[rd[1:0]]) dst_lane[rd[1:0]] = 1'b1;

    opa = is_stream_src(rs1, ssr_en_q, lane_is_wr) ? lane_rdata[rs1[1:0]] : fpr_q[rs1];
    opb = is_stream_src(rs2, ssr_en_q, lane_is_wr) ? lane_rdata[rs2[1:0]] : fpr_q[rs2];
    opc = is_stream_src(rs3, ssr_en_q, lane_is_wr) ? lane_rdata[rs3[1:0]] : fpr_q[rs3];

    ready_all = !legal ||
                (((src_lane & ~lane_rvalid) == '0) && ((dst_lane & ~lane_wready) == '0));
    issue       = seq_valid && legal && ready_all;
    seq_ready   = ready_all;
    lane_rready = issue ? src_lane : '0;
    lane_wvalid = issue ? dst_lane : '0;
  end

  data_t fpu_res;
  fp32_fpu i_fpu (.op_i(op), .a_i(opa), .b_i(opb), .c_i(opc), .res_o(fpu_res));
  assign result = is_mv ? seq_inst.opa : fpu_res;

  // ------------------------------------------------------------ state
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ssr_en_q  <= 1'b0;
      illegal_o <= 1'b0;
      for (int r = 0; r < 32; r++) fpr_q[r] <= '0;
    end else begin
      illegal_o <= seq_valid && !legal;
      if (cfg_valid_i && (cfg_ssr_i == 2'd3) && (cfg_addr_i == 5'd0)) ssr_en_q <= cfg_wdata_i[0];
      if (issue && (dst_lane == '0)) fpr_q[rd] <= result;
    end
  end

  assign issue_o = issue;
  assign busy_o  = seq_busy || seq_valid || acc_valid_i;

endmodule
