// frep_sequencer: FP instruction sequencer with the FREP hardware loop.
//
// Sits between a core's FP offload stream and its FP issue stage. Outside a loop
// it passes each offloaded instruction straight through. An FREP instruction
// (custom-0 opcode, see pmca_pkg) opens a loop: the next MaxInst+1 instructions
// are captured in a loop buffer and are then issued from the buffer MaxRpt+1
// times, so the integer core offloads a loop body once and is free while the FP
// side repeats it.
//  * outer mode: the whole body is issued, then again, MaxRpt+1 times in all;
//  * inner mode (instr[7] set): each instruction is issued MaxRpt+1 times before
//    the next one.
//
// Interface: in_* is a valid/ready stream of fp_inst_t from the offloading core;
// out_* is a valid/ready stream to the FP issue stage. busy_o is high while a loop
// is being captured or replayed.
//
// Timing: pass-through is combinational (no added latency). A loop first takes
// one cycle per body instruction to capture, then issues one instruction per cycle
// when the issue stage is ready; the offload stream is stalled during replay.
// Capturing the whole body before the first issue, and the loop-buffer depth of
// 16 entries, are this design's choices; the paper gives the loop buffer's
// purpose only. A body longer than the buffer is cut to the buffer depth.
module frep_sequencer
  import pmca_pkg::*;
#(
  parameter int unsigned LoopDepth = 16
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  logic     in_valid_i,
  output logic     in_ready_o,
  input  fp_inst_t in_inst_i,
  output logic     out_valid_o,
  input  logic     out_ready_i,
  output fp_inst_t out_inst_o,
  output logic     busy_o
);
  localparam int unsigned IdxW = $clog2(LoopDepth);

  typedef enum logic [1:0] {Idle, Capture, Replay} state_e;
  state_e state_q;

  fp_inst_t     buf_q [LoopDepth];
  logic [IdxW-1:0] max_inst_q, idx_q;
  logic [31:0]  max_rpt_q, rpt_q;
  logic         inner_q;

  logic in_is_frep;
  assign in_is_frep = (in_inst_i.instr[6:0] == OpcFrep);

  always_comb begin
    in_ready_o  = 1'b0;
    out_valid_o = 1'b0;
    out_inst_o  = in_inst_i;
    unique case (state_q)
      Idle: begin
        out_valid_o = in_valid_i && !in_is_frep;
        in_ready_o  = in_is_frep ? 1'b1 : out_ready_i;
      end
      Capture: begin
        in_ready_o = 1'b1;
      end
      Replay: begin
        out_valid_o = 1'b1;
        out_inst_o  = buf_q[idx_q];
      end
      default: ;
    endcase
  end

  assign busy_o = (state_q != Idle);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q    <= Idle;
      max_inst_q <= '0;
      idx_q      <= '0;
      max_rpt_q  <= '0;
      rpt_q      <= '0;
      inner_q    <= 1'b0;
    end else begin
      unique case (state_q)
        Idle: if (in_valid_i && in_is_frep) begin
          max_inst_q <= (in_inst_i.instr[31:20] >= 12'(LoopDepth)) ? IdxW'(LoopDepth - 1)
                                                                   : in_inst_i.instr[20 +: IdxW];
          max_rpt_q  <= in_inst_i.opa;
          inner_q    <= in_inst_i.instr[7];
          idx_q      <= '0;
          rpt_q      <= '0;
          state_q    <= Capture;
        end
        Capture: if (in_valid_i) begin
          if (idx_q == max_inst_q) begin
            idx_q   <= '0;
            state_q <= Replay;
          end else begin
            idx_q <= idx_q + 1'b1;
          end
        end
        Replay: if (out_ready_i) begin
          if (inner_q) begin
            if (rpt_q == max_rpt_q) begin
              rpt_q <= '0;
              if (idx_q == max_inst_q) state_q <= Idle;
              else idx_q <= idx_q + 1'b1;
            end else rpt_q <= rpt_q + 1;
          end else begin
            if (idx_q == max_inst_q) begin
              idx_q <= '0;
              if (rpt_q == max_rpt_q) state_q <= Idle;
              else rpt_q <= rpt_q + 1;
            end else idx_q <= idx_q + 1'b1;
          end
        end
        default: state_q <= Idle;
      endcase
    end
  end

  always_ff @(posedge clk_i) begin
    if (state_q == Capture && in_valid_i) buf_q[idx_q] <= in_inst_i;
  end

endmodule
