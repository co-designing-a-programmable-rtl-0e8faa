// cluster_dma: the cluster's data mover between the manager domain's L2
// scratchpad and the cluster's L1 scratchpad.
//
// A command names a source and destination byte address, a length in words and
// a direction (dir=0: L2 to L1, dir=1: L1 to L2). The engine copies word by word:
// it reads a word from the source port, and once the read data is back writes it
// to the destination port; reads of the next word overlap the write of the
// current one when both ports grant, so a transfer takes about one cycle per word
// when neither port is contended. done_o pulses for one cycle at the end of a
// command; a new command is accepted only while idle (cmd_ready_o).
//
// Both ports use the pmca_pkg TCDM request/grant protocol; the L1 port is one
// master of the logarithmic interconnect. In the paper a dedicated DMA core
// programs the engine, and the manager domain uses it to move the solver's data
// into and out of L1 (double buffering); the command interface, the 1-D transfer
// shape and the word granularity are this design's choices.
module cluster_dma
  import pmca_pkg::*;
#(
  parameter int unsigned FifoDepth = 4
) (
  input  logic      clk_i,
  input  logic      rst_ni,
  input  logic      cmd_valid_i,
  output logic      cmd_ready_o,
  input  addr_t     cmd_src_i,
  input  addr_t     cmd_dst_i,
  input  data_t     cmd_len_i,
  input  logic      cmd_dir_i,
  output logic      busy_o,
  output logic      done_o,
  output tcdm_req_t l1_req_o,
  input  tcdm_rsp_t l1_rsp_i,
  output tcdm_req_t l2_req_o,
  input  tcdm_rsp_t l2_rsp_i
);
  logic  active_q, dir_q;
  addr_t src_q, dst_q;
  data_t rd_left_q, wr_left_q;
  logic  inflight_q;

  tcdm_req_t src_req, dst_req;
  tcdm_rsp_t src_rsp, dst_rsp;

  // word buffer between read and write side
  logic  f_push, f_pop, f_empty, f_full;
  data_t f_rdata;
  logic [$clog2(FifoDepth+1)-1:0] f_count;

  assign src_rsp = dir_q ? l1_rsp_i : l2_rsp_i;
  assign dst_rsp = dir_q ? l2_rsp_i : l1_rsp_i;

  always_comb begin
    src_req       = '0;
    src_req.be    = '1;
    src_req.addr  = src_q;
    src_req.valid = active_q && (rd_left_q != 0) &&
                    ((32'(f_count) + 32'(inflight_q)) < FifoDepth);
    dst_req       = '0;
    dst_req.be    = '1;
    dst_req.we    = 1'b1;
    dst_req.addr  = dst_q;
    dst_req.wdata = f_rdata;
    dst_req.valid = active_q && !f_empty;
    l1_req_o = dir_q ? src_req : dst_req;
    l2_req_o = dir_q ? dst_req : src_req;
  end

  assign f_push = inflight_q && src_rsp.rvalid;
  assign f_pop  = dst_req.valid && dst_rsp.gnt;

  stream_fifo #(.Width(DataWidth), .Depth(FifoDepth)) i_buf (
    .clk_i, .rst_ni, .flush_i(1'b0),
    .push_i(f_push), .data_i(src_rsp.rdata), .pop_i(f_pop),
    .data_o(f_rdata), .empty_o(f_empty), .full_o(f_full), .count_o(f_count)
  );

  assign cmd_ready_o = !active_q;
  assign busy_o      = active_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      active_q   <= 1'b0;
      dir_q      <= 1'b0;
      src_q      <= '0;
      dst_q      <= '0;
      rd_left_q  <= '0;
      wr_left_q  <= '0;
      inflight_q <= 1'b0;
      done_o     <= 1'b0;
    end else begin
      done_o     <= 1'b0;
      inflight_q <= src_req.valid && src_rsp.gnt;
      if (cmd_valid_i && cmd_ready_o) begin
        active_q  <= (cmd_len_i != 0);
        done_o    <= (cmd_len_i == 0);
        dir_q     <= cmd_dir_i;
        src_q     <= cmd_src_i;
        dst_q     <= cmd_dst_i;
        rd_left_q <= cmd_len_i;
        wr_left_q <= cmd_len_i;
      end else if (active_q) begin
        if (src_req.valid && src_rsp.gnt) begin
          src_q     <= src_q + 4;
          rd_left_q <= rd_left_q - 1;
        end
        if (f_pop) begin
          dst_q     <= dst_q + 4;
          wr_left_q <= wr_left_q - 1;
          if (wr_left_q == 1) begin
            active_q <= 1'b0;
            done_o   <= 1'b1;
          end
        end
      end
    end
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni) f_push |-> !f_full)
    else $error("cluster_dma: buffer overflow");

endmodule
