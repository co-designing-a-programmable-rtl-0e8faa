// sssr_streamer: one stream semantic register (SSR) lane of a compute core.
//
// The lane turns a stream of memory accesses into a stream of register values, so
// the core's FP instructions can read (or write) an array element by naming an FP
// register, without issuing loads, stores or address arithmetic.
//
// Modes, as described for the cluster's SSRs:
//  * affine streams of up to four nested dimensions: for each dimension d an
//    iteration count (BOUND_d+1) and a byte stride; the address of an element is
//    the base plus the sum of counter_d * stride_d;
//  * indirect streams (only if the parameter Indirect is set; two of a core's
//    three lanes have it): a one-dimensional stream of BOUND_0+1 elements whose
//    element k lives at base + (idx[k] << shift), with idx[] an array of 8-, 16-,
//    32- or 64-bit indices in the scratchpad. Reads are gathers, writes scatters.
//
// Interface.
//  * Configuration port (cfg_*): one word write per cycle to the register map of
//    pmca_pkg (SsrReg*). Writing a base pointer to RPTR_d / WPTR_d starts a read or
//    write stream of d+1 dimensions (indirect streams use dimension 0 only). A
//    start is ignored while the lane is busy.
//  * Register side: rd_valid_o/rd_data_o/rd_ready_i delivers read-stream elements
//    in order; wr_valid_i/wr_data_i/wr_ready_o accepts write-stream elements.
//  * Memory side: one TCDM master port (pmca_pkg request/grant protocol).
//
// Timing. An affine read stream issues one request per cycle while its FIFO has
// room (Depth entries including the request in flight), so with no bank conflicts
// it delivers one element per cycle after a two-cycle start-up. Indirect streams
// fetch a 32-bit index word when the next index is not in the word already held,
// which costs two cycles; 8- and 16-bit indices thus share one fetch among four or
// two elements. For 64-bit indices only the low word is read (addresses are 32 bit).
//
// The register map, FIFO depth, index-word buffering and the single memory port
// per lane are this design's choices; the paper gives the lane's function.
module sssr_streamer
  import pmca_pkg::*;
#(
  parameter bit          Indirect = 1'b1,
  parameter int unsigned Depth    = 4
) (
  input  logic       clk_i,
  input  logic       rst_ni,
  // configuration
  input  logic       cfg_valid_i,
  input  logic [4:0] cfg_addr_i,
  input  data_t      cfg_wdata_i,
  // register side
  output logic       rd_valid_o,
  output data_t      rd_data_o,
  input  logic       rd_ready_i,
  input  logic       wr_valid_i,
  input  data_t      wr_data_i,
  output logic       wr_ready_o,
  output logic       is_write_o,
  output logic       busy_o,
  // memory side
  output tcdm_req_t  mem_req_o,
  input  tcdm_rsp_t  mem_rsp_i
);

  localparam int unsigned NumDims = 4;

  // configuration registers
  data_t       bound_q  [NumDims];
  data_t       stride_q [NumDims];
  logic [1:0]  idx_size_q;
  logic [2:0]  shift_q;
  logic        indir_q;
  addr_t       idx_base_q;

  // stream state
  logic        active_q, write_q, ind_q;
  logic [1:0]  dims_q;
  data_t       cnt_q [NumDims];
  addr_t       ptr_q [NumDims];
  addr_t       base_q;
  logic        inflight_data_q, inflight_idx_q;
  logic        idxw_valid_q;
  addr_t       idxw_addr_q, idx_req_addr_q;
  data_t       idxw_q;

  // FIFO
  logic        fifo_push, fifo_pop, fifo_empty, fifo_full, fifo_flush;
  data_t       fifo_wdata, fifo_rdata;
  logic [$clog2(Depth+1)-1:0] fifo_count;

  logic launch;
  assign launch = cfg_valid_i && !busy_o &&
                  ((cfg_addr_i[4:2] == 3'b100) || (cfg_addr_i[4:2] == 3'b110));

  // ---------------------------------------------------------------- addresses
  addr_t idx_byte_addr, idx_word_addr, data_addr;
  data_t idx_val;
  logic  idx_hit;

  always_comb begin
    idx_byte_addr = idx_base_q + (cnt_q[0] << idx_size_q);
    idx_word_addr = {idx_byte_addr[31:2], 2'b00};
    idx_hit       = idxw_valid_q && (idxw_addr_q == idx_word_addr);
    unique case (idx_size_q)
      2'd0:    idx_val = {24'd0, idxw_q[{idx_byte_addr[1:0], 3'b000} +: 8]};
      2'd1:    idx_val = {16'd0, idxw_q[{idx_byte_addr[1], 4'b0000} +: 16]};
      default: idx_val = idxw_q;
    endcase
    data_addr = ind_q ? base_q + (idx_val << shift_q) : ptr_q[0];
  end

  // ---------------------------------------------------------------- requests
  logic req_is_idx;
  logic credit_ok;
  assign credit_ok = (32'(fifo_count) + 32'(inflight_data_q)) < Depth;

  always_comb begin
    mem_req_o       = '0;
    mem_req_o.be    = '1;
    mem_req_o.wdata = fifo_rdata;
    req_is_idx      = 1'b0;
    if (active_q) begin
      if (ind_q && !idx_hit) begin
        mem_req_o.valid = !inflight_idx_q;
        mem_req_o.addr  = idx_word_addr;
        req_is_idx      = 1'b1;
      end else if (!write_q) begin
        mem_req_o.valid = credit_ok;
        mem_req_o.addr  = data_addr;
      end else begin
        mem_req_o.valid = !fifo_empty;
        mem_req_o.we    = 1'b1;
        mem_req_o.addr  = data_addr;
      end
    end
  end

  logic data_gnt;
  assign data_gnt = mem_req_o.valid && mem_rsp_i.gnt && !req_is_idx;

  // next counter values after the current element
  data_t cnt_n [NumDims];
  addr_t ptr_n [NumDims];
  logic  stream_end;

  always_comb begin
    logic found;
    addr_t np;
    found = 1'b0;
    np    = '0;
    for (int d = 0; d < NumDims; d++) begin
      cnt_n[d] = cnt_q[d];
      ptr_n[d] = ptr_q[d];
    end
    for (int d = 0; d < NumDims; d++) begin
      if (!found && (d <= int'(dims_q))) begin
        if (cnt_q[d] != bound_q[d]) begin
          found    = 1'b1;
          cnt_n[d] = cnt_q[d] + 1;
          np       = ptr_q[d] + stride_q[d];
          for (int k = 0; k < NumDims; k++) begin
            if (k <= d) ptr_n[k] = np;
            if (k < d)  cnt_n[k] = '0;
          end
        end
      end
    end
    stream_end = !found;
  end

  // ---------------------------------------------------------------- FIFO
  always_comb begin
    if (write_q) begin
      fifo_push  = wr_valid_i && wr_ready_o;
      fifo_wdata = wr_data_i;
      fifo_pop   = data_gnt;
    end else begin
      fifo_push  = mem_rsp_i.rvalid && inflight_data_q;
      fifo_wdata = mem_rsp_i.rdata;
      fifo_pop   = rd_ready_i && rd_valid_o;
    end
  end
  assign fifo_flush = launch;

  stream_fifo #(.Width(DataWidth), .Depth(Depth)) i_fifo (
    .clk_i, .rst_ni,
    .flush_i (fifo_flush),
    .push_i  (fifo_push),
    .data_i  (fifo_wdata),
    .pop_i   (fifo_pop),
    .data_o  (fifo_rdata),
    .empty_o (fifo_empty),
    .full_o  (fifo_full),
    .count_o (fifo_count)
  );

  assign rd_valid_o = !write_q && !fifo_empty;
  assign rd_data_o  = fifo_rdata;
  assign wr_ready_o = write_q && active_q && !fifo_full;
  assign is_write_o = write_q;
  assign busy_o     = active_q || inflight_data_q || inflight_idx_q || (write_q && !fifo_empty);

  // ---------------------------------------------------------------- state
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int d = 0; d < NumDims; d++) begin
        bound_q[d]  <= '0;
        stride_q[d] <= '0;
        cnt_q[d]    <= '0;
        ptr_q[d]    <= '0;
      end
      idx_size_q      <= 2'd1;
      shift_q         <= 3'd2;
      indir_q         <= 1'b0;
      idx_base_q      <= '0;
      active_q        <= 1'b0;
      write_q         <= 1'b0;
      ind_q           <= 1'b0;
      dims_q          <= '0;
      base_q          <= '0;
      inflight_data_q <= 1'b0;
      inflight_idx_q  <= 1'b0;
      idxw_valid_q    <= 1'b0;
      idxw_addr_q     <= '0;
      idx_req_addr_q  <= '0;
      idxw_q          <= '0;
    end else begin
      // configuration writes
      if (cfg_valid_i && !busy_o) begin
        if (cfg_addr_i[4:2] == 3'b000) bound_q[cfg_addr_i[1:0]]  <= cfg_wdata_i;
        if (cfg_addr_i[4:2] == 3'b001) stride_q[cfg_addr_i[1:0]] <= cfg_wdata_i;
        if (cfg_addr_i == SsrRegIdxCfg) begin
          idx_size_q <= cfg_wdata_i[1:0];
          shift_q    <= cfg_wdata_i[6:4];
          indir_q    <= cfg_wdata_i[8] & Indirect;
        end
        if (cfg_addr_i == SsrRegIdxBase) idx_base_q <= cfg_wdata_i;
      end
      if (launch) begin
        active_q     <= 1'b1;
        write_q      <= cfg_addr_i[3];
        ind_q        <= indir_q;
        dims_q       <= indir_q ? 2'd0 : cfg_addr_i[1:0];
        base_q       <= cfg_wdata_i;
        idxw_valid_q <= 1'b0;
        for (int d = 0; d < NumDims; d++) begin
          cnt_q[d] <= '0;
          ptr_q[d] <= cfg_wdata_i;
        end
      end else if (data_gnt) begin
        for (int d = 0; d < NumDims; d++) begin
          cnt_q[d] <= cnt_n[d];
          ptr_q[d] <= ptr_n[d];
        end
        if (stream_end) active_q <= 1'b0;
      end
      // responses
      inflight_data_q <= data_gnt && !write_q;
      inflight_idx_q  <= mem_req_o.valid && mem_rsp_i.gnt && req_is_idx;
      if (mem_req_o.valid && mem_rsp_i.gnt && req_is_idx) idx_req_addr_q <= mem_req_o.addr;
      if (inflight_idx_q && mem_rsp_i.rvalid) begin
        idxw_q       <= mem_rsp_i.rdata;
        idxw_addr_q  <= idx_req_addr_q;
        idxw_valid_q <= 1'b1;
      end
    end
  end

  // A response only ever answers a read this lane has issued.
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   mem_rsp_i.rvalid |-> (inflight_data_q || inflight_idx_q))
    else $error("sssr_streamer: unexpected read response");

endmodule
