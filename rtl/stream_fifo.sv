// stream_fifo: small synchronous FIFO used as the data buffer of an SSR lane.
// push/pop handshake in the same cycle is allowed; `count_o` is the fill level.
// Reset empties it. Reading the head while empty returns a stale entry.
module stream_fifo #(
  parameter int unsigned Width = 32,
  parameter int unsigned Depth = 4
) (
  input  logic                   clk_i,
  input  logic                   rst_ni,
  input  logic                   flush_i,
  input  logic                   push_i,
  input  logic [Width-1:0]       data_i,
  input  logic                   pop_i,
  output logic [Width-1:0]       data_o,
  output logic                   empty_o,
  output logic                   full_o,
  output logic [$clog2(Depth+1)-1:0] count_o
);
  localparam int unsigned PtrW = (Depth > 1) ? $clog2(Depth) : 1;
  localparam int unsigned CntW = $clog2(Depth+1);

  logic [Width-1:0] mem_q [Depth];
  logic [PtrW-1:0]  rd_q, wr_q;
  logic [$clog2(Depth+1)-1:0] cnt_q;

  assign empty_o = (cnt_q == 0);
  assign full_o  = (cnt_q == Depth[$clog2(Depth+1)-1:0]);
  assign count_o = cnt_q;
  assign data_o  = mem_q[rd_q];

  function automatic logic [PtrW-1:0] inc(input logic [PtrW-1:0] p);
    return (p == PtrW'(Depth - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
    end else if (flush_i) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (push_i && !full_o) wr_q <= inc(wr_q);
      if (pop_i && !empty_o) rd_q <= inc(rd_q);
      cnt_q <= cnt_q + CntW'(push_i && !full_o) - CntW'(pop_i && !empty_o);
    end
  end

  always_ff @(posedge clk_i) begin
    if (push_i && !full_o) mem_q[wr_q] <= data_i;
  end
endmodule
