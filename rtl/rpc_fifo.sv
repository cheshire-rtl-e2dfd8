// rpc_fifo: synchronous first-word-fall-through FIFO, the storage of the
// frontend's write and read buffers and of its small queues.
//
// The head entry is visible on data_o whenever valid_o is high; pop_i removes
// it. push_i writes data_i when not full. Pushing into a full FIFO or popping
// an empty one is a protocol error, flagged by assertions. count_o is the
// occupancy. Storage is a plain register array so it maps onto an SRAM or
// flip-flops depending on the target.
module rpc_fifo #(
  parameter int unsigned Width = 8,
  parameter int unsigned Depth = 4,
  localparam int unsigned CntWidth = $clog2(Depth + 1),
  localparam int unsigned PtrWidth = (Depth > 1) ? $clog2(Depth) : 1
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  logic                push_i,
  input  logic [Width-1:0]    data_i,
  output logic                full_o,
  input  logic                pop_i,
  output logic [Width-1:0]    data_o,
  output logic                valid_o,
  output logic [CntWidth-1:0] count_o
);
  logic [Width-1:0]    mem_q [Depth];
  logic [PtrWidth-1:0] wr_q, rd_q;
  logic [CntWidth-1:0] cnt_q;

  assign full_o  = (cnt_q == CntWidth'(Depth));
  assign valid_o = (cnt_q != '0);
  assign data_o  = mem_q[rd_q];
  assign count_o = cnt_q;

  function automatic logic [PtrWidth-1:0] incr(logic [PtrWidth-1:0] p);
    return (p == PtrWidth'(Depth - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wr_q  <= '0;
      rd_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (push_i) wr_q <= incr(wr_q);
      if (pop_i)  rd_q <= incr(rd_q);
      cnt_q <= cnt_q + CntWidth'(push_i) - CntWidth'(pop_i);
    end
  end

  always_ff @(posedge clk_i) begin
    if (push_i) mem_q[wr_q] <= data_i;
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni) push_i |-> (!full_o || pop_i))
    else $error("rpc_fifo: push into full FIFO");
  assert property (@(posedge clk_i) disable iff (!rst_ni) pop_i |-> valid_o)
    else $error("rpc_fifo: pop from empty FIFO");
endmodule
