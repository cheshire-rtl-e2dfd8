// rpc_read_buffer: absorbs read words that the RPC DRAM delivers without any
// possibility of backpressure, while the AXI R channel may stall.
//
// Before the frontend launches a read of N words it checks free_o >= N and
// reserves that space with reserve_i/reserve_words_i, so the non-stallable
// words (push_i) always find room. The FIFO is first-word-fall-through, so
// a word is visible to the AXI side in the cycle after it arrives and is only
// held while R stalls: data is forwarded as soon as possible. The reservation
// scheme is this design's way of meeting the no-stall rule of the source
// description. DepthWords defaults to 256 words (8 KiB).
//
// Lint note: the FIFO full flag is unused, since the reservation scheme
// guarantees room for every pushed word.
module rpc_read_buffer
  import rpc_pkg::*;
#(
  parameter int unsigned DepthWords = 256,
  localparam int unsigned CntWidth = $clog2(DepthWords + 1)
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  // space reservation by the launching side
  input  logic                reserve_i,
  input  logic [7:0]          reserve_words_i,   // words (not minus one)
  output logic [CntWidth-1:0] free_o,
  // NSRRP read data, cannot be stalled
  input  logic                push_i,
  input  word_t               rdata_i,
  // towards the AXI R path
  output word_t               word_o,
  output logic                valid_o,
  input  logic                ready_i
);
  logic [CntWidth-1:0] count, pend_q;
  logic                full;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) pend_q <= '0;
    else pend_q <= pend_q + (reserve_i ? CntWidth'(reserve_words_i) : '0) - CntWidth'(push_i);
  end

  assign free_o = CntWidth'(DepthWords) - count - pend_q;

  rpc_fifo #(.Width(WordBits), .Depth(DepthWords)) i_fifo (
    .clk_i, .rst_ni,
    .push_i (push_i),
    .data_i (rdata_i),
    .full_o (full),
    .pop_i  (valid_o && ready_i),
    .data_o (word_o),
    .valid_o(valid_o),
    .count_o(count)
  );

  assert property (@(posedge clk_i) disable iff (!rst_ni) push_i |-> pend_q != '0)
    else $error("rpc_read_buffer: unreserved read word");
  assert property (@(posedge clk_i) disable iff (!rst_ni) reserve_i |-> CntWidth'(reserve_words_i) <= free_o)
    else $error("rpc_read_buffer: reservation exceeds free space");
endmodule
