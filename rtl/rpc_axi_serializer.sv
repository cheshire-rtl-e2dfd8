// rpc_axi_serializer: merges the AXI AW and AR channels into one ordered
// stream of transactions, because the RPC DRAM controller works strictly in
// order.
//
// Transactions of all IDs are served first come, first served: when only
// one channel holds a request it is taken; when both do, the one that has
// been waiting longer goes first, and on a tie (both arriving in the same
// cycle) the channel not served last time wins. The output is a valid/ready
// stream of {write, address channel}. QoS-based prioritization is not done,
// as in the source description. The tie rule is this design's choice.
module rpc_axi_serializer
  import cheshire_pkg::*;
(
  input  logic    clk_i,
  input  logic    rst_ni,
  input  axi_ax_t aw_i,
  input  logic    aw_valid_i,
  output logic    aw_ready_o,
  input  axi_ax_t ar_i,
  input  logic    ar_valid_i,
  output logic    ar_ready_o,
  output axi_ax_t txn_o,
  output logic    txn_write_o,
  output logic    txn_valid_o,
  input  logic    txn_ready_i
);
  logic aw_wait_q, ar_wait_q;   // request was already pending last cycle
  logic last_w_q;               // last grant went to AW
  logic older_w_q;              // both waiting: AW is the older one
  logic pick_w;

  always_comb begin
    if (aw_valid_i && !ar_valid_i)      pick_w = 1'b1;
    else if (ar_valid_i && !aw_valid_i) pick_w = 1'b0;
    else if (aw_wait_q && ar_wait_q)    pick_w = older_w_q;
    else if (aw_wait_q != ar_wait_q)    pick_w = aw_wait_q;
    else                                pick_w = !last_w_q;
  end

  assign txn_valid_o = aw_valid_i || ar_valid_i;
  assign txn_write_o = pick_w;
  assign txn_o       = pick_w ? aw_i : ar_i;
  assign aw_ready_o  = txn_ready_i && pick_w;
  assign ar_ready_o  = txn_ready_i && !pick_w;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      aw_wait_q <= 1'b0;
      ar_wait_q <= 1'b0;
      last_w_q  <= 1'b0;
      older_w_q <= 1'b0;
    end else begin
      older_w_q <= pick_w;
      aw_wait_q <= aw_valid_i && !aw_ready_o;
      ar_wait_q <= ar_valid_i && !ar_ready_o;
      if (txn_valid_o && txn_ready_i) last_w_q <= pick_w;
    end
  end
endmodule
