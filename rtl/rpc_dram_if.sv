// rpc_dram_if: the complete RPC DRAM interface: an AXI4 subordinate on one
// side, the 22 switching RPC DRAM signals on the other.
//
// The AXI frontend (serialization, 64-to-256-bit conversion, 8 KiB write
// and read buffers, 2 KiB splitting, mask derivation) and the controller
// (registers, manager, command and timing FSMs, PHY) are joined by the
// non-stallable request-response protocol (NSRRP), whose data width is one
// 256-bit RPC word. The controller's register file hangs on the register
// bus. The bidirectional pins DB and DQS are split into output, output
// enable and input; DQS# is output only, as this PHY reads with DQS alone.
//
// Lint note: the frontend's idle output is left open on purpose; it is only
// used by testbenches of the frontend.
module rpc_dram_if
  import rpc_pkg::*;
  import cheshire_pkg::*;
#(
  parameter int unsigned WriteBufWords = 256,
  parameter int unsigned ReadBufWords  = 256
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  axi_req_t           axi_req_i,
  output axi_rsp_t           axi_rsp_o,
  input  reg_req_t           reg_req_i,
  output reg_rsp_t           reg_rsp_o,
  output logic               init_done_o,
  output logic               rpc_clk_o,
  output logic               rpc_clk_n_o,
  output logic               rpc_cs_n_o,
  output logic               rpc_stb_o,
  output logic [DbWidth-1:0] rpc_db_o,
  output logic               rpc_db_oe_o,
  input  logic [DbWidth-1:0] rpc_db_i,
  output logic               rpc_dqs_o,
  output logic               rpc_dqs_n_o,
  output logic               rpc_dqs_oe_o,
  input  logic               rpc_dqs_i
);
  nsrrp_req_t req;
  logic       req_valid, req_ready, wpop, rvalid;
  word_t      wdata, rdata;

  rpc_axi_frontend #(.WriteBufWords(WriteBufWords), .ReadBufWords(ReadBufWords)) i_front (
    .clk_i, .rst_ni, .axi_req_i, .axi_rsp_o,
    .nsrrp_req_o(req), .nsrrp_valid_o(req_valid), .nsrrp_ready_i(req_ready),
    .nsrrp_wpop_i(wpop), .nsrrp_wdata_o(wdata),
    .nsrrp_rvalid_i(rvalid), .nsrrp_rdata_i(rdata), .idle_o()
  );

  rpc_ctrl i_ctrl (
    .clk_i, .rst_ni, .reg_req_i, .reg_rsp_o,
    .req_i(req), .req_valid_i(req_valid), .req_ready_o(req_ready),
    .wpop_o(wpop), .wdata_i(wdata), .rvalid_o(rvalid), .rdata_o(rdata), .init_done_o,
    .rpc_clk_o, .rpc_clk_n_o, .rpc_cs_n_o, .rpc_stb_o, .rpc_db_o, .rpc_db_oe_o, .rpc_db_i,
    .rpc_dqs_o, .rpc_dqs_n_o, .rpc_dqs_oe_o, .rpc_dqs_i
  );
endmodule
