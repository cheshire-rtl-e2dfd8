// rpc_ctrl: the RPC DRAM controller. It receives NSRRP datapath commands
// from the frontend and drives the RPC DRAM pins.
//
// Structure as in the source description: a register file (timing and PHY
// configuration, on the SoC register bus), a manager (init, refresh, ZQ
// calibration), the command FSM (ACT / RD-WR / PRE decomposition and
// management commands), the timing FSM (command spacing, chip select,
// strobe gating, DB multiplexing) and the PHY. NSRRP: a request is taken
// on valid/ready; for writes the controller pops one buffered word per
// wpop_o pulse, taking wdata_i in the same cycle; for reads it pushes one
// word per rvalid_o pulse and cannot be stalled. A word of 32 bytes occupies
// DB for 8 cycles.
module rpc_ctrl
  import rpc_pkg::*;
  import cheshire_pkg::*;
(
  input  logic               clk_i,
  input  logic               rst_ni,
  input  reg_req_t           reg_req_i,
  output reg_rsp_t           reg_rsp_o,
  // NSRRP
  input  nsrrp_req_t         req_i,
  input  logic               req_valid_i,
  output logic               req_ready_o,
  output logic               wpop_o,
  input  word_t              wdata_i,
  output logic               rvalid_o,
  output word_t              rdata_o,
  output logic               init_done_o,
  // RPC DRAM pins
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
  rpc_cfg_t cfg;
  mgmt_op_e mgmt_op;
  logic     mgmt_valid, mgmt_ready;
  rpc_cmd_t cmd;
  wmask_t   fm, lm;
  logic     cmd_valid, cmd_ready;
  logic     cs_n, db_oe, dqs_oe, dqs_en, sel_data, wload;
  subword_t tx_word;

  rpc_regs i_regs (
    .clk_i, .rst_ni, .reg_req_i, .reg_rsp_o, .init_done_i(init_done_o), .cfg_o(cfg)
  );

  rpc_manager i_mgr (
    .clk_i, .rst_ni, .cfg_i(cfg),
    .mgmt_op_o(mgmt_op), .mgmt_valid_o(mgmt_valid), .mgmt_ready_i(mgmt_ready),
    .init_done_o
  );

  rpc_cmd_fsm i_cmd (
    .clk_i, .rst_ni, .cfg_i(cfg), .init_done_i(init_done_o),
    .req_i, .req_valid_i, .req_ready_o,
    .mgmt_op_i(mgmt_op), .mgmt_valid_i(mgmt_valid), .mgmt_ready_o(mgmt_ready),
    .cmd_o(cmd), .first_mask_o(fm), .last_mask_o(lm), .cmd_valid_o(cmd_valid), .cmd_ready_i(cmd_ready)
  );

  rpc_timing_fsm i_timing (
    .clk_i, .rst_ni, .cfg_i(cfg),
    .cmd_i(cmd), .first_mask_i(fm), .last_mask_i(lm), .cmd_valid_i(cmd_valid), .cmd_ready_o(cmd_ready),
    .cs_n_o(cs_n), .db_oe_o(db_oe), .dqs_oe_o(dqs_oe), .dqs_en_o(dqs_en),
    .sel_data_o(sel_data), .tx_word_o(tx_word), .wload_o(wload)
  );

  assign wpop_o = wload;

  rpc_phy i_phy (
    .clk_i, .rst_ni, .tx_tap_i(cfg.tx_tap), .rx_tap_i(cfg.rx_tap),
    .cs_n_i(cs_n), .db_oe_i(db_oe), .dqs_oe_i(dqs_oe), .dqs_en_i(dqs_en),
    .sel_data_i(sel_data), .tx_word_i(tx_word), .wload_i(wload), .wdata_i,
    .rdata_valid_o(rvalid_o), .rdata_o,
    .clk_o(rpc_clk_o), .clk_n_o(rpc_clk_n_o), .cs_n_o(rpc_cs_n_o), .stb_o(rpc_stb_o),
    .db_o(rpc_db_o), .db_oe_o(rpc_db_oe_o), .db_i(rpc_db_i),
    .dqs_o(rpc_dqs_o), .dqs_n_o(rpc_dqs_n_o), .dqs_oe_o(rpc_dqs_oe_o), .dqs_i(rpc_dqs_i)
  );
endmodule
