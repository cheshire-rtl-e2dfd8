// cheshire_top: the memory subsystem of the Cheshire SoC as built here -
// the last-level cache / scratchpad (cheshire_llc) in front of the RPC DRAM
// interface (rpc_dram_if).
//
// Follows the source: the LLC sits between the AXI4 crossbar and the DRAM
// controller, its ways can serve as SPM, and the DRAM controller is the RPC
// DRAM interface with its AXI frontend, controller and PHY; both are
// configured over the register bus. Defaults are the demonstrator's: 128 KiB
// of SPM/LLC, 64-bit AXI data, 48-bit addresses, 8 KiB read and write buffers.
//
// Our own choice: the rest of the SoC (CVA6 core, crossbar, register-bus
// demultiplexer, DMA engine, peripherals) is not part of this design, so the
// crossbar's manager port into the LLC and the two register-bus ports appear
// here as top-level ports; the RPC DRAM pins leave with separate output-enable
// signals instead of bidirectional pads.
//
// Lint note: assertions in the buffers use the asynchronous reset in their
// disable-iff clause, which lint reports as a reset used both synchronously
// and asynchronously; this is simulation-only checking and creates no logic.
module cheshire_top
  import cheshire_pkg::*;
  import rpc_pkg::*;
#(
  parameter int unsigned SpmBytes      = 131072,
  parameter int unsigned WriteBufWords = 256,
  parameter int unsigned ReadBufWords  = 256
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  // crossbar port into the LLC
  input  axi_req_t           axi_req_i,
  output axi_rsp_t           axi_rsp_o,
  // register bus: LLC configuration and RPC DRAM configuration
  input  reg_req_t           llc_reg_req_i,
  output reg_rsp_t           llc_reg_rsp_o,
  input  reg_req_t           rpc_reg_req_i,
  output reg_rsp_t           rpc_reg_rsp_o,
  output logic               rpc_init_done_o,
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
  axi_req_t dram_req;
  axi_rsp_t dram_rsp;

  cheshire_llc #(
    .SpmBytes (SpmBytes)
  ) i_llc (
    .clk_i,
    .rst_ni,
    .slv_req_i (axi_req_i),
    .slv_rsp_o (axi_rsp_o),
    .mst_req_o (dram_req),
    .mst_rsp_i (dram_rsp),
    .reg_req_i (llc_reg_req_i),
    .reg_rsp_o (llc_reg_rsp_o)
  );

  rpc_dram_if #(
    .WriteBufWords (WriteBufWords),
    .ReadBufWords  (ReadBufWords)
  ) i_rpc (
    .clk_i,
    .rst_ni,
    .axi_req_i   (dram_req),
    .axi_rsp_o   (dram_rsp),
    .reg_req_i   (rpc_reg_req_i),
    .reg_rsp_o   (rpc_reg_rsp_o),
    .init_done_o (rpc_init_done_o),
    .rpc_clk_o,
    .rpc_clk_n_o,
    .rpc_cs_n_o,
    .rpc_stb_o,
    .rpc_db_o,
    .rpc_db_oe_o,
    .rpc_db_i,
    .rpc_dqs_o,
    .rpc_dqs_n_o,
    .rpc_dqs_oe_o,
    .rpc_dqs_i
  );
endmodule
