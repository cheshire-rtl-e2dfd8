// rpc_regs: memory-mapped register file holding the RPC DRAM timing and PHY
// configuration used by the manager, the timing FSM and the PHY.
//
// A 32-bit register-bus subordinate: a request is answered in the cycle it
// is presented (ready = valid). Word-aligned registers, index = addr[5:2]:
//   0 t_rcd   1 t_rp    2 t_ras   3 t_wr    4 t_rfc   5 t_refi  6 t_zqi
//   7 t_zqcs  8 t_init  9 rl     10 wl     11 mode   12 tx_tap 13 rx_tap
//  14 status (read-only, bit 0 = initialization done)
// Other indices answer with an error. That the timing parameters live in a
// memory-mapped register file follows the source description; the map,
// reset values and field widths are this design's own. Reset values are
// plausible figures for a 200 MHz controller clock.
module rpc_regs
  import rpc_pkg::*;
  import cheshire_pkg::*;
#(
  parameter rpc_cfg_t ResetCfg = '{
    t_rcd: 8'd3, t_rp: 8'd3, t_ras: 8'd8, t_wr: 8'd3, t_rfc: 8'd28,
    t_refi: 16'd1560, t_zqi: 32'd25_600_000, t_zqcs: 8'd16, t_init: 32'd40_000,
    rl: 4'd6, wl: 4'd3, mode: 16'h0000, tx_tap: 6'd25, rx_tap: 6'd25}
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  reg_req_t reg_req_i,
  output reg_rsp_t reg_rsp_o,
  input  logic     init_done_i,
  output rpc_cfg_t cfg_o
);
  rpc_cfg_t   cfg_q;
  logic [3:0] idx;
  logic [31:0] wd;

  assign idx = reg_req_i.addr[5:2];
  assign wd  = reg_req_i.wdata;
  assign cfg_o = cfg_q;

  always_comb begin
    reg_rsp_o.ready = reg_req_i.valid;
    reg_rsp_o.error = reg_req_i.valid && (idx == 4'd15 || (idx == 4'd14 && reg_req_i.write));
    unique case (idx)
      4'd0:  reg_rsp_o.rdata = 32'(cfg_q.t_rcd);
      4'd1:  reg_rsp_o.rdata = 32'(cfg_q.t_rp);
      4'd2:  reg_rsp_o.rdata = 32'(cfg_q.t_ras);
      4'd3:  reg_rsp_o.rdata = 32'(cfg_q.t_wr);
      4'd4:  reg_rsp_o.rdata = 32'(cfg_q.t_rfc);
      4'd5:  reg_rsp_o.rdata = 32'(cfg_q.t_refi);
      4'd6:  reg_rsp_o.rdata = cfg_q.t_zqi;
      4'd7:  reg_rsp_o.rdata = 32'(cfg_q.t_zqcs);
      4'd8:  reg_rsp_o.rdata = cfg_q.t_init;
      4'd9:  reg_rsp_o.rdata = 32'(cfg_q.rl);
      4'd10: reg_rsp_o.rdata = 32'(cfg_q.wl);
      4'd11: reg_rsp_o.rdata = 32'(cfg_q.mode);
      4'd12: reg_rsp_o.rdata = 32'(cfg_q.tx_tap);
      4'd13: reg_rsp_o.rdata = 32'(cfg_q.rx_tap);
      4'd14: reg_rsp_o.rdata = 32'(init_done_i);
      default: reg_rsp_o.rdata = '0;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cfg_q <= ResetCfg;
    end else if (reg_req_i.valid && reg_req_i.write) begin
      unique case (idx)
        4'd0:  cfg_q.t_rcd  <= wd[7:0];
        4'd1:  cfg_q.t_rp   <= wd[7:0];
        4'd2:  cfg_q.t_ras  <= wd[7:0];
        4'd3:  cfg_q.t_wr   <= wd[7:0];
        4'd4:  cfg_q.t_rfc  <= wd[7:0];
        4'd5:  cfg_q.t_refi <= wd[15:0];
        4'd6:  cfg_q.t_zqi  <= wd;
        4'd7:  cfg_q.t_zqcs <= wd[7:0];
        4'd8:  cfg_q.t_init <= wd;
        4'd9:  cfg_q.rl     <= wd[3:0];
        4'd10: cfg_q.wl     <= wd[3:0];
        4'd11: cfg_q.mode   <= wd[15:0];
        4'd12: cfg_q.tx_tap <= wd[5:0];
        4'd13: cfg_q.rx_tap <= wd[5:0];
        default: ;
      endcase
    end
  end
endmodule
