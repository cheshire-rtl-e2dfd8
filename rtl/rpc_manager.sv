// rpc_manager: issues the RPC DRAM management commands: initialization after
// power-up, periodic refresh and periodic ZQ calibration.
//
// After reset it waits t_init cycles, then requests a mode-register write
// (value cfg.mode) and a long ZQ calibration, and raises init_done_o; the
// command FSM accepts datapath commands only after that. From then on two
// free-running counters request a refresh every t_refi cycles and a short ZQ
// calibration every t_zqi cycles; a request is held (valid/ready towards the
// command FSM) until taken, refresh first. The three duties follow the source
// description; the init sequence, the interval counters and the handshake
// are this design's own. All intervals come from the register file.
//
// Lint note: only the interval and mode fields of the shared configuration
// struct are used here; the other fields are unused by design.
module rpc_manager
  import rpc_pkg::*;
(
  input  logic     clk_i,
  input  logic     rst_ni,
  input  rpc_cfg_t cfg_i,
  output mgmt_op_e mgmt_op_o,
  output logic     mgmt_valid_o,
  input  logic     mgmt_ready_i,
  output logic     init_done_o
);
  typedef enum logic [1:0] {WaitInit, InitMrs, InitZq, Run} state_e;
  state_e      state_q;
  logic [31:0] init_cnt_q, zq_cnt_q;
  logic [15:0] ref_cnt_q;
  logic        ref_pend_q, zq_pend_q;
  logic        fire;

  assign fire        = mgmt_valid_o && mgmt_ready_i;
  assign init_done_o = (state_q == Run);

  always_comb begin
    mgmt_valid_o = 1'b0;
    mgmt_op_o    = MgmtRef;
    unique case (state_q)
      InitMrs: begin mgmt_valid_o = 1'b1; mgmt_op_o = MgmtMrs;    end
      InitZq:  begin mgmt_valid_o = 1'b1; mgmt_op_o = MgmtZqLong; end
      Run: begin
        mgmt_valid_o = ref_pend_q || zq_pend_q;
        mgmt_op_o    = ref_pend_q ? MgmtRef : MgmtZqShort;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q    <= WaitInit;
      init_cnt_q <= '0;
      ref_cnt_q  <= '0;
      zq_cnt_q   <= '0;
      ref_pend_q <= 1'b0;
      zq_pend_q  <= 1'b0;
    end else begin
      unique case (state_q)
        WaitInit: begin
          init_cnt_q <= init_cnt_q + 1'b1;
          if (init_cnt_q + 1'b1 >= cfg_i.t_init) state_q <= InitMrs;
        end
        InitMrs: if (fire) state_q <= InitZq;
        InitZq:  if (fire) state_q <= Run;
        Run: begin
          // Clear a taken request first, so a new one in the same cycle wins.
          if (fire && ref_pend_q) ref_pend_q <= 1'b0;
          if (fire && !ref_pend_q) zq_pend_q <= 1'b0;
          if (ref_cnt_q + 1'b1 >= cfg_i.t_refi) begin
            ref_cnt_q  <= '0;
            ref_pend_q <= 1'b1;
          end else begin
            ref_cnt_q <= ref_cnt_q + 1'b1;
          end
          if (zq_cnt_q + 1'b1 >= cfg_i.t_zqi) begin
            zq_cnt_q  <= '0;
            zq_pend_q <= 1'b1;
          end else begin
            zq_cnt_q <= zq_cnt_q + 1'b1;
          end
        end
        default: state_q <= WaitInit;
      endcase
    end
  end
endmodule
