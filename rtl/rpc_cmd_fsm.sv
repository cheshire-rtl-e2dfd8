// rpc_cmd_fsm: the command FSM. It decomposes generic datapath commands from
// the frontend and management commands from the manager into RPC DRAM
// commands for the timing FSM.
//
// A datapath transfer (NSRRP request: read or write of len+1 words at a
// word address) becomes, as in the source description, ACTIVATE of its bank
// and row, one READ or WRITE of all its words, and PRECHARGE of the bank.
// Management requests become REFRESH, ZQ calibration (short or long) or a
// mode-register write. Management requests are served first, but only
// between transfers, when all banks are closed. Datapath requests are held
// off until the manager reports initialization done. One RPC command is
// offered at a time on a valid/ready handshake; the write masks travel
// with the WRITE command. The fixed priority is this design's choice.
//
// Lint note: it reads only its own fields of the shared configuration struct;
// the rest is unused here by design (same in the manager and timing FSM).
module rpc_cmd_fsm
  import rpc_pkg::*;
(
  input  logic       clk_i,
  input  logic       rst_ni,
  input  rpc_cfg_t   cfg_i,
  input  logic       init_done_i,
  // datapath commands (NSRRP request channel)
  input  nsrrp_req_t req_i,
  input  logic       req_valid_i,
  output logic       req_ready_o,
  // management commands
  input  mgmt_op_e   mgmt_op_i,
  input  logic       mgmt_valid_i,
  output logic       mgmt_ready_o,
  // towards the timing FSM
  output rpc_cmd_t   cmd_o,
  output wmask_t     first_mask_o,
  output wmask_t     last_mask_o,
  output logic       cmd_valid_o,
  input  logic       cmd_ready_i
);
  typedef enum logic [2:0] {Idle, Mgmt, Act, Rw, Pre} state_e;
  state_e     state_q;
  nsrrp_req_t cur_q;
  mgmt_op_e   mop_q;

  assign req_ready_o  = (state_q == Idle) && !mgmt_valid_i && init_done_i;
  assign mgmt_ready_o = (state_q == Idle);
  assign first_mask_o = cur_q.first_mask;
  assign last_mask_o  = cur_q.last_mask;

  always_comb begin
    cmd_o       = '0;
    cmd_o.op    = OpNop;
    cmd_o.bank  = addr_bank(cur_q.addr);
    cmd_o.row   = addr_row(cur_q.addr);
    cmd_o.col   = addr_col(cur_q.addr);
    cmd_o.len   = cur_q.len;
    cmd_valid_o = 1'b1;
    unique case (state_q)
      Act: cmd_o.op = OpAct;
      Rw:  cmd_o.op = cur_q.write ? OpWr : OpRd;
      Pre: cmd_o.op = OpPre;
      Mgmt: begin
        unique case (mop_q)
          MgmtRef:     cmd_o.op = OpRef;
          MgmtZqShort: begin cmd_o.op = OpZq; cmd_o.mode = 16'h0000; end
          MgmtZqLong:  begin cmd_o.op = OpZq; cmd_o.mode = 16'h0001; end
          default:     begin cmd_o.op = OpMrs; cmd_o.mode = cfg_i.mode; end
        endcase
      end
      default: cmd_valid_o = 1'b0;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= Idle;
      cur_q   <= '0;
      mop_q   <= MgmtRef;
    end else begin
      unique case (state_q)
        Idle: begin
          if (mgmt_valid_i) begin
            mop_q   <= mgmt_op_i;
            state_q <= Mgmt;
          end else if (req_valid_i && req_ready_o) begin
            cur_q   <= req_i;
            state_q <= Act;
          end
        end
        Mgmt: if (cmd_ready_i) state_q <= Idle;
        Act:  if (cmd_ready_i) state_q <= Rw;
        Rw:   if (cmd_ready_i) state_q <= Pre;
        Pre:  if (cmd_ready_i) state_q <= Idle;
        default: state_q <= Idle;
      endcase
    end
  end
endmodule
