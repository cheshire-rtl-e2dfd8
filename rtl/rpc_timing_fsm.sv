// rpc_timing_fsm: the timing FSM. It times RPC DRAM commands and drives the
// physical interface cycle by cycle.
//
// Command timing: a command is accepted only when the minimum delay set by
// the previous one has passed (ACT->RD/WR t_rcd, ACT->PRE t_ras, PRE t_rp,
// REF t_rfc, ZQ t_zqcs, mode write 4 cycles, and the whole data burst plus
// t_wr after a WRITE). Each command occupies one cycle on DB with CS# low.
// Interface timing: after a WRITE issued in cycle 0, cycle wl-1 is the
// strobe preamble (DQS driven low), cycles wl and wl+1 carry the first and
// last write mask, then 8 cycles per 256-bit word carry the data subwords
// with DQS toggling, and one postamble cycle follows. At the start of each
// word it pops the word from the frontend (NSRRP data request) and has the
// PHY load it into its serializer. After a READ the device returns data
// from cycle rl on; the bus is left undriven and the next command waits
// until the burst is over. Its outputs are registered once more in the PHY.
// The mask-before-data order follows the source description; the cycle
// plan, latencies and masks-in-two-cycles layout are this design's own.
//
// Lint note: only the command-spacing and latency fields of the shared
// configuration struct are used here; the other fields are unused by design.
module rpc_timing_fsm
  import rpc_pkg::*;
(
  input  logic       clk_i,
  input  logic       rst_ni,
  input  rpc_cfg_t   cfg_i,
  input  rpc_cmd_t   cmd_i,
  input  wmask_t     first_mask_i,
  input  wmask_t     last_mask_i,
  input  logic       cmd_valid_i,
  output logic       cmd_ready_o,
  // towards the PHY (one slot per cycle)
  output logic       cs_n_o,
  output logic       db_oe_o,
  output logic       dqs_oe_o,
  output logic       dqs_en_o,
  output logic       sel_data_o,   // 1: serialized write data, 0: tx_word_o
  output subword_t   tx_word_o,    // command packet or mask
  output logic       wload_o       // start of a data word: pop and load
);
  logic [15:0] wait_q, ras_q;
  logic        wr_busy_q;
  logic [15:0] c_q;               // cycles since the WRITE
  logic [15:0] data_end_q;        // first cycle after the data
  logic [3:0]  wl_q;
  wmask_t      fm_q, lm_q;
  logic        can_issue;
  logic [15:0] burst_cycles;

  assign burst_cycles = (16'(cmd_i.len) + 16'd1) << 3;   // 8 cycles per word
  assign can_issue    = (wait_q == '0) && (cmd_i.op != OpPre || ras_q == '0);
  assign cmd_ready_o  = cmd_valid_i && can_issue;

  always_comb begin
    cs_n_o     = 1'b1;
    db_oe_o    = 1'b0;
    dqs_oe_o   = 1'b0;
    dqs_en_o   = 1'b0;
    sel_data_o = 1'b0;
    tx_word_o  = '0;
    wload_o    = 1'b0;
    if (cmd_valid_i && can_issue) begin
      cs_n_o    = 1'b0;
      db_oe_o   = 1'b1;
      tx_word_o = encode_cmd(cmd_i);
    end else if (wr_busy_q) begin
      if (c_q == 16'(wl_q) - 16'd1) begin
        dqs_oe_o = 1'b1;                        // preamble: DQS low
      end else if (c_q == 16'(wl_q) || c_q == 16'(wl_q) + 16'd1) begin
        db_oe_o   = 1'b1;
        dqs_oe_o  = 1'b1;
        dqs_en_o  = 1'b1;
        tx_word_o = (c_q == 16'(wl_q)) ? fm_q : lm_q;
      end else if (c_q > 16'(wl_q) + 16'd1 && c_q < data_end_q) begin
        db_oe_o    = 1'b1;
        dqs_oe_o   = 1'b1;
        dqs_en_o   = 1'b1;
        sel_data_o = 1'b1;
        wload_o    = ((c_q - 16'(wl_q) - 16'd2) & 16'd7) == 16'd0;
      end else if (c_q == data_end_q) begin
        dqs_oe_o = 1'b1;                        // postamble
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wait_q     <= '0;
      ras_q      <= '0;
      wr_busy_q  <= 1'b0;
      c_q        <= '0;
      data_end_q <= '0;
      wl_q       <= '0;
      fm_q       <= '0;
      lm_q       <= '0;
    end else begin
      if (wait_q != '0) wait_q <= wait_q - 1'b1;
      if (ras_q != '0)  ras_q  <= ras_q - 1'b1;
      if (wr_busy_q) begin
        c_q <= c_q + 1'b1;
        if (c_q == data_end_q) wr_busy_q <= 1'b0;
      end
      if (cmd_valid_i && can_issue) begin
        unique case (cmd_i.op)
          OpAct: begin
            wait_q <= 16'(cfg_i.t_rcd) - 16'd1;
            ras_q  <= 16'(cfg_i.t_ras) - 16'd1;
          end
          OpRd:  wait_q <= 16'(cfg_i.rl) + burst_cycles;
          OpWr: begin
            wait_q     <= 16'(cfg_i.wl) + 16'd2 + burst_cycles + 16'(cfg_i.t_wr);
            wr_busy_q  <= 1'b1;
            c_q        <= 16'd1;
            wl_q       <= cfg_i.wl;
            data_end_q <= 16'(cfg_i.wl) + 16'd2 + burst_cycles;
            fm_q       <= first_mask_i;
            lm_q       <= last_mask_i;
          end
          OpPre: wait_q <= 16'(cfg_i.t_rp) - 16'd1;
          OpRef: wait_q <= 16'(cfg_i.t_rfc) - 16'd1;
          OpZq:  wait_q <= 16'(cfg_i.t_zqcs) - 16'd1;
          OpMrs: wait_q <= 16'd3;
          default: ;
        endcase
      end
    end
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni) cmd_valid_i && cmd_i.op == OpWr |-> cfg_i.wl >= 4'd2)
    else $error("rpc_timing_fsm: write latency below 2 leaves no room for the preamble");
endmodule
