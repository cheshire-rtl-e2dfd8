// tb_rpc_timing_fsm: self-checking testbench of the RPC timing FSM.
// A stream of commands (ACT, WR or RD of random length, PRE, REF, ZQ, MRS)
// is offered back to back; the cycle each one goes out (CS# low) is
// recorded and the spacing is checked against the configured timings:
// ACT to RD/WR = tRCD, RD to next = RL + 8 cycles per word + 1, WR to next
// = WL + 2 + 8 per word + tWR + 1, ACT to PRE >= tRAS, PRE to next = tRP,
// REF to next = tRFC, ZQ to next = tZQCS. For every write the DB/DQS
// sequence is checked cycle by cycle: DQS preamble at WL-1, the two mask
// packets at WL and WL+1, 8 data cycles per word with a word load every
// 8 cycles, then the postamble. Two timing sets are used.
//
// Masks between command and data are published; the exact cycle plan
// checked here is this design's own.
module tb_rpc_timing_fsm;
  import rpc_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a falling edge, so asynchronous resets act at once
  always #2500 clk = ~clk;
  rpc_cfg_t cfg;
  rpc_cmd_t cmd;
  wmask_t fm, lm;
  logic cv, cr, cs_n, db_oe, dqs_oe, dqs_en, sel, wload;
  subword_t txw;
  int checks = 0, failures = 0;

  rpc_timing_fsm dut (.clk_i(clk), .rst_ni(rst_n), .cfg_i(cfg), .cmd_i(cmd), .first_mask_i(fm), .last_mask_i(lm),
    .cmd_valid_i(cv), .cmd_ready_o(cr), .cs_n_o(cs_n), .db_oe_o(db_oe), .dqs_oe_o(dqs_oe), .dqs_en_o(dqs_en),
    .sel_data_o(sel), .tx_word_o(txw), .wload_o(wload));

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int cyc = 0;
  always @(posedge clk) cyc++;

  // send one command, return the cycle it was issued in
  task automatic send(input rpc_op_e op, input int len, output int t);
    @(negedge clk);
    cmd = '0; cmd.op = op; cmd.len = len_t'(len); cmd.row = 12'($urandom); cmd.col = 6'($urandom);
    fm = wmask_t'($urandom); lm = wmask_t'($urandom);
    cv = 1;
    #1;
    while (!cr) begin @(negedge clk); #1; end
    t = cyc;
    check(cs_n == 0 && db_oe == 1 && txw == encode_cmd(cmd), "command packet with CS# low");
    if (op == OpWr) begin
      wmask_t f, l;
      f = fm; l = lm;
      @(negedge clk); cv = 0;
      // cycle k after the WRITE
      for (int k = 1; k <= int'(cfg.wl) + 2 + 8 * (len + 1); k++) begin
        int wl, d;
        #1;
        wl = int'(cfg.wl);
        d = k - wl - 2;
        if (k < wl - 1) check(!dqs_oe && !db_oe, "idle before the preamble");
        else if (k == wl - 1) check(dqs_oe && !dqs_en && !db_oe, "DQS preamble");
        else if (k == wl) check(db_oe && dqs_en && !sel && txw == f, "first mask packet at WL");
        else if (k == wl + 1) check(db_oe && dqs_en && !sel && txw == l, "last mask packet at WL+1");
        else if (d < 8 * (len + 1)) check(db_oe && dqs_en && sel && wload == (d % 8 == 0), $sformatf("data cycle %0d", d));
        else check(dqs_oe && !dqs_en && !db_oe, "DQS postamble");
        @(negedge clk);
      end
    end else begin
      @(negedge clk); cv = 0;
    end
  endtask

  initial begin
    int t_act, t_rw, t_pre, t, n;
    cv = 0; cmd = '0; fm = '0; lm = '0;
    cfg = '0;
    cfg.t_rcd = 3; cfg.t_rp = 3; cfg.t_ras = 8; cfg.t_wr = 3; cfg.t_rfc = 28; cfg.t_zqcs = 16; cfg.rl = 6; cfg.wl = 3;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int set = 0; set < 2; set++) begin
      if (set == 1) begin cfg.t_rcd = 5; cfg.t_rp = 4; cfg.t_ras = 40; cfg.t_wr = 6; cfg.rl = 8; cfg.wl = 5; cfg.t_rfc = 40; end
      for (int i = 0; i < 30; i++) begin
        logic wr;
        wr = 1'($urandom);
        n = (i % 5 == 0) ? 0 : int'($urandom % 8);
        send(OpAct, 0, t_act);
        send(wr ? OpWr : OpRd, n, t_rw);
        check(t_rw - t_act == int'(cfg.t_rcd), $sformatf("ACT to RD/WR = tRCD (%0d)", t_rw - t_act));
        send(OpPre, 0, t_pre);
        if (wr) check(t_pre - t_rw == int'(cfg.wl) + 2 + 8 * (n + 1) + int'(cfg.t_wr) + 1 ||
                      t_pre - t_act == int'(cfg.t_ras), $sformatf("WR to PRE (%0d)", t_pre - t_rw));
        else check(t_pre - t_rw == int'(cfg.rl) + 8 * (n + 1) + 1 || t_pre - t_act == int'(cfg.t_ras),
                   $sformatf("RD to PRE (%0d)", t_pre - t_rw));
        check(t_pre - t_act >= int'(cfg.t_ras), "ACT to PRE >= tRAS");
        send(OpRef, 0, t);
        check(t - t_pre == int'(cfg.t_rp), "PRE to next = tRP");
        send(OpZq, 0, t_act);
        check(t_act - t == int'(cfg.t_rfc), "REF to next = tRFC");
        send(OpMrs, 0, t);
        check(t - t_act == int'(cfg.t_zqcs), "ZQ to next = tZQCS");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
