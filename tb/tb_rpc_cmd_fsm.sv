// tb_rpc_cmd_fsm: self-checking testbench of the RPC command FSM.
// Checks: no request is accepted before init is done; every NSRRP request
// becomes exactly ACT (bank, row), then RD or WR (bank, column, length,
// masks), then PRE (close-page policy) while the timing side stalls at
// random; a maintenance request (refresh, short/long ZQ, mode write) is
// turned into its command, takes priority over a waiting request and is
// never issued in the middle of an ACT-RW-PRE sequence.
//
// ACT - RD/WR - PRE is the published decomposition; the maintenance
// priority is our own.
module tb_rpc_cmd_fsm;
  import rpc_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a falling edge, so asynchronous resets act at once
  always #2500 clk = ~clk;
  rpc_cfg_t cfg;
  logic done, rv, rr, mv, mr, cv, cr;
  nsrrp_req_t req;
  mgmt_op_e mop;
  rpc_cmd_t cmd;
  wmask_t fm, lm;
  int checks = 0, failures = 0;

  rpc_cmd_fsm dut (.clk_i(clk), .rst_ni(rst_n), .cfg_i(cfg), .init_done_i(done), .req_i(req), .req_valid_i(rv),
    .req_ready_o(rr), .mgmt_op_i(mop), .mgmt_valid_i(mv), .mgmt_ready_o(mr), .cmd_o(cmd), .first_mask_o(fm),
    .last_mask_o(lm), .cmd_valid_o(cv), .cmd_ready_i(cr));

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // command monitor: expected sequence per accepted request / maintenance
  rpc_cmd_t issued[$];
  wmask_t ifm[$], ilm[$];
  always @(negedge clk) begin
    cr = ($urandom % 3 == 0);
    #2;
    if (rst_n && cv && cr) begin issued.push_back(cmd); ifm.push_back(fm); ilm.push_back(lm); end
  end

  int n_mgmt_mid = 0;
  initial begin
    nsrrp_req_t accepted[$];
    mgmt_op_e mops[$];
    int nreq = 0;
    cfg = '0; cfg.mode = 16'hA5C3;
    done = 0; rv = 0; mv = 0; req = '0; mop = MgmtRef;
    repeat (3) @(negedge clk); rst_n = 1;
    req = '{write: 1, addr: 20'h12345, len: 6'd3, first_mask: '1, last_mask: '0}; rv = 1;
    repeat (5) begin @(negedge clk); check(!rr, "no request accepted before init"); end
    for (int i = 0; i < 1500; i++) begin
      @(negedge clk);
      done = 1;
      if (!rv && ($urandom % 2)) begin
        req = '{write: 1'($urandom), addr: waddr_t'($urandom), len: len_t'($urandom), first_mask: wmask_t'($urandom),
                last_mask: wmask_t'($urandom)};
        rv = 1;
      end
      if (!mv && ($urandom % 8 == 0)) begin mop = mgmt_op_e'($urandom % 4); mv = 1; end
      #1;
      if (mv && mr) begin
        check(!(rv && rr), "maintenance has priority over a waiting request");
        mops.push_back(mop);
        accepted.push_back('0);
        @(posedge clk); #1 mv = 0;
      end else if (rv && rr) begin
        accepted.push_back(req);
        mops.push_back(MgmtRef);
        @(posedge clk); #1 rv = 0;
      end
    end
    rv = 0; mv = 0;
    repeat (100) @(negedge clk);
    // replay: each accepted item must produce its command group, in order
    for (int k = 0; k < accepted.size(); k++) begin
      nsrrp_req_t r;
      r = accepted[k];
      if (r == '0) begin
        rpc_cmd_t c;
        c = issued.pop_front(); void'(ifm.pop_front()); void'(ilm.pop_front());
        case (mops[k])
          MgmtRef:     check(c.op == OpRef, "refresh command");
          MgmtZqShort: check(c.op == OpZq && c.mode == 16'h0, "short ZQ command");
          MgmtZqLong:  check(c.op == OpZq && c.mode == 16'h1, "long ZQ command");
          default:     begin check(c.op == OpMrs && c.mode == 16'hA5C3, "mode write command"); end
        endcase
      end else begin
        rpc_cmd_t a, b, p;
        wmask_t f, l;
        a = issued.pop_front(); void'(ifm.pop_front()); void'(ilm.pop_front());
        b = issued.pop_front(); f = ifm.pop_front(); l = ilm.pop_front();
        p = issued.pop_front(); void'(ifm.pop_front()); void'(ilm.pop_front());
        check(a.op == OpAct && a.bank == addr_bank(r.addr) && a.row == addr_row(r.addr), "ACT with bank and row");
        check(b.op == (r.write ? OpWr : OpRd) && b.bank == addr_bank(r.addr) && b.col == addr_col(r.addr) &&
              b.len == r.len, "RD/WR with bank, column and length");
        if (r.write) check(f == r.first_mask && l == r.last_mask, "write masks passed on");
        check(p.op == OpPre && p.bank == addr_bank(r.addr), "PRE closes the bank");
        nreq++;
      end
    end
    check(issued.size() == 0, "no extra commands");
    check(nreq > 80, $sformatf("requests served: %0d", nreq));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
