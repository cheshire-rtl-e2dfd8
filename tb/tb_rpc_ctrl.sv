// tb_rpc_ctrl: self-checking testbench of the RPC DRAM controller (register
// file, manager, command FSM, timing FSM and PHY) against the behavioural
// device model, driven directly through its NSRRP request/response side.
//
// Random masked writes and reads of 1 to 64 words inside one row are
// issued; write words are supplied when the controller pops them and read
// words are compared with a word-level reference (masked bytes must keep
// their old value). Checks also: the init sequence, that a one-word read
// occupies DB for exactly 8 cycles, refresh and ZQ under traffic, no model
// protocol errors and no bus contention.
//
// The 8-cycle word follows from the published 256-bit word on a 16-bit DDR
// bus; the timings used are our own.
module tb_rpc_ctrl;
  import cheshire_pkg::*;
  import rpc_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a falling edge, so asynchronous resets act at once
  always #2500 clk = ~clk;
  reg_req_t rreq;
  reg_rsp_t rrsp;
  nsrrp_req_t nreq;
  logic nvalid, nready, wpop, rvalid, init_done;
  word_t wdata, rdata;
  logic rclk, rclk_n, cs_n, stb, db_oe, dqs, dqs_n, dqs_oe;
  logic [15:0] db_o, db_bus, m_db;
  logic m_db_oe, m_dqs, m_dqs_oe;
  int checks = 0, failures = 0;

  rpc_ctrl dut (.clk_i(clk), .rst_ni(rst_n), .reg_req_i(rreq), .reg_rsp_o(rrsp), .req_i(nreq), .req_valid_i(nvalid),
    .req_ready_o(nready), .wpop_o(wpop), .wdata_i(wdata), .rvalid_o(rvalid), .rdata_o(rdata), .init_done_o(init_done),
    .rpc_clk_o(rclk), .rpc_clk_n_o(rclk_n), .rpc_cs_n_o(cs_n), .rpc_stb_o(stb), .rpc_db_o(db_o), .rpc_db_oe_o(db_oe),
    .rpc_db_i(db_bus), .rpc_dqs_o(dqs), .rpc_dqs_n_o(dqs_n), .rpc_dqs_oe_o(dqs_oe), .rpc_dqs_i(m_dqs_oe ? m_dqs : 1'b0));

  assign db_bus = db_oe ? db_o : (m_db_oe ? m_db : 16'h0);

  rpc_dram_model #(.Quarter(1250), .Rl(6), .TRcd(3), .Debug(0)) mdl (
    .clk(rclk), .cs_n(cs_n), .db(db_bus), .dqs(dqs && dqs_oe),
    .db_drv(m_db), .db_oe(m_db_oe), .dqs_drv(m_dqs), .dqs_oe(m_dqs_oe));

  int contention = 0;
  always @(posedge clk) if (db_oe && m_db_oe) contention++;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic reg_wr(input int idx, input logic [31:0] v);
    @(negedge clk); rreq = '{addr: 32'(idx*4), write: 1'b1, wdata: v, valid: 1'b1};
    @(negedge clk); rreq.valid = 1'b0;
  endtask

  word_t refw [int];
  word_t wq[$];
  word_t rq[$];
  assign wdata = wq.size() > 0 ? wq[0] : '0;
  always @(posedge clk) if (wpop) void'(wq.pop_front());
  always @(negedge clk) if (rvalid) rq.push_back(rdata);

  function automatic word_t merge(word_t o, word_t n, wmask_t m);
    for (int b = 0; b < 32; b++) if (!m[b]) o[b*8 +: 8] = n[b*8 +: 8];
    return o;
  endfunction

  task automatic issue(input nsrrp_req_t r);
    @(negedge clk); nreq = r; nvalid = 1;
    do @(posedge clk); while (!nready);
    #1 nvalid = 0;
  endtask

  task automatic do_write(input waddr_t a, input int n);
    nsrrp_req_t r;
    r = '{write: 1, addr: a, len: len_t'(n - 1), first_mask: wmask_t'($urandom), last_mask: wmask_t'($urandom)};
    if ($urandom % 2) begin r.first_mask = '0; r.last_mask = '0; end
    if (n == 1) r.last_mask = r.first_mask;  // as the mask unit sends a one-word write
    for (int i = 0; i < n; i++) begin
      word_t d, o;
      wmask_t m;
      d = {8{$urandom}};
      d[63:32] = $urandom; d[191:160] = $urandom;
      m = (i == 0) ? r.first_mask : ((i == n - 1) ? r.last_mask : '0);
      if (n == 1) m = r.first_mask;
      o = refw.exists(int'(a) + i) ? refw[int'(a) + i] : '0;
      refw[int'(a) + i] = merge(o, d, m);
      wq.push_back(d);
    end
    issue(r);
  endtask

  task automatic do_read(input waddr_t a, input int n);
    nsrrp_req_t r;
    int t0;
    r = '{write: 0, addr: a, len: len_t'(n - 1), first_mask: '0, last_mask: '0};
    rq.delete();
    issue(r);
    t0 = 0;
    while (rq.size() < n && t0 < 2000) begin @(posedge clk); t0++; end
    for (int i = 0; i < n; i++) begin
      word_t e;
      e = refw.exists(int'(a) + i) ? refw[int'(a) + i] : '0;
      check(i < rq.size() && rq[i] == e, $sformatf("read word %h", int'(a) + i));
    end
  endtask

  initial begin
    int sw0;
    rreq = '0; nreq = '0; nvalid = 0;
    repeat (4) @(negedge clk); rst_n = 1;
    reg_wr(8, 32'd20);
    reg_wr(5, 32'd250);
    reg_wr(6, 32'd3000);
    wait (init_done);
    repeat (5) @(posedge clk);
    check(mdl.n_mrs == 1 && mdl.n_zq == 1, "init: mode write and long ZQ");
    do_write(20'h00040, 1);
    repeat (40) @(posedge clk);
    sw0 = mdl.data_subwords;
    do_read(20'h00040, 1);
    check(mdl.data_subwords - sw0 == 8, "a one-word read takes 8 DB cycles");
    for (int i = 0; i < 120; i++) begin
      waddr_t a; int n;
      a = waddr_t'($urandom % 4096);
      n = 1 + int'($urandom % 64);
      if (int'(a[5:0]) + n > 64) n = 64 - int'(a[5:0]);
      if ($urandom % 2) do_write(a, n);
      else begin
        wait (wq.size() == 0);
        repeat (30) @(posedge clk);
        do_read(a, n);
      end
    end
    check(mdl.n_ref > 0, $sformatf("refreshes: %0d", mdl.n_ref));
    check(mdl.n_zq > 1, $sformatf("periodic ZQ: %0d", mdl.n_zq));
    check(mdl.errors == 0, $sformatf("device model protocol errors: %0d", mdl.errors));
    check(contention == 0, "no DB contention");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
