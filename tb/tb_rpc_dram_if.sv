// tb_rpc_dram_if: self-checking testbench of the complete RPC DRAM interface
// against the behavioural device model.
//
// AXI bursts (aligned, unaligned, partial strobes inside a burst, narrow
// beats, 2 KiB-crossing, a full 2 KiB burst, then random traffic with
// random R-channel stalls) are written and read back; every read byte is
// compared with a byte-level reference memory kept by the testbench. The
// device model flags protocol violations. Refresh and ZQ intervals are
// shortened through the register file so both happen during traffic.
// Also checked: one 32-byte word occupies DB for exactly 8 cycles, and a
// 2 KiB read keeps DB at least 85 % busy between request and last beat.
//
// Expected numbers (8 cycles per word, high utilization for 2 KiB) follow
// the published design; the 85 % bound is our own.
module tb_rpc_dram_if;
  import cheshire_pkg::*;
  import rpc_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a falling edge, so asynchronous resets act at once
  always #2500 clk = ~clk;

  axi_req_t req;
  axi_rsp_t rsp;
  reg_req_t rreq;
  reg_rsp_t rrsp;
  logic init_done;
  logic rclk, rclk_n, cs_n, stb, db_oe, dqs, dqs_n, dqs_oe;
  logic [15:0] db_o, db_bus, m_db;
  logic m_db_oe, m_dqs, m_dqs_oe;

  int checks = 0, failures = 0;
  logic [7:0] ref_mem [int];

  rpc_dram_if dut (
    .clk_i(clk), .rst_ni(rst_n), .axi_req_i(req), .axi_rsp_o(rsp),
    .reg_req_i(rreq), .reg_rsp_o(rrsp), .init_done_o(init_done),
    .rpc_clk_o(rclk), .rpc_clk_n_o(rclk_n), .rpc_cs_n_o(cs_n), .rpc_stb_o(stb),
    .rpc_db_o(db_o), .rpc_db_oe_o(db_oe), .rpc_db_i(db_bus),
    .rpc_dqs_o(dqs), .rpc_dqs_n_o(dqs_n), .rpc_dqs_oe_o(dqs_oe), .rpc_dqs_i(m_dqs_oe ? m_dqs : 1'b0)
  );

  assign db_bus = db_oe ? db_o : (m_db_oe ? m_db : 16'h0);

  rpc_dram_model #(.Quarter(1250), .Rl(6), .TRcd(3), .Debug(0)) mdl (
    .clk(rclk), .cs_n(cs_n), .db(db_bus), .dqs(dqs && dqs_oe),
    .db_drv(m_db), .db_oe(m_db_oe), .dqs_drv(m_dqs), .dqs_oe(m_dqs_oe)
  );

  int contention = 0;
  always @(posedge clk) if (db_oe && m_db_oe) contention++;
  always @(posedge clk) if (dqs_oe && (dqs == dqs_n)) contention++;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic reg_wr(input int idx, input logic [31:0] v);
    @(negedge clk); rreq = '{addr: 32'(idx*4), write: 1'b1, wdata: v, valid: 1'b1};
    @(negedge clk); rreq.valid = 1'b0;
  endtask

  task automatic reg_rd(input int idx, output logic [31:0] v);
    @(negedge clk); rreq = '{addr: 32'(idx*4), write: 1'b0, wdata: '0, valid: 1'b1};
    #1 v = rrsp.rdata;
    @(negedge clk); rreq.valid = 1'b0;
  endtask

  function automatic logic [7:0] ref_rd(longint a);
    return ref_mem.exists(int'(a)) ? ref_mem[int'(a)] : 8'h00;
  endfunction

  // byte lanes a beat may use
  function automatic logic [7:0] lanes(longint baddr, int size);
    longint al; logic [7:0] m;
    al = baddr & ~((longint'(1) << size) - 1);
    m = '0;
    for (longint b = baddr; b < al + (longint'(1) << size); b++) m[b % 8] = 1'b1;
    return m;
  endfunction

  task automatic axi_write(input longint addr, input int len, input int size, input logic partial);
    longint ba;
    @(negedge clk);
    req.aw = '{id: axi_id_t'($urandom), addr: axi_addr_t'(addr), len: 8'(len), size: 3'(size), burst: AxiBurstIncr};
    req.aw_valid = 1'b1;
    forever begin @(posedge clk); if (rsp.aw_ready) break; end
    @(negedge clk); req.aw_valid = 1'b0;
    ba = addr;
    for (int i = 0; i <= len; i++) begin
      logic [7:0] ln, st;
      logic [63:0] d;
      ln = lanes(ba, size);
      st = partial ? (ln & 8'($urandom)) : ln;
      d = {$urandom, $urandom};
      while ($urandom % 4 == 0) begin req.w_valid = 1'b0; @(negedge clk); end
      req.w = '{data: d, strb: st, last: (i == len)};
      req.w_valid = 1'b1;
      forever begin @(posedge clk); if (rsp.w_ready) break; end
      for (int b = 0; b < 8; b++) if (st[b]) ref_mem[int'((ba & ~64'd7) + b)] = d[b*8 +: 8];
      @(negedge clk); req.w_valid = 1'b0;
      ba = (ba & ~((longint'(1) << size) - 1)) + (longint'(1) << size);
    end
    req.b_ready = 1'b1;
    forever begin @(posedge clk); if (rsp.b_valid) break; end
    @(negedge clk); req.b_ready = 1'b0;
  endtask

  task automatic axi_read(input longint addr, input int len, input int size, input logic stall, output int cycles);
    longint ba;
    int t0, beats, bad;
    @(negedge clk);
    req.ar = '{id: axi_id_t'(5), addr: axi_addr_t'(addr), len: 8'(len), size: 3'(size), burst: AxiBurstIncr};
    req.ar_valid = 1'b1;
    forever begin @(posedge clk); if (rsp.ar_ready) break; end
    t0 = mdl.cycle;
    @(negedge clk); req.ar_valid = 1'b0;
    ba = addr; beats = 0; bad = 0;
    while (beats <= len) begin
      req.r_ready = stall ? ($urandom % 3 != 0) : 1'b1;
      @(posedge clk);
      if (rsp.r_valid && req.r_ready) begin
        logic [7:0] ln;
        ln = lanes(ba, size);
        for (int b = 0; b < 8; b++)
          if (ln[b] && rsp.r.data[b*8 +: 8] != ref_rd((ba & ~64'd7) + b)) begin
            bad++;
            if (bad < 3) $display("  beat %0d addr %h lane %0d got %h exp %h", beats, ba, b, rsp.r.data[b*8 +: 8], ref_rd((ba & ~64'd7) + b));
          end
        if (rsp.r.last != (beats == len)) bad++;
        if (rsp.r.id != axi_id_t'(5)) bad++;
        beats++;
        ba = (ba & ~((longint'(1) << size) - 1)) + (longint'(1) << size);
      end
      @(negedge clk);
    end
    req.r_ready = 1'b0;
    cycles = mdl.cycle - t0;
    check(bad == 0, $sformatf("read-back addr=%h len=%0d size=%0d: %0d bad", addr, len, size, bad));
  endtask

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc, sw0;
    logic [31:0] v;
    req = '0; rreq = '0;
    repeat (4) @(negedge clk);
    rst_n = 1;
    reg_wr(8, 32'd20);     // short power-up wait
    reg_wr(5, 32'd300);    // refresh every 300 cycles
    reg_wr(6, 32'd2000);   // short ZQ every 2000 cycles
    reg_rd(5, v);
    check(v == 32'd300, "register read-back");
    wait (init_done);
    repeat (10) @(posedge clk);
    check(mdl.n_mrs == 1 && mdl.n_zq == 1, "init sequence: mode write and ZQ");

    // single aligned beat, and a whole word
    axi_write(64'h40, 0, 3, 0);       axi_read(64'h40, 0, 3, 0, cyc);
    axi_write(64'h100, 3, 3, 0);
    repeat (60) @(posedge clk);
    sw0 = mdl.data_subwords;
    axi_read(64'h100, 3, 3, 0, cyc);
    check(mdl.data_subwords - sw0 == 8, "one 32 B word takes 8 DB cycles");
    $display("32 B read: %0d cycles from AR to last beat", cyc);
    // unaligned start, partial strobes everywhere (mask unit + run splitting)
    axi_write(64'h12c, 9, 3, 1);      axi_read(64'h128, 10, 3, 0, cyc);
    // narrow beats
    axi_write(64'h302, 12, 1, 0);     axi_read(64'h300, 7, 2, 0, cyc);
    // crossing a 2 KiB row
    axi_write(64'h7c8, 20, 3, 0);     axi_read(64'h7c0, 31, 3, 1, cyc);
    // a full 2 KiB burst and its bus utilization
    axi_write(64'h1000, 255, 3, 0);
    repeat (600) @(posedge clk);
    sw0 = mdl.data_subwords;
    axi_read(64'h1000, 255, 3, 0, cyc);
    $display("2 KiB read: %0d DB data cycles in %0d cycles", mdl.data_subwords - sw0, cyc);
    check(mdl.data_subwords - sw0 == 512, "2 KiB = 512 DB cycles");
    check((mdl.data_subwords - sw0) * 100 >= cyc * 85, "2 KiB read keeps DB >= 85% busy");
    // random traffic with stalls
    for (int i = 0; i < 40; i++) begin
      longint a; int l, s;
      a = longint'($urandom % 16384);
      s = 3 - int'($urandom % 2);
      l = int'($urandom % 40);
      if ($urandom % 2) axi_write(a, l, s, $urandom % 2);
      else axi_read(a, l, s, 1, cyc);
    end
    for (int i = 0; i < 16384; i += 2048) axi_read(longint'(i), 255, 3, 1, cyc);

    check(mdl.n_ref > 0, $sformatf("refresh happened (%0d)", mdl.n_ref));
    check(mdl.n_zq > 1, $sformatf("periodic ZQ happened (%0d)", mdl.n_zq));
    check(mdl.errors == 0, $sformatf("device model protocol errors: %0d", mdl.errors));
    check(contention == 0, "no bus contention on DB/DQS");
    $display("commands: act=%0d rd=%0d wr=%0d pre=%0d ref=%0d zq=%0d", mdl.n_act, mdl.n_rd, mdl.n_wr, mdl.n_pre, mdl.n_ref, mdl.n_zq);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
