// tb_rpc_axi_frontend: self-checking testbench of the RPC AXI frontend
// (serializer, data-width converter, write and read buffers, splitter, mask
// unit) with a behavioural NSRRP responder in place of the controller.
//
// AXI bursts (aligned, unaligned, partial strobes, narrow beats, 2 KiB
// crossing, full 2 KiB, random with R stalls) are written and read back and
// compared byte by byte with a reference. Checks also: NSRRP requests never
// cross a 2 KiB row, a row-crossing burst becomes two requests, an aligned
// 2 KiB burst is one request, and masked writes occur.
//
// The 2 KiB split and the first/last masks are published behaviour; the
// NSRRP handshake the responder implements is this design's own.
module tb_rpc_axi_frontend;
  import cheshire_pkg::*;
  import rpc_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a falling edge, so asynchronous resets act at once
  always #2500 clk = ~clk;

  axi_req_t req;
  axi_rsp_t rsp;
  int checks = 0, failures = 0;
  logic [7:0] ref_mem [int];

  rpc_axi_frontend dut (
    .clk_i(clk), .rst_ni(rst_n), .axi_req_i(req), .axi_rsp_o(rsp),
    .nsrrp_req_o(nreq), .nsrrp_valid_o(nvalid), .nsrrp_ready_i(nready),
    .nsrrp_wpop_i(wpop), .nsrrp_wdata_o(wdata), .nsrrp_rvalid_i(rvalid), .nsrrp_rdata_i(rdata), .idle_o(idle));

  // NSRRP responder: word memory, writes popped one word every 8 cycles as
  // the controller does, reads returned one word every 8 cycles after a
  // fixed latency; requests must stay inside one 2 KiB row.
  nsrrp_req_t nreq;
  logic nvalid, nready, wpop, rvalid, idle;
  word_t wdata, rdata;
  word_t wmem [int];
  int n_req = 0, n_split = 0, n_masked = 0, row_cross = 0;
  struct { int cycle; } mdl;
  initial mdl.cycle = 0;
  always @(posedge clk) mdl.cycle++;
  initial begin
    nready = 0; wpop = 0; rvalid = 0; rdata = '0;
    forever begin
      @(negedge clk);
      nready = ($urandom % 2);
      #1;
      if (nvalid && nready) begin
        nsrrp_req_t r;
        r = nreq;
        n_req++;
        if (int'(r.addr[5:0]) + int'(r.len) + 1 > 64) row_cross++;
        if (r.write && (r.first_mask != '0 || r.last_mask != '0)) n_masked++;
        @(negedge clk); nready = 0;
        repeat (6) @(negedge clk);
        for (int i = 0; i <= int'(r.len); i++) begin
          if (r.write) begin
            word_t o;
            wmask_t m;
            m = (i == 0) ? r.first_mask : '0;
            if (i == int'(r.len)) m = m | r.last_mask;
            o = wmem.exists(int'(r.addr) + i) ? wmem[int'(r.addr) + i] : '0;
            for (int b = 0; b < 32; b++) if (!m[b]) o[b*8 +: 8] = wdata[b*8 +: 8];
            wmem[int'(r.addr) + i] = o;
            wpop = 1; @(negedge clk); wpop = 0;
          end else begin
            rdata = wmem.exists(int'(r.addr) + i) ? wmem[int'(r.addr) + i] : '0;
            rvalid = 1; @(negedge clk); rvalid = 0;
          end
          repeat (7) @(negedge clk);
        end
      end
    end
  end


  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
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
    int cyc, r0;
    req = '0;
    repeat (4) @(negedge clk);
    rst_n = 1;
    axi_write(64'h40, 0, 3, 0);       axi_read(64'h40, 0, 3, 0, cyc);
    axi_write(64'h100, 3, 3, 0);      axi_read(64'h100, 3, 3, 0, cyc);
    // partial strobes inside a burst split it into runs
    r0 = n_req;
    axi_write(64'h12c, 9, 3, 1);
    check(n_req - r0 >= 1, "partial write issued");
    axi_read(64'h128, 10, 3, 0, cyc);
    axi_write(64'h302, 12, 1, 0);     axi_read(64'h300, 7, 2, 0, cyc);
    // crossing a 2 KiB row: the splitter makes two requests
    r0 = n_req;
    axi_write(64'h7c8, 20, 3, 0);
    axi_read(64'h7c0, 31, 3, 1, cyc);
    check(n_req - r0 == 4, $sformatf("row-crossing write and read give 2 requests each (%0d)", n_req - r0));
    // a 2 KiB burst is one request; an 8 KiB read fills the read buffer
    r0 = n_req;
    axi_write(64'h1000, 255, 3, 0);
    axi_read(64'h1000, 255, 3, 0, cyc);
    check(n_req - r0 == 2, "aligned 2 KiB burst = one request per direction");
    for (int i = 0; i < 60; i++) begin
      longint a; int l, s;
      a = longint'($urandom % 16384);
      s = 3 - int'($urandom % 2);
      l = int'($urandom % 64);
      if ($urandom % 2) axi_write(a, l, s, $urandom % 2);
      else axi_read(a, l, s, 1, cyc);
    end
    wait (idle);
    check(row_cross == 0, "no NSRRP request crosses a 2 KiB row");
    check(n_masked > 0, $sformatf("masked write requests: %0d", n_masked));
    $display("requests=%0d masked=%0d", n_req, n_masked);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
