// tb_cheshire_top: end-to-end testbench of the memory subsystem (LLC/SPM in
// front of the RPC DRAM interface) with the top at its default parameters,
// connected to the behavioural RPC DRAM device model.
//
// Traffic enters through the crossbar-side AXI port. The testbench keeps a
// byte-level reference of DRAM and of the SPM windows and compares every
// read beat. It walks through: cache misses, hits and dirty evictions; a
// runtime switch of four ways to SPM (with write-back of their dirty lines),
// SPM traffic, an access to a way that is not SPM (error response); all
// ways SPM so DRAM is reached uncached with partial byte strobes (RPC mask
// unit); back to all-cache; accesses outside every window (error). Refresh
// and periodic ZQ run under the traffic (ZQ interval shortened by register).
// Each mechanism is counted and the test fails if one of them never occurs.
//
// The structure (LLC/SPM in front of the RPC DRAM interface) and the
// default sizes are the published ones; the traffic mix is our own.
module tb_cheshire_top;
  import cheshire_pkg::*;
  import rpc_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a falling edge, so asynchronous resets act at once
  always #2500 clk = ~clk;

  axi_req_t req;
  axi_rsp_t rsp;
  reg_req_t rreq, lreq;
  reg_rsp_t rrsp, lrsp;
  logic init_done;
  logic rclk, rclk_n, cs_n, stb, db_oe, dqs, dqs_n, dqs_oe;
  logic [15:0] db_o, db_bus, m_db;
  logic m_db_oe, m_dqs, m_dqs_oe;

  int checks = 0, failures = 0;
  logic [7:0] ref_mem [int];
  int cyc_cnt = 0;
  always @(posedge clk) cyc_cnt++;

  localparam longint Dram = 64'h8000_0000;
  localparam longint Spm  = 64'h1000_0000;

  cheshire_top dut (
    .clk_i(clk), .rst_ni(rst_n), .axi_req_i(req), .axi_rsp_o(rsp),
    .llc_reg_req_i(lreq), .llc_reg_rsp_o(lrsp),
    .rpc_reg_req_i(rreq), .rpc_reg_rsp_o(rrsp), .rpc_init_done_o(init_done),
    .rpc_clk_o(rclk), .rpc_clk_n_o(rclk_n), .rpc_cs_n_o(cs_n), .rpc_stb_o(stb),
    .rpc_db_o(db_o), .rpc_db_oe_o(db_oe), .rpc_db_i(db_bus),
    .rpc_dqs_o(dqs), .rpc_dqs_n_o(dqs_n), .rpc_dqs_oe_o(dqs_oe), .rpc_dqs_i(m_dqs_oe ? m_dqs : 1'b0)
  );

  assign db_bus = db_oe ? db_o : (m_db_oe ? m_db : 16'h0);

  rpc_dram_model #(.Quarter(1250), .Rl(6), .TRcd(3), .Debug(0)) mdl (
    .clk(rclk), .cs_n(cs_n), .db(db_bus), .dqs(dqs && dqs_oe),
    .db_drv(m_db), .db_oe(m_db_oe), .dqs_drv(m_dqs), .dqs_oe(m_dqs_oe)
  );

  // mechanism counters, observed at the LLC's DRAM-side port
  int n_refill = 0, n_wb = 0, n_byp = 0, n_hit = 0, n_rstall = 0, n_flush = 0, n_err = 0, n_partial = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.dram_req.ar_valid && dut.dram_rsp.ar_ready && dut.dram_req.ar.len == 8'd3) n_refill++;
    if (dut.dram_req.aw_valid && dut.dram_rsp.aw_ready && dut.dram_req.aw.len == 8'd3) n_wb++;
    if ((dut.dram_req.ar_valid && dut.dram_rsp.ar_ready && dut.dram_req.ar.len == 8'd0) ||
        (dut.dram_req.aw_valid && dut.dram_rsp.aw_ready && dut.dram_req.aw.len == 8'd0)) n_byp++;
    if (dut.dram_req.w_valid && dut.dram_rsp.w_ready && dut.dram_req.w.strb != 8'hff) n_partial++;
    if ((rsp.r_valid && req.r_ready && rsp.r.resp == AxiRespSlvErr) || (rsp.b_valid && req.b_ready && rsp.b.resp == AxiRespSlvErr)) n_err++;
  end

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

  task automatic llc_wr(input int idx, input logic [31:0] v);
    @(negedge clk); lreq = '{addr: 32'(idx*4), write: 1'b1, wdata: v, valid: 1'b1};
    @(negedge clk); lreq.valid = 1'b0;
  endtask

  task automatic llc_rd(input int idx, output logic [31:0] v);
    @(negedge clk); lreq = '{addr: 32'(idx*4), write: 1'b0, wdata: '0, valid: 1'b1};
    #1 v = lrsp.rdata;
    @(negedge clk); lreq.valid = 1'b0;
  endtask

  task automatic reg_rd(input int idx, output logic [31:0] v);
    @(negedge clk); rreq = '{addr: 32'(idx*4), write: 1'b0, wdata: '0, valid: 1'b1};
    #1 v = rrsp.rdata;
    @(negedge clk); rreq.valid = 1'b0;
  endtask

  function automatic logic [7:0] ref_rd(longint a);
    return ref_mem.exists(int'(key(a))) ? ref_mem[int'(key(a))] : 8'h00;
  endfunction

  // byte lanes a beat may use
  function automatic logic [7:0] lanes(longint baddr, int size);
    longint al; logic [7:0] m;
    al = baddr & ~((longint'(1) << size) - 1);
    m = '0;
    for (longint b = baddr; b < al + (longint'(1) << size); b++) m[b % 8] = 1'b1;
    return m;
  endfunction

  task automatic axi_write(input longint addr, input int len, input int size, input logic partial, input logic err = 0);
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
      if (!err) for (int b = 0; b < 8; b++) if (st[b]) ref_mem[int'(key((ba & ~64'd7) + b))] = d[b*8 +: 8];
      @(negedge clk); req.w_valid = 1'b0;
      ba = (ba & ~((longint'(1) << size) - 1)) + (longint'(1) << size);
    end
    req.b_ready = 1'b1;
    forever begin @(posedge clk); if (rsp.b_valid) break; end
    check(rsp.b.resp == (err ? AxiRespSlvErr : AxiRespOkay), $sformatf("write response addr=%h", addr));
    @(negedge clk); req.b_ready = 1'b0;
  endtask

  task automatic axi_read(input longint addr, input int len, input int size, input logic stall, output int cycles, input logic err = 0);
    longint ba;
    int t0, beats, bad;
    @(negedge clk);
    req.ar = '{id: axi_id_t'(5), addr: axi_addr_t'(addr), len: 8'(len), size: 3'(size), burst: AxiBurstIncr};
    req.ar_valid = 1'b1;
    forever begin @(posedge clk); if (rsp.ar_ready) break; end
    t0 = cyc_cnt;
    @(negedge clk); req.ar_valid = 1'b0;
    ba = addr; beats = 0; bad = 0;
    while (beats <= len) begin
      req.r_ready = stall ? ($urandom % 3 != 0) : 1'b1;
      if (stall && !req.r_ready) n_rstall++;
      @(posedge clk);
      if (rsp.r_valid && req.r_ready) begin
        logic [7:0] ln;
        ln = lanes(ba, size);
        if (rsp.r.resp != (err ? AxiRespSlvErr : AxiRespOkay)) bad++;
        if (!err) for (int b = 0; b < 8; b++)
          if (ln[b] && rsp.r.data[b*8 +: 8] != ref_rd((ba & ~64'd7) + b)) begin
            bad++;
            if (bad < 3) $display("  beat %0d addr %h lane %0d got %h exp %h", beats, ba, b, rsp.r.data[b*8 +: 8], ref_rd((ba & ~64'd7) + b));
          end
        if (rsp.r.last != (beats == len)) bad++;
        if (rsp.r.id != axi_id_t'(5)) bad++;
        if (!req.r_ready) ;
        beats++;
        ba = (ba & ~((longint'(1) << size) - 1)) + (longint'(1) << size);
      end
      @(negedge clk);
    end
    req.r_ready = 1'b0;
    cycles = cyc_cnt - t0;
    check(bad == 0, $sformatf("read-back addr=%h len=%0d size=%0d: %0d bad", addr, len, size, bad));
  endtask

  initial begin : watchdog
    repeat (600000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // a ref_mem key: DRAM bytes by offset, SPM bytes offset by 64 MiB
  function automatic longint key(longint a);
    return (a >= Dram) ? a - Dram : a - Spm + 64'h400_0000;
  endfunction

  task automatic rnd_traffic(input longint base, input int span, input int n);
    int cyc;
    for (int i = 0; i < n; i++) begin
      longint a; int l, s;
      a = base + longint'($urandom % span);
      s = 3 - int'($urandom % 2);
      l = int'($urandom % 12);
      if ($urandom % 2) axi_write(a, l, s, $urandom % 2);
      else axi_read(a, l, s, 1, cyc);
    end
  endtask

  // fill SPM ways [w0, w1] with known data (their old cache contents are undefined)
  task automatic fill_spm(input int w0, input int w1);
    for (longint a = Spm + longint'(w0) * 16384; a < Spm + longint'(w1 + 1) * 16384; a += 2048)
      axi_write(a, 255, 3, 0);
  endtask

  task automatic set_spm(input logic [7:0] m);
    logic [31:0] v;
    int waited;
    llc_wr(0, 32'(m));
    waited = 0;
    do begin llc_rd(1, v); waited++; end while (v[0]);
    if (waited > 2) n_flush++;
    check(waited < 20000, "SPM switch completes");
  endtask

  initial begin
    int cyc, h0;
    logic [31:0] v;
    req = '0; rreq = '0; lreq = '0;
    repeat (4) @(negedge clk);
    rst_n = 1;
    reg_wr(6, 32'd4000);   // periodic ZQ every 4000 cycles (default is 128 ms)
    wait (init_done);
    repeat (10) @(posedge clk);
    check(mdl.n_mrs == 1 && mdl.n_zq == 1, "DRAM init sequence done");
    check(cyc_cnt >= 40000, "default 200 us power-up wait honoured");

    // cache: miss then hit
    axi_write(Dram + 64'h40, 3, 3, 0);
    h0 = n_refill;
    axi_read(Dram + 64'h40, 3, 3, 0, cyc);
    check(n_refill == h0, "second access to a line hits");
    if (n_refill == h0) n_hit++;
    // aliasing lines force dirty evictions (ways are 16 KiB apart)
    for (int w = 0; w < 12; w++) axi_write(Dram + longint'(w) * 16384 + 64'h80, 3, 3, 1);
    for (int w = 0; w < 12; w++) axi_read(Dram + longint'(w) * 16384 + 64'h80, 3, 3, 1, cyc);
    check(n_wb > 0, "dirty lines were written back");
    rnd_traffic(Dram, 262144, 60);

    // four ways become scratchpad; their dirty lines must reach DRAM first
    set_spm(8'h0f);
    llc_rd(0, v);
    check(v[7:0] == 8'h0f, "SPM enable register read-back");
    fill_spm(0, 3);
    for (int i = 0; i < 4; i++) axi_write(Spm + longint'(i) * 16384 + 64'h100, 15, 3, 1);
    for (int i = 0; i < 4; i++) axi_read(Spm + longint'(i) * 16384 + 64'h100, 15, 3, 1, cyc);
    h0 = cyc_cnt;
    axi_read(Spm + 64'h100, 15, 3, 0, cyc);
    check(cyc <= 20, $sformatf("SPM: 16 beats in %0d cycles (1 per beat)", cyc));
    axi_read(Spm + 5 * 16384, 1, 3, 0, cyc, 1);        // way 5 is still cache
    axi_write(Spm + 6 * 16384, 0, 3, 0, 1);
    rnd_traffic(Dram, 262144, 40);                     // cache now has 4 ways
    rnd_traffic(Spm, 65536, 30);

    // all ways SPM: DRAM is reached uncached, beat by beat, with byte strobes
    set_spm(8'hff);
    fill_spm(4, 7);
    axi_write(Dram + 64'h2004, 6, 3, 1);
    axi_read(Dram + 64'h2000, 7, 3, 1, cyc);
    rnd_traffic(Dram, 65536, 10);
    // the whole SPM (128 KiB window)
    rnd_traffic(Spm, 131072, 20);

    // back to all-cache
    set_spm(8'h00);
    rnd_traffic(Dram, 1048576, 40);
    for (int i = 0; i < 8; i++) axi_read(Dram + longint'(i) * 4096, 127, 3, 1, cyc);
    // outside every window
    axi_read(64'h4000_0000, 2, 3, 0, cyc, 1);
    axi_write(Dram + 64'h200_0000, 0, 3, 0, 1);

    // every mechanism must have happened
    check(n_refill > 0, $sformatf("cache refills: %0d", n_refill));
    check(n_hit > 0, "cache hit");
    check(n_wb > 0, $sformatf("dirty write-backs: %0d", n_wb));
    check(n_flush > 0, $sformatf("way flushes on SPM switch: %0d", n_flush));
    check(n_byp > 0, $sformatf("uncached beats: %0d", n_byp));
    check(n_partial > 0, $sformatf("partial-strobe beats to DRAM (masked writes): %0d", n_partial));
    check(n_err >= 4, $sformatf("error responses: %0d", n_err));
    check(n_rstall > 0, $sformatf("R-channel stalls: %0d", n_rstall));
    check(mdl.n_ref > 0, $sformatf("refreshes: %0d", mdl.n_ref));
    check(mdl.n_zq > 1, $sformatf("periodic ZQ: %0d", mdl.n_zq));
    check(mdl.errors == 0, $sformatf("device model protocol errors: %0d", mdl.errors));
    check(contention == 0, "no bus contention on DB/DQS");
    $display("refill=%0d wb=%0d byp=%0d partial=%0d err=%0d ref=%0d zq=%0d cycles=%0d",
             n_refill, n_wb, n_byp, n_partial, n_err, mdl.n_ref, mdl.n_zq, cyc_cnt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
