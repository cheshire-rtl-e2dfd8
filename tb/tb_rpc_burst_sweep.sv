// tb_rpc_burst_sweep: workload testbench of the RPC DRAM interface - the
// bus-utilization sweep over transfer sizes.
//
// For each transfer size from 8 B to 8 KiB (powers of two) it writes 16
// transfers back to back, then reads them back, the way a DMA engine would:
// transfers above 2 KiB are issued as several 2 KiB AXI bursts (256 beats of
// 64 bit), and address, data and response channels run as independent
// processes so requests can queue up. Utilization is the useful bytes moved
// divided by the 4 bytes per cycle the 16-bit DDR bus can carry, measured
// from the first request to the last data on DB (writes) or to the last R
// beat (reads). Refresh runs at its default interval during the sweep.
//
// Checks: every read beat returns the data written; utilization grows with
// the transfer size; transfers of 2 KiB and more keep the bus at least 85 %
// (reads) and 75 % (writes) busy; an 8 B transfer stays below 30 % because
// of the fixed command and preamble overhead. The thresholds are our own
// reading of the reported plateau "close to peak utilization" for bursts of
// 2 KiB or larger; the exact curve depends on device timings we chose.
module tb_rpc_burst_sweep;
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

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic reg_wr(input int idx, input logic [31:0] v);
    @(negedge clk); rreq = '{addr: 32'(idx*4), write: 1'b1, wdata: v, valid: 1'b1};
    @(negedge clk); rreq.valid = 1'b0;
  endtask

  function automatic logic [63:0] pattern(longint a);
    return {32'(a) ^ 32'h5a5a_0000, ~32'(a)};
  endfunction

  localparam int N = 16;

  // one burst list: address and beat count of every AXI burst of the sweep step
  task automatic bursts(input int size, input longint base, ref longint ba[$], ref int bl[$]);
    ba.delete(); bl.delete();
    for (int t = 0; t < N; t++)
      for (int o = 0; o < size; o += 2048) begin
        ba.push_back(base + longint'(t) * size + longint'(o));
        bl.push_back(((size < 2048) ? size : 2048) / 8);
      end
  endtask

  task automatic sweep_write(input int size, input longint base, output real util);
    longint ba[$]; int bl[$];
    int t0, sw0, words;
    bursts(size, base, ba, bl);
    words = 0;
    foreach (bl[i]) words += (bl[i] * 8 + 31) / 32;
    sw0 = mdl.data_subwords;
    @(negedge clk);
    t0 = mdl.cycle;
    fork
      begin : aw_proc
        foreach (ba[i]) begin
          req.aw = '{id: axi_id_t'(1), addr: axi_addr_t'(ba[i]), len: 8'(bl[i] - 1), size: 3'd3, burst: AxiBurstIncr};
          req.aw_valid = 1'b1;
          do @(posedge clk); while (!rsp.aw_ready);
          #1 req.aw_valid = 1'b0;
        end
      end
      begin : w_proc
        foreach (ba[i])
          for (int k = 0; k < bl[i]; k++) begin
            req.w = '{data: pattern(ba[i] + 8 * k), strb: 8'hff, last: (k == bl[i] - 1)};
            req.w_valid = 1'b1;
            do @(posedge clk); while (!rsp.w_ready);
            #1 req.w_valid = 1'b0;
          end
      end
      begin : b_proc
        req.b_ready = 1'b1;
        foreach (ba[i]) do @(posedge clk); while (!rsp.b_valid);
        #1 req.b_ready = 1'b0;
      end
    join
    wait (mdl.data_subwords - sw0 == 8 * words);
    util = real'(size * N) / (4.0 * real'(mdl.cycle - t0));
  endtask

  task automatic sweep_read(input int size, input longint base, output real util);
    longint ba[$]; int bl[$];
    int t0, bad;
    bursts(size, base, ba, bl);
    bad = 0;
    @(negedge clk);
    t0 = mdl.cycle;
    fork
      begin : ar_proc
        foreach (ba[i]) begin
          req.ar = '{id: axi_id_t'(2), addr: axi_addr_t'(ba[i]), len: 8'(bl[i] - 1), size: 3'd3, burst: AxiBurstIncr};
          req.ar_valid = 1'b1;
          do @(posedge clk); while (!rsp.ar_ready);
          #1 req.ar_valid = 1'b0;
        end
      end
      begin : r_proc
        req.r_ready = 1'b1;
        foreach (ba[i])
          for (int k = 0; k < bl[i]; k++) begin
            do @(posedge clk); while (!rsp.r_valid);
            if (rsp.r.data != pattern(ba[i] + 8 * k) || rsp.r.last != (k == bl[i] - 1)) begin
              bad++;
              if (bad < 3) $display("  size %0d addr %h got %h", size, ba[i] + 8 * k, rsp.r.data);
            end
          end
        #1 req.r_ready = 1'b0;
      end
    join
    util = real'(size * N) / (4.0 * real'(mdl.cycle - t0));
    check(bad == 0, $sformatf("read-back of %0d B transfers: %0d bad beats", size, bad));
  endtask

  initial begin : watchdog
    repeat (600000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real uw [int], ur [int];
    real sumw, sumr;
    longint base;
    req = '0; rreq = '0;
    repeat (4) @(negedge clk);
    rst_n = 1;
    reg_wr(8, 32'd20);   // short power-up wait, other timings at reset values
    wait (init_done);
    repeat (10) @(posedge clk);
    base = 0;
    sumw = 0; sumr = 0;
    for (int size = 8; size <= 8192; size *= 2) begin
      sweep_write(size, base, uw[size]);
      sweep_read(size, base, ur[size]);
      $display("size %5d B: write utilization %0.3f  read utilization %0.3f", size, uw[size], ur[size]);
      sumw += uw[size]; sumr += ur[size];
      base += longint'(size) * N;
    end
    $display("mean read/write utilization ratio %0.2f", sumr / sumw);
    for (int size = 16; size <= 8192; size *= 2) begin
      check(ur[size] >= ur[size / 2] - 0.02, $sformatf("read utilization does not drop at %0d B", size));
      check(uw[size] >= uw[size / 2] - 0.02, $sformatf("write utilization does not drop at %0d B", size));
    end
    for (int size = 2048; size <= 8192; size *= 2) begin
      check(ur[size] >= 0.85, $sformatf("read utilization at %0d B >= 0.85 (%0.3f)", size, ur[size]));
      check(uw[size] >= 0.75, $sformatf("write utilization at %0d B >= 0.75 (%0.3f)", size, uw[size]));
    end
    check(ur[8] < 0.30 && uw[8] < 0.30, "8 B transfers are overhead-dominated");
    check(mdl.n_ref > 0, $sformatf("refresh during the sweep (%0d)", mdl.n_ref));
    check(mdl.errors == 0, $sformatf("device model protocol errors: %0d", mdl.errors));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
