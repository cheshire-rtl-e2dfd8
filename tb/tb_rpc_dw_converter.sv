// tb_rpc_dw_converter: self-checking testbench of the 64/256-bit data-width
// converter.
// Write side: random AXI bursts (random start, length, 8- or 4-byte beats,
// random strobes, W gaps, consumer stalls) go in; the emitted 256-bit words
// are applied with their strobes to a byte memory that must equal the
// reference built from the W beats. Runs must be contiguous, and only the
// first and last word of a run may have partial strobes. Read side: AR
// bursts are queued, the words they span are supplied in order, and every
// R beat must carry the right bytes, ID and LAST; each word must be
// released exactly once.
//
// The 64-to-256-bit conversion is published; the run rule it checks is
// our own.
module tb_rpc_dw_converter;
  import rpc_pkg::*;
  import cheshire_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a falling edge, so asynchronous resets act at once
  always #2500 clk = ~clk;
  logic sw, wv, wr, wdone, ov, orr, olast, sr, qfull, rwv, rwr, rv, rr;
  axi_ax_t aw, ar;
  axi_w_t w;
  word_t ow, rw;
  wmask_t ost;
  waddr_t oa;
  axi_r_t r;
  int checks = 0, failures = 0;

  rpc_dw_converter dut (.clk_i(clk), .rst_ni(rst_n), .start_w_i(sw), .aw_i(aw), .w_i(w), .w_valid_i(wv), .w_ready_o(wr),
    .w_done_o(wdone), .word_o(ow), .word_strb_o(ost), .word_addr_o(oa), .word_last_o(olast), .word_valid_o(ov),
    .word_ready_i(orr), .start_r_i(sr), .ar_i(ar), .r_queue_full_o(qfull), .rword_i(rw), .rword_valid_i(rwv),
    .rword_ready_o(rwr), .r_o(r), .r_valid_o(rv), .r_ready_i(rr));

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [7:0] refm [int];
  logic [7:0] outm [int];
  int run_bad = 0, in_run = 0, n_words = 0;
  waddr_t run_next;
  logic prev_partial_inner = 0;
  wmask_t pend_strb;

  // word consumer
  always @(negedge clk) begin
    orr = ($urandom % 4 != 0);
    #1;
    if (rst_n && ov && orr) begin
      n_words++;
      for (int b = 0; b < 32; b++) if (ost[b]) outm[int'(oa) * 32 + b] = ow[b*8 +: 8];
      if (in_run) begin
        if (oa != run_next) run_bad++;
        if (prev_partial_inner) run_bad++;       // an inner word was partial
      end
      prev_partial_inner = in_run && !olast ? (ost != '1) : 1'b0;
      if (!in_run && !olast) prev_partial_inner = 0;
      in_run = !olast;
      run_next = oa + 1'b1;
    end
  end

  function automatic longint nb(longint a, int s);
    return (a & ~((longint'(1) << s) - 1)) + (longint'(1) << s);
  endfunction

  task automatic wburst(input longint a, input int len, input int s);
    @(negedge clk);
    aw = '{id: '0, addr: axi_addr_t'(a), len: 8'(len), size: 3'(s), burst: AxiBurstIncr};
    sw = 1; @(negedge clk); sw = 0;
    for (int i = 0; i <= len; i++) begin
      logic [7:0] st, ln;
      longint al;
      while ($urandom % 4 == 0) @(negedge clk);
      ln = '0;
      al = a & ~((longint'(1) << s) - 1);
      for (longint b = a; b < al + (longint'(1) << s); b++) ln[b % 8] = 1'b1;
      st = ($urandom % 3 == 0) ? (ln & 8'($urandom)) : ln;
      w = '{data: {$urandom, $urandom}, strb: st, last: i == len}; wv = 1;
      #1;
      while (!wr) begin @(negedge clk); #1; end
      for (int b = 0; b < 8; b++) if (st[b]) refm[int'((a & ~64'd7) + b)] = w.data[b*8 +: 8];
      @(negedge clk); wv = 0;
      a = nb(a, s);
    end
  endtask

  // read side: word supplier and beat checker
  axi_ax_t arq[$];
  word_t wq[$];
  int rbad = 0, nbeats = 0, released = 0, expected_words = 0;
  assign rwv = wq.size() > 0;
  assign rw  = wq.size() > 0 ? wq[0] : '0;
  always @(posedge clk) if (rwv && rwr) begin void'(wq.pop_front()); released++; end

  initial begin
    longint sa, ra;
    int bi, s;
    forever begin
      @(negedge clk);
      if (arq.size() > 0) begin
        axi_ax_t x;
        x = arq[0];
        s = int'(x.size);
        ra = longint'(x.addr);
        for (bi = 0; bi <= int'(x.len); ) begin
          rr = ($urandom % 3 != 0);
          #1;
          if (rv && rr) begin
            for (int b = 0; b < 8; b++) begin
              longint ba;
              ba = (ra & ~64'd7) + b;
              if (ba >= (ra & ~((longint'(1) << s) - 1)) && ba < (ra & ~((longint'(1) << s) - 1)) + (longint'(1) << s) &&
                  ba >= ra && r.data[b*8 +: 8] != 8'(ba * 7 + 3)) rbad++;
            end
            if (r.last != (bi == int'(x.len)) || r.id != x.id) rbad++;
            nbeats++; bi++;
            ra = nb(ra, s);
          end
          @(negedge clk);
        end
        rr = 0;
        void'(arq.pop_front());
      end
    end
  end

  task automatic rburst(input longint a, input int len, input int s);
    axi_ax_t x;
    longint last;
    x = '{id: axi_id_t'($urandom), addr: axi_addr_t'(a), len: 8'(len), size: 3'(s), burst: AxiBurstIncr};
    @(negedge clk);
    while (qfull) @(negedge clk);
    ar = x; sr = 1;
    arq.push_back(x);
    // words the burst spans, filled with a byte pattern
    last = (a & ~((longint'(1) << s) - 1)) + longint'(len + 1) * (longint'(1) << s) - 1;
    for (longint wa = a >> 5; wa <= last >> 5; wa++) begin
      word_t d;
      for (int b = 0; b < 32; b++) d[b*8 +: 8] = 8'((wa * 32 + b) * 7 + 3);
      wq.push_back(d);
      expected_words++;
    end
    @(negedge clk); sr = 0;
  endtask

  initial begin
    sw = 0; wv = 0; w = '0; aw = '0; sr = 0; ar = '0; rr = 0; orr = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 150; i++) begin
      int s;
      s = 3 - int'($urandom % 2);
      wburst(longint'($urandom % 8192), int'($urandom % 24), s);
    end
    repeat (20) @(negedge clk);
    begin
      int bad;
      bad = 0;
      foreach (refm[k]) if (!outm.exists(k) || outm[k] != refm[k]) bad++;
      check(bad == 0, $sformatf("written bytes reach the words: %0d bad of %0d", bad, refm.size()));
    end
    check(run_bad == 0, "runs contiguous, only end words partial");
    check(!ov && !in_run, "all words emitted, run closed");
    for (int i = 0; i < 150; i++) rburst(longint'($urandom % 8192), int'($urandom % 24), 3 - int'($urandom % 2));
    wait (arq.size() == 0);
    repeat (10) @(negedge clk);
    check(rbad == 0 && nbeats > 1000, $sformatf("R beats: %0d, %0d bad", nbeats, rbad));
    check(released == expected_words && wq.size() == 0, $sformatf("words released %0d of %0d", released, expected_words));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
