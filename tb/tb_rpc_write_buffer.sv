// tb_rpc_write_buffer: self-checking testbench of the 8 KiB write buffer.
// Random runs of 256-bit words (random start address, length and strobes)
// are pushed; a descriptor must appear only once a run's last word is
// stored, carrying the run's start, length and first/last strobes. A
// consumer pops descriptors and then their words, which must come out in
// order. The buffer must accept exactly 256 words (8 KiB) before it
// signals full.
//
// The release rule and 8 KiB size are published; the descriptor format
// is our own.
module tb_rpc_write_buffer;
  import rpc_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a falling edge, so asynchronous resets act at once
  always #2500 clk = ~clk;
  logic wv, wr, rl, dv, dr, pop, empty;
  word_t w, wd;
  wmask_t st;
  waddr_t wa;
  desc_t dsc;
  int checks = 0, failures = 0;

  rpc_write_buffer dut (.clk_i(clk), .rst_ni(rst_n), .word_valid_i(wv), .word_ready_o(wr), .word_i(w),
    .strb_i(st), .waddr_i(wa), .run_last_i(rl), .desc_o(dsc), .desc_valid_o(dv), .desc_ready_i(dr),
    .pop_i(pop), .wdata_o(wd), .empty_o(empty));

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  desc_t exp_d[$];
  word_t exp_w[$];

  // consumer: take a descriptor, then pop its words
  initial begin
    dr = 0; pop = 0;
    wait (rst_n);
    forever begin
      @(negedge clk);
      if (dv && ($urandom % 2)) begin
        desc_t e;
        e = exp_d.pop_front();
        check(dsc == e, $sformatf("descriptor addr=%h n=%0d", dsc.addr, dsc.nwords));
        dr = 1; @(negedge clk); dr = 0;
        for (int i = 0; i <= int'(e.nwords); i++) begin
          word_t ew;
          ew = exp_w.pop_front();
          check(wd == ew, "word order and content");
          pop = 1; @(negedge clk); pop = 0;
        end
      end
    end
  end

  initial begin
    int cnt;
    wv = 0; rl = 0; w = '0; st = '0; wa = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    // capacity: fill without a consumer, one long run is not possible (consumer runs),
    // so check with all ready flags: count accepted words before full
    for (int r = 0; r < 200; r++) begin
      int n;
      desc_t d;
      n = 1 + int'($urandom % 20);
      d.write = 1; d.addr = waddr_t'($urandom); d.nwords = 8'(n - 1);
      for (int i = 0; i < n; i++) begin
        w = {8{$urandom}}; st = (i == 0 || i == n - 1) ? wmask_t'($urandom) : '1;
        if (i == 0) d.first_strb = st;
        if (i == n - 1) d.last_strb = st;
        wa = d.addr + waddr_t'(i); rl = (i == n - 1); wv = 1;
        do @(posedge clk); while (!wr);
        exp_w.push_back(w);
        if (i == n - 1) exp_d.push_back(d);
        @(negedge clk); wv = 0;
        if (i == 0 && n > 1) begin
          #1 check(exp_d.size() == 0 || !dv || dsc != d, "no descriptor before the run's last word");
        end
      end
    end
    wait (exp_d.size() == 0 && empty);
    @(negedge clk);
    // capacity: stop the consumer by holding it out of reach (it only pops after a descriptor)
    cnt = 0;
    wv = 1; rl = 0; st = '1;
    while (cnt < 300) begin
      wa = waddr_t'(cnt);
      #1 if (!wr) break;
      @(negedge clk);
      cnt++;
    end
    wv = 0;
    check(cnt == 256, $sformatf("write buffer holds %0d words (8 KiB = 256)", cnt));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
