// tb_rpc_read_buffer: self-checking testbench of the 8 KiB read buffer.
// Space is reserved before words arrive (the NSRRP read side cannot be
// stalled); words are pushed at random times up to the reservation and
// drained by a randomly stalling consumer. Checks: data order, the free
// count (256 words minus stored minus reserved) and that a full 256-word
// reservation can be held and filled without loss.
//
// The 8 KiB size is published; the reservation scheme is our own.
module tb_rpc_read_buffer;
  import rpc_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a falling edge, so asynchronous resets act at once
  always #2500 clk = ~clk;
  logic res, push, vo, ri;
  logic [7:0] rw;
  logic [8:0] free;
  word_t rd, wo;
  int checks = 0, failures = 0;

  rpc_read_buffer dut (.clk_i(clk), .rst_ni(rst_n), .reserve_i(res), .reserve_words_i(rw), .free_o(free),
    .push_i(push), .rdata_i(rd), .word_o(wo), .valid_o(vo), .ready_i(ri));

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  word_t q[$];
  int pending = 0, stored = 0;
  logic drain = 1;

  always @(negedge clk) if (rst_n) ri <= drain && ($urandom % 3 != 0);
  always @(posedge clk) if (rst_n && vo && ri) begin
    word_t e;
    e = q.pop_front();
    if (wo != e) begin failures++; $display("FAIL: read data order"); end
    checks++;
    stored--;
  end

  initial begin
    res = 0; push = 0; rw = 0; rd = '0; ri = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk);
    check(free == 9'd256, "empty buffer has 256 words free");
    for (int t = 0; t < 100; t++) begin
      int n;
      n = 1 + int'($urandom % 8);
      if (int'(free) >= n) begin
        res = 1; rw = 8'(n); @(negedge clk); res = 0; pending += n;
      end
      for (int k = 0; k < n && pending > 0; k++) begin
        if ($urandom % 2) begin
          rd = {8{$urandom}}; push = 1; q.push_back(rd); pending--; stored++;
          @(negedge clk); push = 0;
        end else @(negedge clk);
      end
    end
    while (pending > 0) begin
      rd = {8{$urandom}}; push = 1; q.push_back(rd); pending--; stored++;
      @(negedge clk); push = 0;
    end
    wait (q.size() == 0);
    // full 256-word reservation filled while the consumer is stopped
    drain = 0;
    @(negedge clk); @(negedge clk);
    res = 1; rw = 8'd255; @(negedge clk); rw = 8'd1; @(negedge clk); res = 0;
    #1 check(free == 9'd0, "whole buffer reserved");
    for (int k = 0; k < 256; k++) begin
      rd = {8{$urandom}}; push = 1; q.push_back(rd);
      @(negedge clk);
    end
    push = 0;
    #1 check(free == 9'd0 && vo, "256 stored words");
    drain = 1;
    wait (q.size() == 0);
    @(negedge clk); #1;
    check(free == 9'd256, "buffer empty again");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
