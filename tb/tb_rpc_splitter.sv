// tb_rpc_splitter: self-checking testbench of the 2 KiB splitter.
// Random descriptors (some crossing one or more 2 KiB rows) are fed with a
// randomly stalling consumer. Every piece must stay inside one row, pieces
// must be contiguous and cover exactly the request, the first piece keeps
// the first-word strobes, the last piece keeps the last-word strobes and all
// inner boundaries carry full strobes. A request that fits a row passes in
// one cycle.
//
// The 2 KiB boundary is published; the one-piece-per-cycle rate is ours.
module tb_rpc_splitter;
  import rpc_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a falling edge, so asynchronous resets act at once
  always #2500 clk = ~clk;
  desc_t d, p;
  logic vi, ro, vo, ri;
  int checks = 0, failures = 0;

  rpc_splitter dut (.clk_i(clk), .rst_ni(rst_n), .desc_i(d), .valid_i(vi), .ready_o(ro),
                    .piece_o(p), .valid_o(vo), .ready_i(ri));

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    vi = 0; ri = 0; d = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      int nxt, total, npieces, t0;
      desc_t req;
      req = '{write: 1'($urandom), addr: waddr_t'($urandom), nwords: 8'($urandom % 200),
              first_strb: {$urandom}, last_strb: {$urandom}};
      if (i % 4 == 0) req.addr[5:0] = 6'd0;
      d = req; vi = 1;
      nxt = int'(req.addr); total = 0; npieces = 0; t0 = 0;
      while (total < int'(req.nwords) + 1) begin
        logic take;
        ri = (i % 4 == 0) ? 1'b1 : 1'($urandom % 3 != 0);
        #1;
        t0++;
        take = ro && vi;
        if (vo && ri) begin
          int n;
          n = int'(p.nwords) + 1;
          check(int'(p.addr) == nxt, "pieces are contiguous");
          check(int'(p.addr[5:0]) + n <= 64, "piece stays in one 2 KiB row");
          check(p.write == req.write, "direction kept");
          check(p.first_strb == (npieces == 0 ? req.first_strb : '1), "first-word strobes");
          check(p.last_strb == (total + n == int'(req.nwords) + 1 ? req.last_strb : '1), "last-word strobes");
          nxt += n; total += n; npieces++;
        end
        @(negedge clk);
        if (take) vi = 0;
      end
      ri = 0;
      check(total == int'(req.nwords) + 1, "pieces cover the request");
      if (i % 4 == 0 && req.nwords < 64) check(t0 == 1, "a fitting request passes in one cycle");
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
