// tb_rpc_axi_serializer: self-checking testbench of the AXI serializer,
// which merges the AW and AR channels into one ordered transaction stream.
// Randomly arriving write and read requests are each held until accepted.
// Checks: every request comes out exactly once with its own fields and
// direction; an older request is never overtaken by a newer one of the
// other channel (first come, first served); when both arrive together both
// channels win a fair share of the ties; the consumer's stalls are respected.
//
// First come, first served is the published rule; the tie rule checked
// for fairness is our own.
module tb_rpc_axi_serializer;
  import cheshire_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a falling edge, so asynchronous resets act at once
  always #2500 clk = ~clk;
  axi_ax_t aw, ar, tx;
  logic awv, awr, arv, arr, tw, tv, tr;
  int checks = 0, failures = 0;

  rpc_axi_serializer dut (.clk_i(clk), .rst_ni(rst_n), .aw_i(aw), .aw_valid_i(awv), .aw_ready_o(awr),
    .ar_i(ar), .ar_valid_i(arv), .ar_ready_o(arr), .txn_o(tx), .txn_write_o(tw), .txn_valid_o(tv), .txn_ready_i(tr));

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int aw_t, ar_t, n_w = 0, n_r = 0, n_tie = 0, tie_w = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    awv = 0; arv = 0; tr = 0; aw = '0; ar = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      if (!awv && ($urandom % 3 == 0)) begin aw = axi_ax_t'({$urandom, $urandom}); awv = 1; aw_t = cyc; end
      if (!arv && ($urandom % 3 == 0)) begin ar = axi_ax_t'({$urandom, $urandom}); arv = 1; ar_t = cyc; end
      tr = ($urandom % 4 != 0);
      #1;
      check(tv == (awv || arv), "valid when any request waits");
      if (tv && tr) begin
        logic took_w;
        took_w = tw;
        if (tw) begin
          check(awv && tx == aw && awr && !arr, "write granted with its fields");
          check(!arv || ar_t >= aw_t, "older read not overtaken");
          if (arv && ar_t == aw_t) begin tie_w++; n_tie++; end
          n_w++;
        end else begin
          check(arv && tx == ar && arr && !awr, "read granted with its fields");
          check(!awv || aw_t >= ar_t, "older write not overtaken");
          if (awv && aw_t < ar_t) $display("cyc=%0d aw_t=%0d ar_t=%0d awq=%b arq=%b old=%b", cyc, aw_t, ar_t, dut.aw_wait_q, dut.ar_wait_q, dut.older_w_q);
          if (awv && ar_t == aw_t) n_tie++;
          n_r++;
        end
        @(posedge clk);
        #1 if (took_w) awv = 0; else arv = 0;
      end else if (!tr) begin
        check(!awr && !arr, "nothing accepted while stalled");
      end
    end
    check(n_w > 100 && n_r > 100, $sformatf("both channels served: %0d writes, %0d reads", n_w, n_r));
    check(tie_w > n_tie / 4 && tie_w < 3 * n_tie / 4, $sformatf("simultaneous requests shared fairly (%0d of %0d to AW)", tie_w, n_tie));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
