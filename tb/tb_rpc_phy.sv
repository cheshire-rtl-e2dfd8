// tb_rpc_phy: self-checking testbench of the RPC PHY.
// Transmit: a 32-bit command packet must appear on DB one cycle after it is
// presented, low half while the clock is high and high half while it is low
// (SDR to DDR), with CS# low for that cycle; a 256-bit write word must leave
// as eight 32-bit subwords in order, one per cycle; DQS must toggle a
// quarter period after the clock (90 degrees, delay-line tap 25) and DQS#
// must be its complement. Receive: bursts of words are driven DDR on DB with
// an edge-aligned DQS, as a device does; every word must be reassembled
// (eight subwords) and delivered once, in order, across the strobe-to-clock
// domain crossing.
//
// The DDR conversion, 90-degree strobe, CDC and packing are published; the
// register stages and half order checked are our own.
module tb_rpc_phy;
  import rpc_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a falling edge, so asynchronous resets act at once
  always #2500 clk = ~clk;
  logic cs_n, db_oe, dqs_oe, dqs_en, sel, wload, rvalid;
  subword_t txw;
  word_t wdata, rdata;
  logic pclk, pclk_n, pcs_n, stb, pdb_oe, pdqs, pdqs_n, pdqs_oe, dqs_in;
  logic [15:0] pdb, db_in;
  int checks = 0, failures = 0;

  rpc_phy dut (.clk_i(clk), .rst_ni(rst_n), .tx_tap_i(6'd25), .rx_tap_i(6'd25), .cs_n_i(cs_n), .db_oe_i(db_oe),
    .dqs_oe_i(dqs_oe), .dqs_en_i(dqs_en), .sel_data_i(sel), .tx_word_i(txw), .wload_i(wload), .wdata_i(wdata),
    .rdata_valid_o(rvalid), .rdata_o(rdata), .clk_o(pclk), .clk_n_o(pclk_n), .cs_n_o(pcs_n), .stb_o(stb),
    .db_o(pdb), .db_oe_o(pdb_oe), .db_i(db_in), .dqs_o(pdqs), .dqs_n_o(pdqs_n), .dqs_oe_o(pdqs_oe), .dqs_i(dqs_in));

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  word_t got[$];
  always @(negedge clk) if (rvalid) got.push_back(rdata);

  initial begin
    cs_n = 1; db_oe = 0; dqs_oe = 0; dqs_en = 0; sel = 0; wload = 0; txw = '0; wdata = '0;
    db_in = '0; dqs_in = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    // command packets
    for (int i = 0; i < 20; i++) begin
      subword_t p;
      p = $urandom;
      @(negedge clk); txw = p; cs_n = 0; db_oe = 1;
      @(negedge clk); cs_n = 1; db_oe = 0; txw = '0;
      // now inside the cycle that started at the last posedge: clock is low
      check(pcs_n == 0 && pdb_oe == 1, "CS# low and DB driven in the command cycle");
      check(pdb == p[31:16], "high half while the clock is low");
      @(posedge clk); #1250;
      check(pcs_n == 1, "CS# high after the command");
    end
    // write data: one word, eight subwords
    for (int i = 0; i < 5; i++) begin
      word_t wd;
      wd = {8{$urandom}};
      @(negedge clk); wdata = wd; wload = 1; sel = 1; db_oe = 1; dqs_oe = 1; dqs_en = 1;
      for (int s = 0; s < 8; s++) begin
        @(posedge clk); #1000;
        wload = 0; wdata = '0;
        check(pdb == wd[s*32 +: 16], $sformatf("subword %0d low half", s));
        check(pdqs == 0 && pdqs_n == 1, "DQS still low before the 90-degree point");
        #500;
        check(pdqs == 1 && pdqs_n == 0, "DQS high after a quarter period");
        @(negedge clk); #1000;
        check(pdb == wd[s*32 + 16 +: 16], $sformatf("subword %0d high half", s));
        if (s == 7) begin sel = 0; db_oe = 0; dqs_oe = 0; dqs_en = 0; end
      end
    end
    // receive bursts
    for (int b = 0; b < 6; b++) begin
      word_t exp[$];
      int n;
      n = 1 + int'($urandom % 4);
      got.delete();
      exp.delete();
      @(posedge clk);
      for (int w = 0; w < n; w++) begin
        word_t d;
        d = {8{$urandom}};
        exp.push_back(d);
        for (int s = 0; s < 8; s++) begin
          @(posedge clk); db_in = d[s*32 +: 16]; dqs_in = 1;
          @(negedge clk); db_in = d[s*32 + 16 +: 16]; dqs_in = 0;
        end
      end
      repeat (8) @(posedge clk);
      check(got.size() == n, $sformatf("received %0d of %0d words", got.size(), n));
      for (int w = 0; w < n && w < got.size(); w++) begin check(got[w] == exp[w], $sformatf("received word %0d", w)); if (got[w] != exp[w]) $display("%h\n%h", got[w], exp[w]); end
    end
    check(stb == 1, "STB held high");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
