// tb_rpc_regs: self-checking testbench of the RPC controller's register file.
// Checks the reset values (the timing defaults of this design), that every
// writable register reads back what was written (masked to its width) and
// drives the matching configuration field, that the status register shows
// the init-done input and rejects writes, and that index 15 answers with an
// error. The register bus answers in the same cycle.
//
// Memory-mapped timing registers are published; map and values are ours.
module tb_rpc_regs;
  import rpc_pkg::*;
  import cheshire_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a falling edge, so asynchronous resets act at once
  always #2500 clk = ~clk;
  reg_req_t rq;
  reg_rsp_t rs;
  logic done;
  rpc_cfg_t cfg;
  int checks = 0, failures = 0;

  rpc_regs dut (.clk_i(clk), .rst_ni(rst_n), .reg_req_i(rq), .reg_rsp_o(rs), .init_done_i(done), .cfg_o(cfg));

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic wr(input int i, input logic [31:0] v, output logic err);
    @(negedge clk); rq = '{addr: 32'(i * 4), write: 1, wdata: v, valid: 1};
    #1 check(rs.ready, "write answered in the same cycle"); err = rs.error;
    @(negedge clk); rq.valid = 0;
  endtask
  task automatic rd(input int i, output logic [31:0] v, output logic err);
    @(negedge clk); rq = '{addr: 32'(i * 4), write: 0, wdata: '0, valid: 1};
    #1 check(rs.ready, "read answered in the same cycle"); v = rs.rdata; err = rs.error;
    @(negedge clk); rq.valid = 0;
  endtask

  function automatic logic [31:0] field(int i);
    case (i)
      0: return 32'(cfg.t_rcd);  1: return 32'(cfg.t_rp);   2: return 32'(cfg.t_ras);
      3: return 32'(cfg.t_wr);   4: return 32'(cfg.t_rfc);  5: return 32'(cfg.t_refi);
      6: return cfg.t_zqi;       7: return 32'(cfg.t_zqcs); 8: return cfg.t_init;
      9: return 32'(cfg.rl);     10: return 32'(cfg.wl);    11: return 32'(cfg.mode);
      12: return 32'(cfg.tx_tap); 13: return 32'(cfg.rx_tap);
      default: return '0;
    endcase
  endfunction

  localparam int Width [14] = '{8, 8, 8, 8, 8, 16, 32, 8, 32, 4, 4, 16, 6, 6};

  initial begin
    logic [31:0] v; logic e;
    rq = '0; done = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    check(cfg.t_refi == 16'd1560 && cfg.t_init == 32'd40000 && cfg.rl == 4'd6 && cfg.wl == 4'd3 &&
          cfg.tx_tap == 6'd25, "reset configuration");
    for (int r = 0; r < 5; r++)
      for (int i = 0; i < 14; i++) begin
        logic [31:0] x, m;
        x = $urandom;
        m = (Width[i] == 32) ? 32'hffff_ffff : ((32'd1 << Width[i]) - 1);
        wr(i, x, e); check(!e, "write accepted");
        rd(i, v, e);
        check(!e && v == (x & m), $sformatf("register %0d read-back", i));
        check(field(i) == (x & m), $sformatf("register %0d drives its field", i));
      end
    rd(14, v, e); check(v == 0 && !e, "status shows init not done");
    done = 1;
    rd(14, v, e); check(v == 1, "status shows init done");
    wr(14, 32'h0, e); check(e, "status is read-only");
    rd(15, v, e); check(e, "index 15 answers with an error");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
