// tb_rpc_manager: self-checking testbench of the RPC DRAM manager, which
// issues the initialisation sequence and the periodic maintenance.
// Checks: nothing is requested before t_init cycles; then exactly one mode
// register write and one long ZQ calibration, after which init_done rises;
// afterwards refresh requests come every t_refi cycles and short ZQ every
// t_zqi cycles, refresh taking priority, with a consumer that accepts
// requests after a random delay. The intervals are measured in cycles.
//
// The three duties are published; the intervals used are our own values.
module tb_rpc_manager;
  import rpc_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a falling edge, so asynchronous resets act at once
  always #2500 clk = ~clk;
  rpc_cfg_t cfg;
  mgmt_op_e op;
  logic v, rdy, done;
  int checks = 0, failures = 0;

  rpc_manager dut (.clk_i(clk), .rst_ni(rst_n), .cfg_i(cfg), .mgmt_op_o(op), .mgmt_valid_o(v),
                   .mgmt_ready_i(rdy), .init_done_o(done));

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int cyc = 0, first_req = -1, n_ref = 0, n_zqs = 0, n_mrs = 0, n_zql = 0, last_ref = -1, bad_int = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (v && first_req < 0) first_req = cyc;
    if (v && rdy) begin
      case (op)
        MgmtMrs:     n_mrs++;
        MgmtZqLong:  n_zql++;
        MgmtZqShort: n_zqs++;
        MgmtRef: begin
          n_ref++;
          last_ref = cyc;
        end
        default: ;
      endcase
    end
  end

  // refresh requests are raised every t_refi cycles: count raises
  int raises = 0, last_raise = -1;
  always @(posedge clk) if (rst_n && dut.state_q == dut.Run && dut.ref_cnt_q + 1 >= cfg.t_refi) begin
    if (last_raise >= 0 && cyc - last_raise != int'(cfg.t_refi)) bad_int++;
    last_raise = cyc; raises++;
  end

  always @(negedge clk) rdy <= ($urandom % 4 == 0);

  initial begin
    cfg = '0;
    cfg.t_init = 32'd500; cfg.t_refi = 16'd100; cfg.t_zqi = 32'd1000;
    repeat (3) @(negedge clk); rst_n = 1;
    wait (done);
    check(first_req == 501, $sformatf("first request right after t_init=500 idle cycles: cycle %0d", first_req));
    check(n_mrs == 1 && n_zql == 1 && n_ref == 0, "init: one mode write, one long ZQ");
    repeat (5000) @(posedge clk);
    check(n_ref >= 48 && n_ref <= 50, $sformatf("refreshes in 5000 cycles at t_refi=100: %0d", n_ref));
    check(n_zqs >= 4 && n_zqs <= 5, $sformatf("short ZQs in 5000 cycles at t_zqi=1000: %0d", n_zqs));
    check(bad_int == 0 && raises > 40, "refresh raised exactly every t_refi");
    check(n_mrs == 1 && n_zql == 1, "no further init commands");
    check(done, "init_done stays high");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
