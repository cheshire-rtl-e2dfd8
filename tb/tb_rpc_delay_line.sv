// tb_rpc_delay_line: self-checking testbench of the behavioural delay line.
// For several taps a pulse is sent through and the delay of both edges is
// measured in simulation time units; it must equal tap * 50 units. With the
// 5000-unit clock used here, tap 25 gives the 90-degree shift the PHY needs.
//
// The configurable delay line is published; 50 units per tap is our own.
module tb_rpc_delay_line;
  logic in = 0, out;
  logic [5:0] tap;
  int checks = 0, failures = 0;

  rpc_delay_line dut (.in_i(in), .tap_i(tap), .out_o(out));

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #10000000 failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    time t0, t1;
    for (int t = 1; t < 64; t += 6) begin
      tap = 6'(t);
      #5000;
      t0 = $time; in = 1;
      @(posedge out); t1 = $time;
      check(t1 - t0 == time'(t * 50), $sformatf("rising edge delay at tap %0d: %0t", t, t1 - t0));
      #3000;
      t0 = $time; in = 0;
      @(negedge out); t1 = $time;
      check(t1 - t0 == time'(t * 50), $sformatf("falling edge delay at tap %0d", t));
    end
    tap = 6'd25;
    #5000 t0 = $time; in = 1; @(posedge out);
    check($time - t0 == 1250, "tap 25 = quarter of a 5000-unit clock period");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
