// rpc_delay_line: behavioural model of a configurable delay line.
//
// This is a behavioural model, not synthesizable logic. In silicon it is a
// chain of delay cells with a tap multiplexer, built from standard cells of
// the target library; its delay per tap depends on the process and has to be
// characterised there. The model delays its input by tap_i * TapDelay time
// units (transport delay, so every edge is kept). With the time unit taken
// as 1 ps, the default 50 ps per tap and 64 taps cover more than a quarter
// period of a 200 MHz clock (1250 ps, tap 25). The PHY uses one instance to
// derive the 90-degree transmit strobe clock from the controller clock and
// one to shift the received strobe into the middle of the data eye.
//
// Lint note: the delay is computed from the tap input at run time, so a tap
// of 0 gives a zero delay, which lint flags; that is the intended meaning.
module rpc_delay_line #(
  parameter int unsigned TapWidth = 6,
  parameter int unsigned TapDelay = 50
) (
  input  logic                in_i,
  input  logic [TapWidth-1:0] tap_i,
  output logic                out_o
);
  // Start low, as a powered-up delay chain with a low input would.
  initial out_o = 1'b0;

  always @(in_i) begin
    out_o <= #(tap_i * TapDelay) in_i;
  end
endmodule
