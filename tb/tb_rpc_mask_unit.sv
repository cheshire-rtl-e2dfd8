// tb_rpc_mask_unit: self-checking testbench of the RPC mask unit.
// Random transfer descriptors are applied; the NSRRP request must carry the
// same address and length, masks that are the inverted byte strobes of the
// first and last word (both words' strobes combined for a one-word write)
// and all-zero masks for reads. The handshake must pass straight through.
//
// Masks from strobes are published; the polarity checked is our own.
module tb_rpc_mask_unit;
  import rpc_pkg::*;
  desc_t d;
  logic vi, ro, vo, ri;
  nsrrp_req_t q;
  int checks = 0, failures = 0;

  rpc_mask_unit dut (.desc_i(d), .valid_i(vi), .ready_o(ro), .req_o(q), .valid_o(vo), .ready_i(ri));

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #1000000 failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < 500; i++) begin
      wmask_t ef, el;
      d = '{write: 1'($urandom), addr: waddr_t'($urandom), nwords: (i % 3 == 0) ? 8'd0 : 8'($urandom % 64),
            first_strb: {$urandom, $urandom, $urandom, $urandom}[31:0], last_strb: {$urandom}[31:0]};
      vi = 1'($urandom); ri = 1'($urandom);
      #10;
      ef = d.nwords == 0 ? ~(d.first_strb & d.last_strb) : ~d.first_strb;
      el = d.nwords == 0 ? ~(d.first_strb & d.last_strb) : ~d.last_strb;
      if (!d.write) begin ef = '0; el = '0; end
      check(q.addr == d.addr && q.len == len_t'(d.nwords) && q.write == d.write, "address/length/direction");
      check(q.first_mask == ef && q.last_mask == el, $sformatf("masks for nwords=%0d write=%b", d.nwords, d.write));
      check(vo == vi && ro == ri, "handshake pass-through");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
