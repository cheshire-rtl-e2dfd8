// rpc_mask_unit: derives the RPC DRAM first and last write masks of one
// transfer from the AXI byte strobes of its first and last word.
//
// RPC DRAM writes whole 32-byte words; unaligned writes are expressed by a
// "first" and a "last" mask, sent between the write command and the data.
// Following the source description, the masks come from the AXI strobes.
// The mask polarity (1 = byte not written) and the single-word case, where
// one word is both first and last and both masks carry the same value, are
// this design's choices. Reads carry all-zero masks. Purely combinational:
// the descriptor is converted in the cycle it is presented.
module rpc_mask_unit
  import rpc_pkg::*;
(
  input  desc_t      desc_i,
  input  logic       valid_i,
  output logic       ready_o,
  output nsrrp_req_t req_o,
  output logic       valid_o,
  input  logic       ready_i
);
  wmask_t first_strb, last_strb;

  always_comb begin
    first_strb = desc_i.first_strb;
    last_strb  = desc_i.last_strb;
    // A single-word transfer: its one word carries both strobes.
    if (desc_i.nwords == '0) begin
      first_strb = desc_i.first_strb & desc_i.last_strb;
      last_strb  = first_strb;
    end
    req_o.write      = desc_i.write;
    req_o.addr       = desc_i.addr;
    req_o.len        = len_t'(desc_i.nwords);
    req_o.first_mask = desc_i.write ? ~first_strb : '0;
    req_o.last_mask  = desc_i.write ? ~last_strb  : '0;
  end

  assign valid_o = valid_i;
  assign ready_o = ready_i;
endmodule
