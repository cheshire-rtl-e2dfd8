// rpc_write_buffer: buffers write words so that a write burst, once launched
// on the RPC DRAM, never waits for data.
//
// AXI may stall a write on any beat; an RPC burst cannot stall. Words arrive
// from the datawidth converter with their word address, byte strobe and a
// run_last flag that closes a run of consecutive words. Only when the last
// word of a run is stored does the buffer emit the run's descriptor (start
// address, word count, first/last strobe): a write is released only once all
// of its data is inside, as the source description requires. The controller
// then pops one word per NSRRP data request (pop_i), with the head word
// visible on wdata_o in the same cycle. DepthWords defaults to 256 words
// (8 KiB, the demonstrator's size). The descriptor queue depth is our choice.
//
// Lint notes: FIFO occupancy outputs are left open on purpose. The
// assertion's disable-iff uses the asynchronous reset, which lint reports
// as a reset used both synchronously and asynchronously; it is
// simulation-only checking and creates no logic.
module rpc_write_buffer
  import rpc_pkg::*;
#(
  parameter int unsigned DepthWords = 256,
  parameter int unsigned DescDepth  = 8
) (
  input  logic   clk_i,
  input  logic   rst_ni,
  // words from the datawidth converter
  input  logic   word_valid_i,
  output logic   word_ready_o,
  input  word_t  word_i,
  input  wmask_t strb_i,
  input  waddr_t waddr_i,
  input  logic   run_last_i,
  // released write descriptors
  output desc_t  desc_o,
  output logic   desc_valid_o,
  input  logic   desc_ready_i,
  // NSRRP write data
  input  logic   pop_i,
  output word_t  wdata_o,
  output logic   empty_o
);
  logic   data_full, desc_full, data_valid;
  logic   in_run_q;
  waddr_t start_q;
  wmask_t first_strb_q;
  logic [7:0] n_q;
  desc_t  desc_new;
  logic   push;

  assign word_ready_o = !data_full && !desc_full;
  assign push         = word_valid_i && word_ready_o;

  always_comb begin
    desc_new.write      = 1'b1;
    desc_new.addr       = in_run_q ? start_q : waddr_i;
    desc_new.nwords     = in_run_q ? n_q + 1'b1 : 8'd0;
    desc_new.first_strb = in_run_q ? first_strb_q : strb_i;
    desc_new.last_strb  = strb_i;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      in_run_q     <= 1'b0;
      start_q      <= '0;
      first_strb_q <= '0;
      n_q          <= '0;
    end else if (push) begin
      if (run_last_i) begin
        in_run_q <= 1'b0;
      end else begin
        in_run_q     <= 1'b1;
        start_q      <= desc_new.addr;
        first_strb_q <= desc_new.first_strb;
        n_q          <= desc_new.nwords;
      end
    end
  end

  rpc_fifo #(.Width(WordBits), .Depth(DepthWords)) i_data (
    .clk_i, .rst_ni,
    .push_i (push),
    .data_i (word_i),
    .full_o (data_full),
    .pop_i  (pop_i),
    .data_o (wdata_o),
    .valid_o(data_valid),
    .count_o()
  );

  rpc_fifo #(.Width($bits(desc_t)), .Depth(DescDepth)) i_desc (
    .clk_i, .rst_ni,
    .push_i (push && run_last_i),
    .data_i (desc_new),
    .full_o (desc_full),
    .pop_i  (desc_valid_o && desc_ready_i),
    .data_o (desc_o),
    .valid_o(desc_valid_o),
    .count_o()
  );

  assign empty_o = !data_valid;

  // A released write may only pop data that is inside.
  assert property (@(posedge clk_i) disable iff (!rst_ni) pop_i |-> data_valid)
    else $error("rpc_write_buffer: data requested before it was buffered");
endmodule
