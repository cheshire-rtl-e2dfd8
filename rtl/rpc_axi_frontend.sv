// rpc_axi_frontend: AXI4 subordinate of the RPC DRAM interface. It turns AXI
// bursts into 256-bit word transfers on the NSRRP (non-stallable
// request-response protocol) towards the controller.
//
// Data flow, as in the source description: serializer -> datawidth
// converter -> write/read buffers -> splitter -> mask unit -> NSRRP.
// One AXI transaction is opened at a time, in the order the serializer
// gives. A read is turned at once into a word descriptor (first word,
// word count) and its AR fields are queued for the R-side unpacking. A write
// hands its W beats to the converter; the write buffer emits a descriptor for
// every run of words once the run is fully buffered; when the last one has
// been passed on, the B response is queued (writes are posted: the response
// does not wait for the DRAM, but any later access is ordered behind them).
// A read is only launched to the controller when the read buffer has room
// for all of its words, which it then reserves; write data is popped by the
// controller one word per data request, read data is pushed by the
// controller one word per cycle without backpressure.
//
// Only INCR bursts are supported, and the DRAM address is the low 25 bits of
// the AXI address; these, the posted write response, and the queue depths are
// this design's choices. Buffer sizes default to 8 KiB each, as in the
// demonstrator.
//
// Lint notes: the queue occupancy output is left open, and the byte-offset
// bits of the current address and of the last byte are unused because
// transfers are counted in whole 32-byte words; both are intended.
module rpc_axi_frontend
  import rpc_pkg::*;
  import cheshire_pkg::*;
#(
  parameter int unsigned WriteBufWords = 256,
  parameter int unsigned ReadBufWords  = 256
) (
  input  logic       clk_i,
  input  logic       rst_ni,
  input  axi_req_t   axi_req_i,
  output axi_rsp_t   axi_rsp_o,
  // NSRRP
  output nsrrp_req_t nsrrp_req_o,
  output logic       nsrrp_valid_o,
  input  logic       nsrrp_ready_i,
  input  logic       nsrrp_wpop_i,
  output word_t      nsrrp_wdata_o,
  input  logic       nsrrp_rvalid_i,
  input  word_t      nsrrp_rdata_i,
  output logic       idle_o
);
  typedef enum logic [1:0] {Idle, RdDesc, WrData} state_e;
  state_e state_q;

  axi_ax_t txn, cur_q;
  logic    txn_write, txn_valid, txn_ready;
  logic    w_done_seen_q;

  rpc_axi_serializer i_ser (
    .clk_i, .rst_ni,
    .aw_i(axi_req_i.aw), .aw_valid_i(axi_req_i.aw_valid), .aw_ready_o(axi_rsp_o.aw_ready),
    .ar_i(axi_req_i.ar), .ar_valid_i(axi_req_i.ar_valid), .ar_ready_o(axi_rsp_o.ar_ready),
    .txn_o(txn), .txn_write_o(txn_write), .txn_valid_o(txn_valid), .txn_ready_i(txn_ready)
  );

  // ---- datawidth converter and buffers ----
  word_t  cv_word;
  wmask_t cv_strb;
  waddr_t cv_addr;
  logic   cv_last, cv_valid, cv_ready, w_done;
  logic   rq_full;
  word_t  rb_word;
  logic   rb_valid, rb_ready;
  logic   start_w, start_r;
  desc_t  wb_desc;
  logic   wb_desc_valid, wb_desc_ready, wb_empty;
  logic [$clog2(ReadBufWords+1)-1:0] rb_free;

  rpc_dw_converter i_dwc (
    .clk_i, .rst_ni,
    .start_w_i(start_w), .aw_i(txn),
    .w_i(axi_req_i.w), .w_valid_i(axi_req_i.w_valid), .w_ready_o(axi_rsp_o.w_ready), .w_done_o(w_done),
    .word_o(cv_word), .word_strb_o(cv_strb), .word_addr_o(cv_addr), .word_last_o(cv_last),
    .word_valid_o(cv_valid), .word_ready_i(cv_ready),
    .start_r_i(start_r), .ar_i(txn), .r_queue_full_o(rq_full),
    .rword_i(rb_word), .rword_valid_i(rb_valid), .rword_ready_o(rb_ready),
    .r_o(axi_rsp_o.r), .r_valid_o(axi_rsp_o.r_valid), .r_ready_i(axi_req_i.r_ready)
  );

  rpc_write_buffer #(.DepthWords(WriteBufWords)) i_wbuf (
    .clk_i, .rst_ni,
    .word_valid_i(cv_valid), .word_ready_o(cv_ready), .word_i(cv_word), .strb_i(cv_strb),
    .waddr_i(cv_addr), .run_last_i(cv_last),
    .desc_o(wb_desc), .desc_valid_o(wb_desc_valid), .desc_ready_i(wb_desc_ready),
    .pop_i(nsrrp_wpop_i), .wdata_o(nsrrp_wdata_o), .empty_o(wb_empty)
  );

  // ---- transaction sequencing ----
  desc_t     rd_desc;
  axi_addr_t aligned, last_byte;
  desc_t     sp_in;
  logic      sp_in_valid, sp_in_ready;
  logic      b_full, b_valid;
  axi_id_t   b_id;

  always_comb begin
    aligned   = cur_q.addr & ~((axi_addr_t'(1) << cur_q.size) - 1'b1);
    last_byte = aligned + ((axi_addr_t'(cur_q.len) + 1'b1) << cur_q.size) - 1'b1;
    rd_desc.write      = 1'b0;
    rd_desc.addr       = waddr_t'(cur_q.addr[24:5]);
    rd_desc.nwords     = 8'(last_byte[AxiAddrWidth-1:5] - cur_q.addr[AxiAddrWidth-1:5]);
    rd_desc.first_strb = '1;
    rd_desc.last_strb  = '1;
  end

  assign txn_ready = (state_q == Idle) && (txn_write || !rq_full);
  assign start_w   = txn_valid && txn_ready && txn_write;
  assign start_r   = txn_valid && txn_ready && !txn_write;

  assign sp_in         = (state_q == RdDesc) ? rd_desc : wb_desc;
  assign sp_in_valid   = (state_q == RdDesc) || wb_desc_valid;
  assign wb_desc_ready = (state_q != RdDesc) && sp_in_ready;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q       <= Idle;
      cur_q         <= '0;
      w_done_seen_q <= 1'b0;
    end else begin
      unique case (state_q)
        Idle: if (txn_valid && txn_ready) begin
          cur_q         <= txn;
          w_done_seen_q <= 1'b0;
          state_q       <= txn_write ? WrData : RdDesc;
        end
        RdDesc: if (sp_in_ready) state_q <= Idle;
        WrData: begin
          if (w_done) w_done_seen_q <= 1'b1;
          if (w_done_seen_q && !wb_desc_valid && !b_full) state_q <= Idle;
        end
        default: state_q <= Idle;
      endcase
    end
  end

  // ---- B responses ----
  rpc_fifo #(.Width(AxiIdWidth), .Depth(4)) i_bq (
    .clk_i, .rst_ni,
    .push_i ((state_q == WrData) && w_done_seen_q && !wb_desc_valid && !b_full),
    .data_i (cur_q.id),
    .full_o (b_full),
    .pop_i  (b_valid && axi_req_i.b_ready),
    .data_o (b_id),
    .valid_o(b_valid),
    .count_o()
  );
  assign axi_rsp_o.b_valid = b_valid;
  assign axi_rsp_o.b.id    = b_id;
  assign axi_rsp_o.b.resp  = AxiRespOkay;

  // ---- splitter, mask unit, read-space gate ----
  desc_t      piece;
  logic       piece_valid, piece_ready;
  nsrrp_req_t mreq;
  logic       mvalid, mready, space_ok;

  rpc_splitter i_split (
    .clk_i, .rst_ni,
    .desc_i(sp_in), .valid_i(sp_in_valid), .ready_o(sp_in_ready),
    .piece_o(piece), .valid_o(piece_valid), .ready_i(piece_ready)
  );

  rpc_mask_unit i_mask (
    .desc_i(piece), .valid_i(piece_valid), .ready_o(piece_ready),
    .req_o(mreq), .valid_o(mvalid), .ready_i(mready)
  );

  assign space_ok      = mreq.write || (32'(rb_free) >= 32'(mreq.len) + 1);
  assign nsrrp_req_o   = mreq;
  assign nsrrp_valid_o = mvalid && space_ok;
  assign mready        = nsrrp_ready_i && space_ok;

  rpc_read_buffer #(.DepthWords(ReadBufWords)) i_rbuf (
    .clk_i, .rst_ni,
    .reserve_i(nsrrp_valid_o && nsrrp_ready_i && !mreq.write),
    .reserve_words_i(8'(mreq.len) + 8'd1),
    .free_o(rb_free),
    .push_i(nsrrp_rvalid_i), .rdata_i(nsrrp_rdata_i),
    .word_o(rb_word), .valid_o(rb_valid), .ready_i(rb_ready)
  );

  assign idle_o = (state_q == Idle) && !txn_valid && !piece_valid && wb_empty && !rb_valid && !b_valid;
endmodule
