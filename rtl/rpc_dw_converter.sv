// rpc_dw_converter: converts between the 64-bit AXI data width and the
// 256-bit RPC DRAM word, in both directions.
//
// Write side: after start_w_i hands it the AW burst (address, len, size), it
// accepts W beats and places each beat in the 64-bit lane of the word given
// by the beat address (bits [4:3]), merging strobes. A word is emitted in the
// same cycle as the beat that completes it: the beat is the burst's last one
// or the next beat falls into another word. It also marks run ends for the
// write buffer: a run of words may only have partial strobes in its first and
// last word (RPC DRAM masks only those two), so a partially-strobed word that
// is not the first of its run closes the run; the burst's last word always
// does. w_done_o pulses when the last beat has been taken.
//
// Read side: a queue of accepted AR bursts drives the unpacking of words from
// the read buffer into R beats: the beat's lane is selected by address bits
// [4:3], and a word is released after its last beat. Throughput is one beat
// per cycle on both sides. The 64-to-256 conversion follows the source
// description; lane placement by address, the run rule, and INCR-only bursts
// are this design's choices.
//
// Lint notes: the FIFO occupancy output is left open and unused AW fields
// (id, burst type, upper address bits) are carried in the struct but not
// read here, nor the byte-offset bits of the queued read address; all
// intended.
module rpc_dw_converter
  import rpc_pkg::*;
  import cheshire_pkg::*;
#(
  parameter int unsigned ReadQueueDepth = 4
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  // write side
  input  logic     start_w_i,
  input  axi_ax_t  aw_i,
  input  axi_w_t   w_i,
  input  logic     w_valid_i,
  output logic     w_ready_o,
  output logic     w_done_o,
  output word_t    word_o,
  output wmask_t   word_strb_o,
  output waddr_t   word_addr_o,
  output logic     word_last_o,
  output logic     word_valid_o,
  input  logic     word_ready_i,
  // read side
  input  logic     start_r_i,
  input  axi_ax_t  ar_i,
  output logic     r_queue_full_o,
  input  word_t    rword_i,
  input  logic     rword_valid_i,
  output logic     rword_ready_o,
  output axi_r_t   r_o,
  output logic     r_valid_o,
  input  logic     r_ready_i
);

  function automatic axi_addr_t next_beat(axi_addr_t a, logic [2:0] size);
    axi_addr_t bytes;
    bytes = axi_addr_t'(1) << size;
    return (a & ~(bytes - 1'b1)) + bytes;
  endfunction

  // ---------------- write side ----------------
  logic       w_active_q, run_first_q;
  axi_addr_t  w_addr_q;
  logic [2:0] w_size_q;
  word_t      acc_q;
  wmask_t     acc_strb_q;
  logic [1:0] w_lane;
  axi_addr_t  w_next;
  logic       w_close;
  word_t      merged;
  wmask_t     merged_strb;
  logic       w_fire;

  assign w_lane = w_addr_q[4:3];
  assign w_next = next_beat(w_addr_q, w_size_q);
  assign w_close = w_i.last || (w_next[24:5] != w_addr_q[24:5]);

  always_comb begin
    merged      = acc_q;
    merged_strb = acc_strb_q;
    for (int unsigned b = 0; b < AxiStrbWidth; b++) begin
      if (w_i.strb[b]) merged[w_lane*AxiDataWidth + b*8 +: 8] = w_i.data[b*8 +: 8];
    end
    merged_strb[w_lane*AxiStrbWidth +: AxiStrbWidth] = acc_strb_q[w_lane*AxiStrbWidth +: AxiStrbWidth] | w_i.strb;
  end

  assign word_o       = merged;
  assign word_strb_o  = merged_strb;
  assign word_addr_o  = waddr_t'(w_addr_q[24:5]);
  assign word_last_o  = w_i.last || (!run_first_q && (merged_strb != '1));
  assign word_valid_o = w_active_q && w_valid_i && w_close;
  assign w_ready_o    = w_active_q && (!w_close || word_ready_i);
  assign w_fire       = w_valid_i && w_ready_o;
  assign w_done_o     = w_fire && w_i.last;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      w_active_q  <= 1'b0;
      run_first_q <= 1'b1;
      w_addr_q    <= '0;
      w_size_q    <= '0;
      acc_q       <= '0;
      acc_strb_q  <= '0;
    end else begin
      if (start_w_i) begin
        w_active_q  <= 1'b1;
        run_first_q <= 1'b1;
        w_addr_q    <= aw_i.addr;
        w_size_q    <= aw_i.size;
        acc_strb_q  <= '0;
      end else if (w_fire) begin
        w_addr_q <= w_next;
        if (w_close) begin
          acc_strb_q  <= '0;
          run_first_q <= word_last_o;
        end else begin
          acc_q      <= merged;
          acc_strb_q <= merged_strb;
        end
        if (w_i.last) w_active_q <= 1'b0;
      end
    end
  end

  // ---------------- read side ----------------
  axi_ax_t    rq_head;
  logic       rq_valid, rq_full;
  logic       r_busy_q;
  axi_addr_t  r_addr_q;
  logic [7:0] r_cnt_q;
  axi_addr_t  r_addr, r_next;
  logic [7:0] r_cnt;
  logic       r_last, r_fire;

  rpc_fifo #(.Width($bits(axi_ax_t)), .Depth(ReadQueueDepth)) i_rq (
    .clk_i, .rst_ni,
    .push_i (start_r_i),
    .data_i (ar_i),
    .full_o (rq_full),
    .pop_i  (r_fire && r_last),
    .data_o (rq_head),
    .valid_o(rq_valid),
    .count_o()
  );
  assign r_queue_full_o = rq_full;

  assign r_addr = r_busy_q ? r_addr_q : rq_head.addr;
  assign r_cnt  = r_busy_q ? r_cnt_q : 8'd0;
  assign r_next = next_beat(r_addr, rq_head.size);
  assign r_last = (r_cnt == rq_head.len);

  always_comb begin
    r_o.id   = rq_head.id;
    r_o.data = rword_i[r_addr[4:3]*AxiDataWidth +: AxiDataWidth];
    r_o.resp = AxiRespOkay;
    r_o.last = r_last;
  end
  assign r_valid_o     = rq_valid && rword_valid_i;
  assign r_fire        = r_valid_o && r_ready_i;
  assign rword_ready_o = r_fire && (r_last || (r_next[24:5] != r_addr[24:5]));

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      r_busy_q <= 1'b0;
      r_addr_q <= '0;
      r_cnt_q  <= '0;
    end else if (r_fire) begin
      r_busy_q <= !r_last;
      r_addr_q <= r_next;
      r_cnt_q  <= r_cnt + 1'b1;
    end
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni) start_w_i |-> !w_active_q)
    else $error("rpc_dw_converter: new write while one is open");
endmodule
