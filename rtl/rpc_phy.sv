// rpc_phy: all-digital physical interface to the RPC DRAM, without clock
// generation of its own.
//
// Transmit side: the timing FSM's per-cycle slot (command or mask subword,
// or serialized data) is registered once; a 256-bit write word is loaded
// on wload_i and shifted out as eight 32-bit subwords, and a multiplexer
// picks between the slot word and the data subword. The registered 32-bit
// payload is turned from single to double data rate by a multiplexer driven
// by the clock itself: bits [15:0] while the clock is high, bits [31:16]
// while it is low. The strobes DQS/DQS# come from a 90-degree-shifted copy of
// the clock made by a delay line, gated by the timing FSM, so their edges sit
// in the middle of each DB half-cycle. CLK/CLK# are the controller clock and
// its inverse. CS# and the output enables are registered with the payload.
//
// Receive side: DQS from the device is edge-aligned with the read data; a
// second delay line shifts it into the data eye. Its rising edge captures the
// first 16 bits, its falling edge the second 16 bits and writes the 32-bit
// subword into an 8-entry asynchronous FIFO with Gray-coded pointers (the
// clock domain crossing). On the controller clock, subwords are taken out
// one per cycle and packed into 256-bit words, each delivered with a
// one-cycle rdata_valid_o (NSRRP read data). The FIFO has no full check: it
// is drained at the rate it is filled. The strobe-domain write pointer only gets
// an asynchronous reset, since the strobe does not toggle while in reset. The structure follows the source
// description; register stages, FIFO depth and the unused serial command pin
// (STB held high, all commands travel on DB) are this design's own choices.
module rpc_phy
  import rpc_pkg::*;
(
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic [5:0]           tx_tap_i,
  input  logic [5:0]           rx_tap_i,
  // from the timing FSM
  input  logic                 cs_n_i,
  input  logic                 db_oe_i,
  input  logic                 dqs_oe_i,
  input  logic                 dqs_en_i,
  input  logic                 sel_data_i,
  input  subword_t             tx_word_i,
  input  logic                 wload_i,
  input  word_t                wdata_i,
  // NSRRP read data
  output logic                 rdata_valid_o,
  output word_t                rdata_o,
  // RPC DRAM pins
  output logic                 clk_o,
  output logic                 clk_n_o,
  output logic                 cs_n_o,
  output logic                 stb_o,
  output logic [DbWidth-1:0]   db_o,
  output logic                 db_oe_o,
  input  logic [DbWidth-1:0]   db_i,
  output logic                 dqs_o,
  output logic                 dqs_n_o,
  output logic                 dqs_oe_o,
  input  logic                 dqs_i
);
  // ---------------- transmit side ----------------
  logic [WordBits-SubwordBits-1:0] shreg_q;
  subword_t data_sw, payload, tx_q;
  logic     cs_n_q, db_oe_q, dqs_oe_q, dqs_en_q;
  logic     clk90;

  assign data_sw = wload_i ? wdata_i[SubwordBits-1:0] : shreg_q[SubwordBits-1:0];
  assign payload = sel_data_i ? data_sw : tx_word_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      shreg_q  <= '0;
      tx_q     <= '0;
      cs_n_q   <= 1'b1;
      db_oe_q  <= 1'b0;
      dqs_oe_q <= 1'b0;
      dqs_en_q <= 1'b0;
    end else begin
      if (wload_i)         shreg_q <= wdata_i[WordBits-1:SubwordBits];
      else if (sel_data_i) shreg_q <= shreg_q >> SubwordBits;
      tx_q     <= payload;
      cs_n_q   <= cs_n_i;
      db_oe_q  <= db_oe_i;
      dqs_oe_q <= dqs_oe_i;
      dqs_en_q <= dqs_en_i;
    end
  end

  rpc_delay_line i_tx_delay (.in_i(clk_i), .tap_i(tx_tap_i), .out_o(clk90));

  // SDR to DDR: the clock selects the half of the payload on DB.
  assign db_o     = clk_i ? tx_q[DbWidth-1:0] : tx_q[SubwordBits-1:DbWidth];
  assign db_oe_o  = db_oe_q;
  assign dqs_o    = dqs_en_q & clk90;
  assign dqs_n_o  = ~(dqs_en_q & clk90);
  assign dqs_oe_o = dqs_oe_q;
  assign cs_n_o   = cs_n_q;
  assign stb_o    = 1'b1;
  assign clk_o    = clk_i;
  assign clk_n_o  = ~clk_i;

  // ---------------- receive side ----------------
  localparam int unsigned FifoDepth = 8;
  logic               dqs_d;
  logic [DbWidth-1:0] lo_q;
  subword_t           fifo_q [FifoDepth];
  logic [3:0]         wptr_q, wgray_q;           // strobe domain
  logic [3:0]         wgray_s1_q, wgray_s2_q;    // synchronizer
  logic [3:0]         rptr_q;
  logic [3:0]         rgray;
  logic               fifo_empty;
  word_t              pack_q;
  logic [2:0]         idx_q;

  rpc_delay_line i_rx_delay (.in_i(dqs_i), .tap_i(rx_tap_i), .out_o(dqs_d));

  always_ff @(posedge dqs_d) begin
    lo_q <= db_i;
  end

  always_ff @(negedge dqs_d or negedge rst_ni) begin
    if (!rst_ni) begin
      wptr_q  <= '0;
      wgray_q <= '0;
    end else begin
      wptr_q  <= wptr_q + 1'b1;
      wgray_q <= (wptr_q + 1'b1) ^ ((wptr_q + 1'b1) >> 1);
    end
  end

  always_ff @(negedge dqs_d) begin
    fifo_q[wptr_q[2:0]] <= {db_i, lo_q};
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wgray_s1_q <= '0;
      wgray_s2_q <= '0;
    end else begin
      wgray_s1_q <= wgray_q;
      wgray_s2_q <= wgray_s1_q;
    end
  end

  assign rgray      = rptr_q ^ (rptr_q >> 1);
  assign fifo_empty = (rgray == wgray_s2_q);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rptr_q        <= '0;
      idx_q         <= '0;
      pack_q        <= '0;
      rdata_valid_o <= 1'b0;
    end else begin
      rdata_valid_o <= 1'b0;
      if (!fifo_empty) begin
        rptr_q <= rptr_q + 1'b1;
        pack_q[idx_q*SubwordBits +: SubwordBits] <= fifo_q[rptr_q[2:0]];
        idx_q  <= idx_q + 1'b1;
        if (idx_q == 3'd7) rdata_valid_o <= 1'b1;
      end
    end
  end
  assign rdata_o = pack_q;
endmodule
