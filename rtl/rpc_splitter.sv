// rpc_splitter: splits word transfers at 2 KiB boundaries, since an RPC DRAM
// burst must stay inside one 2 KiB row.
//
// A descriptor (start word address, words - 1, first/last strobes) is taken
// in and emitted as one or more pieces, one per cycle, each inside a single
// 2 KiB row. The first piece keeps the first-word strobe, the last piece the
// last-word strobe; strobes of words inside the transfer are full by
// construction, so cut edges get all-ones strobes. The 2 KiB boundary follows
// the source description; the valid/ready handshake and the piece format are
// this design's own.
module rpc_splitter
  import rpc_pkg::*;
(
  input  logic  clk_i,
  input  logic  rst_ni,
  input  desc_t desc_i,
  input  logic  valid_i,
  output logic  ready_o,
  output desc_t piece_o,
  output logic  valid_o,
  input  logic  ready_i
);
  logic       busy_q;
  desc_t      cur_q;       // remaining part of the transfer
  logic       first_q;     // next piece is the transfer's first
  desc_t      cur;
  logic       first;
  logic [7:0] row_left;    // words left in the row, minus one
  logic       fits;

  assign cur   = busy_q ? cur_q : desc_i;
  assign first = busy_q ? first_q : 1'b1;

  always_comb begin
    row_left = 8'(WordsPerRow - 1) - 8'(addr_col(cur.addr));
    fits     = (cur.nwords <= row_left);
    piece_o            = cur;
    piece_o.nwords     = fits ? cur.nwords : row_left;
    piece_o.first_strb = first ? cur.first_strb : '1;
    piece_o.last_strb  = fits  ? cur.last_strb  : '1;
  end

  assign valid_o = busy_q || valid_i;
  assign ready_o = !busy_q && ready_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      busy_q  <= 1'b0;
      cur_q   <= '0;
      first_q <= 1'b0;
    end else if (valid_o && ready_i) begin
      if (fits) begin
        busy_q <= 1'b0;
      end else begin
        busy_q       <= 1'b1;
        first_q      <= 1'b0;
        cur_q        <= cur;
        cur_q.addr   <= cur.addr + waddr_t'(row_left) + 1'b1;
        cur_q.nwords <= cur.nwords - row_left - 1'b1;
      end
    end
  end
endmodule
