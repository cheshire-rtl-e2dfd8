// rpc_dram_model: behavioural model of an RPC DRAM device, for testbenches.
//
// It speaks the command and data framing of the controller in this
// repository: 32-bit command packets on DB while CS# is low, sampled a
// quarter clock period after each CLK edge (low half, then high half);
// after a WRITE, two mask subwords and 8 data subwords per 256-bit word,
// sampled on the DQS edges; after a READ, a one-cycle DQS preamble in cycle
// rl-1 and then 8 cycles per word of edge-aligned DB/DQS. Storage is sparse.
// It checks: commands only after a mode-register write and ZQ calibration,
// READ/WRITE only to an open bank and row, at least TRcd cycles after
// ACTIVATE, and the command framing itself; every violation adds to
// errors. It also counts commands of each kind.
//
// The device behaviour (DDR data on a 16-bit DB, DQS strobes, 256-bit
// words) follows the published design; the packet encoding and checks are
// this design's own, since the RPC DRAM datasheet was not used.
module rpc_dram_model #(
  parameter int unsigned Quarter = 1250,   // quarter clock period, time units
  parameter int unsigned Rl      = 6,
  parameter int unsigned TRcd    = 3,
  parameter bit          Debug   = 0
) (
  input  logic        clk,
  input  logic        cs_n,
  input  logic [15:0] db,       // resolved bus
  input  logic        dqs,      // controller strobe (writes)
  output logic [15:0] db_drv,
  output logic        db_oe,
  output logic        dqs_drv,
  output logic        dqs_oe
);
  logic [255:0] mem [int];
  int errors = 0, n_act = 0, n_rd = 0, n_wr = 0, n_pre = 0, n_ref = 0, n_zq = 0, n_mrs = 0;
  int data_subwords = 0;    // subwords moved on DB (both directions)
  int cycle = 0;
  logic        clkq;
  logic [15:0] lo, wlo;
  logic        cs_lo;
  logic        open_q [4];
  logic [11:0] row_q [4];
  int          act_cycle [4];
  logic        init_mrs = 0, init_zq = 0;

  // write capture state
  int          w_left = 0;   // subwords still expected
  int          w_idx = 0;
  logic [31:0] w_fm, w_lm;
  logic [255:0] w_word;
  int          w_addr, w_n;

  initial begin
    db_drv = '0; db_oe = 0; dqs_drv = 0; dqs_oe = 0; cs_lo = 1; lo = '0;
    for (int b = 0; b < 4; b++) begin open_q[b] = 0; row_q[b] = '0; act_cycle[b] = 0; end
  end

  always @(posedge clk) cycle <= cycle + 1;
  always @(clk) clkq <= #(Quarter) clk;

  function automatic logic [255:0] rd_word(int a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction

  always @(posedge clkq) begin
    lo    = db;
    cs_lo = cs_n;
  end

  always @(negedge clkq) begin
    logic [31:0] p;
    int bank;
    p = {db, lo};
    bank = int'(p[27:26]);
    if (!cs_lo) begin
      if (Debug) $display("[%0d] cmd %h", cycle, p);
      if (cs_n) errors++;                 // CS# must cover the whole cycle
      if (!(init_mrs && init_zq) && p[31:28] != 4'h7 && p[31:28] != 4'h6) errors++;
      unique case (p[31:28])
        4'h1: begin n_act++; if (open_q[bank]) errors++; open_q[bank] = 1; row_q[bank] = p[25:14]; act_cycle[bank] = cycle; end
        4'h2, 4'h3: begin
          if (!open_q[bank]) errors++;
          if (cycle - act_cycle[bank] < int'(TRcd)) errors++;
          if (p[31:28] == 4'h2) begin
            n_rd++;
            fork do_read({bank[1:0], row_q[bank], p[25:20]}, int'(p[19:14])); join_none
          end else begin
            n_wr++;
            if (w_left != 0) errors++;
            w_addr = int'({bank[1:0], row_q[bank], p[25:20]});
            w_n    = int'(p[19:14]) + 1;
            w_left = 2 + 8 * w_n;
            w_idx  = 0;
          end
        end
        4'h4: begin n_pre++; if (!open_q[bank]) errors++; open_q[bank] = 0; end
        4'h5: begin n_ref++; for (int b = 0; b < 4; b++) if (open_q[b]) errors++; end
        4'h6: begin n_zq++; init_zq = init_mrs; end
        4'h7: begin n_mrs++; init_mrs = 1; end
        default: errors++;
      endcase
    end
  end

  // write data and masks on the controller's strobe
  always @(posedge dqs) wlo = db;
  always @(negedge dqs) begin
    logic [31:0] sw;
    sw = {db, wlo};
    // Strobe edges outside a write burst are ignored (the first one can be a
    // start-up artefact of the edge detector).
    if (w_left != 0) begin
      if (w_idx == 0) w_fm = sw;
      else if (w_idx == 1) w_lm = sw;
      else begin
        int k, word, sub;
        k = w_idx - 2; word = k / 8; sub = k % 8;
        w_word[sub*32 +: 32] = sw;
        data_subwords++;
        if (sub == 7) begin
          logic [255:0] old, m;
          old = rd_word(w_addr + word);
          m = '0;
          for (int i = 0; i < 32; i++) begin
            logic masked;
            masked = (word == 0 && w_fm[i]) || (word == w_n - 1 && w_lm[i]);
            if (!masked) m[i*8 +: 8] = 8'hff;
          end
          mem[w_addr + word] = (old & ~m) | (w_word & m);
          if (Debug) $display("[%0d] wr word %h m=%h fm=%h lm=%h d=%h", cycle, w_addr + word, m, w_fm, w_lm, w_word);
        end
      end
      w_idx++;
      w_left--;
    end
  end

  task automatic do_read(input logic [19:0] a, input int len);
    repeat (Rl - 1) @(posedge clk);
    db_oe = 1; dqs_oe = 1; dqs_drv = 0;          // preamble
    for (int w = 0; w <= len; w++) begin
      logic [255:0] d;
      d = rd_word(int'(a) + w);
      if (Debug) $display("[%0d] rd word %h d=%h", cycle, int'(a) + w, d);
      for (int s = 0; s < 8; s++) begin
        @(posedge clk); db_drv = d[s*32 +: 16];      dqs_drv = 1;
        @(negedge clk); db_drv = d[s*32 + 16 +: 16]; dqs_drv = 0;
        data_subwords++;
      end
    end
    @(posedge clk); db_oe = 0; dqs_oe = 0;
  endtask
endmodule
