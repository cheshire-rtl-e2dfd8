// cheshire_llc: last-level cache in front of the RPC DRAM, whose ways can
// each be switched at runtime to serve as scratchpad memory (SPM).
//
// Organisation: NumWays ways of SpmBytes/NumWays bytes, 32-byte lines (one
// RPC DRAM word), write-back and write-allocate. The same data array is the
// cache and the SPM: a way whose bit is set in the SPM-enable register is
// taken out of the cache and appears, way after way, in the SPM address
// window starting at SpmBase; the DRAM window [DramBase, DramBase+DramBytes)
// is cached in the remaining ways. Before a way becomes SPM its dirty lines
// are written back and its lines invalidated (the switch completes in the
// background; register 1 reads 1 while it is pending). With no cache way
// left, DRAM accesses pass through uncached, one beat at a time.
//
// Operation: one AXI transaction at a time (a waiting AW always before a
// waiting AR), handled beat by beat. Each beat looks up its
// line; a miss writes back a dirty victim (4-beat AXI burst), refills the
// line (4-beat burst), then serves the beat. Victims are chosen round-robin
// over cache ways. A hit costs one cycle per beat. Beats outside both
// windows, or in the window of a way that is not SPM, answer SLVERR.
// Configuration registers (32-bit register bus): 0 = SPM-enable mask
// (read/write), 1 = switch pending (read-only).
//
// The source description gives only the function: a configurable LLC whose
// ways can individually become SPM at runtime, with 128 KiB of SPM in the
// demonstrator. Way count, line size, replacement, write policy, address
// windows, register map and the per-beat organisation are this design's own.
//
// Lint note: the latched AXI request's address and burst fields are never
// read (a separate beat-address register walks the burst); they are kept
// in the struct for clarity and removed by synthesis.
module cheshire_llc
  import cheshire_pkg::*;
#(
  parameter int unsigned SpmBytes  = 131072,
  parameter int unsigned NumWays   = 8,
  parameter int unsigned LineBytes = 32,
  parameter axi_addr_t   SpmBase   = 48'h0000_1000_0000,
  parameter axi_addr_t   DramBase  = 48'h0000_8000_0000,
  parameter longint unsigned DramBytes = 64'd33554432
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  // from the crossbar
  input  axi_req_t slv_req_i,
  output axi_rsp_t slv_rsp_o,
  // to the DRAM interface
  output axi_req_t mst_req_o,
  input  axi_rsp_t mst_rsp_i,
  // configuration
  input  reg_req_t reg_req_i,
  output reg_rsp_t reg_rsp_o
);
  localparam int unsigned WayBytes  = SpmBytes / NumWays;
  localparam int unsigned Sets      = WayBytes / LineBytes;
  localparam int unsigned Beats     = LineBytes / AxiStrbWidth;          // 4
  localparam int unsigned OffW      = $clog2(LineBytes);
  localparam int unsigned SetW      = $clog2(Sets);
  localparam int unsigned BeatW     = $clog2(Beats);
  localparam int unsigned WayW      = $clog2(NumWays);
  localparam int unsigned TagW      = $clog2(DramBytes) - $clog2(WayBytes);
  localparam int unsigned Lines     = NumWays * Sets;
  localparam int unsigned Words     = Lines * Beats;

  typedef logic [WayW-1:0]  way_t;
  typedef logic [SetW-1:0]  set_t;
  typedef logic [TagW-1:0]  tag_t;
  typedef logic [$clog2(Words)-1:0] widx_t;
  typedef logic [$clog2(Lines)-1:0] lidx_t;

  // ---------------- storage ----------------
  axi_data_t           data_q [Words];
  tag_t                tag_q  [Lines];
  logic [Lines-1:0]    valid_q, dirty_q;
  logic [NumWays-1:0]  spm_q, spm_req_q;

  function automatic lidx_t lidx(way_t w, set_t s);
    return lidx_t'({w, s});
  endfunction
  function automatic widx_t widx(way_t w, set_t s, logic [BeatW-1:0] b);
    return widx_t'({w, s, b});
  endfunction

  // ---------------- configuration registers ----------------
  logic switch_pending;
  assign switch_pending = (spm_q != spm_req_q);
  always_comb begin
    reg_rsp_o.ready = reg_req_i.valid;
    reg_rsp_o.error = reg_req_i.valid && (reg_req_i.addr[3:2] > 2'd1 || (reg_req_i.addr[2] && reg_req_i.write));
    reg_rsp_o.rdata = reg_req_i.addr[2] ? 32'(switch_pending) : 32'(spm_req_q);
  end

  // ---------------- transaction FSM ----------------
  typedef enum logic [3:0] {
    Idle, Beat, WbAw, WbW, WbB, RfAr, RfR, BypAx, BypW, BypB, BypR, Flush, Resp
  } state_e;
  state_e     state_q;
  logic       is_write_q, err_q, flushing_q;
  axi_ax_t    txn_q;
  axi_addr_t  baddr_q;           // current beat address
  logic [7:0] bcnt_q;
  way_t       victim_q, rr_q;
  logic [1:0] cnt_q;             // beat counter for line transfers
  set_t       fset_q;            // flush set counter
  way_t       fway_q;

  // beat decode
  logic       in_spm, in_dram, hit, spm_ok, no_cache;
  axi_addr_t  spm_off, dram_off;
  way_t       hit_way, spm_way;
  set_t       bset;
  tag_t       btag;
  logic [BeatW-1:0] bbeat;
  way_t       acc_way;
  widx_t      acc_idx;

  assign spm_off  = baddr_q - SpmBase;
  assign dram_off = baddr_q - DramBase;
  assign in_spm   = (baddr_q >= SpmBase) && (spm_off < axi_addr_t'(SpmBytes));
  assign in_dram  = (baddr_q >= DramBase) && (dram_off < axi_addr_t'(DramBytes));
  assign spm_way  = way_t'(spm_off >> $clog2(WayBytes));
  assign spm_ok   = spm_q[spm_way];
  assign bset     = in_spm ? set_t'(spm_off >> OffW) : set_t'(dram_off >> OffW);
  assign bbeat    = baddr_q[OffW-1 -: BeatW];
  assign btag     = tag_t'(dram_off >> $clog2(WayBytes));
  assign no_cache = (spm_q == '1);

  always_comb begin
    hit     = 1'b0;
    hit_way = '0;
    for (int unsigned w = 0; w < NumWays; w++) begin
      if (!spm_q[w] && valid_q[lidx(way_t'(w), bset)] && tag_q[lidx(way_t'(w), bset)] == btag) begin
        hit     = 1'b1;
        hit_way = way_t'(w);
      end
    end
  end

  assign acc_way = in_spm ? spm_way : hit_way;
  assign acc_idx = widx(acc_way, bset, bbeat);

  // next round-robin victim among cache ways
  function automatic way_t next_victim(way_t cur, logic [NumWays-1:0] spm);
    way_t w;
    w = cur;
    for (int unsigned i = 0; i < NumWays; i++) begin
      w = way_t'(w + 1'b1);
      if (!spm[w]) return w;
    end
    return cur;
  endfunction

  logic beat_go;          // the current beat is served this cycle
  logic beat_ok;          // the beat hits SPM or cache
  logic beat_err;
  assign beat_err = !(in_spm && spm_ok) && !in_dram;
  assign beat_ok  = (in_spm && spm_ok) || (in_dram && hit);

  // subordinate side outputs
  always_comb begin
    slv_rsp_o          = '0;
    slv_rsp_o.aw_ready = (state_q == Idle) && !switch_pending && slv_req_i.aw_valid;
    slv_rsp_o.ar_ready = (state_q == Idle) && !switch_pending && !slv_req_i.aw_valid && slv_req_i.ar_valid;
    slv_rsp_o.b        = '{id: txn_q.id, resp: err_q ? AxiRespSlvErr : AxiRespOkay};
    slv_rsp_o.b_valid  = (state_q == Resp);
    slv_rsp_o.r.id     = txn_q.id;
    slv_rsp_o.r.last   = (bcnt_q == txn_q.len);
    slv_rsp_o.r.data   = '0;
    slv_rsp_o.r.resp   = AxiRespOkay;
    if (state_q == Beat && !is_write_q) begin
      if (beat_err) begin
        slv_rsp_o.r_valid = 1'b1;
        slv_rsp_o.r.resp  = AxiRespSlvErr;
      end else if (beat_ok) begin
        slv_rsp_o.r_valid = 1'b1;
        slv_rsp_o.r.data  = data_q[acc_idx];
      end
    end
    if (state_q == BypR && mst_rsp_i.r_valid) begin
      slv_rsp_o.r_valid = 1'b1;
      slv_rsp_o.r.data  = mst_rsp_i.r.data;
      slv_rsp_o.r.resp  = mst_rsp_i.r.resp;
    end
    if (state_q == Beat && is_write_q) slv_rsp_o.w_ready = beat_err || beat_ok;
    if (state_q == BypW) slv_rsp_o.w_ready = mst_rsp_i.w_ready;
  end

  assign beat_go = (state_q == Beat) &&
                   ((is_write_q && slv_req_i.w_valid && (beat_err || beat_ok)) ||
                    (!is_write_q && slv_req_i.r_ready && (beat_err || beat_ok)));

  // manager side outputs
  axi_addr_t line_addr, victim_addr, beat_line;
  assign beat_line   = {baddr_q[AxiAddrWidth-1:OffW], {OffW{1'b0}}};
  assign victim_addr = DramBase + axi_addr_t'({tag_q[lidx(victim_q, bset)], bset, {OffW{1'b0}}});
  assign line_addr   = (state_q == Flush || state_q == WbAw || state_q == WbW) ? victim_addr : beat_line;

  always_comb begin
    mst_req_o = '0;
    mst_req_o.aw = '{id: '0, addr: line_addr, len: 8'(Beats - 1), size: 3'd3, burst: AxiBurstIncr};
    mst_req_o.ar = '{id: '0, addr: beat_line, len: 8'(Beats - 1), size: 3'd3, burst: AxiBurstIncr};
    mst_req_o.w  = '{data: data_q[widx(victim_q, bset, cnt_q)], strb: '1, last: (cnt_q == 2'(Beats - 1))};
    unique case (state_q)
      WbAw:  mst_req_o.aw_valid = 1'b1;
      WbW:   mst_req_o.w_valid  = 1'b1;
      WbB:   mst_req_o.b_ready  = 1'b1;
      RfAr:  mst_req_o.ar_valid = 1'b1;
      RfR:   mst_req_o.r_ready  = 1'b1;
      BypAx: begin
        mst_req_o.aw.addr = baddr_q; mst_req_o.aw.len = '0; mst_req_o.aw.size = txn_q.size;
        mst_req_o.ar.addr = baddr_q; mst_req_o.ar.len = '0; mst_req_o.ar.size = txn_q.size;
        mst_req_o.aw_valid = is_write_q;
        mst_req_o.ar_valid = !is_write_q;
      end
      BypW: begin
        mst_req_o.w = '{data: slv_req_i.w.data, strb: slv_req_i.w.strb, last: 1'b1};
        mst_req_o.w_valid = slv_req_i.w_valid;
      end
      BypB:  mst_req_o.b_ready = 1'b1;
      BypR:  mst_req_o.r_ready = slv_req_i.r_ready;
      default: ;
    endcase
  end

  function automatic axi_addr_t next_beat(axi_addr_t a, logic [2:0] size);
    axi_addr_t n;
    n = axi_addr_t'(1) << size;
    return (a & ~(n - 1'b1)) + n;
  endfunction

  // data and tag arrays: written without reset so that they map to memories
  always_ff @(posedge clk_i) begin
    if (beat_go && is_write_q && !beat_err) begin
      for (int unsigned b = 0; b < AxiStrbWidth; b++)
        if (slv_req_i.w.strb[b]) data_q[acc_idx][b*8 +: 8] <= slv_req_i.w.data[b*8 +: 8];
    end
    if (state_q == RfR && mst_rsp_i.r_valid) begin
      data_q[widx(victim_q, bset, cnt_q)] <= mst_rsp_i.r.data;
      if (cnt_q == 2'(Beats - 1)) tag_q[lidx(victim_q, bset)] <= btag;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q    <= Idle;
      is_write_q <= 1'b0;
      flushing_q <= 1'b0;
      err_q      <= 1'b0;
      txn_q      <= '0;
      baddr_q    <= '0;
      bcnt_q     <= '0;
      victim_q   <= '0;
      rr_q       <= '0;
      cnt_q      <= '0;
      fset_q     <= '0;
      fway_q     <= '0;
      valid_q    <= '0;
      dirty_q    <= '0;
      spm_q      <= '0;
      spm_req_q  <= '0;
    end else begin
      if (reg_req_i.valid && reg_req_i.write && reg_req_i.addr[3:2] == 2'd0)
        spm_req_q <= reg_req_i.wdata[NumWays-1:0];
      unique case (state_q)
        Idle: begin
          if (slv_rsp_o.aw_ready || slv_rsp_o.ar_ready) begin
            is_write_q <= slv_rsp_o.aw_ready;
            txn_q      <= slv_rsp_o.aw_ready ? slv_req_i.aw : slv_req_i.ar;
            baddr_q    <= slv_rsp_o.aw_ready ? slv_req_i.aw.addr : slv_req_i.ar.addr;
            bcnt_q     <= '0;
            err_q      <= 1'b0;
            state_q    <= Beat;
          end else if (switch_pending) begin
            // ways leaving the cache are cleaned first; ways joining it are already invalid
            for (int unsigned w = 0; w < NumWays; w++) begin
              if (spm_req_q[w] && !spm_q[w]) fway_q <= way_t'(w);
            end
            if ((spm_req_q & ~spm_q) == '0) spm_q <= spm_req_q;
            else begin
              fset_q     <= '0;
              flushing_q <= 1'b1;
              state_q    <= Flush;
            end
          end
        end
        Flush: begin
          // write back and invalidate line fset_q of way fway_q
          victim_q <= fway_q;
          baddr_q  <= DramBase + axi_addr_t'({fset_q, {OffW{1'b0}}});
          if (valid_q[lidx(fway_q, fset_q)] && dirty_q[lidx(fway_q, fset_q)]) begin
            cnt_q   <= '0;
            state_q <= WbAw;
            dirty_q[lidx(fway_q, fset_q)] <= 1'b0;
          end else begin
            valid_q[lidx(fway_q, fset_q)] <= 1'b0;
            fset_q <= fset_q + 1'b1;
            if (fset_q == set_t'(Sets - 1)) begin
              spm_q[fway_q] <= 1'b1;
              flushing_q    <= 1'b0;
              state_q       <= Idle;
            end
          end
        end
        Beat: begin
          if (beat_go) begin
            if (beat_err) err_q <= 1'b1;
            else if (is_write_q && !in_spm) dirty_q[lidx(acc_way, bset)] <= 1'b1;
            baddr_q <= next_beat(baddr_q, txn_q.size);
            bcnt_q  <= bcnt_q + 1'b1;
            if (bcnt_q == txn_q.len) state_q <= is_write_q ? Resp : Idle;
          end else if (!beat_err && !beat_ok && in_dram) begin
            if (no_cache) begin
              state_q <= BypAx;
            end else begin
              // miss: choose a victim, write it back if dirty, then refill
              victim_q <= next_victim(rr_q, spm_q);
              rr_q     <= next_victim(rr_q, spm_q);
              cnt_q    <= '0;
              state_q  <= (valid_q[lidx(next_victim(rr_q, spm_q), bset)] &&
                           dirty_q[lidx(next_victim(rr_q, spm_q), bset)]) ? WbAw : RfAr;
            end
          end
        end
        WbAw: if (mst_rsp_i.aw_ready) state_q <= WbW;
        WbW: if (mst_rsp_i.w_ready) begin
          cnt_q <= cnt_q + 1'b1;
          if (cnt_q == 2'(Beats - 1)) state_q <= WbB;
        end
        WbB: if (mst_rsp_i.b_valid) begin
          if (flushing_q) begin
            // flush in progress: invalidate and go on with the next set
            valid_q[lidx(fway_q, fset_q)] <= 1'b0;
            fset_q <= fset_q + 1'b1;
            if (fset_q == set_t'(Sets - 1)) begin
              spm_q[fway_q] <= 1'b1;
              flushing_q    <= 1'b0;
              state_q       <= Idle;
            end else state_q <= Flush;
          end else begin
            state_q <= RfAr;
          end
        end
        RfAr: if (mst_rsp_i.ar_ready) begin
          cnt_q   <= '0;
          state_q <= RfR;
          valid_q[lidx(victim_q, bset)] <= 1'b0;
        end
        RfR: if (mst_rsp_i.r_valid) begin
          cnt_q <= cnt_q + 1'b1;
          if (cnt_q == 2'(Beats - 1)) begin
            valid_q[lidx(victim_q, bset)] <= 1'b1;
            dirty_q[lidx(victim_q, bset)] <= 1'b0;
            state_q <= Beat;
          end
        end
        BypAx: if ((is_write_q && mst_rsp_i.aw_ready) || (!is_write_q && mst_rsp_i.ar_ready))
          state_q <= is_write_q ? BypW : BypR;
        BypW: if (slv_req_i.w_valid && mst_rsp_i.w_ready) state_q <= BypB;
        BypB: if (mst_rsp_i.b_valid) begin
          if (mst_rsp_i.b.resp != AxiRespOkay) err_q <= 1'b1;
          baddr_q <= next_beat(baddr_q, txn_q.size);
          bcnt_q  <= bcnt_q + 1'b1;
          state_q <= (bcnt_q == txn_q.len) ? Resp : Beat;
        end
        BypR: if (mst_rsp_i.r_valid && slv_req_i.r_ready) begin
          baddr_q <= next_beat(baddr_q, txn_q.size);
          bcnt_q  <= bcnt_q + 1'b1;
          state_q <= (bcnt_q == txn_q.len) ? Idle : Beat;
        end
        Resp: if (slv_req_i.b_ready) state_q <= Idle;
        default: state_q <= Idle;
      endcase
    end
  end
endmodule
