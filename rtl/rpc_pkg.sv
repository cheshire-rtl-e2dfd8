// rpc_pkg: constants, types and the command encoding of the RPC DRAM interface.
//
// An RPC DRAM word is 256 bits (32 bytes); on the 16-bit double-data-rate
// data bus (DB) it takes eight clock cycles, one 32-bit subword per cycle.
// The frontend and controller exchange whole words over the non-stallable
// request-response protocol (NSRRP) defined by the structs below. The word
// size, the subword size, the 16-bit DB and the 2 KiB transfer boundary
// follow the source description. The 32 MiB device and its split into
// 4 banks x 4096 rows x 64 words, the 32-bit command packet layout and the
// default timing values are this design's own choices: the device datasheet
// they would come from is not part of the description.
//
// Lint note: the bank/row/column helper functions each read only their own
// bits of the address argument; the other bits are unused by design.
//
// Constants that a block compiled on its own does not use (e.g. the DB
// width) show up as unused parameters there; that is expected.
package rpc_pkg;

  localparam int unsigned WordBits      = 256;
  localparam int unsigned WordBytes     = WordBits / 8;        // 32
  localparam int unsigned SubwordBits   = 32;
  localparam int unsigned DbWidth       = 16;
  localparam int unsigned RowBytes      = 2048;                 // 2 KiB boundary
  localparam int unsigned WordsPerRow   = RowBytes / WordBytes; // 64
  localparam int unsigned DramBytes     = 32 * 1024 * 1024;     // 32 MiB device
  localparam int unsigned ByteAddrWidth = $clog2(DramBytes);    // 25
  localparam int unsigned WordAddrWidth = ByteAddrWidth - $clog2(WordBytes); // 20
  localparam int unsigned ColWidth      = $clog2(WordsPerRow);  // 6
  localparam int unsigned BankWidth     = 2;
  localparam int unsigned RowWidth      = WordAddrWidth - ColWidth - BankWidth; // 12
  localparam int unsigned LenWidth      = ColWidth;             // words - 1 within one row

  typedef logic [WordBits-1:0]      word_t;
  typedef logic [WordBytes-1:0]     wmask_t;   // one bit per byte of a word
  typedef logic [SubwordBits-1:0]   subword_t;
  typedef logic [WordAddrWidth-1:0] waddr_t;
  typedef logic [LenWidth-1:0]      len_t;

  // Word descriptor before splitting: may cross 2 KiB rows.
  // nwords counts words minus one; strobes are those of the first and last word.
  typedef struct packed {
    logic        write;
    waddr_t      addr;
    logic [7:0]  nwords;
    wmask_t      first_strb;
    wmask_t      last_strb;
  } desc_t;

  // NSRRP request: one transfer inside one 2 KiB row.
  // Mask bits are 1 for bytes that must NOT be written (DDR-style data mask).
  typedef struct packed {
    logic   write;
    waddr_t addr;
    len_t   len;          // words - 1
    wmask_t first_mask;
    wmask_t last_mask;
  } nsrrp_req_t;

  typedef enum logic [3:0] {
    OpNop = 4'h0,
    OpAct = 4'h1,
    OpRd  = 4'h2,
    OpWr  = 4'h3,
    OpPre = 4'h4,
    OpRef = 4'h5,
    OpZq  = 4'h6,
    OpMrs = 4'h7
  } rpc_op_e;

  typedef struct packed {
    rpc_op_e                op;
    logic [BankWidth-1:0]   bank;
    logic [RowWidth-1:0]    row;
    logic [ColWidth-1:0]    col;
    len_t                   len;
    logic [15:0]            mode;  // mode-register value for OpMrs, long/short flag for OpZq
  } rpc_cmd_t;

  // Management request from the manager to the command FSM.
  typedef enum logic [1:0] {
    MgmtRef = 2'd0,
    MgmtZqShort = 2'd1,
    MgmtZqLong = 2'd2,
    MgmtMrs = 2'd3
  } mgmt_op_e;

  // Timing configuration, in controller clock cycles.
  typedef struct packed {
    logic [7:0]  t_rcd;    // ACT to RD/WR
    logic [7:0]  t_rp;     // PRE to next command
    logic [7:0]  t_ras;    // ACT to PRE
    logic [7:0]  t_wr;     // end of write data to PRE
    logic [7:0]  t_rfc;    // REF to next command
    logic [15:0] t_refi;   // refresh interval
    logic [31:0] t_zqi;    // short ZQ calibration interval
    logic [7:0]  t_zqcs;   // ZQ calibration duration
    logic [31:0] t_init;   // power-up wait before the first command
    logic [3:0]  rl;       // read latency: RD to first data cycle
    logic [3:0]  wl;       // write latency: WR to first mask cycle
    logic [15:0] mode;     // mode-register value written at init
    logic [5:0]  tx_tap;   // transmit strobe delay-line tap (90 degrees)
    logic [5:0]  rx_tap;   // receive strobe delay-line tap
  } rpc_cfg_t;

  // Word address split: col = [5:0], row = [17:6], bank = [19:18].
  function automatic logic [BankWidth-1:0] addr_bank(waddr_t a);
    return a[WordAddrWidth-1 -: BankWidth];
  endfunction
  function automatic logic [RowWidth-1:0] addr_row(waddr_t a);
    return a[ColWidth +: RowWidth];
  endfunction
  function automatic logic [ColWidth-1:0] addr_col(waddr_t a);
    return a[ColWidth-1:0];
  endfunction

  // 32-bit command packet on DB: [31:28] op, [27:26] bank, then
  //   ACT:    [25:14] row
  //   RD/WR:  [25:20] col, [19:14] len (words - 1)
  //   MRS/ZQ: [15:0] mode
  function automatic subword_t encode_cmd(rpc_cmd_t c);
    subword_t p;
    p = '0;
    p[31:28] = c.op;
    p[27:26] = c.bank;
    unique case (c.op)
      OpAct:        p[25:14] = c.row;
      OpRd, OpWr:   begin p[25:20] = c.col; p[19:14] = c.len; end
      OpMrs, OpZq:  p[15:0] = c.mode;
      default: ;
    endcase
    return p;
  endfunction

endpackage
