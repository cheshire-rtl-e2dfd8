// cheshire_pkg: shared bus types of the memory subsystem.
//
// Defines the AXI4 channel and bundle structs used between the crossbar side
// and the last-level cache, and between the cache and the RPC DRAM frontend,
// plus the 32-bit register-bus request/response used for configuration.
// Widths follow the demonstrator configuration: 64-bit data and 48-bit
// addresses on AXI, a 32-bit register bus. The ID width (4 bits) is this
// design's own choice; the source description does not give it. Only INCR
// bursts are used; the burst, size and len fields follow AXI4 encodings.
//
// Lint note: a block compiled on its own may not use every constant here
// (burst and response codes); such unused-parameter reports are expected.
package cheshire_pkg;

  localparam int unsigned AxiAddrWidth = 48;
  localparam int unsigned AxiDataWidth = 64;
  localparam int unsigned AxiStrbWidth = AxiDataWidth / 8;
  localparam int unsigned AxiIdWidth   = 4;

  typedef logic [AxiAddrWidth-1:0] axi_addr_t;
  typedef logic [AxiDataWidth-1:0] axi_data_t;
  typedef logic [AxiStrbWidth-1:0] axi_strb_t;
  typedef logic [AxiIdWidth-1:0]   axi_id_t;

  localparam logic [1:0] AxiBurstIncr = 2'b01;
  localparam logic [1:0] AxiRespOkay  = 2'b00;
  localparam logic [1:0] AxiRespSlvErr = 2'b10;

  // Address channel, shared by AW and AR.
  typedef struct packed {
    axi_id_t   id;
    axi_addr_t addr;
    logic [7:0] len;    // beats - 1
    logic [2:0] size;   // log2(bytes per beat)
    logic [1:0] burst;
  } axi_ax_t;

  typedef struct packed {
    axi_data_t data;
    axi_strb_t strb;
    logic      last;
  } axi_w_t;

  typedef struct packed {
    axi_id_t    id;
    logic [1:0] resp;
  } axi_b_t;

  typedef struct packed {
    axi_id_t    id;
    axi_data_t  data;
    logic [1:0] resp;
    logic       last;
  } axi_r_t;

  typedef struct packed {
    axi_ax_t aw;
    logic    aw_valid;
    axi_w_t  w;
    logic    w_valid;
    logic    b_ready;
    axi_ax_t ar;
    logic    ar_valid;
    logic    r_ready;
  } axi_req_t;

  typedef struct packed {
    logic   aw_ready;
    logic   w_ready;
    axi_b_t b;
    logic   b_valid;
    logic   ar_ready;
    axi_r_t r;
    logic   r_valid;
  } axi_rsp_t;

  // 32-bit register bus: a request is held with valid until ready.
  typedef struct packed {
    logic [31:0] addr;
    logic        write;
    logic [31:0] wdata;
    logic        valid;
  } reg_req_t;

  typedef struct packed {
    logic [31:0] rdata;
    logic        error;
    logic        ready;
  } reg_rsp_t;

endpackage
