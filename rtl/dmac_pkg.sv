// dmac_pkg -- types and constants shared by the DMAC frontend, the round-robin
// AXI arbiter and their testbenches.
//
// The descriptor is the 256-bit record a chain is built from. Its layout, in
// memory order on a little-endian 64-bit bus, is
//   beat 0: {config[31:0], length[31:0]}
//   beat 1: next      (address of the next descriptor, all ones = end of chain)
//   beat 2: source
//   beat 3: destination
// which follows the C struct {u32 length; u32 config; u64 next; u64 source;
// u64 destination;}. When a transfer completes, the first 8 bytes (beat 0) are
// overwritten with all ones, so software can poll for completion.
//
// The config word: bit 0 asks for an interrupt when the descriptor completes
// (the frontend's option). Bits 31:1 are handed to the backend untouched; their
// meaning belongs to the backend. This bit assignment is this design's choice.
//
// AXI4 channels are carried as request/response structs (one struct per
// direction). Address and data widths are 64 bits, as in the integrated system.
// Two ID widths exist: managers (frontend, backend) use MST_ID_W bits, the port
// after the round-robin arbiter carries one more bit to tell the two apart.
package dmac_pkg;

  localparam int unsigned AXI_ADDR_W = 64;
  localparam int unsigned AXI_DATA_W = 64;
  localparam int unsigned AXI_STRB_W = AXI_DATA_W / 8;
  localparam int unsigned MST_ID_W   = 2;
  localparam int unsigned SLV_ID_W   = MST_ID_W + 1;

  localparam int unsigned DESC_BYTES = 32;                       // 256-bit descriptor
  localparam int unsigned DESC_BEATS = DESC_BYTES / AXI_STRB_W;  // 4 beats on a 64-bit bus

  typedef logic [AXI_ADDR_W-1:0] addr_t;
  typedef logic [AXI_DATA_W-1:0] data_t;
  typedef logic [AXI_STRB_W-1:0] strb_t;

  localparam addr_t END_OF_CHAIN = '1;  // 'next' value of the last descriptor
  localparam data_t DONE_MARK    = '1;  // written over the first 8 bytes on completion

  localparam int unsigned CFG_IRQ_BIT = 0;

  // Descriptor as fetched from memory
  typedef struct packed {
    logic [31:0] length;
    logic [31:0] config_w;
    addr_t       next;
    addr_t       src;
    addr_t       dst;
  } desc_t;

  // Linear transfer handed to the backend
  typedef struct packed {
    logic [31:0] length;
    logic [30:0] opts;   // config[31:1], backend options
    addr_t       src;
    addr_t       dst;
  } be_req_t;

  // Descriptor as it leaves the request logic: the transfer plus what the
  // feedback logic needs (where the descriptor lives, whether to interrupt)
  typedef struct packed {
    addr_t       desc_addr;
    logic        irq;
    be_req_t     xfer;
  } fetched_desc_t;

  // ---------------- AXI4 ----------------
  typedef enum logic [1:0] {BURST_FIXED = 2'b00, BURST_INCR = 2'b01, BURST_WRAP = 2'b10} axi_burst_e;

  typedef struct packed {
    logic [MST_ID_W-1:0] id;
    addr_t               addr;
    logic [7:0]          len;
    logic [2:0]          size;
    axi_burst_e          burst;
  } mst_ax_t;

  typedef struct packed {
    logic [SLV_ID_W-1:0] id;
    addr_t               addr;
    logic [7:0]          len;
    logic [2:0]          size;
    axi_burst_e          burst;
  } slv_ax_t;

  typedef struct packed {
    data_t data;
    strb_t strb;
    logic  last;
  } axi_w_t;

  typedef struct packed {
    logic [MST_ID_W-1:0] id;
    logic [1:0]          resp;
  } mst_b_t;

  typedef struct packed {
    logic [SLV_ID_W-1:0] id;
    logic [1:0]          resp;
  } slv_b_t;

  typedef struct packed {
    logic [MST_ID_W-1:0] id;
    data_t               data;
    logic [1:0]          resp;
    logic                last;
  } mst_r_t;

  typedef struct packed {
    logic [SLV_ID_W-1:0] id;
    data_t               data;
    logic [1:0]          resp;
    logic                last;
  } slv_r_t;

  typedef struct packed {
    mst_ax_t aw; logic aw_valid;
    axi_w_t  w;  logic w_valid;
    logic    b_ready;
    mst_ax_t ar; logic ar_valid;
    logic    r_ready;
  } mst_req_t;

  typedef struct packed {
    logic   aw_ready;
    logic   w_ready;
    mst_b_t b;  logic b_valid;
    logic   ar_ready;
    mst_r_t r;  logic r_valid;
  } mst_rsp_t;

  typedef struct packed {
    slv_ax_t aw; logic aw_valid;
    axi_w_t  w;  logic w_valid;
    logic    b_ready;
    slv_ax_t ar; logic ar_valid;
    logic    r_ready;
  } slv_req_t;

  typedef struct packed {
    logic   aw_ready;
    logic   w_ready;
    slv_b_t b;  logic b_valid;
    logic   ar_ready;
    slv_r_t r;  logic r_valid;
  } slv_rsp_t;

  // ---------------- configuration register bus ----------------
  // Simple valid/ready register port: one access per handshake, response data
  // valid in the handshake cycle.
  localparam int unsigned REG_ADDR_W = 8;

  typedef struct packed {
    logic                  valid;
    logic                  write;
    logic [REG_ADDR_W-1:0] addr;
    data_t                 wdata;
    strb_t                 wstrb;
  } reg_req_t;

  typedef struct packed {
    logic  ready;
    data_t rdata;
    logic  error;
  } reg_rsp_t;

  localparam logic [REG_ADDR_W-1:0] REG_DESC_ADDR = 8'h00;  // W: launch chain at this address
  localparam logic [REG_ADDR_W-1:0] REG_STATUS    = 8'h08;  // R: status


endpackage
