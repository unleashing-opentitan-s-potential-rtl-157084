// ot_pkg: types and constants shared by the secure-element extensions.
//
// The bus types model three on-chip protocols:
//  * TL-UL (TileLink Uncached Lightweight), the OpenTitan system bus. Only the
//    fields the extensions use are kept (no integrity/user bits); the A and D
//    channels are bundled as {valid, payload, ready-of-the-other-channel}.
//  * A TCDM-style memory port (req/gnt, read data valid exactly one cycle
//    after the grant, for reads and writes alike). It is used for the TCDM
//    banks and for every register file.
//  * AXI4 with 32-bit data, 32-bit addresses and 4-bit IDs, as a request /
//    response struct pair (master drives axi_req_t, slave drives axi_rsp_t).
// The address map constants are this implementation's choice; the paper
// only states that the map of OpenTitan must be adapted to the host SoC.
package ot_pkg;

  // ---------------------------------------------------------------- TL-UL
  typedef enum logic [2:0] {
    PutFullData    = 3'h0,
    PutPartialData = 3'h1,
    Get            = 3'h4
  } tl_a_op_e;

  typedef enum logic [2:0] {
    AccessAck     = 3'h0,
    AccessAckData = 3'h1
  } tl_d_op_e;

  typedef struct packed {
    tl_a_op_e    opcode;
    logic [1:0]  size;     // log2 of the number of bytes
    logic [7:0]  source;
    logic [31:0] address;
    logic [3:0]  mask;
    logic [31:0] data;
  } tl_a_t;

  typedef struct packed {
    tl_d_op_e    opcode;
    logic [1:0]  size;
    logic [7:0]  source;
    logic [31:0] data;
    logic        error;
  } tl_d_t;

  typedef struct packed {
    logic  a_valid;
    tl_a_t a;
    logic  d_ready;
  } tl_h2d_t;

  typedef struct packed {
    logic  d_valid;
    tl_d_t d;
    logic  a_ready;
  } tl_d2h_t;

  localparam tl_h2d_t TL_H2D_IDLE = '{a_valid: 1'b0, a: '0, d_ready: 1'b1};
  localparam tl_d2h_t TL_D2H_IDLE = '{d_valid: 1'b0, d: '0, a_ready: 1'b1};

  // ------------------------------------------------------ TCDM memory port
  typedef struct packed {
    logic        req;
    logic        we;
    logic [31:0] addr;   // byte address
    logic [31:0] wdata;
    logic [3:0]  be;
  } mem_req_t;

  typedef struct packed {
    logic        gnt;
    logic        rvalid;  // one cycle after gnt
    logic [31:0] rdata;
  } mem_rsp_t;

  // ------------------------------------------------------------------ AXI4
  localparam int unsigned AxiIdW   = 4;
  localparam int unsigned AxiAddrW = 32;
  localparam int unsigned AxiDataW = 32;

  localparam logic [1:0] AXI_BURST_FIXED = 2'b00;
  localparam logic [1:0] AXI_BURST_INCR  = 2'b01;
  localparam logic [1:0] AXI_RESP_OKAY   = 2'b00;
  localparam logic [1:0] AXI_RESP_SLVERR = 2'b10;

  typedef struct packed {
    logic [AxiIdW-1:0]   id;
    logic [AxiAddrW-1:0] addr;
    logic [7:0]          len;    // beats - 1
    logic [2:0]          size;   // log2 bytes per beat
    logic [1:0]          burst;
  } axi_ax_t;

  typedef struct packed {
    logic [AxiDataW-1:0]   data;
    logic [AxiDataW/8-1:0] strb;
    logic                  last;
  } axi_w_t;

  typedef struct packed {
    logic [AxiIdW-1:0] id;
    logic [1:0]        resp;
  } axi_b_t;

  typedef struct packed {
    logic [AxiIdW-1:0]   id;
    logic [AxiDataW-1:0] data;
    logic [1:0]          resp;
    logic                last;
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

  // ----------------------------------------------------- address map (own)
  // Devices on the OpenTitan TL-UL crossbar added by the extensions.
  localparam logic [31:0] DMA_BASE     = 32'h4300_0000;  // 4 KiB
  localparam logic [31:0] BOOTMGR_BASE = 32'h4310_0000;  // 4 KiB
  localparam logic [31:0] FLASHDW_BASE = 32'h4320_0000;  // 4 KiB
  localparam logic [31:0] TCDM_BASE    = 32'h4400_0000;  // 32 KiB
  localparam logic [31:0] EXT_BASE     = 32'h8000_0000;  // host SoC window
  // SCMI mailbox, in the host SoC address space.
  localparam logic [31:0] MBOX_BASE    = 32'h9000_0000;  // 4 KiB

  localparam logic [31:0] MASK_4K      = 32'hFFFF_F000;
  localparam logic [31:0] MASK_32K     = 32'hFFFF_8000;
  localparam logic [31:0] MASK_2G      = 32'h8000_0000;

endpackage
