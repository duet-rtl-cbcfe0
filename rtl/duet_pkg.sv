// duet_pkg: types and constants shared by the Duet Adapter blocks.
//
// The Duet Adapter sits between a cache-coherent manycore NoC (processor clock) and an
// embedded FPGA (slow clock). This package defines the message formats that cross the
// clock boundary (memory-hub requests/responses, soft-register messages), the MMIO
// bundle that processors use to reach the adapter, and the simplified NoC coherence
// messages of the Proxy Cache.
//
// Numbers that follow the paper: 16-byte cache lines, 8-byte (quad-word) stores and MMIO
// data, 8 KB private cache. Everything else (address widths, encodings, register map) is
// this design's own choice and is marked "assumed".
package duet_pkg;

  // ---------------- sizes ----------------
  localparam int unsigned PADDR_W    = 40;  // assumed: physical address width
  localparam int unsigned VADDR_W    = 39;  // assumed: RISC-V Sv39 virtual address width
  localparam int unsigned PAGE_OFF_W = 12;  // assumed: 4 KB pages
  localparam int unsigned VPN_W      = VADDR_W - PAGE_OFF_W;  // 27
  localparam int unsigned PPN_W      = PADDR_W - PAGE_OFF_W;  // 28
  localparam int unsigned LINE_BYTES = 16;  // paper: "the cache line size is 16 Bytes"
  localparam int unsigned LINE_W     = LINE_BYTES * 8;
  localparam int unsigned OFF_W      = $clog2(LINE_BYTES);
  localparam int unsigned WORD_W     = 64;  // paper: stores up to 8 bytes; 64-bit MMIO data
  localparam int unsigned MMIO_ADDR_W = 16; // assumed: adapter-local MMIO offset width
  localparam int unsigned SREG_IDX_W = 4;   // assumed: 16 soft registers per Control Hub

  // Value returned to processors while a hub is deactivated ("bogus data").
  localparam logic [WORD_W-1:0] BOGUS_DATA = 64'hDEAD_DEAD_DEAD_DEAD;  // assumed value

  // ---------------- processor MMIO bundle ----------------
  typedef struct packed {
    logic                   we;     // 1 = store, 0 = load
    logic [MMIO_ADDR_W-1:0] addr;   // byte offset inside the adapter window
    logic [WORD_W-1:0]      wdata;
  } mmio_req_t;

  typedef struct packed {
    logic [WORD_W-1:0] rdata;       // load data (don't care for stores)
  } mmio_resp_t;

  // ---------------- Memory Hub: eFPGA <-> Proxy Cache ----------------
  // Paper: two request types (Load, Store), three response types (LoadAck, StoreAck, Inv).
  typedef enum logic [0:0] { MREQ_LOAD = 1'b0, MREQ_STORE = 1'b1 } mreq_type_e;

  typedef struct packed {
    mreq_type_e           typ;
    logic [VADDR_W-1:0]   addr;    // virtual when the TLB is on, else physical (low bits)
    logic [WORD_W-1:0]    data;    // store data, aligned to the 8-byte word at addr
    logic [7:0]           be;      // store byte enables
    logic                 parity;  // even parity over all the fields above (assumed)
  } mreq_t;

  typedef enum logic [1:0] { MRESP_LOAD_ACK = 2'd0, MRESP_STORE_ACK = 2'd1, MRESP_INV = 2'd2 } mresp_type_e;

  typedef struct packed {
    mresp_type_e          typ;
    logic [VADDR_W-1:0]   addr;    // line address as the eFPGA knows it (virtual if TLB on)
    logic [LINE_W-1:0]    data;    // line data (LoadAck; StoreAck when write-allocate)
  } mresp_t;

  // ---------------- Proxy Cache <-> NoC (simplified coherence) ----------------
  typedef enum logic [1:0] { NOC_GETS = 2'd0, NOC_GETM = 2'd1, NOC_PUTM = 2'd2 } noc_req_type_e;
  typedef struct packed {
    noc_req_type_e        typ;
    logic [PADDR_W-1:0]   addr;   // line-aligned
    logic [LINE_W-1:0]    data;   // write-back data for PUTM
  } noc_req_t;

  typedef struct packed {
    logic [LINE_W-1:0]    data;   // fill data for GETS/GETM, ignored for PUTM
  } noc_resp_t;

  typedef enum logic [0:0] { FWD_INV = 1'b0, FWD_DOWNGRADE = 1'b1 } noc_fwd_type_e;
  typedef struct packed {
    noc_fwd_type_e        typ;
    logic [PADDR_W-1:0]   addr;
  } noc_fwd_t;

  typedef struct packed {
    logic [PADDR_W-1:0]   addr;
    logic                 dirty;  // data holds the modified line
    logic [LINE_W-1:0]    data;
  } noc_fwd_ack_t;

  // ---------------- Soft Register Interface messages ----------------
  // NoC -> FPGA: normal write, normal read, sync of a shadowed write.
  typedef enum logic [1:0] { SR_WR = 2'd0, SR_RD = 2'd1, SR_SYNC = 2'd2 } sr_down_type_e;
  typedef struct packed {
    sr_down_type_e          typ;
    logic [SREG_IDX_W-1:0]  idx;
    logic [WORD_W-1:0]      data;
  } sr_down_t;

  // FPGA -> NoC: write ack, read data, sync of a shadowed register (accelerator write/push).
  typedef enum logic [1:0] { SR_ACK = 2'd0, SR_RDATA = 2'd1, SR_PUSH = 2'd2 } sr_up_type_e;
  typedef struct packed {
    sr_up_type_e            typ;
    logic [SREG_IDX_W-1:0]  idx;
    logic [WORD_W-1:0]      data;
    logic                   parity;  // even parity over the fields above (assumed)
  } sr_up_t;

  // Shadow register types (paper Sec. "Shadow Registers").
  typedef enum logic [2:0] {
    SREG_NORMAL     = 3'd0,
    SREG_PLAIN      = 3'd1,
    SREG_FPGA_FIFO  = 3'd2,
    SREG_CPU_FIFO   = 3'd3,
    SREG_TOKEN_FIFO = 3'd4
  } sreg_type_e;

  // Error codes latched by the exception handlers (assumed encoding).
  typedef enum logic [1:0] {
    ERR_NONE    = 2'd0,
    ERR_TIMEOUT = 2'd1,
    ERR_PARITY  = 2'd2
  } err_code_e;

endpackage
