// svm_pkg: types and constants shared by the shared-virtual-memory (SVM) path of an
// accelerator cluster: the hybrid IOMMU, the miss-tolerant DMA engine and its
// retirement buffer.
//
// Addresses are 32 bit with 4 KiB pages, so a page number is 20 bit. The AXI data bus
// is 64 bit, so a 2 KiB burst is 256 beats and its AXI length fits in 8 bit. The AXI
// ID is 4 bit: the DMA uses the low 3 bit and the network multiplexer puts the master
// index into the top bit. One AXI user bit marks a prefetch transaction. The page
// size, the 32-bit virtual address, the 3-bit ID, the 8-bit length and the user-bit
// prefetch flag follow the paper; the 64-bit data bus and the 4-bit network ID are
// this design's own choices. The L1 address is 18 bit (256 KiB) in bytes and 16 bit
// in 32-bit words, the width the retirement buffer stores.
// Lint note: when a module that does not use the response codes is linted on its own,
// RESP_OKAY/RESP_SLVERR are reported as unused; they are used by the IOMMU and the DMA.
package svm_pkg;

  localparam int unsigned ADDR_W    = 32;
  localparam int unsigned DATA_W    = 64;
  localparam int unsigned STRB_W    = DATA_W / 8;
  localparam int unsigned ID_W      = 4;
  localparam int unsigned DMA_ID_W  = 3;
  localparam int unsigned PAGE_W    = 12;               // 4 KiB pages
  localparam int unsigned PN_W      = ADDR_W - PAGE_W;  // page number width
  localparam int unsigned L1_AW     = 18;               // L1 byte address: 256 KiB
  localparam int unsigned LOC_W     = L1_AW - 2;        // L1 address of 32-bit words

  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [PN_W-1:0]   pn_t;
  typedef logic [ID_W-1:0]   id_t;

  localparam logic [1:0] RESP_OKAY   = 2'b00;
  localparam logic [1:0] RESP_SLVERR = 2'b10;

  // AXI address channel (AR and AW); user = 1 marks a TLB prefetch.
  typedef struct packed {
    id_t        id;
    addr_t      addr;
    logic [7:0] len;
    logic       user;
  } ax_t;

  typedef struct packed {
    logic [DATA_W-1:0] data;
    logic [STRB_W-1:0] strb;
    logic              last;
  } w_t;

  typedef struct packed {
    id_t               id;
    logic [DATA_W-1:0] data;
    logic [1:0]        resp;
    logic              last;
  } r_t;

  typedef struct packed {
    id_t        id;
    logic [1:0] resp;
  } b_t;

  // State of a retirement-buffer entry (3 bit, as counted by the paper).
  typedef enum logic [2:0] {
    RB_FREE       = 3'd0,
    RB_INFLIGHT   = 3'd1,
    RB_FAILED     = 3'd2,
    RB_PEEKED     = 3'd3,
    RB_REISSUABLE = 3'd4
  } rb_state_e;

  // Metadata needed to identify and reissue one DMA burst.
  typedef struct packed {
    addr_t                ext_addr;  // cluster-external (virtual) address
    logic [LOC_W-1:0]     loc_addr;  // cluster-internal (L1) address in 32-bit words
    logic [7:0]           len;       // AXI length: beats - 1
    logic [DMA_ID_W-1:0]  axi_id;
    logic [DMA_ID_W-1:0]  dma_id;    // DMA transfer the burst belongs to
    logic                 write;     // 1: L1 -> external (AXI write)
  } burst_meta_t;

  // A transfer command of one PE: up to 64 KiB between L1 and shared virtual memory.
  typedef struct packed {
    addr_t            ext_addr;  // virtual address in shared memory
    logic [L1_AW-1:0] loc_addr;  // L1 byte address
    logic [16:0]      len;       // bytes, 8 .. 65536, multiple of 8
    logic             write;     // 1: L1 -> shared memory, 0: shared memory -> L1
  } dma_cmd_t;

endpackage
