// tdmem_pkg: types and constants shared by the donee and donor engines of the
// trusted disaggregated-memory system.
//
// Every transfer, on the host (QDMA) side and on the engine-to-engine network,
// is a stream of 512-bit (64-byte) words. A command or response starts with a
// header word (cmd_hdr_t); a store request and a load response carry the 4 KB
// page in the 64 words that follow the header. The field names and widths of
// the header follow the published command format (8-bit machine IDs and tiers,
// 64-bit addresses). The bit positions, the opcode field, the status field and
// the tier/opcode encodings are this design's own choices.
package tdmem_pkg;

  localparam int unsigned WORD_W     = 512;   // one 64 B DMA / network beat
  localparam int unsigned WORD_BYTES = 64;
  localparam int unsigned PAGE_BYTES = 4096;  // allocation granularity
  localparam int unsigned PAGE_WORDS = PAGE_BYTES / WORD_BYTES;  // 64

  typedef logic [WORD_W-1:0] word_t;

  // Command / response kinds carried in the header's opcode field.
  typedef enum logic [7:0] {
    OP_NONE      = 8'h00,
    OP_STORE_REQ = 8'h01,
    OP_LOAD_REQ  = 8'h02,
    OP_INV_PAGE  = 8'h03,
    OP_INV_AREA  = 8'h04,
    OP_STORE_RSP = 8'h05,
    OP_LOAD_RSP  = 8'h06
  } opcode_e;

  // Memory tiers: the three tiers a page can live in plus the donee's own
  // swap device, which is used when no tier has room.
  localparam logic [7:0] TIER_DONEE_HBM  = 8'd0;
  localparam logic [7:0] TIER_DONOR_HBM  = 8'd1;
  localparam logic [7:0] TIER_DONOR_DRAM = 8'd2;
  localparam logic [7:0] TIER_SWAP       = 8'd3;

  // Completion status. Zero means "not complete yet" for the polling host.
  localparam logic [7:0] ST_PENDING = 8'd0;
  localparam logic [7:0] ST_OK      = 8'd1;
  localparam logic [7:0] ST_NOSPACE = 8'd2;
  localparam logic [7:0] ST_DENIED  = 8'd3;

  // Owner-table codes of the donor allocators (8-bit MID per page).
  localparam logic [7:0] MID_FREE = 8'h00;  // page not allocated
  localparam logic [7:0] MID_RSVD = 8'hFF;  // page held in a store free list

  // Header word. Fields listed MSB first; opcode sits in bits [7:0].
  typedef struct packed {
    logic [271:0] rsvd;
    logic [63:0]  poll_dma_addr;   // host address of the completion
    logic [63:0]  page_dma_addr;   // host address the loaded page goes to
    logic [63:0]  remote_addr;     // address of the page in its tier
    logic [7:0]   status;          // responses / completions only
    logic [7:0]   target_tier;     // store requests: tier asked for
    logic [7:0]   tier;            // tier the page is stored in
    logic [7:0]   dst_mid;
    logic [7:0]   src_mid;
    logic [7:0]   opcode;
  } cmd_hdr_t;

  // One word of a packet stream; last marks the final word of a packet.
  typedef struct packed {
    logic  last;
    word_t data;
  } beat_t;

  // Request to a memory port (HBM or, through the DMA engine, host DRAM).
  // addr is a byte address of a 64-byte word.
  typedef struct packed {
    logic        we;
    logic [63:0] addr;
    word_t       wdata;
  } mem_req_t;

endpackage
