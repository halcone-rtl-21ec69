// halcone_pkg: types and constants shared by the HALCONE memory hierarchy.
//
// HALCONE keeps coherence with logical time. Every cached block carries a
// write timestamp (wts) and a read timestamp (rts); every cache keeps its own
// logical clock (cts). A block is usable while wts <= cts <= rts (its lease).
// Leases are handed out by the timestamp storage unit (TSU) next to each
// memory controller, which keeps one memts per recently used block address.
//
// Widths that follow the paper: 16-bit rts/wts, 64-bit cts, 64-byte blocks,
// read lease 10 and write lease 5. The 34-bit byte address (16 GB, 32 memory
// modules of 512 MB), the 32-bit CU word and the message formats are this
// design's own choices. Memory is interleaved over the modules in 4 KB pages
// (as in the paper); blocks are interleaved over the L2 banks of a GPU by the
// low block-address bits (this design's choice).
package halcone_pkg;

  parameter int unsigned ADDR_W    = 34;                 // byte address, 16 GB
  parameter int unsigned BLK_BYTES = 64;
  parameter int unsigned OFF_W     = $clog2(BLK_BYTES);  // 6
  parameter int unsigned BADDR_W   = ADDR_W - OFF_W;     // block address, 28 bits
  parameter int unsigned WORD_W    = 32;
  parameter int unsigned WORDS     = BLK_BYTES * 8 / WORD_W;  // 16 words per block
  parameter int unsigned WIDX_W    = $clog2(WORDS);
  parameter int unsigned BLK_W     = BLK_BYTES * 8;      // 512
  parameter int unsigned TS_W      = 16;                 // rts, wts, memts
  parameter int unsigned CTS_W     = 64;                 // cache logical clock
  parameter int unsigned PAGE_BLK_W = 6;                 // 4 KB page = 64 blocks

  parameter int unsigned RD_LEASE_DEF = 10;
  parameter int unsigned WR_LEASE_DEF = 5;

  typedef logic [BADDR_W-1:0] baddr_t;
  typedef logic [WORD_W-1:0]  word_t;
  typedef logic [WIDX_W-1:0]  widx_t;
  typedef logic [BLK_W-1:0]   blk_t;
  typedef logic [TS_W-1:0]    ts_t;
  typedef logic [CTS_W-1:0]   cts_t;

  // Message kinds on the L1->L2 and L2->MM request paths.
  typedef enum logic [1:0] {
    OP_RD    = 2'd0,   // read a block
    OP_WR    = 2'd1,   // write one word (write-through)
    OP_EVICT = 2'd2    // L2 dropped a block (MM path only, no response)
  } op_e;

  // CU -> L1 request: one 32-bit word, word-aligned byte address.
  typedef struct packed {
    logic              we;
    logic [ADDR_W-1:0] addr;
    word_t             wdata;
  } cu_req_t;

  // L1 -> L2 and L2 -> MM request.
  typedef struct packed {
    op_e    op;
    baddr_t baddr;
    widx_t  widx;
    word_t  wdata;
    ts_t    rts;      // rts of the evicted block (OP_EVICT only)
  } mem_req_t;

  // L2 -> L1 and MM -> L2 response: the block and its lease.
  typedef struct packed {
    blk_t data;
    ts_t  rts;
    ts_t  wts;
  } mem_rsp_t;

  // MMC -> DRAM request and the block it returns.
  typedef struct packed {
    logic   we;
    baddr_t baddr;
    widx_t  widx;
    word_t  wdata;
  } dram_req_t;

  // One-cycle event pulses of a cache, for counting.
  typedef struct packed {
    logic rd_hit;
    logic wr_hit;
    logic comp_miss;   // no block with this tag
    logic coh_miss;    // tag present but lease expired (cts > rts)
    logic evict;       // a valid block was replaced
    logic ts_ovf;      // timestamp overflow, cts re-initialised
  } cache_ev_t;

  // One-cycle event pulses of a TSU.
  typedef struct packed {
    logic alloc;       // new entry added
    logic extend;      // existing entry's memts extended
    logic full_evict;  // set full, lowest memts entry dropped
    logic l2_evict;    // entry dropped after an L2 eviction
    logic shared_keep; // L2 eviction ignored, block still shared
    logic ovf;         // memts overflow, entry re-initialised
  } tsu_ev_t;

  function automatic ts_t ts_max(ts_t a, ts_t b);
    return (a > b) ? a : b;
  endfunction

  function automatic word_t blk_word(blk_t b, widx_t i);
    return b[i*WORD_W +: WORD_W];
  endfunction

  function automatic blk_t blk_put(blk_t b, widx_t i, word_t w);
    blk_t r = b;
    r[i*WORD_W +: WORD_W] = w;
    return r;
  endfunction

  // Memory module holding a block: 4 KB pages interleaved over n_mem modules.
  function automatic int unsigned mem_of(baddr_t a, int unsigned n_mem);
    return (a >> PAGE_BLK_W) % n_mem;
  endfunction

  // Block address with the module-select bits removed (unique within a module).
  function automatic baddr_t mem_local(baddr_t a, int unsigned n_mem_log2);
    baddr_t hi;
    hi = (a >> (PAGE_BLK_W + n_mem_log2)) << PAGE_BLK_W;
    return hi | (a & baddr_t'((1 << PAGE_BLK_W) - 1));
  endfunction

endpackage
