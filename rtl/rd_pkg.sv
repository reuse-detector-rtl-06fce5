// rd_pkg: types and constants shared by the Reuse Detector memory hierarchy.
//
// All blocks work on block addresses: the physical address with the 6-bit
// offset of a 64-byte block removed (64-byte blocks follow the evaluated
// system). The 48-bit physical address width is this design's own choice;
// the reuse-detection scheme does not depend on it.
package rd_pkg;

  parameter int unsigned PADDR_W   = 48;                 // assumed physical address width
  parameter int unsigned BLK_OFF_W = 6;                  // 64-byte blocks
  parameter int unsigned BADDR_W   = PADDR_W - BLK_OFF_W; // block address width (42)

  typedef logic [BADDR_W-1:0] baddr_t;

  // A block leaving the last private cache level.
  typedef struct packed {
    baddr_t addr;
    logic   dirty;
    logic   reuse;   // reuse bit: 1 if filled from the SLLC or another private cache
  } evict_t;

  // Operations accepted by the shared last-level cache.
  typedef enum logic [1:0] {
    SLLC_READ  = 2'd0,   // demand lookup on a private-cache miss
    SLLC_WBACK = 2'd1    // block evicted from L2 and judged reused by a Reuse Detector
  } sllc_op_e;

  typedef struct packed {
    sllc_op_e op;
    baddr_t   addr;
    logic     dirty;
  } sllc_req_t;

  // Operations accepted by a private cache tag store.
  typedef enum logic [2:0] {
    PC_LOOKUP = 3'd0,    // demand access: hit/miss, sets dirty on a write hit
    PC_PROBE  = 3'd1,    // coherence query from another core: present?  sets reuse bit if so
    PC_FILL   = 3'd2,    // allocate a block, returns the replaced block
    PC_INVAL  = 3'd3,    // back-invalidation (inclusion): drop the block, return its state
    PC_WBACK  = 3'd4     // write-back from the level above: mark dirty, LRU untouched
  } pc_op_e;

  // Where the Reuse Detector sends an evicted block.
  typedef enum logic [1:0] {
    RD_REUSED_BIT = 2'd0,  // reuse bit set: insert or update in the SLLC
    RD_REUSED_BUF = 2'd1,  // found in the Reuse Detector buffer: to the SLLC
    RD_TO_MM      = 2'd2,  // not reused and dirty: write to main memory
    RD_DISCARD    = 2'd3   // not reused and clean: drop
  } rd_dec_e;

endpackage
