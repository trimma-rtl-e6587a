// trimma_pkg: types and fixed constants shared by the Trimma metadata controller.
//
// Trimma keeps the physical-to-device remap metadata of a set-associative hybrid
// memory in a two-level radix table (iRT) stored in fast memory and caches it on
// chip in an identity-mapping-aware remap cache (iRC). The constants below are the
// ones the design fixes: 48-bit physical addresses, 256 B blocks, 4 B remap
// entries (64 per leaf block), one index bit per leaf block (2048 per index block)
// and 32-block super-blocks in the IdCache. Sizes that depend on the memory
// configuration (sets, fast and slow blocks per set) are module parameters.
//
// Remap entry encoding (this design's choice; the paper only says that a leaf
// entry is 4 bytes and stores the remapped block ID): bit 31 valid, bit 30 dirty,
// bits 29:0 the block tag the entry points to.
package trimma_pkg;

  localparam int unsigned PA_W        = 48;   // physical / device address width (Fig 6)
  localparam int unsigned OFF_W       = 8;    // 256 B blocks
  localparam int unsigned WORD_W      = 32;   // metadata and data word
  localparam int unsigned WORDS_PER_BLK = 64; // 256 B / 4 B
  localparam int unsigned ENT_IDX_W   = 6;    // entry index inside a leaf block
  localparam int unsigned IDXBIT_W    = 11;   // 2048 index bits per index block
  localparam int unsigned SB_BLK_W    = 5;    // 32 blocks per super-block (8 kB)
  localparam int unsigned BTAG_W      = 30;   // width of a per-set block tag

  typedef logic [PA_W-1:0]   addr_t;
  typedef logic [BTAG_W-1:0] btag_t;
  typedef logic [WORD_W-1:0] word_t;

  typedef struct packed {
    logic  valid;
    logic  dirty;
    btag_t ptr;
  } entry_t;

  // Block moves issued to the memory side, all of one 256 B block.
  typedef enum logic [1:0] {
    MIG_FILL      = 2'd0,  // copy slow block -> fast slot
    MIG_WRITEBACK = 2'd1,  // copy fast slot  -> slow block
    MIG_SWAP      = 2'd2   // exchange fast slot and slow block
  } mig_op_e;

  // Primitive operations of the iRT engine.
  typedef enum logic [1:0] {
    IRT_LOOKUP = 2'd0,
    IRT_WRITE  = 2'd1,
    IRT_CLEAR  = 2'd2,
    IRT_ALLOC  = 2'd3
  } irt_op_e;

  // One pulse per mechanism, for performance counting.
  typedef struct packed {
    logic idx_prefetch;   // FIFO index bits fetched ahead of a victim request
    logic nonid_hit;      // NonIdCache hit
    logic id_hit;         // IdCache hit
    logic irt_walk;       // both iRC parts missed, iRT looked up
    logic fast_access;    // demand access served by fast memory
    logic slow_access;    // demand access served by slow memory
    logic migrate;        // a slow block was brought into a fast slot
    logic meta_slot_used; // ... into an unused metadata block
    logic writeback;      // dirty cached block written back
    logic swap_back;      // flat-area block swapped back home
    logic leaf_alloc;     // iRT leaf block allocated
    logic leaf_free;      // iRT leaf block freed
    logic meta_evict;     // data evicted from a block claimed by metadata
    logic victim_skip;    // FIFO skipped a metadata block in use
  } events_t;

endpackage
