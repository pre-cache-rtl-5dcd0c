// Shared types and constants for the pre-cache memory side.
//
// Addresses are byte addresses of ADDR_W bits. A cache line is LINE_BYTES
// bytes, so the line address ("key") is ADDR_W - log2(LINE_BYTES) bits.
// Memory levels are numbered as in the hierarchy the design assumes:
// L1 = 0, L2 = 1, L3 = 2, memory = 3. A pre-cache entry remembers the level
// that supplied its line; a store-to-cache (STC) writes every level above it.
// The 32-bit address width is this design's choice; line size and level
// numbering follow the paper.
package precache_pkg;

  localparam int unsigned ADDR_W     = 32;
  localparam int unsigned LINE_BYTES = 64;
  localparam int unsigned OFF_W      = $clog2(LINE_BYTES);
  localparam int unsigned KEY_W      = ADDR_W - OFF_W;
  localparam int unsigned LINE_W     = LINE_BYTES * 8;
  localparam int unsigned WORD_W     = 64;
  localparam int unsigned WORDS      = LINE_W / WORD_W;
  localparam int unsigned WIDX_W     = $clog2(WORDS);
  // Loads carry a sequence number in program order: a load-queue index with
  // one wrap bit (32-entry load queue).
  localparam int unsigned LQ_ENTRIES = 32;
  localparam int unsigned SEQ_W      = $clog2(LQ_ENTRIES) + 1;

  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [KEY_W-1:0]  key_t;
  typedef logic [LINE_W-1:0] line_t;
  typedef logic [WORD_W-1:0] word_t;
  typedef logic [SEQ_W-1:0]  seq_t;

  // Level that supplied a line (hit-level information).
  typedef enum logic [1:0] {
    LVL_L1  = 2'd0,
    LVL_L2  = 2'd1,
    LVL_L3  = 2'd2,
    LVL_MEM = 2'd3
  } level_e;

  // Where a load's data came from (source select of the result mux).
  typedef enum logic [1:0] {
    SRC_PRECACHE = 2'd0,
    SRC_L1       = 2'd1,
    SRC_BELOW    = 2'd2
  } src_e;

  // Requests on the port to the shared levels below L2.
  typedef enum logic [1:0] {
    MREQ_LOAD  = 2'd0,  // speculative line read, no coherence-state change
    MREQ_STC   = 2'd1,  // committed load: lock, update coherence, drop dir entry
    MREQ_STORE = 2'd2   // committed store (write-through word)
  } mreq_e;

  // Single-cycle event pulses of the memory side, for counters and tests.
  typedef struct packed {
    logic pc_hit;        // load served by the pre-cache
    logic l1_hit;        // load served by L1
    logic l2_hit;        // load served by L2, line put in the pre-cache
    logic pb_hit;        // load served by the prefetch buffer
    logic mem_load;      // load sent below L2
    logic pc_full;       // line could not be buffered (pre-cache full)
    logic stc_start;     // commit found its line: STC begins
    logic stc_done;      // STC wrote its line into the missed levels
    logic stc_abort;     // STC aborted by an invalidation or a store
    logic dir_inv;       // pre-cache directory hit: pre-cache line invalidated
    logic l2_evict;      // L2 displaced a valid line
    logic squash_kill;   // squash killed an in-flight load
    logic squash_clear;  // squash cleared pre-cache lines
    logic pb_to_l2;      // prefetched line moved into L2 after its trigger committed
    logic store;         // committed store performed
  } mem_events_t;

  function automatic key_t key_of(addr_t a);
    return a[ADDR_W-1:OFF_W];
  endfunction

  function automatic word_t word_of(line_t l, logic [WIDX_W-1:0] i);
    return l[i*WORD_W +: WORD_W];
  endfunction

  // True when load a is the same as or younger than load b; valid while
  // fewer than 2**(SEQ_W-1) loads are in flight.
  function automatic logic seq_at_or_after(seq_t a, seq_t b);
    seq_t d;
    d = a - b;
    return !d[SEQ_W-1];
  endfunction

endpackage
