// bc_pkg: constants and types shared by the BackCache L1 data-cache level.
//
// The geometry follows the evaluated configuration: a 48-bit physical
// address space, 64-byte lines, a 16 KB 4-way set-associative L1 data cache
// (64 sets) and a 16 KB fully associative backup cache (256 lines) whose
// enabled size moves between 192 and 256 lines (12-16 KB). The 64-byte line
// is not stated as such; it follows from the 42-bit backup tag of a 48-bit
// PIPT address (48 - 42 = 6 offset bits) and from "B+1 = 193" for a 12 KB
// minimum. Each backup tag entry holds tag (42), coherence (2), used (1) and
// enabled (1) bits, in that order, as drawn for the backup tag layout.
//
// The encoding of the 2-bit coherence field is this design's own choice: a
// single-core L1 level without a snooping protocol needs only invalid, clean
// and dirty.
package bc_pkg;

  localparam int unsigned ADDR_W      = 48;               // physical address bits
  localparam int unsigned LINE_BYTES  = 64;               // bytes per cache line
  localparam int unsigned OFFSET_W    = $clog2(LINE_BYTES);
  localparam int unsigned LINE_W      = LINE_BYTES * 8;   // 512 data bits per line
  localparam int unsigned WORD_W      = 64;               // core access width (AArch64)
  localparam int unsigned WORD_BYTES  = WORD_W / 8;
  localparam int unsigned WORDS       = LINE_BYTES / WORD_BYTES;  // 8 words per line
  localparam int unsigned WSEL_W      = $clog2(WORDS);
  localparam int unsigned LADDR_W     = ADDR_W - OFFSET_W; // line address = backup tag, 42 bits

  typedef logic [LINE_W-1:0]     line_t;
  typedef logic [WORD_W-1:0]     word_t;
  typedef logic [WORD_BYTES-1:0] be_t;
  typedef logic [LADDR_W-1:0]    laddr_t;

  // 2-bit coherence state kept with every tag.
  typedef enum logic [1:0] {
    COH_INVALID = 2'b00,
    COH_CLEAN   = 2'b01,
    COH_DIRTY   = 2'b11
  } coh_t;

  // Backup cache tag entry: tag | coherence | used | enabled (46 bits).
  typedef struct packed {
    laddr_t tag;
    coh_t   coh;
    logic   used;
    logic   enabled;
  } bk_entry_t;

  // The four outcomes of the parallel lookup, coded {L1D hit, backup hit}.
  typedef enum logic [1:0] {
    CASE_00 = 2'b00,   // both miss: fetch from the lower level
    CASE_01 = 2'b01,   // L1D miss, backup hit
    CASE_10 = 2'b10,   // L1D hit, backup miss
    CASE_11 = 2'b11    // both hit
  } lookup_case_t;

  // One-cycle event pulses of the cache level, for performance counters and
  // for tests.
  typedef struct packed {
    logic         lookup;        // a lookup completed; lcase is valid
    lookup_case_t lcase;
    logic         l1_evict;      // a valid L1D line was replaced
    logic         writeback;     // a dirty L1D victim was written to the lower level
    logic         bk_fill;       // a line evicted from the L1D went into the backup cache
    logic         bk_merge;      // ... and the backup cache already held it
    logic         bk_repl_used;  // backup fill replaced a valid line with used = 1
    logic         bk_repl_unused;// backup fill replaced a valid line with used = 0
    logic         bk_drop;       // no enabled backup line: evicted line not kept
    logic         resize;        // access count reached zero: new random size drawn
    logic         grow;          // one backup line enabled
    logic         shrink;        // one backup line disabled
    logic         invalidate;    // a lower-level invalidation was applied
    logic         buclr;         // all used bits cleared
  } bc_events_t;

endpackage
