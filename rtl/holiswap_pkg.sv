// holiswap_pkg: shared types and constants of the HoLiSwap L1 data cache.
//
// The geometry follows the 32KB, 4-way set-associative organisation with one
// 8KB subarray per way and 128 sets. The 64-byte line and 32-bit address/word
// are derived from those sizes or chosen for this design (the 32-bit word
// matches an ARM core). The logarithmic counters are 4 bits wide, as in the
// 20-bit-per-set budget (one epoch counter and four hit counters).
//
// Logarithmic counter code: 0 means a count of zero; a code k >= 1 stands for
// a count of 2^(k-1). So a threshold of 2^n is reached when the code reaches
// n+1. This encoding is a choice of this design; the exponent-only storage is
// the paper's.
package holiswap_pkg;

  localparam int unsigned WAYS        = 4;
  localparam int unsigned WAY_W       = 2;
  localparam int unsigned ADDR_W      = 32;
  localparam int unsigned WORD_W      = 32;
  localparam int unsigned WORD_BYTES  = WORD_W / 8;
  localparam int unsigned LINE_BYTES  = 64;
  localparam int unsigned LINE_W      = LINE_BYTES * 8;
  localparam int unsigned WORDS_PER_LINE = LINE_BYTES / WORD_BYTES;
  localparam int unsigned OFFSET_W    = 6;     // log2(LINE_BYTES)
  localparam int unsigned L1_SETS     = 128;
  localparam int unsigned IDX_W       = 7;     // log2(L1_SETS)
  localparam int unsigned TAG_W       = ADDR_W - IDX_W - OFFSET_W;
  localparam int unsigned CNT_W       = 4;     // width of one logarithmic counter
  localparam int unsigned RAND_W      = 16;    // width of the random word

  // Lookup organisation of the L1 (the three the migration applies to).
  typedef enum logic [1:0] {
    LOOKUP_SEQUENTIAL = 2'd0,  // tags first, then only the hit way: 3-cycle hit
    LOOKUP_PARALLEL   = 2'd1,  // tags and all ways together: 2-cycle hit
    LOOKUP_PREDICT_W0 = 2'd2   // tags and W0 together, other way next: 2 or 3 cycles
  } lookup_e;

  // One way's entry in the tag array.
  typedef struct packed {
    logic        valid;
    logic        dirty;
    logic [TAG_W-1:0] tag;
  } tag_entry_t;

  typedef tag_entry_t [WAYS-1:0] tag_row_t;

  // Processor request and response.
  typedef struct packed {
    logic              we;
    logic [ADDR_W-1:0] addr;      // byte address, word aligned
    logic [WORD_W-1:0] wdata;
    logic [WORD_BYTES-1:0] wstrb; // byte enables of a store
  } cpu_req_t;

  typedef struct packed {
    logic [WORD_W-1:0] rdata;
    logic              hit;       // the access hit without a refill
    logic [WAY_W-1:0]  way;       // physical way that served it
  } cpu_resp_t;

  // One-cycle event flags and subarray activity, for energy and behaviour
  // accounting outside the cache.
  typedef struct packed {
    logic            access;     // a processor access was looked up (not a replay)
    logic            hit;        // ... and it hit
    logic            miss;       // ... and it missed
    logic            swap;       // a hot-line swap started
    logic            epoch_end;  // a set started a new epoch
    logic            writeback;  // a dirty victim was written back
    logic            pred_wrong; // static W0 prediction was wrong for a load hit
    logic [WAYS-1:0] sub_en;     // subarrays whose bit lines were cycled
    logic [WAYS-1:0] wire_sel;   // ways whose output wires carried the word
  } hs_events_t;

  // Code of the logarithmic counter that stands for a count of 2^n.
  function automatic logic [CNT_W-1:0] log_code(input int unsigned n);
    return CNT_W'(n + 1);
  endfunction

endpackage
