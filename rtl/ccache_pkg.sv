// ccache_pkg: types and constants shared by the CCache blocks.
//
// CCache privatizes commutatively updated data (CData) on demand: a core's
// c_read/c_write keeps the line's source copy in a per-core source buffer and
// its updated copy in the L1, and a software merge function later folds
// (updated - source) style updates into the shared last-level copy.
//
// Line size (64 B), LLC capacity (4 MB), four merge types (two merge-type bits)
// and 8 cores follow the paper. The 64-bit word used by c_read/c_write and
// rd_mreg/wr_mreg, the 64-bit merge function pointer and all encodings below
// are this design's own choices.
package ccache_pkg;

  parameter int unsigned LINE_BYTES     = 64;
  parameter int unsigned LINE_BITS      = LINE_BYTES * 8;
  parameter int unsigned WORD_BITS      = 64;
  parameter int unsigned WORDS_PER_LINE = LINE_BITS / WORD_BITS;
  parameter int unsigned WORD_IDX_W     = $clog2(WORDS_PER_LINE);
  parameter int unsigned LLC_BYTES      = 4 * 1024 * 1024;
  parameter int unsigned LLC_LINES      = LLC_BYTES / LINE_BYTES;
  parameter int unsigned LADDR_W        = $clog2(LLC_LINES);   // line address bits
  parameter int unsigned N_MERGE_TYPES  = 4;
  parameter int unsigned MTYPE_W        = $clog2(N_MERGE_TYPES);
  parameter int unsigned PTR_W          = 64;                  // merge function pointer

  typedef logic [LINE_BITS-1:0]  line_t;
  typedef logic [WORD_BITS-1:0]  word_t;
  typedef logic [LADDR_W-1:0]    laddr_t;
  typedef logic [WORD_IDX_W-1:0] widx_t;
  typedef logic [MTYPE_W-1:0]    mtype_t;
  typedef logic [PTR_W-1:0]      ptr_t;

  // Operations a core hands to its CCache unit.
  typedef enum logic [2:0] {
    OP_LOAD       = 3'd0,  // ordinary load of one word
    OP_STORE      = 3'd1,  // ordinary store of one word
    OP_CREAD      = 3'd2,  // c_read(line.word, idx)
    OP_CWRITE     = 3'd3,  // c_write(line.word, wdata, idx)
    OP_MERGE_INIT = 3'd4,  // merge_init(wdata = function pointer, idx = MFR entry)
    OP_SOFT_MERGE = 3'd5,  // soft_merge
    OP_MERGE      = 3'd6   // merge
  } op_e;

  typedef struct packed {
    op_e    op;
    laddr_t line;
    widx_t  word;
    word_t  wdata;
    mtype_t idx;
  } core_req_t;

  // Merge registers: 1 = memory (LLC) value, 2 = source value, 3 = modified value.
  typedef enum logic [1:0] {
    MREG_MEM = 2'd0,
    MREG_SRC = 2'd1,
    MREG_UPD = 2'd2
  } mreg_e;

  // Requests from a CCache unit to the shared LLC.
  typedef enum logic [1:0] {
    LLC_READ         = 2'd0,  // read a line; refused while another core holds its lock
    LLC_WRITE        = 2'd1,  // write back a line; refused while locked
    LLC_LOCK_READ    = 2'd2,  // set the line's lock bit and read it; refused if already locked
    LLC_WRITE_UNLOCK = 2'd3   // write the merged line and clear its lock bit
  } llc_op_e;

  typedef struct packed {
    logic    valid;
    llc_op_e op;
    laddr_t  line;
    line_t   wdata;
  } llc_req_t;

  typedef struct packed {
    logic  valid;
    logic  nack;    // request refused because the line is locked; retry
    line_t rdata;
  } llc_resp_t;

  // One-cycle event pulses, for observation and performance counting.
  typedef struct packed {
    logic cop_hit;         // c_read/c_write hit an L1 CData line
    logic cop_miss;        // c_read/c_write missed: line privatized
    logic mergeable_reset; // c_read/c_write to a mergeable line cleared its mergeable bit
    logic soft_merge;      // soft_merge executed
    logic merge_dirty;     // a dirty CData line was merged into the LLC
    logic merge_clean;     // a clean CData line was dropped without merging
    logic evict_merge;     // a merge was started by an eviction (merge-on-evict)
    logic lock_retry;      // an LLC request was refused because the line was locked
    logic writeback;       // ordinary dirty line written back on eviction
    logic cdata_stall;     // no evictable way / source buffer entry: request waits
  } ccache_events_t;

endpackage
