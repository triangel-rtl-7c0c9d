// triangel_pkg -- shared types, sizes and helper functions of the Triangel
// temporal prefetcher.
//
// Addresses are physical and cache-line aligned. A line address is 31 bits
// wide (byte address bits [36:6]), which covers the 128 GB range of the
// Markov-table target field. The record layouts below follow the field lists
// of the published design (training table, History Sampler, Second-Chance
// Sampler, Markov entry). The table and sampler records carry one extra
// valid bit, this implementation's addition; Markov-entry validity is kept
// beside the L3 data instead. The hash functions are this design's own
// choice: the published design asks only for a 10-bit hashed tag.
package triangel_pkg;

  // ------------------------------------------------------------------ sizes
  localparam int unsigned PADDR_W    = 37;  // byte address, 128 GB
  localparam int unsigned LINE_W     = 31;  // line address (6 offset bits dropped)
  localparam int unsigned PC_W       = 48;  // program counter width
  localparam int unsigned TAG_W      = 10;  // hashed tags (PC tag, Markov tag)
  localparam int unsigned TT_IDX_W   = 9;   // 512-entry training table
  localparam int unsigned TS_W       = 32;  // timestamps
  localparam int unsigned CNT_W      = 4;   // saturating counters
  localparam int unsigned MK_SET_W   = 11;  // 2048 L3 sets
  localparam int unsigned MK_ENTRY_W = TAG_W + LINE_W + 1;  // 42 bits

  localparam logic [CNT_W-1:0] CNT_INIT = 4'd8;   // counters start half way
  localparam logic [CNT_W-1:0] CNT_MAX  = 4'd15;

  typedef logic [LINE_W-1:0] line_addr_t;
  typedef logic [TS_W-1:0]   ts_t;
  typedef logic [CNT_W-1:0]  cnt_t;
  typedef logic [TT_IDX_W-1:0] tt_idx_t;

  // ------------------------------------------------------- training table
  typedef struct packed {
    logic            valid;
    logic [TAG_W-1:0] pc_tag;
    line_addr_t      last0;     // LastAddr[0], most recent
    line_addr_t      last1;     // LastAddr[1], the one before
    ts_t             ts;        // per-PC local timestamp
    cnt_t            reuse;     // ReuseConf
    cnt_t            base;      // BasePatternConf (+1 / -2)
    cnt_t            high;      // HighPatternConf (+1 / -5)
    cnt_t            srate;     // SampleRate
    logic            look;      // Lookahead: 1 = train with LastAddr[1]
  } tt_entry_t;

  // ------------------------------------------------------ History Sampler
  localparam int unsigned HS_SET_W = 8;                 // 256 sets x 2 ways
  localparam int unsigned HS_TAG_W = LINE_W - HS_SET_W; // 23 bits

  typedef struct packed {
    logic                valid;
    logic [HS_TAG_W-1:0] tag;       // Addr-Tag
    tt_idx_t             tidx;      // Train-Idx
    line_addr_t          target;    // Target
    ts_t                 ts;        // Timestamp
    logic                accessed;  // Accessed
  } hs_entry_t;

  // ------------------------------------------------ Second-Chance Sampler
  typedef struct packed {
    logic       valid;
    line_addr_t addr;   // LastAddr: the expected successor
    tt_idx_t    tidx;   // Train-Idx of the PC that expected it
    ts_t        ts;     // global time of insertion
    logic       seen;   // Seen
  } scs_entry_t;

  // --------------------------------------------------------- Markov entry
  typedef struct packed {
    logic [TAG_W-1:0] tag;     // Tag#: hash of the lookup address
    line_addr_t       target;  // Target-Addr (prefetch = target << 6)
    logic             conf;    // confidence bit
  } mk_entry_t;

  // Operations on the Markov partition.
  typedef enum logic {MK_LOOKUP = 1'b0, MK_UPDATE = 1'b1} mk_op_e;

  // One-cycle event strobes reported by the top, for counters and tests.
  typedef struct packed {
    logic train;         // a training access was accepted
    logic tt_alloc;      // new PC allocated in the training table
    logic hs_hit;        // History Sampler hit (Access path)
    logic hs_replace;    // History Sampler insertion (Replace path)
    logic l2_present;    // mismatching old target was already in the L2
    logic scs_insert;    // Second-Chance Sampler insertion
    logic scs_timely;    // SCS hit within the window
    logic scs_late;      // SCS hit outside the window
    logic scs_evict_pen; // SCS entry evicted unseen
    logic gated;         // PC not confident: no store, no prefetch
    logic mk_update;     // Markov update sent to the L3
    logic mk_upd_skip;   // update suppressed by the Metadata Reuse Buffer
    logic mrb_hit;       // chained lookup served by the Reuse Buffer
    logic mk_lookup;     // Markov lookup sent to the L3
    logic pf_issue;      // prefetch issued
    logic pf_stall;      // prefetch held by back-pressure
    logic deg4;          // training access ran at degree 4
    logic look2;         // training access ran with lookahead 2
    logic window_end;    // Set Dueller window closed
    logic rearrange;     // Markov set rearranged after a resize
  } tri_events_t;

  // ------------------------------------------------------------ functions
  function automatic line_addr_t line_of(input logic [PADDR_W-1:0] a);
    return a[PADDR_W-1:6];
  endfunction

  // 10-bit Markov tag: XOR of the two halves of the line-address bits above
  // the 11 L3 set-index bits.
  function automatic logic [TAG_W-1:0] mk_tag(input line_addr_t a);
    return a[20:11] ^ a[30:21];
  endfunction

  function automatic logic [MK_SET_W-1:0] mk_set(input line_addr_t a);
    return a[MK_SET_W-1:0];
  endfunction

  // Training-table index and tag from the PC (instructions 4-byte aligned).
  function automatic tt_idx_t pc_index(input logic [PC_W-1:0] pc);
    return pc[10:2] ^ pc[19:11];
  endfunction

  function automatic logic [TAG_W-1:0] pc_tag(input logic [PC_W-1:0] pc);
    return pc[29:20] ^ pc[39:30] ^ {2'b00, pc[47:40]};
  endfunction

  function automatic cnt_t sat_inc(input cnt_t c);
    return (c == CNT_MAX) ? c : c + 4'd1;
  endfunction

  function automatic cnt_t sat_sub(input cnt_t c, input cnt_t d);
    return (c < d) ? '0 : c - d;
  endfunction

endpackage
