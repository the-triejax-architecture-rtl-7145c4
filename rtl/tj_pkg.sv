// tj_pkg: types and constants shared by the join accelerator.
//
// All trie arrays live in word-addressed memory (32-bit words). An array
// range is a pair of absolute word addresses [lo, hi). A thread id tags every
// request so each unit can keep per-thread state in its own thread store.
// Sizes that follow the paper: 32 hardware threads, two Midwife units,
// 4-bank PJR cache. Widths and query-encoding choices are this design's own.
package tj_pkg;
  parameter int unsigned DATA_W      = 32;  // value width (own choice)
  parameter int unsigned ADDR_W      = 32;  // word address width (own choice)
  parameter int unsigned MAX_VARS    = 4;   // largest query in the evaluation has 4 variables
  parameter int unsigned VAR_W       = 2;
  parameter int unsigned NSLOT       = 2;   // MatchMaker joins two arrays
  parameter int unsigned LINE_WORDS  = 16;  // 64-byte cache line (own choice)
  parameter int unsigned QWORDS      = 2 + MAX_VARS*NSLOT*4; // compiled query size in words

  parameter int unsigned MAX_THREADS = 32;  // 32 hardware threads (paper)
  parameter int unsigned TID_W       = 5;
  parameter int unsigned SRC_W       = 2;   // LD unit id on the shared read port

  typedef logic [TID_W-1:0]  tid_t;
  typedef logic [DATA_W-1:0] val_t;
  typedef logic [ADDR_W-1:0] addr_t;

  // Array range [lo, hi)
  typedef struct packed {
    addr_t lo;
    addr_t hi;
  } range_t;

  // Read port: one request returns the two words at addr and addr+1
  typedef struct packed {
    addr_t addr;
    tid_t  tid;
  } ld_req_t;

  typedef struct packed {
    tid_t       tid;
    val_t [1:0] data;   // data[0] = mem[addr], data[1] = mem[addr+1]
  } ld_resp_t;

  typedef struct packed {
    addr_t                  addr;
    logic [SRC_W+TID_W-1:0] tag;
  } rd_req_t;

  typedef struct packed {
    logic [SRC_W+TID_W-1:0] tag;
    val_t [1:0]             data;
  } rd_resp_t;

  typedef struct packed {
    addr_t                  addr;
    val_t [LINE_WORDS-1:0]  data;
  } wr_req_t;

  // LUB request: search sv (or the value loaded from ptr) in [lo, hi)
  typedef struct packed {
    tid_t  tid;
    logic  ptr_mode;
    addr_t ptr;
    val_t  sv;
    addr_t lo;
    addr_t hi;
  } lub_req_t;

  // LUB answer: ind = first position in [lo,hi) whose value >= sv,
  // ld = value there, exh = no such position (ind == hi)
  typedef struct packed {
    tid_t  tid;
    addr_t ind;
    val_t  sv;
    val_t  ld;
    logic  exh;
  } lub_done_t;

  // Midwife job: read childRangeArr[ind], [ind+1] at cr_addr, add val_base
  typedef struct packed {
    tid_t  tid;
    addr_t cr_addr;
    addr_t val_base;
  } mw_req_t;

  typedef struct packed {
    tid_t   tid;
    range_t rng;
  } mw_resp_t;

  // Per slot entry of the compiled query
  typedef struct packed {
    logic        level0;   // 1: first trie level, range known from the query
    logic [VAR_W-1:0] pvar; // parent variable (child level only)
    logic        pslot;    // parent slot (child level only)
    addr_t       val_base; // base address of the value array of this level
    addr_t       len;      // number of values (first level only)
    addr_t       cr_base;  // base address of the parent level's child-ranges array
  } slot_spec_t;

  // Header of the compiled query
  typedef struct packed {
    logic [2:0]          num_vars;   // 1..MAX_VARS
    logic                cache_en;   // PJR caching used by this query
    logic [VAR_W-1:0]    cache_var;  // cached variable (value attribute)
    logic [MAX_VARS-1:0] key_mask;   // key variables of the cache entry
    logic [5:0]          static_thr; // number of statically started threads
    logic                dyn_en;     // dynamic thread spawning on a match
    addr_t               res_base;   // result area base address
  } qhdr_t;

  typedef struct packed {
    qhdr_t hdr;
    slot_spec_t [MAX_VARS-1:0][NSLOT-1:0] slot;
  } query_t;

  // Cupid -> MatchMaker: per slot either a ready range or "from Midwife"
  typedef struct packed {
    tid_t                   tid;
    logic   [NSLOT-1:0]     rdy;
    range_t [NSLOT-1:0]     rng;
  } mm_req_t;

  // MatchMaker -> Cupid (MatchDone queue)
  typedef struct packed {
    tid_t                   tid;
    logic                   matched;
    val_t                   val;
    addr_t  [NSLOT-1:0]     ind;
    addr_t  [NSLOT-1:0]     hi;
  } mm_done_t;

  // Result of one cached / matched variable value with its trie indexes
  typedef struct packed {
    val_t  val;
    addr_t ind1;
    addr_t ind0;
  } pjr_rec_t;

  // Performance / event counters exported by the core
  typedef struct packed {
    logic [31:0] results;
    logic [31:0] spawns;
    logic [31:0] backtracks;
    logic [31:0] cache_hits;
    logic [31:0] cache_allocs;
    logic [31:0] cache_commits;
    logic [31:0] cache_overflows;
    logic [31:0] line_writes;
  } perf_t;

  // Fold key values into a cache index
  function automatic logic [31:0] key_hash(input val_t [MAX_VARS-1:0] k);
    logic [31:0] h;
    h = 32'h9e37_79b9;
    for (int i = 0; i < MAX_VARS; i++) begin
      h = (h ^ k[i]) * 32'h0100_0193;
      h = h ^ (h >> 15);
    end
    return h;
  endfunction
endpackage
