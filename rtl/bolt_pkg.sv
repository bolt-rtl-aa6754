// bolt_pkg -- shared sizes, types and helper functions of the BOLT oblivious-map core.
//
// The defaults describe the main configuration: N = 2^20 key-value pairs with 4-byte
// keys and 8-byte values, c = N/(K+M) = 8 tuples per logical bin on average, and
// alpha = K/(K+M) = 0.2 of the bins held in HBM, the rest as encrypted host pages.
// From these follow K = 26214 HBM bins, M = 104858 host pages, a bin/page capacity of
// LMAX = 14 tuples, a position map of N/16 rows searched with d = 4 hash functions,
// and a value store (HBM bins plus eviction stash) of 297946 lines, the sum of the
// HBM-load and stash bounds. The bit layouts of commands, responses, map slots and
// page tuples are this design's own choices; the fields they carry follow the paper.
package bolt_pkg;

  // ---------------- sizes (main configuration) ----------------
  localparam int unsigned KEY_W    = 32;       // 4-byte keys
  localparam int unsigned VAL_W    = 64;       // 8-byte values
  localparam int unsigned N_KEYS   = 1 << 20;  // data set size
  localparam int unsigned C_LOAD   = 8;        // average tuples per bin
  localparam int unsigned NBINS    = N_KEYS / C_LOAD;       // K + M = 131072
  localparam int unsigned K_HBM    = 26214;    // floor(0.2 * NBINS)
  localparam int unsigned M_HOST   = NBINS - K_HBM;         // 104858
  localparam int unsigned LMAX     = 14;       // bound on bin load / page size
  localparam int unsigned D_HASH   = 4;        // hash functions of the map
  localparam int unsigned PM_ROWS  = N_KEYS / 16;           // 65536
  localparam int unsigned PM_SLOTS = 19;       // 16 + ceil(log2 log2 N / log2 d)
  localparam int unsigned VS_DEPTH = 297946;   // beta1 + beta2

  localparam int unsigned CMD_W    = 128;      // padded command word
  localparam int unsigned RSP_W    = 128;      // padded response word
  localparam int unsigned HTUP_W   = 128;      // one page tuple on the host bus

  localparam logic [VAL_W-1:0] TOMBSTONE = '1; // reserved payload meaning "delete"

  // ---------------- command / response ----------------
  typedef enum logic [1:0] {OP_GET = 2'd0, OP_PUT = 2'd1, OP_DEL = 2'd2} op_e;

  typedef enum logic [7:0] {
    ST_GET_HIT  = 8'h01,   // value returned
    ST_GET_NULL = 8'h02,   // key not present
    ST_PUT_OK   = 8'h03,   // insert or update confirmed
    ST_DEL_OK   = 8'h04,   // delete confirmed (also for an absent key)
    ST_FULL     = 8'h0E    // no room for a new key (map rows or value store full)
  } status_e;

  // Where the value of a mapped key currently lives.
  typedef enum logic [1:0] {
    LOC_HBM   = 2'd0,      // value store line, logical HBM bin
    LOC_STASH = 2'd1,      // value store line, waiting for eviction to its host page
    LOC_HOST  = 2'd2       // inside host page
  } loc_e;

  // Upper bit of the map-slot pointer is the row, lower bits the slot.
  localparam int unsigned ROW_AW  = $clog2(PM_ROWS);
  localparam int unsigned SLOT_AW = $clog2(PM_SLOTS);

  // Field widths are fixed at the main configuration; smaller instances only use
  // fewer rows/bins/lines, so the same types serve every size.
  localparam int unsigned BIN_W  = $clog2(NBINS);     // 17
  localparam int unsigned VPTR_W = $clog2(VS_DEPTH);  // 19

  typedef logic [BIN_W-1:0]   bin_t;
  typedef logic [VPTR_W-1:0]  vptr_t;
  typedef logic [ROW_AW-1:0]  row_t;
  typedef logic [SLOT_AW-1:0] slot_idx_t;

  typedef struct packed {
    row_t      row;
    slot_idx_t slot;
  } pm_ptr_t;

  // One slot of the position map (Fig. 5c: key, value reference, state).
  typedef struct packed {
    logic             valid;
    logic [KEY_W-1:0] key;
    bin_t             p1;
    bin_t             p2;
    logic             sel;     // 0: value belongs to bin p1, 1: to bin p2
    loc_e             loc;
    vptr_t            vptr;    // value-store line when loc is HBM or STASH
  } pm_slot_t;

  typedef pm_slot_t [PM_SLOTS-1:0] pm_row_t;
  localparam int unsigned PM_ROW_W = $bits(pm_row_t);

  // One tuple of a host page: flag (real/dummy), key, value.
  typedef struct packed {
    logic             valid;
    logic [KEY_W-1:0] key;
    logic [VAL_W-1:0] value;
  } tuple_t;

  typedef tuple_t [LMAX-1:0] page_t;

  typedef struct packed {
    op_e              op;
    logic [KEY_W-1:0] key;
    logic [VAL_W-1:0] payload;
  } cmd_t;

  // Key-search result handed to value access.
  typedef struct packed {
    cmd_t     cmd;
    logic     hit;       // key found in the map
    logic     can_ins;   // on a miss: a free slot exists at ptr
    bin_t     p1;
    bin_t     p2;
    logic     sel;
    loc_e     loc;
    vptr_t    vptr;
    pm_ptr_t  ptr;       // slot of the key (hit) or of the insertion (miss)
  } ks_res_t;

  // Value-access result handed to remap.
  typedef struct packed {
    ks_res_t          ks;
    logic             keep;     // item exists after the command and must be remapped
    logic             is_new;   // new insertion (no previous location)
    logic [VAL_W-1:0] value;    // value to place
    logic [1:0]       page_rd;  // bit i: bin p(i+1) is a host page read into scratchpad i
  } vac_res_t;

  typedef struct packed {
    status_e          status;
    logic [VAL_W-1:0] value;
  } rsp_t;

  // Event counters brought out of the core.
  typedef struct packed {
    logic [31:0] n_get, n_put, n_del;      // decoded commands
    logic [31:0] n_rsp;                    // responses sent
    logic [31:0] n_page_rd, n_page_wr;     // host page transfers
    logic [31:0] n_to_hbm, n_to_stash;     // remap destinations
    logic [31:0] n_p2c_alt;                // P2C chose the second candidate
    logic [31:0] n_evicted;                // stash items written into pages
    logic [31:0] n_page_full;              // eviction blocked by a full page
    logic [31:0] n_ri_full;                // reverse-index entry full
    logic [31:0] n_vs_full;                // value store exhausted
    logic [31:0] n_deleted;                // keys removed
    logic [31:0] n_lost;                   // mapped key missing from its pages
  } stats_t;

  // Generic helper: multiplicative hash i of a key onto 2^bits rows.
  function automatic logic [31:0] hash_key(input logic [31:0] key, input int unsigned i,
                                           input int unsigned bits);
    logic [31:0] mult;
    logic [31:0] seed;
    logic [63:0] prod;
    case (i)
      0:       begin mult = 32'h9E3779B1; seed = 32'h00000000; end
      1:       begin mult = 32'h85EBCA77; seed = 32'h5BD1E995; end
      2:       begin mult = 32'hC2B2AE3D; seed = 32'h27D4EB2F; end
      default: begin mult = 32'h165667B1; seed = 32'hA24BAED5; end
    endcase
    prod = 64'(key ^ seed) * 64'(mult);
    return 32'(prod[31:0] >> (32 - bits));
  endfunction

  // Uniform value in [0, range) from 32 random bits (multiply-high).
  function automatic logic [31:0] scale_rand(input logic [31:0] r, input logic [31:0] range);
    logic [63:0] prod;
    prod = 64'(r) * 64'(range);
    return prod[63:32];
  endfunction

endpackage
