// ras_pkg: types and constants shared by the Random and Safe (RaS) cache
// hierarchy. A memory request carries a request type, a line address, store
// data and the NoFill bit that decides whether the line may be installed in a
// cache when it misses. Line size (64 B) follows the evaluated configuration;
// the 40-bit physical address and the 8-bit request id are this design's
// choices.
package ras_pkg;

  parameter int unsigned PADDR_W    = 40;
  parameter int unsigned LINE_BYTES = 64;
  parameter int unsigned OFF_W      = $clog2(LINE_BYTES);
  parameter int unsigned LADDR_W    = PADDR_W - OFF_W;
  parameter int unsigned LINE_W     = LINE_BYTES * 8;
  parameter int unsigned WORD_W     = 64;
  parameter int unsigned WORDS      = LINE_W / WORD_W;
  parameter int unsigned WIDX_W     = $clog2(WORDS);
  parameter int unsigned ID_W       = 8;

  typedef logic [LADDR_W-1:0] laddr_t;
  typedef logic [LINE_W-1:0]  line_t;
  typedef logic [WORD_W-1:0]  word_t;
  typedef logic [ID_W-1:0]    id_t;

  // Requests that travel between levels. A write-back carries a whole line.
  typedef enum logic [1:0] {
    REQ_LOAD      = 2'd0,
    REQ_STORE     = 2'd1,
    REQ_WRITEBACK = 2'd2
  } req_type_e;

  // What created an MSHR entry (the ReqType column of the MSHR).
  typedef enum logic [1:0] {
    MK_LOAD     = 2'd0,
    MK_STORE    = 2'd1,
    MK_SHBFETCH = 2'd2,
    MK_WB       = 2'd3
  } mshr_kind_e;

  // Protection mode: RaS-Spec makes speculative loads no-fill, RaS+ makes
  // every demand load and store no-fill.
  typedef enum logic {
    MODE_RAS_SPEC = 1'b0,
    MODE_RAS_PLUS = 1'b1
  } ras_mode_e;

  typedef struct packed {
    req_type_e             rtype;
    laddr_t                addr;
    logic [WIDX_W-1:0]     word;    // store: word within the line
    logic [WORD_W/8-1:0]   be;      // store: byte enables
    word_t                 wdata;   // store data
    line_t                 line;    // write-back data
    logic                  nofill;
    id_t                   id;
  } mem_req_t;

  typedef struct packed {
    id_t   id;
    line_t data;
  } mem_resp_t;

  // Event counters of one cache level.
  typedef struct packed {
    logic [31:0] hits;
    logic [31:0] misses;
    logic [31:0] fills;            // lines installed from below
    logic [31:0] nofill_returns;   // lines returned on the NoFill path
    logic [31:0] nofill_wb;        // lines sent down marked NoFill
    logic [31:0] wb_forwarded;     // no-fill write-backs passed to the WBB
    logic [31:0] pf_accepted;      // SHBfetches that entered this cache
    logic [31:0] pf_allocated;     // SHBfetches that took an MSHR
    logic [31:0] nfc_matched;      // NoFillClear that found an MSHR
    logic [31:0] nofill_alloc;     // MSHRs allocated with NoFill set
    logic [31:0] nofill_remain;    // no-fill MSHRs freed still no-fill
    logic [31:0] clr_by_nfc;       // no-fill MSHRs cleared by NoFillClear
    logic [31:0] clr_by_nonspec;   // no-fill MSHRs cleared by a non-speculative access
    logic [31:0] evictions;
  } cache_stats_t;

endpackage
