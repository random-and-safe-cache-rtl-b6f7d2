// tag_data_array: the tag, state and data storage of one set-associative
// cache level, with random replacement.
//
// A line address is split into set index (low bits) and tag (the rest). The
// lookup port compares the tag with every way of the set and returns hit, way
// and the line. For a fill, the victim way is an invalid way of that set if
// there is one, otherwise the way named by the low bits of rnd, an input from
// a random generator: no per-set replacement state exists, so an access never
// changes which line is evicted next (no LRU state to observe). The victim's
// valid/dirty bits, address and data are presented so the caller can write a
// dirty victim back.
//
// Write ports (effective at the next edge): fill_* installs a line in a way
// (valid, tag, dirty as given); ww_* writes bytes of one word of a resident
// line and marks it dirty; wl_* overwrites a resident line and marks it dirty.
// Read ports are combinational. Valid bits are reset; tags and data are not.
//
// Follows the paper: set-associative storage kept as is, random replacement.
// This design's choices: invalid ways first, write-back with dirty bits.
//
// Lint note: set_of and tag_of each take the whole line address and use only
// their own field of it, so the other bits are reported as unused.
module tag_data_array
  import ras_pkg::*;
#(
  parameter int unsigned SETS = 64,
  parameter int unsigned WAYS = 8,
  localparam int unsigned SW  = $clog2(SETS),
  localparam int unsigned WW  = (WAYS > 1) ? $clog2(WAYS) : 1,
  localparam int unsigned TAG_W = LADDR_W - SW
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [31:0]         rnd,
  // lookup and victim of the set of lk_addr
  input  laddr_t              lk_addr,
  output logic                lk_hit,
  output logic [WW-1:0]       lk_way,
  output line_t               lk_data,
  output logic [WW-1:0]       vic_way,
  output logic                vic_valid,
  output logic                vic_dirty,
  output laddr_t              vic_addr,
  output line_t               vic_data,
  // install a line
  input  logic                fill_valid,
  input  logic [WW-1:0]       fill_way,
  input  laddr_t              fill_addr,
  input  line_t               fill_data,
  input  logic                fill_dirty,
  // write a word of a resident line
  input  logic                ww_valid,
  input  logic [WW-1:0]       ww_way,
  input  laddr_t              ww_addr,
  input  logic [WIDX_W-1:0]   ww_word,
  input  logic [WORD_W/8-1:0] ww_be,
  input  word_t               ww_data,
  // overwrite a resident line
  input  logic                wl_valid,
  input  logic [WW-1:0]       wl_way,
  input  laddr_t              wl_addr,
  input  line_t               wl_data,
  // occupancy of valid lines (observation)
  output logic [31:0]         valid_lines
);
  logic [WAYS-1:0]  valid_q [SETS];
  logic [WAYS-1:0]  dirty_q [SETS];
  logic [TAG_W-1:0] tag_q   [WAYS][SETS];
  line_t            data_q  [WAYS][SETS];
  logic [31:0]      nvalid_q;

  function automatic logic [SW-1:0] set_of(input laddr_t a);
    return a[SW-1:0];
  endfunction
  function automatic logic [TAG_W-1:0] tag_of(input laddr_t a);
    return a[LADDR_W-1:SW];
  endfunction

  logic [SW-1:0] lk_set;
  logic          have_invalid;
  logic [WW-1:0] inv_way;
  assign lk_set = set_of(lk_addr);

  always_comb begin
    lk_hit       = 1'b0;
    lk_way       = '0;
    have_invalid = 1'b0;
    inv_way      = '0;
    for (int w = WAYS-1; w >= 0; w--) begin
      if (valid_q[lk_set][w] && tag_q[w][lk_set] == tag_of(lk_addr)) begin
        lk_hit = 1'b1;
        lk_way = WW'(w);
      end
      if (!valid_q[lk_set][w]) begin
        have_invalid = 1'b1;
        inv_way      = WW'(w);
      end
    end
    vic_way   = have_invalid ? inv_way : WW'(rnd % WAYS);
    vic_valid = valid_q[lk_set][vic_way];
    vic_dirty = dirty_q[lk_set][vic_way];
    vic_addr  = {tag_q[vic_way][lk_set], lk_set};
  end

  assign lk_data     = data_q[lk_way][lk_set];
  assign vic_data    = data_q[vic_way][lk_set];
  assign valid_lines = nvalid_q;

  // valid/dirty state
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) begin
        valid_q[s] <= '0;
        dirty_q[s] <= '0;
      end
      nvalid_q <= '0;
    end else begin
      if (fill_valid) begin
        valid_q[set_of(fill_addr)][fill_way] <= 1'b1;
        dirty_q[set_of(fill_addr)][fill_way] <= fill_dirty;
        if (!valid_q[set_of(fill_addr)][fill_way]) nvalid_q <= nvalid_q + 1'b1;
      end
      if (ww_valid) dirty_q[set_of(ww_addr)][ww_way] <= 1'b1;
      if (wl_valid) dirty_q[set_of(wl_addr)][wl_way] <= 1'b1;
    end
  end

  // tags and data: plain memories without reset
  always_ff @(posedge clk) begin
    if (fill_valid) begin
      tag_q[fill_way][set_of(fill_addr)]  <= tag_of(fill_addr);
      data_q[fill_way][set_of(fill_addr)] <= fill_data;
    end
    if (wl_valid) data_q[wl_way][set_of(wl_addr)] <= wl_data;
    if (ww_valid)
      for (int b = 0; b < WORD_W/8; b++)
        if (ww_be[b])
          data_q[ww_way][set_of(ww_addr)][(int'(ww_word)*WORD_W/8 + b)*8 +: 8] <= ww_data[b*8 +: 8];
  end

endmodule
