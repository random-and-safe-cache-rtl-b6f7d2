// shb: Safe History Buffer. It collects safe line addresses - loads once the
// ROB has authorized them and stores when they enter the L1D - and turns them
// into cache fills that do not follow the program's own misses.
//
// How it works
//  * Insertion is FIFO-like: a new address enters entry 0 and the others shift
//    down by one; the oldest falls out. Each entry has a valid bit, so the
//    valid entries are always entries 0..n-1.
//  * Only the newest cfg_active entries take part in selection (the hardware
//    has ENTRIES, software chooses how many are live).
//  * A free-running counter fires every cfg_rate cycles. On each firing, if a
//    live entry is valid, one of the live valid entries is chosen at random,
//    and a random line is chosen inside the 2^cfg_win_log2-line window that is
//    aligned to the window size and contains that entry:
//        line = (addr - addr mod W) + random(0..W-1)
//    The line is offered to the L1D as an SHBfetch (pf_valid/pf_ready) and,
//    in the same cycle, sent as a one-cycle NoFillClear pulse to the L1D MSHRs.
//  * The firing instants depend only on cfg_rate. A fetch still waiting when
//    the next one fires is replaced by the new one and counted as dropped.
//
// Timing: inserted addresses are visible to the selection on the next cycle.
// pf_addr/pf_valid and nfc_* are registered outputs.
//
// Follows the paper: FIFO-like insertion, random entry selection, aligned
// random window, constant issue rate, same address for SHBfetch and
// NoFillClear. This design's choices: the LFSR generator, modulo selection,
// the replace-on-next-firing rule and the insertion order of a load and a
// store arriving in the same cycle (store taken as newer).
module shb
  import ras_pkg::*;
#(
  parameter int unsigned ENTRIES      = 4,
  parameter int unsigned MAX_WIN_LOG2 = 6,
  parameter int unsigned RATE_W       = 8,
  parameter logic [31:0] SEED         = 32'h5eed_0001
) (
  input  logic                            clk,
  input  logic                            rst_n,
  // control registers
  input  logic                            cfg_enable,
  input  logic [$clog2(ENTRIES+1)-1:0]    cfg_active,   // 1..ENTRIES
  input  logic [$clog2(MAX_WIN_LOG2+1)-1:0] cfg_win_log2, // window = 2^n lines
  input  logic [RATE_W-1:0]               cfg_rate,     // one fetch every cfg_rate cycles
  // insertion
  input  logic                            ins_load_valid,
  input  laddr_t                          ins_load_addr,
  input  logic                            ins_store_valid,
  input  laddr_t                          ins_store_addr,
  // SHBfetch to the L1D
  output logic                            pf_valid,
  input  logic                            pf_ready,
  output laddr_t                          pf_addr,
  // NoFillClear to the L1D MSHRs
  output logic                            nfc_valid,
  output laddr_t                          nfc_addr,
  // observation
  output logic [ENTRIES-1:0]              entry_valid,
  output laddr_t                          entry_addr [ENTRIES],
  output logic [31:0]                     stat_fired,
  output logic [31:0]                     stat_issued,
  output logic [31:0]                     stat_dropped
);
  localparam int unsigned CNT_W = $clog2(ENTRIES+1);

  logic   [ENTRIES-1:0] v_q;
  laddr_t               a_q [ENTRIES];
  logic   [RATE_W-1:0]  tick_q;
  logic                 fire;
  logic   [31:0]        rnd;

  lfsr #(.SEED(SEED)) u_rng (.clk(clk), .rst_n(rst_n), .en(1'b1), .rnd(rnd));

  // ---------------- insertion ----------------
  logic   [ENTRIES-1:0] v_d;
  laddr_t               a_d [ENTRIES];

  always_comb begin
    v_d = v_q;
    for (int i = 0; i < ENTRIES; i++) a_d[i] = a_q[i];
    if (ins_load_valid) begin
      for (int i = ENTRIES-1; i > 0; i--) begin
        v_d[i] = v_d[i-1];
        a_d[i] = a_d[i-1];
      end
      v_d[0] = 1'b1;
      a_d[0] = ins_load_addr;
    end
    if (ins_store_valid) begin
      for (int i = ENTRIES-1; i > 0; i--) begin
        v_d[i] = v_d[i-1];
        a_d[i] = a_d[i-1];
      end
      v_d[0] = 1'b1;
      a_d[0] = ins_store_addr;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q <= '0;
      for (int i = 0; i < ENTRIES; i++) a_q[i] <= '0;
    end else begin
      v_q <= v_d;
      for (int i = 0; i < ENTRIES; i++) a_q[i] <= a_d[i];
    end
  end

  // ---------------- selection ----------------
  logic [CNT_W-1:0] n_live;     // valid entries among the live ones
  logic [CNT_W-1:0] sel;
  laddr_t           sel_addr;
  laddr_t           win_mask;
  laddr_t           fetch_line;

  always_comb begin
    n_live = '0;
    for (int i = 0; i < ENTRIES; i++)
      if (v_q[i] && (CNT_W'(i) < cfg_active)) n_live = n_live + 1'b1;
    sel      = (n_live == '0) ? '0 : CNT_W'(rnd[15:0] % 16'(n_live));
    sel_addr = a_q[0];
    for (int i = 0; i < ENTRIES; i++)
      if (CNT_W'(i) == sel) sel_addr = a_q[i];
    win_mask   = (laddr_t'(1) << ((32'(cfg_win_log2) > MAX_WIN_LOG2) ? MAX_WIN_LOG2 : 32'(cfg_win_log2))) - 1'b1;
    fetch_line = (sel_addr & ~win_mask) | (laddr_t'(rnd[31:16]) & win_mask);
  end

  // ---------------- constant-rate issue ----------------
  assign fire = cfg_enable && (tick_q >= cfg_rate - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tick_q       <= '0;
      pf_valid     <= 1'b0;
      pf_addr      <= '0;
      nfc_valid    <= 1'b0;
      nfc_addr     <= '0;
      stat_fired   <= '0;
      stat_issued  <= '0;
      stat_dropped <= '0;
    end else begin
      tick_q    <= (!cfg_enable || fire) ? '0 : tick_q + 1'b1;
      nfc_valid <= 1'b0;
      if (pf_valid && pf_ready) begin
        pf_valid    <= 1'b0;
        stat_issued <= stat_issued + 1'b1;
      end
      if (fire) begin
        stat_fired <= stat_fired + 1'b1;
        if (n_live != '0) begin
          if (pf_valid && !pf_ready) stat_dropped <= stat_dropped + 1'b1;
          pf_valid  <= 1'b1;
          pf_addr   <= fetch_line;
          nfc_valid <= 1'b1;
          nfc_addr  <= fetch_line;
        end
      end
    end
  end

  assign entry_valid = v_q;
  always_comb for (int i = 0; i < ENTRIES; i++) entry_addr[i] = a_q[i];

endmodule
