// mshr_file: miss status holding registers of one RaS cache level, each with
// the NoFill bit that travels with a miss.
//
// Each entry holds: the kind of request that opened it (load, store,
// SHBfetch, write-back), the line address, NoFill, whether it was already sent
// to the next level, whether a store wrote into its line fill buffer, and a
// list of up to N_TGT loads waiting for the line.
//
// NoFill can be cleared in two ways, and the entry remembers which:
//  * NoFillClear (nfc_valid/nfc_addr): an SHB address that matches the entry.
//    nfc_match reports that some entry has this line, so the caller can pass
//    the NoFillClear to the next level.
//  * a request with NoFill=0 that merges into the entry (in RaS-Spec a
//    non-speculative load or store), via mg_clear.
// When an entry that was allocated no-fill is freed, one of three counters
// advances: still no-fill, cleared by NoFillClear, cleared by an access.
//
// Interface timing: lk_*, free_idx/full, iss_* and the rd_* read port are
// combinational from the registered state; alloc, merge, NoFillClear, issue
// handshake and free take effect at the next edge. The oldest-index unissued
// entry is offered first (lowest index). Allocation and free of the same index
// in one cycle do not occur (the cache controller does one per cycle).
//
// Follows the paper: NoFill per MSHR, clearing by NoFillClear (dropped when no
// entry matches) and by non-speculative accesses. This design's choices:
// target list size, lowest-index issue order, the counters.
//
// Lint note: the reset appears as synchronous only through the assertions'
// disable condition; every flop uses it asynchronously.
module mshr_file
  import ras_pkg::*;
#(
  parameter int unsigned N     = 16,
  parameter int unsigned N_TGT = 4,
  localparam int unsigned IW   = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned TW   = $clog2(N_TGT+1)
) (
  input  logic            clk,
  input  logic            rst_n,
  // same-line lookup
  input  laddr_t          lk_addr,
  output logic            lk_hit,
  output logic [IW-1:0]   lk_idx,
  output logic            lk_tgt_full,
  output logic            full,
  output logic [IW-1:0]   free_idx,
  // allocate
  input  logic            alloc_valid,
  input  mshr_kind_e      alloc_kind,
  input  laddr_t          alloc_addr,
  input  logic            alloc_nofill,
  input  logic            alloc_tgt,      // a load waits on it
  input  id_t             alloc_tgt_id,
  input  logic            alloc_store,    // a store wrote its buffer
  // merge into an existing entry
  input  logic            mg_valid,
  input  logic [IW-1:0]   mg_idx,
  input  logic            mg_tgt,
  input  id_t             mg_tgt_id,
  input  logic            mg_store,
  input  logic            mg_clear,       // request had NoFill=0
  // NoFillClear
  input  logic            nfc_valid,
  input  laddr_t          nfc_addr,
  output logic            nfc_match,
  // issue to the next level
  output logic            iss_valid,
  output logic [IW-1:0]   iss_idx,
  output laddr_t          iss_addr,
  output logic            iss_nofill,
  input  logic            iss_ready,
  // read one entry (refill)
  input  logic [IW-1:0]   rd_idx,
  output laddr_t          rd_addr,
  output logic            rd_nofill,
  output logic            rd_store,
  output mshr_kind_e      rd_kind,
  output logic [TW-1:0]   rd_ntgt,
  output id_t             rd_tgt [N_TGT],
  // release
  input  logic            free_valid,
  input  logic [IW-1:0]   free_en_idx,
  // statistics
  output logic [31:0]     stat_nofill_alloc,
  output logic [31:0]     stat_remain,
  output logic [31:0]     stat_clr_nfc,
  output logic [31:0]     stat_clr_access,
  output logic [IW:0]     busy
);
  typedef enum logic [1:0] {CLR_NONE = 2'd0, CLR_NFC = 2'd1, CLR_ACCESS = 2'd2} clr_e;

  logic [N-1:0]  v_q, issued_q, nofill_q, store_q, born_nf_q;
  mshr_kind_e    kind_q [N];
  laddr_t        addr_q [N];
  clr_e          clr_q  [N];
  logic [TW-1:0] ntgt_q [N];
  id_t           tgt_q  [N][N_TGT];

  // lookup, free slot, issue choice
  always_comb begin
    lk_hit    = 1'b0;
    lk_idx    = '0;
    full      = 1'b1;
    free_idx  = '0;
    nfc_match = 1'b0;
    iss_valid = 1'b0;
    iss_idx   = '0;
    busy      = '0;
    for (int i = N-1; i >= 0; i--) begin
      if (v_q[i] && addr_q[i] == lk_addr) begin lk_hit = 1'b1; lk_idx = IW'(i); end
      if (!v_q[i]) begin full = 1'b0; free_idx = IW'(i); end
      if (v_q[i] && !issued_q[i]) begin iss_valid = 1'b1; iss_idx = IW'(i); end
      if (nfc_valid && v_q[i] && addr_q[i] == nfc_addr) nfc_match = 1'b1;
      if (v_q[i]) busy = busy + 1'b1;
    end
    lk_tgt_full = (ntgt_q[lk_idx] == TW'(N_TGT));
  end

  assign iss_addr   = addr_q[iss_idx];
  assign iss_nofill = nofill_q[iss_idx];
  assign rd_addr    = addr_q[rd_idx];
  assign rd_nofill  = nofill_q[rd_idx];
  assign rd_store   = store_q[rd_idx];
  assign rd_kind    = kind_q[rd_idx];
  assign rd_ntgt    = ntgt_q[rd_idx];
  always_comb for (int t = 0; t < N_TGT; t++) rd_tgt[t] = tgt_q[rd_idx][t];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q <= '0; issued_q <= '0; nofill_q <= '0; store_q <= '0; born_nf_q <= '0;
      for (int i = 0; i < N; i++) begin
        kind_q[i] <= MK_LOAD;
        addr_q[i] <= '0;
        clr_q[i]  <= CLR_NONE;
        ntgt_q[i] <= '0;
        for (int t = 0; t < N_TGT; t++) tgt_q[i][t] <= '0;
      end
      stat_nofill_alloc <= '0;
      stat_remain       <= '0;
      stat_clr_nfc      <= '0;
      stat_clr_access   <= '0;
    end else begin
      // NoFillClear: compares the address with every entry, no tag lookup
      if (nfc_valid)
        for (int i = 0; i < N; i++)
          if (v_q[i] && addr_q[i] == nfc_addr && nofill_q[i]) begin
            nofill_q[i] <= 1'b0;
            clr_q[i]    <= CLR_NFC;
          end
      if (iss_valid && iss_ready) issued_q[iss_idx] <= 1'b1;
      if (mg_valid) begin
        if (mg_tgt && ntgt_q[mg_idx] != TW'(N_TGT)) begin
          for (int t = 0; t < N_TGT; t++)
            if (TW'(t) == ntgt_q[mg_idx]) tgt_q[mg_idx][t] <= mg_tgt_id;
          ntgt_q[mg_idx] <= ntgt_q[mg_idx] + 1'b1;
        end
        if (mg_store) store_q[mg_idx] <= 1'b1;
        if (mg_clear && nofill_q[mg_idx]) begin
          nofill_q[mg_idx] <= 1'b0;
          clr_q[mg_idx]    <= CLR_ACCESS;
        end
      end
      if (free_valid) begin
        v_q[free_en_idx] <= 1'b0;
        if (born_nf_q[free_en_idx]) begin
          unique case (clr_q[free_en_idx])
            CLR_NFC:    stat_clr_nfc    <= stat_clr_nfc + 1'b1;
            CLR_ACCESS: stat_clr_access <= stat_clr_access + 1'b1;
            default:    stat_remain     <= stat_remain + 1'b1;
          endcase
        end
      end
      if (alloc_valid) begin
        v_q[free_idx]       <= 1'b1;
        issued_q[free_idx]  <= 1'b0;
        kind_q[free_idx]    <= alloc_kind;
        addr_q[free_idx]    <= alloc_addr;
        nofill_q[free_idx]  <= alloc_nofill;
        born_nf_q[free_idx] <= alloc_nofill;
        clr_q[free_idx]     <= CLR_NONE;
        store_q[free_idx]   <= alloc_store;
        ntgt_q[free_idx]    <= alloc_tgt ? TW'(1) : '0;
        tgt_q[free_idx][0]  <= alloc_tgt_id;
        if (alloc_nofill) stat_nofill_alloc <= stat_nofill_alloc + 1'b1;
      end
    end
  end

  // an allocation must find a free entry
  assert property (@(posedge clk) disable iff (!rst_n) alloc_valid |-> !full);
  // a merge must name a live entry
  assert property (@(posedge clk) disable iff (!rst_n) mg_valid |-> v_q[mg_idx]);

endmodule
