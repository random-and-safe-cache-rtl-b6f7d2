// ras_cache: one level of the Random and Safe (RaS) cache hierarchy. The same
// module is used for the L1 data cache and for the L2 cache.
//
// What it adds to a write-back, write-allocate set-associative cache:
//  * NoFill. Every request carries a NoFill bit. A hit is served as usual. A
//    miss opens an MSHR that keeps NoFill. When the line returns, it is
//    installed only if NoFill is then clear (Fill path); otherwise it is only
//    handed to the waiting requesters (NoFill path). If a store had written
//    into the line fill buffer of a no-fill entry, the merged line is sent
//    down through the writeback buffer marked NoFill.
//  * No-fill write-backs. A write-back marked NoFill that misses is passed
//    straight into this level's writeback buffer instead of being installed.
//  * SHBfetch (pf_*): a line chosen by the Safe History Buffer. If it is not
//    in the cache, not already in an MSHR and not waiting in the writeback
//    buffer, it takes an MSHR with NoFill clear and is installed when it
//    returns. Otherwise it is dropped.
//  * NoFillClear (nfc_in_*): compared with the MSHR addresses only (no tag
//    lookup); a matching no-fill entry becomes fill. A NoFillClear that
//    matched is passed to the next level one cycle later (nfc_out_*).
//  * A request with NoFill clear that merges into a no-fill MSHR for the
//    same line clears it (in RaS-Spec: a non-speculative load or store).
//  * Random replacement (see tag_data_array).
//
// Controller: one request at a time. States: IDLE picks, in this order, a
// returning line (only when the writeback buffer has room), a request that
// had to wait, an SHBfetch, a request from above. A new request spends
// HIT_LAT cycles (WAIT) before EXEC acts on the lookup, so a hit's response
// is valid HIT_LAT cycles after the request was accepted. If EXEC cannot
// finish (no MSHR with a reserved writeback buffer slot, target list full,
// line still in the writeback buffer, writeback buffer full, a write-back for
// a line that has an MSHR open) it returns to IDLE and retries, so returning
// lines are never blocked. An MSHR is opened only while the writeback buffer
// has a free slot for every open MSHR, so a returning line always has room
// for its victim. REFILL installs or forwards the returned line in one
// cycle; RESP hands the line to each waiting load, one per cycle, then frees
// the MSHR. Stores are acknowledged (up_resp with their id) as soon as their
// bytes are in the cache or the line fill buffer. Write-backs get no response.
//
// The next level sees the writeback buffer first, then unissued MSHRs (a
// read, REQ_LOAD, carrying the entry's current NoFill bit and the MSHR index
// as id). Response channels use valid/ready; the requester of a response must
// eventually accept it.
//
// Follows the paper: NoFill in requests, MSHRs and writeback entries, Fill and
// NoFill paths, no-fill write-back forwarding, SHBfetch checked against the
// tag storage then inserted in the MSHRs, NoFillClear on MSHRs only and
// forwarded down, clearing by non-speculative accesses, random replacement.
// This design's choices: the blocking controller and its priorities, dropping
// an SHBfetch that cannot get an MSHR, store acknowledgement timing.
//
// Lint notes: the MSHR kind read port is not needed by this controller (the
// entry's NoFill, store flag and target list decide everything); the reset
// appears as synchronous only through the assertions' disable condition.
module ras_cache
  import ras_pkg::*;
#(
  parameter int unsigned SETS     = 64,
  parameter int unsigned WAYS     = 8,
  parameter int unsigned N_MSHR   = 16,
  parameter int unsigned N_TGT    = 4,
  parameter int unsigned WB_DEPTH = 16,
  parameter int unsigned HIT_LAT  = 1,
  parameter logic [31:0] SEED     = 32'h0bad_cafe,
  localparam int unsigned MW      = (N_MSHR > 1) ? $clog2(N_MSHR) : 1,
  localparam int unsigned WW      = (WAYS > 1) ? $clog2(WAYS) : 1,
  localparam int unsigned TW      = $clog2(N_TGT+1)
) (
  input  logic         clk,
  input  logic         rst_n,
  // from the level above
  input  logic         up_req_valid,
  output logic         up_req_ready,
  input  mem_req_t     up_req,
  output logic         up_resp_valid,
  input  logic         up_resp_ready,
  output mem_resp_t    up_resp,
  // SHBfetch
  input  logic         pf_valid,
  output logic         pf_ready,
  input  laddr_t       pf_addr,
  // NoFillClear
  input  logic         nfc_in_valid,
  input  laddr_t       nfc_in_addr,
  output logic         nfc_out_valid,
  output laddr_t       nfc_out_addr,
  // to the next level
  output logic         dn_req_valid,
  input  logic         dn_req_ready,
  output mem_req_t     dn_req,
  input  logic         dn_resp_valid,
  output logic         dn_resp_ready,
  input  mem_resp_t    dn_resp,
  // store addresses entering this cache (SHB insertion)
  output logic         st_ins_valid,
  output laddr_t       st_ins_addr,
  // observation
  output cache_stats_t stats,
  output logic [31:0]  valid_lines
);
  typedef enum logic [2:0] {S_IDLE, S_WAIT, S_EXEC, S_REFILL, S_RESP} state_e;

  state_e          state_q;
  mem_req_t        req_q;
  logic            is_pf_q;
  logic            pend_q;
  logic [7:0]      lat_q;
  logic [MW-1:0]   r_idx_q;
  line_t           r_data_q;
  logic [TW-1:0]   tgt_i_q;
  cache_stats_t    st_q;
  logic            nfc_out_q;
  laddr_t          nfc_out_addr_q;

  logic [31:0] rnd;
  lfsr #(.SEED(SEED)) u_rng (.clk(clk), .rst_n(rst_n), .en(1'b1), .rnd(rnd));

  // ---------------- storage ----------------
  laddr_t        lk_addr;
  logic          lk_hit;
  logic [WW-1:0] lk_way, vic_way;
  line_t         lk_data, vic_data;
  logic          vic_valid, vic_dirty;
  laddr_t        vic_addr;
  logic          fill_valid, ww_valid, wl_valid, fill_dirty;
  line_t         fill_data;

  tag_data_array #(.SETS(SETS), .WAYS(WAYS)) u_tda (
    .clk(clk), .rst_n(rst_n), .rnd(rnd),
    .lk_addr(lk_addr), .lk_hit(lk_hit), .lk_way(lk_way), .lk_data(lk_data),
    .vic_way(vic_way), .vic_valid(vic_valid), .vic_dirty(vic_dirty),
    .vic_addr(vic_addr), .vic_data(vic_data),
    .fill_valid(fill_valid), .fill_way(lk_hit ? lk_way : vic_way), .fill_addr(lk_addr),
    .fill_data(fill_data), .fill_dirty(fill_dirty),
    .ww_valid(ww_valid), .ww_way(lk_way), .ww_addr(lk_addr), .ww_word(req_q.word),
    .ww_be(req_q.be), .ww_data(req_q.wdata),
    .wl_valid(wl_valid), .wl_way(lk_way), .wl_addr(lk_addr), .wl_data(req_q.line),
    .valid_lines(valid_lines)
  );

  // ---------------- MSHRs ----------------
  logic          m_lk_hit, m_tgt_full, m_full, m_nfc_match;
  logic [MW-1:0] m_lk_idx, m_free_idx, m_iss_idx;
  logic          alloc_valid, alloc_tgt, alloc_store;
  mshr_kind_e    alloc_kind;
  logic          alloc_nofill;
  logic          mg_valid, mg_tgt, mg_store, mg_clear;
  logic          m_iss_valid, m_iss_nofill, m_iss_ready;
  laddr_t        m_iss_addr, rd_addr;
  logic          rd_nofill, rd_store;
  mshr_kind_e    rd_kind;
  logic [TW-1:0] rd_ntgt;
  id_t           rd_tgt [N_TGT];
  logic          free_valid;
  logic [31:0]   m_nf_alloc, m_remain, m_clr_nfc, m_clr_acc;
  logic [MW:0]   m_busy;

  mshr_file #(.N(N_MSHR), .N_TGT(N_TGT)) u_mshr (
    .clk(clk), .rst_n(rst_n),
    .lk_addr(lk_addr), .lk_hit(m_lk_hit), .lk_idx(m_lk_idx), .lk_tgt_full(m_tgt_full),
    .full(m_full), .free_idx(m_free_idx),
    .alloc_valid(alloc_valid), .alloc_kind(alloc_kind), .alloc_addr(lk_addr),
    .alloc_nofill(alloc_nofill), .alloc_tgt(alloc_tgt), .alloc_tgt_id(req_q.id),
    .alloc_store(alloc_store),
    .mg_valid(mg_valid), .mg_idx(m_lk_idx), .mg_tgt(mg_tgt), .mg_tgt_id(req_q.id),
    .mg_store(mg_store), .mg_clear(mg_clear),
    .nfc_valid(nfc_in_valid), .nfc_addr(nfc_in_addr), .nfc_match(m_nfc_match),
    .iss_valid(m_iss_valid), .iss_idx(m_iss_idx), .iss_addr(m_iss_addr),
    .iss_nofill(m_iss_nofill), .iss_ready(m_iss_ready),
    .rd_idx(r_idx_q), .rd_addr(rd_addr), .rd_nofill(rd_nofill), .rd_store(rd_store),
    .rd_kind(rd_kind), .rd_ntgt(rd_ntgt), .rd_tgt(rd_tgt),
    .free_valid(free_valid), .free_en_idx(r_idx_q),
    .stat_nofill_alloc(m_nf_alloc), .stat_remain(m_remain),
    .stat_clr_nfc(m_clr_nfc), .stat_clr_access(m_clr_acc), .busy(m_busy)
  );

  // ---------------- line fill buffers ----------------
  logic  lfb_st_valid;
  line_t merged;
  line_t store_line;   // a store written into a resident line's image

  line_fill_buffer #(.N(N_MSHR)) u_lfb (
    .clk(clk), .rst_n(rst_n),
    .clr_valid(alloc_valid), .clr_idx(m_free_idx),
    .st_valid(lfb_st_valid), .st_idx(alloc_valid ? m_free_idx : m_lk_idx),
    .st_word(req_q.word), .st_be(req_q.be), .st_data(req_q.wdata),
    .rd_idx(r_idx_q), .rd_line(r_data_q), .merged(merged)
  );

  // ---------------- writeback buffer ----------------
  logic   wb_push, wb_full, wb_hit, wb_head_valid, wb_head_ready, wb_head_nofill;
  laddr_t wb_push_addr, wb_head_addr;
  line_t  wb_push_data, wb_head_data;
  logic   wb_push_nofill;
  logic [$clog2(WB_DEPTH > 1 ? WB_DEPTH : 2):0] wb_count;

  writeback_buffer #(.DEPTH(WB_DEPTH)) u_wbb (
    .clk(clk), .rst_n(rst_n),
    .push_valid(wb_push), .push_addr(wb_push_addr), .push_data(wb_push_data),
    .push_nofill(wb_push_nofill), .full(wb_full),
    .head_valid(wb_head_valid), .head_ready(wb_head_ready), .head_addr(wb_head_addr),
    .head_data(wb_head_data), .head_nofill(wb_head_nofill),
    .m_addr(lk_addr), .m_hit(wb_hit), .count(wb_count)
  );

  // An MSHR may be opened only while every open MSHR still has a writeback
  // buffer slot of its own: a returning line can then always be taken, even
  // when it evicts a dirty line, and the levels cannot wait on each other.
  logic m_room;
  assign m_room = !m_full && ((32'(wb_count) + 32'(m_busy)) < WB_DEPTH);

  // ---------------- next-level request arbiter ----------------
  always_comb begin
    dn_req        = '0;
    dn_req_valid  = 1'b0;
    wb_head_ready = 1'b0;
    m_iss_ready   = 1'b0;
    if (wb_head_valid) begin
      dn_req_valid  = 1'b1;
      dn_req.rtype  = REQ_WRITEBACK;
      dn_req.addr   = wb_head_addr;
      dn_req.line   = wb_head_data;
      dn_req.nofill = wb_head_nofill;
      wb_head_ready = dn_req_ready;
    end else if (m_iss_valid) begin
      dn_req_valid  = 1'b1;
      dn_req.rtype  = REQ_LOAD;
      dn_req.addr   = m_iss_addr;
      dn_req.nofill = m_iss_nofill;
      dn_req.id     = id_t'(m_iss_idx);
      m_iss_ready   = dn_req_ready;
    end
  end

  // ---------------- controller ----------------
  assign lk_addr = (state_q == S_REFILL || state_q == S_RESP) ? rd_addr : req_q.addr;

  // store image of a resident line (used only for the response data field)
  assign store_line = lk_data;

  logic exec_done;      // EXEC finished the request this cycle
  logic exec_retry;     // EXEC must wait for a resource
  logic exec_hit_cnt, exec_miss_cnt, exec_fwd_cnt, exec_evict, exec_pf_alloc;
  logic refill_fill, refill_nf_ret, refill_nf_wb, refill_evict;

  always_comb begin
    up_req_ready   = 1'b0;
    pf_ready       = 1'b0;
    dn_resp_ready  = 1'b0;
    up_resp_valid  = 1'b0;
    up_resp        = '0;
    st_ins_valid   = 1'b0;
    st_ins_addr    = up_req.addr;
    alloc_valid    = 1'b0;
    alloc_kind     = MK_LOAD;
    alloc_nofill   = 1'b0;
    alloc_tgt      = 1'b0;
    alloc_store    = 1'b0;
    mg_valid       = 1'b0;
    mg_tgt         = 1'b0;
    mg_store       = 1'b0;
    mg_clear       = 1'b0;
    lfb_st_valid   = 1'b0;
    fill_valid     = 1'b0;
    fill_data      = merged;
    fill_dirty     = 1'b0;
    ww_valid       = 1'b0;
    wl_valid       = 1'b0;
    wb_push        = 1'b0;
    wb_push_addr   = vic_addr;
    wb_push_data   = vic_data;
    wb_push_nofill = 1'b0;
    free_valid     = 1'b0;
    exec_done      = 1'b0;
    exec_retry     = 1'b0;
    exec_hit_cnt   = 1'b0;
    exec_miss_cnt  = 1'b0;
    exec_fwd_cnt   = 1'b0;
    exec_evict     = 1'b0;
    exec_pf_alloc  = 1'b0;
    refill_fill    = 1'b0;
    refill_nf_ret  = 1'b0;
    refill_nf_wb   = 1'b0;
    refill_evict   = 1'b0;

    unique case (state_q)
      S_IDLE: begin
        if (dn_resp_valid && !wb_full) begin
          dn_resp_ready = 1'b1;
        end else if (!pend_q && !dn_resp_valid) begin
          if (pf_valid) pf_ready = 1'b1;
          else begin
            up_req_ready = 1'b1;
            if (up_req_valid && up_req.rtype == REQ_STORE) st_ins_valid = 1'b1;
          end
        end
      end

      S_EXEC: begin
        if (is_pf_q) begin
          // SHBfetch: tag check, then MSHR
          if (lk_hit || m_lk_hit || wb_hit || !m_room) exec_done = 1'b1;
          else begin
            alloc_valid   = 1'b1;
            alloc_kind    = MK_SHBFETCH;
            alloc_nofill  = 1'b0;
            exec_pf_alloc = 1'b1;
            exec_done     = 1'b1;
          end
        end else begin
          unique case (req_q.rtype)
            REQ_LOAD: begin
              if (lk_hit) begin
                up_resp_valid = 1'b1;
                up_resp.id    = req_q.id;
                up_resp.data  = lk_data;
                if (up_resp_ready) begin exec_done = 1'b1; exec_hit_cnt = 1'b1; end
              end else if (wb_hit) exec_retry = 1'b1;
              else if (m_lk_hit) begin
                if (m_tgt_full) exec_retry = 1'b1;
                else begin
                  mg_valid = 1'b1; mg_tgt = 1'b1; mg_clear = !req_q.nofill;
                  exec_done = 1'b1; exec_miss_cnt = 1'b1;
                end
              end else if (!m_room) exec_retry = 1'b1;
              else begin
                alloc_valid = 1'b1; alloc_kind = MK_LOAD; alloc_nofill = req_q.nofill;
                alloc_tgt = 1'b1;
                exec_done = 1'b1; exec_miss_cnt = 1'b1;
              end
            end
            REQ_STORE: begin
              up_resp.id   = req_q.id;
              up_resp.data = store_line;
              if (lk_hit) begin
                up_resp_valid = 1'b1;
                if (up_resp_ready) begin
                  ww_valid = 1'b1; exec_done = 1'b1; exec_hit_cnt = 1'b1;
                end
              end else if (wb_hit) exec_retry = 1'b1;
              else if (m_lk_hit) begin
                up_resp_valid = 1'b1;
                if (up_resp_ready) begin
                  mg_valid = 1'b1; mg_store = 1'b1; mg_clear = !req_q.nofill;
                  lfb_st_valid = 1'b1;
                  exec_done = 1'b1; exec_miss_cnt = 1'b1;
                end
              end else if (!m_room) exec_retry = 1'b1;
              else begin
                up_resp_valid = 1'b1;
                if (up_resp_ready) begin
                  alloc_valid = 1'b1; alloc_kind = MK_STORE; alloc_nofill = req_q.nofill;
                  alloc_store = 1'b1; lfb_st_valid = 1'b1;
                  exec_done = 1'b1; exec_miss_cnt = 1'b1;
                end
              end
            end
            default: begin // REQ_WRITEBACK from the level above
              if (lk_hit) begin
                wl_valid = 1'b1; exec_done = 1'b1; exec_hit_cnt = 1'b1;
              end else if (wb_full || m_lk_hit) exec_retry = 1'b1;
              else if (req_q.nofill) begin
                // no-fill write-back: straight to this level's writeback buffer
                wb_push = 1'b1; wb_push_addr = req_q.addr; wb_push_data = req_q.line;
                wb_push_nofill = req_q.nofill;
                exec_done = 1'b1; exec_fwd_cnt = 1'b1; exec_miss_cnt = 1'b1;
              end else begin
                if (vic_valid && vic_dirty) begin
                  wb_push = 1'b1; exec_evict = 1'b1;
                end else if (vic_valid) exec_evict = 1'b1;
                fill_valid = 1'b1; fill_data = req_q.line; fill_dirty = 1'b1;
                exec_done = 1'b1; exec_miss_cnt = 1'b1;
              end
            end
          endcase
        end
      end

      S_REFILL: begin
        // the writeback buffer had room when the line was accepted
        if (!rd_nofill) begin
          fill_valid  = 1'b1;
          fill_data   = merged;
          fill_dirty  = rd_store;
          refill_fill = 1'b1;
          if (!lk_hit && vic_valid) begin
            refill_evict = 1'b1;
            if (vic_dirty) wb_push = 1'b1;
          end
        end else begin
          refill_nf_ret = 1'b1;
          if (rd_store) begin
            wb_push = 1'b1; wb_push_addr = rd_addr; wb_push_data = merged;
            wb_push_nofill = 1'b1; refill_nf_wb = 1'b1;
          end
        end
      end

      S_RESP: begin
        if (tgt_i_q < rd_ntgt) begin
          up_resp_valid = 1'b1;
          up_resp.data  = merged;
          for (int t = 0; t < N_TGT; t++)
            if (TW'(t) == tgt_i_q) up_resp.id = rd_tgt[t];
        end else free_valid = 1'b1;
      end

      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q        <= S_IDLE;
      req_q          <= '0;
      is_pf_q        <= 1'b0;
      pend_q         <= 1'b0;
      lat_q          <= '0;
      r_idx_q        <= '0;
      r_data_q       <= '0;
      tgt_i_q        <= '0;
      st_q           <= '0;
      nfc_out_q      <= 1'b0;
      nfc_out_addr_q <= '0;
    end else begin
      nfc_out_q      <= nfc_in_valid && m_nfc_match;
      nfc_out_addr_q <= nfc_in_addr;
      if (nfc_in_valid && m_nfc_match) st_q.nfc_matched <= st_q.nfc_matched + 1'b1;

      unique case (state_q)
        S_IDLE: begin
          if (dn_resp_valid && dn_resp_ready) begin
            r_idx_q  <= MW'(dn_resp.id);
            r_data_q <= dn_resp.data;
            state_q  <= S_REFILL;
          end else if (pend_q) begin
            state_q <= S_EXEC;
          end else if (pf_valid && pf_ready) begin
            req_q        <= '0;
            req_q.rtype  <= REQ_LOAD;
            req_q.addr   <= pf_addr;
            is_pf_q      <= 1'b1;
            pend_q       <= 1'b1;
            lat_q        <= 8'(HIT_LAT - 1);
            state_q      <= (HIT_LAT > 1) ? S_WAIT : S_EXEC;
            st_q.pf_accepted <= st_q.pf_accepted + 1'b1;
          end else if (up_req_valid && up_req_ready) begin
            req_q   <= up_req;
            is_pf_q <= 1'b0;
            pend_q  <= 1'b1;
            lat_q   <= 8'(HIT_LAT - 1);
            state_q <= (HIT_LAT > 1) ? S_WAIT : S_EXEC;
          end
        end
        S_WAIT: begin
          lat_q <= lat_q - 1'b1;
          if (lat_q <= 8'd1) state_q <= S_EXEC;
        end
        S_EXEC: begin
          if (exec_done) begin
            pend_q  <= 1'b0;
            state_q <= S_IDLE;
          end else if (exec_retry) begin
            state_q <= S_IDLE;
          end
        end
        S_REFILL: begin
          tgt_i_q <= '0;
          state_q <= S_RESP;
        end
        S_RESP: begin
          if (free_valid) state_q <= S_IDLE;
          else if (up_resp_ready) tgt_i_q <= tgt_i_q + 1'b1;
        end
        default: state_q <= S_IDLE;
      endcase

      if (exec_hit_cnt)  st_q.hits         <= st_q.hits + 1'b1;
      if (exec_miss_cnt) st_q.misses       <= st_q.misses + 1'b1;
      if (exec_fwd_cnt)  st_q.wb_forwarded <= st_q.wb_forwarded + 1'b1;
      if (exec_pf_alloc) st_q.pf_allocated <= st_q.pf_allocated + 1'b1;
      if (exec_evict || refill_evict) st_q.evictions <= st_q.evictions + 1'b1;
      if (refill_fill || (state_q == S_EXEC && fill_valid)) st_q.fills <= st_q.fills + 1'b1;
      if (refill_nf_ret) st_q.nofill_returns <= st_q.nofill_returns + 1'b1;
      if (refill_nf_wb)  st_q.nofill_wb      <= st_q.nofill_wb + 1'b1;
    end
  end

  assign nfc_out_valid = nfc_out_q;
  assign nfc_out_addr  = nfc_out_addr_q;

  always_comb begin
    stats                = st_q;
    stats.nofill_alloc   = m_nf_alloc;
    stats.nofill_remain  = m_remain;
    stats.clr_by_nfc     = m_clr_nfc;
    stats.clr_by_nonspec = m_clr_acc;
  end

  // a returned line must belong to a live MSHR
  assert property (@(posedge clk) disable iff (!rst_n)
    (dn_resp_valid && dn_resp_ready) |-> (32'(dn_resp.id) < N_MSHR));
  // a response waiting for acceptance does not change
  assert property (@(posedge clk) disable iff (!rst_n)
    (up_resp_valid && !up_resp_ready) |=> $stable(up_resp));

endmodule
