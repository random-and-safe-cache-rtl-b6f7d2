// tb_ras_top: end-to-end self-checking testbench of the RaS cache hierarchy
// (ras_top) at its default, full-size parameters (ROB 192, SHB 4 entries,
// L1D 64x8, L2 2048x16) on a 100-cycle behavioural memory (tb_mem_model).
//
// A small out-of-order core model drives the ROB and load/store ports: it
// dispatches a random stream of loads and stores (at most MAX_INFLIGHT in
// the ROB), issues loads out of order among the oldest unissued ones, marks
// them done when their data returns (a few loads fault), marks stores done at
// dispatch and sends them to the L1D after they commit, and now and then
// squashes the younger part of the ROB. Its own copy of the Done/Squash
// state predicts the Spec bit, so the NoFill bit of every request the L1D
// accepts is checked: RaS-Spec - loads no-fill exactly when speculative,
// stores fill; RaS+ - everything no-fill. Every load response must equal a
// reference memory (updated when a store is accepted) at the time of the
// response.
//
// Phases: RaS-Spec (1 SHB entry, 4-line window, rate 3), RaS+ (4 entries,
// 64-line window, rate 3), RaS-Spec again. Addresses have locality (a current
// tag that changes now and then, 8 sets, 24 tags) so that both levels evict.
// At the end each mechanism is counted and a mechanism that never happened
// is a failure: speculative no-fill loads, non-speculative fill loads, RaS+
// no-fill requests, mode switches, SHBfetch allocations, NoFillClear matches
// in L1D and L2, MSHR clears by NoFillClear and by non-speculative access,
// no-fill returns in both levels, no-fill write-backs from L1D, forwarding of
// no-fill write-backs in L2, L2 hits, evictions in both levels, stalls of the
// core port, ROB squashes and fault flushes. A watchdog stops a hang.
//
// The mode rules, the SHB settings of each phase (R3E1W4, R3E4W64) and the
// sizes follow the paper; the core model, its instruction mix and the address
// pattern are this testbench's own.
module tb_ras_top;
  import ras_pkg::*;
  import tb_util_pkg::*;

  localparam int RE = 192;
  localparam int RW = $clog2(RE);
  localparam int MAX_INFLIGHT = 32;
  localparam int N_OPS = 8000;   // per phase

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  ras_mode_e    cfg_mode;
  logic         cfg_shb_enable;
  logic [2:0]   cfg_shb_active;
  logic [2:0]   cfg_win_log2;
  logic [7:0]   cfg_rate;
  logic         rob_disp_valid, rob_disp_is_load, rob_disp_ready;
  logic [RW-1:0] rob_disp_idx, rob_exec_idx, rob_done_idx, rob_squash_idx;
  logic         rob_exec_valid, rob_done_valid, rob_done_fault, rob_squash_valid;
  logic [PADDR_W-1:0] rob_exec_paddr, core_req_paddr;
  logic         rob_commit_valid, rob_flush_fault;
  logic         core_req_valid, core_req_ready, core_req_is_store;
  logic [7:0]   core_req_be;
  word_t        core_req_wdata;
  id_t          core_req_id;
  logic [RW-1:0] core_req_rob_idx;
  logic         core_resp_valid, core_resp_ready;
  mem_resp_t    core_resp;
  logic         mem_req_valid, mem_req_ready, mem_resp_valid, mem_resp_ready;
  mem_req_t     mem_req;
  mem_resp_t    mem_resp;
  cache_stats_t l1_stats, l2_stats;
  logic [31:0]  shb_fired, shb_issued, shb_dropped;
  logic         l1_req_nofill;
  int           m_reads, m_writes, m_writes_nf;

  ras_top dut (.*);

  tb_mem_model #(.LAT(100)) u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req(mem_req),
    .resp_valid(mem_resp_valid), .resp_ready(mem_resp_ready), .resp(mem_resp),
    .n_reads(m_reads), .n_writes(m_writes), .n_writes_nofill(m_writes_nf));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, msg);
    end
  endtask

  initial begin
    #20_000_000;
    $display("WATCHDOG timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  // ---------------- core model state ----------------
  bit     s_is_load [RE], s_fault [RE], s_issued [RE], s_done [RE], s_dfault [RE];
  laddr_t s_line [RE];
  int     s_word [RE];
  int    gen [RE];
  int    rob_q [$];            // slot indices, oldest first

  typedef struct { bit is_store; laddr_t line; int word; logic [7:0] be; word_t wd;
                   int slot; int gen; } creq_t;
  creq_t load_q [$];           // loads waiting for the core port
  creq_t store_q [$];          // committed stores waiting for the core port
  creq_t cur;
  bit    cur_v;
  typedef struct { bit is_store; laddr_t line; int slot; int gen; } out_t;
  out_t  outst [int];
  typedef struct { int slot; int gen; bit fault; } done_t;
  done_t done_q [$];

  line_t ref_mem [laddr_t];
  function automatic line_t ref_line(input laddr_t a);
    return ref_mem.exists(a) ? ref_mem[a] : init_line(a);
  endfunction

  function automatic bit model_spec(input int slot);
    foreach (rob_q[i]) begin
      if (rob_q[i] == slot) return 1'b0;
      if (!s_done[rob_q[i]] || s_dfault[rob_q[i]]) return 1'b1;
    end
    return 1'b0;
  endfunction

  // mechanism counters
  int n_spec_nf, n_nonspec_fill, n_plus_nf, n_mode_sw, n_stall, n_squash, n_flush;
  int n_loads_resp, n_stores_ack, n_committed, n_dispatched;

  // ---------------- monitor: checks, then state updates at each edge ----------------
  always @(posedge clk) if (rst_n) begin
    if (core_req_valid && !core_req_ready) n_stall++;
    if (core_resp_valid && core_resp_ready) begin
      int id;
      out_t ot;
      id = int'(core_resp.id);
      check(outst.exists(id), $sformatf("response for unknown id %0d", id));
      if (outst.exists(id)) begin
        ot = outst[id];
        if (!ot.is_store) begin
          check(core_resp.data == ref_line(ot.line),
                $sformatf("load data mismatch line %h", ot.line));
          n_loads_resp++;
          if (gen[ot.slot] == ot.gen) begin
            done_t d;
            d.slot = ot.slot; d.gen = ot.gen; d.fault = s_fault[d.slot];
            done_q.push_back(d);
          end
        end else n_stores_ack++;
        outst.delete(id);
      end
    end
    if (core_req_valid && core_req_ready) begin
      out_t o;
      o.is_store = cur.is_store; o.line = cur.line; o.slot = cur.slot; o.gen = cur.gen;
      outst[int'(core_req_id)] = o;
      if (cfg_mode == MODE_RAS_PLUS) begin
        check(l1_req_nofill, "RaS+: request must be no-fill");
        n_plus_nf++;
      end else if (cur.is_store) begin
        check(!l1_req_nofill, "RaS-Spec: store must fill");
      end else if (gen[cur.slot] == cur.gen) begin   // (a squashed load has no ROB entry)
        bit sp;
        sp = model_spec(cur.slot);
        check(l1_req_nofill == sp, $sformatf("RaS-Spec: load nofill %0d expected %0d",
                                             l1_req_nofill, sp));
        if (sp) n_spec_nf++; else n_nonspec_fill++;
      end
      if (cur.is_store)
        ref_mem[cur.line] = merge_word(ref_line(cur.line), cur.word, cur.be, cur.wd);
      cur_v = 0;
    end
    // ROB events of this edge, in the ROB's own order
    if (rob_done_valid) begin
      s_done[int'(rob_done_idx)] = 1;
      s_dfault[int'(rob_done_idx)] = rob_done_fault;
    end
    if (rob_flush_fault) begin
      foreach (rob_q[i]) gen[rob_q[i]]++;
      rob_q.delete();
      n_flush++;
    end else if (rob_commit_valid) begin
      int s;
      check(rob_q.size() > 0 && s_done[rob_q[0]] && !s_dfault[rob_q[0]], "commit of a done head");
      s = rob_q.pop_front();
      if (!s_is_load[s]) begin
        creq_t c;
        c.is_store = 1; c.line = s_line[s]; c.word = s_word[s];
        c.be = 8'($urandom); c.wd = {$urandom, $urandom}; c.slot = s; c.gen = gen[s];
        store_q.push_back(c);
      end
      n_committed++;
    end
    if (rob_squash_valid && !rob_flush_fault) begin
      int k;
      k = -1;
      foreach (rob_q[i]) if (rob_q[i] == int'(rob_squash_idx)) k = i;
      check(k >= 0, "squash index in ROB");
      while (rob_q.size() > k + 1) gen[rob_q.pop_back()]++;
      n_squash++;
    end
    if (rob_disp_valid && rob_disp_ready && !rob_flush_fault) begin
      rob_q.push_back(int'(rob_disp_idx));
      n_dispatched++;
    end
  end

  // ---------------- driver ----------------
  int   ops_left = 0;
  int   cur_tag = 0;
  int   next_id = 0;

  function automatic laddr_t gen_line();
    if ($urandom_range(0, 15) == 0) cur_tag = $urandom_range(0, 23);
    return laddr_t'((cur_tag << 11) | $urandom_range(0, 7));
  endfunction

  function automatic int free_id();
    while (outst.exists(next_id)) next_id = (next_id + 1) % 256;
    return next_id;
  endfunction

  always @(negedge clk) if (rst_n) begin
    rob_disp_valid   <= 0;
    rob_exec_valid   <= 0;
    rob_done_valid   <= 0;
    rob_done_fault   <= 0;
    rob_squash_valid <= 0;
    core_resp_ready  <= ($urandom_range(0, 7) != 0);

    // squash the younger part of the ROB now and then (nothing else this cycle)
    if (rob_q.size() > 4 && $urandom_range(0, 199) == 0 ) begin
      int k;
      k = $urandom_range(1, rob_q.size() - 2);   // never the head, which may retire now
      rob_squash_valid <= 1;
      rob_squash_idx   <= RW'(rob_q[k]);
      for (int i = k + 1; i < rob_q.size(); i++) begin
        load_q = load_q.find(x) with (x.slot != rob_q[i]);
        done_q = done_q.find(x) with (x.slot != rob_q[i]);
      end
    end else begin
      // completion: one done per cycle
      while (done_q.size() > 0 && gen[done_q[0].slot] != done_q[0].gen) void'(done_q.pop_front());
      if (done_q.size() > 0) begin
        done_t d;
        d = done_q.pop_front();
        rob_done_valid <= 1; rob_done_idx <= RW'(d.slot); rob_done_fault <= d.fault;
      end
      // dispatch
      if (ops_left > 0 && rob_disp_ready && rob_q.size() < MAX_INFLIGHT && $urandom_range(0, 3) != 0) begin
        int s;
        s = int'(rob_disp_idx);
        s_is_load[s] = ($urandom_range(0, 9) < 6);
        s_line[s]    = gen_line();
        s_word[s]    = $urandom_range(0, 7);
        s_fault[s]   = s_is_load[s] && ($urandom_range(0, 199) == 0);
        s_issued[s]  = 0;
        s_done[s]    = 0;
        s_dfault[s]  = 0;
        gen[s]++;
        rob_disp_valid   <= 1;
        rob_disp_is_load <= s_is_load[s];
        ops_left--;
        if (!s_is_load[s]) begin
          done_t d;
          d.slot = s; d.gen = gen[s]; d.fault = 0;
          done_q.push_back(d);
        end
      end
      // issue a load among the oldest unissued ones: address to the ROB, request queued
      begin
        int cand [$];
        cand.delete();
        foreach (rob_q[i])
          if (s_is_load[rob_q[i]] && !s_issued[rob_q[i]] && cand.size() < 4)
            cand.push_back(rob_q[i]);
        if (cand.size() > 0 && $urandom_range(0, 1) == 0) begin
          int s;
          creq_t c;
          s = cand[$urandom_range(0, cand.size() - 1)];
          s_issued[s] = 1;
          rob_exec_valid <= 1; rob_exec_idx <= RW'(s);
          rob_exec_paddr <= {s_line[s], 6'(s_word[s] * 8)};
          c.is_store = 0; c.line = s_line[s]; c.word = s_word[s]; c.be = '0; c.wd = '0;
          c.slot = s; c.gen = gen[s];
          load_q.push_back(c);
        end
      end
    end

    // core port: keep the presented request until accepted
    if (!cur_v) begin
      while (load_q.size() > 0 && gen[load_q[0].slot] != load_q[0].gen) void'(load_q.pop_front());
      if (store_q.size() > 0 && (load_q.size() == 0 || $urandom_range(0, 1) == 0)) begin
        cur = store_q.pop_front(); cur_v = 1;
      end else if (load_q.size() > 0) begin
        cur = load_q.pop_front(); cur_v = 1;
      end
      if (cur_v) begin
        core_req_id <= id_t'(free_id());
        next_id = (next_id + 1) % 256;
      end
    end
    core_req_valid    <= cur_v;
    core_req_is_store <= cur.is_store;
    core_req_paddr    <= {cur.line, 6'(cur.word * 8)};
    core_req_be       <= cur.is_store ? cur.be : 8'hff;
    core_req_wdata    <= cur.wd;
    core_req_rob_idx  <= RW'(cur.slot);
  end

  task automatic run_phase(input ras_mode_e m, input int active, input int win, input int n);
    @(negedge clk);
    if (m != cfg_mode) n_mode_sw++;
    cfg_mode = m; cfg_shb_active = 3'(active); cfg_win_log2 = 3'(win); cfg_rate = 8'd3;
    ops_left = n;
    while (ops_left > 0 || rob_q.size() > 0 || store_q.size() > 0 || cur_v || outst.size() > 0)
      @(posedge clk);
    repeat (20) @(posedge clk);
  endtask

  cache_stats_t a1, a2;
  initial begin
    cfg_mode = MODE_RAS_SPEC; cfg_shb_enable = 1; cfg_shb_active = 3'd1; cfg_win_log2 = 3'd2;
    cfg_rate = 8'd3;
    rob_disp_valid = 0; rob_disp_is_load = 0; rob_exec_valid = 0; rob_exec_idx = '0;
    rob_exec_paddr = '0; rob_done_valid = 0; rob_done_idx = '0; rob_done_fault = 0;
    rob_squash_valid = 0; rob_squash_idx = '0; core_req_valid = 0; core_req_is_store = 0;
    core_req_paddr = '0; core_req_be = '0; core_req_wdata = '0; core_req_id = '0;
    core_req_rob_idx = '0; core_resp_ready = 1; cur_v = 0; cur = '{default: 0};
    foreach (gen[i]) gen[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    run_phase(MODE_RAS_SPEC, 1, 2, N_OPS);
    $display("after RaS-Spec: committed=%0d loads=%0d", n_committed, n_loads_resp);
    run_phase(MODE_RAS_PLUS, 4, 6, N_OPS);
    $display("after RaS+: committed=%0d loads=%0d", n_committed, n_loads_resp);
    run_phase(MODE_RAS_SPEC, 1, 2, N_OPS / 2);

    a1 = l1_stats; a2 = l2_stats;
    $display("L1: hits=%0d misses=%0d fills=%0d nfret=%0d nfwb=%0d pf=%0d/%0d nfc=%0d clr_nfc=%0d clr_ns=%0d ev=%0d",
             a1.hits, a1.misses, a1.fills, a1.nofill_returns, a1.nofill_wb, a1.pf_accepted,
             a1.pf_allocated, a1.nfc_matched, a1.clr_by_nfc, a1.clr_by_nonspec, a1.evictions);
    $display("L2: hits=%0d misses=%0d fills=%0d nfret=%0d fwd=%0d nfc=%0d clr_nfc=%0d ev=%0d",
             a2.hits, a2.misses, a2.fills, a2.nofill_returns, a2.wb_forwarded, a2.nfc_matched,
             a2.clr_by_nfc, a2.evictions);
    $display("core: spec_nf=%0d nonspec=%0d plus_nf=%0d modesw=%0d stalls=%0d squash=%0d flush=%0d shb fired=%0d issued=%0d dropped=%0d mem r=%0d w=%0d wnf=%0d",
             n_spec_nf, n_nonspec_fill, n_plus_nf, n_mode_sw, n_stall, n_squash, n_flush,
             shb_fired, shb_issued, shb_dropped, m_reads, m_writes, m_writes_nf);

    check(outst.size() == 0, "all requests answered");
    check(n_spec_nf > 0,          "mechanism: speculative no-fill load");
    check(n_nonspec_fill > 0,     "mechanism: non-speculative fill load");
    check(n_plus_nf > 0,          "mechanism: RaS+ no-fill request");
    check(n_mode_sw >= 2,         "mechanism: mode switch");
    check(a1.pf_allocated > 0,    "mechanism: SHBfetch allocation");
    check(a1.nfc_matched > 0,     "mechanism: NoFillClear match in L1D");
    check(a2.nfc_matched > 0,     "mechanism: NoFillClear match in L2");
    check(a1.clr_by_nfc > 0,      "mechanism: MSHR cleared by NoFillClear");
    check(a1.clr_by_nonspec > 0,  "mechanism: MSHR cleared by non-speculative access");
    check(a1.nofill_returns > 0,  "mechanism: L1D no-fill return");
    check(a2.nofill_returns > 0,  "mechanism: L2 no-fill return");
    check(a1.nofill_wb > 0,       "mechanism: L1D no-fill write-back");
    check(a2.wb_forwarded > 0,    "mechanism: L2 no-fill write-back forwarding");
    check(a2.hits > 0,            "mechanism: L2 hit");
    check(a1.evictions > 0,       "mechanism: L1D eviction");
    check(a2.evictions > 0,       "mechanism: L2 eviction");
    check(n_stall > 0,            "mechanism: core port stall");
    check(n_squash > 0,           "mechanism: ROB squash");
    check(n_flush > 0,            "mechanism: fault flush");
    check(n_committed > N_OPS / 2,    "instructions committed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
