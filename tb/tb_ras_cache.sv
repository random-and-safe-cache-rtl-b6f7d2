// tb_ras_cache: self-checking testbench for one cache level (ras_cache) on a
// behavioural memory (tb_mem_model, 20-cycle latency), with a small
// configuration (4 sets x 2 ways, 4 MSHRs) so that misses, evictions, MSHR
// and writeback-buffer stalls happen often.
//
// A reference memory (ref_mem, per line) is updated when a store or a
// write-back from above is accepted; every load response must equal the
// reference line at the time of the response. Directed phases then check each
// mechanism through the statistics and the memory traffic:
//   fill miss installs the line, hit latency is HIT_LAT; a no-fill miss is
//   not installed; a no-fill store miss leaves as a NoFill write-back; an
//   SHBfetch takes an MSHR and fills; a NoFillClear on an open no-fill MSHR
//   makes it fill and is forwarded the next cycle; a non-speculative access
//   merging into a no-fill MSHR clears it; a no-fill write-back that misses
//   is forwarded down; a fill write-back that misses is installed; dirty
//   victims are written back. A random phase mixes loads, stores,
//   write-backs, SHBfetches and NoFillClears with random response back-pressure.
// All stimulus uses $urandom; a watchdog stops a hang.
//
// The mechanisms checked follow the paper; the reduced sizes, the memory
// latency and the traffic mix are this testbench's own.
module tb_ras_cache;
  import ras_pkg::*;
  import tb_util_pkg::*;

  localparam int SETS = 4, WAYS = 2, NM = 4, NT = 4, WBD = 4, HL = 1, MLAT = 20;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic         up_req_valid, up_req_ready, up_resp_valid, up_resp_ready;
  mem_req_t     up_req;
  mem_resp_t    up_resp;
  logic         pf_valid, pf_ready, nfc_in_valid, nfc_out_valid;
  laddr_t       pf_addr, nfc_in_addr, nfc_out_addr;
  logic         dn_req_valid, dn_req_ready, dn_resp_valid, dn_resp_ready;
  mem_req_t     dn_req;
  mem_resp_t    dn_resp;
  logic         st_ins_valid;
  laddr_t       st_ins_addr;
  cache_stats_t stats;
  logic [31:0]  valid_lines;
  int           m_reads, m_writes, m_writes_nf;

  ras_cache #(.SETS(SETS), .WAYS(WAYS), .N_MSHR(NM), .N_TGT(NT), .WB_DEPTH(WBD),
              .HIT_LAT(HL), .SEED(32'h1234_5678)) dut (.*);

  tb_mem_model #(.LAT(MLAT)) u_mem (
    .clk, .rst_n, .req_valid(dn_req_valid), .req_ready(dn_req_ready), .req(dn_req),
    .resp_valid(dn_resp_valid), .resp_ready(dn_resp_ready), .resp(dn_resp),
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
    #2_000_000;
    $display("WATCHDOG timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  // ---------------- reference and monitors ----------------
  line_t ref_mem [laddr_t];
  function automatic line_t ref_line(input laddr_t a);
    return ref_mem.exists(a) ? ref_mem[a] : init_line(a);
  endfunction

  typedef struct { bit is_load; laddr_t addr; longint t; } out_t;
  out_t   outst [int];
  int     out_loads_line [laddr_t];
  longint cyc = 0;
  longint last_lat;
  int     n_load_resp = 0, n_store_ack = 0;
  int     nfc_out_seen = 0;
  logic   nfc_prev_v;
  laddr_t nfc_prev_a;
  int     dn_nofill_wb = 0;
  laddr_t last_nf_wb_addr;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (up_resp_valid && up_resp_ready) begin
        int id;
        id = int'(up_resp.id);
        check(outst.exists(id), $sformatf("response for unknown id %0d", id));
        if (outst.exists(id)) begin
          if (outst[id].is_load) begin
            check(up_resp.data == ref_line(outst[id].addr),
                  $sformatf("load data mismatch line %h", outst[id].addr));
            out_loads_line[outst[id].addr]--;
            n_load_resp++;
          end else n_store_ack++;
          last_lat = cyc - outst[id].t;
          outst.delete(id);
        end
      end
      if (up_req_valid && up_req_ready) begin
        out_t o;
        o.is_load = (up_req.rtype == REQ_LOAD); o.addr = up_req.addr; o.t = cyc;
        if (up_req.rtype == REQ_STORE)
          ref_mem[up_req.addr] = merge_word(ref_line(up_req.addr), int'(up_req.word),
                                            up_req.be, up_req.wdata);
        if (up_req.rtype == REQ_WRITEBACK) ref_mem[up_req.addr] = up_req.line;
        else outst[int'(up_req.id)] = o;
        if (o.is_load) begin
          if (!out_loads_line.exists(up_req.addr)) out_loads_line[up_req.addr] = 0;
          out_loads_line[up_req.addr]++;
        end
        check(st_ins_valid == (up_req.rtype == REQ_STORE), "st_ins pulse on accepted store");
      end
      // a NoFillClear that matched is forwarded one cycle later, same address
      if (nfc_out_valid) begin
        nfc_out_seen++;
        check(nfc_prev_v && nfc_out_addr == nfc_prev_a, "nfc_out follows a matching nfc_in");
      end
      nfc_prev_v <= nfc_in_valid;
      nfc_prev_a <= nfc_in_addr;
      if (dn_req_valid && dn_req_ready && dn_req.rtype == REQ_WRITEBACK && dn_req.nofill) begin
        dn_nofill_wb++;
        last_nf_wb_addr = dn_req.addr;
      end
    end
  end

  // ---------------- driver ----------------
  int next_id = 0;
  function automatic int alloc_id();
    while (outst.exists(next_id)) next_id = (next_id + 1) % 256;
    alloc_id = next_id;
    next_id = (next_id + 1) % 256;
  endfunction

  task automatic send(input req_type_e t, input laddr_t a, input bit nf,
                      input int word = 0, input logic [7:0] be = 8'hff,
                      input word_t wd = '0, input line_t ln = '0);
    mem_req_t r;
    r = '0;
    r.rtype = t; r.addr = a; r.nofill = nf; r.word = WIDX_W'(word); r.be = be;
    r.wdata = wd; r.line = ln;
    r.id = (t == REQ_WRITEBACK) ? '0 : id_t'(alloc_id());
    @(negedge clk);
    up_req_valid = 1'b1; up_req = r;
    do @(posedge clk); while (!up_req_ready);
    @(negedge clk);
    up_req_valid = 1'b0;
  endtask

  task automatic drain(input int extra = 0);
    int n = 0;
    repeat (3) @(posedge clk);
    while ((outst.size() != 0 || dn_req_valid || u_mem.q.size() != 0 || dut.m_busy != 0) && n < 5000) begin
      @(posedge clk); n++;
    end
    repeat (extra + 3) @(posedge clk);
  endtask

  task automatic pulse_nfc(input laddr_t a);
    @(negedge clk);
    nfc_in_valid = 1'b1; nfc_in_addr = a;
    @(negedge clk);
    nfc_in_valid = 1'b0;
  endtask

  // line address in set s with tag t
  function automatic laddr_t la(input int t, input int s);
    return laddr_t'(t * SETS + s);
  endfunction

  cache_stats_t s0;
  int v0, w0, wnf0, nfo0;
  bit rand_ready = 0;
  bit rand_nfc = 0;

  always @(negedge clk)
    up_resp_ready <= rand_ready ? ($urandom_range(0, 3) != 0) : 1'b1;

  initial begin
    up_req_valid = 0; up_req = '0; pf_valid = 0; pf_addr = '0;
    nfc_in_valid = 0; nfc_in_addr = '0; up_resp_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    // T1: fill miss installs the line; second access hits with HIT_LAT latency
    s0 = stats; v0 = valid_lines;
    send(REQ_LOAD, la(1, 0), 1'b0); drain();
    check(stats.fills == s0.fills + 1, "T1 fill counted");
    check(valid_lines == v0 + 1, "T1 line installed");
    send(REQ_LOAD, la(1, 0), 1'b0); drain();
    check(stats.hits == s0.hits + 1, "T1 second load hits");
    check(last_lat == HL, $sformatf("T1 hit latency %0d", last_lat));

    // T2: no-fill miss is not installed and misses again
    s0 = stats; v0 = valid_lines;
    send(REQ_LOAD, la(2, 1), 1'b1); drain();
    check(stats.nofill_returns == s0.nofill_returns + 1, "T2 no-fill return");
    check(valid_lines == v0, "T2 not installed");
    send(REQ_LOAD, la(2, 1), 1'b1); drain();
    check(stats.misses == s0.misses + 2, "T2 misses twice");
    check(stats.nofill_remain == s0.nofill_remain + 2, "T2 entries stayed no-fill");

    // T3: no-fill store miss: acknowledged, line leaves as NoFill write-back
    s0 = stats; v0 = valid_lines; wnf0 = m_writes_nf;
    send(REQ_STORE, la(3, 2), 1'b1, 3, 8'h0f, 64'h1111_2222_3333_4444); drain();
    check(stats.nofill_wb == s0.nofill_wb + 1, "T3 no-fill write-back");
    check(m_writes_nf == wnf0 + 1 && last_nf_wb_addr == la(3, 2), "T3 memory got NoFill write-back");
    check(valid_lines == v0, "T3 not installed");
    send(REQ_LOAD, la(3, 2), 1'b1); drain();   // data checked against the reference

    // T4: SHBfetch takes an MSHR, fills, then a load hits
    s0 = stats; v0 = valid_lines;
    @(negedge clk); pf_valid = 1; pf_addr = la(4, 3);
    do @(posedge clk); while (!pf_ready);
    @(negedge clk); pf_valid = 0;
    drain();
    check(stats.pf_accepted == s0.pf_accepted + 1 && stats.pf_allocated == s0.pf_allocated + 1,
          "T4 SHBfetch allocated");
    check(valid_lines == v0 + 1, $sformatf("T4 SHBfetch installed %0d %0d fills %0d/%0d mr %0d", valid_lines, v0, stats.fills, s0.fills, m_reads));
    send(REQ_LOAD, la(4, 3), 1'b1); drain();
    check(stats.hits == s0.hits + 1, "T4 load after SHBfetch hits");
    // SHBfetch of a resident line is dropped
    @(negedge clk); pf_valid = 1; pf_addr = la(4, 3);
    do @(posedge clk); while (!pf_ready);
    @(negedge clk); pf_valid = 0;
    drain();
    check(stats.pf_allocated == s0.pf_allocated + 1, "T4 resident SHBfetch dropped");

    // T5: NoFillClear turns an open no-fill MSHR into fill and is forwarded
    s0 = stats; v0 = valid_lines; nfo0 = nfc_out_seen;
    send(REQ_LOAD, la(5, 0), 1'b1);
    repeat (3) @(posedge clk);
    pulse_nfc(la(5, 0));
    pulse_nfc(la(9, 0));         // no MSHR: no match, not forwarded
    drain();
    check(stats.nfc_matched == s0.nfc_matched + 1, "T5 NoFillClear matched once");
    check(nfc_out_seen == nfo0 + 1, "T5 NoFillClear forwarded once");
    check(stats.clr_by_nfc == s0.clr_by_nfc + 1, "T5 cleared by NoFillClear");
    check(valid_lines == v0 + 1 || stats.evictions == s0.evictions + 1, "T5 line installed");
    send(REQ_LOAD, la(5, 0), 1'b1); drain();
    check(stats.hits == s0.hits + 1, "T5 load hits after NoFillClear");

    // T6: a fill access merging into a no-fill MSHR clears it
    s0 = stats;
    fork
      send(REQ_LOAD, la(6, 1), 1'b1);
      begin repeat (4) @(posedge clk); send(REQ_LOAD, la(6, 1), 1'b0); end
    join
    drain();
    check(stats.clr_by_nonspec == s0.clr_by_nonspec + 1, "T6 cleared by non-speculative access");
    check(stats.fills == s0.fills + 1, "T6 filled");
    send(REQ_LOAD, la(6, 1), 1'b1); drain();
    check(stats.hits == s0.hits + 1, "T6 load hits");

    // T7: no-fill write-back that misses is forwarded down
    s0 = stats; v0 = valid_lines; wnf0 = m_writes_nf;
    send(REQ_WRITEBACK, la(7, 2), 1'b1, 0, 8'hff, '0, {8{64'hdead_beef_0bad_f00d}}); drain();
    check(stats.wb_forwarded == s0.wb_forwarded + 1, "T7 write-back forwarded");
    check(m_writes_nf == wnf0 + 1, "T7 memory got it");
    check(valid_lines == v0, "T7 not installed");
    send(REQ_LOAD, la(7, 2), 1'b1); drain();

    // T8: fill write-back that misses is installed dirty
    s0 = stats;
    send(REQ_WRITEBACK, la(8, 3), 1'b0, 0, 8'hff, '0, {8{64'h0123_4567_89ab_cdef}}); drain();
    check(stats.fills == s0.fills + 1, "T8 write-back installed");
    send(REQ_LOAD, la(8, 3), 1'b1); drain();
    check(stats.hits == s0.hits + 1, "T8 load hits");

    // T9: dirty lines evicted by conflicting fills are written back
    s0 = stats; w0 = m_writes;
    for (int t = 10; t < 16; t++) send(REQ_STORE, la(t, 1), 1'b0, t % 8, 8'hff, 64'(t) << 8);
    drain();
    check(stats.evictions >= s0.evictions + 4, "T9 evictions");
    check(m_writes >= w0 + 3, "T9 dirty victims written back");
    for (int t = 10; t < 16; t++) send(REQ_LOAD, la(t, 1), 1'b0);
    drain();

    // T10: random traffic
    rand_ready = 1;
    fork
      begin
        for (int i = 0; i < 4000; i++) begin
          laddr_t a;
          int k;
          bit nf;
          a = la($urandom_range(0, 11), $urandom_range(0, SETS - 1));
          k = $urandom_range(0, 9);
          nf = 1'($urandom_range(0, 1));
          if (k < 5) send(REQ_LOAD, a, nf);
          else if (k < 9)
            send(REQ_STORE, a, nf, $urandom_range(0, 7), 8'($urandom), {$urandom, $urandom});
          else if (!out_loads_line.exists(a) || out_loads_line[a] == 0) begin
            line_t l;
            for (int w = 0; w < 16; w++) l[w*32 +: 32] = $urandom;
            send(REQ_WRITEBACK, a, nf, 0, 8'hff, '0, l);
          end
          if ($urandom_range(0, 3) == 0) @(negedge clk);
        end
      end
      begin
        for (int i = 0; i < 3000; i++) begin
          @(negedge clk);
          if ($urandom_range(0, 9) == 0) begin
            pf_valid = 1; pf_addr = la($urandom_range(0, 11), $urandom_range(0, SETS - 1));
            do @(posedge clk); while (!pf_ready);
            @(negedge clk); pf_valid = 0;
          end
          if ($urandom_range(0, 4) == 0) begin
            nfc_in_valid = 1; nfc_in_addr = la($urandom_range(0, 11), $urandom_range(0, SETS - 1));
            @(negedge clk); nfc_in_valid = 0;
          end
        end
      end
    join
    rand_ready = 0;
    drain(50);
    check(outst.size() == 0, "all requests answered");
    check(n_load_resp > 1500, $sformatf("load responses %0d", n_load_resp));
    check(stats.clr_by_nfc > s0.clr_by_nfc && stats.clr_by_nonspec > s0.clr_by_nonspec,
          "random phase cleared MSHRs both ways");
    check(stats.wb_forwarded > s0.wb_forwarded && stats.nofill_wb > s0.nofill_wb,
          "random phase forwarded no-fill write-backs");
    $display("stats: hits=%0d misses=%0d fills=%0d nfret=%0d nfwb=%0d fwd=%0d pf=%0d/%0d nfc=%0d clr_nfc=%0d clr_ns=%0d ev=%0d",
             stats.hits, stats.misses, stats.fills, stats.nofill_returns, stats.nofill_wb,
             stats.wb_forwarded, stats.pf_accepted, stats.pf_allocated, stats.nfc_matched,
             stats.clr_by_nfc, stats.clr_by_nonspec, stats.evictions);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
