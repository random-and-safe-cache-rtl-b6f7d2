// tb_mshr_file: self-checking test of the MSHR file with NoFill bits. Fills
// all entries, checks lookup, full, lowest-index issue order and the NoFill
// bit sent with each issue; merges loads up to the target limit; clears
// NoFill by NoFillClear (match reported, non-matching address dropped) and by
// a merging access with NoFill clear; frees entries and checks the three
// counters of how no-fill entries ended. Then a random phase compares lookup
// and NoFill state with a reference model.
//
// The rules checked (NoFill kept per entry, cleared by a matching NoFillClear
// or a fill access) follow the paper; the target limit and counters checked
// are this design's own.
module tb_mshr_file;
  import ras_pkg::*;
  localparam int N = 16, T = 4, IW = 4, TW = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  laddr_t lk_addr; logic lk_hit, lk_tgt_full, full; logic [IW-1:0] lk_idx, free_idx;
  logic alloc_valid, alloc_nofill, alloc_tgt, alloc_store; mshr_kind_e alloc_kind; laddr_t alloc_addr; id_t alloc_tgt_id;
  logic mg_valid, mg_tgt, mg_store, mg_clear; logic [IW-1:0] mg_idx; id_t mg_tgt_id;
  logic nfc_valid, nfc_match; laddr_t nfc_addr;
  logic iss_valid, iss_nofill, iss_ready; logic [IW-1:0] iss_idx; laddr_t iss_addr;
  logic [IW-1:0] rd_idx; laddr_t rd_addr; logic rd_nofill, rd_store; mshr_kind_e rd_kind;
  logic [TW-1:0] rd_ntgt; id_t rd_tgt [T];
  logic free_valid; logic [IW-1:0] free_en_idx;
  logic [31:0] stat_nofill_alloc, stat_remain, stat_clr_nfc, stat_clr_access; logic [IW:0] busy;

  mshr_file #(.N(N), .N_TGT(T)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end
  endtask
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic idle();
    alloc_valid = 0; mg_valid = 0; nfc_valid = 0; free_valid = 0; iss_ready = 0;
    mg_tgt = 0; mg_store = 0; mg_clear = 0; alloc_tgt = 0; alloc_store = 0;
  endtask

  // reference model
  bit     r_v [N], r_nf [N];
  laddr_t r_a [N];

  initial begin
    idle(); lk_addr = '0; alloc_kind = MK_LOAD; alloc_addr = '0; alloc_nofill = 0; alloc_tgt_id = '0;
    mg_idx = '0; mg_tgt_id = '0; nfc_addr = '0; rd_idx = '0; free_en_idx = '0;
    repeat (3) @(posedge clk); rst_n = 1;

    // allocate 16 entries; odd ones no-fill
    for (int i = 0; i < N; i++) begin
      @(negedge clk); idle();
      check(!full && free_idx == IW'(i), $sformatf("free index %0d", i));
      alloc_valid = 1; alloc_kind = (i % 3 == 0) ? MK_STORE : MK_LOAD; alloc_addr = laddr_t'(32'h100 + i);
      alloc_nofill = i[0]; alloc_tgt = 1; alloc_tgt_id = id_t'(i); alloc_store = (i % 3 == 0);
      r_v[i] = 1; r_nf[i] = i[0]; r_a[i] = laddr_t'(32'h100 + i);
    end
    @(negedge clk); idle(); #1;
    check(full && busy == 16 && stat_nofill_alloc == 8, "all entries allocated");
    lk_addr = laddr_t'(32'h105); #1;
    check(lk_hit && lk_idx == 5 && !lk_tgt_full, "lookup finds entry 5");
    lk_addr = laddr_t'(32'h200); #1;
    check(!lk_hit, "lookup misses unknown line");

    // issue order: lowest index first, NoFill carried
    for (int i = 0; i < N; i++) begin
      #1; check(iss_valid && iss_idx == IW'(i) && iss_addr == laddr_t'(32'h100 + i) && iss_nofill == i[0],
                $sformatf("issue %0d", i));
      iss_ready = 1; @(negedge clk); iss_ready = 0;
    end
    #1; check(!iss_valid, "all issued");

    // merge three more loads into entry 3 (target list of 4 then full)
    for (int k = 0; k < 3; k++) begin
      @(negedge clk); idle(); mg_valid = 1; mg_idx = 3; mg_tgt = 1; mg_tgt_id = id_t'(40 + k);
    end
    @(negedge clk); idle(); lk_addr = laddr_t'(32'h103); rd_idx = 3; #1;
    check(lk_tgt_full && rd_ntgt == 4 && rd_tgt[0] == 3 && rd_tgt[1] == 40 && rd_tgt[3] == 42, "target list");
    check(rd_store == 1 && rd_kind == MK_STORE && rd_nofill == 1, "entry 3 fields");

    // NoFillClear on entry 5 (no-fill) and on an unknown line
    nfc_valid = 1; nfc_addr = laddr_t'(32'h105); #1;
    check(nfc_match, "NoFillClear matches");
    @(negedge clk); idle(); nfc_valid = 1; nfc_addr = laddr_t'(32'h999); #1;
    check(!nfc_match, "NoFillClear without match is dropped");
    @(negedge clk); idle(); rd_idx = 5; #1;
    check(rd_nofill == 0, "NoFill cleared by NoFillClear");
    // non-speculative access merges into entry 7
    mg_valid = 1; mg_idx = 7; mg_clear = 1; mg_store = 1;
    @(negedge clk); idle(); rd_idx = 7; #1;
    check(rd_nofill == 0 && rd_store == 1, "NoFill cleared by access");
    // NoFillClear on a fill entry changes nothing
    nfc_valid = 1; nfc_addr = laddr_t'(32'h104);
    @(negedge clk); idle(); rd_idx = 4; #1;
    check(rd_nofill == 0, "fill entry stays fill");

    // free 5 (cleared by nfc), 7 (cleared by access), 9 and 11 (remain), 4 (fill)
    for (int k = 0; k < 5; k++) begin
      int ix;
      ix = (k == 0) ? 5 : (k == 1) ? 7 : (k == 2) ? 9 : (k == 3) ? 11 : 4;
      @(negedge clk); idle(); free_valid = 1; free_en_idx = IW'(ix);
    end
    @(negedge clk); idle(); #1;
    check(stat_clr_nfc == 1 && stat_clr_access == 1 && stat_remain == 2, "counters of no-fill outcomes");
    check(!full && free_idx == 4 && busy == 11, "freed entries reusable");

    // free the rest
    for (int i = 0; i < N; i++) begin
      @(negedge clk); idle(); free_valid = 1; free_en_idx = IW'(i);
    end
    @(negedge clk); idle();
    for (int i = 0; i < N; i++) r_v[i] = 0;

    // random phase against the model
    for (int c = 0; c < 3000; c++) begin
      int op; laddr_t a;
      @(negedge clk); idle();
      a = laddr_t'($urandom_range(0, 40));
      lk_addr = a; #1;
      begin
        bit h; int hi; h = 0; hi = 0;
        for (int i = N-1; i >= 0; i--) if (r_v[i] && r_a[i] == a) begin h = 1; hi = i; end
        check(lk_hit == h && (!h || lk_idx == IW'(hi)), "random lookup");
        if (h) begin rd_idx = IW'(hi); #1; check(rd_nofill == r_nf[hi], "random nofill"); end
        op = $urandom_range(0, 3);
        if (op == 0 && !h && !full) begin
          alloc_valid = 1; alloc_addr = a; alloc_nofill = $urandom_range(0, 1);
          r_v[free_idx] = 1; r_a[free_idx] = a; r_nf[free_idx] = alloc_nofill;
        end else if (op == 1) begin
          nfc_valid = 1; nfc_addr = a;
          if (h) r_nf[hi] = 0;
        end else if (op == 2 && h) begin
          free_valid = 1; free_en_idx = IW'(hi); r_v[hi] = 0;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
