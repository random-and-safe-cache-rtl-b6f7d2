// tb_shb: self-checking test of the Safe History Buffer. Checks FIFO-like
// insertion order (store newer than a load of the same cycle), the exact
// issue period for the rates 3, 5, 7 and 10, that SHBfetch and NoFillClear carry the
// same line, that every fetched line lies in the aligned window of a live
// valid entry, that all live entries and all window offsets are used, that
// only the newest cfg_active entries are used, and that a fetch not accepted
// by the next firing is counted as dropped.
//
// The checked rates (one SHBfetch per 3, 5, 7 or 10 cycles), window alignment and
// NoFillClear address follow the paper; the drop-and-replace rule checked is
// this design's own.
module tb_shb;
  import ras_pkg::*;
  localparam int E = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_enable; logic [2:0] cfg_active; logic [2:0] cfg_win_log2; logic [7:0] cfg_rate;
  logic ins_load_valid, ins_store_valid; laddr_t ins_load_addr, ins_store_addr;
  logic pf_valid, pf_ready, nfc_valid; laddr_t pf_addr, nfc_addr;
  logic [E-1:0] entry_valid; laddr_t entry_addr [E];
  logic [31:0] fired, issued, dropped;

  shb #(.ENTRIES(E)) dut (.clk, .rst_n, .cfg_enable, .cfg_active, .cfg_win_log2, .cfg_rate,
    .ins_load_valid, .ins_load_addr, .ins_store_valid, .ins_store_addr,
    .pf_valid, .pf_ready, .pf_addr, .nfc_valid, .nfc_addr, .entry_valid, .entry_addr,
    .stat_fired(fired), .stat_issued(issued), .stat_dropped(dropped));

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // collect NoFillClear pulses
  int     nfc_cyc [$];
  laddr_t nfc_line [$];
  always @(posedge clk) if (rst_n && nfc_valid) begin
    nfc_cyc.push_back(cyc);
    nfc_line.push_back(nfc_addr);
    if (pf_addr != nfc_addr) begin failures++; $display("FAIL: pf/nfc address differ"); end
  end

  task automatic ins(input bit ld, input laddr_t la, input bit st, input laddr_t sa);
    @(negedge clk);
    ins_load_valid = ld; ins_load_addr = la; ins_store_valid = st; ins_store_addr = sa;
    @(negedge clk);
    ins_load_valid = 0; ins_store_valid = 0;
  endtask

  // run n firings and check the period and window membership
  task automatic run_and_check(input int n, input int rate, input int active, input int wl,
                               output int used_entry_mask, output int offsets_seen);
    laddr_t base [E];
    bit [63:0] offs;
    int start;
    offs = '0; used_entry_mask = 0;
    for (int i = 0; i < E; i++) base[i] = entry_addr[i] >> wl;
    nfc_cyc.delete(); nfc_line.delete();
    start = cyc;
    wait (nfc_cyc.size() >= n);
    for (int k = 1; k < n; k++)
      check(nfc_cyc[k] - nfc_cyc[k-1] == rate, $sformatf("period %0d != %0d", nfc_cyc[k]-nfc_cyc[k-1], rate));
    for (int k = 0; k < n; k++) begin
      bit found = 0;
      for (int i = 0; i < active; i++)
        if (entry_valid[i] && (nfc_line[k] >> wl) == base[i]) begin
          found = 1; used_entry_mask |= (1 << i);
        end
      check(found, $sformatf("line %h outside live windows", nfc_line[k]));
      offs[nfc_line[k] & ((64'd1 << wl) - 1)] = 1'b1;
    end
    offsets_seen = $countones(offs);
  endtask

  int used, offs;
  initial begin
    cfg_enable = 1; cfg_active = 1; cfg_win_log2 = 0; cfg_rate = 3; pf_ready = 1;
    ins_load_valid = 0; ins_store_valid = 0; ins_load_addr = '0; ins_store_addr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // nothing valid: firings happen, no fetch
    repeat (20) @(posedge clk);
    check(nfc_cyc.size() == 0 && fired >= 5, "no fetch from an empty SHB");

    // one entry, window 1: fetch the authorized line itself every 3 cycles
    ins(1, 34'h0_1234_5678, 0, '0);
    check(entry_valid == 4'b0001 && entry_addr[0] == 34'h0_1234_5678, "first insertion");
    run_and_check(20, 3, 1, 0, used, offs);
    check(nfc_line[0] == 34'h0_1234_5678 && nfc_line[19] == 34'h0_1234_5678, "W1 fetches the SHB address");

    // load and store in the same cycle: store is newer
    ins(1, 34'h0_0000_1000, 1, 34'h0_0000_2000);
    check(entry_addr[0] == 34'h0_0000_2000 && entry_addr[1] == 34'h0_0000_1000 &&
          entry_addr[2] == 34'h0_1234_5678 && entry_valid == 4'b0111, "FIFO order with two insertions");
    ins(0, '0, 1, 34'h0_0000_3040);
    ins(1, 34'h0_0000_4080, 0, '0);
    check(entry_addr[0] == 34'h0_0000_4080 && entry_addr[3] == 34'h0_0000_1000 &&
          entry_valid == 4'b1111, "oldest entry shifted out");

    // four live entries, window 4 lines, rate 3
    cfg_active = 4; cfg_win_log2 = 2;
    @(posedge clk);
    run_and_check(400, 3, 4, 2, used, offs);
    check(used == 4'b1111, $sformatf("all live entries used (%b)", used));
    check(offs == 4, "all 4 window offsets used");

    // two live entries only, rate 5
    cfg_active = 2; cfg_rate = 5;
    repeat (12) @(posedge clk);
    run_and_check(200, 5, 2, 2, used, offs);
    check(used == 2'b11, "only the two newest entries used");

    // the remaining rates of the sweep: one SHBfetch per 7 and per 10 cycles
    cfg_active = 4; cfg_rate = 7;
    repeat (24) @(posedge clk);
    run_and_check(100, 7, 4, 2, used, offs);
    cfg_rate = 10;
    repeat (24) @(posedge clk);
    run_and_check(100, 10, 4, 2, used, offs);

    // 64-line window (way size of the L1D), rate 3
    cfg_active = 4; cfg_win_log2 = 6; cfg_rate = 3;
    repeat (12) @(posedge clk);
    run_and_check(2000, 3, 4, 6, used, offs);
    check(offs == 64, $sformatf("all 64 window offsets used (%0d)", offs));

    // entries that are not window-aligned: the window is still the aligned one
    for (int i = 0; i < 4; i++) ins(1, laddr_t'({$urandom, $urandom}), 0, '0);
    run_and_check(400, 3, 4, 6, used, offs);
    cfg_win_log2 = 2;
    repeat (12) @(posedge clk);
    run_and_check(400, 3, 4, 2, used, offs);
    check(offs == 4, "unaligned entries: all 4 window offsets used");

    // a fetch not accepted before the next firing is replaced and counted
    begin
      int d0;
      d0 = dropped;
      pf_ready = 0;
      repeat (31) @(posedge clk);
      check(dropped - d0 >= 9, $sformatf("drops counted (%0d)", dropped - d0));
      check(pf_valid, "fetch held while not accepted");
      pf_ready = 1;
    end

    // disable stops firing
    cfg_enable = 0;
    repeat (3) @(posedge clk);
    nfc_cyc.delete();
    repeat (30) @(posedge clk);
    check(nfc_cyc.size() == 0, "disabled SHB issues nothing");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
