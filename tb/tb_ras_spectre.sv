// tb_ras_spectre: the Spectre v1 flush-reload experiment run on the full-size
// RaS hierarchy (ras_top with default parameters, 100-cycle memory).
//
// The core is driven step by step. An older instruction (the unresolved
// branch) is dispatched and left unfinished; a younger load then reads
// probe[secret] (one 64-byte line per value) while it is speculative. The
// branch then resolves as mispredicted: the load is squashed and the branch
// commits. The attacker finally reloads probe lines non-speculatively and
// times each access from acceptance to response.
//
// Checks, in RaS-Spec (R3E1W4) and in RaS+ (R3E4W64):
//  * the speculative probe load was sent no-fill and returned correct data;
//  * reloading probe[secret] afterwards takes a full memory round trip, like
//    every other untouched probe line, so the secret is not visible;
//  * control: the same access done non-speculatively in RaS-Spec is
//    installed, and its reload is a 1-cycle L1D hit, which shows the
//    measurement would see a fill (in RaS+ it stays a miss: no demand fill).
// Prime-probe variant (RaS-Spec): the attacker fills the 8 ways of L1D set
// SECRET, the victim touches that set speculatively, and all 8 lines must
// still hit; as a control, one normal access to the set evicts a primed line.
// Each experiment uses a fresh probe region in its own 64-line block, so SHB
// entries from earlier experiments cannot fetch into it.
//
// The secret value 30 and the flush-reload steps follow the paper's example;
// the step-by-step core driver, the regions and the thresholds are this
// testbench's own. A watchdog stops a hang.
module tb_ras_spectre;
  import ras_pkg::*;
  import tb_util_pkg::*;

  localparam int RW = $clog2(192);
  localparam int SECRET = 30;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  ras_mode_e    cfg_mode;
  logic         cfg_shb_enable;
  logic [2:0]   cfg_shb_active, cfg_win_log2;
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
      $display("FAIL @%0t: %s", $time, msg);
    end
  endtask

  initial begin
    #5_000_000;
    $display("WATCHDOG timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  int next_id = 0;

  task automatic dispatch(input bit is_load, output logic [RW-1:0] idx);
    @(negedge clk);
    while (!rob_disp_ready) @(negedge clk);
    rob_disp_valid = 1; rob_disp_is_load = is_load; idx = rob_disp_idx;
    @(negedge clk);
    rob_disp_valid = 0;
  endtask

  task automatic finish_insn(input logic [RW-1:0] idx);
    @(negedge clk);
    rob_done_valid = 1; rob_done_idx = idx; rob_done_fault = 0;
    @(negedge clk);
    rob_done_valid = 0;
  endtask

  task automatic squash_after(input logic [RW-1:0] idx);
    @(negedge clk);
    rob_squash_valid = 1; rob_squash_idx = idx;
    @(negedge clk);
    rob_squash_valid = 0;
  endtask

  // load one probe line; returns the latency in cycles and the NoFill bit
  task automatic load(input laddr_t line, input logic [RW-1:0] idx,
                      output int lat, output bit nf);
    id_t id;
    int  t;
    id = id_t'(next_id); next_id = (next_id + 1) % 256;
    @(negedge clk);
    rob_exec_valid = 1; rob_exec_idx = idx; rob_exec_paddr = {line, 6'd0};
    core_req_valid = 1; core_req_is_store = 0; core_req_paddr = {line, 6'd0};
    core_req_be = 8'hff; core_req_wdata = '0; core_req_id = id; core_req_rob_idx = idx;
    @(posedge clk);
    while (!core_req_ready) @(posedge clk);
    nf = l1_req_nofill;
    t = 0;
    @(negedge clk);
    rob_exec_valid = 0; core_req_valid = 0;
    forever begin
      @(posedge clk);
      t++;
      if (core_resp_valid && core_resp.id == id) break;
    end
    check(core_resp.data == init_line(line), $sformatf("probe data line %h", line));
    lat = t;
  endtask

  task automatic wait_rob_empty();
    while (dut.rob_occ != 0) @(posedge clk);
  endtask

  // one non-speculative attacker reload: dispatch, load, finish, retire
  task automatic reload(input laddr_t line, output int lat);
    logic [RW-1:0] i;
    bit nf;
    dispatch(1, i);
    load(line, i, lat, nf);
    finish_insn(i);
    wait_rob_empty();
  endtask

  int n_spec_nf = 0, n_secret_miss = 0, n_control_hit = 0;

  task automatic experiment(input ras_mode_e m, input int region);
    logic [RW-1:0] br, ld;
    laddr_t base;
    int lat, lat_sec, lat_other;
    bit nf;
    base = laddr_t'(region) << 6;          // 64-line aligned, fresh
    @(negedge clk);
    cfg_mode = m;
    if (m == MODE_RAS_SPEC) begin cfg_shb_active = 1; cfg_win_log2 = 2; end
    else begin cfg_shb_active = 4; cfg_win_log2 = 6; end
    // victim: speculative access to probe[SECRET]
    dispatch(0, br);                       // unresolved branch
    dispatch(1, ld);
    load(base + laddr_t'(SECRET), ld, lat, nf);
    check(nf, "speculative probe load sent no-fill");
    if (nf) n_spec_nf++;
    squash_after(br);                      // misprediction: the load is gone
    finish_insn(br);
    wait_rob_empty();
    repeat (200) @(posedge clk);
    // attacker: reload the secret line and an untouched one
    reload(base + laddr_t'(SECRET), lat_sec);
    reload(base + laddr_t'(SECRET + 7), lat_other);
    $display("mode %0d: reload secret line %0d cycles, other line %0d cycles", m, lat_sec, lat_other);
    check(lat_sec > 100, $sformatf("secret line not cached after speculative access (%0d)", lat_sec));
    check(lat_other > 100, "untouched line misses");
    if (lat_sec > 100) n_secret_miss++;
    // control: a non-speculative access to another line, then its reload
    reload(base + laddr_t'(SECRET + 20), lat);
    reload(base + laddr_t'(SECRET + 20), lat);
    if (m == MODE_RAS_SPEC) begin
      check(lat == 1, $sformatf("RaS-Spec: non-speculative access fills, reload hits (%0d)", lat));
      if (lat == 1) n_control_hit++;
    end
  endtask

  // prime-probe variant (RaS-Spec): fill L1D set SECRET with 8 attacker
  // lines, let the victim touch the set speculatively, probe the 8 lines
  int n_pp_clean = 0, n_pp_control = 0;
  task automatic experiment_pp(input int region);
    logic [RW-1:0] br, ld;
    int lat, misses;
    bit nf;
    @(negedge clk);
    cfg_mode = MODE_RAS_SPEC; cfg_shb_active = 1; cfg_win_log2 = 2;
    // prime until one whole pass hits (random replacement may evict a line
    // primed earlier in the same pass)
    for (int pass = 0; pass < 30; pass++) begin
      misses = 0;
      for (int k = 0; k < 8; k++) begin
        reload((laddr_t'(region + k) << 6) | laddr_t'(SECRET), lat);
        if (lat != 1) misses++;
      end
      if (pass > 0 && misses == 0) break;
    end
    check(misses == 0, "prime-probe: set primed");
    dispatch(0, br);
    dispatch(1, ld);
    load((laddr_t'(region + 8) << 6) | laddr_t'(SECRET), ld, lat, nf);
    check(nf, "prime-probe: speculative load no-fill");
    squash_after(br);
    finish_insn(br);
    wait_rob_empty();
    misses = 0;
    for (int k = 0; k < 8; k++) begin
      reload((laddr_t'(region + k) << 6) | laddr_t'(SECRET), lat);
      if (lat != 1) misses++;
    end
    $display("prime-probe: %0d of 8 primed lines evicted after the speculative access", misses);
    check(misses == 0, "prime-probe: no eviction by the speculative access");
    if (misses == 0) n_pp_clean++;
    // control: a non-speculative access to the set evicts a primed line
    reload((laddr_t'(region + 9) << 6) | laddr_t'(SECRET), lat);
    misses = 0;
    for (int k = 0; k < 8; k++) begin
      reload((laddr_t'(region + k) << 6) | laddr_t'(SECRET), lat);
      if (lat != 1) misses++;
    end
    $display("prime-probe control: %0d of 8 primed lines evicted after a normal access", misses);
    check(misses >= 1, "prime-probe control: a normal fill evicts a primed line");
    if (misses >= 1) n_pp_control++;
  endtask

  initial begin
    cfg_mode = MODE_RAS_SPEC; cfg_shb_enable = 1; cfg_shb_active = 1; cfg_win_log2 = 2;
    cfg_rate = 3;
    rob_disp_valid = 0; rob_disp_is_load = 0; rob_exec_valid = 0; rob_exec_idx = '0;
    rob_exec_paddr = '0; rob_done_valid = 0; rob_done_idx = '0; rob_done_fault = 0;
    rob_squash_valid = 0; rob_squash_idx = '0; core_req_valid = 0; core_req_is_store = 0;
    core_req_paddr = '0; core_req_be = '0; core_req_wdata = '0; core_req_id = '0;
    core_req_rob_idx = '0; core_resp_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    experiment(MODE_RAS_SPEC, 16'h0100 + $urandom_range(0, 255));
    experiment(MODE_RAS_PLUS, 16'h0300 + $urandom_range(0, 255));
    experiment(MODE_RAS_SPEC, 16'h0500 + $urandom_range(0, 255));
    experiment_pp(16'h0700);
    check(n_pp_clean == 1 && n_pp_control == 1, "mechanism: prime-probe clean and control");
    check(n_spec_nf == 3, "mechanism: speculative no-fill probe loads");
    check(n_secret_miss == 3, "mechanism: secret line never cached");
    check(n_control_hit == 2, "mechanism: control fills observed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
