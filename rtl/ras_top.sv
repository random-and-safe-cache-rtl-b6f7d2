// ras_top: the Random and Safe (RaS) data-cache hierarchy of one core - the
// ROB Spec tracking, the NoFill marking of the core's loads and stores, the
// Safe History Buffer (SHB), the L1 data cache and the L2 cache. The core and
// main memory are outside and connect through ports.
//
// Data flow
//  * A core load or store enters with its ROB index. Its NoFill bit is set by
//    the mode register: RaS-Spec marks a load no-fill while its ROB entry is
//    speculative (an older instruction unfinished or faulted) and lets stores
//    and non-speculative loads fill; RaS+ marks every load and store no-fill.
//  * The L1D and L2 propagate NoFill through their MSHRs and write-backs, so
//    no level installs a line for a no-fill miss (ras_cache).
//  * The ROB passes each load address to the SHB once the load is authorized;
//    the L1D passes each store address as the store enters it. The SHB
//    issues, every cfg_rate cycles, an SHBfetch for a random line in the
//    aligned 2^cfg_win_log2-line window around a random live entry, and a
//    NoFillClear of the same line to the L1D MSHRs; a NoFillClear that matches
//    there is passed on to the L2 MSHRs.
//  * Both caches replace a random way.
//
// Configuration registers (trusted software): cfg_mode, cfg_shb_enable,
// cfg_shb_active (1..SHB_ENTRIES live entries), cfg_win_log2 (window of
// 1..64 lines), cfg_rate (one SHBfetch every cfg_rate cycles). The evaluated
// settings are RaS-Spec with 1 entry, 4-line window, rate 3, and RaS+ with 4
// entries, 64-line window, rate 3.
//
// Timing: L1D hits answer 1 cycle after acceptance and L2 hits 12 cycles after
// acceptance (parameters L1_LAT, L2_LAT); the memory port has valid/ready
// handshakes and any latency. Responses to the core carry the whole 64-byte
// line and the request id. Sizes default to the evaluated system: ROB 192,
// L1D 32 KB 8-way 64 sets 16 MSHRs, L2 2 MB 16-way 2048 sets 32 MSHRs.
//
// Lint notes: the low address bits of rob_exec_paddr and core_req_paddr are
// not used (the SHB works on line addresses, the L1D on 8-byte words); the
// ROB occupancy, the SHB entry view, the line counts and the L2's SHBfetch,
// NoFillClear-out and store-insertion outputs are left unconnected on
// purpose (the L2 has no SHB and is the last level). The reset is also seen
// as synchronous only because the handshake assertions are disabled during
// reset; every flop uses it asynchronously.
//
// Follows the paper: the two modes and their NoFill rules, SHB insertion of
// authorized loads and of stores, SHBfetch and NoFillClear into the L1D,
// NoFillClear forwarding to the L2, the cache sizes and latencies. This
// design's choices: the mode as a run-time register, the port set towards the
// core and memory, one SHB per core feeding only the L1D.
module ras_top
  import ras_pkg::*;
#(
  parameter int unsigned ROB_ENTRIES = 192,
  parameter int unsigned SHB_ENTRIES = 4,
  parameter int unsigned L1_SETS     = 64,
  parameter int unsigned L1_WAYS     = 8,
  parameter int unsigned L1_MSHR     = 16,
  parameter int unsigned L1_LAT      = 1,
  parameter int unsigned L2_SETS     = 2048,
  parameter int unsigned L2_WAYS     = 16,
  parameter int unsigned L2_MSHR     = 32,
  parameter int unsigned L2_LAT      = 12,
  localparam int unsigned RW = $clog2(ROB_ENTRIES),
  localparam int unsigned AW = $clog2(SHB_ENTRIES+1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // configuration
  input  ras_mode_e            cfg_mode,
  input  logic                 cfg_shb_enable,
  input  logic [AW-1:0]        cfg_shb_active,
  input  logic [2:0]           cfg_win_log2,
  input  logic [7:0]           cfg_rate,
  // ROB events from the core
  input  logic                 rob_disp_valid,
  input  logic                 rob_disp_is_load,
  output logic [RW-1:0]        rob_disp_idx,
  output logic                 rob_disp_ready,
  input  logic                 rob_exec_valid,
  input  logic [RW-1:0]        rob_exec_idx,
  input  logic [PADDR_W-1:0]   rob_exec_paddr,
  input  logic                 rob_done_valid,
  input  logic [RW-1:0]        rob_done_idx,
  input  logic                 rob_done_fault,
  input  logic                 rob_squash_valid,
  input  logic [RW-1:0]        rob_squash_idx,
  output logic                 rob_commit_valid,
  output logic                 rob_flush_fault,
  // core load/store port
  input  logic                 core_req_valid,
  output logic                 core_req_ready,
  input  logic                 core_req_is_store,
  input  logic [PADDR_W-1:0]   core_req_paddr,
  input  logic [WORD_W/8-1:0]  core_req_be,
  input  word_t                core_req_wdata,
  input  id_t                  core_req_id,
  input  logic [RW-1:0]        core_req_rob_idx,
  output logic                 core_resp_valid,
  input  logic                 core_resp_ready,
  output mem_resp_t            core_resp,
  // main memory port
  output logic                 mem_req_valid,
  input  logic                 mem_req_ready,
  output mem_req_t             mem_req,
  input  logic                 mem_resp_valid,
  output logic                 mem_resp_ready,
  input  mem_resp_t            mem_resp,
  // observation
  output cache_stats_t         l1_stats,
  output cache_stats_t         l2_stats,
  output logic [31:0]          shb_fired,
  output logic [31:0]          shb_issued,
  output logic [31:0]          shb_dropped,
  output logic                 l1_req_nofill
);
  // ---------------- ROB Spec tracking ----------------
  logic   q_spec, auth_valid;
  laddr_t auth_addr;
  logic [RW:0] rob_occ;

  rob_spec #(.ROB_ENTRIES(ROB_ENTRIES)) u_rob (
    .clk(clk), .rst_n(rst_n),
    .disp_valid(rob_disp_valid), .disp_is_load(rob_disp_is_load),
    .disp_idx(rob_disp_idx), .disp_ready(rob_disp_ready),
    .exec_valid(rob_exec_valid), .exec_idx(rob_exec_idx),
    .exec_addr(rob_exec_paddr[PADDR_W-1:OFF_W]),
    .done_valid(rob_done_valid), .done_idx(rob_done_idx), .done_fault(rob_done_fault),
    .squash_valid(rob_squash_valid), .squash_idx(rob_squash_idx),
    .q_idx(core_req_rob_idx), .q_spec(q_spec),
    .ins_valid(auth_valid), .ins_addr(auth_addr),
    .commit_valid(rob_commit_valid), .flush_fault(rob_flush_fault), .occupancy(rob_occ)
  );

  // ---------------- NoFill marking ----------------
  mem_req_t l1_req;
  always_comb begin
    l1_req        = '0;
    l1_req.rtype  = core_req_is_store ? REQ_STORE : REQ_LOAD;
    l1_req.addr   = core_req_paddr[PADDR_W-1:OFF_W];
    l1_req.word   = core_req_paddr[OFF_W-1:3];
    l1_req.be     = core_req_be;
    l1_req.wdata  = core_req_wdata;
    l1_req.id     = core_req_id;
    l1_req.nofill = (cfg_mode == MODE_RAS_PLUS) ? 1'b1 : (!core_req_is_store && q_spec);
  end
  assign l1_req_nofill = l1_req.nofill;

  // ---------------- SHB ----------------
  logic   pf_valid, pf_ready, nfc_valid, st_ins_valid;
  laddr_t pf_addr, nfc_addr, st_ins_addr;
  logic [SHB_ENTRIES-1:0] shb_v;
  laddr_t shb_a [SHB_ENTRIES];

  shb #(.ENTRIES(SHB_ENTRIES)) u_shb (
    .clk(clk), .rst_n(rst_n),
    .cfg_enable(cfg_shb_enable), .cfg_active(cfg_shb_active),
    .cfg_win_log2(cfg_win_log2), .cfg_rate(cfg_rate),
    .ins_load_valid(auth_valid), .ins_load_addr(auth_addr),
    .ins_store_valid(st_ins_valid), .ins_store_addr(st_ins_addr),
    .pf_valid(pf_valid), .pf_ready(pf_ready), .pf_addr(pf_addr),
    .nfc_valid(nfc_valid), .nfc_addr(nfc_addr),
    .entry_valid(shb_v), .entry_addr(shb_a),
    .stat_fired(shb_fired), .stat_issued(shb_issued), .stat_dropped(shb_dropped)
  );

  // ---------------- L1D ----------------
  logic      l1_dn_valid, l1_dn_ready, l1_rsp_valid, l1_rsp_ready;
  mem_req_t  l1_dn;
  mem_resp_t l1_rsp;
  logic      l1_nfc_valid;
  laddr_t    l1_nfc_addr;
  logic [31:0] l1_lines, l2_lines;

  ras_cache #(.SETS(L1_SETS), .WAYS(L1_WAYS), .N_MSHR(L1_MSHR), .HIT_LAT(L1_LAT),
              .WB_DEPTH(L1_MSHR), .SEED(32'h1d1d_0001)) u_l1d (
    .clk(clk), .rst_n(rst_n),
    .up_req_valid(core_req_valid), .up_req_ready(core_req_ready), .up_req(l1_req),
    .up_resp_valid(core_resp_valid), .up_resp_ready(core_resp_ready), .up_resp(core_resp),
    .pf_valid(pf_valid), .pf_ready(pf_ready), .pf_addr(pf_addr),
    .nfc_in_valid(nfc_valid), .nfc_in_addr(nfc_addr),
    .nfc_out_valid(l1_nfc_valid), .nfc_out_addr(l1_nfc_addr),
    .dn_req_valid(l1_dn_valid), .dn_req_ready(l1_dn_ready), .dn_req(l1_dn),
    .dn_resp_valid(l1_rsp_valid), .dn_resp_ready(l1_rsp_ready), .dn_resp(l1_rsp),
    .st_ins_valid(st_ins_valid), .st_ins_addr(st_ins_addr),
    .stats(l1_stats), .valid_lines(l1_lines)
  );

  // ---------------- L2 ----------------
  logic   l2_pf_ready, l2_nfc_valid, l2_st_valid;
  laddr_t l2_nfc_addr, l2_st_addr;

  ras_cache #(.SETS(L2_SETS), .WAYS(L2_WAYS), .N_MSHR(L2_MSHR), .HIT_LAT(L2_LAT),
              .WB_DEPTH(L2_MSHR), .SEED(32'h2e2e_0002)) u_l2 (
    .clk(clk), .rst_n(rst_n),
    .up_req_valid(l1_dn_valid), .up_req_ready(l1_dn_ready), .up_req(l1_dn),
    .up_resp_valid(l1_rsp_valid), .up_resp_ready(l1_rsp_ready), .up_resp(l1_rsp),
    .pf_valid(1'b0), .pf_ready(l2_pf_ready), .pf_addr('0),
    .nfc_in_valid(l1_nfc_valid), .nfc_in_addr(l1_nfc_addr),
    .nfc_out_valid(l2_nfc_valid), .nfc_out_addr(l2_nfc_addr),
    .dn_req_valid(mem_req_valid), .dn_req_ready(mem_req_ready), .dn_req(mem_req),
    .dn_resp_valid(mem_resp_valid), .dn_resp_ready(mem_resp_ready), .dn_resp(mem_resp),
    .st_ins_valid(l2_st_valid), .st_ins_addr(l2_st_addr),
    .stats(l2_stats), .valid_lines(l2_lines)
  );

endmodule
