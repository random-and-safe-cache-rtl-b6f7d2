// tb_rob_spec: self-checking test of the ROB Spec tracking. A reference model
// in the testbench keeps the in-flight instructions in program order and
// computes, independently of the block, the Spec bit of every entry (some
// older instruction unfinished or faulted) and the oldest authorized load not
// yet handed to the SHB. Random dispatch, address, completion, fault and
// squash events run for several thousand cycles; every cycle the Spec bit of
// a random in-flight entry, the SHB insertion and the commit/flush outputs
// are compared with the model. A directed case checks that a load behind an
// unfinished branch stays speculative and is authorized the cycle after the
// branch finishes.
//
// The Spec rule checked is the paper's (an older instruction unfinished or
// faulted); squash and flush handling checked are this design's own.
module tb_rob_spec;
  import ras_pkg::*;
  localparam int R = 192;
  localparam int IW = $clog2(R);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic disp_valid, disp_is_load, disp_ready; logic [IW-1:0] disp_idx;
  logic exec_valid; logic [IW-1:0] exec_idx; laddr_t exec_addr;
  logic done_valid, done_fault; logic [IW-1:0] done_idx;
  logic squash_valid; logic [IW-1:0] squash_idx;
  logic [IW-1:0] q_idx; logic q_spec;
  logic ins_valid; laddr_t ins_addr;
  logic commit_valid, flush_fault; logic [IW:0] occupancy;

  rob_spec #(.ROB_ENTRIES(R)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference model: program-ordered list of ROB indices
  int     ord [$];
  bit     m_done [R], m_fault [R], m_load [R], m_aok [R], m_ins [R];
  laddr_t m_addr [R];
  int     m_tail;

  function automatic bit ref_spec(input int idx);
    foreach (ord[k]) begin
      if (ord[k] == idx) return 0;
      if (!m_done[ord[k]] || m_fault[ord[k]]) return 1;
    end
    return 0;
  endfunction

  function automatic int ref_ins();
    foreach (ord[k]) begin
      if (m_load[ord[k]] && m_aok[ord[k]] && !m_ins[ord[k]]) return ord[k];
      if (!m_done[ord[k]] || m_fault[ord[k]]) return -1;
    end
    return -1;
  endfunction

  int n_auth = 0, n_commit = 0, n_flush = 0, n_squash = 0, n_spec_seen = 0;

  task automatic step(input bit random_ops);
    int exp_ins, pick, size0;
    bit exp_commit, exp_flush;
    @(negedge clk);
    // inputs for this cycle
    disp_valid = 0; exec_valid = 0; done_valid = 0; squash_valid = 0; done_fault = 0;
    if (random_ops) begin
      disp_valid   = ($urandom_range(0, 99) < 60);
      disp_is_load = $urandom_range(0, 1);
      if (ord.size() > 0 && $urandom_range(0, 99) < 50) begin
        pick = ord[$urandom_range(0, ord.size()-1)];
        if (m_load[pick] && !m_aok[pick]) begin
          exec_valid = 1; exec_idx = IW'(pick); exec_addr = laddr_t'($urandom);
        end
      end
      if (ord.size() > 0 && $urandom_range(0, 99) < 45) begin
        pick = ord[$urandom_range(0, ord.size()-1)];
        if (!m_done[pick]) begin
          done_valid = 1; done_idx = IW'(pick); done_fault = ($urandom_range(0, 999) < 3);
        end
      end
      if (ord.size() > 2 && $urandom_range(0, 999) < 8) begin
        squash_valid = 1; squash_idx = IW'(ord[$urandom_range(1, ord.size()-1)]);
      end
    end
    if (ord.size() > 0) q_idx = IW'(ord[$urandom_range(0, ord.size()-1)]);
    #1;
    // compare combinational outputs with the model
    if (ord.size() > 0) begin
      check(q_spec == ref_spec(int'(q_idx)), $sformatf("spec of %0d", q_idx));
      if (q_spec) n_spec_seen++;
    end
    exp_ins = ref_ins();
    check(ins_valid == (exp_ins >= 0), "insertion valid");
    if (exp_ins >= 0) begin
      check(ins_addr == m_addr[exp_ins], "insertion address");
      n_auth++;
    end
    exp_commit = ord.size() > 0 && m_done[ord[0]] && !m_fault[ord[0]];
    exp_flush  = ord.size() > 0 && m_done[ord[0]] &&  m_fault[ord[0]];
    check(commit_valid == exp_commit && flush_fault == exp_flush, "commit/flush");
    check(disp_ready == (ord.size() < R), "dispatch ready");
    if (disp_valid && disp_ready) check(int'(disp_idx) == m_tail, "dispatch index");
    size0 = ord.size();
    @(posedge clk);
    // model update, same rules as the specification
    if (exp_flush) begin
      ord.delete(); m_tail = 0; n_flush++;
    end else begin
      if (exec_valid) begin m_aok[exec_idx] = 1; m_addr[exec_idx] = exec_addr; end
      if (done_valid) begin m_done[done_idx] = 1; m_fault[done_idx] = done_fault; end
      if (exp_ins >= 0) m_ins[exp_ins] = 1;
      if (exp_commit) begin void'(ord.pop_front()); n_commit++; end
      if (squash_valid) begin
        int pos;
        pos = -1;
        foreach (ord[k]) if (ord[k] == int'(squash_idx)) pos = k;
        while (ord.size() > pos + 1) void'(ord.pop_back());
        m_tail = (int'(squash_idx) + 1) % R;
        n_squash++;
      end else if (disp_valid && size0 < R) begin
        ord.push_back(m_tail);
        m_done[m_tail] = 0; m_fault[m_tail] = 0; m_load[m_tail] = disp_is_load;
        m_aok[m_tail] = 0; m_ins[m_tail] = 0;
        m_tail = (m_tail + 1) % R;
      end
    end
  endtask

  initial begin
    disp_valid = 0; disp_is_load = 0; exec_valid = 0; exec_idx = '0; exec_addr = '0;
    done_valid = 0; done_idx = '0; done_fault = 0; squash_valid = 0; squash_idx = '0; q_idx = '0;
    m_tail = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // directed: branch (0), load (1) behind it
    @(negedge clk); disp_valid = 1; disp_is_load = 0;
    @(negedge clk); disp_is_load = 1;
    @(negedge clk); disp_valid = 0; exec_valid = 1; exec_idx = 1; exec_addr = 34'h3000 >> 6;
    @(negedge clk); exec_valid = 0; q_idx = 1; #1;
    check(q_spec == 1 && !ins_valid, "load behind unfinished branch is speculative");
    done_valid = 1; done_idx = 0;
    @(negedge clk); done_valid = 0; #1;
    check(q_spec == 0 && ins_valid && ins_addr == (34'h3000 >> 6), "load authorized after the branch finishes");
    @(negedge clk); #1;
    check(!ins_valid, "an authorized load is inserted once");
    // drain the two entries
    done_valid = 1; done_idx = 1;
    @(negedge clk); done_valid = 0;
    repeat (3) @(negedge clk);
    check(occupancy == 0, "directed entries retired");
    // model starts at the DUT's current tail
    m_tail = 2;

    repeat (20000) step(1);
    // drain
    repeat (400) step(0);

    check(n_auth > 300 && n_commit > 800 && n_squash > 20 && n_flush > 0 && n_spec_seen > 1000,
          $sformatf("coverage auth=%0d commit=%0d squash=%0d flush=%0d spec=%0d",
                    n_auth, n_commit, n_squash, n_flush, n_spec_seen));
    $display("auth=%0d commit=%0d squash=%0d flush=%0d", n_auth, n_commit, n_squash, n_flush);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
