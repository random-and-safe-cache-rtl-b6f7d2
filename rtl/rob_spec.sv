// rob_spec: the re-order buffer bookkeeping that RaS adds to the core - the
// Done, Squash (fault) and Spec columns - and the source of authorized load
// addresses for the Safe History Buffer.
//
// An instruction is speculative (Spec=1) while any older instruction in the
// ROB has not finished, or has finished with a fault. Spec is recomputed every
// cycle by a scan from the head (oldest) to the tail. A load whose line
// address is known and whose Spec bit is 0 is authorized: its address is sent
// once to the SHB (ins_valid/ins_addr, at most one per cycle, oldest first).
// The load issue path asks q_spec for the ROB index of a load to decide
// whether the request is no-fill.
//
// Interface: dispatch allocates the tail entry (disp_idx is the index it gets
// this cycle). exec_* records a load's line address, done_* marks an entry
// finished (done_fault: with a fault). The head retires when done without a
// fault (commit_valid); a faulting head flushes the ROB (flush_fault).
// squash_* removes every entry younger than squash_idx (branch misprediction).
// All updates take effect at the next clock edge; q_spec and ins_* are
// combinational from the registered state.
//
// Follows the paper: the authorization rule and the per-instruction Spec
// mark. This design's choices: one SHB insertion per cycle, flush on a faulting
// head, the port set of the surrounding core.
module rob_spec
  import ras_pkg::*;
#(
  parameter int unsigned ROB_ENTRIES = 192,
  localparam int unsigned IW = $clog2(ROB_ENTRIES)
) (
  input  logic          clk,
  input  logic          rst_n,
  // dispatch
  input  logic          disp_valid,
  input  logic          disp_is_load,
  output logic [IW-1:0] disp_idx,
  output logic          disp_ready,
  // load address known
  input  logic          exec_valid,
  input  logic [IW-1:0] exec_idx,
  input  laddr_t        exec_addr,
  // execution finished
  input  logic          done_valid,
  input  logic [IW-1:0] done_idx,
  input  logic          done_fault,
  // branch squash
  input  logic          squash_valid,
  input  logic [IW-1:0] squash_idx,
  // Spec query from the load issue path
  input  logic [IW-1:0] q_idx,
  output logic          q_spec,
  // authorized load address to the SHB
  output logic          ins_valid,
  output laddr_t        ins_addr,
  // retirement
  output logic          commit_valid,
  output logic          flush_fault,
  output logic [IW:0]   occupancy
);
  logic [ROB_ENTRIES-1:0] done_q, fault_q, load_q, addr_ok_q, inserted_q;
  laddr_t                 addr_q [ROB_ENTRIES];
  logic [IW-1:0]          head_q, tail_q;
  logic [IW:0]            count_q;
  logic [ROB_ENTRIES-1:0] spec;
  logic                   ins_found;
  logic [IW-1:0]          ins_idx;

  function automatic logic [IW-1:0] wrap_inc(input logic [IW-1:0] i);
    return (i == IW'(ROB_ENTRIES-1)) ? '0 : i + 1'b1;
  endfunction

  // Age-ordered scan: Spec of an entry is the OR of "not finished or faulted"
  // over all older entries.
  always_comb begin
    logic          older_unsafe;
    logic [IW-1:0] idx;
    spec         = '0;
    older_unsafe = 1'b0;
    ins_found    = 1'b0;
    ins_idx      = '0;
    idx          = head_q;
    for (int k = 0; k < ROB_ENTRIES; k++) begin
      if (k < int'(count_q)) begin
        spec[idx] = older_unsafe;
        if (!older_unsafe && !ins_found && load_q[idx] && addr_ok_q[idx] && !inserted_q[idx]) begin
          ins_found = 1'b1;
          ins_idx   = idx;
        end
        older_unsafe = older_unsafe | !done_q[idx] | fault_q[idx];
      end
      idx = wrap_inc(idx);
    end
  end

  assign q_spec     = spec[q_idx];
  assign ins_valid  = ins_found;
  assign ins_addr   = addr_q[ins_idx];
  assign disp_idx   = tail_q;
  assign disp_ready = (count_q < (IW+1)'(ROB_ENTRIES));
  assign occupancy  = count_q;

  logic head_retire, head_fault;
  assign head_retire  = (count_q != '0) && done_q[head_q] && !fault_q[head_q];
  assign head_fault   = (count_q != '0) && done_q[head_q] &&  fault_q[head_q];
  assign commit_valid = head_retire;
  assign flush_fault  = head_fault;

  // number of entries kept by a squash: from head up to and including squash_idx
  logic [IW:0] keep;
  always_comb begin
    if (squash_idx >= head_q) keep = (IW+1)'(squash_idx - head_q) + 1'b1;
    else                      keep = (IW+1)'(ROB_ENTRIES) - (IW+1)'(head_q) + (IW+1)'(squash_idx) + 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done_q     <= '0;
      fault_q    <= '0;
      load_q     <= '0;
      addr_ok_q  <= '0;
      inserted_q <= '0;
      head_q     <= '0;
      tail_q     <= '0;
      count_q    <= '0;
      for (int i = 0; i < ROB_ENTRIES; i++) addr_q[i] <= '0;
    end else if (head_fault) begin
      // exception: everything in flight is discarded
      head_q  <= '0;
      tail_q  <= '0;
      count_q <= '0;
    end else begin
      logic [IW:0] cnt;
      cnt = count_q;
      if (exec_valid) begin
        addr_q[exec_idx]    <= exec_addr;
        addr_ok_q[exec_idx] <= 1'b1;
      end
      if (done_valid) begin
        done_q[done_idx]  <= 1'b1;
        fault_q[done_idx] <= done_fault;
      end
      if (ins_found) inserted_q[ins_idx] <= 1'b1;
      if (head_retire) begin
        head_q          <= wrap_inc(head_q);
        cnt             = cnt - 1'b1;
      end
      if (squash_valid) begin
        // head retirement and a squash in the same cycle: the squash point
        // is younger than the head, so the kept count shrinks by the retire.
        tail_q <= wrap_inc(squash_idx);
        cnt    = keep - (IW+1)'(head_retire);
      end else if (disp_valid && disp_ready) begin
        done_q[tail_q]     <= 1'b0;
        fault_q[tail_q]    <= 1'b0;
        load_q[tail_q]     <= disp_is_load;
        addr_ok_q[tail_q]  <= 1'b0;
        inserted_q[tail_q] <= 1'b0;
        tail_q             <= wrap_inc(tail_q);
        cnt                = cnt + 1'b1;
      end
      count_q <= cnt;
    end
  end

endmodule
