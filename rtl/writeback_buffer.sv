// writeback_buffer: FIFO of lines leaving a cache level for the next one.
// Each entry keeps the line address, the data and a NoFill bit. A line evicted
// from the cache leaves with NoFill=0; a dirty line that came back on the
// NoFill path, or a no-fill write-back passed through from the level above,
// leaves with NoFill=1, so the next level does not install it either.
//
// Interface: push_* enqueues (push only when !full); head_* presents the
// oldest entry with a valid/ready handshake; m_addr -> m_hit tells whether a
// line is waiting here, so the cache can hold a miss to it until it has left.
// Push and pop take effect at the next edge; a push into a full buffer that
// pops in the same cycle is not accepted (full is not bypassed).
//
// Follows the paper: a NoFill field in writeback buffer entries. This design's
// choices: FIFO order, depth, the address match port.
//
// Lint note: the reset appears as synchronous only through the assertion's
// disable condition; every flop uses it asynchronously.
module writeback_buffer
  import ras_pkg::*;
#(
  parameter int unsigned DEPTH = 16,
  localparam int unsigned PW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   push_valid,
  input  laddr_t push_addr,
  input  line_t  push_data,
  input  logic   push_nofill,
  output logic   full,
  output logic   head_valid,
  input  logic   head_ready,
  output laddr_t head_addr,
  output line_t  head_data,
  output logic   head_nofill,
  input  laddr_t m_addr,
  output logic   m_hit,
  output logic [PW:0] count
);
  laddr_t           addr_q [DEPTH];
  line_t            data_q [DEPTH];
  logic [DEPTH-1:0] nf_q;
  logic [DEPTH-1:0] v_q;
  logic [PW-1:0]    rd_q, wr_q;
  logic [PW:0]      cnt_q;

  function automatic logic [PW-1:0] inc(input logic [PW-1:0] p);
    return (p == PW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  assign full        = (cnt_q == (PW+1)'(DEPTH));
  assign head_valid  = (cnt_q != '0);
  assign head_addr   = addr_q[rd_q];
  assign head_data   = data_q[rd_q];
  assign head_nofill = nf_q[rd_q];
  assign count       = cnt_q;

  always_comb begin
    m_hit = 1'b0;
    for (int i = 0; i < DEPTH; i++)
      if (v_q[i] && addr_q[i] == m_addr) m_hit = 1'b1;
  end

  logic do_push, do_pop;
  assign do_push = push_valid && !full;
  assign do_pop  = head_valid && head_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q <= '0; wr_q <= '0; cnt_q <= '0; v_q <= '0; nf_q <= '0;
      for (int i = 0; i < DEPTH; i++) begin
        addr_q[i] <= '0;
        data_q[i] <= '0;
      end
    end else begin
      if (do_pop) begin
        v_q[rd_q] <= 1'b0;
        rd_q      <= inc(rd_q);
      end
      if (do_push) begin
        addr_q[wr_q] <= push_addr;
        data_q[wr_q] <= push_data;
        nf_q[wr_q]   <= push_nofill;
        v_q[wr_q]    <= 1'b1;
        wr_q         <= inc(wr_q);
      end
      cnt_q <= cnt_q + (PW+1)'(do_push) - (PW+1)'(do_pop);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) push_valid |-> !full);

endmodule
