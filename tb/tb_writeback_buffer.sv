// tb_writeback_buffer: self-checking test of the writeback buffer. Random
// pushes and pops are compared with a reference queue: FIFO order, address,
// data and NoFill bit of the head, full and count, and the address-match
// port for waiting and departed lines.
//
// The NoFill bit carried per entry follows the paper; FIFO order, depth and
// the match port are this design's own.
module tb_writeback_buffer;
  import ras_pkg::*;
  localparam int D = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic push_valid, push_nofill, full, head_valid, head_ready, head_nofill, m_hit;
  laddr_t push_addr, head_addr, m_addr; line_t push_data, head_data; logic [3:0] count;

  writeback_buffer #(.DEPTH(D)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end
  endtask
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  typedef struct { laddr_t a; line_t d; bit nf; } ent_t;
  ent_t q [$];
  int n_full = 0;

  initial begin
    push_valid = 0; push_nofill = 0; head_ready = 0; push_addr = 0; push_data = 0; m_addr = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int c = 0; c < 5000; c++) begin
      bit pu, po;
      @(negedge clk);
      m_addr = laddr_t'($urandom_range(0, 30)); #1;
      check(full == (q.size() == D) && count == 4'(q.size()) && head_valid == (q.size() > 0), "full/count/valid");
      if (full) n_full++;
      if (q.size() > 0) check(head_addr == q[0].a && head_data == q[0].d && head_nofill == q[0].nf, "head entry");
      begin bit h; h = 0; foreach (q[k]) if (q[k].a == m_addr) h = 1; check(m_hit == h, "match port"); end
      // phases: fill up, then drain, then random
      pu = (c % 600 < 300) ? ($urandom_range(0, 3) != 0) : ($urandom_range(0, 3) == 0);
      po = (c % 600 < 300) ? ($urandom_range(0, 3) == 0) : ($urandom_range(0, 3) != 0);
      push_valid = pu && !full; push_addr = laddr_t'($urandom_range(0, 30));
      for (int w = 0; w < 16; w++) push_data[w*32 +: 32] = $urandom;
      push_nofill = $urandom_range(0, 1);
      head_ready = po;
      @(posedge clk);
      if (po && q.size() > 0) void'(q.pop_front());
      if (push_valid) q.push_back('{push_addr, push_data, push_nofill});
    end
    check(n_full > 10, "buffer reached full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
