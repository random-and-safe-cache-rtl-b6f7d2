// tb_mem_model: behavioural model of main memory for the cache testbenches
// (not synthesizable logic, not part of the design). It accepts one request
// per cycle: a read returns the line, as it was when the read was accepted,
// LAT cycles later with the request's id, in acceptance order; a write-back
// stores the line at once. Lines never written hold init_line(address).
// It counts reads, write-backs and write-backs marked NoFill.
//
// The 100-cycle default latency is the paper's memory delay; in-order
// responses and the initial line content are this model's own choices.
module tb_mem_model
  import ras_pkg::*;
  import tb_util_pkg::*;
#(
  parameter int LAT = 100
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      req_valid,
  output logic      req_ready,
  input  mem_req_t  req,
  output logic      resp_valid,
  input  logic      resp_ready,
  output mem_resp_t resp,
  output int        n_reads,
  output int        n_writes,
  output int        n_writes_nofill
);
  line_t mem [laddr_t];
  typedef struct { mem_resp_t r; longint due; } pend_t;
  pend_t q [$];
  longint cyc;

  function automatic line_t rd(input laddr_t a);
    return mem.exists(a) ? mem[a] : init_line(a);
  endfunction

  assign req_ready  = 1'b1;
  assign resp_valid = (q.size() > 0) && (q[0].due <= cyc);
  assign resp       = (q.size() > 0) ? q[0].r : '0;

  always @(posedge clk) begin
    if (!rst_n) begin
      cyc <= 0; n_reads <= 0; n_writes <= 0; n_writes_nofill <= 0;
      q.delete();
    end else begin
      cyc <= cyc + 1;
      if (resp_valid && resp_ready) void'(q.pop_front());
      if (req_valid) begin
        if (req.rtype == REQ_WRITEBACK) begin
          mem[req.addr] = req.line;
          n_writes <= n_writes + 1;
          if (req.nofill) n_writes_nofill <= n_writes_nofill + 1;
        end else begin
          pend_t p;
          p.r.id = req.id; p.r.data = rd(req.addr); p.due = cyc + LAT;
          q.push_back(p);
          n_reads <= n_reads + 1;
        end
      end
    end
  end
endmodule
