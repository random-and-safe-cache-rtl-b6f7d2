// line_fill_buffer: one line buffer per MSHR entry. A store that misses writes
// its bytes here (with a byte mask) instead of into the cache, so the store
// completes even when the line will not be installed. When the line comes
// back from the next level, merged = returned line with the buffered store
// bytes laid over it; the cache then either fills this merged line (Fill
// path) or, for a no-fill entry holding store data, writes it back marked
// NoFill.
//
// Interface: clr_* empties a buffer (at MSHR allocation); st_* writes one
// 64-bit word with byte enables; rd_idx/rd_line -> merged is combinational.
// Writes take effect at the next edge; a clear and a store to the same index
// in one cycle leave only the store's bytes.
//
// Follows the paper: store data of a no-fill store goes to the line fill
// buffer. This design's choices: one buffer per MSHR, byte masks.
module line_fill_buffer
  import ras_pkg::*;
#(
  parameter int unsigned N  = 16,
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clr_valid,
  input  logic [IW-1:0]       clr_idx,
  input  logic                st_valid,
  input  logic [IW-1:0]       st_idx,
  input  logic [WIDX_W-1:0]   st_word,
  input  logic [WORD_W/8-1:0] st_be,
  input  word_t               st_data,
  input  logic [IW-1:0]       rd_idx,
  input  line_t               rd_line,
  output line_t               merged
);
  line_t                  buf_q  [N];
  logic [LINE_BYTES-1:0]  mask_q [N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) begin
        buf_q[i]  <= '0;
        mask_q[i] <= '0;
      end
    end else begin
      if (clr_valid) mask_q[clr_idx] <= '0;
      if (st_valid) begin
        for (int b = 0; b < WORD_W/8; b++) begin
          if (st_be[b]) begin
            buf_q[st_idx][(int'(st_word)*WORD_W/8 + b)*8 +: 8] <= st_data[b*8 +: 8];
            mask_q[st_idx][int'(st_word)*WORD_W/8 + b]          <= 1'b1;
          end
        end
      end
    end
  end

  always_comb begin
    for (int b = 0; b < LINE_BYTES; b++)
      merged[b*8 +: 8] = mask_q[rd_idx][b] ? buf_q[rd_idx][b*8 +: 8] : rd_line[b*8 +: 8];
  end

endmodule
