// tb_line_fill_buffer: self-checking test of the per-MSHR line fill buffers.
// Random stores (random word, random byte enables) go into random buffers,
// buffers are cleared at random, and the merged line for random returned
// data is compared every cycle with a byte-level reference model.
//
// The expected behaviour (store bytes win over the returning line) follows the
// paper's line fill buffer; the random stimulus and sizes are this testbench's
// own.
module tb_line_fill_buffer;
  import ras_pkg::*;
  localparam int N = 16, IW = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clr_valid, st_valid; logic [IW-1:0] clr_idx, st_idx, rd_idx;
  logic [WIDX_W-1:0] st_word; logic [7:0] st_be; word_t st_data; line_t rd_line, merged;

  line_fill_buffer #(.N(N)) dut (.*);

  int checks = 0, failures = 0;
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [7:0] r_b [N][64];
  bit         r_m [N][64];

  initial begin
    clr_valid = 0; st_valid = 0; clr_idx = 0; st_idx = 0; rd_idx = 0; st_word = 0; st_be = 0;
    st_data = 0; rd_line = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int c = 0; c < 5000; c++) begin
      @(negedge clk);
      // compare merged output with the model
      rd_idx = IW'($urandom_range(0, N-1));
      for (int w = 0; w < 16; w++) rd_line[w*32 +: 32] = $urandom;
      #1;
      checks++;
      begin
        line_t exp;
        for (int b = 0; b < 64; b++) exp[b*8 +: 8] = r_m[rd_idx][b] ? r_b[rd_idx][b] : rd_line[b*8 +: 8];
        if (exp !== merged) begin failures++; if (failures < 10) $display("FAIL merge idx %0d", rd_idx); end
      end
      // next operations
      clr_valid = ($urandom_range(0, 9) == 0); clr_idx = IW'($urandom_range(0, N-1));
      st_valid  = ($urandom_range(0, 1) == 0); st_idx = IW'($urandom_range(0, N-1));
      st_word = WIDX_W'($urandom); st_be = 8'($urandom); st_data = {$urandom, $urandom};
      @(posedge clk);
      if (clr_valid) for (int b = 0; b < 64; b++) r_m[clr_idx][b] = 0;
      if (st_valid)
        for (int b = 0; b < 8; b++) if (st_be[b]) begin
          r_m[st_idx][st_word*8 + b] = 1; r_b[st_idx][st_word*8 + b] = st_data[b*8 +: 8];
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
