// tb_tag_data_array: self-checking test of the set-associative storage with
// random replacement. A reference model mirrors valid, dirty, tag and data of
// every way. Random fills (always into the presented victim way), word writes
// and line writes run against it; every cycle the lookup result and data,
// and the victim's way, state, address and data are checked. The victim must
// be an invalid way while one exists (the lowest), and in full sets all
// ways must be chosen over time, with no way chosen more than twice its
// fair share.
//
// Random replacement follows the paper; invalid-way-first and the write-back
// dirty handling checked are this design's own.
module tb_tag_data_array;
  import ras_pkg::*;
  localparam int S = 64, W = 8, WW = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [31:0] rnd;
  laddr_t lk_addr, vic_addr, fill_addr, ww_addr, wl_addr;
  logic lk_hit, vic_valid, vic_dirty, fill_valid, fill_dirty, ww_valid, wl_valid;
  logic [WW-1:0] lk_way, vic_way, fill_way, ww_way, wl_way;
  line_t lk_data, vic_data, fill_data, wl_data;
  logic [WIDX_W-1:0] ww_word; logic [7:0] ww_be; word_t ww_data; logic [31:0] valid_lines;

  tag_data_array #(.SETS(S), .WAYS(W)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end
  endtask
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  bit     m_v [S][W], m_d [S][W];
  laddr_t m_a [S][W];
  line_t  m_data [S][W];
  int     vic_hist [W];
  int     n_valid = 0;

  function automatic line_t rand_line();
    line_t l;
    for (int w = 0; w < 16; w++) l[w*32 +: 32] = $urandom;
    return l;
  endfunction

  initial begin
    rnd = 0; lk_addr = 0; fill_valid = 0; ww_valid = 0; wl_valid = 0;
    fill_addr = 0; fill_way = 0; fill_data = 0; fill_dirty = 0; ww_addr = 0; ww_way = 0;
    ww_word = 0; ww_be = 0; ww_data = 0; wl_addr = 0; wl_way = 0; wl_data = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int c = 0; c < 20000; c++) begin
      laddr_t a; int s, hw, op; bit h, have_inv; int inv;
      @(negedge clk);
      fill_valid = 0; ww_valid = 0; wl_valid = 0;
      // addresses from a small pool of sets so sets fill up
      a = {laddr_t'($urandom_range(0, 40)), 6'($urandom_range(0, 3))};
      s = int'(a[5:0]);
      rnd = $urandom;
      lk_addr = a; #1;
      h = 0; hw = 0; have_inv = 0; inv = 0;
      for (int w = W-1; w >= 0; w--) begin
        if (m_v[s][w] && m_a[s][w] == a) begin h = 1; hw = w; end
        if (!m_v[s][w]) begin have_inv = 1; inv = w; end
      end
      check(lk_hit == h, "hit");
      if (h) check(lk_way == WW'(hw) && lk_data == m_data[s][hw], "hit way and data");
      if (have_inv) check(vic_way == WW'(inv) && !vic_valid, "invalid way first");
      else begin
        check(vic_way == WW'(rnd % W), "random victim from the random input");
        check(vic_valid && vic_dirty == m_d[s][vic_way] && vic_addr == m_a[s][vic_way] &&
              vic_data == m_data[s][vic_way], "victim state, address and data");
        vic_hist[vic_way]++;
      end
      check(valid_lines == 32'(n_valid), "valid line count");
      op = $urandom_range(0, 2);
      if (!h || op == 0) begin
        fill_valid = 1; fill_addr = a; fill_way = h ? lk_way : vic_way;
        fill_data = rand_line(); fill_dirty = $urandom_range(0, 1);
      end else if (op == 1) begin
        ww_valid = 1; ww_addr = a; ww_way = lk_way; ww_word = WIDX_W'($urandom);
        ww_be = 8'($urandom); ww_data = {$urandom, $urandom};
      end else begin
        wl_valid = 1; wl_addr = a; wl_way = lk_way; wl_data = rand_line();
      end
      @(posedge clk);
      if (fill_valid) begin
        if (!m_v[s][fill_way]) n_valid++;
        m_v[s][fill_way] = 1; m_d[s][fill_way] = fill_dirty; m_a[s][fill_way] = a;
        m_data[s][fill_way] = fill_data;
      end
      if (ww_valid) begin
        m_d[s][ww_way] = 1;
        for (int b = 0; b < 8; b++) if (ww_be[b]) m_data[s][ww_way][(ww_word*8 + b)*8 +: 8] = ww_data[b*8 +: 8];
      end
      if (wl_valid) begin m_d[s][wl_way] = 1; m_data[s][wl_way] = wl_data; end
    end
    begin
      int tot; tot = 0;
      foreach (vic_hist[w]) tot += vic_hist[w];
      foreach (vic_hist[w]) check(vic_hist[w] > 0 && vic_hist[w] < 2 * tot / W, $sformatf("way %0d chosen %0d of %0d", w, vic_hist[w], tot));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
