// tb_l1d_cache: random lookups, reads, touches, word writes, invalidations, fills
// and flushes against a reference of a 4-way LRU cache (fill picks the lowest
// invalid way, else the least recently used; fill and touch make a way the most
// recent). Checks hit/way, read data, and the victim shown on a fill.
module tb_l1d_cache;
  import ciao_pkg::*;
  localparam int S = 32, W = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic flush, lk_hit, rd_en, touch, ww_valid, inv_valid, fill_valid, victim_valid;
  blk_t lk_blk, fill_blk, victim_blk; wid_t fill_wid, victim_wid;
  logic [1:0] lk_way, rd_way, touch_way, ww_way, inv_way; logic [4:0] lk_set, rd_set, touch_set, ww_set, inv_set, ww_word;
  logic [31:0] ww_data; line_t rd_line, fill_line;
  l1d_cache #(.SETS(S), .WAYS(W)) dut (.*);
  int checks = 0, failures = 0, n_vict = 0, n_hit = 0;
  bit mv [S][W]; blk_t mb [S][W]; wid_t mw [S][W]; line_t md [S][W]; int order [S][$];

  function automatic int set_of(blk_t b); return int'(b[4:0] ^ b[9:5]); endfunction
  function automatic void mru(int s, int w);
    foreach (order[s][k]) if (order[s][k] == w) begin order[s].delete(k); break; end
    order[s].push_front(w);
  endfunction
  function automatic line_t rline();
    line_t l; for (int k = 0; k < 32; k++) l[32*k +: 32] = $urandom; return l;
  endfunction

  initial begin
    flush = 0; rd_en = 0; touch = 0; ww_valid = 0; inv_valid = 0; fill_valid = 0; lk_blk = 0; fill_blk = 0; fill_wid = 0;
    rd_set = 0; rd_way = 0; touch_set = 0; touch_way = 0; ww_set = 0; ww_way = 0; ww_word = 0; ww_data = 0;
    inv_set = 0; inv_way = 0; fill_line = '0;
    for (int s = 0; s < S; s++) begin order[s] = {0, 1, 2, 3}; for (int w = 0; w < W; w++) mv[s][w] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 20000; it++) begin
      int op, s, hw; blk_t b; bit eh;
      @(negedge clk);
      b = blk_t'($urandom_range(300)); s = set_of(b);
      lk_blk = b; #1;
      eh = 0; hw = 0;
      for (int w = 0; w < W; w++) if (mv[s][w] && mb[s][w] == b) begin eh = 1; hw = w; end
      checks++;
      if (lk_hit !== eh || lk_set !== 5'(s) || (eh && lk_way !== 2'(hw))) begin failures++; $display("FAIL lookup %h", b); end
      n_hit += eh;
      op = $urandom_range(99);
      if (eh && op < 40) begin
        // load hit: read the line and touch
        rd_en = 1; rd_set = 5'(s); rd_way = 2'(hw); touch = 1; touch_set = 5'(s); touch_way = 2'(hw);
        @(posedge clk); #1 rd_en = 0; touch = 0; mru(s, hw);
        checks++;
        if (rd_line !== md[s][hw]) begin failures++; $display("FAIL data %h", b); end
      end else if (eh && op < 55) begin
        ww_valid = 1; ww_set = 5'(s); ww_way = 2'(hw); ww_word = 5'($urandom); ww_data = $urandom;
        @(posedge clk); #1 ww_valid = 0; md[s][hw][32*ww_word +: 32] = ww_data;
      end else if (eh && op < 65) begin
        inv_valid = 1; inv_set = 5'(s); inv_way = 2'(hw);
        @(posedge clk); #1 inv_valid = 0; mv[s][hw] = 0;
      end else if (!eh && op < 90) begin
        int fw;
        fw = -1;
        for (int w = 0; w < W; w++) if (!mv[s][w] && fw < 0) fw = w;
        if (fw < 0) fw = order[s][W-1];
        fill_valid = 1; fill_blk = b; fill_wid = wid_t'($urandom_range(47)); fill_line = rline();
        #1 checks++;
        if (victim_valid !== mv[s][fw] || (mv[s][fw] && (victim_blk !== mb[s][fw] || victim_wid !== mw[s][fw]))) begin
          failures++; $display("FAIL victim for %h: %b %h %0d exp way %0d %b %h %0d order %p", b, victim_valid, victim_blk, victim_wid, fw, mv[s][fw], mb[s][fw], mw[s][fw], order[s]);
        end
        n_vict += victim_valid;
        @(posedge clk); #1 fill_valid = 0;
        mv[s][fw] = 1; mb[s][fw] = b; mw[s][fw] = fill_wid; md[s][fw] = fill_line; mru(s, fw);
      end else if (op == 99 && it % 7 == 0) begin
        flush = 1; @(posedge clk); #1 flush = 0;
        for (int x = 0; x < S; x++) for (int w = 0; w < W; w++) mv[x][w] = 0;
      end
    end
    checks++;
    if (n_vict == 0 || n_hit == 0) begin failures++; $display("FAIL coverage"); end
    $display("hits %0d victims %0d", n_hit, n_vict);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (200000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
