// tb_smmt: random CTA allocations and frees. Checks each allocation decision and
// start address against a reference of the contiguous allocator, and the cache
// region (enable, size, mask, data/tag offsets, tag rows) against the rule: with
// F free rows, the largest power of two D <= 128 with D + max(1, D/32) <= F data
// rows. region_change must pulse exactly when the region changes.
module tb_smmt;
  import ciao_pkg::*;
  localparam int SL = 8, ROWS = 192;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic alloc_valid, alloc_ready, alloc_ok, free_valid, rd_v, cache_en, region_change;
  logic [2:0] alloc_slot, free_slot, rd_slot; logic [7:0] alloc_ctaid, rd_ctaid;
  logic [16:0] alloc_size, rd_size, rd_start, cache_start, cache_size;
  logic [7:0] mask, data_off, tag_off; logic [3:0] tag_rows;
  smmt #(.CTA_SLOTS(SL), .ROWS(ROWS)) dut (.*);
  int checks = 0, failures = 0, n_ok = 0, n_rej = 0, n_chg = 0;
  bit mv [SL]; int ms [SL], mz [SL], mc [SL];
  int pm = -1, pd = -1, pt = -1;

  function automatic int top();
    int t = 0;
    for (int s = 0; s < SL; s++) if (mv[s] && ms[s] + mz[s] > t) t = ms[s] + mz[s];
    return t;
  endfunction

  task automatic chk_region();
    int used, fr, d, t, em, ed, et;
    used = (top() + 255) / 256; fr = ROWS - used; d = 0; t = 0;
    for (int p = 0; p <= 7; p++) begin
      int tt = (p >= 5) ? (1 << (p - 5)) : 1;
      if ((1 << p) + tt <= fr) begin d = 1 << p; t = tt; end
    end
    em = (d > 0) ? d - 1 : 0; ed = used; et = used + d;
    checks++;
    if (cache_en !== (d > 0) || mask !== 8'(em) || data_off !== 8'(ed) || tag_off !== 8'(et) ||
        tag_rows !== 4'(t) || cache_size !== 17'(ROWS * 256 - used * 256) || cache_start !== 17'(used * 256)) begin
      failures++; $display("FAIL region: top %0d en %b mask %0d doff %0d toff %0d trows %0d", top(), cache_en, mask, data_off, tag_off, tag_rows);
    end
    checks++;
    if (region_change !== ((em != pm) || (ed != pd) || (et != pt))) begin
      failures++; $display("FAIL region_change %b at %0t exp %0d %0d %0d prev %0d %0d %0d", region_change, $time, em, ed, et, pm, pd, pt);
    end
    n_chg += region_change;
    pm = em; pd = ed; pt = et;
  endtask

  initial begin
    alloc_valid = 0; alloc_ready = 1; free_valid = 0; alloc_slot = 0; free_slot = 0; rd_slot = 0;
    alloc_ctaid = 0; alloc_size = 0;
    for (int s = 0; s < SL; s++) begin mv[s] = 0; ms[s] = 0; mz[s] = 0; mc[s] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk);
    pm = 0; pd = 0; pt = 0; chk_region();      // reset state reported as a change
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      if ($urandom_range(2) != 0) begin
        int s, sz; bit eok;
        s = $urandom_range(SL - 1); sz = ($urandom_range(3) == 0) ? 256 * $urandom_range(48) : $urandom_range(12000);
        alloc_valid = 1; alloc_slot = 3'(s); alloc_size = 17'(sz); alloc_ctaid = 8'(it);
        alloc_ready = ($urandom_range(7) != 0);
        eok = alloc_ready && !mv[s] && (top() + sz <= ROWS * 256);
        #1 checks++;
        if (alloc_ok !== eok) begin failures++; $display("FAIL alloc_ok %b/%b", alloc_ok, eok); end
        if (eok) begin ms[s] = top(); mz[s] = sz; mc[s] = it % 256; mv[s] = 1; n_ok++; end else n_rej++;
      end else begin
        int s;
        s = $urandom_range(SL - 1);
        free_valid = 1; free_slot = 3'(s);
        mv[s] = 0;
      end
      @(posedge clk); #1 alloc_valid = 0; free_valid = 0;
      @(negedge clk);
      for (int s = 0; s < SL; s++) begin
        rd_slot = 3'(s); #1; checks++;
        if (rd_v !== mv[s] || (mv[s] && (rd_start !== 17'(ms[s]) || rd_size !== 17'(mz[s]) || rd_ctaid !== 8'(mc[s])))) begin
          failures++; $display("FAIL slot %0d", s);
        end
      end
      @(negedge clk) chk_region();
    end
    checks++;
    if (n_ok == 0 || n_rej == 0 || n_chg < 10) begin failures++; $display("FAIL coverage"); end
    $display("allocations %0d rejected %0d region changes %0d", n_ok, n_rej, n_chg);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
