// tb_mshr: random allocations, frees and address matches against a reference
// array: allocation takes the lowest free entry, full when all are used, both
// match ports find the entry of a pending block, shm_pending reports any entry
// whose fill goes to shared memory.
module tb_mshr;
  import ciao_pkg::*;
  localparam int E = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic alloc_valid, full, ma_hit, mb_hit, free_valid, shm_pending; mshr_ent_t alloc_ent, mb_ent;
  blk_t ma_blk, mb_blk; logic [4:0] mb_idx, free_idx;
  mshr #(.ENTRIES(E)) dut (.*);
  int checks = 0, failures = 0, n_full = 0;
  bit mv [E]; mshr_ent_t me [E];
  initial begin
    alloc_valid = 0; free_valid = 0; alloc_ent = '0; ma_blk = 0; mb_blk = 0; free_idx = 0;
    for (int e = 0; e < E; e++) mv[e] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 20000; it++) begin
      int lo, cnt, hitn; bit sp, pend;
      @(negedge clk);
      lo = -1; cnt = 0; sp = 0;
      for (int e = E - 1; e >= 0; e--) if (!mv[e]) lo = e;
      for (int e = 0; e < E; e++) begin cnt += mv[e]; if (mv[e] && me[e].dest == DEST_SHM) sp = 1; end
      // match a block: pending blocks are unique in the model
      mb_blk = blk_t'($urandom_range(60)); ma_blk = mb_blk; #1;
      hitn = -1; for (int e = 0; e < E; e++) if (mv[e] && me[e].blk == mb_blk) hitn = e;
      checks++;
      if (full !== (lo < 0) || shm_pending !== sp || mb_hit !== (hitn >= 0) || ma_hit !== (hitn >= 0) ||
          (hitn >= 0 && (mb_idx !== 5'(hitn) || mb_ent !== me[hitn]))) begin
        failures++; $display("FAIL at %0d: full %b hit %b idx %0d exp %0d", it, full, mb_hit, mb_idx, hitn);
      end
      n_full += full;
      pend = (hitn >= 0);
      alloc_valid = !pend && ($urandom_range(99) < ((it / 2000) % 2 ? 70 : 40));
      alloc_ent.blk = mb_blk; alloc_ent.wid = wid_t'($urandom_range(47)); alloc_ent.word = 5'($urandom);
      alloc_ent.dest = dest_e'($urandom_range(1)); alloc_ent.shm = shm_loc_t'($urandom);
      free_valid = ($urandom_range(99) < 45) && cnt > 0;
      if (free_valid) begin
        int f; do f = $urandom_range(E - 1); while (!mv[f]);
        free_idx = 5'(f);
      end
      @(posedge clk); #1;
      if (free_valid) mv[free_idx] = 0;
      if (alloc_valid && lo >= 0) begin mv[lo] = 1; me[lo] = alloc_ent; end
      alloc_valid = 0; free_valid = 0;
    end
    checks++;
    if (n_full == 0) begin failures++; $display("FAIL never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
