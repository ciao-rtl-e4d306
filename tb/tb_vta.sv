// tb_vta: random inserts and lookups on the victim tag array, checked against a
// reference model that keeps, per set, the last WAYS inserted entries in order.
// Also checks that the interfering WID reported is the one stored with the tag.
module tb_vta;
  import ciao_pkg::*;
  localparam int SETS = 48, WAYS = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic ins_valid, lk_hit; wid_t ins_owner, ins_evictor, lk_wid, lk_interferer; blk_t ins_blk, lk_blk;
  vta #(.SETS(SETS), .WAYS(WAYS)) dut (.*);
  int checks = 0, failures = 0;
  blk_t rb [SETS][$]; wid_t re [SETS][$];

  task automatic check_lookup(int w, blk_t b);
    logic eh, ok; wid_t ei;
    lk_wid = wid_t'(w); lk_blk = b; #1;
    eh = 0; ei = wid_t'(w); ok = 0;
    // a block may sit in a set twice; either stored evicting WID is acceptable
    for (int k = 0; k < rb[w].size(); k++) if (rb[w][k] == b) begin
      eh = 1; ei = re[w][k]; if (lk_interferer === re[w][k]) ok = 1;
    end
    checks++;
    if (lk_hit !== eh || (eh && !ok) || (!eh && lk_interferer !== wid_t'(w))) begin
      failures++; $display("FAIL set %0d blk %h hit %b/%b wid %0d/%0d", w, b, lk_hit, eh, lk_interferer, ei);
    end
  endtask

  initial begin
    ins_valid = 0; ins_owner = 0; ins_blk = 0; ins_evictor = 0; lk_wid = 0; lk_blk = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 4000; it++) begin
      @(negedge clk);
      check_lookup($urandom_range(SETS-1), blk_t'($urandom_range(40)));
      ins_valid = ($urandom_range(1) == 1);
      ins_owner = wid_t'($urandom_range(SETS-1)); ins_blk = blk_t'($urandom_range(40));
      ins_evictor = wid_t'($urandom_range(63));
      @(posedge clk);
      if (ins_valid) begin
        // the oldest entry of a full set is replaced (FIFO)
        if (rb[ins_owner].size() == WAYS) begin void'(rb[ins_owner].pop_front()); void'(re[ins_owner].pop_front()); end
        rb[ins_owner].push_back(ins_blk); re[ins_owner].push_back(ins_evictor);
      end
      #1 ins_valid = 0;
    end
    // lookups with the newest entries first: the model keeps insertion order, the
    // lookup reports the first match; make each set's blocks unique to avoid ambiguity
    for (int s = 0; s < SETS; s++) begin
      for (int k = 0; k < WAYS; k++) begin
        @(negedge clk);
        ins_valid = 1; ins_owner = wid_t'(s); ins_blk = blk_t'(1000 + s * 16 + k); ins_evictor = wid_t'((s + k) % 64);
        @(posedge clk);
        if (rb[s].size() == WAYS) begin void'(rb[s].pop_front()); void'(re[s].pop_front()); end
        rb[s].push_back(ins_blk); re[s].push_back(ins_evictor);
        #1 ins_valid = 0;
      end
      for (int k = 0; k < WAYS; k++) check_lookup(s, blk_t'(1000 + s * 16 + k));
      check_lookup(s, blk_t'(5));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
