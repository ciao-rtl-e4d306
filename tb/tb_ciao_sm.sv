// tb_ciao_sm: end-to-end test of one CIAO SM at its default sizes (48 warps,
// 16 KB L1D, 48 KB shared memory, 5000/100-instruction epochs).
// A front-end model runs a synthetic kernel: every second instruction of a warp is
// a memory access. Most warps loop over a small private working set (6 blocks,
// one store in eight accesses), which together overflow the L1D; every eighth
// warp streams through fresh blocks and so keeps evicting the others' data. Warps
// have different lengths, so they finish at different times. A CTA owns 4 KB of
// shared memory from the start; a second CTA is launched part way through (the
// cache region shrinks and its tags are cleared) and both are released later.
// Checks: every load returns the value a reference memory predicts; a hit answers
// one cycle after its request was accepted; scratchpad words read back as written;
// and each mechanism (VTA hit, isolation, stall, reactivation, redirection back,
// L1D/shared-memory hits, migrations both ways, evictions, tag clearing, both
// epoch kinds, CTA allocation) happens at least once.
module tb_ciao_sm;
  import ciao_pkg::*;
  localparam int NW = 48;

  logic clk = 0, rst_n = 0, kernel_start = 0;
  always #5 clk = ~clk;

  logic [NW-1:0] live, ready, v_flags, i_flags;
  logic issue_valid; wid_t issue_wid;
  logic req_valid, req_ready, rsp_valid; mem_req_t req; wid_t rsp_wid; logic [31:0] rsp_data;
  logic cta_alloc_valid, cta_alloc_ok, cta_free_valid, cta_alloc_ready;
  logic [2:0] cta_alloc_slot, cta_free_slot; logic [7:0] cta_alloc_id; logic [16:0] cta_alloc_size, cta_alloc_start;
  logic sreq_valid, sreq_we, sreq_ready, srsp_valid; logic [4:0] sreq_bank; logic [7:0] sreq_row;
  logic [63:0] sreq_wdata, srsp_data;
  logic l2_req_valid, l2_req_ready, l2_wr_valid, l2_wr_ready, l2_rsp_valid, l2_rsp_ready;
  blk_t l2_req_blk, l2_rsp_blk; logic [31:0] l2_wr_addr, l2_wr_data; line_t l2_rsp_line;
  logic cache_en; logic [16:0] cache_size; ciao_events_t ev;

  ciao_sm dut (.*);
  l2_model #(.LAT(20)) u_l2 (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic logic [31:0] init_word(input logic [31:0] a);
    return (a * 32'h9E3779B1) ^ 32'h5A5A_0F0F;
  endfunction
  logic [31:0] ref_mem [logic [29:0]];
  function automatic logic [31:0] ref_rd(input logic [31:0] a);
    if (ref_mem.exists(a[31:2])) return ref_mem[a[31:2]];
    return init_word({a[31:2], 2'b00});
  endfunction

  // ---------------- front-end model ----------------
  int unsigned icnt [NW];
  int unsigned limit [NW];
  int unsigned mcnt [NW];
  logic [NW-1:0] mem_pend, load_wait;
  mem_req_t      preq [NW];
  logic [31:0]   load_addr [NW];
  int unsigned   stream_blk [NW];

  function automatic mem_req_t make_req(int w, int unsigned m, int unsigned sb);
    mem_req_t q;
    logic [24:0] blk;
    q.wid = wid_t'(w);
    if (w % 8 == 0) begin
      blk = 25'h40000 + 25'(w) * 25'h1000 + 25'(sb % 100);
      q.store = 1'b0;
    end else begin
      blk = 25'h10000 + 25'(w) * 25'd64 + 25'(m % 6);
      q.store = (m % 8 == 7);
    end
    q.addr  = {blk, 5'(m * 7), 2'b00};
    q.wdata = 32'(w * 65536 + m);
    return q;
  endfunction

  always_comb for (int w = 0; w < NW; w++) begin
    live[w]  = rst_n && (icnt[w] < limit[w]);
    ready[w] = !mem_pend[w] && !load_wait[w];
  end

  // one request at a time to the LD/ST port, lowest pending warp first
  int sel;
  always_comb begin
    sel = -1;
    for (int w = NW-1; w >= 0; w--) if (mem_pend[w]) sel = w;
    req_valid = (sel >= 0);
    req = (sel >= 0) ? preq[sel] : '0;
  end

  longint last_accept = -10;
  int n_resp = 0, n_lat_ok = 0;
  always @(posedge clk) if (rst_n) begin
    if (issue_valid) begin
      automatic int w = int'(issue_wid);
      if (!live[w] || !ready[w] || !v_flags[w]) begin
        failures++; $display("FAIL: issued warp %0d not eligible", w);
      end
      icnt[w]++;
      if (icnt[w] % 2 == 0) begin
        preq[w] <= make_req(w, mcnt[w], stream_blk[w]);
        if (w % 8 == 0) stream_blk[w]++;
        mcnt[w]++;
        mem_pend[w] <= 1'b1;
      end
    end
    if (req_valid && req_ready) begin
      mem_pend[sel] <= 1'b0;
      last_accept = cyc;
      if (req.store) ref_mem[req.addr[31:2]] = req.wdata;
      else begin load_wait[sel] <= 1'b1; load_addr[sel] <= req.addr; end
    end
    if (rsp_valid) begin
      automatic int w = int'(rsp_wid);
      n_resp++;
      checks++;
      if (!load_wait[w] || rsp_data !== ref_rd(load_addr[w])) begin
        failures++;
        $display("FAIL: load of warp %0d addr %h got %h expected %h (wait=%0b)", w, load_addr[w],
                 rsp_data, ref_rd(load_addr[w]), load_wait[w]);
      end
      load_wait[w] <= 1'b0;
      if (ev.l1d_hit || ev.shm_hit) begin
        checks++;
        if (last_accept != cyc - 1) begin failures++; $display("FAIL: hit latency"); end
        else n_lat_ok++;
      end
    end
  end

  // ---------------- event counters ----------------
  localparam int NEV = 15;
  int evc [NEV];
  string evn [NEV] = '{"vta_hit","isolate","stall","reactivate","redirect_back","l1d_hit","shm_hit",
                       "miss","mig_to_shm","mig_to_l1d","shm_evict","l1d_evict","flush","high_epoch","low_epoch"};
  always @(posedge clk) if (rst_n) begin
    logic [NEV-1:0] e;
    e = ev;
    for (int k = 0; k < NEV; k++) if (e[NEV-1-k]) evc[k]++;
  end

  // ---------------- CTA / scratchpad sequence ----------------
  int n_alloc = 0;
  task automatic cta_alloc(input int slot, input int size);
    @(negedge clk);
    cta_alloc_slot = 3'(slot); cta_alloc_id = 8'(slot); cta_alloc_size = 17'(size);
    cta_alloc_valid = 1;
    #1 while (!cta_alloc_ok) begin @(negedge clk); #1; end
    @(posedge clk); #1 cta_alloc_valid = 0;
    n_alloc++;
  endtask
  task automatic sp_write(input int bank, input int row, input logic [63:0] d);
    @(negedge clk);
    sreq_bank = 5'(bank); sreq_row = 8'(row); sreq_wdata = d; sreq_we = 1; sreq_valid = 1;
    #1 while (!sreq_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1 sreq_valid = 0;
  endtask
  task automatic sp_check(input int bank, input int row, input logic [63:0] d);
    @(negedge clk);
    sreq_bank = 5'(bank); sreq_row = 8'(row); sreq_we = 0; sreq_valid = 1;
    #1 while (!sreq_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1 sreq_valid = 0;
    @(negedge clk);
    checks++;
    if (srsp_data !== d) begin failures++; $display("FAIL: scratchpad %0d/%0d got %h", bank, row, srsp_data); end
  endtask

  initial begin
    cta_alloc_valid = 0; cta_free_valid = 0; sreq_valid = 0; sreq_we = 0;
    cta_alloc_slot = 0; cta_free_slot = 0; cta_alloc_id = 0; cta_alloc_size = 0;
    sreq_bank = 0; sreq_row = 0; sreq_wdata = 0;
    mem_pend = '0; load_wait = '0;
    for (int w = 0; w < NW; w++) begin
      icnt[w] = 0; mcnt[w] = 0; stream_blk[w] = 0; limit[w] = 1000 + 100 * w;
      preq[w] = '0; load_addr[w] = '0;
    end
    for (int k = 0; k < NEV; k++) evc[k] = 0;
    for (int w = 0; w < NW; w++) limit[w] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    // CTA 0 takes 4 KB of shared memory (16 rows), the rest becomes cache
    cta_alloc(0, 4096);
    checks++;
    if (cta_alloc_start !== 0) begin failures++; $display("FAIL: CTA0 start %0d", cta_alloc_start); end
    repeat (12) @(posedge clk);
    checks++;
    if (!cache_en || cache_size != 17'(49152 - 4096)) begin failures++; $display("FAIL: cache size %0d", cache_size); end
    for (int b = 0; b < 32; b += 5) sp_write(b, 3, {32'(b), 32'hC0DE0000 + 32'(b)});
    // start the kernel
    for (int w = 0; w < NW; w++) limit[w] = 1000 + 100 * w;
    // a second CTA arrives later and takes 8 KB
    wait (dut.u_cnt.inst_total > 30000);
    cta_alloc(1, 8192);
    for (int b = 0; b < 32; b += 5) sp_check(b, 3, {32'(b), 32'hC0DE0000 + 32'(b)});
    wait (live == '0);
    repeat (50) @(posedge clk);
    @(negedge clk); cta_free_slot = 1; cta_free_valid = 1; @(posedge clk); #1 cta_free_valid = 0;
    cta_free_slot = 0; cta_free_valid = 1; @(posedge clk); #1 cta_free_valid = 0;
    repeat (20) @(posedge clk);
    checks++;
    if (cache_size != 17'(49152)) begin failures++; $display("FAIL: cache not regrown: %0d", cache_size); end
    // every mechanism must have happened
    for (int k = 0; k < NEV; k++) begin
      checks++;
      $display("event %-14s %0d", evn[k], evc[k]);
      if (evc[k] == 0) begin failures++; $display("FAIL: event %s never happened", evn[k]); end
    end
    checks++;
    if (n_alloc != 2) failures++;
    $display("cycles %0d instructions %0d loads answered %0d", cyc, dut.u_cnt.inst_total, n_resp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
