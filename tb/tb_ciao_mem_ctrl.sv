// tb_ciao_mem_ctrl: the cache controller with the L1D, shared-memory banks, MSHR
// and queues, against the L2 latency model. 16 warps issue loads and stores at
// random: each warp stores only to its own 8 blocks and loads from them or from a
// 256-block shared pool, one load outstanding per warp. Isolation flags of random
// warps flip every few hundred cycles, so lines migrate between the L1D and the
// shared-memory cache in both directions. Part way through, the cache region is
// announced again (tags are cleared) and hold is raised for a while; scratchpad
// words outside the cache region are written and read back in between.
// Checks: load data against a reference memory, hit latency of one cycle after
// acceptance, no requests accepted under hold once quiet, scratchpad data, and
// that every event kind happens.
module tb_ciao_mem_ctrl;
  import ciao_pkg::*;
  localparam int NW = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic req_valid, req_ready, rsp_valid; mem_req_t req; wid_t rsp_wid; logic [31:0] rsp_data;
  logic [NW-1:0] i_flags;
  logic cache_en, region_change, hold, quiet; logic [7:0] mask, data_off, tag_off; logic [3:0] tag_rows;
  logic sreq_valid, sreq_we, sreq_ready, srsp_valid; logic [4:0] sreq_bank; logic [7:0] sreq_row;
  logic [63:0] sreq_wdata, srsp_data;
  logic l2_req_valid, l2_req_ready, l2_wr_valid, l2_wr_ready, l2_rsp_valid, l2_rsp_ready;
  blk_t l2_req_blk, l2_rsp_blk; logic [31:0] l2_wr_addr, l2_wr_data; line_t l2_rsp_line;
  logic vta_lk_valid, vta_ins_valid; wid_t vta_lk_wid, vta_ins_owner, vta_ins_evictor; blk_t vta_lk_blk, vta_ins_blk;
  logic ev_l1d_hit, ev_shm_hit, ev_miss, ev_mig_to_shm, ev_mig_to_l1d, ev_shm_evict, ev_l1d_evict, ev_flush;

  ciao_mem_ctrl #(.N_WARPS(NW)) dut (.*);
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

  // traffic
  logic run;
  logic [NW-1:0] load_wait;
  logic [31:0] load_addr [NW];
  longint last_accept = -10;
  int n_resp = 0;
  always @(posedge clk) if (rst_n) begin
    if (req_valid && req_ready) begin
      checks++;
      if (hold && quiet) begin failures++; $display("FAIL: accepted under hold"); end
      last_accept = cyc;
      if (req.store) ref_mem[req.addr[31:2]] = req.wdata;
      else begin load_wait[req.wid] <= 1'b1; load_addr[req.wid] <= req.addr; end
      req_valid <= 1'b0;
    end
    if (rsp_valid) begin
      automatic int w = int'(rsp_wid);
      n_resp++; checks++;
      if (!load_wait[w] || rsp_data !== ref_rd(load_addr[w])) begin
        failures++; $display("FAIL: load of warp %0d addr %h got %h expected %h", w, load_addr[w], rsp_data, ref_rd(load_addr[w]));
      end
      load_wait[w] <= 1'b0;
      if (ev_l1d_hit || ev_shm_hit) begin
        checks++;
        if (last_accept != cyc - 1) begin failures++; $display("FAIL: hit latency"); end
      end
    end
    if (run && (!req_valid || req_ready)) begin
      automatic int w = $urandom_range(NW - 1);
      automatic mem_req_t q;
      if (!load_wait[w] && !(req_valid && req.wid == wid_t'(w)) && $urandom_range(3) != 0) begin
        q.wid = wid_t'(w);
        q.store = ($urandom_range(5) == 0);
        if (q.store || $urandom_range(1) == 0) q.addr = {25'h1000 + 25'(w * 16) + 25'($urandom_range(7)), 5'($urandom), 2'b00};
        else q.addr = {25'h8000 + 25'($urandom_range(255)), 5'($urandom), 2'b00};
        q.wdata = $urandom;
        req <= q; req_valid <= 1'b1;
      end
    end
  end

  int evc [8];
  string evn [8] = '{"l1d_hit","shm_hit","miss","mig_to_shm","mig_to_l1d","shm_evict","l1d_evict","flush"};
  int n_lk = 0, n_ins = 0;
  always @(posedge clk) if (rst_n) begin
    evc[0] += ev_l1d_hit; evc[1] += ev_shm_hit; evc[2] += ev_miss; evc[3] += ev_mig_to_shm;
    evc[4] += ev_mig_to_l1d; evc[5] += ev_shm_evict; evc[6] += ev_l1d_evict; evc[7] += ev_flush;
    n_lk += vta_lk_valid; n_ins += vta_ins_valid;
  end
  always @(posedge clk) if (rst_n && run && cyc % 200 == 0) i_flags[$urandom_range(NW - 1)] <= $urandom_range(1);

  task automatic sp(input logic we, input int bank, input int row, input logic [63:0] d);
    @(negedge clk);
    sreq_bank = 5'(bank); sreq_row = 8'(row); sreq_wdata = d; sreq_we = we; sreq_valid = 1;
    #1 while (!sreq_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1 sreq_valid = 0;
    if (!we) begin
      @(negedge clk);
      checks++;
      if (!srsp_valid || srsp_data !== d) begin failures++; $display("FAIL: scratchpad %0d/%0d got %h", bank, row, srsp_data); end
    end
  endtask

  initial begin
    run = 0; req_valid = 0; req = '0; i_flags = '0; load_wait = '0; hold = 0;
    cache_en = 1; mask = 8'd127; data_off = 8'd32; tag_off = 8'd160; tag_rows = 4'd4; region_change = 1;
    sreq_valid = 0; sreq_we = 0; sreq_bank = 0; sreq_row = 0; sreq_wdata = 0;
    for (int k = 0; k < 8; k++) evc[k] = 0;
    for (int w = 0; w < NW; w++) load_addr[w] = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk); region_change = 0;
    for (int b = 0; b < 32; b++) sp(1, b, b % 32, {32'(b), 32'hABCD0000 + 32'(b)});
    run = 1;
    repeat (20000) @(posedge clk);
    for (int b = 0; b < 32; b += 3) sp(0, b, b % 32, {32'(b), 32'hABCD0000 + 32'(b)});
    // hold: the controller must drain and then stop accepting
    @(negedge clk) hold = 1;
    repeat (300) @(posedge clk);
    checks++;
    if (!quiet) begin failures++; $display("FAIL: not quiet under hold"); end
    @(negedge clk) hold = 0;
    // the region is announced again: tags are cleared
    @(negedge clk) region_change = 1; @(negedge clk) region_change = 0;
    repeat (20000) @(posedge clk);
    run = 0;
    repeat (500) @(posedge clk);
    checks++;
    if (load_wait != '0) begin failures++; $display("FAIL: loads never answered %h", load_wait); end
    for (int k = 0; k < 8; k++) begin
      checks++;
      $display("event %-11s %0d", evn[k], evc[k]);
      if (evc[k] == 0) begin failures++; $display("FAIL: event %s never happened", evn[k]); end
    end
    checks++;
    if (n_lk == 0 || n_ins == 0) begin failures++; $display("FAIL: no VTA traffic"); end
    $display("loads answered %0d, VTA lookups %0d inserts %0d", n_resp, n_lk, n_ins);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
