// tb_ciao_controller: the testbench plays the warp list, pair list, interference
// list and counters as plain arrays. Each round it loads random state, sends a
// low-epoch end, a high-epoch end or both, waits for the scan to finish and
// compares V/I flags and pair lists with a sequential reference of Algorithm 1:
// for each live warp in order, first the low-epoch step (reactivate a stalled
// warp / redirect an isolated warp back unless the warp that caused it still has
// IRS above the low cutoff), then the high-epoch step (if the warp's IRS is above
// the high cutoff, isolate its most frequent interferer, or stall it if it is
// already isolated). Every action must also be seen at least once.
module tb_ciao_controller;
  import ciao_pkg::*;
  localparam int N = 16, HR = 100, LR = 200;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic kernel_start, low_end, high_end, busy;
  logic [N-1:0] live, v_flags, i_flags; logic [6:0] active_warps;
  wid_t cnt_rd, il_rd, il_wid, pl_rd, pl_f0, pl_f1, pl_wr0_idx, pl_wr0_wid, pl_wr1_idx, pl_wr1_wid, fw_idx;
  logic [31:0] cnt_hits, inst_total;
  logic pl_wr0_valid, pl_wr1_valid, fw_valid, fw_is_v, fw_val;
  logic ev_isolate, ev_stall, ev_reactivate, ev_redirect_back;
  ciao_controller #(.N_WARPS(N), .HIGH_RECIP(HR), .LOW_RECIP(LR)) dut (.*);

  int checks = 0, failures = 0, n_iso = 0, n_stall = 0, n_react = 0, n_back = 0;
  int hits [64]; wid_t il [N]; wid_t p0 [N], p1 [N];
  logic [N-1:0] mv, mi; wid_t r0 [N], r1 [N];

  // environment arrays
  always_comb begin
    active_warps = 7'($countones(live & v_flags));
    cnt_hits = 32'(hits[cnt_rd]);
    il_wid = il[il_rd[3:0]];
    pl_f0 = p0[pl_rd[3:0]]; pl_f1 = p1[pl_rd[3:0]];
  end
  always @(posedge clk) begin
    if (fw_valid) begin if (fw_is_v) v_flags[fw_idx[3:0]] <= fw_val; else i_flags[fw_idx[3:0]] <= fw_val; end
    if (pl_wr0_valid) p0[pl_wr0_idx[3:0]] <= pl_wr0_wid;
    if (pl_wr1_valid) p1[pl_wr1_idx[3:0]] <= pl_wr1_wid;
    n_iso += ev_isolate; n_stall += ev_stall; n_react += ev_reactivate; n_back += ev_redirect_back;
  end

  function automatic logic above(int h, int act, int r);
    return longint'(h) * act * r > longint'(inst_total);
  endfunction

  task automatic reference(logic lo, logic hi);
    int act, k, j;
    mv = v_flags; mi = i_flags;
    for (int w = 0; w < N; w++) begin r0[w] = p0[w]; r1[w] = p1[w]; end
    for (int i = 0; i < N; i++) begin
      if (!live[i]) continue;
      if (lo) begin
        act = $countones(live & mv);
        if (!mv[i]) begin
          k = r1[i];
          if (!(above(hits[k], act, LR) && k < N && live[k] && mv[k])) begin mv[i] = 1; r1[i] = wid_t'(i); end
        end else if (mi[i]) begin
          k = r0[i];
          if (!(above(hits[k], act, LR) && k < N && live[k] && mv[k])) begin mi[i] = 0; r0[i] = wid_t'(i); end
        end
      end
      if (hi && mv[i]) begin
        act = $countones(live & mv);
        j = il[i];
        if (above(hits[i], act, HR) && j != i && j < N && live[j]) begin
          if (mi[j]) begin mv[j] = 0; r1[j] = wid_t'(i); end
          else begin mi[j] = 1; r0[j] = wid_t'(i); end
        end
      end
    end
  endtask

  initial begin
    kernel_start = 0; low_end = 0; high_end = 0; live = '0; inst_total = 1000;
    v_flags = '1; i_flags = '0;
    for (int w = 0; w < 64; w++) hits[w] = 0;
    for (int w = 0; w < N; w++) begin il[w] = wid_t'(w); p0[w] = wid_t'(w); p1[w] = wid_t'(w); end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int round = 0; round < 400; round++) begin
      logic lo, hi;
      @(negedge clk);
      live = N'($urandom) | N'($urandom);
      v_flags = N'($urandom) | N'($urandom); i_flags = N'($urandom) & N'($urandom);
      for (int w = 0; w < 64; w++) hits[w] = $urandom_range(4);
      for (int w = 0; w < N; w++) begin
        il[w] = wid_t'($urandom_range(N - 1));
        p0[w] = mi[w] ? wid_t'($urandom_range(N - 1)) : wid_t'(w);
        p1[w] = v_flags[w] ? wid_t'(w) : wid_t'($urandom_range(N - 1));
      end
      inst_total = 32'($urandom_range(3000) + 500);
      lo = $urandom_range(1); hi = $urandom_range(1); if (!lo && !hi) lo = 1;
      #1 reference(lo, hi);
      low_end = lo; high_end = hi;
      @(posedge clk); #1 low_end = 0; high_end = 0;
      @(posedge clk); #1;
      checks++;
      if (!busy) begin failures++; $display("FAIL scan did not start"); end
      while (busy) @(negedge clk);
      checks++;
      if (v_flags !== mv || i_flags !== mi) begin
        failures++; $display("FAIL round %0d V %h/%h I %h/%h", round, v_flags, mv, i_flags, mi);
      end
      for (int w = 0; w < N; w++) begin
        checks++;
        if (p0[w] !== r0[w] || p1[w] !== r1[w]) begin failures++; $display("FAIL round %0d pair %0d", round, w); end
      end
    end
    checks++;
    if (n_iso == 0 || n_stall == 0 || n_react == 0 || n_back == 0) begin
      failures++; $display("FAIL an action never happened");
    end
    $display("isolate %0d stall %0d reactivate %0d redirect back %0d", n_iso, n_stall, n_react, n_back);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
