// tb_warp_list: random live/ready masks and V/I flag writes. Checks the flags
// against a reference copy, the active-warp count (live and V), and the issue
// choice against greedy-then-oldest: keep the last issued warp while it is
// eligible, else the lowest-numbered eligible warp.
module tb_warp_list;
  import ciao_pkg::*;
  localparam int N = 48;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic kernel_start, fw_valid, fw_is_v, fw_val, issue_valid;
  logic [N-1:0] live, ready, v_flags, i_flags; wid_t fw_idx, issue_wid; logic [6:0] active_warps;
  warp_list #(.N_WARPS(N)) dut (.*);
  int checks = 0, failures = 0;
  logic [N-1:0] mv, mi; int greedy;
  task automatic chk();
    logic [N-1:0] el; int exp_w, act;
    el = live & ready & mv; act = $countones(live & mv);
    exp_w = -1;
    if (greedy >= 0 && el[greedy]) exp_w = greedy;
    else for (int w = N - 1; w >= 0; w--) if (el[w]) exp_w = w;
    checks++;
    if (v_flags !== mv || i_flags !== mi || active_warps !== 7'(act) ||
        issue_valid !== (exp_w >= 0) || (exp_w >= 0 && issue_wid !== wid_t'(exp_w))) begin
      failures++; $display("FAIL issue %b %0d expected %0d active %0d/%0d", issue_valid, issue_wid, exp_w, active_warps, act);
    end
  endtask
  initial begin
    kernel_start = 0; fw_valid = 0; fw_is_v = 0; fw_val = 0; fw_idx = 0; live = '0; ready = '0;
    mv = '1; mi = '0; greedy = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 6000; it++) begin
      @(negedge clk);
      if ($urandom_range(9) == 0) live = {$urandom, $urandom};
      for (int w = 0; w < N; w++) ready[w] = ($urandom_range(3) != 0);
      fw_valid = ($urandom_range(2) == 0); fw_idx = wid_t'($urandom_range(N - 1));
      fw_is_v = $urandom_range(1); fw_val = $urandom_range(1);
      kernel_start = (it % 1500 == 1499);
      #1 chk();
      @(posedge clk);
      if (kernel_start) begin mv = '1; mi = '0; greedy = 0; end
      else begin
        if (issue_valid) greedy = int'(issue_wid);
        if (fw_valid) begin if (fw_is_v) mv[fw_idx] = fw_val; else mi[fw_idx] = fw_val; end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
