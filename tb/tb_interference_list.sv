// tb_interference_list: replays the paper's example (W32 interferes with W34 until
// the counter saturates at 11, W42 then decrements it, W32 increments it again;
// the entry is replaced only when the counter is 00), then random updates against
// a reference model of the same rule.
module tb_interference_list;
  import ciao_pkg::*;
  localparam int E = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic upd_valid; wid_t upd_victim, upd_interferer, rd_idx, rd_wid; logic [1:0] rd_cnt;
  interference_list #(.ENTRIES(E)) dut (.*);
  int checks = 0, failures = 0;
  wid_t mw [E]; logic [1:0] mc [E];

  task automatic upd(int v, int x);
    @(negedge clk); upd_valid = 1; upd_victim = wid_t'(v); upd_interferer = wid_t'(x);
    @(posedge clk); #1 upd_valid = 0;
    if (mw[v] == wid_t'(x)) begin if (mc[v] != 3) mc[v]++; end
    else if (mc[v] == 0) mw[v] = wid_t'(x);
    else mc[v]--;
  endtask
  task automatic chk(int v, int ew, int ec);
    rd_idx = wid_t'(v); #1; checks++;
    if (rd_wid !== wid_t'(ew) || rd_cnt !== 2'(ec)) begin
      failures++; $display("FAIL entry %0d: %0d/%0d expected %0d/%0d", v, rd_wid, rd_cnt, ew, ec);
    end
  endtask

  initial begin
    upd_valid = 0; upd_victim = 0; upd_interferer = 0; rd_idx = 0;
    for (int e = 0; e < E; e++) begin mw[e] = wid_t'(e); mc[e] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;
    chk(34, 34, 0);                         // empty entry points at itself
    upd(34, 32); chk(34, 32, 0);            // W32 stored, counter 00
    upd(34, 32); upd(34, 32); upd(34, 32); chk(34, 32, 3);   // (1) reaches 11
    upd(34, 32); chk(34, 32, 3);            // saturates
    upd(34, 42); chk(34, 32, 2);            // (2) W42 decrements
    upd(34, 32); chk(34, 32, 3);            // (3) W32 increments
    upd(34, 42); upd(34, 42); upd(34, 42); chk(34, 32, 0);
    upd(34, 42); chk(34, 42, 0);            // replaced only at 00
    for (int it = 0; it < 3000; it++) begin
      automatic int v = $urandom_range(7);
      upd(v, $urandom_range(3) + 8);
      chk(v, mw[v], mc[v]);
    end
    for (int e = 0; e < E; e++) chk(e, mw[e], mc[e]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
