// tb_pair_list: random writes to both fields (sometimes the same entry in the same
// cycle) checked against a reference copy; reset must clear fields to the entry's
// own WID.
module tb_pair_list;
  import ciao_pkg::*;
  localparam int E = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr0_valid, wr1_valid; wid_t wr0_idx, wr0_wid, wr1_idx, wr1_wid, rd_idx, rd_f0, rd_f1;
  pair_list #(.ENTRIES(E)) dut (.*);
  int checks = 0, failures = 0;
  wid_t m0 [E], m1 [E];
  task automatic chk(int e);
    rd_idx = wid_t'(e); #1; checks++;
    if (rd_f0 !== m0[e] || rd_f1 !== m1[e]) begin failures++; $display("FAIL entry %0d", e); end
  endtask
  initial begin
    wr0_valid = 0; wr1_valid = 0; wr0_idx = 0; wr1_idx = 0; wr0_wid = 0; wr1_wid = 0; rd_idx = 0;
    for (int e = 0; e < E; e++) begin m0[e] = wid_t'(e); m1[e] = wid_t'(e); end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int e = 0; e < E; e++) chk(e);
    for (int it = 0; it < 5000; it++) begin
      @(negedge clk);
      wr0_valid = $urandom_range(1); wr1_valid = $urandom_range(1);
      wr0_idx = wid_t'($urandom_range(15)); wr1_idx = wid_t'($urandom_range(15));
      wr0_wid = wid_t'($urandom); wr1_wid = wid_t'($urandom);
      @(posedge clk);
      if (wr0_valid) m0[wr0_idx] = wr0_wid;
      if (wr1_valid) m1[wr1_idx] = wr1_wid;
      #1 wr0_valid = 0; wr1_valid = 0;
      chk($urandom_range(15));
    end
    for (int e = 0; e < E; e++) chk(e);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
