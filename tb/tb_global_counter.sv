// tb_global_counter: random VTA hits and issued instructions, checked against
// reference counts; a kernel start must clear every counter.
module tb_global_counter;
  import ciao_pkg::*;
  localparam int N = 48;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic kernel_start, vta_hit, inst_issued; wid_t vta_hit_wid, rd_a, rd_b;
  logic [31:0] hits_a, hits_b, inst_total;
  global_counter #(.N_WARPS(N)) dut (.*);
  int checks = 0, failures = 0;
  int mh [N]; int mi;

  task automatic chk_all();
    for (int w = 0; w < N; w += 2) begin
      rd_a = wid_t'(w); rd_b = wid_t'(w + 1); #1; checks += 2;
      if (hits_a !== 32'(mh[w]) || hits_b !== 32'(mh[w+1])) begin failures++; $display("FAIL warp %0d", w); end
    end
    checks++;
    if (inst_total !== 32'(mi)) begin failures++; $display("FAIL inst %0d/%0d", inst_total, mi); end
  endtask

  initial begin
    kernel_start = 0; vta_hit = 0; inst_issued = 0; vta_hit_wid = 0; rd_a = 0; rd_b = 0;
    mi = 0; for (int w = 0; w < N; w++) mh[w] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int round = 0; round < 3; round++) begin
      for (int it = 0; it < 3000; it++) begin
        @(negedge clk);
        vta_hit = ($urandom_range(2) != 0); vta_hit_wid = wid_t'($urandom_range(N - 1));
        inst_issued = ($urandom_range(3) != 0);
        @(posedge clk);
        if (vta_hit) mh[vta_hit_wid]++;
        if (inst_issued) mi++;
      end
      @(negedge clk); vta_hit = 0; inst_issued = 0;
      chk_all();
      kernel_start = 1; @(posedge clk); #1 kernel_start = 0;
      mi = 0; for (int w = 0; w < N; w++) mh[w] = 0;
      chk_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
