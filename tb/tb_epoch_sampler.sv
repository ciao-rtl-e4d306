// tb_epoch_sampler: instructions issue at random; a low-epoch pulse must follow
// every LOW_EPOCH-th instruction and a high-epoch pulse every HIGH_EPOCH-th, in
// the next cycle, and nowhere else. Run with the paper's 5000 / 100.
module tb_epoch_sampler;
  localparam int H = 5000, L = 100;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic kernel_start, inst_issued, high_end, low_end;
  epoch_sampler #(.HIGH_EPOCH(H), .LOW_EPOCH(L)) dut (.*);
  int checks = 0, failures = 0, n = 0, nh = 0, nl = 0;
  logic exp_h, exp_l;
  initial begin
    kernel_start = 0; inst_issued = 0; exp_h = 0; exp_l = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 40000; it++) begin
      @(negedge clk);
      checks++;
      if (high_end !== exp_h || low_end !== exp_l) begin
        failures++; $display("FAIL at instr %0d: h %b/%b l %b/%b", n, high_end, exp_h, low_end, exp_l);
      end
      nh += high_end; nl += low_end;
      inst_issued = ($urandom_range(2) != 0);
      @(posedge clk);
      exp_h = 0; exp_l = 0;
      if (inst_issued) begin
        n++;
        exp_h = (n % H == 0); exp_l = (n % L == 0);
      end
    end
    checks++;
    if (nh != n / H || nl != n / L) begin failures++; $display("FAIL counts %0d %0d", nh, nl); end
    $display("instructions %0d high epochs %0d low epochs %0d", n, nh, nl);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
