// tb_cutoff_test: compares the unit's decisions with IRS computed in real
// arithmetic, IRS = hits / (inst / active), against 0.01 and 0.005.
module tb_cutoff_test;
  logic [31:0] hits, inst_total; logic [6:0] active_warps; logic above_high, above_low;
  cutoff_test dut (.*);
  int checks = 0, failures = 0;
  task automatic t(int unsigned h, int unsigned i, int a);
    real irs; logic eh, el;
    hits = h; inst_total = i; active_warps = 7'(a); #1;
    if (i == 0) begin eh = (h * a) != 0; el = eh; end
    else begin irs = real'(h) * real'(a) / real'(i); eh = irs > 0.01; el = irs > 0.005; end
    checks++;
    if (above_high !== eh || above_low !== el) begin
      failures++; $display("FAIL h=%0d i=%0d a=%0d : %b%b expected %b%b", h, i, a, above_high, above_low, eh, el);
    end
  endtask
  initial begin
    t(1, 4800, 48);    // IRS = 0.01 exactly: not above high
    t(1, 4799, 48);    // just above 0.01
    t(1, 9600, 48);    // 0.005: above neither
    t(1, 9599, 48);    // just above 0.005
    t(0, 100, 48);
    for (int k = 0; k < 20000; k++)
      t($urandom_range(2000), $urandom_range(1000000), $urandom_range(64));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
