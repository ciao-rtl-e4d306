// epoch_sampler: counts executed instructions and pulses high_end every
// HIGH_EPOCH instructions and low_end every LOW_EPOCH instructions (5000 and 100
// in the paper). Each pulse lasts one cycle and comes in the cycle after the
// instruction that completes the epoch. Both counters restart at kernel_start.
module epoch_sampler #(
  parameter int unsigned HIGH_EPOCH = 5000,
  parameter int unsigned LOW_EPOCH  = 100
) (
  input  logic clk,
  input  logic rst_n,
  input  logic kernel_start,
  input  logic inst_issued,
  output logic high_end,
  output logic low_end
);
  logic [$clog2(HIGH_EPOCH+1)-1:0] hcnt;
  logic [$clog2(LOW_EPOCH+1)-1:0]  lcnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hcnt <= '0; lcnt <= '0; high_end <= 1'b0; low_end <= 1'b0;
    end else if (kernel_start) begin
      hcnt <= '0; lcnt <= '0; high_end <= 1'b0; low_end <= 1'b0;
    end else begin
      high_end <= 1'b0;
      low_end  <= 1'b0;
      if (inst_issued) begin
        if (int'(hcnt) == HIGH_EPOCH-1) begin hcnt <= '0; high_end <= 1'b1; end
        else hcnt <= hcnt + 1'b1;
        if (int'(lcnt) == LOW_EPOCH-1) begin lcnt <= '0; low_end <= 1'b1; end
        else lcnt <= lcnt + 1'b1;
      end
    end
  end
endmodule
