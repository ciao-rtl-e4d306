// cutoff_test: decides whether a warp's Individual Re-reference Score
//   IRS = hits / (inst_total / active_warps)
// is above the high cutoff and above the low cutoff (0.01 and 0.005 in the paper).
// The division is avoided by cross-multiplying: IRS > 1/R  <=>  hits*active*R >
// inst_total, where R is the reciprocal of the cutoff (100 and 200). The products
// by the constants are shift-and-add in hardware. Purely combinational.
// Own choice: cutoffs are given as integer reciprocals; with no instructions yet
// executed (inst_total = 0) any hit counts as above both cutoffs.
module cutoff_test
  import ciao_pkg::*;
#(
  parameter int unsigned HIGH_RECIP = 100,  // high-cutoff = 1/100 = 0.01
  parameter int unsigned LOW_RECIP  = 200   // low-cutoff  = 1/200 = 0.005
) (
  input  logic [CNT_W-1:0] hits,
  input  logic [CNT_W-1:0] inst_total,
  input  logic [6:0]       active_warps,
  output logic             above_high,
  output logic             above_low
);
  localparam int unsigned PW = CNT_W + 7 + 9;
  logic [PW-1:0] scaled;
  always_comb begin
    scaled     = PW'(hits) * PW'(active_warps);
    above_high = (scaled * PW'(HIGH_RECIP)) > PW'(inst_total);
    above_low  = (scaled * PW'(LOW_RECIP))  > PW'(inst_total);
  end
endmodule
