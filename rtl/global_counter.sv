// global_counter: the per-warp VTA-hit counters (VTACount0..k) and the SM's
// total executed-instruction counter (Inst-total) that feed the IRS estimate.
// All counters are 32 bits and clear when a kernel starts (kernel_start), as the
// paper states; they count up for the whole kernel, saturating at all ones.
// Two combinational read ports (a and b) let the scheduling logic evaluate two
// warps' IRS in the same cycle.
module global_counter
  import ciao_pkg::*;
#(
  parameter int unsigned N_WARPS = 48
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             kernel_start,
  input  logic             vta_hit,
  input  wid_t             vta_hit_wid,
  input  logic             inst_issued,
  input  wid_t             rd_a,
  input  wid_t             rd_b,
  output logic [CNT_W-1:0] hits_a,
  output logic [CNT_W-1:0] hits_b,
  output logic [CNT_W-1:0] inst_total
);
  logic [CNT_W-1:0] hits_q [N_WARPS];
  logic [CNT_W-1:0] inst_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      inst_q <= '0;
      for (int w = 0; w < N_WARPS; w++) hits_q[w] <= '0;
    end else if (kernel_start) begin
      inst_q <= '0;
      for (int w = 0; w < N_WARPS; w++) hits_q[w] <= '0;
    end else begin
      if (inst_issued && inst_q != '1) inst_q <= inst_q + 1'b1;
      if (vta_hit && int'(vta_hit_wid) < N_WARPS && hits_q[vta_hit_wid] != '1)
        hits_q[vta_hit_wid] <= hits_q[vta_hit_wid] + 1'b1;
    end
  end

  assign hits_a = (int'(rd_a) < N_WARPS) ? hits_q[rd_a] : '0;
  assign hits_b = (int'(rd_b) < N_WARPS) ? hits_q[rd_b] : '0;
  assign inst_total = inst_q;
endmodule
