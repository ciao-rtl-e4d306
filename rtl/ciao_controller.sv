// ciao_controller: the CIAO scheduling algorithm (isolate / stall / reactivate /
// redirect back), run over the warp list at the end of every epoch.
// At a low-cutoff epoch end, each stalled warp i (V=0) is reactivated, and each
// isolated warp i (I=1) is sent back to the L1D, unless the warp k recorded in
// its pair-list field (field 1 for a stall, field 0 for an isolation) is still
// live and still has IRS_k above the low cutoff. At a high-cutoff epoch end, each
// active warp i (V=1) with IRS_i above the high cutoff looks up its most frequent
// interferer j in the interference list (j != i): if j already uses shared memory
// (I=1) j is stalled and i is written to field 1 of j's pair entry, otherwise j is
// isolated and i is written to field 0.
// Timing: epoch-end pulses are latched; a scan then visits warps 0..N_WARPS-1,
// two cycles per warp (phase A: low-epoch checks, phase B: high-epoch checks),
// so a scan takes 2*N_WARPS cycles. An epoch end that arrives during a scan is
// handled by the next scan. The scan order (WID order over the whole list) and
// the two-cycle step are own choices; the paper applies the algorithm to the
// warp being scheduled. The IRS comparison is done by a cutoff_test instance fed
// through the counter read port cnt_rd. Warps that are not live are skipped as
// targets of isolation or stalling (own choice). "Warp k needs executing" is
// taken as k live and not itself stalled (own choice: a stalled k cannot suffer
// interference, and this breaks cycles of warps stalling one another).
module ciao_controller
  import ciao_pkg::*;
#(
  parameter int unsigned N_WARPS    = 48,
  parameter int unsigned HIGH_RECIP = 100,
  parameter int unsigned LOW_RECIP  = 200
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               kernel_start,
  input  logic               low_end,
  input  logic               high_end,
  input  logic [N_WARPS-1:0] live,
  input  logic [N_WARPS-1:0] v_flags,
  input  logic [N_WARPS-1:0] i_flags,
  input  logic [6:0]         active_warps,
  // counters
  output wid_t               cnt_rd,
  input  logic [CNT_W-1:0]   cnt_hits,
  input  logic [CNT_W-1:0]   inst_total,
  // interference list
  output wid_t               il_rd,
  input  wid_t               il_wid,
  // pair list
  output wid_t               pl_rd,
  input  wid_t               pl_f0,
  input  wid_t               pl_f1,
  output logic               pl_wr0_valid,
  output wid_t               pl_wr0_idx,
  output wid_t               pl_wr0_wid,
  output logic               pl_wr1_valid,
  output wid_t               pl_wr1_idx,
  output wid_t               pl_wr1_wid,
  // warp-list flag write
  output logic               fw_valid,
  output wid_t               fw_idx,
  output logic               fw_is_v,
  output logic               fw_val,
  // events (one-cycle pulses)
  output logic               ev_isolate,
  output logic               ev_stall,
  output logic               ev_reactivate,
  output logic               ev_redirect_back,
  output logic               busy
);
  logic pend_low, pend_high, do_low, do_high, scanning, phase_b;
  wid_t idx;
  logic above_high, above_low;

  cutoff_test #(.HIGH_RECIP(HIGH_RECIP), .LOW_RECIP(LOW_RECIP)) u_cut (
    .hits(cnt_hits), .inst_total(inst_total), .active_warps(active_warps),
    .above_high(above_high), .above_low(above_low));

  // warp whose counter is examined: k from the pair list in phase A, i in phase B
  wid_t k_sel;
  assign k_sel  = v_flags[idx] ? pl_f0 : pl_f1;
  assign pl_rd  = idx;
  assign il_rd  = idx;
  assign cnt_rd = phase_b ? idx : k_sel;

  function automatic logic is_live(input logic [N_WARPS-1:0] l, input wid_t w);
    return (int'(w) < N_WARPS) ? l[w] : 1'b0;
  endfunction

  always_comb begin
    fw_valid = 1'b0; fw_idx = idx; fw_is_v = 1'b0; fw_val = 1'b0;
    pl_wr0_valid = 1'b0; pl_wr0_idx = idx; pl_wr0_wid = idx;
    pl_wr1_valid = 1'b0; pl_wr1_idx = idx; pl_wr1_wid = idx;
    ev_isolate = 1'b0; ev_stall = 1'b0; ev_reactivate = 1'b0; ev_redirect_back = 1'b0;
    if (scanning && live[idx]) begin
      if (!phase_b) begin
        if (do_low && !(above_low && is_live(live & v_flags, k_sel))) begin
          if (!v_flags[idx]) begin
            fw_valid = 1'b1; fw_is_v = 1'b1; fw_val = 1'b1;
            pl_wr1_valid = 1'b1;
            ev_reactivate = 1'b1;
          end else if (i_flags[idx]) begin
            fw_valid = 1'b1; fw_is_v = 1'b0; fw_val = 1'b0;
            pl_wr0_valid = 1'b1;
            ev_redirect_back = 1'b1;
          end
        end
      end else begin
        if (do_high && v_flags[idx] && above_high && il_wid != idx && is_live(live, il_wid)) begin
          fw_valid = 1'b1; fw_idx = il_wid;
          if (i_flags[il_wid]) begin
            fw_is_v = 1'b1; fw_val = 1'b0;
            pl_wr1_valid = 1'b1; pl_wr1_idx = il_wid; pl_wr1_wid = idx;
            ev_stall = 1'b1;
          end else begin
            fw_is_v = 1'b0; fw_val = 1'b1;
            pl_wr0_valid = 1'b1; pl_wr0_idx = il_wid; pl_wr0_wid = idx;
            ev_isolate = 1'b1;
          end
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend_low <= 1'b0; pend_high <= 1'b0; do_low <= 1'b0; do_high <= 1'b0;
      scanning <= 1'b0; phase_b <= 1'b0; idx <= '0;
    end else if (kernel_start) begin
      pend_low <= 1'b0; pend_high <= 1'b0; do_low <= 1'b0; do_high <= 1'b0;
      scanning <= 1'b0; phase_b <= 1'b0; idx <= '0;
    end else begin
      if (low_end)  pend_low  <= 1'b1;
      if (high_end) pend_high <= 1'b1;
      if (!scanning) begin
        if (pend_low || pend_high) begin
          scanning <= 1'b1; phase_b <= 1'b0; idx <= '0;
          do_low <= pend_low; do_high <= pend_high;
          pend_low <= low_end; pend_high <= high_end;
        end
      end else if (!phase_b) begin
        phase_b <= 1'b1;
      end else begin
        phase_b <= 1'b0;
        if (int'(idx) == N_WARPS-1) scanning <= 1'b0;
        else idx <= idx + 1'b1;
      end
    end
  end

  assign busy = scanning;
endmodule
