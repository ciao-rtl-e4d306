// warp_list: the throttling unit of the warp scheduler. It keeps, for each warp,
// the active flag V and the isolation flag I that CIAO adds to the warp list:
//   V=1,I=0 active (uses L1D)   V=1,I=1 isolated (uses shared memory as cache)
//   V=0     stalled (never issued).
// Each cycle it picks one warp to issue with greedy-then-oldest (GTO) order: the
// warp issued last keeps issuing while it is eligible, otherwise the oldest
// eligible warp is taken. Eligible means live (launched, not finished), ready
// (from the scoreboard) and V=1. Age is taken as WID order (own choice).
// kernel_start sets every V to 1 and every I to 0. One flag write port, driven by
// the CIAO controller, takes effect at the next edge. Issue is combinational.
module warp_list
  import ciao_pkg::*;
#(
  parameter int unsigned N_WARPS = 48
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               kernel_start,
  input  logic [N_WARPS-1:0] live,
  input  logic [N_WARPS-1:0] ready,
  // flag write
  input  logic               fw_valid,
  input  wid_t               fw_idx,
  input  logic               fw_is_v,   // 1: write V, 0: write I
  input  logic               fw_val,
  // state
  output logic [N_WARPS-1:0] v_flags,
  output logic [N_WARPS-1:0] i_flags,
  output logic [6:0]         active_warps,
  // issue
  output logic               issue_valid,
  output wid_t               issue_wid
);
  logic [N_WARPS-1:0] v_q, i_q;
  wid_t               greedy_q;
  logic [N_WARPS-1:0] elig;

  assign elig = live & ready & v_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q <= '1; i_q <= '0; greedy_q <= '0;
    end else if (kernel_start) begin
      v_q <= '1; i_q <= '0; greedy_q <= '0;
    end else begin
      if (fw_valid && int'(fw_idx) < N_WARPS) begin
        if (fw_is_v) v_q[fw_idx] <= fw_val;
        else         i_q[fw_idx] <= fw_val;
      end
      if (issue_valid) greedy_q <= issue_wid;
    end
  end

  always_comb begin
    issue_valid = 1'b0;
    issue_wid   = '0;
    if (int'(greedy_q) < N_WARPS && elig[greedy_q]) begin
      issue_valid = 1'b1;
      issue_wid   = greedy_q;
    end else begin
      for (int w = N_WARPS-1; w >= 0; w--) begin
        if (elig[w]) begin
          issue_valid = 1'b1;
          issue_wid   = wid_t'(w);
        end
      end
    end
  end

  always_comb begin
    active_warps = '0;
    for (int w = 0; w < N_WARPS; w++) active_warps += 7'(live[w] & v_q[w]);
  end

  assign v_flags = v_q;
  assign i_flags = i_q;
endmodule
