// interference_list: for every warp, the warp that most recently and most often
// interfered with it, kept with a 2-bit saturating counter.
// Update rule (paper): on a VTA hit of warp i caused by warp x, if x equals the
// stored WID the counter is incremented (saturating at 3); otherwise the counter
// is decremented, and when it is already 0 the entry is replaced by x with the
// counter set to 0. Reset makes every entry point to its own warp, which the
// scheduling algorithm treats as "no interferer" (j != i test).
// Interface: one update port, one combinational read port. Updates land at the
// next clock edge. ENTRIES = 64 (6-bit WID + 2-bit counter = 8 bits per entry).
module interference_list
  import ciao_pkg::*;
#(
  parameter int unsigned ENTRIES = 64
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       upd_valid,
  input  wid_t       upd_victim,     // interfered warp (index)
  input  wid_t       upd_interferer, // interfering warp reported by the VTA
  input  wid_t       rd_idx,
  output wid_t       rd_wid,
  output logic [1:0] rd_cnt
);
  wid_t       wid_q [ENTRIES];
  logic [1:0] cnt_q [ENTRIES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < ENTRIES; e++) begin
        wid_q[e] <= wid_t'(e);
        cnt_q[e] <= 2'b00;
      end
    end else if (upd_valid && int'(upd_victim) < ENTRIES) begin
      if (wid_q[upd_victim] == upd_interferer) begin
        if (cnt_q[upd_victim] != 2'b11) cnt_q[upd_victim] <= cnt_q[upd_victim] + 2'b01;
      end else if (cnt_q[upd_victim] == 2'b00) begin
        wid_q[upd_victim] <= upd_interferer;
      end else begin
        cnt_q[upd_victim] <= cnt_q[upd_victim] - 2'b01;
      end
    end
  end

  assign rd_wid = (int'(rd_idx) < ENTRIES) ? wid_q[rd_idx] : rd_idx;
  assign rd_cnt = (int'(rd_idx) < ENTRIES) ? cnt_q[rd_idx] : 2'b00;
endmodule
