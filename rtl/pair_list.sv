// pair_list: for every warp j, field 0 holds the interfered warp whose IRS made
// CIAO isolate j (redirect its requests to shared memory) and field 1 the
// interfered warp that made CIAO stall j. 64 entries of 6+6 bits, indexed by WID.
// A cleared field holds the warp's own WID (the paper writes -1); whether a field
// is meaningful is given by the warp's I and V flags. One write port per field
// (writes land at the clock edge) and one combinational read port.
module pair_list
  import ciao_pkg::*;
#(
  parameter int unsigned ENTRIES = 64
) (
  input  logic clk,
  input  logic rst_n,
  input  logic wr0_valid,
  input  wid_t wr0_idx,
  input  wid_t wr0_wid,
  input  logic wr1_valid,
  input  wid_t wr1_idx,
  input  wid_t wr1_wid,
  input  wid_t rd_idx,
  output wid_t rd_f0,
  output wid_t rd_f1
);
  wid_t f0 [ENTRIES];
  wid_t f1 [ENTRIES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < ENTRIES; e++) begin
        f0[e] <= wid_t'(e);
        f1[e] <= wid_t'(e);
      end
    end else begin
      if (wr0_valid && int'(wr0_idx) < ENTRIES) f0[wr0_idx] <= wr0_wid;
      if (wr1_valid && int'(wr1_idx) < ENTRIES) f1[wr1_idx] <= wr1_wid;
    end
  end

  assign rd_f0 = (int'(rd_idx) < ENTRIES) ? f0[rd_idx] : rd_idx;
  assign rd_f1 = (int'(rd_idx) < ENTRIES) ? f1[rd_idx] : rd_idx;
endmodule
