// vta: victim tag array of the interference detector.
// One set per warp (SETS = 48), WAYS = 8 tags per set, FIFO replacement, as in
// the evaluated configuration. When a block owned by warp W is evicted (from the
// L1D or from the shared-memory cache), the block address and the evicting warp's
// WID are written into set W at its FIFO pointer. On a miss of warp W the lookup
// port compares the block address against all tags of set W in parallel (the
// comparators and OR of the VTA figure); a match is a VTA hit and also reports the
// WID that caused that eviction, i.e. the interfering warp.
// Timing: lookup is combinational; insert takes effect at the next clock edge.
// Own choices: an entry is left in place after a hit (the paper does not say);
// the full 25-bit block address is stored as the tag.
module vta
  import ciao_pkg::*;
#(
  parameter int unsigned SETS = 48,
  parameter int unsigned WAYS = 8
) (
  input  logic clk,
  input  logic rst_n,
  // insert on eviction
  input  logic ins_valid,
  input  wid_t ins_owner,      // warp that brought the evicted block (selects the set)
  input  blk_t ins_blk,        // evicted block address
  input  wid_t ins_evictor,    // warp whose request evicted it
  // lookup on a miss
  input  wid_t lk_wid,
  input  blk_t lk_blk,
  output logic lk_hit,
  output wid_t lk_interferer
);
  localparam int unsigned PW = (WAYS > 1) ? $clog2(WAYS) : 1;

  typedef struct packed {
    logic valid;
    blk_t blk;
    wid_t evictor;
  } vta_ent_t;

  vta_ent_t        mem  [SETS][WAYS];
  logic [PW-1:0]   fifo [SETS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) begin
        fifo[s] <= '0;
        for (int w = 0; w < WAYS; w++) mem[s][w] <= '0;
      end
    end else if (ins_valid && (int'(ins_owner) < SETS)) begin
      mem[ins_owner][fifo[ins_owner]] <= '{valid: 1'b1, blk: ins_blk, evictor: ins_evictor};
      fifo[ins_owner] <= (int'(fifo[ins_owner]) == WAYS-1) ? '0 : fifo[ins_owner] + 1'b1;
    end
  end

  always_comb begin
    lk_hit = 1'b0;
    lk_interferer = lk_wid;
    if (int'(lk_wid) < SETS) begin
      for (int w = 0; w < WAYS; w++) begin
        if (mem[lk_wid][w].valid && mem[lk_wid][w].blk == lk_blk && !lk_hit) begin
          lk_hit = 1'b1;
          lk_interferer = mem[lk_wid][w].evictor;
        end
      end
    end
  end
endmodule
