// mshr: miss status holding registers shared by the L1D and by shared memory used
// as a cache. Each entry holds the global block address, the requesting warp and
// word, the fill destination and, as CIAO adds, the translated shared-memory
// address, so a response that matches an entry's global address is written
// straight into shared memory. One miss per block is outstanding: the cache
// controller holds a request whose block is already pending (port a), so the
// response match (port b) is unique. Allocation takes the lowest free entry.
// Timing: match ports are combinational; alloc and free land at the clock edge.
// ENTRIES = 32 is an own choice (not given in the paper).
module mshr
  import ciao_pkg::*;
#(
  parameter int unsigned ENTRIES = 32
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      alloc_valid,
  input  mshr_ent_t alloc_ent,
  output logic      full,
  input  blk_t      ma_blk,
  output logic      ma_hit,
  input  blk_t      mb_blk,
  output logic      mb_hit,
  output logic [$clog2(ENTRIES)-1:0] mb_idx,
  output mshr_ent_t mb_ent,
  input  logic      free_valid,
  input  logic [$clog2(ENTRIES)-1:0] free_idx,
  output logic      shm_pending   // some entry will fill shared memory
);
  localparam int unsigned IW = $clog2(ENTRIES);
  logic [ENTRIES-1:0] v;
  mshr_ent_t          ent [ENTRIES];
  logic [IW-1:0]      free_slot;
  logic               any_free;

  always_comb begin
    any_free = 1'b0; free_slot = '0;
    for (int e = ENTRIES-1; e >= 0; e--) if (!v[e]) begin any_free = 1'b1; free_slot = IW'(e); end
    ma_hit = 1'b0; mb_hit = 1'b0; mb_idx = '0; shm_pending = 1'b0;
    for (int e = 0; e < ENTRIES; e++) begin
      if (v[e] && ent[e].blk == ma_blk) ma_hit = 1'b1;
      if (v[e] && ent[e].blk == mb_blk && !mb_hit) begin mb_hit = 1'b1; mb_idx = IW'(e); end
      if (v[e] && ent[e].dest == DEST_SHM) shm_pending = 1'b1;
    end
    mb_ent = ent[mb_idx];
  end
  assign full = !any_free;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v <= '0;
    end else begin
      if (free_valid) v[free_idx] <= 1'b0;
      if (alloc_valid && any_free) v[free_slot] <= 1'b1;
    end
  end
  always_ff @(posedge clk) if (alloc_valid && any_free) ent[free_slot] <= alloc_ent;
endmodule
