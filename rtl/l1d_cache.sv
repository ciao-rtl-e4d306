// l1d_cache: the L1 data cache arrays of the SM: 16 KB, 128-byte lines, 4 ways,
// 32 sets, LRU replacement, XOR set-index hashing. Every tag also records the WID
// of the warp that brought the line in, which the victim tag array needs on an
// eviction. The cache is write-through for global data, so lines are never dirty.
// This block holds the arrays and the replacement state; the cache control logic
// sequences it. Ports:
//   lookup  (combinational): block address -> hit, way, set
//   read    (synchronous):   rd_set/rd_way -> rd_line next cycle
//   touch   marks a way most recently used
//   word write (store hit), invalidate (line migrated to shared memory)
//   fill: writes a line into an invalid way or the LRU way; the line it replaces
//         is shown on victim_* in the same cycle (combinational) so it can be
//         recorded in the victim tag array.
// The set hash (low 5 block-address bits XOR the next 5) is an own choice; the
// paper only says an XOR set-index hash is used.
// Only the low 10 block-address bits feed the set hash; the rest are tag bits.
module l1d_cache
  import ciao_pkg::*;
#(
  parameter int unsigned SETS = 32,
  parameter int unsigned WAYS = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic flush,
  // lookup
  input  blk_t lk_blk,
  output logic lk_hit,
  output logic [$clog2(WAYS)-1:0] lk_way,
  output logic [$clog2(SETS)-1:0] lk_set,
  // read
  input  logic rd_en,
  input  logic [$clog2(SETS)-1:0] rd_set,
  input  logic [$clog2(WAYS)-1:0] rd_way,
  output line_t rd_line,
  // touch
  input  logic touch,
  input  logic [$clog2(SETS)-1:0] touch_set,
  input  logic [$clog2(WAYS)-1:0] touch_way,
  // word write
  input  logic ww_valid,
  input  logic [$clog2(SETS)-1:0] ww_set,
  input  logic [$clog2(WAYS)-1:0] ww_way,
  input  logic [4:0]  ww_word,
  input  logic [31:0] ww_data,
  // invalidate
  input  logic inv_valid,
  input  logic [$clog2(SETS)-1:0] inv_set,
  input  logic [$clog2(WAYS)-1:0] inv_way,
  // fill
  input  logic  fill_valid,
  input  blk_t  fill_blk,
  input  wid_t  fill_wid,
  input  line_t fill_line,
  output logic  victim_valid,
  output blk_t  victim_blk,
  output wid_t  victim_wid
);
  localparam int unsigned SW = $clog2(SETS);
  localparam int unsigned WW = $clog2(WAYS);

  logic [WAYS-1:0] tv [SETS];
  blk_t            tb [SETS][WAYS];
  wid_t            tw [SETS][WAYS];
  logic [WW-1:0]   age [SETS][WAYS];   // 0 = most recently used

  function automatic logic [SW-1:0] set_of(input blk_t b);
    return b[SW-1:0] ^ b[2*SW-1:SW];
  endfunction

  // lookup
  always_comb begin
    lk_set = set_of(lk_blk);
    lk_hit = 1'b0; lk_way = '0;
    for (int w = 0; w < WAYS; w++)
      if (tv[lk_set][w] && tb[lk_set][w] == lk_blk && !lk_hit) begin lk_hit = 1'b1; lk_way = WW'(w); end
  end

  // fill victim choice
  logic [SW-1:0] f_set;
  logic [WW-1:0] f_way;
  logic          f_found;
  always_comb begin
    f_set = set_of(fill_blk);
    f_found = 1'b0; f_way = '0;
    for (int w = 0; w < WAYS; w++)
      if (!tv[f_set][w] && !f_found) begin f_found = 1'b1; f_way = WW'(w); end
    if (!f_found)
      for (int w = 0; w < WAYS; w++)
        if (int'(age[f_set][w]) == WAYS-1) f_way = WW'(w);
    victim_valid = fill_valid && tv[f_set][f_way];
    victim_blk   = tb[f_set][f_way];
    victim_wid   = tw[f_set][f_way];
  end

  // LRU update helper: make way u of set s the most recent
  logic          lru_upd;
  logic [SW-1:0] lru_set;
  logic [WW-1:0] lru_way;
  always_comb begin
    lru_upd = fill_valid || touch;
    lru_set = fill_valid ? f_set : touch_set;
    lru_way = fill_valid ? f_way : touch_way;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) begin
        tv[s] <= '0;
        for (int w = 0; w < WAYS; w++) begin
          age[s][w] <= WW'(w);
          tb[s][w]  <= '0;
          tw[s][w]  <= '0;
        end
      end
    end else if (flush) begin
      for (int s = 0; s < SETS; s++) tv[s] <= '0;
    end else begin
      if (inv_valid) tv[inv_set][inv_way] <= 1'b0;
      if (fill_valid) begin
        tv[f_set][f_way] <= 1'b1;
        tb[f_set][f_way] <= fill_blk;
        tw[f_set][f_way] <= fill_wid;
      end
      if (lru_upd) begin
        for (int w = 0; w < WAYS; w++) begin
          if (WW'(w) == lru_way) age[lru_set][w] <= '0;
          else if (age[lru_set][w] < age[lru_set][lru_way]) age[lru_set][w] <= age[lru_set][w] + 1'b1;
        end
      end
    end
  end

  // data array: one memory per 32-bit word of the line
  for (genvar k = 0; k < WORDS; k++) begin : g_word
    logic [31:0] dm [SETS*WAYS];
    always_ff @(posedge clk) begin
      if (fill_valid) dm[{f_set, f_way}] <= fill_line[32*k +: 32];
      else if (ww_valid && ww_word == 5'(k)) dm[{ww_set, ww_way}] <= ww_data;
      if (rd_en) rd_line[32*k +: 32] <= dm[{rd_set, rd_way}];
    end
  end
endmodule
