// smmt: shared memory management table. Each CTA running on the SM owns one entry
// (valid, CTA id, size, start address). Allocation is contiguous: a new CTA is
// placed at the end of the space in use (the highest end address of the valid
// entries); freeing an entry gives its space back once nothing above it is in use.
// CIAO adds one more entry that reserves all remaining shared memory for its
// cache. From the number of free rows (one row = 8 bytes in each of the 32 banks)
// it sizes a direct-mapped cache of D data rows per bank group, D a power of two
// up to 128, plus max(1, D/32) tag rows, D + tag rows <= free rows, and gives the
// translation unit its 8-bit mask (D-1), data offset and tag offset in rows,
// and the number of tag rows (tag_rows).
// region_change pulses for one cycle when these change, so the cache controller
// can clear the tag rows. An allocation is taken only when alloc_ready (the cache
// controller holds no shared-memory fill) and it fits; alloc_ok reports the result.
// Own choices: the contiguous allocator, CTA_SLOTS = 8, sizes in bytes.
// The tag-row count never exceeds 4 (128 data rows / 32), so only its low 4 bits
// are output.
module smmt
  import ciao_pkg::*;
#(
  parameter int unsigned CTA_SLOTS = 8,
  parameter int unsigned ROWS      = 192
) (
  input  logic clk,
  input  logic rst_n,
  input  logic        alloc_valid,
  input  logic [$clog2(CTA_SLOTS)-1:0] alloc_slot,
  input  logic [7:0]  alloc_ctaid,
  input  logic [16:0] alloc_size,
  input  logic        alloc_ready,
  output logic        alloc_ok,
  input  logic        free_valid,
  input  logic [$clog2(CTA_SLOTS)-1:0] free_slot,
  // entry read
  input  logic [$clog2(CTA_SLOTS)-1:0] rd_slot,
  output logic        rd_v,
  output logic [7:0]  rd_ctaid,
  output logic [16:0] rd_size,
  output logic [16:0] rd_start,
  // CIAO cache entry
  output logic        cache_en,
  output logic [16:0] cache_start,
  output logic [16:0] cache_size,
  output logic [SHM_ROW_W-1:0] mask,
  output logic [SHM_ROW_W-1:0] data_off,
  output logic [SHM_ROW_W-1:0] tag_off,
  output logic [3:0]  tag_rows,
  output logic        region_change
);
  localparam int unsigned ROW_B = 8 * SHM_BANKS;   // 256 bytes per row
  localparam int unsigned TOTAL = ROWS * ROW_B;

  logic [CTA_SLOTS-1:0] v;
  logic [7:0]  cid   [CTA_SLOTS];
  logic [16:0] size  [CTA_SLOTS];
  logic [16:0] start [CTA_SLOTS];

  logic [17:0] top;
  always_comb begin
    top = '0;
    for (int s = 0; s < CTA_SLOTS; s++)
      if (v[s] && (18'(start[s]) + 18'(size[s])) > top) top = 18'(start[s]) + 18'(size[s]);
  end

  assign alloc_ok = alloc_valid && alloc_ready && !v[alloc_slot] &&
                    (top + 18'(alloc_size) <= 18'(TOTAL));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v <= '0;
      for (int s = 0; s < CTA_SLOTS; s++) begin cid[s] <= '0; size[s] <= '0; start[s] <= '0; end
    end else begin
      if (free_valid) v[free_slot] <= 1'b0;
      if (alloc_ok) begin
        v[alloc_slot]     <= 1'b1;
        cid[alloc_slot]   <= alloc_ctaid;
        size[alloc_slot]  <= alloc_size;
        start[alloc_slot] <= top[16:0];
      end
    end
  end

  assign rd_v     = v[rd_slot];
  assign rd_ctaid = cid[rd_slot];
  assign rd_size  = size[rd_slot];
  assign rd_start = start[rd_slot];

  // size the cache in the free rows
  logic [8:0] used_rows, free_rows, d_rows, t_rows;
  always_comb begin
    used_rows = 9'((top + 18'(ROW_B - 1)) / 18'(ROW_B));
    free_rows = 9'(ROWS) - used_rows;
    d_rows = '0; t_rows = '0;
    for (int p = 0; p <= 7; p++) begin
      if ((9'(1 << p) + ((p >= 5) ? 9'(1 << (p-5)) : 9'd1)) <= free_rows) begin
        d_rows = 9'(1 << p);
        t_rows = (p >= 5) ? 9'(1 << (p-5)) : 9'd1;
      end
    end
  end

  logic [SHM_ROW_W-1:0] mask_n, doff_n, toff_n;
  logic                 en_n;
  assign en_n   = (d_rows != 0);
  assign mask_n = en_n ? SHM_ROW_W'(d_rows - 1) : '0;
  assign doff_n = SHM_ROW_W'(used_rows);
  assign toff_n = SHM_ROW_W'(used_rows + d_rows);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cache_en <= 1'b0; mask <= '0; data_off <= '0; tag_off <= '0; tag_rows <= '0; region_change <= 1'b1;
    end else begin
      region_change <= (en_n != cache_en) || (mask_n != mask) || (doff_n != data_off) || (toff_n != tag_off);
      cache_en <= en_n; tag_rows <= 4'(t_rows); mask <= mask_n; data_off <= doff_n; tag_off <= toff_n;
    end
  end

  assign cache_start = 17'(used_rows) * 17'(ROW_B);
  assign cache_size  = 17'(TOTAL) - cache_start;
endmodule
