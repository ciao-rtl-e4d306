// shm_xlate: address translation unit in front of shared memory. It maps a global
// byte address onto the part of shared memory used as a direct-mapped cache.
// Global address fields, LSB first: 3-bit byte offset F, 4-bit bank B (together
// the 128-byte block offset), then the block index: its lowest bit selects the
// bank group G and the next 8 bits are the row index, which is ANDed with the
// 8-bit mask and added to the data offset register to give the data row R.
// The tag of a block sits in the other bank group (G flipped) so that tag and data
// are read in the same cycle: the 5 low bits of the masked row pick one of 32 tag
// slots in a tag row (4 bits = bank, 1 bit = 32-bit half of the 8-byte word) and
// the remaining row bits plus the tag offset register give the tag row.
// Purely combinational. Field widths and the flipped-G placement follow the
// paper's translation-unit figure.
module shm_xlate
  import ciao_pkg::*;
(
  input  logic [ADDR_W-1:0]    addr,
  input  logic [SHM_ROW_W-1:0] mask,
  input  logic [SHM_ROW_W-1:0] data_off,
  input  logic [SHM_ROW_W-1:0] tag_off,
  output shm_loc_t             loc,
  output logic [3:0]           word_bank,  // bank of the addressed 8-byte word within the group
  output logic                 word_half   // 32-bit half within that word
);
  logic [SHM_ROW_W-1:0] r_masked;
  always_comb begin
    r_masked      = addr[OFF_W+1 +: SHM_ROW_W] & mask;
    loc.data_grp  = addr[OFF_W];
    loc.data_row  = r_masked + data_off;
    loc.tag_grp   = ~addr[OFF_W];
    loc.tag_bank  = r_masked[4:1];
    loc.tag_half  = r_masked[0];
    loc.tag_row   = (r_masked >> 5) + tag_off;
    word_bank     = addr[6:3];
    word_half     = addr[2];
  end
endmodule
