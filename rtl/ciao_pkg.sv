// ciao_pkg: constants and types shared by the CIAO blocks.
// The sizes follow the evaluated GTX480-like SM: 48 warps per SM, 6-bit warp
// IDs (lists sized for 64 warps), 128-byte cache blocks addressed by 32-bit
// byte addresses, so a block address is 25 bits. Shared memory is 32 banks of
// 8-byte words split into two bank groups of 16 banks; one 128-byte block is
// one row of one bank group.
// Some constants (WORDS, bank counts, counter width) serve only a few modules and
// look unused when a single file is linted on its own.
package ciao_pkg;
  localparam int unsigned ADDR_W   = 32;               // global byte address
  localparam int unsigned OFF_W    = 7;                // 128-byte block offset
  localparam int unsigned BLK_W    = ADDR_W - OFF_W;   // 25-bit block address
  localparam int unsigned WID_W    = 6;                // warp ID width
  localparam int unsigned LINE_B   = 128;              // bytes per block
  localparam int unsigned LINE_W   = LINE_B * 8;       // 1024 bits per block
  localparam int unsigned WORDS    = LINE_B / 4;       // 32-bit words per block
  localparam int unsigned SHM_BANKS      = 32;
  localparam int unsigned SHM_GROUP_BANKS = 16;
  localparam int unsigned SHM_ROW_W      = 8;          // row index field R
  localparam int unsigned CNT_W    = 32;               // VTA-hit / instruction counters

  typedef logic [BLK_W-1:0] blk_t;
  typedef logic [WID_W-1:0] wid_t;
  typedef logic [LINE_W-1:0] line_t;

  // Location of a block and its tag inside shared memory (Fig. "inside translation unit").
  typedef struct packed {
    logic [SHM_ROW_W-1:0] data_row;   // R of the data block
    logic                 data_grp;   // G of the data block
    logic [SHM_ROW_W-1:0] tag_row;    // row holding the tag
    logic                 tag_grp;    // = ~data_grp
    logic [3:0]           tag_bank;   // bank within the tag's group
    logic                 tag_half;   // which 32-bit half of the 8-byte bank word
  } shm_loc_t;

  // One tag slot stored in shared memory: valid + owner WID + block address (32 bits).
  typedef struct packed {
    logic valid;
    wid_t wid;
    blk_t blk;
  } shm_tag_t;

  // Memory request from the LD/ST unit (already coalesced to one 32-bit word).
  typedef struct packed {
    wid_t              wid;
    logic              store;
    logic [ADDR_W-1:0] addr;
    logic [31:0]       wdata;
  } mem_req_t;

  // Where a pending miss will be filled.
  typedef enum logic {DEST_L1D = 1'b0, DEST_SHM = 1'b1} dest_e;

  typedef struct packed {
    blk_t     blk;        // global block address
    wid_t     wid;        // requesting warp
    logic [4:0] word;     // requested word in the block
    dest_e    dest;       // L1D or shared memory
    shm_loc_t shm;        // translated shared-memory address
  } mshr_ent_t;

  // One-cycle event pulses of an SM, for performance counters and tests.
  typedef struct packed {
    logic vta_hit;        // a miss found its block in the victim tag array
    logic isolate;        // a warp was redirected to shared memory
    logic stall;          // a warp was throttled
    logic reactivate;     // a stalled warp was reactivated
    logic redirect_back;  // an isolated warp was sent back to the L1D
    logic l1d_hit;
    logic shm_hit;        // hit in shared memory used as cache
    logic miss;
    logic mig_to_shm;     // block moved from L1D to shared memory
    logic mig_to_l1d;     // block moved from shared memory to L1D
    logic shm_evict;      // shared-memory cache block replaced
    logic l1d_evict;
    logic flush;          // tag rows being cleared after a region change
    logic high_epoch;
    logic low_epoch;
  } ciao_events_t;
endpackage
