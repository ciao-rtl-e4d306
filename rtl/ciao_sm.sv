// ciao_sm: the CIAO additions to one GPU streaming multiprocessor, wired as the
// paper's microarchitecture figure shows:
//  - the interference monitor: victim tag array (vta), per-warp VTA-hit counters
//    and instruction counter (global_counter), epoch sampler, interference list,
//    pair list and the scheduling controller with its cutoff test;
//  - the throttling unit: the warp list with V/I flags and the GTO issue choice;
//  - the partition unit: the cache control logic (ciao_mem_ctrl) with the L1D,
//    shared memory used as a cache through the translation unit, the MSHR with
//    shared-memory addresses and the queues to L2; and the SMMT, which hands the
//    unused shared memory to the cache.
// Misses seen by the cache control logic are looked up in the VTA; a VTA hit
// increments the missing warp's counter and updates its interference-list entry
// with the evicting warp. Evictions from the L1D and from the shared-memory cache
// are written into the VTA (one VTA serves both, as in the paper). Issued
// instructions drive the instruction counter and the epoch sampler, and at each
// epoch end the controller rewrites the V/I flags, which steer the issue logic
// and the cache control logic.
// Ports outside: the front end (live/ready warps in, one issued warp out), the
// coalesced LD/ST request and load response, CTA shared-memory allocation and
// scratchpad accesses, the L2 request/write/response queues, and event pulses.
// Timing: see the sub-blocks; the load-hit latency is one cycle after acceptance.
// Left unconnected on purpose: the interference-list counter, the second hit
// counter read port, the SMMT's per-slot read port and the cache start byte
// (kept on the sub-blocks for debug); rst_n also feeds an assertion's disable iff.
module ciao_sm
  import ciao_pkg::*;
#(
  parameter int unsigned N_WARPS      = 48,
  parameter int unsigned LIST_ENTRIES = 64,
  parameter int unsigned VTA_WAYS     = 8,
  parameter int unsigned HIGH_EPOCH   = 5000,
  parameter int unsigned LOW_EPOCH    = 100,
  parameter int unsigned HIGH_RECIP   = 100,
  parameter int unsigned LOW_RECIP    = 200,
  parameter int unsigned SHM_ROWS     = 192,
  parameter int unsigned L1D_SETS     = 32,
  parameter int unsigned L1D_WAYS     = 4,
  parameter int unsigned MSHR_ENTRIES = 32,
  parameter int unsigned Q_DEPTH      = 8,
  parameter int unsigned CTA_SLOTS    = 8
) (
  input  logic clk,
  input  logic rst_n,
  input  logic kernel_start,
  // front end
  input  logic [N_WARPS-1:0] live,
  input  logic [N_WARPS-1:0] ready,
  output logic               issue_valid,
  output wid_t               issue_wid,
  output logic [N_WARPS-1:0] v_flags,
  output logic [N_WARPS-1:0] i_flags,
  // LD/ST
  input  logic        req_valid,
  input  mem_req_t    req,
  output logic        req_ready,
  output logic        rsp_valid,
  output wid_t        rsp_wid,
  output logic [31:0] rsp_data,
  // CTA shared-memory management
  input  logic        cta_alloc_valid,
  input  logic [$clog2(CTA_SLOTS)-1:0] cta_alloc_slot,
  input  logic [7:0]  cta_alloc_id,
  input  logic [16:0] cta_alloc_size,
  output logic        cta_alloc_ok,
  input  logic        cta_free_valid,
  input  logic [$clog2(CTA_SLOTS)-1:0] cta_free_slot,
  output logic        cta_alloc_ready,
  output logic [16:0] cta_alloc_start,
  // CTA scratchpad
  input  logic        sreq_valid,
  input  logic        sreq_we,
  input  logic [4:0]  sreq_bank,
  input  logic [7:0]  sreq_row,
  input  logic [63:0] sreq_wdata,
  output logic        sreq_ready,
  output logic        srsp_valid,
  output logic [63:0] srsp_data,
  // L2
  output logic        l2_req_valid,
  output blk_t        l2_req_blk,
  input  logic        l2_req_ready,
  output logic        l2_wr_valid,
  output logic [ADDR_W-1:0] l2_wr_addr,
  output logic [31:0] l2_wr_data,
  input  logic        l2_wr_ready,
  input  logic        l2_rsp_valid,
  input  blk_t        l2_rsp_blk,
  input  line_t       l2_rsp_line,
  output logic        l2_rsp_ready,
  // status
  output logic        cache_en,
  output logic [16:0] cache_size,
  output ciao_events_t ev
);
  // ---------------- throttling unit ----------------
  logic fw_valid, fw_is_v, fw_val;
  wid_t fw_idx;
  logic [6:0] active_warps;
  warp_list #(.N_WARPS(N_WARPS)) u_wl (
    .clk, .rst_n, .kernel_start, .live, .ready,
    .fw_valid, .fw_idx, .fw_is_v, .fw_val,
    .v_flags, .i_flags, .active_warps, .issue_valid, .issue_wid);

  // ---------------- interference monitor ----------------
  logic vta_lk_valid, vta_lk_hit, vta_ins_valid;
  wid_t vta_lk_wid, vta_interferer, vta_ins_owner, vta_ins_evictor;
  blk_t vta_lk_blk, vta_ins_blk;
  logic vta_hit;
  vta #(.SETS(N_WARPS), .WAYS(VTA_WAYS)) u_vta (
    .clk, .rst_n, .ins_valid(vta_ins_valid), .ins_owner(vta_ins_owner), .ins_blk(vta_ins_blk),
    .ins_evictor(vta_ins_evictor), .lk_wid(vta_lk_wid), .lk_blk(vta_lk_blk),
    .lk_hit(vta_lk_hit), .lk_interferer(vta_interferer));
  assign vta_hit = vta_lk_valid && vta_lk_hit;

  wid_t cnt_rd, il_rd, il_wid, pl_rd, pl_f0, pl_f1;
  logic [CNT_W-1:0] cnt_hits, inst_total, unused_hits_b;
  global_counter #(.N_WARPS(N_WARPS)) u_cnt (
    .clk, .rst_n, .kernel_start, .vta_hit, .vta_hit_wid(vta_lk_wid), .inst_issued(issue_valid),
    .rd_a(cnt_rd), .rd_b(vta_lk_wid), .hits_a(cnt_hits), .hits_b(unused_hits_b), .inst_total);

  logic [1:0] il_cnt;
  interference_list #(.ENTRIES(LIST_ENTRIES)) u_il (
    .clk, .rst_n, .upd_valid(vta_hit), .upd_victim(vta_lk_wid), .upd_interferer(vta_interferer),
    .rd_idx(il_rd), .rd_wid(il_wid), .rd_cnt(il_cnt));

  logic pl_wr0_valid, pl_wr1_valid;
  wid_t pl_wr0_idx, pl_wr0_wid, pl_wr1_idx, pl_wr1_wid;
  pair_list #(.ENTRIES(LIST_ENTRIES)) u_pl (
    .clk, .rst_n, .wr0_valid(pl_wr0_valid), .wr0_idx(pl_wr0_idx), .wr0_wid(pl_wr0_wid),
    .wr1_valid(pl_wr1_valid), .wr1_idx(pl_wr1_idx), .wr1_wid(pl_wr1_wid),
    .rd_idx(pl_rd), .rd_f0(pl_f0), .rd_f1(pl_f1));

  logic high_end, low_end, ctl_busy;
  epoch_sampler #(.HIGH_EPOCH(HIGH_EPOCH), .LOW_EPOCH(LOW_EPOCH)) u_samp (
    .clk, .rst_n, .kernel_start, .inst_issued(issue_valid), .high_end, .low_end);

  // If every live warp is stalled no instruction issues and no epoch would end:
  // a low-cutoff check is then forced (own choice, avoids a deadlock).
  logic all_stalled, low_chk;
  assign all_stalled = (live != '0) && ((live & v_flags) == '0);
  assign low_chk     = low_end || (all_stalled && !ctl_busy);

  ciao_controller #(.N_WARPS(N_WARPS), .HIGH_RECIP(HIGH_RECIP), .LOW_RECIP(LOW_RECIP)) u_ctl (
    .clk, .rst_n, .kernel_start, .low_end(low_chk), .high_end, .live, .v_flags, .i_flags, .active_warps,
    .cnt_rd, .cnt_hits, .inst_total, .il_rd, .il_wid, .pl_rd, .pl_f0, .pl_f1,
    .pl_wr0_valid, .pl_wr0_idx, .pl_wr0_wid, .pl_wr1_valid, .pl_wr1_idx, .pl_wr1_wid,
    .fw_valid, .fw_idx, .fw_is_v, .fw_val,
    .ev_isolate(ev.isolate), .ev_stall(ev.stall), .ev_reactivate(ev.reactivate),
    .ev_redirect_back(ev.redirect_back), .busy(ctl_busy));

  // ---------------- SMMT ----------------
  logic [SHM_ROW_W-1:0] mask, data_off, tag_off;
  logic [3:0] tag_rows;
  logic region_change, quiet;
  logic [16:0] cache_start;
  logic rd_v;
  logic [7:0] rd_ctaid;
  logic [16:0] rd_size;
  smmt #(.CTA_SLOTS(CTA_SLOTS), .ROWS(SHM_ROWS)) u_smmt (
    .clk, .rst_n, .alloc_valid(cta_alloc_valid), .alloc_slot(cta_alloc_slot),
    .alloc_ctaid(cta_alloc_id), .alloc_size(cta_alloc_size), .alloc_ready(quiet),
    .alloc_ok(cta_alloc_ok), .free_valid(cta_free_valid), .free_slot(cta_free_slot),
    .rd_slot(cta_alloc_slot), .rd_v, .rd_ctaid, .rd_size, .rd_start(cta_alloc_start),
    .cache_en, .cache_start, .cache_size, .mask, .data_off, .tag_off, .tag_rows, .region_change);
  assign cta_alloc_ready = quiet;

  // ---------------- partition unit ----------------
  ciao_mem_ctrl #(.N_WARPS(N_WARPS), .SHM_ROWS(SHM_ROWS), .L1D_SETS(L1D_SETS),
                  .L1D_WAYS(L1D_WAYS), .MSHR_ENTRIES(MSHR_ENTRIES), .Q_DEPTH(Q_DEPTH)) u_mem (
    .clk, .rst_n, .req_valid, .req, .req_ready, .rsp_valid, .rsp_wid, .rsp_data,
    .i_flags, .cache_en, .mask, .data_off, .tag_off, .tag_rows, .region_change,
    .hold(cta_alloc_valid || cta_free_valid), .quiet,
    .sreq_valid, .sreq_we, .sreq_bank, .sreq_row, .sreq_wdata, .sreq_ready, .srsp_valid, .srsp_data,
    .l2_req_valid, .l2_req_blk, .l2_req_ready, .l2_wr_valid, .l2_wr_addr, .l2_wr_data, .l2_wr_ready,
    .l2_rsp_valid, .l2_rsp_blk, .l2_rsp_line, .l2_rsp_ready,
    .vta_lk_valid, .vta_lk_wid, .vta_lk_blk,
    .vta_ins_valid, .vta_ins_owner, .vta_ins_blk, .vta_ins_evictor,
    .ev_l1d_hit(ev.l1d_hit), .ev_shm_hit(ev.shm_hit), .ev_miss(ev.miss),
    .ev_mig_to_shm(ev.mig_to_shm), .ev_mig_to_l1d(ev.mig_to_l1d),
    .ev_shm_evict(ev.shm_evict), .ev_l1d_evict(ev.l1d_evict), .ev_flush(ev.flush));

  assign ev.vta_hit    = vta_hit;
  assign ev.high_epoch = high_end;
  assign ev.low_epoch  = low_end;
endmodule
