// ciao_mem_ctrl: CIAO cache control logic of one SM. It owns the L1D arrays, the
// shared-memory banks, the address translation unit, the MSHR and the three queues
// to L2 (ReqQ for misses, WQ for write-through stores, RespQ for fills), and
// steers each coalesced load/store either to the L1D or, for a warp whose
// isolation flag I is set, to the unused shared memory acting as a direct-mapped
// cache whose 32-bit tags (valid, owner WID, block address) live in shared memory.
//
// A request takes two cycles: ACCEPT reads the L1D tags (flip-flops), the L1D
// line and, in parallel, the shared-memory data row and tag word; RESOLVE decides:
//  - hit on the warp's side: loads answer (rsp_* valid in RESOLVE, i.e. one
//    cycle after acceptance), stores update the line and go to WQ (write-through);
//  - store miss: WQ only (write no-allocate); a copy on the other side is updated;
//  - load miss: the miss is shown to the victim tag array (vta_lk_*). If the block
//    sits on the other side, it is migrated: that copy is invalidated and its line
//    is pushed into RespQ, and an MSHR entry is made for it, so there is only one
//    copy at a time. Otherwise an MSHR entry is made and the block is asked for on
//    ReqQ. The MSHR entry keeps the translated shared-memory address.
// Fills are taken from the head of RespQ (L2 responses and migrated lines alike)
// and matched to an MSHR entry by block address. An L1D fill takes one cycle, a
// shared-memory fill two (the old tag is read first). A valid line displaced by a
// fill is reported on vta_ins_* with its owner and the evicting warp.
// A request whose block already has an MSHR entry waits, so misses are not merged.
// CTA scratchpad accesses (sreq_*) use the banks when no fill is waiting.
// After a change of the cache region (region_change from the SMMT) the tag rows
// are cleared, one row of all 32 banks per cycle, before requests are taken again.
// hold stops new work so the SMMT can change the region safely; quiet tells the
// SMMT that no shared-memory fill is outstanding.
// From the paper: the I-flag steering, tags and data in shared memory read in
// parallel, MSHR with shared-memory address, L1D->shared memory migration through
// RespQ, the MUX of both onto WQ/RespQ. Own choices: the two-cycle request
// sequence, migration in the other direction too (the paper redirects warps back
// to the L1D but only describes moving lines into shared memory), holding
// requests to pending blocks, and queue depths.
// Unused on purpose: the queues' full flags (acceptance checks the queue counts
// with room for one more entry instead), one MSHR entry bit and the WID bits of
// the tag read for a request (only valid and block address are compared); the
// assertions' disable iff uses rst_n next to the asynchronous reset.
module ciao_mem_ctrl
  import ciao_pkg::*;
#(
  parameter int unsigned N_WARPS      = 48,
  parameter int unsigned SHM_ROWS     = 192,
  parameter int unsigned L1D_SETS     = 32,
  parameter int unsigned L1D_WAYS     = 4,
  parameter int unsigned MSHR_ENTRIES = 32,
  parameter int unsigned Q_DEPTH      = 8
) (
  input  logic clk,
  input  logic rst_n,
  // LD/ST unit
  input  logic     req_valid,
  input  mem_req_t req,
  output logic     req_ready,
  output logic     rsp_valid,
  output wid_t     rsp_wid,
  output logic [31:0] rsp_data,
  // warp isolation flags
  input  logic [N_WARPS-1:0] i_flags,
  // cache region from the SMMT
  input  logic                 cache_en,
  input  logic [SHM_ROW_W-1:0] mask,
  input  logic [SHM_ROW_W-1:0] data_off,
  input  logic [SHM_ROW_W-1:0] tag_off,
  input  logic [3:0]           tag_rows,
  input  logic                 region_change,
  input  logic                 hold,
  output logic                 quiet,
  // CTA scratchpad port: one 64-bit bank word
  input  logic        sreq_valid,
  input  logic        sreq_we,
  input  logic [4:0]  sreq_bank,
  input  logic [7:0]  sreq_row,
  input  logic [63:0] sreq_wdata,
  output logic        sreq_ready,
  output logic        srsp_valid,
  output logic [63:0] srsp_data,
  // L2 side
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
  // interference monitor
  output logic        vta_lk_valid,
  output wid_t        vta_lk_wid,
  output blk_t        vta_lk_blk,
  output logic        vta_ins_valid,
  output wid_t        vta_ins_owner,
  output blk_t        vta_ins_blk,
  output wid_t        vta_ins_evictor,
  // event pulses
  output logic        ev_l1d_hit,
  output logic        ev_shm_hit,
  output logic        ev_miss,
  output logic        ev_mig_to_shm,
  output logic        ev_mig_to_l1d,
  output logic        ev_shm_evict,
  output logic        ev_l1d_evict,
  output logic        ev_flush
);
  localparam int unsigned SW  = $clog2(L1D_SETS);
  localparam int unsigned WW  = $clog2(L1D_WAYS);
  localparam int unsigned MW  = $clog2(MSHR_ENTRIES);
  localparam int unsigned NB  = SHM_BANKS;
  localparam int unsigned GB  = SHM_GROUP_BANKS;

  typedef enum logic [2:0] {S_FLUSH, S_IDLE, S_RESOLVE, S_FILL_SHM} state_e;
  state_e state;

  // ---------------- sub-blocks ----------------
  // L1D
  blk_t          l1_lk_blk;
  logic          l1_lk_hit;
  logic [WW-1:0] l1_lk_way;
  logic [SW-1:0] l1_lk_set;
  logic          l1_rd_en, l1_touch, l1_ww, l1_inv, l1_fill;
  line_t         l1_rd_line;
  logic          l1_vic_v;
  blk_t          l1_vic_blk;
  wid_t          l1_vic_wid;
  logic [SW-1:0] r_set;
  logic [WW-1:0] r_way;
  logic          r_l1hit;
  logic [4:0]    ww_word;
  logic [31:0]   ww_data;
  blk_t          fill_blk;
  wid_t          fill_wid;
  line_t         fill_line;

  l1d_cache #(.SETS(L1D_SETS), .WAYS(L1D_WAYS)) u_l1d (
    .clk, .rst_n, .flush(1'b0),
    .lk_blk(l1_lk_blk), .lk_hit(l1_lk_hit), .lk_way(l1_lk_way), .lk_set(l1_lk_set),
    .rd_en(l1_rd_en), .rd_set(l1_lk_set), .rd_way(l1_lk_way), .rd_line(l1_rd_line),
    .touch(l1_touch), .touch_set(r_set), .touch_way(r_way),
    .ww_valid(l1_ww), .ww_set(r_set), .ww_way(r_way), .ww_word(ww_word), .ww_data(ww_data),
    .inv_valid(l1_inv), .inv_set(r_set), .inv_way(r_way),
    .fill_valid(l1_fill), .fill_blk(fill_blk), .fill_wid(fill_wid), .fill_line(fill_line),
    .victim_valid(l1_vic_v), .victim_blk(l1_vic_blk), .victim_wid(l1_vic_wid));

  // shared memory
  logic [NB-1:0] b_en, b_we;
  logic [1:0]    b_wmask [NB];
  logic [7:0]    b_row   [NB];
  logic [63:0]   b_wdata [NB];
  logic [63:0]   b_rdata [NB];
  shm_banks #(.NBANKS(NB), .ROWS(SHM_ROWS)) u_shm (
    .clk, .en(b_en), .we(b_we), .wmask(b_wmask), .row(b_row), .wdata(b_wdata), .rdata(b_rdata));

  // translation
  shm_loc_t   x_loc;
  logic [3:0] x_wbank;
  logic       x_whalf;
  shm_xlate u_xl (.addr(req.addr), .mask, .data_off, .tag_off,
                  .loc(x_loc), .word_bank(x_wbank), .word_half(x_whalf));

  // MSHR
  logic      m_alloc, m_full, m_pend, m_bhit, m_free, m_shm_pend;
  mshr_ent_t m_alloc_ent, m_bent;
  logic [MW-1:0] m_bidx;
  blk_t      rq_head_blk;
  mshr #(.ENTRIES(MSHR_ENTRIES)) u_mshr (
    .clk, .rst_n, .alloc_valid(m_alloc), .alloc_ent(m_alloc_ent), .full(m_full),
    .ma_blk(req.addr[ADDR_W-1:OFF_W]), .ma_hit(m_pend),
    .mb_blk(rq_head_blk), .mb_hit(m_bhit), .mb_idx(m_bidx), .mb_ent(m_bent),
    .free_valid(m_free), .free_idx(m_bidx), .shm_pending(m_shm_pend));

  // queues
  logic reqq_push, reqq_empty, reqq_full;
  blk_t reqq_din;
  logic [$clog2(Q_DEPTH+1)-1:0] reqq_cnt, wq_cnt, rq_cnt;
  sync_fifo #(.W(BLK_W), .DEPTH(Q_DEPTH)) u_reqq (
    .clk, .rst_n, .push(reqq_push), .din(reqq_din), .pop(l2_req_valid && l2_req_ready),
    .dout(l2_req_blk), .empty(reqq_empty), .full(reqq_full), .count(reqq_cnt));
  assign l2_req_valid = !reqq_empty;

  logic wq_push, wq_empty, wq_full;
  logic [ADDR_W+31:0] wq_din, wq_dout;
  sync_fifo #(.W(ADDR_W+32), .DEPTH(Q_DEPTH)) u_wq (
    .clk, .rst_n, .push(wq_push), .din(wq_din), .pop(l2_wr_valid && l2_wr_ready),
    .dout(wq_dout), .empty(wq_empty), .full(wq_full), .count(wq_cnt));
  assign l2_wr_valid = !wq_empty;
  assign {l2_wr_addr, l2_wr_data} = wq_dout;

  // RespQ: L2 responses, or a line migrated out of L1D or shared memory
  logic rq_push, rq_pop, rq_empty, rq_full, mig_push;
  logic [BLK_W+LINE_W-1:0] rq_din, rq_dout, mig_din;
  line_t rq_head_line;
  assign rq_push = mig_push || (l2_rsp_valid && l2_rsp_ready);
  assign rq_din  = mig_push ? mig_din : {l2_rsp_blk, l2_rsp_line};
  assign l2_rsp_ready = !rq_full && !mig_push;
  sync_fifo #(.W(BLK_W+LINE_W), .DEPTH(Q_DEPTH)) u_rq (
    .clk, .rst_n, .push(rq_push), .din(rq_din), .pop(rq_pop),
    .dout(rq_dout), .empty(rq_empty), .full(rq_full), .count(rq_cnt));
  assign {rq_head_blk, rq_head_line} = rq_dout;

  // ---------------- request registers ----------------
  mem_req_t  r;
  shm_loc_t  r_loc;
  logic      r_shm_path;
  logic [3:0] r_wbank;
  logic      r_whalf;
  logic [3:0] fl_row;
  logic      pend_flush;
  mshr_ent_t f_ent;
  logic      srd_q;

  logic accept, do_fill, do_user;
  logic space_ok;
  assign space_ok = !m_full && (int'(reqq_cnt) < Q_DEPTH) && (int'(wq_cnt) < Q_DEPTH) &&
                    (int'(rq_cnt) < Q_DEPTH - 1);
  assign do_fill  = (state == S_IDLE) && !pend_flush && !rq_empty;
  assign do_user  = (state == S_IDLE) && !pend_flush && !hold && rq_empty && sreq_valid;
  assign accept   = (state == S_IDLE) && !pend_flush && !hold && rq_empty && !sreq_valid &&
                    req_valid && space_ok && !m_pend;
  assign req_ready  = accept;
  assign sreq_ready = do_user;
  assign quiet      = (state == S_IDLE) && !m_shm_pend && rq_empty;

  // tag and data seen in RESOLVE
  logic [63:0] tag_word;
  shm_tag_t    cur_tag;
  logic        shm_hit;
  line_t       shm_line;
  logic [4:0]  r_word;
  always_comb begin
    tag_word = b_rdata[{r_loc.tag_grp, r_loc.tag_bank}];
    cur_tag  = r_loc.tag_half ? tag_word[63:32] : tag_word[31:0];
    shm_hit  = cache_en && cur_tag.valid && cur_tag.blk == r.addr[ADDR_W-1:OFF_W];
    for (int b = 0; b < GB; b++) shm_line[64*b +: 64] = b_rdata[{r_loc.data_grp, 4'(b)}];
    r_word = r.addr[6:2];
  end

  shm_tag_t new_tag;
  assign new_tag = '{valid: 1'b1, wid: f_ent.wid, blk: f_ent.blk};

  // old tag seen in FILL_SHM
  logic [63:0] ftag_word;
  shm_tag_t    old_tag;
  always_comb begin
    ftag_word = b_rdata[{f_ent.shm.tag_grp, f_ent.shm.tag_bank}];
    old_tag   = f_ent.shm.tag_half ? ftag_word[63:32] : ftag_word[31:0];
  end

  // ---------------- datapath control ----------------
  always_comb begin
    // defaults
    l1_lk_blk = req.addr[ADDR_W-1:OFF_W];
    l1_rd_en = 1'b0; l1_touch = 1'b0; l1_ww = 1'b0; l1_inv = 1'b0; l1_fill = 1'b0;
    ww_word = r_word; ww_data = r.wdata;
    fill_blk = rq_head_blk; fill_wid = m_bent.wid; fill_line = rq_head_line;
    b_en = '0; b_we = '0;
    for (int b = 0; b < NB; b++) begin b_wmask[b] = 2'b00; b_row[b] = '0; b_wdata[b] = '0; end
    m_alloc = 1'b0; m_free = 1'b0;
    m_alloc_ent = '{blk: r.addr[ADDR_W-1:OFF_W], wid: r.wid, word: r_word,
                    dest: r_shm_path ? DEST_SHM : DEST_L1D, shm: r_loc};
    reqq_push = 1'b0; reqq_din = r.addr[ADDR_W-1:OFF_W];
    wq_push = 1'b0; wq_din = {r.addr, r.wdata};
    mig_push = 1'b0; mig_din = {r.addr[ADDR_W-1:OFF_W], shm_line};
    rq_pop = 1'b0;
    rsp_valid = 1'b0; rsp_wid = r.wid; rsp_data = '0;
    vta_lk_valid = 1'b0; vta_lk_wid = r.wid; vta_lk_blk = r.addr[ADDR_W-1:OFF_W];
    vta_ins_valid = 1'b0; vta_ins_owner = l1_vic_wid; vta_ins_blk = l1_vic_blk; vta_ins_evictor = m_bent.wid;
    ev_l1d_hit = 1'b0; ev_shm_hit = 1'b0; ev_miss = 1'b0; ev_mig_to_shm = 1'b0; ev_mig_to_l1d = 1'b0;
    ev_shm_evict = 1'b0; ev_l1d_evict = 1'b0; ev_flush = 1'b0;

    unique case (state)
      S_FLUSH: begin
        // clear one tag row in all banks (tags of both groups)
        for (int b = 0; b < NB; b++) begin
          b_en[b] = 1'b1; b_we[b] = 1'b1; b_wmask[b] = 2'b11;
          b_row[b] = tag_off + 8'(fl_row); b_wdata[b] = '0;
        end
        ev_flush = 1'b1;
      end
      S_IDLE: begin
        if (do_fill) begin
          if (m_bhit && m_bent.dest == DEST_L1D) begin
            l1_fill = 1'b1;
            vta_ins_valid = l1_vic_v;
            ev_l1d_evict  = l1_vic_v;
            rsp_valid = 1'b1; rsp_wid = m_bent.wid; rsp_data = rq_head_line[32*m_bent.word +: 32];
            m_free = 1'b1; rq_pop = 1'b1;
          end else if (m_bhit) begin
            // read the old tag first
            b_en[{m_bent.shm.tag_grp, m_bent.shm.tag_bank}] = 1'b1;
            b_row[{m_bent.shm.tag_grp, m_bent.shm.tag_bank}] = m_bent.shm.tag_row;
          end else begin
            rq_pop = 1'b1;   // no owner: drop
          end
        end else if (do_user) begin
          b_en[sreq_bank] = 1'b1; b_we[sreq_bank] = sreq_we; b_wmask[sreq_bank] = 2'b11;
          b_row[sreq_bank] = sreq_row; b_wdata[sreq_bank] = sreq_wdata;
        end else if (accept) begin
          l1_rd_en = 1'b1;
          if (cache_en) begin
            for (int b = 0; b < GB; b++) begin
              b_en[{x_loc.data_grp, 4'(b)}] = 1'b1;
              b_row[{x_loc.data_grp, 4'(b)}] = x_loc.data_row;
            end
            b_en[{x_loc.tag_grp, x_loc.tag_bank}] = 1'b1;
            b_row[{x_loc.tag_grp, x_loc.tag_bank}] = x_loc.tag_row;
          end
        end
      end
      S_RESOLVE: begin
        if (!r_shm_path) begin
          if (r_l1hit) begin
            ev_l1d_hit = 1'b1;
            l1_touch = 1'b1;
            if (r.store) begin l1_ww = 1'b1; wq_push = 1'b1; end
            else begin rsp_valid = 1'b1; rsp_data = l1_rd_line[32*r_word +: 32]; end
          end else if (r.store) begin
            wq_push = 1'b1;
            if (shm_hit) begin
              b_en[{r_loc.data_grp, r_wbank}] = 1'b1; b_we[{r_loc.data_grp, r_wbank}] = 1'b1;
              b_row[{r_loc.data_grp, r_wbank}] = r_loc.data_row;
              b_wmask[{r_loc.data_grp, r_wbank}] = r_whalf ? 2'b10 : 2'b01;
              b_wdata[{r_loc.data_grp, r_wbank}] = {r.wdata, r.wdata};
            end
          end else begin
            ev_miss = 1'b1;
            vta_lk_valid = 1'b1;
            m_alloc = 1'b1;
            if (shm_hit) begin
              // migrate shared memory -> L1D: invalidate the tag, line to RespQ
              mig_push = 1'b1; mig_din = {r.addr[ADDR_W-1:OFF_W], shm_line};
              b_en[{r_loc.tag_grp, r_loc.tag_bank}] = 1'b1; b_we[{r_loc.tag_grp, r_loc.tag_bank}] = 1'b1;
              b_row[{r_loc.tag_grp, r_loc.tag_bank}] = r_loc.tag_row;
              b_wmask[{r_loc.tag_grp, r_loc.tag_bank}] = r_loc.tag_half ? 2'b10 : 2'b01;
              ev_mig_to_l1d = 1'b1;
            end else begin
              reqq_push = 1'b1;
            end
          end
        end else begin
          if (shm_hit) begin
            ev_shm_hit = 1'b1;
            if (r.store) begin
              wq_push = 1'b1;
              b_en[{r_loc.data_grp, r_wbank}] = 1'b1; b_we[{r_loc.data_grp, r_wbank}] = 1'b1;
              b_row[{r_loc.data_grp, r_wbank}] = r_loc.data_row;
              b_wmask[{r_loc.data_grp, r_wbank}] = r_whalf ? 2'b10 : 2'b01;
              b_wdata[{r_loc.data_grp, r_wbank}] = {r.wdata, r.wdata};
            end else begin
              rsp_valid = 1'b1; rsp_data = shm_line[32*r_word +: 32];
            end
          end else if (r.store) begin
            wq_push = 1'b1;
            if (r_l1hit) l1_ww = 1'b1;
          end else begin
            ev_miss = 1'b1;
            vta_lk_valid = 1'b1;
            m_alloc = 1'b1;
            if (r_l1hit) begin
              // migrate L1D -> shared memory: invalidate the L1D line, line to RespQ
              mig_push = 1'b1; mig_din = {r.addr[ADDR_W-1:OFF_W], l1_rd_line};
              l1_inv = 1'b1;
              ev_mig_to_shm = 1'b1;
            end else begin
              reqq_push = 1'b1;
            end
          end
        end
      end
      S_FILL_SHM: begin
        vta_ins_valid = old_tag.valid;
        ev_shm_evict  = old_tag.valid;
        vta_ins_owner = old_tag.wid; vta_ins_blk = old_tag.blk; vta_ins_evictor = f_ent.wid;
        for (int b = 0; b < GB; b++) begin
          b_en[{f_ent.shm.data_grp, 4'(b)}] = 1'b1; b_we[{f_ent.shm.data_grp, 4'(b)}] = 1'b1;
          b_wmask[{f_ent.shm.data_grp, 4'(b)}] = 2'b11;
          b_row[{f_ent.shm.data_grp, 4'(b)}] = f_ent.shm.data_row;
          b_wdata[{f_ent.shm.data_grp, 4'(b)}] = rq_head_line[64*b +: 64];
        end
        b_en[{f_ent.shm.tag_grp, f_ent.shm.tag_bank}] = 1'b1;
        b_we[{f_ent.shm.tag_grp, f_ent.shm.tag_bank}] = 1'b1;
        b_row[{f_ent.shm.tag_grp, f_ent.shm.tag_bank}] = f_ent.shm.tag_row;
        b_wmask[{f_ent.shm.tag_grp, f_ent.shm.tag_bank}] = f_ent.shm.tag_half ? 2'b10 : 2'b01;
        b_wdata[{f_ent.shm.tag_grp, f_ent.shm.tag_bank}] = {2{new_tag}};
        rsp_valid = 1'b1; rsp_wid = f_ent.wid; rsp_data = rq_head_line[32*f_ent.word +: 32];
        m_free = 1'b1; rq_pop = 1'b1;
      end
      default: ;
    endcase
  end

  // m_free uses m_bidx, which follows the RespQ head: the head does not change
  // between the two fill cycles, so the index is still the right one.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_FLUSH; fl_row <= '0; pend_flush <= 1'b0;
      r <= '0; r_loc <= '0; r_shm_path <= 1'b0; r_set <= '0; r_way <= '0; r_l1hit <= 1'b0;
      r_wbank <= '0; r_whalf <= 1'b0; f_ent <= '0; srd_q <= 1'b0;
    end else begin
      srd_q <= do_user && !sreq_we;
      if (region_change) pend_flush <= 1'b1;
      unique case (state)
        S_FLUSH: begin
          if (fl_row == tag_rows - 4'd1 || tag_rows == 4'd0) begin
            fl_row <= '0; state <= S_IDLE;
          end else fl_row <= fl_row + 4'd1;
        end
        S_IDLE: begin
          if (pend_flush && !region_change) begin
            pend_flush <= 1'b0; fl_row <= '0; state <= S_FLUSH;
          end else if (do_fill) begin
            if (m_bhit && m_bent.dest == DEST_SHM) begin
              f_ent <= m_bent; state <= S_FILL_SHM;
            end
          end else if (accept) begin
            r <= req; r_loc <= x_loc; r_wbank <= x_wbank; r_whalf <= x_whalf;
            r_shm_path <= cache_en && (int'(req.wid) < N_WARPS) && i_flags[req.wid];
            r_set <= l1_lk_set; r_way <= l1_lk_way; r_l1hit <= l1_lk_hit;
            state <= S_RESOLVE;
          end
        end
        S_RESOLVE:  state <= S_IDLE;
        S_FILL_SHM: state <= S_IDLE;
        default:    state <= S_IDLE;
      endcase
    end
  end

  logic [4:0] sreq_bank_q;
  assign srsp_valid = srd_q;
  assign srsp_data  = b_rdata[sreq_bank_q];
  always_ff @(posedge clk) if (do_user) sreq_bank_q <= sreq_bank;

  // protocol checks
  a_fill_owner: assert property (@(posedge clk) disable iff (!rst_n) do_fill |-> m_bhit)
    else $error("RespQ head has no MSHR entry");
  a_one_copy: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_RESOLVE) |-> !(r_l1hit && shm_hit))
    else $error("block held by both L1D and shared memory");
endmodule
