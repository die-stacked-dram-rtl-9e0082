// banshee_cache_ctrl: controller of the cache portion of the die-stacked DRAM.
//
// Requests whose physical page lives in off-chip memory arrive here. The cache
// portion is page-based (4 KB) and WAYS-way set-associative; its frames are the
// top frames of the die-stacked DRAM, starting at frame `base` (see below),
// and way w of set s sits in frame base + s*WAYS + w. Each set's metadata
// holds, for every way, a valid bit, a dirty bit, a tag and an access counter,
// plus NCAND candidate slots (tag and counter) for pages not yet cached.
//
// The cache portion follows the memory/cache boundary at run time. The
// metadata array is elaborated for the largest cache (CACHE_FRAMES, by default
// the whole die-stacked DRAM); the active cache uses the frames above the
// boundary, rounded down to a power-of-two number of sets, placed at the top
// of the stacked DRAM, frame STACKED_FRAMES-1 down (frames below it and above
// the boundary stay unused).
// Tags hold the full page number, so the set count can change without
// changing the tag format. When the boundary input changes, the controller
// finishes its request and sweeps all active sets: every dirty page is
// written back off-chip (K_REPL read and write) and all metadata is cleared;
// then the new geometry takes effect. The page table must also forget the
// cached pages and the TLBs be shot down; that is software's part and no Tag
// Buffer records are written for it. While the sweep runs, init_done is low
// and req_ready stays low. With fewer than WAYS frames above the boundary the
// cache is off and every request goes off-chip unsampled.
//
// Per request:
//  1. The set's metadata is read (one cycle) and the demand access is sent at
//     once: to the die-stacked frame on a hit, to off-chip DRAM on a miss. The
//     residency check costs no DRAM traffic, as the page-table/TLB mapping
//     provides it in the scheme this follows; here the controller's metadata
//     copy stands for that mapping. A write hit sets the way's dirty bit.
//  2. Only a sampled fraction (SAMPLE_PCT, from a 16-bit LFSR) of the accesses
//     updates replacement state, costing one metadata read and one metadata
//     write to the die-stacked DRAM. A sampled hit bumps its way's counter; a
//     sampled miss bumps the page's candidate counter, or claims the candidate
//     slot with the lowest count.
//  3. Replacement is lazy: a missing page replaces a way only if that way is
//     empty or its candidate count is strictly larger than the smallest way
//     counter of the set. The victim then becomes a candidate with its count.
//     When any counter of a set saturates, all counters of that set are halved.
//  4. A replacement records both remaps in the Tag Buffer (victim uncached,
//     new page cached in its way), stalling while the Tag Buffer refuses
//     them, then writes a dirty victim page back off-chip and copies the new
//     page in (whole 4 KB pages, kind K_REPL).
//
// From the paper: page-based 4-way set-associative organisation, metadata
// stored in the die-stacked DRAM and reached only on sampled accesses, 10%
// sampling, bandwidth-aware lazy frequency-based replacement, Tag Buffer
// updates. This design's own choices: candidate count, counter width, the
// strict "greater than" rule, counter halving, the place of the metadata
// (addressed to each set's first frame so it loads that channel), the LFSR,
// serving one request at a time, the power-of-two rounding of a resized cache
// and its write-back sweep. After reset the metadata is cleared by a sweep
// over all CACHE_FRAMES/WAYS sets (init_done rises when finished, req_ready
// stays low).
//
// Timing: a request is accepted in S_IDLE, its demand command is offered on
// the next cycle; an unsampled request takes 3 cycles plus handshake waits, a
// sampled one 5, a replacement 4 to 6 more. A resize sweep takes 2 cycles
// per active set plus 2 per dirty page and handshake waits.
module banshee_cache_ctrl
  import memcache_pkg::*;
#(
  parameter int unsigned STACKED_FRAMES = STACK_FRAMES, // die-stacked capacity (4 GB)
  parameter int unsigned CACHE_FRAMES = 1048576,  // largest cache portion (4 GB)
  parameter int unsigned WAYS         = 4,
  parameter int unsigned NCAND        = 4,
  parameter int unsigned CNT_W        = 5,
  parameter int unsigned SAMPLE_PCT   = 10
) (
  input  logic       clk,
  input  logic       rst_n,
  output logic       init_done,
  // memory/cache boundary: frames [0, mem_frames) are the memory portion
  input  logic [STACK_FRAME_W:0] mem_frames,
  // requests for off-chip pages
  input  logic       req_valid,
  output logic       req_ready,
  input  llsc_req_t  req,
  // die-stacked DRAM commands
  output logic       stk_valid,
  input  logic       stk_ready,
  output stk_cmd_t   stk_cmd,
  // off-chip DRAM commands
  output logic       off_valid,
  input  logic       off_ready,
  output off_cmd_t   off_cmd,
  // Tag Buffer inserts
  output logic       tb_valid,
  input  logic       tb_ready,
  output remap_t     tb_rec,
  // event strobes
  output cache_evt_t evt
);

  localparam int unsigned SETS   = CACHE_FRAMES / WAYS;
  localparam int unsigned SET_W  = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int unsigned TAG_W  = PN_W;           // full page number
  localparam int unsigned WIDX_W = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned CIDX_W = (NCAND > 1) ? $clog2(NCAND) : 1;
  localparam logic [CNT_W-1:0] CNT_MAX = '1;
  localparam logic [16:0] SAMPLE_TH = 17'((65536 * SAMPLE_PCT) / 100);

  typedef struct packed {
    logic [WAYS-1:0]             valid;
    logic [WAYS-1:0]             dirty;
    logic [WAYS-1:0][TAG_W-1:0]  tag;
    logic [WAYS-1:0][CNT_W-1:0]  cnt;
    logic [NCAND-1:0]            cvalid;
    logic [NCAND-1:0][TAG_W-1:0] ctag;
    logic [NCAND-1:0][CNT_W-1:0] ccnt;
  } set_meta_t;

  typedef enum logic [3:0] {
    S_INIT, S_IDLE, S_LOOK, S_MRD, S_MWR, S_TB_EV, S_TB_IN,
    S_EV_RD, S_EV_WR, S_FL_RD, S_FL_WR, S_UPD,
    S_RS_RD, S_RS_WAY, S_RS_CLR
  } state_e;

  set_meta_t meta [SETS];

  state_e            state;
  logic [SET_W-1:0]  init_idx;
  llsc_req_t         req_q;
  set_meta_t         meta_q;
  logic              smp_q;
  logic [15:0]       lfsr;
  logic              ev_valid_q, ev_dirty_q, do_repl_q;
  logic [TAG_W-1:0]  ev_tag_q;
  logic [WIDX_W-1:0] rway_q;
  logic              rs_mode;                  // write-back belongs to a resize sweep

  // ---- active geometry ---------------------------------------------------------
  logic [STACK_FRAME_W:0] act_b_q;           // boundary the geometry was set up for
  logic [SET_W-1:0]       act_mask_q;        // active sets - 1
  logic [STACK_FRAME_W:0] act_base_q;        // first active cache frame
  logic                   act_on_q;          // at least one set
  logic [SET_W-1:0]       new_mask;
  logic [STACK_FRAME_W:0] new_base;
  logic                   new_on;
  logic [SET_W-1:0]       set_r;             // set being served or swept

  // largest power-of-two set count that fits above the boundary, at most SETS
  always_comb begin
    logic [STACK_FRAME_W:0] avail_sets;
    logic [STACK_FRAME_W:0] pow;
    avail_sets = ((STACK_FRAME_W+1)'(STACKED_FRAMES) - mem_frames) / (STACK_FRAME_W+1)'(WAYS);
    if (mem_frames > (STACK_FRAME_W+1)'(STACKED_FRAMES)) avail_sets = '0;
    pow = '0;
    for (int i = 0; i <= STACK_FRAME_W; i++)
      if (avail_sets[i]) pow = (STACK_FRAME_W+1)'(1) << i;
    if (pow > (STACK_FRAME_W+1)'(SETS)) pow = (STACK_FRAME_W+1)'(SETS);
    new_on   = (pow != '0);
    new_mask = new_on ? SET_W'(pow - 1'b1) : '0;
    new_base = (STACK_FRAME_W+1)'(STACKED_FRAMES) - pow * (STACK_FRAME_W+1)'(WAYS);
  end

  // ---- request fields --------------------------------------------------------
  logic [PN_W-1:0]   pn_q;
  logic [SET_W-1:0]  set_q;
  logic [TAG_W-1:0]  tag_q;
  logic [PN_W-1:0]   req_pn;
  logic [SET_W-1:0]  req_set;

  always_comb begin
    req_pn  = req.addr[PAGE_OFF_W +: PN_W];
    req_set = SET_W'(req_pn) & act_mask_q;
    pn_q    = req_q.addr[PAGE_OFF_W +: PN_W];
    set_q   = set_r;
    tag_q   = pn_q;
  end

  function automatic logic [STACK_FRAME_W-1:0] frame_of(logic [SET_W-1:0] s,
                                                        logic [WIDX_W-1:0] w);
    return STACK_FRAME_W'(act_base_q + (STACK_FRAME_W+1)'(s) * (STACK_FRAME_W+1)'(WAYS)
                          + (STACK_FRAME_W+1)'(w));
  endfunction

  // ---- tag match -------------------------------------------------------------
  logic              hit;
  logic [WIDX_W-1:0] hway;
  logic [WAYS-1:0]   match;
  always_comb begin
    hit  = 1'b0;
    hway = '0;
    for (int w = WAYS - 1; w >= 0; w--) begin
      match[w] = meta_q.valid[w] && meta_q.tag[w] == tag_q;
      if (match[w]) begin
        hit  = 1'b1;
        hway = WIDX_W'(w);
      end
    end
  end

  // ---- replacement decision (sampled accesses) -------------------------------
  set_meta_t         dec_meta;
  logic              dec_repl, dec_ev_valid, dec_ev_dirty;
  logic [TAG_W-1:0]  dec_ev_tag;
  logic [WIDX_W-1:0] dec_way;
  always_comb begin
    logic              cm, cfree, wfree, sat;
    logic [CIDX_W-1:0] ci, cfree_i, cmin_i;
    logic [WIDX_W-1:0] wfree_i, wmin_i, vw;
    logic [CNT_W-1:0]  old_cnt;

    dec_meta     = meta_q;
    dec_repl     = 1'b0;
    dec_ev_valid = 1'b0;
    dec_ev_dirty = 1'b0;
    dec_ev_tag   = '0;
    dec_way      = '0;
    cm = 1'b0; cfree = 1'b0; wfree = 1'b0;
    ci = '0; cfree_i = '0; cmin_i = '0; wfree_i = '0; wmin_i = '0; vw = '0;
    old_cnt = '0;

    if (hit) begin
      if (dec_meta.cnt[hway] != CNT_MAX) dec_meta.cnt[hway] = dec_meta.cnt[hway] + 1'b1;
    end else begin
      // candidate slot of this page: existing, else first free, else lowest count
      for (int c = NCAND - 1; c >= 0; c--) begin
        if (meta_q.cvalid[c] && meta_q.ctag[c] == tag_q) begin
          cm = 1'b1;
          ci = CIDX_W'(c);
        end
        if (!meta_q.cvalid[c]) begin
          cfree   = 1'b1;
          cfree_i = CIDX_W'(c);
        end
      end
      for (int c = NCAND - 1; c >= 0; c--)
        if (meta_q.ccnt[c] <= meta_q.ccnt[cmin_i]) cmin_i = CIDX_W'(c);
      if (!cm) begin
        ci = cfree ? cfree_i : cmin_i;
        dec_meta.cvalid[ci] = 1'b1;
        dec_meta.ctag[ci]   = tag_q;
        dec_meta.ccnt[ci]   = CNT_W'(1);
      end else if (dec_meta.ccnt[ci] != CNT_MAX) begin
        dec_meta.ccnt[ci] = dec_meta.ccnt[ci] + 1'b1;
      end
      // victim way: first empty, else lowest counter
      for (int w = WAYS - 1; w >= 0; w--) begin
        if (!meta_q.valid[w]) begin
          wfree   = 1'b1;
          wfree_i = WIDX_W'(w);
        end
      end
      for (int w = WAYS - 1; w >= 0; w--)
        if (meta_q.cnt[w] <= meta_q.cnt[wmin_i]) wmin_i = WIDX_W'(w);
      vw = wfree ? wfree_i : wmin_i;
      if (wfree || dec_meta.ccnt[ci] > meta_q.cnt[vw]) begin
        dec_repl     = 1'b1;
        dec_way      = vw;
        dec_ev_valid = meta_q.valid[vw];
        dec_ev_dirty = meta_q.valid[vw] && meta_q.dirty[vw];
        dec_ev_tag   = meta_q.tag[vw];
        old_cnt      = meta_q.cnt[vw];
        dec_meta.valid[vw] = 1'b1;
        dec_meta.dirty[vw] = 1'b0;
        dec_meta.tag[vw]   = tag_q;
        dec_meta.cnt[vw]   = dec_meta.ccnt[ci];
        dec_meta.cvalid[ci] = meta_q.valid[vw];
        dec_meta.ctag[ci]   = meta_q.tag[vw];
        dec_meta.ccnt[ci]   = old_cnt;
      end
    end
    // counter aging: halve the whole set once any counter saturates
    sat = 1'b0;
    for (int w = 0; w < WAYS; w++)  if (dec_meta.cnt[w] == CNT_MAX)  sat = 1'b1;
    for (int c = 0; c < NCAND; c++) if (dec_meta.ccnt[c] == CNT_MAX) sat = 1'b1;
    if (sat) begin
      for (int w = 0; w < WAYS; w++)  dec_meta.cnt[w]  = dec_meta.cnt[w] >> 1;
      for (int c = 0; c < NCAND; c++) dec_meta.ccnt[c] = dec_meta.ccnt[c] >> 1;
    end
  end

  // ---- command outputs ---------------------------------------------------------
  always_comb begin
    req_ready = (state == S_IDLE) && (mem_frames == act_b_q);
    init_done = !(state inside {S_INIT, S_RS_RD, S_RS_WAY, S_RS_CLR}) && (mem_frames == act_b_q);

    stk_valid     = 1'b0;
    stk_cmd.kind  = K_DATA;
    stk_cmd.write = req_q.write;
    stk_cmd.page  = 1'b0;
    stk_cmd.frame = frame_of(set_q, hway);
    stk_cmd.blk   = req_q.addr[BLK_OFF_W +: BLK_IDX_W];
    stk_cmd.id    = req_q.id;

    off_valid     = 1'b0;
    off_cmd.kind  = K_DATA;
    off_cmd.write = req_q.write;
    off_cmd.page  = 1'b0;
    off_cmd.pn    = pn_q;
    off_cmd.blk   = req_q.addr[BLK_OFF_W +: BLK_IDX_W];
    off_cmd.id    = req_q.id;

    tb_valid      = 1'b0;
    tb_rec.pn     = pn_q;
    tb_rec.cached = 1'b1;
    tb_rec.way    = WAY_W'(rway_q);

    unique case (state)
      S_LOOK: begin
        stk_valid = hit;
        off_valid = !hit;
      end
      S_MRD, S_MWR: begin
        stk_valid     = 1'b1;
        stk_cmd.kind  = K_META;
        stk_cmd.write = (state == S_MWR);
        stk_cmd.frame = frame_of(set_q, '0);
        stk_cmd.blk   = '0;
        stk_cmd.id    = '0;
      end
      S_TB_EV: begin
        tb_valid      = 1'b1;
        tb_rec.pn     = ev_tag_q;
        tb_rec.cached = 1'b0;
      end
      S_TB_IN: tb_valid = 1'b1;
      S_EV_RD, S_FL_WR: begin
        stk_valid     = 1'b1;
        stk_cmd.kind  = K_REPL;
        stk_cmd.write = (state == S_FL_WR);
        stk_cmd.page  = 1'b1;
        stk_cmd.frame = frame_of(set_q, rway_q);
        stk_cmd.blk   = '0;
        stk_cmd.id    = '0;
      end
      S_EV_WR, S_FL_RD: begin
        off_valid     = 1'b1;
        off_cmd.kind  = K_REPL;
        off_cmd.write = (state == S_EV_WR);
        off_cmd.page  = 1'b1;
        off_cmd.pn    = (state == S_EV_WR) ? ev_tag_q : pn_q;
        off_cmd.blk   = '0;
        off_cmd.id    = '0;
      end
      default: ;
    endcase
  end

  always_comb begin
    evt.hit       = (state == S_LOOK) && hit && stk_ready;
    evt.miss      = (state == S_LOOK) && !hit && off_ready;
    evt.sampled   = (state == S_MRD) && stk_ready;
    evt.replace   = (state == S_TB_IN) && tb_ready;
    evt.writeback = (state == S_EV_WR) && off_ready;
    evt.tb_stall  = tb_valid && !tb_ready;
  end

  // ---- metadata store ------------------------------------------------------------
  always_ff @(posedge clk) begin
    if (state == S_INIT)
      meta[init_idx] <= '0;
    else if (state == S_RS_CLR)
      meta[set_r] <= '0;
    else if (state == S_UPD)
      meta[set_q] <= meta_q;
  end

  // ---- control ---------------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_INIT;
      init_idx   <= '0;
      req_q      <= '0;
      meta_q     <= '0;
      smp_q      <= 1'b0;
      lfsr       <= 16'hACE1;
      ev_valid_q <= 1'b0;
      ev_dirty_q <= 1'b0;
      ev_tag_q   <= '0;
      do_repl_q  <= 1'b0;
      rway_q     <= '0;
      rs_mode    <= 1'b0;
      set_r      <= '0;
      act_b_q    <= '0;
      act_mask_q <= '0;
      act_base_q <= '0;
      act_on_q   <= 1'b0;
    end else begin
      unique case (state)
        S_INIT: begin
          init_idx <= init_idx + 1'b1;
          if (int'(init_idx) == SETS - 1) begin
            act_b_q    <= mem_frames;
            act_mask_q <= new_mask;
            act_base_q <= new_base;
            act_on_q   <= new_on;
            state      <= S_IDLE;
          end
        end
        S_IDLE: if (mem_frames != act_b_q) begin
          // repartition: write back and clear the active sets first
          set_r <= '0;
          state <= act_on_q ? S_RS_RD : S_RS_CLR;
        end else if (req_valid) begin
          req_q  <= req;
          set_r  <= req_set;
          meta_q <= meta[req_set];
          smp_q  <= act_on_q && ({1'b0, lfsr} < SAMPLE_TH);
          lfsr   <= {lfsr[14:0], lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10]};
          state  <= S_LOOK;
        end
        S_LOOK: if ((hit && stk_ready) || (!hit && off_ready)) begin
          if (hit && req_q.write) meta_q.dirty[hway] <= 1'b1;
          state <= smp_q ? S_MRD : S_UPD;
        end
        S_MRD: if (stk_ready) begin
          meta_q     <= dec_meta;
          do_repl_q  <= dec_repl;
          rway_q     <= dec_way;
          ev_valid_q <= dec_ev_valid;
          ev_dirty_q <= dec_ev_dirty;
          ev_tag_q   <= dec_ev_tag;
          state      <= S_MWR;
        end
        S_MWR: if (stk_ready)
          state <= !do_repl_q ? S_UPD : (ev_valid_q ? S_TB_EV : S_TB_IN);
        S_TB_EV: if (tb_ready) state <= S_TB_IN;
        S_TB_IN: if (tb_ready) state <= ev_dirty_q ? S_EV_RD : S_FL_RD;
        S_EV_RD: if (stk_ready) state <= S_EV_WR;
        S_EV_WR: if (off_ready) state <= rs_mode ? S_RS_WAY : S_FL_RD;
        S_FL_RD: if (off_ready) state <= S_FL_WR;
        S_FL_WR: if (stk_ready) state <= S_UPD;
        S_UPD:   state <= S_IDLE;
        // ---- resize sweep: one set at a time -------------------------------
        S_RS_RD: begin
          meta_q  <= meta[set_r];
          rway_q  <= '0;
          rs_mode <= 1'b1;
          state   <= S_RS_WAY;
        end
        S_RS_WAY: begin
          // write back the next dirty way, if any; else clear the set
          logic              found;
          logic [WIDX_W-1:0] fw;
          found = 1'b0;
          fw    = '0;
          for (int w = WAYS - 1; w >= 0; w--)
            if (meta_q.valid[w] && meta_q.dirty[w]) begin
              found = 1'b1;
              fw    = WIDX_W'(w);
            end
          if (found) begin
            rway_q          <= fw;
            ev_tag_q        <= meta_q.tag[fw];
            meta_q.dirty[fw] <= 1'b0;
            state           <= S_EV_RD;
          end else begin
            state <= S_RS_CLR;
          end
        end
        S_RS_CLR: begin
          rs_mode <= 1'b0;
          if (!act_on_q || set_r == act_mask_q) begin
            act_b_q    <= mem_frames;
            act_mask_q <= new_mask;
            act_base_q <= new_base;
            act_on_q   <= new_on;
            state      <= S_IDLE;
          end else begin
            set_r <= set_r + 1'b1;
            state <= S_RS_RD;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A page is cached in at most one way of its set.
  a_unique_way: assert property (@(posedge clk) disable iff (!rst_n)
    state == S_LOOK |-> $countones(match) <= 1);
  // Set index and tag are bit fields of the page number.
  initial assert (SETS == (1 << SET_W) && CACHE_FRAMES % WAYS == 0 && CACHE_FRAMES <= STACKED_FRAMES && STACKED_FRAMES <= STACK_FRAMES);
  // Every cache frame in use lies above the boundary.
  a_above_boundary: assert property (@(posedge clk) disable iff (!rst_n)
    (stk_valid && stk_cmd.kind != K_DATA) |-> {1'b0, stk_cmd.frame} >= act_b_q);

endmodule
