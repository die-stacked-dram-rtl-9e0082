// memcache_top: MemCache front end of a die-stacked DRAM, used partly as main
// memory and partly as a hardware-managed page cache.
//
// Every miss or write-back of the last-level SRAM cache enters on req. The
// partition router compares its physical address with the memory/cache
// boundary: a page of the memory portion (hot pages placed there by software)
// goes straight to its die-stacked frame with no tag check; a page of off-chip
// memory goes to the cache-portion controller, which serves it from a cached
// frame on a hit or from off-chip DRAM on a miss, and occasionally (sampled)
// updates replacement metadata and swaps pages in lazily. Page remaps are
// logged in the Tag Buffer, whose flush interrupt and drain port go to the
// host software that updates the page table. Die-stacked commands of both
// paths meet in the channel arbiter, which spreads frames over the four
// channels at 4 KB interleaving.
//
// Default sizes are the evaluated MemCache-S system: 4 GB die-stacked DRAM in
// 4 channels, 3 GB memory portion and 1 GB cache portion (4-way, page-based),
// 10% sampling, 1K-entry 8-way Tag Buffer flushed above 70% occupancy. The
// boundary can be reprogrammed (cfg_we) anywhere from 0 to 4 GB, as a
// per-application split (MemCache-D) or a boot-time one: the cache portion
// then takes the frames above the boundary, rounded down to a power-of-two
// number of sets and at most CACHE_FRAMES (by default the whole 4 GB), after
// writing back its dirty pages (init_done is low meanwhile). Software must not
// use the new memory frames before init_done is high again.
//
// STACKED_FRAMES sets the die-stacked capacity (at most 4 GB, the address
// window below off-chip memory); a smaller stack leaves the rest of that
// window unmapped, and CACHE_FRAMES should then not exceed it.
//
// Outside this block: the DRAM channel controllers and devices (they consume
// stk_* and off_* commands and return data to the requester by id), the cores
// and SRAM caches, and the software that profiles hot pages, places them and
// drains the Tag Buffer.
//
// Timing: a memory-portion request passes to its channel in the cycle it is
// offered; a cache-portion request follows the controller's sequence (see
// banshee_cache_ctrl). After reset the cache metadata is cleared for
// CACHE_FRAMES/WAYS cycles (262144 at the default size), during which only
// memory-portion requests pass.
module memcache_top
  import memcache_pkg::*;
#(
  parameter int unsigned STACKED_FRAMES = 1048576, // 4 GB die-stacked DRAM
  parameter int unsigned MEM_FRAMES    = 786432,  // 3 GB memory portion
  parameter int unsigned CACHE_FRAMES  = 1048576, // largest cache portion (4 GB)
  parameter int unsigned WAYS          = 4,
  parameter int unsigned NCAND         = 4,
  parameter int unsigned CNT_W         = 5,
  parameter int unsigned SAMPLE_PCT    = 10,
  parameter int unsigned TB_ENTRIES    = 1024,
  parameter int unsigned TB_WAYS       = 8,
  parameter int unsigned TB_THRESH_PCT = 70
) (
  input  logic                         clk,
  input  logic                         rst_n,
  output logic                         init_done,
  // partition programming
  input  logic                         cfg_we,
  input  logic [STACK_FRAME_W:0]       cfg_mem_frames,
  output logic [STACK_FRAME_W:0]       mem_frames,
  // last-level SRAM cache misses and write-backs
  input  logic                         req_valid,
  output logic                         req_ready,
  input  llsc_req_t                    req,
  output logic                         bad_valid,
  // die-stacked DRAM channels
  output logic                         stk_valid [NUM_STACK_CH],
  input  logic                         stk_ready [NUM_STACK_CH],
  output stk_cmd_t                     stk_cmd   [NUM_STACK_CH],
  // off-chip DRAM channel
  output logic                         off_valid,
  input  logic                         off_ready,
  output off_cmd_t                     off_cmd,
  // Tag Buffer flush (host software)
  output logic                         flush_irq,
  input  logic                         drain_en,
  output logic                         drain_valid,
  input  logic                         drain_ready,
  output remap_t                       drain_rec,
  output logic [$clog2(TB_ENTRIES):0]  tb_occupancy,
  // cache-portion events
  output cache_evt_t                   evt
);

  logic      mem_valid, mem_ready;
  stk_cmd_t  mem_cmd;
  logic      c_valid, c_ready;
  llsc_req_t c_req;
  logic      cs_valid, cs_ready;
  stk_cmd_t  cs_cmd;
  logic      tb_valid, tb_ready;
  remap_t    tb_rec;

  logic      src_valid [2];
  logic      src_ready [2];
  stk_cmd_t  src_cmd   [2];

  partition_router #(
    .MEM_FRAMES_DEFAULT (MEM_FRAMES),
    .MAX_MEM_FRAMES     (STACKED_FRAMES)
  ) u_router (
    .clk, .rst_n,
    .cfg_we, .cfg_mem_frames, .mem_frames,
    .req_valid, .req_ready, .req,
    .mem_valid, .mem_ready, .mem_cmd,
    .cache_valid (c_valid), .cache_ready (c_ready), .cache_req (c_req),
    .bad_valid
  );

  banshee_cache_ctrl #(
    .STACKED_FRAMES (STACKED_FRAMES),
    .CACHE_FRAMES (CACHE_FRAMES),
    .WAYS         (WAYS),
    .NCAND        (NCAND),
    .CNT_W        (CNT_W),
    .SAMPLE_PCT   (SAMPLE_PCT)
  ) u_cache (
    .clk, .rst_n, .init_done, .mem_frames,
    .req_valid (c_valid), .req_ready (c_ready), .req (c_req),
    .stk_valid (cs_valid), .stk_ready (cs_ready), .stk_cmd (cs_cmd),
    .off_valid, .off_ready, .off_cmd,
    .tb_valid, .tb_ready, .tb_rec,
    .evt
  );

  tag_buffer #(
    .ENTRIES    (TB_ENTRIES),
    .WAYS       (TB_WAYS),
    .THRESH_PCT (TB_THRESH_PCT)
  ) u_tag_buffer (
    .clk, .rst_n,
    .ins_valid (tb_valid), .ins_ready (tb_ready), .ins (tb_rec),
    .flush_irq, .drain_en, .drain_valid, .drain_ready, .drain_rec,
    .occupancy (tb_occupancy)
  );

  // source 0: memory portion, source 1: cache portion
  always_comb begin
    src_valid[0] = mem_valid;
    src_cmd[0]   = mem_cmd;
    src_valid[1] = cs_valid;
    src_cmd[1]   = cs_cmd;
    mem_ready    = src_ready[0];
    cs_ready     = src_ready[1];
  end

  stacked_chan_arb #(
    .NUM_SRC (2),
    .NUM_CH  (NUM_STACK_CH)
  ) u_arb (
    .clk, .rst_n,
    .src_valid, .src_ready, .src_cmd,
    .ch_valid (stk_valid), .ch_ready (stk_ready), .ch_cmd (stk_cmd)
  );

  initial assert (MEM_FRAMES <= STACKED_FRAMES && STACKED_FRAMES <= STACK_FRAMES);

endmodule
