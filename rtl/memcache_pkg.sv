// memcache_pkg: types and constants shared by the MemCache die-stacked DRAM
// front end.
//
// The die-stacked DRAM (4 GB) is seen as 2^20 frames of 4 KB. The low frames,
// up to a programmable boundary, are plain main memory (the "memory portion");
// the top frames form a hardware-managed page-based cache (the "cache
// portion") in front of the off-chip DRAM. Physical addresses below 4 GB name
// die-stacked memory frames; addresses from 4 GB up name off-chip memory.
//
// Page and frame size (4 KB), stacked capacity (4 GB) and channel count (4)
// follow the evaluated system. The physical address width, the request id
// width and the command encodings are this design's own choices.
package memcache_pkg;

  // ---- address geometry ----------------------------------------------------
  localparam int unsigned PA_W          = 40;               // physical address bits (1 TB)
  localparam int unsigned PAGE_OFF_W    = 12;               // 4 KB pages and frames
  localparam int unsigned BLK_OFF_W     = 6;                // 64 B blocks
  localparam int unsigned BLK_IDX_W     = PAGE_OFF_W - BLK_OFF_W;  // 64 blocks per page
  localparam int unsigned PN_W          = PA_W - PAGE_OFF_W;       // physical page number
  localparam int unsigned STACK_FRAME_W = 20;               // 4 GB / 4 KB frames
  localparam int unsigned STACK_FRAMES  = 1 << STACK_FRAME_W;
  localparam int unsigned NUM_STACK_CH  = 4;                // die-stacked channels
  localparam int unsigned CH_W          = 2;
  localparam int unsigned ID_W          = 8;                // request tag bits
  localparam int unsigned WAY_W         = 2;                // way field of a remap record

  // ---- traffic classes (the breakdown used for die-stacked traffic) --------
  typedef enum logic [1:0] {
    K_DATA = 2'd0,  // demand read/write of one 64 B block
    K_META = 2'd1,  // cache metadata (tags, counters) read or write
    K_REPL = 2'd2   // whole-page move for a cache replacement
  } cmd_kind_e;

  // A miss of the last-level SRAM cache (read) or one of its write-backs.
  typedef struct packed {
    logic [PA_W-1:0] addr;
    logic            write;
    logic [ID_W-1:0] id;
  } llsc_req_t;

  // Command to one die-stacked DRAM channel. page=1 moves the whole 4 KB frame,
  // otherwise block blk of the frame is accessed.
  typedef struct packed {
    cmd_kind_e                kind;
    logic                     write;
    logic                     page;
    logic [STACK_FRAME_W-1:0] frame;
    logic [BLK_IDX_W-1:0]     blk;
    logic [ID_W-1:0]          id;
  } stk_cmd_t;

  // Command to the off-chip DRAM channel, addressed by physical page number.
  typedef struct packed {
    cmd_kind_e            kind;
    logic                 write;
    logic                 page;
    logic [PN_W-1:0]      pn;
    logic [BLK_IDX_W-1:0] blk;
    logic [ID_W-1:0]      id;
  } off_cmd_t;

  // One Tag Buffer record: page pn is now cached in way `way` (cached=1) or
  // has just left the DRAM cache (cached=0).
  typedef struct packed {
    logic [PN_W-1:0]  pn;
    logic             cached;
    logic [WAY_W-1:0] way;
  } remap_t;

  // One-cycle event strobes of the cache-portion controller.
  typedef struct packed {
    logic hit;        // demand access found its page in the cache portion
    logic miss;       // demand access sent off-chip
    logic sampled;    // access chosen to update replacement metadata
    logic replace;    // a page was brought into the cache portion
    logic writeback;  // a dirty victim page was written off-chip
    logic tb_stall;   // waiting on a full Tag Buffer set or a flush
  } cache_evt_t;

endpackage
