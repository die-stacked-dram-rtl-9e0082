// partition_router: splits last-level SRAM cache misses between the memory
// portion and the cache portion of the die-stacked DRAM.
//
// The register mem_frames holds how many 4 KB die-stacked frames, counted from
// frame 0, are main memory. A request whose physical address lies below
// mem_frames * 4 KB is turned directly into a die-stacked data command for
// that frame: no tag is checked. A request at or above 4 GB belongs to
// off-chip memory and is passed to the cache-portion controller, which checks
// its tags. Addresses between the boundary and 4 GB are the cache frames
// themselves, which software never maps; such a request is dropped and
// reported on bad_valid for one cycle.
//
// The boundary compare follows the paper: the controller compares the
// request's physical address with that of the last frame devoted to memory.
// mem_frames resets to MEM_FRAMES_DEFAULT (3 GB, the fixed MemCache-S split
// chosen at boot) and may be rewritten through cfg_we (the MemCache-D
// instruction that announces a new split). Writes above MAX_MEM_FRAMES are
// clamped (the top allows the whole stacked DRAM, since its cache portion
// resizes to the frames left above the boundary); moving the data of memory
// frames when the split changes is left to software. Placing off-chip memory
// at 4 GB and up is this design's choice.
//
// Timing: routing is combinational; req_ready is the ready of the chosen
// output, so one request passes per cycle. A boundary write takes effect on
// the next cycle.
module partition_router
  import memcache_pkg::*;
#(
  parameter int unsigned MEM_FRAMES_DEFAULT = 786432,  // 3 GB of 4 KB frames
  parameter int unsigned MAX_MEM_FRAMES     = 786432   // frames below the cache portion
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // partition programming
  input  logic                   cfg_we,
  input  logic [STACK_FRAME_W:0] cfg_mem_frames,
  output logic [STACK_FRAME_W:0] mem_frames,
  // requests from the last-level SRAM cache
  input  logic                   req_valid,
  output logic                   req_ready,
  input  llsc_req_t              req,
  // memory-portion path: die-stacked data command, no tag check
  output logic                   mem_valid,
  input  logic                   mem_ready,
  output stk_cmd_t               mem_cmd,
  // cache-portion path
  output logic                   cache_valid,
  input  logic                   cache_ready,
  output llsc_req_t              cache_req,
  // request into the cache frames' own address range
  output logic                   bad_valid
);

  localparam logic [PA_W-1:0] STACK_BYTES = PA_W'(STACK_FRAMES) << PAGE_OFF_W;

  logic [PA_W-1:0] boundary;
  logic            in_mem, in_off;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mem_frames <= (STACK_FRAME_W+1)'(MEM_FRAMES_DEFAULT);
    end else if (cfg_we) begin
      if (cfg_mem_frames > (STACK_FRAME_W+1)'(MAX_MEM_FRAMES))
        mem_frames <= (STACK_FRAME_W+1)'(MAX_MEM_FRAMES);
      else
        mem_frames <= cfg_mem_frames;
    end
  end

  always_comb begin
    boundary = PA_W'(mem_frames) << PAGE_OFF_W;
    in_mem   = req.addr < boundary;
    in_off   = req.addr >= STACK_BYTES;

    mem_valid     = req_valid && in_mem;
    mem_cmd.kind  = K_DATA;
    mem_cmd.write = req.write;
    mem_cmd.page  = 1'b0;
    mem_cmd.frame = req.addr[PAGE_OFF_W +: STACK_FRAME_W];
    mem_cmd.blk   = req.addr[BLK_OFF_W +: BLK_IDX_W];
    mem_cmd.id    = req.id;

    cache_valid = req_valid && in_off;
    cache_req   = req;

    bad_valid = req_valid && !in_mem && !in_off;

    if (in_mem)      req_ready = mem_ready;
    else if (in_off) req_ready = cache_ready;
    else             req_ready = 1'b1;
  end

  // Exactly one destination per request.
  a_one_dest: assert property (@(posedge clk) disable iff (!rst_n)
    req_valid |-> $onehot({mem_valid, cache_valid, bad_valid}));
  // The memory portion never reaches into the cache frames.
  a_bound: assert property (@(posedge clk) disable iff (!rst_n)
    mem_frames <= (STACK_FRAME_W+1)'(MAX_MEM_FRAMES));

endmodule
