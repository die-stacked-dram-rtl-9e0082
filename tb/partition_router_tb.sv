// partition_router_tb: self-checking test of the memory/cache partition router.
//
// Drives random requests into the three address ranges (memory portion, cache
// frames, off-chip memory) and near the boundary, with random ready from both
// destinations, and checks every output against a model computed from the
// address alone. Then reprograms the boundary (MemCache-D style), including a
// value above the cache start that must be clamped, and repeats the checks.
`timescale 1ns/1ps
module partition_router_tb;
  import memcache_pkg::*;

  localparam int unsigned DEF_FRAMES = 786432;
  localparam int unsigned MAX_FRAMES = 786432;

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  logic [STACK_FRAME_W:0] cfg_mem_frames = '0, mem_frames;
  logic req_valid = 0, req_ready;
  llsc_req_t req = '0;
  logic mem_valid, mem_ready = 0;
  stk_cmd_t mem_cmd;
  logic cache_valid, cache_ready = 0;
  llsc_req_t cache_req;
  logic bad_valid;

  int checks = 0, failures = 0;

  partition_router dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic logic [PA_W-1:0] pick_addr(int unsigned frames);
    logic [PA_W-1:0] a;
    int unsigned r = $urandom_range(0, 5);
    logic [PA_W-1:0] b = PA_W'(frames) << 12;
    case (r)
      0: a = PA_W'($urandom) % b;                                    // memory portion
      1: a = b - PA_W'($urandom_range(1, 64));                       // just below boundary
      2: a = b + PA_W'($urandom_range(0, 64));                       // cache frames
      3: a = (PA_W'(1) << 32) + {$urandom, $urandom} % (PA_W'(1) << 39); // off-chip
      4: a = (PA_W'(1) << 32) - 1;                                   // last stacked byte
      default: a = (PA_W'(1) << 32);                                 // first off-chip byte
    endcase
    return a;
  endfunction

  task automatic run_random(int n, int unsigned frames);
    for (int i = 0; i < n; i++) begin
      bit exp_mem, exp_off, exp_bad, exp_rdy;
      @(negedge clk);
      req.addr    = pick_addr(frames);
      req.write   = 1'($urandom);
      req.id      = 8'($urandom);
      req_valid   = 1;
      mem_ready   = 1'($urandom);
      cache_ready = 1'($urandom);
      #1;
      exp_mem = req.addr < (PA_W'(frames) << 12);
      exp_off = req.addr >= (PA_W'(1) << 32);
      exp_bad = !exp_mem && !exp_off;
      exp_rdy = exp_mem ? mem_ready : (exp_off ? cache_ready : 1'b1);
      check(mem_valid == exp_mem, $sformatf("mem_valid addr=%h", req.addr));
      check(cache_valid == exp_off, $sformatf("cache_valid addr=%h", req.addr));
      check(bad_valid == exp_bad, $sformatf("bad_valid addr=%h", req.addr));
      check(req_ready == exp_rdy, $sformatf("req_ready addr=%h", req.addr));
      if (exp_mem) begin
        check(mem_cmd.frame == req.addr[31:12] && mem_cmd.blk == req.addr[11:6] &&
              mem_cmd.id == req.id && mem_cmd.write == req.write &&
              mem_cmd.kind == K_DATA && !mem_cmd.page, "mem_cmd fields");
      end
      if (exp_off) check(cache_req == req, "cache_req passes unchanged");
    end
    @(negedge clk);
    req_valid = 0;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(mem_frames == (STACK_FRAME_W+1)'(DEF_FRAMES), "reset boundary is 3 GB");
    run_random(3000, DEF_FRAMES);

    // reprogram to 1 GB of memory
    @(negedge clk);
    cfg_we = 1; cfg_mem_frames = 21'd262144;
    @(negedge clk);
    cfg_we = 0;
    check(mem_frames == 21'd262144, "boundary rewritten to 1 GB");
    run_random(2000, 262144);

    // an over-large boundary is clamped to the cache start
    @(negedge clk);
    cfg_we = 1; cfg_mem_frames = 21'd1048576;
    @(negedge clk);
    cfg_we = 0;
    check(mem_frames == (STACK_FRAME_W+1)'(MAX_FRAMES), "boundary clamped");
    run_random(2000, MAX_FRAMES);

    // zero memory frames: everything below 4 GB is cache frames
    @(negedge clk);
    cfg_we = 1; cfg_mem_frames = '0;
    @(negedge clk);
    cfg_we = 0;
    run_random(1000, 0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
