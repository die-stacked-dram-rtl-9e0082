// memcache_top_stacksize_tb: end-to-end test of smaller die-stacked DRAMs
// (2 GB and 1 GB) with the memory/cache splits evaluated for them: full
// cache, 25%, 50% and 75% memory, and full memory.
//
// Four copies of the design, each built for its stack size (STACKED_FRAMES
// and CACHE_FRAMES set to the stack's frames, other parameters at their
// defaults), run side by side, each driven by its own memcache_top_harness.
// Each starts with 75% of its stack as memory, is repartitioned at run time
// after a third of its requests and returns to 75% after two thirds:
//  - h2a: 2 GB stack, 75% -> 50% memory (1 GB cache, 65536 sets);
//  - h2b: 2 GB stack, 75% -> full cache (2 GB, 131072 sets);
//  - h1a: 1 GB stack, 75% -> 25% memory (768 MB free; the cache takes 512 MB,
//         32768 sets, the largest power-of-two set count);
//  - h1b: 1 GB stack, 75% -> full memory (no cache).
// Every harness applies its full scoreboard and requires every mechanism
// over the whole run. The test ends when all four are done and reports the
// sum of their checks and failures. Each harness has its own watchdog; this
// module adds one more.
`timescale 1ns/1ps
module memcache_top_stacksize_tb;
  localparam int unsigned NREQ = 40000, WD = 6000000;
  localparam int unsigned F2 = 524288, F1 = 262144;   // 2 GB and 1 GB in 4 KB frames

  memcache_top_harness #(.STACKED(F2), .MEM_FRAMES(F2 / 4 * 3), .CACHE_FRAMES(F2),
    .SAMPLE_PCT(10), .TB_ENTRIES(1024), .TB_WAYS(8), .NREQ(NREQ), .WATCHDOG(WD),
    .OWN_FINISH(0), .ALT_FRAMES(F2 / 2)) h2a ();
  memcache_top_harness #(.STACKED(F2), .MEM_FRAMES(F2 / 4 * 3), .CACHE_FRAMES(F2),
    .SAMPLE_PCT(10), .TB_ENTRIES(1024), .TB_WAYS(8), .NREQ(NREQ), .WATCHDOG(WD),
    .OWN_FINISH(0), .ALT_FRAMES(0)) h2b ();
  memcache_top_harness #(.STACKED(F1), .MEM_FRAMES(F1 / 4 * 3), .CACHE_FRAMES(F1),
    .SAMPLE_PCT(10), .TB_ENTRIES(1024), .TB_WAYS(8), .NREQ(NREQ), .WATCHDOG(WD),
    .OWN_FINISH(0), .ALT_FRAMES(F1 / 4)) h1a ();
  memcache_top_harness #(.STACKED(F1), .MEM_FRAMES(F1 / 4 * 3), .CACHE_FRAMES(F1),
    .SAMPLE_PCT(10), .TB_ENTRIES(1024), .TB_WAYS(8), .NREQ(NREQ), .WATCHDOG(WD),
    .OWN_FINISH(0), .ALT_FRAMES(F1)) h1b ();

  int checks, failures;

  function automatic int sum_checks();
    return h2a.checks + h2b.checks + h1a.checks + h1b.checks;
  endfunction
  function automatic int sum_failures();
    return h2a.failures + h2b.failures + h1a.failures + h1b.failures;
  endfunction

  initial begin
    #100ms;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", sum_checks(), sum_failures() + 1);
    $finish;
  end

  initial begin
    wait (h2a.done && h2b.done && h1a.done && h1b.done);
    checks   = sum_checks();
    failures = sum_failures();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
